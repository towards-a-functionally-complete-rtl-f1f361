// tb_ntt -- streams several polynomials through the forward NTT, back to back
// and with random gaps, and compares every output word with the direct O(N^2)
// definition of the negacyclic transform in bit-reversed order.  Also checks
// psi^N = -1 and that an unbroken input gives an unbroken output of N/T words.
module tb_ntt;
  import tb_ref_pkg::*;
  localparam int N = 64, T = 4, W = N / T, NPOLY = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [T-1:0][63:0] in_data, out_data;
  u64 expect_q [$];
  int checks = 0, failures = 0, first_in = -1, first_out = -1, cyc = 0, outw = 0, last_out = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  ntt #(.N(N), .T(T)) dut (.*);
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    if (first_out < 0) first_out = cyc;
    last_out = cyc; outw++;
    for (int t = 0; t < T; t++) begin
      checks++;
      if (out_data[t] !== expect_q.pop_front()) begin
        failures++;
        if (failures < 5) $display("FAIL word %0d lane %0d", outw, t);
      end
    end
  end
  initial begin
    u64 a[], o[];
    checks++; if (rpow(rpsi(N), N) !== RQ - 1) failures++;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < NPOLY; p++) begin
      a = new[N];
      foreach (a[i]) a[i] = rand64();
      ntt_direct(N, a, o);
      foreach (o[i]) expect_q.push_back(o[i]);
      for (int w = 0; w < W; w++) begin
        @(negedge clk);
        if (p >= 3) begin in_valid = 0; repeat ($urandom_range(0, 3)) @(negedge clk); end
        in_valid = 1;
        if (first_in < 0) first_in = cyc;
        for (int t = 0; t < T; t++) in_data[t] = a[w * T + t];
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3 * N) @(negedge clk);
    checks++; if (expect_q.size() != 0) failures++;
    // first polynomial streamed without gaps: latency = sum of SPAN/T over the
    // buffered stages (N/T - 1) plus one register per stage and the sampling offset
    checks++;
    if (first_out - first_in != (W - 1) + $clog2(W) + 2) begin
      failures++; $display("latency %0d", first_out - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
