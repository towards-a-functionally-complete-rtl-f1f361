// tb_intt -- round trip: the direct negacyclic transform of random polynomials,
// in bit-reversed order, is fed to the inverse NTT with rescaling, which must
// return the original coefficients in natural order.  A second instance without
// rescaling must return them multiplied by N.
module tb_intt;
  import tb_ref_pkg::*;
  localparam int N = 32, T = 2, W = N / T, NPOLY = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, v2;
  logic [T-1:0][63:0] in_data, out_data, d2;
  u64 expect_q [$], expect2_q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  intt #(.N(N), .T(T), .RESCALE(1'b1)) dut (.*);
  intt #(.N(N), .T(T), .RESCALE(1'b0)) dut2 (.clk, .rst_n, .in_valid, .in_data, .out_valid(v2), .out_data(d2));
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int t = 0; t < T; t++) begin
      checks++; if (out_data[t] !== expect_q.pop_front()) failures++;
    end
  end
  always @(posedge clk) if (rst_n && v2) begin
    for (int t = 0; t < T; t++) begin
      checks++; if (d2[t] !== expect2_q.pop_front()) failures++;
    end
  end
  initial begin
    u64 a[], o[];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < NPOLY; p++) begin
      a = new[N];
      foreach (a[i]) begin
        a[i] = rand64(); expect_q.push_back(a[i]); expect2_q.push_back(rmul(a[i], u64'(N)));
      end
      ntt_direct(N, a, o);
      for (int w = 0; w < W; w++) begin
        @(negedge clk);
        if (p == 2) begin in_valid = 0; repeat ($urandom_range(0, 2)) @(negedge clk); end
        in_valid = 1;
        for (int t = 0; t < T; t++) in_data[t] = o[w * T + t];
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3 * N) @(negedge clk);
    checks += 2; if (expect_q.size() != 0 || expect2_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
