// tb_ext_product -- streams three RLWE ciphertexts back to back through the
// external product with a random NTT-domain key and compares the result with a
// reference built from the textbook NTT/iNTT loops and an independent
// decomposition.  Also checks that the output of back-to-back input is unbroken
// (rate of T coefficients per cycle).
module tb_ext_product;
  import tb_ref_pkg::*;
  localparam int N = 32, T = 2, K = 1, L = 2, LOGB = 10, R = (K + 1) * L, W = N / T, NCT = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, bsk_req, bsk_last;
  logic [T-1:0][63:0] in_data, out_data;
  logic [$clog2(K+1)-1:0] bsk_o;
  logic [$clog2(W)-1:0] bsk_c;
  logic [R-1:0][T-1:0][63:0] bsk_data;
  u64 key [R][K+1][N];
  u64 expect_q [$];
  int checks = 0, failures = 0, outw = 0, first_out = -1, last_out = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  ext_product #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB)) dut (.*);

  // key memory with one cycle of latency
  always @(posedge clk) if (bsk_req)
    for (int r = 0; r < R; r++) for (int t = 0; t < T; t++) bsk_data[r][t] <= key[r][bsk_o][bsk_c * T + t];

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    if (first_out < 0) first_out = cyc;
    last_out = cyc; outw++;
    for (int t = 0; t < T; t++) begin
      checks++;
      if (out_data[t] !== expect_q.pop_front()) begin
        failures++; if (failures < 4) $display("FAIL word %0d", outw);
      end
    end
  end

  initial begin
    u64 acc [K+1][N];
    u64 rows [R][];
    foreach (key[r, o, p]) key[r][o][p] = rand64();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCT; c++) begin
      foreach (acc[i, p]) acc[i][p] = rand64();
      // reference
      for (int r = 0; r < R; r++) rows[r] = new[N];
      for (int i = 0; i <= K; i++)
        for (int p = 0; p < N; p++) begin
          u64 d[];
          decomp(acc[i][p], L, LOGB, d);
          for (int j = 0; j < L; j++) rows[i * L + j][p] = d[j];
        end
      for (int r = 0; r < R; r++) ntt_fast(N, rows[r]);
      for (int o = 0; o <= K; o++) begin
        u64 s[];
        s = new[N];
        for (int p = 0; p < N; p++) begin
          s[p] = 0;
          for (int r = 0; r < R; r++) s[p] = radd(s[p], rmul(rows[r][p], key[r][o][p]));
        end
        intt_fast(N, s);
        foreach (s[p]) expect_q.push_back(s[p]);
      end
      // stimulus
      for (int i = 0; i <= K; i++)
        for (int w = 0; w < W; w++) begin
          @(negedge clk);
          in_valid = 1;
          for (int t = 0; t < T; t++) in_data[t] = acc[i][w * T + t];
        end
    end
    @(negedge clk); in_valid = 0;
    repeat (12 * N) @(negedge clk);
    checks++; if (expect_q.size() != 0) failures++;
    checks++; if (outw != NCT * (K + 1) * W || last_out - first_out + 1 != outw) begin
      failures++; $display("output not continuous: %0d words over %0d cycles", outw, last_out - first_out + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
