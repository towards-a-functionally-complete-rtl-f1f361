// tb_poly_rotate -- rotates random RLWE ciphertexts by random amounts in
// [0, 2N) and sample-extracts at random indices, comparing with the polynomial
// product by X^amt computed by shifting, and with the sample-extract formula.
module tb_poly_rotate;
  import tb_ref_pkg::*;
  localparam int N = 16, T = 2, K = 1, W = N / T;
  logic clk = 0, rst_n = 0, in_valid = 0, in_extract = 0, in_ready, out_valid, out_last;
  logic [T-1:0][63:0] in_data, out_data;
  logic [$clog2(2*N)-1:0] in_amt = 0;
  u64 expect_q [$];
  int last_q [$];
  int checks = 0, failures = 0, nrot = 0, next = 0;
  always #5 clk = ~clk;
  poly_rotate #(.N(N), .T(T), .K(K)) dut (.*);
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int t = 0; t < T; t++) begin
      checks++; if (out_data[t] !== expect_q.pop_front()) failures++;
    end
    checks++; if (out_last !== (last_q.pop_front() == 1)) failures++;
  end
  initial begin
    u64 g [K+1][N];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 24; c++) begin
      int a;
      bit ex;
      a  = (c == 0) ? 0 : (c == 1) ? N : $urandom_range(0, 2 * N - 1);
      ex = (c % 3 == 2);
      if (ex) a = a % N;
      foreach (g[i, p]) g[i][p] = rand64();
      if (!ex) begin
        for (int i = 0; i <= K; i++) begin
          u64 r [N];
          // multiply by X^a one step at a time: X*g shifts up, top wraps negated
          for (int p = 0; p < N; p++) r[p] = g[i][p];
          for (int s = 0; s < a; s++) begin
            u64 top;
            top = r[N-1];
            for (int p = N - 1; p > 0; p--) r[p] = r[p-1];
            r[0] = rneg(top);
          end
          for (int p = 0; p < N; p++) expect_q.push_back(r[p]);
          for (int w = 0; w < W; w++) last_q.push_back((i == K && w == W - 1) ? 1 : 0);
        end
        nrot++;
      end else begin
        for (int i = 0; i < K; i++) begin
          for (int j = 0; j < N; j++) expect_q.push_back(j <= a ? g[i][a - j] : rneg(g[i][a - j + N]));
          for (int w = 0; w < W; w++) last_q.push_back(0);
        end
        expect_q.push_back(g[K][a]);
        for (int t = 1; t < T; t++) expect_q.push_back(0);
        last_q.push_back(1);
        next++;
      end
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      for (int i = 0; i <= K; i++)
        for (int w = 0; w < W; w++) begin
          in_valid = 1; in_amt = 6'(a); in_extract = ex;
          for (int t = 0; t < T; t++) in_data[t] = g[i][w * T + t];
          @(negedge clk);
        end
      in_valid = 0;
      if (c % 4 == 3) repeat ($urandom_range(0, 40)) @(negedge clk);
    end
    repeat (4 * N) @(negedge clk);
    checks++; if (expect_q.size() != 0 || nrot == 0 || next == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
