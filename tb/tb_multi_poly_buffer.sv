// tb_multi_poly_buffer -- writes the digit rows of four ciphertexts and checks
// that each is replayed K+1 times in (o, c) order with all rows aligned, that
// the read request leads the data by one cycle, and that replay is unbroken.
module tb_multi_poly_buffer;
  import tb_ref_pkg::*;
  localparam int N = 16, T = 2, K = 1, L = 2, R = (K + 1) * L, W = N / T, NCT = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, rd_req, rd_last, out_valid;
  logic [L-1:0][T-1:0][63:0] in_digits;
  logic [$clog2(K+1)-1:0] rd_o;
  logic [$clog2(W)-1:0] rd_c;
  logic [R-1:0][T-1:0][63:0] out_rows;
  u64 data [NCT][R][N];
  int checks = 0, failures = 0, ct = 0, o_exp = 0, c_exp = 0, last_seen = 0;
  logic [$clog2(K+1)-1:0] o_d; logic [$clog2(W)-1:0] c_d;
  always #5 clk = ~clk;
  multi_poly_buffer #(.N(N), .T(T), .K(K), .L(L)) dut (.*);
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    o_d <= rd_o; c_d <= rd_c;
    if (rst_n && rd_req) begin
      checks += 2;
      if (rd_o !== ($clog2(K+1))'(o_exp) || rd_c !== ($clog2(W))'(c_exp)) failures++;
      if (rd_last !== (o_exp == K && c_exp == W - 1)) failures++;
      if (rd_last) last_seen++;
      if (c_exp == W - 1) begin c_exp = 0; o_exp = (o_exp == K) ? 0 : o_exp + 1; end else c_exp++;
    end
    if (rst_n && out_valid) begin
      for (int r = 0; r < R; r++) for (int t = 0; t < T; t++) begin
        checks++; if (out_rows[r][t] !== data[ct][r][c_d * T + t]) failures++;
      end
      if (o_d == K && c_d == W - 1) ct++;
    end
  end
  initial begin
    foreach (data[c, r, p]) data[c][r][p] = rand64();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCT; c++)
      for (int i = 0; i <= K; i++)
        for (int w = 0; w < W; w++) begin
          while (!in_ready) @(negedge clk);
          in_valid = 1;
          for (int j = 0; j < L; j++) for (int t = 0; t < T; t++) in_digits[j][t] = data[c][i * L + j][w * T + t];
          @(negedge clk);
          in_valid = 0;
        end
    repeat (4 * N) @(negedge clk);
    checks += 2; if (ct != NCT) failures++; if (last_seen != NCT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
