// tb_br_iteration -- three accumulators with different rotation amounts (0, N
// and random) stream through one blind-rotation iteration; results are compared
// with acc' * X^a + acc - acc' computed by the reference model.
module tb_br_iteration;
  import tb_ref_pkg::*;
  localparam int N = 16, T = 2, K = 1, L = 2, LOGB = 10, R = (K + 1) * L, W = N / T, NCT = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, bsk_req, bsk_last;
  logic [T-1:0][63:0] in_data, out_data;
  logic [$clog2(2*N)-1:0] in_a = 0;
  logic [$clog2(K+1)-1:0] bsk_o;
  logic [$clog2(W)-1:0] bsk_c;
  logic [R-1:0][T-1:0][63:0] bsk_data;
  u64 key [];
  u64 expect_q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  br_iteration #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB)) dut (.*);
  always @(posedge clk) if (bsk_req)
    for (int r = 0; r < R; r++) for (int t = 0; t < T; t++) bsk_data[r][t] <= key[(r * (K + 1) + bsk_o) * N + bsk_c * T + t];
  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid)
    for (int t = 0; t < T; t++) begin
      checks++; if (out_data[t] !== expect_q.pop_front()) failures++;
    end
  initial begin
    u64 acc [];
    key = new[R * (K + 1) * N];
    foreach (key[i]) key[i] = rand64();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCT; c++) begin
      int a;
      u64 ref_acc [];
      a = (c == 0) ? 0 : (c == 1) ? N : $urandom_range(1, 2 * N - 1);
      acc = new[(K + 1) * N];
      foreach (acc[i]) acc[i] = rand64();
      ref_acc = new[acc.size()];
      foreach (acc[i]) ref_acc[i] = acc[i];
      br_step(N, K, L, LOGB, a, ref_acc, key);
      foreach (ref_acc[i]) expect_q.push_back(ref_acc[i]);
      for (int w = 0; w < (K + 1) * W; w++) begin
        @(negedge clk);
        in_valid = 1; in_a = 5'(a);
        for (int t = 0; t < T; t++) in_data[t] = acc[w * T + t];
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20 * N) @(negedge clk);
    checks++; if (expect_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
