// tb_ew_mul -- checks the T-lane element-wise multiplier, streaming one vector
// per cycle with one cycle of latency.
module tb_ew_mul;
  import tb_ref_pkg::*;
  localparam int T = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [T-1:0][63:0] a, b, p;
  u64 exp_q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ew_mul #(.T(T)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int t = 0; t < T; t++) begin
      checks++;
      if (p[t] !== exp_q.pop_front()) failures++;
    end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1;
      for (int t = 0; t < T; t++) begin
        a[t] = rand64(); b[t] = rand64(); exp_q.push_back(rmul(a[t], b[t]));
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
