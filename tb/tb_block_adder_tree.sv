// tb_block_adder_tree -- sums of 4 and 5 vectors against a reference, and the
// latency of ceil(log2(NIN)) cycles.
module tb_block_adder_tree;
  import tb_ref_pkg::*;
  localparam int T = 2;
  logic clk = 0, rst_n = 0, in_valid = 0, v4, v5;
  logic [3:0][T-1:0][63:0] d4;
  logic [4:0][T-1:0][63:0] d5;
  logic [T-1:0][63:0] o4, o5;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  block_adder_tree #(.NIN(4), .T(T)) u4 (.clk, .rst_n, .in_valid, .in_data(d4), .out_valid(v4), .out_data(o4));
  block_adder_tree #(.NIN(5), .T(T)) u5 (.clk, .rst_n, .in_valid, .in_data(d5), .out_valid(v5), .out_data(o5));
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      u64 e4 [T], e5 [T];
      @(negedge clk);
      in_valid = 1;
      for (int t = 0; t < T; t++) begin
        e4[t] = 0; e5[t] = 0;
        for (int k = 0; k < 5; k++) begin
          u64 r;
          r = (i == 0) ? RQ - 1 : rand64();
          d5[k][t] = r; e5[t] = radd(e5[t], r);
          if (k < 4) begin d4[k][t] = r; e4[t] = radd(e4[t], r); end
        end
      end
      @(negedge clk); in_valid = 0;
      @(negedge clk);
      checks++; if (!v4 || v5) failures++;     // 2 levels for 4 inputs, 3 for 5
      for (int t = 0; t < T; t++) begin checks++; if (o4[t] !== e4[t]) failures++; end
      @(negedge clk);
      checks++; if (!v5) failures++;
      for (int t = 0; t < T; t++) begin checks++; if (o5[t] !== e5[t]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
