// tb_ew_addsub -- checks element-wise modular addition and subtraction.
module tb_ew_addsub;
  import tb_ref_pkg::*;
  localparam int T = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, va, vs;
  logic [T-1:0][63:0] a, b, ra, rs;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ew_addsub #(.T(T), .SUB(1'b0)) u_add (.clk, .rst_n, .in_valid, .a, .b, .out_valid(va), .r(ra));
  ew_addsub #(.T(T), .SUB(1'b1)) u_sub (.clk, .rst_n, .in_valid, .a, .b, .out_valid(vs), .r(rs));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      in_valid = 1;
      for (int t = 0; t < T; t++) begin a[t] = rand64(); b[t] = rand64(); end
      if (i == 0) begin a[0] = RQ - 1; b[0] = RQ - 1; a[1] = 0; b[1] = RQ - 1; end
      @(negedge clk);
      in_valid = 0;
      checks += 2; if (!va || !vs) failures++;
      for (int t = 0; t < T; t++) begin
        checks += 2;
        if (ra[t] !== radd(a[t], b[t])) failures++;
        if (rs[t] !== rsub(a[t], b[t])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
