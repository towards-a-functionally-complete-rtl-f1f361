// tb_mod_mul -- checks the Karatsuba/Solinas multiplier against a 128-bit
// remainder, on corner values and random operands; one-cycle latency checked.
module tb_mod_mul;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [63:0] a = 0, b = 0, p;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mod_mul dut (.*);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(u64 x, u64 y);
    u64 e = rmul(x, y);
    @(negedge clk); a = x; b = y; in_valid = 1;
    @(negedge clk); in_valid = 0;
    checks++;
    if (!out_valid || p !== e) begin
      failures++;
      $display("FAIL %h * %h = %h expected %h (v=%0d)", x, y, p, e, out_valid);
    end
  endtask
  initial begin
    u64 corner [6] = '{0, 1, 2, RQ - 1, RQ - 2, 64'hFFFF_FFFF};
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (corner[i]) foreach (corner[j]) check(corner[i], corner[j]);
    repeat (2000) check(rand64(), rand64());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
