// ew_addsub -- element-wise modular addition or subtraction of T-wide vectors.
//
// These are the "ADD" and "SUB" boxes of the blind-rotation datapath.  Each lane
// computes a + b or a - b in Z_q followed by a simple reduction (one conditional
// correction by q), as the paper specifies for additions and subtractions.
// SUB selects the operation at elaboration time.  Registered: results are valid
// one cycle after in_valid.
module ew_addsub
  import tfhe_pkg::*;
#(
  parameter int unsigned T   = 2,
  parameter bit          SUB = 1'b0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  coef_t [T-1:0]   a,
  input  coef_t [T-1:0]   b,
  output logic            out_valid,
  output coef_t [T-1:0]   r
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r         <= '0;
    end else begin
      out_valid <= in_valid;
      for (int t = 0; t < T; t++) r[t] <= SUB ? mod_sub(a[t], b[t]) : mod_add(a[t], b[t]);
    end
  end
endmodule
