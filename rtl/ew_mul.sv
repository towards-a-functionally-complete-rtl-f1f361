// ew_mul -- element-wise multiplier: T modular products per cycle.
//
// One of the "MUL" boxes of the blind-rotation datapath: it multiplies a vector
// of T transformed coefficients with T coefficients of a key polynomial, each
// product reduced into Z_q.  It is built from T mod_mul instances, so its latency
// is one cycle and it accepts a new vector every cycle.  The lane count T is the
// paper's throughput parameter; the single-cycle latency is this design's choice.
module ew_mul
  import tfhe_pkg::*;
#(
  parameter int unsigned T = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  coef_t [T-1:0]   a,
  input  coef_t [T-1:0]   b,
  output logic            out_valid,
  output coef_t [T-1:0]   p
);
  logic [T-1:0] v;
  for (genvar t = 0; t < T; t++) begin : g_lane
    mod_mul u_mul (.clk, .rst_n, .in_valid, .a(a[t]), .b(b[t]), .out_valid(v[t]), .p(p[t]));
  end
  assign out_valid = v[0];
endmodule
