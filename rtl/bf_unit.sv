// bf_unit -- radix-2 NTT butterfly over Z_q (combinational).
//
// GS = 0 selects the Cooley-Tukey butterfly of the forward NTT:
//     x' = x + w*y,  y' = x - w*y
// GS = 1 selects the Gentleman-Sande butterfly of the inverse NTT:
//     x' = x + y,    y' = (x - y)*w
// where w is the twiddle factor (psi^k for CT, psi^-k for GS).  Both forms follow
// the paper's butterfly definitions; the paper's GS figure places the twiddle after
// the subtraction, which is what is done here.  Additions use simple reduction,
// the product uses the Karatsuba/Solinas multiplier of tfhe_pkg.
// Purely combinational: the enclosing stage registers the results.
module bf_unit
  import tfhe_pkg::*;
#(
  parameter bit GS = 1'b0
) (
  input  coef_t x,
  input  coef_t y,
  input  coef_t w,
  output coef_t xo,
  output coef_t yo
);
  coef_t wy;
  always_comb begin
    if (!GS) begin
      wy = mod_mul(w, y);
      xo = mod_add(x, wy);
      yo = mod_sub(x, wy);
    end else begin
      wy = '0;
      xo = mod_add(x, y);
      yo = mod_mul(mod_sub(x, y), w);
    end
  end
endmodule
