// mod_mul -- one registered modular multiplier over Z_q, q = 2^64 - 2^32 + 1.
//
// The 128-bit product is formed with a two-level Karatsuba multiplier (three
// 32-bit products, each built from three 16-bit products, as the paper
// describes) and folded back into [0, q) with the Solinas identity
// (b + c)*2^32 + d - a - b.  Both are the package functions of tfhe_pkg.
// Interface: operands a, b with a valid flag; product p with a valid flag.
// Timing: one register, so p is valid one cycle after in_valid.  The paper does
// not state the pipeline depth of its multiplier; one stage is this design's
// choice (a DSP implementation would insert more registers here).
module mod_mul
  import tfhe_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  coef_t a,
  input  coef_t b,
  output logic  out_valid,
  output coef_t p
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      p         <= '0;
    end else begin
      out_valid <= in_valid;
      p         <= solinas_reduce(karatsuba_mul64(a, b));
    end
  end
endmodule
