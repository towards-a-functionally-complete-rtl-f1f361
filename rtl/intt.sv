// intt -- streaming negacyclic inverse NTT over Z_q, T coefficients per cycle.
//
// The mirror image of ntt: input in bit-reversed order (as ntt produces it), the
// fully parallel Gentleman-Sande stage first, then log2(N/T) buffered GS stages
// with spans T, 2T, ..., N/2, each using the inverted twiddles psi^-k.  The output
// comes out in natural order, with no reordering network, as in the paper.
// RESCALE = 1 multiplies every output by N^-1 (the "Rescaling" column of the
// paper's 8-point iNTT figure).  Inside the external product RESCALE = 0 is used,
// because the bootstrapping key is stored already multiplied by N^-1 (the paper's
// assumption that BSK includes the iNTT rescaling factor).
// Interface and timing as for ntt; RESCALE adds one cycle.
module intt
  import tfhe_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned T       = 2,
  parameter bit          RESCALE = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  coef_t [T-1:0] in_data,
  output logic          out_valid,
  output coef_t [T-1:0] out_data
);
  localparam int unsigned NS = $clog2(N / T);

  coef_t [T-1:0] d [NS+2];
  logic          v [NS+2];

  ntt_par_stage #(.N(N), .T(T), .GS(1'b1)) u_par (
    .clk, .rst_n,
    .in_valid, .in_data,
    .out_valid(v[0]), .out_data(d[0])
  );

  for (genvar s = 0; s < NS; s++) begin : g_stage
    ntt_sdf_stage #(.N(N), .T(T), .SPAN(T << s), .GS(1'b1)) u_stage (
      .clk, .rst_n,
      .in_valid(v[s]), .in_data(d[s]),
      .out_valid(v[s+1]), .out_data(d[s+1])
    );
  end

  if (RESCALE) begin : g_rescale
    // N^-1 mod q = q - (q-1)/N
    localparam coef_t NINV = Q - ((Q - 64'd1) / 64'(N));
    coef_t [T-1:0] ninv_vec;
    for (genvar t = 0; t < T; t++) begin : g_n
      assign ninv_vec[t] = NINV;
    end
    ew_mul #(.T(T)) u_scale (
      .clk, .rst_n,
      .in_valid(v[NS]), .a(d[NS]), .b(ninv_vec),
      .out_valid(v[NS+1]), .p(d[NS+1])
    );
  end else begin : g_plain
    assign v[NS+1] = v[NS];
    assign d[NS+1] = d[NS];
  end

  assign out_valid = v[NS+1];
  assign out_data  = d[NS+1];
endmodule
