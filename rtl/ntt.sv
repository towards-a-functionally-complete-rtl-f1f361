// ntt -- streaming negacyclic forward NTT over Z_q, T coefficients per cycle.
//
// A polynomial of N coefficients enters in natural order, T coefficients per
// cycle, for N/T cycles.  It passes log2(N/T) buffered Cooley-Tukey stages
// (ntt_sdf_stage, spans N/2, N/4, ..., T), each with one butterfly block of T/2
// butterflies, and then the fully parallel stage (ntt_par_stage) that finishes
// the T-point sub-transforms.  The negacyclic twist is folded into the twiddles
// (powers of a primitive 2N-th root psi), so the output is the evaluation at the
// odd powers psi^(2i+1), in bit-reversed order: output position p holds
// sum_j a_j * psi^((2*bitrev(p)+1)*j), as in the paper's 8-point figure.
// Interface: in_valid/in_data, out_valid/out_data; consecutive polynomials may be
// streamed back to back, gaps are allowed; there is no back-pressure.
// Timing: the first output word appears about N/T cycles after the first input
// word (each buffered stage adds SPAN/T cycles, the parallel stage one).  With
// unbroken input the output is unbroken, so the sustained rate is T coefficients
// per cycle, as in the paper.
module ntt
  import tfhe_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned T = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  coef_t [T-1:0] in_data,
  output logic          out_valid,
  output coef_t [T-1:0] out_data
);
  localparam int unsigned NS = $clog2(N / T);

  coef_t [T-1:0] d [NS+1];
  logic          v [NS+1];

  assign d[0] = in_data;
  assign v[0] = in_valid;

  for (genvar s = 0; s < NS; s++) begin : g_stage
    ntt_sdf_stage #(.N(N), .T(T), .SPAN(N >> (s + 1)), .GS(1'b0)) u_stage (
      .clk, .rst_n,
      .in_valid(v[s]), .in_data(d[s]),
      .out_valid(v[s+1]), .out_data(d[s+1])
    );
  end

  ntt_par_stage #(.N(N), .T(T), .GS(1'b0)) u_par (
    .clk, .rst_n,
    .in_valid(v[NS]), .in_data(d[NS]),
    .out_valid, .out_data
  );
endmodule
