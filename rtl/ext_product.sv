// ext_product -- streaming external product RLWE x RGSW -> RLWE (NTT based).
//
// Computes acc' = sum_{i=0..K} sum_{j=0..L-1} Decomp(C)_{i,j} * BSK_{i,j}, where
// each BSK_{i,j} is an RLWE ciphertext given in the NTT domain and already
// multiplied by N^-1.  The five parts of the paper are chained:
//   decompose         one pipelined decomposition unit, L digit streams;
//   L x ntt           the digit polynomials are transformed in parallel;
//   multi_poly_buffer ping-pong store of the R = (K+1)*L transformed rows,
//                     replayed once per output polynomial o = 0..K;
//   R x ew_mul        row r times word c of key polynomial BSK_{r,o};
//   block_adder_tree  sums the R products;
//   intt              inverse transform without rescaling.
// Key interface: bsk_req/bsk_o/bsk_c ask for word c of output polynomial o of
// all R rows of the current key element; bsk_data must carry those R words
// exactly one cycle later.  bsk_last marks the final request of a ciphertext.
// Stream interface: the K+1 polynomials of C enter back to back (or with gaps),
// T coefficients per cycle; acc' leaves in the same format.  No back-pressure.
// Throughput: one ciphertext per (K+1)*N/T cycles, i.e. T coefficients per cycle.
// Latency: about (K+3)*N/T cycles (transform, gathering all rows, inverse).
module ext_product
  import tfhe_pkg::*;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned T    = 2,
  parameter int unsigned K    = 1,
  parameter int unsigned L    = 2,
  parameter int unsigned LOGB = 10
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  coef_t [T-1:0]               in_data,
  output logic                        bsk_req,
  output logic [$clog2(K+1)-1:0]      bsk_o,
  output logic [$clog2(N/T)-1:0]      bsk_c,
  output logic                        bsk_last,
  input  coef_t [(K+1)*L-1:0][T-1:0]  bsk_data,
  output logic                        out_valid,
  output coef_t [T-1:0]               out_data
);
  localparam int unsigned R = (K + 1) * L;

  logic                 dec_v;
  coef_t [L-1:0][T-1:0] dec_d;
  logic [L-1:0]         ntt_v;
  coef_t [L-1:0][T-1:0] ntt_d;
  logic                 mpb_ready, rows_v;
  coef_t [R-1:0][T-1:0] rows;
  logic [R-1:0]         mul_v;
  coef_t [R-1:0][T-1:0] prod;
  logic                 sum_v;
  coef_t [T-1:0]        sum_d;

  decompose #(.T(T), .L(L), .LOGB(LOGB)) u_dec (
    .clk, .rst_n, .in_valid, .in_data, .out_valid(dec_v), .out_digits(dec_d)
  );

  for (genvar j = 0; j < L; j++) begin : g_ntt
    ntt #(.N(N), .T(T)) u_ntt (
      .clk, .rst_n, .in_valid(dec_v), .in_data(dec_d[j]), .out_valid(ntt_v[j]), .out_data(ntt_d[j])
    );
  end

  multi_poly_buffer #(.N(N), .T(T), .K(K), .L(L)) u_mpb (
    .clk, .rst_n, .in_valid(ntt_v[0]), .in_digits(ntt_d), .in_ready(mpb_ready),
    .rd_req(bsk_req), .rd_o(bsk_o), .rd_c(bsk_c), .rd_last(bsk_last),
    .out_valid(rows_v), .out_rows(rows)
  );

  for (genvar r = 0; r < R; r++) begin : g_mul
    ew_mul #(.T(T)) u_mul (
      .clk, .rst_n, .in_valid(rows_v), .a(rows[r]), .b(bsk_data[r]), .out_valid(mul_v[r]), .p(prod[r])
    );
  end

  block_adder_tree #(.NIN(R), .T(T)) u_tree (
    .clk, .rst_n, .in_valid(mul_v[0]), .in_data(prod), .out_valid(sum_v), .out_data(sum_d)
  );

  intt #(.N(N), .T(T), .RESCALE(1'b0)) u_intt (
    .clk, .rst_n, .in_valid(sum_v), .in_data(sum_d), .out_valid, .out_data
  );

  a_mpb_space: assert property (@(posedge clk) disable iff (!rst_n) ntt_v[0] |-> mpb_ready);
endmodule
