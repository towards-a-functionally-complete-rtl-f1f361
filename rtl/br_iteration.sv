// br_iteration -- one blind-rotation iteration, streaming.
//
// For an accumulator acc (RLWE ciphertext) and the mask element a_i it computes
//     acc <- acc' * X^(a_i) + (acc - acc'),   acc' = ExtProd(acc, BSK_i),
// which equals CMUX(BSK_i, acc, acc * X^(a_i)).  The structure is the paper's:
//   extra latency -> ext_product -> poly_rotate (ping-pong polynomial buffer and
//   "rotate polynomial left" by a_i) -> ADD,
// and in parallel the accumulator buffer chain that holds acc until acc' is
// ready, a SUB forming acc - acc', and a buffer holding that difference until the
// rotated acc' arrives.
// Accumulators enter back to back, (K+1)*N/T words each; a_i (in [0, 2N), already
// modulus-switched) is sampled on the first word of each accumulator and travels
// in its own buffer chain.  The key interface is that of ext_product: BSK words
// requested with bsk_req/bsk_o/bsk_c are expected one cycle later on bsk_data;
// bsk_last marks the last request of an accumulator.
// Sizes of the buffers are this design's choice (the paper gives none):
// ACC_DEPTH words for the accumulator chain (default four ciphertexts), two
// ciphertexts for the difference buffer, MAXCT accumulators in flight.
// Throughput: one accumulator per (K+1)*N/T cycles; latency about
// (K+3)*N/T + (K+1)*N/T cycles.  No back-pressure; assertions check the buffers.
module br_iteration
  import tfhe_pkg::*;
#(
  parameter int unsigned N         = 1024,
  parameter int unsigned T         = 2,
  parameter int unsigned K         = 1,
  parameter int unsigned L         = 2,
  parameter int unsigned LOGB      = 10,
  parameter int unsigned EXTRA_LAT = 1,
  parameter int unsigned ACC_DEPTH = 4 * (K + 1) * N / T,
  parameter int unsigned MAXCT     = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  coef_t [T-1:0]               in_data,
  input  logic [$clog2(2*N)-1:0]      in_a,
  output logic                        bsk_req,
  output logic [$clog2(K+1)-1:0]      bsk_o,
  output logic [$clog2(N/T)-1:0]      bsk_c,
  output logic                        bsk_last,
  input  coef_t [(K+1)*L-1:0][T-1:0]  bsk_data,
  output logic                        out_valid,
  output coef_t [T-1:0]               out_data
);
  localparam int unsigned CTW = (K + 1) * N / T;     // words per ciphertext
  localparam int unsigned CW  = $clog2(CTW);
  localparam int unsigned AW  = $clog2(2 * N);

  // ---- word counters (first word of an input / last word of acc')
  logic [CW-1:0] in_cnt, ep_cnt;
  logic          in_first, ep_last;
  assign in_first = in_valid && (in_cnt == '0);

  // ---- a_i buffer chain
  logic [AW-1:0] a_head;
  logic          a_empty, a_full;
  logic [$clog2(MAXCT+1)-1:0] a_count;
  sync_fifo #(.W(AW), .DEPTH(MAXCT)) u_a_chain (
    .clk, .rst_n, .push(in_first), .wr_data(in_a), .pop(ep_last),
    .rd_data(a_head), .empty(a_empty), .full(a_full), .count(a_count)
  );

  // ---- extra latency in front of the external product
  logic          dl_v [EXTRA_LAT+1];
  coef_t [T-1:0] dl_d [EXTRA_LAT+1];
  assign dl_v[0] = in_valid;
  assign dl_d[0] = in_data;
  for (genvar s = 0; s < EXTRA_LAT; s++) begin : g_lat
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dl_v[s+1] <= 1'b0;
        dl_d[s+1] <= '0;
      end else begin
        dl_v[s+1] <= dl_v[s];
        dl_d[s+1] <= dl_d[s];
      end
    end
  end

  // ---- accumulator buffer chain
  coef_t [T-1:0] acc_head;
  logic          acc_empty, acc_full;
  logic [$clog2(ACC_DEPTH+1)-1:0] acc_count;
  logic          ep_v;
  coef_t [T-1:0] ep_d;

  sync_fifo #(.W(T * 64), .DEPTH(ACC_DEPTH)) u_acc_chain (
    .clk, .rst_n, .push(dl_v[EXTRA_LAT]), .wr_data(dl_d[EXTRA_LAT]), .pop(ep_v),
    .rd_data(acc_head), .empty(acc_empty), .full(acc_full), .count(acc_count)
  );

  // ---- external product
  ext_product #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB)) u_ep (
    .clk, .rst_n, .in_valid(dl_v[EXTRA_LAT]), .in_data(dl_d[EXTRA_LAT]),
    .bsk_req, .bsk_o, .bsk_c, .bsk_last, .bsk_data,
    .out_valid(ep_v), .out_data(ep_d)
  );
  assign ep_last = ep_v && (ep_cnt == CW'(CTW - 1));

  // ---- SUB: acc - acc'  -> difference buffer
  logic          sub_v;
  coef_t [T-1:0] sub_d;
  ew_addsub #(.T(T), .SUB(1'b1)) u_sub (
    .clk, .rst_n, .in_valid(ep_v), .a(acc_head), .b(ep_d), .out_valid(sub_v), .r(sub_d)
  );

  coef_t [T-1:0] diff_head;
  logic          diff_empty, diff_full;
  logic [$clog2(2*CTW+1)-1:0] diff_count;
  logic          rot_v, rot_last, rot_ready;
  coef_t [T-1:0] rot_d;

  sync_fifo #(.W(T * 64), .DEPTH(2 * CTW)) u_diff_buf (
    .clk, .rst_n, .push(sub_v), .wr_data(sub_d), .pop(rot_v),
    .rd_data(diff_head), .empty(diff_empty), .full(diff_full), .count(diff_count)
  );

  // ---- ping-pong polynomial buffer + rotation by X^(a_i)
  poly_rotate #(.N(N), .T(T), .K(K)) u_rot (
    .clk, .rst_n, .in_valid(ep_v), .in_data(ep_d), .in_amt(a_head), .in_extract(1'b0),
    .in_ready(rot_ready), .out_valid(rot_v), .out_data(rot_d), .out_last(rot_last)
  );

  // ---- ADD: rotated acc' + (acc - acc')
  ew_addsub #(.T(T), .SUB(1'b0)) u_add (
    .clk, .rst_n, .in_valid(rot_v), .a(rot_d), .b(diff_head), .out_valid, .r(out_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt <= '0;
      ep_cnt <= '0;
    end else begin
      if (in_valid) in_cnt <= (in_cnt == CW'(CTW - 1)) ? '0 : in_cnt + 1'b1;
      if (ep_v)     ep_cnt <= (ep_cnt == CW'(CTW - 1)) ? '0 : ep_cnt + 1'b1;
    end
  end

  a_acc_chain:  assert property (@(posedge clk) disable iff (!rst_n) ep_v |-> !acc_empty);
  a_a_chain:    assert property (@(posedge clk) disable iff (!rst_n) ep_v |-> !a_empty);
  a_diff_ready: assert property (@(posedge clk) disable iff (!rst_n) rot_v |-> !diff_empty);
  a_rot_ready:  assert property (@(posedge clk) disable iff (!rst_n) (ep_v && ep_cnt == '0) |-> rot_ready);
endmodule
