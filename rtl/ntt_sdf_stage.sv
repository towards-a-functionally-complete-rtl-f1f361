// ntt_sdf_stage -- one buffered stage ("BF block" plus its buffer) of the
// streaming NTT / iNTT.
//
// The stage pairs coefficient j with j + SPAN inside every block of 2*SPAN
// coefficients and applies a butterfly (CT for the forward transform, GS for the
// inverse).  Coefficients arrive in natural stream order, T per cycle.  The first
// half of a block is written into a buffer of SPAN/T words; while the second half
// streams in, T/2..T butterflies pair it with the buffered words, the "upper"
// results leave at once and the "lower" results overwrite the buffer words that
// were just consumed.  They are drained during the following SPAN/T cycles, while
// the first half of the next block is written into the words already drained, so
// one buffer of SPAN coefficients suffices and the output keeps natural order.
// All T lanes of a word belong to the same butterfly group, so one twiddle per
// block is read sequentially from a ROM: group m = N/(2*SPAN) + block uses
// psi^(bitrev(m)) (CT) or psi^(-bitrev(m)) (GS), the orderings of the paper's
// 8-point figures.
// Interface: in_valid/in_data, out_valid/out_data, no back-pressure; input may
// pause at any word, a finished block drains by itself.
// Timing: an output word for a second-half input leaves one cycle later; the
// lower half of a block leaves SPAN/T cycles after the upper half.
// The paper keeps a buffer of 3/4 of the stage size with one quarter of the
// values bypassed; this stage uses a buffer of half the stage size instead, the
// classic single-path delay-feedback arrangement (this design's choice).
module ntt_sdf_stage
  import tfhe_pkg::*;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned T    = 2,
  parameter int unsigned SPAN = 512,
  parameter bit          GS   = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  coef_t [T-1:0] in_data,
  output logic          out_valid,
  output coef_t [T-1:0] out_data
);
  localparam int unsigned HC     = SPAN / T;          // words per half block
  localparam int unsigned BLOCKS = N / (2 * SPAN);
  localparam int unsigned CW     = $clog2(2 * HC);
  localparam int unsigned HW     = (HC <= 1) ? 1 : $clog2(HC);
  localparam int unsigned BW     = (BLOCKS <= 1) ? 1 : $clog2(BLOCKS);

  coef_t [T-1:0] buffer [HC];
  coef_t         tw_rom [BLOCKS];

  logic [CW-1:0] cnt;     // word position inside the current block
  logic [BW-1:0] blk;     // current block
  logic          pend;    // lower results waiting to be drained
  logic [HW-1:0] dptr;

  initial begin
    coef_t       pw [N];               // psi^i
    coef_t       psi;
    int unsigned e;
    psi   = psi_root(N);
    pw[0] = 64'd1;
    for (int unsigned i = 1; i < N; i++) pw[i] = const_mul(pw[i-1], psi);
    for (int unsigned b = 0; b < BLOCKS; b++) begin
      e = twiddle_exp(N, BLOCKS + b);
      tw_rom[b] = !GS ? pw[e] : (e == 0) ? 64'd1 : mod_neg(pw[N - e]);
    end
  end

  logic          second;
  logic [HW-1:0] rd_idx;
  coef_t         w;
  coef_t [T-1:0] top, bot;

  assign second = (cnt >= CW'(HC));
  assign rd_idx = HW'(cnt - CW'(HC));
  assign w      = tw_rom[blk];

  for (genvar t = 0; t < T; t++) begin : g_bf
    bf_unit #(.GS(GS)) u_bf (.x(buffer[rd_idx][t]), .y(in_data[t]), .w(w), .xo(top[t]), .yo(bot[t]));
  end

  always_ff @(posedge clk) begin
    if (in_valid && !second) buffer[HW'(cnt)] <= in_data;
    else if (in_valid && second) buffer[rd_idx] <= bot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      blk       <= '0;
      pend      <= 1'b0;
      dptr      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (pend) begin
        out_valid <= 1'b1;
        out_data  <= buffer[dptr];
        if (dptr == HW'(HC - 1)) begin
          pend <= 1'b0;
          dptr <= '0;
        end else begin
          dptr <= dptr + 1'b1;
        end
      end
      if (in_valid) begin
        if (second) begin
          out_valid <= 1'b1;
          out_data  <= top;
        end
        if (cnt == CW'(2 * HC - 1)) begin
          cnt  <= '0;
          pend <= 1'b1;
          dptr <= '0;
          blk  <= (blk == BW'(BLOCKS - 1)) ? '0 : blk + 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(pend && in_valid && second));
endmodule
