// multi_poly_buffer -- ping-pong store of the transformed decomposition digits.
//
// The external product needs every decomposed, transformed polynomial
// NTT(Decomp(C)_{i,j}) (i = 0..K, j = 0..L-1, R = (K+1)*L rows) once for each of
// the K+1 output polynomials, because each row multiplies a whole RLWE row of the
// bootstrapping key.  This buffer collects the R rows of one ciphertext (the L
// digit streams of input polynomial i arrive together, one word of T
// coefficients each per cycle) and then replays them K+1 times, one word per
// cycle in the order (output polynomial o, word c), presenting all R rows of word
// c at once.  Two banks let the rows of the next ciphertext be written while the
// current one is replayed, as the paper's "Multi Polynomial Buffer" does.
// Interface: write side in_valid/in_digits (no stall is expected: in_ready is
// reported and an assertion checks that a full bank is never written); read side
// rd_req/rd_o/rd_c/rd_last are combinational and announce the word that will
// appear on out_rows one cycle later, so a key memory with one cycle of latency
// can be addressed with them.  Replay starts one cycle after a bank fills and runs
// without gaps for (K+1)*N/T cycles.
module multi_poly_buffer
  import tfhe_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned T = 2,
  parameter int unsigned K = 1,
  parameter int unsigned L = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  coef_t [L-1:0][T-1:0]        in_digits,
  output logic                        in_ready,
  output logic                        rd_req,
  output logic [$clog2(K+1)-1:0]      rd_o,
  output logic [$clog2(N/T)-1:0]      rd_c,
  output logic                        rd_last,
  output logic                        out_valid,
  output coef_t [(K+1)*L-1:0][T-1:0]  out_rows
);
  localparam int unsigned R  = (K + 1) * L;
  localparam int unsigned W  = N / T;
  localparam int unsigned WW = $clog2(W);
  localparam int unsigned KW = $clog2(K + 1);

  coef_t [T-1:0] mem [2][R][W];

  logic          full [2];
  logic          wsel, rsel;
  logic [KW-1:0] wi;
  logic [WW-1:0] wc;
  logic [KW-1:0] ro;
  logic [WW-1:0] rc;

  assign in_ready = !full[wsel];
  assign rd_req   = full[rsel];
  assign rd_o     = ro;
  assign rd_c     = rc;
  assign rd_last  = rd_req && (ro == KW'(K)) && (rc == WW'(W - 1));

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < L; j++) mem[wsel][int'(wi) * L + j][wc] <= in_digits[j];
    end
    if (rd_req) begin
      for (int r = 0; r < R; r++) out_rows[r] <= mem[rsel][r][rc];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0;
      wsel <= 1'b0; rsel <= 1'b0;
      wi <= '0; wc <= '0; ro <= '0; rc <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= rd_req;
      if (in_valid) begin
        if (wc == WW'(W - 1)) begin
          wc <= '0;
          if (wi == KW'(K)) begin
            wi <= '0;
            full[wsel] <= 1'b1;
            wsel <= ~wsel;
          end else begin
            wi <= wi + 1'b1;
          end
        end else begin
          wc <= wc + 1'b1;
        end
      end
      if (rd_req) begin
        if (rc == WW'(W - 1)) begin
          rc <= '0;
          if (ro == KW'(K)) begin
            ro <= '0;
            full[rsel] <= 1'b0;
            rsel <= ~rsel;
          end else begin
            ro <= ro + 1'b1;
          end
        end else begin
          rc <= rc + 1'b1;
        end
      end
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready);
endmodule
