// poly_rotate -- ping-pong RLWE buffer with negacyclic rotation / sample extract.
//
// One whole RLWE ciphertext (K+1 polynomials of N coefficients) is written into
// a bank, T coefficients per cycle in natural order; it is then read back,
// T coefficients per cycle, in a permuted and partly negated order:
//   rotate mode  (in_extract = 0): multiplication by X^amt, amt in [0, 2N):
//       out_j = s * g_(u mod N),  u = (j - amt) mod 2N,  s = -1 if u >= N
//     (for amt < N this is the paper's -g_(N-a) .. -g_(N-1), g_0 .. g_(N-a-1));
//     with amt = 2N - b it multiplies by X^-b, the initial rotation of the PBS.
//   extract mode (in_extract = 1): sample extraction at index h = amt:
//       mask polynomial i < K: out_j = s * g_(u mod N), u = (h - j) mod 2N,
//       then one word holding the body coefficient g_K,h in lane 0 (other lanes 0),
//     which is the paper's a'_(iN+j) = d_(i,h-j) for j <= h and -d_(i,h-j+N)
//     otherwise, b' = d_(K,h).
// The paper uses one polynomial rotation module for all three purposes; this
// module is that unit together with the ping-pong polynomial buffer in front of
// it.  The buffer is organised as T banks (coefficient index mod T), so every
// output word reads each bank exactly once.
// Interface: in_valid/in_data with in_amt/in_extract sampled on the first word of
// each ciphertext; in_ready is low while both banks are occupied (a ciphertext
// must not be started then).  out_valid/out_data/out_last, no back-pressure.
// Timing: reading a bank starts the cycle after it fills; output words are
// registered; rotate mode produces (K+1)*N/T words, extract mode K*N/T + 1.
module poly_rotate
  import tfhe_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned T = 2,
  parameter int unsigned K = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  coef_t [T-1:0]            in_data,
  input  logic [$clog2(2*N)-1:0]   in_amt,
  input  logic                     in_extract,
  output logic                     in_ready,
  output logic                     out_valid,
  output coef_t [T-1:0]            out_data,
  output logic                     out_last
);
  localparam int unsigned W  = N / T;
  localparam int unsigned WW = $clog2(W);
  localparam int unsigned KW = (K + 1 <= 1) ? 1 : $clog2(K + 1);
  localparam int unsigned AW = $clog2(2 * N);
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned LT = $clog2(T);        // T >= 2 assumed

  coef_t [T-1:0] mem [2][K+1][W];

  logic          full [2];
  logic [AW-1:0] amt [2];
  logic          ext [2];
  logic          wsel, rsel;
  logic [KW-1:0] wi, ri;
  logic [WW-1:0] wc, rc;

  assign in_ready = !full[wsel];

  // ---- write side
  always_ff @(posedge clk) begin
    if (in_valid) mem[wsel][wi][wc] <= in_data;
    if (in_valid && wi == '0 && wc == '0) begin
      amt[wsel] <= in_amt;
      ext[wsel] <= in_extract;
    end
  end

  // ---- read side: address generation
  logic          rd_act, rd_body, rd_end;
  coef_t [T-1:0] word;

  assign rd_act  = full[rsel];
  assign rd_body = ext[rsel] && (ri == KW'(K));
  assign rd_end  = rd_body || ((ri == KW'(K)) && (rc == WW'(W - 1)));

  always_comb begin
    for (int t = 0; t < T; t++) begin
      logic [AW-1:0] j, u;
      logic [NW-1:0] idx, h;
      coef_t         g;
      j   = AW'(int'(rc) * T + t);
      u   = ext[rsel] ? (amt[rsel] - j) : (j - amt[rsel]);   // modulo 2N by width
      idx = u[NW-1:0];
      h   = amt[rsel][NW-1:0];
      g   = mem[rsel][ri][idx[NW-1:LT]][idx[LT-1:0]];
      word[t] = u[AW-1] ? mod_neg(g) : g;
      if (rd_body) word[t] = (t == 0) ? mem[rsel][K][h[NW-1:LT]][h[LT-1:0]] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0;
      wsel <= 1'b0; rsel <= 1'b0;
      wi <= '0; wc <= '0; ri <= '0; rc <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= rd_act;
      out_last  <= rd_act && rd_end;
      if (rd_act) out_data <= word;
      if (in_valid) begin
        if (wc == WW'(W - 1)) begin
          wc <= '0;
          if (wi == KW'(K)) begin
            wi <= '0;
            full[wsel] <= 1'b1;
            wsel <= ~wsel;
          end else wi <= wi + 1'b1;
        end else wc <= wc + 1'b1;
      end
      if (rd_act) begin
        if (rd_end) begin
          rc <= '0; ri <= '0;
          full[rsel] <= 1'b0;
          rsel <= ~rsel;
        end else if (rc == WW'(W - 1)) begin
          rc <= '0;
          ri <= ri + 1'b1;
        end else rc <= rc + 1'b1;
      end
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   (in_valid && wi == '0 && wc == '0) |-> in_ready);
endmodule
