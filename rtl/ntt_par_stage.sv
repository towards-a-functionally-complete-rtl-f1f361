// ntt_par_stage -- the fully parallel stage of the streaming NTT / iNTT.
//
// Once the transform has been split down to T-point sub-transforms, every
// butterfly pair lies inside one input word of T coefficients.  This stage
// performs all log2(T) remaining butterfly levels on each word at once, without
// intermediate buffers, as the paper describes for its final (forward) or first
// (inverse) stage.  Forward (GS = 0): spans T/2, T/4, ..., 1, CT butterflies.
// Inverse (GS = 1): spans 1, 2, ..., T/2, GS butterflies.  Each butterfly reads
// its own twiddle ROM, indexed by the word count within the polynomial:
// group m = N/(2*span) + (global index)/(2*span).
// Timing: one register at the output; one word per cycle.
module ntt_par_stage
  import tfhe_pkg::*;
#(
  parameter int unsigned N  = 1024,
  parameter int unsigned T  = 2,
  parameter bit          GS = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  coef_t [T-1:0] in_data,
  output logic          out_valid,
  output coef_t [T-1:0] out_data
);
  localparam int unsigned LT    = $clog2(T);
  localparam int unsigned WORDS = N / T;
  localparam int unsigned WW    = (WORDS <= 1) ? 1 : $clog2(WORDS);

  // twiddle ROMs: [level][butterfly][word]
  coef_t tw_rom [LT][T/2][WORDS];

  initial begin
    coef_t       pw [N];               // psi^i
    coef_t       psi;
    int unsigned e;
    psi   = psi_root(N);
    pw[0] = 64'd1;
    for (int unsigned i = 1; i < N; i++) pw[i] = const_mul(pw[i-1], psi);
    for (int unsigned l = 0; l < LT; l++) begin
      for (int unsigned bfi = 0; bfi < T / 2; bfi++) begin
        for (int unsigned wd = 0; wd < WORDS; wd++) begin
          int unsigned span, grp, j;
          span = GS ? (1 << l) : (T >> (l + 1));
          grp  = bfi / span;                       // group inside the word
          j    = wd * T + grp * 2 * span;          // first index of the group
          e    = twiddle_exp(N, N / (2 * span) + j / (2 * span));
          tw_rom[l][bfi][wd] = !GS ? pw[e] : (e == 0) ? 64'd1 : mod_neg(pw[N - e]);
        end
      end
    end
  end

  logic [WW-1:0] word;
  coef_t [T-1:0] res;

  // LT levels of T/2 butterflies each; lv[l] is the word entering level l
  coef_t [T-1:0] lv [LT+1];
  assign lv[0] = in_data;
  for (genvar l = 0; l < LT; l++) begin : g_level
    localparam int unsigned SPAN = GS ? (1 << l) : (T >> (l + 1));
    for (genvar bfi = 0; bfi < T / 2; bfi++) begin : g_bf
      localparam int unsigned I0 = (bfi / SPAN) * 2 * SPAN + (bfi % SPAN);
      localparam int unsigned I1 = I0 + SPAN;
      bf_unit #(.GS(GS)) u_bf (
        .x(lv[l][I0]), .y(lv[l][I1]), .w(tw_rom[l][bfi][word]),
        .xo(lv[l+1][I0]), .yo(lv[l+1][I1])
      );
    end
  end
  assign res = lv[LT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= res;
        word     <= (word == WW'(WORDS - 1)) ? '0 : word + 1'b1;
      end
    end
  end
endmodule
