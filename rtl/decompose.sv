// decompose -- pipelined signed gadget decomposition of T coefficients per cycle.
//
// Each coefficient x in Z_q is rounded to its top L*LOGB bits (the lower
// 64 - L*LOGB bits are removed with rounding), then split into L digits of LOGB
// bits.  Working from the least significant digit upwards, a digit whose most
// significant bit is set (value >= beta/2) is replaced by digit - beta and a carry
// of one is added to the next digit, so every digit lies in [-beta/2, beta/2).
// Negative digits are returned in Z_q as q - |d| (simple reduction).  Digit 0 is
// the most significant one (weight q/beta^1 in the paper's notation), digit L-1
// the least significant.  The carry out of digit 0 is dropped.
// This follows the paper's description and its decomposition figure (round and
// reduce, split, MSB extraction, add, simple reduction).  The exact tie and
// wrap-around behaviour at the top digit is this design's choice, since the paper
// does not state it.
// Timing: two register stages (round, then split/carry/reduce); one word per
// cycle; digits of a word leave together on out_digits[j].
module decompose
  import tfhe_pkg::*;
#(
  parameter int unsigned T    = 2,
  parameter int unsigned L    = 2,
  parameter int unsigned LOGB = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  coef_t [T-1:0]        in_data,
  output logic                 out_valid,
  output coef_t [L-1:0][T-1:0] out_digits
);
  localparam int unsigned KEEP = L * LOGB;      // bits kept after rounding
  localparam int unsigned DROP = 64 - KEEP;     // bits removed by rounding

  logic [KEEP-1:0] rounded [T];
  logic            r_valid;

  // stage 1: round and reduce to KEEP bits
  logic [KEEP-1:0] rounded_d [T];
  always_comb begin
    for (int t = 0; t < T; t++) begin
      logic [64:0] s;
      s = {1'b0, in_data[t]} + (65'd1 << (DROP - 1));
      rounded_d[t] = s[DROP +: KEEP];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      for (int t = 0; t < T; t++) rounded[t] <= '0;
    end else begin
      r_valid <= in_valid;
      for (int t = 0; t < T; t++) rounded[t] <= rounded_d[t];
    end
  end

  // stage 2: split into digits, propagate MSB carries, map negatives into Z_q
  coef_t [L-1:0][T-1:0] digits_d;
  always_comb begin
    for (int t = 0; t < T; t++) begin
      logic          carry;
      logic [LOGB:0] raw;
      carry = 1'b0;
      for (int j = L - 1; j >= 0; j--) begin
        raw = {1'b0, rounded[t][(L - 1 - j) * LOGB +: LOGB]} + {{LOGB{1'b0}}, carry};
        carry = raw[LOGB] | raw[LOGB-1];          // digit >= beta/2
        if (carry) digits_d[j][t] = mod_neg(64'(({1'b1, {LOGB{1'b0}}}) - raw));
        else       digits_d[j][t] = 64'(raw);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_digits <= '0;
    end else begin
      out_valid  <= r_valid;
      out_digits <= digits_d;
    end
  end
endmodule
