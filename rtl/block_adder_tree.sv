// block_adder_tree -- pipelined modular adder tree over NIN vectors of T values.
//
// The external product produces (k+1)*l scaled RLWE ciphertext streams that must
// be summed.  As in the paper, the vectors are added pairwise level by level,
// halving their number each time, so ceil(log2(NIN)) levels are needed.  Each
// addition is followed by a simple reduction.  An odd vector at a level is passed
// on unchanged.  Every level is registered: the latency is ceil(log2(NIN))
// cycles (at least one) and a new set of vectors is accepted every cycle.
module block_adder_tree
  import tfhe_pkg::*;
#(
  parameter int unsigned NIN = 4,
  parameter int unsigned T   = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  coef_t [NIN-1:0][T-1:0]   in_data,
  output logic                     out_valid,
  output coef_t [T-1:0]            out_data
);
  localparam int unsigned LEVELS = (NIN <= 1) ? 1 : $clog2(NIN);

  coef_t [NIN-1:0][T-1:0] lvl   [LEVELS+1];
  logic                   lvl_v [LEVELS+1];

  assign lvl[0]   = in_data;
  assign lvl_v[0] = in_valid;

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned CNT  = (NIN + (1 << l) - 1) >> l;   // vectors entering level l
    localparam int unsigned NOUT = (CNT + 1) / 2;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lvl[l+1]   <= '0;
        lvl_v[l+1] <= 1'b0;
      end else begin
        lvl_v[l+1] <= lvl_v[l];
        for (int o = 0; o < NIN; o++) begin
          for (int t = 0; t < T; t++) begin
            if (o < NOUT && 2 * o + 1 < CNT) lvl[l+1][o][t] <= mod_add(lvl[l][2*o][t], lvl[l][2*o+1][t]);
            else if (o < NOUT)               lvl[l+1][o][t] <= lvl[l][2*o][t];
            else                             lvl[l+1][o][t] <= '0;
          end
        end
      end
    end
  end

  assign out_valid = lvl_v[LEVELS];
  assign out_data  = lvl[LEVELS][0];
endmodule
