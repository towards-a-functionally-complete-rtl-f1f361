// ks_muladd -- dual-purpose key-switching and MulAdd unit (paper Fig. 10).
//
// Key switch (is_ks = 1): the input LWE (a, b) of dimension K*N is changed to an
// LWE of dimension NLWE under the other key,
//   out = (0, ..., 0, b) + sum_i sum_j decomp(a_i)_j * nKSK_(i,j)
// where nKSK = -KSK is stored negated, so the whole computation is one sum.
// Each a_i is decomposed (L digits, base 2^LOGB, same decomposer as the external
// product), the digits are multiplied with L key entries for LANES output
// coefficients at once (L x LANES modular multipliers), an adder tree sums over
// the digits and an accumulator sums over i.  Output coefficients are produced
// LANES at a time: for every group of LANES positions the unit streams all K*N
// input coefficients (one per cycle).
// MulAdd (is_ks = 0): accumulation is switched off and the same multipliers and
// tree compute out[m] = s0 * x[m] + s1 * y[m] for two LWE ciphertexts x, y of
// dimension NLWE, LANES coefficients per cycle.  Subtraction uses s = q - 1.
// Memory (one-cycle read latency, no stall; word = T coefficients):
//   KS input at addr0: K*N/T mask words, then one word with b in lane 0
//   MulAdd inputs at addr0/addr1 and every result at addr2:
//     ceil((NLWE+1)/T) words, a_0 .. a_(NLWE-1), b, zero padded
//   KSK word (key, g, i) at key*G*K*N + g*K*N + i with G = ceil((NLWE+1)/LANES):
//     entry [j][lane] = -KSK_(i,j) component g*LANES+lane (index NLWE = body)
// Timing: a key switch takes about K*N/T + G*K*N + NLWE/T cycles, a MulAdd
// about 3*(NLWE+1)/T + G cycles.  Paper: decomposition, multipliers, adder tree,
// negated key, is_ks flag.  Own choices: LANES, the key layout, the MulAdd
// operand dimension (NLWE) and the two scalars.
module ks_muladd
  import tfhe_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned T     = 2,
  parameter int unsigned K     = 1,
  parameter int unsigned NLWE  = 500,
  parameter int unsigned L     = 2,
  parameter int unsigned LOGB  = 10,
  parameter int unsigned LANES = 2
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // command
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  logic                           cmd_is_ks,
  input  logic [63:0]                    cmd_addr0,
  input  logic [63:0]                    cmd_addr1,
  input  logic [63:0]                    cmd_addr2,
  input  logic [15:0]                    cmd_key_idx,
  input  coef_t                          cmd_s0,
  input  coef_t                          cmd_s1,
  // ciphertext read port
  output logic                           mem_rd_req,
  output logic [63:0]                    mem_rd_addr,
  input  coef_t [T-1:0]                  mem_rd_data,
  // key-switching key read port
  output logic                           ksk_rd_req,
  output logic [63:0]                    ksk_rd_addr,
  input  coef_t [L-1:0][LANES-1:0]       ksk_rd_data,
  // result write port
  output logic                           mem_wr_en,
  output logic [63:0]                    mem_wr_addr,
  output coef_t [T-1:0]                  mem_wr_data,
  // status
  output logic                           busy,
  output logic                           done
);
  localparam int unsigned NIN   = K * N;                      // KS input dimension
  localparam int unsigned NOUT  = NLWE + 1;                   // output coefficients
  localparam int unsigned G     = (NOUT + LANES - 1) / LANES; // output groups
  localparam int unsigned KSW   = K * N / T + 1;              // KS input words
  localparam int unsigned LWEW  = (NOUT + T - 1) / T;         // LWE words
  localparam int unsigned BUFN  = (NIN + 1 > G * LANES) ? NIN + 1 : G * LANES;
  localparam int unsigned BUF1N = G * LANES;
  localparam int unsigned TLAT  = (L <= 1) ? 0 : $clog2(L);   // adder tree latency
  localparam int unsigned DLAT  = 1 + TLAT;                   // multiplier + tree
  localparam int unsigned IW    = $clog2(NIN + 1);
  localparam int unsigned GW    = $clog2(G + 1);
  localparam int unsigned WW    = $clog2((KSW > LWEW ? KSW : LWEW) + 1);
  localparam longint unsigned KEYW = longint'(G) * NIN;

  typedef struct packed {
    logic        is_ks;
    logic [63:0] addr0;
    logic [63:0] addr1;
    logic [63:0] addr2;
    logic [15:0] key_idx;
    coef_t       s0;
    coef_t       s1;
  } cmd_t;

  typedef enum logic [2:0] {S_IDLE, S_LOAD0, S_LOAD1, S_RUN, S_WRITE} state_e;
  state_e state;

  // ---------------------------------------------------------------- command buffer chain
  cmd_t cmd_in, cmd, cq_head;
  logic cq_empty, cq_full, cq_pop;
  logic [1:0] cq_count;
  assign cmd_in    = '{cmd_is_ks, cmd_addr0, cmd_addr1, cmd_addr2, cmd_key_idx, cmd_s0, cmd_s1};
  assign cmd_ready = !cq_full;
  assign cq_pop    = (state == S_IDLE) && !cq_empty;

  sync_fifo #(.W($bits(cmd_t)), .DEPTH(2)) u_cmd_chain (
    .clk, .rst_n, .push(cmd_valid && cmd_ready), .wr_data(cmd_in), .pop(cq_pop),
    .rd_data(cq_head), .empty(cq_empty), .full(cq_full), .count(cq_count)
  );

  // ---------------------------------------------------------------- local buffers
  coef_t buf0 [BUFN];          // KS input / first MulAdd operand
  coef_t buf1 [BUF1N];         // second MulAdd operand
  coef_t obuf [BUF1N];         // result

  logic [WW-1:0] wcnt;         // word counter for load / write
  logic          ld_v;
  logic [WW-1:0] ld_w;
  logic          ld_sel;
  logic [IW-1:0] icnt;         // input coefficient (KS)
  logic [GW-1:0] gcnt;         // output group
  logic [GW-1:0] res_cnt;      // groups finished
  logic          run_done;

  logic [WW-1:0] load_words;
  assign load_words = cmd.is_ks ? WW'(KSW) : WW'(LWEW);

  assign mem_rd_req  = (state == S_LOAD0 || state == S_LOAD1) && (wcnt < load_words);
  assign mem_rd_addr = ((state == S_LOAD0) ? cmd.addr0 : cmd.addr1) + 64'(wcnt);

  // ---------------------------------------------------------------- datapath stage 0: issue
  logic issue;
  assign issue       = (state == S_RUN) && !run_done;
  assign ksk_rd_req  = issue && cmd.is_ks;
  assign ksk_rd_addr = 64'(cmd.key_idx) * 64'(KEYW) + 64'(gcnt) * 64'(NIN) + 64'(icnt);

  // stage 1: operands (key word arrives now)
  logic                 s1_v, s1_first, s1_last;
  logic [GW-1:0]        s1_g;
  coef_t                s1_x;
  coef_t [LANES-1:0]    s1_c0, s1_c1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_g <= '0; s1_x <= '0;
      s1_c0 <= '0; s1_c1 <= '0;
    end else begin
      s1_v     <= issue;
      s1_first <= !cmd.is_ks || (icnt == '0);
      s1_last  <= !cmd.is_ks || (icnt == IW'(NIN - 1));
      s1_g     <= gcnt;
      s1_x     <= buf0[icnt];
      for (int ln = 0; ln < LANES; ln++) begin
        s1_c0[ln] <= buf0[int'(gcnt) * LANES + ln];
        s1_c1[ln] <= buf1[int'(gcnt) * LANES + ln];
      end
    end
  end

  // stages 2-3: decomposition (two cycles); key word and tags delayed to match
  logic                       dc_v;
  coef_t [L-1:0][0:0]         dc_digits;
  decompose #(.T(1), .L(L), .LOGB(LOGB)) u_decomp (
    .clk, .rst_n, .in_valid(s1_v && cmd.is_ks), .in_data(s1_x), .out_valid(dc_v), .out_digits(dc_digits)
  );

  logic                       s3_v, s2_v, s2_first, s3_first, s2_last, s3_last;
  logic [GW-1:0]              s2_g, s3_g;
  coef_t [L-1:0][LANES-1:0]   s2_k, s3_k;
  coef_t [LANES-1:0]          s2_c0, s3_c0, s2_c1, s3_c1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s2_v, s3_v, s2_first, s3_first, s2_last, s3_last} <= '0;
      s2_g <= '0; s3_g <= '0; s2_k <= '0; s3_k <= '0;
      s2_c0 <= '0; s3_c0 <= '0; s2_c1 <= '0; s3_c1 <= '0;
    end else begin
      s2_v <= s1_v; s2_first <= s1_first; s2_last <= s1_last; s2_g <= s1_g;
      s2_k <= ksk_rd_data; s2_c0 <= s1_c0; s2_c1 <= s1_c1;
      s3_v <= s2_v; s3_first <= s2_first; s3_last <= s2_last; s3_g <= s2_g;
      s3_k <= s2_k; s3_c0 <= s2_c0; s3_c1 <= s2_c1;
    end
  end

  // multiplier operands: digits x key (KS) or scalars x operands (MulAdd)
  coef_t [L-1:0][LANES-1:0] mul_a, mul_b, mul_p;
  logic  [L-1:0][LANES-1:0] mul_v;
  always_comb begin
    for (int j = 0; j < L; j++) begin
      for (int ln = 0; ln < LANES; ln++) begin
        if (cmd.is_ks) begin
          mul_a[j][ln] = dc_digits[j][0];
          mul_b[j][ln] = s3_k[j][ln];
        end else if (j == 0) begin
          mul_a[j][ln] = cmd.s0;
          mul_b[j][ln] = s3_c0[ln];
        end else if (j == 1) begin
          mul_a[j][ln] = cmd.s1;
          mul_b[j][ln] = s3_c1[ln];
        end else begin
          mul_a[j][ln] = '0;
          mul_b[j][ln] = '0;
        end
      end
    end
  end

  for (genvar j = 0; j < L; j++) begin : g_row
    for (genvar ln = 0; ln < LANES; ln++) begin : g_lane
      mod_mul u_mul (
        .clk, .rst_n, .in_valid(s3_v), .a(mul_a[j][ln]), .b(mul_b[j][ln]),
        .out_valid(mul_v[j][ln]), .p(mul_p[j][ln])
      );
    end
  end

  logic              tr_v;
  coef_t [LANES-1:0] tr_sum;
  block_adder_tree #(.NIN(L), .T(LANES)) u_tree (
    .clk, .rst_n, .in_valid(mul_v[0][0]), .in_data(mul_p), .out_valid(tr_v), .out_data(tr_sum)
  );

  // tags travel alongside multiplier and tree
  logic          tg_first [DLAT+1];
  logic          tg_last  [DLAT+1];
  logic [GW-1:0] tg_g     [DLAT+1];
  assign tg_first[0] = s3_first;
  assign tg_last[0]  = s3_last;
  assign tg_g[0]     = s3_g;
  for (genvar d = 0; d < DLAT; d++) begin : g_tag
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        tg_first[d+1] <= 1'b0; tg_last[d+1] <= 1'b0; tg_g[d+1] <= '0;
      end else begin
        tg_first[d+1] <= tg_first[d]; tg_last[d+1] <= tg_last[d]; tg_g[d+1] <= tg_g[d];
      end
    end
  end

  // accumulator: starts from (0, ..., 0, b) for a key switch, off for MulAdd
  coef_t [LANES-1:0] acc, acc_next;
  always_comb begin
    for (int ln = 0; ln < LANES; ln++) begin
      coef_t base;
      if (!tg_first[DLAT]) base = acc[ln];
      else if (cmd.is_ks && (int'(tg_g[DLAT]) * LANES + ln == NLWE)) base = buf0[NIN];
      else base = '0;
      acc_next[ln] = mod_add(base, tr_sum[ln]);
    end
  end

  always_ff @(posedge clk) begin
    if (tr_v) acc <= acc_next;
    if (tr_v && tg_last[DLAT])
      for (int ln = 0; ln < LANES; ln++) obuf[int'(tg_g[DLAT]) * LANES + ln] <= acc_next[ln];
    if (ld_v) begin
      for (int t = 0; t < T; t++) begin
        if (ld_sel) begin
          if (int'(ld_w) * T + t < BUF1N) buf1[int'(ld_w) * T + t] <= (int'(ld_w) * T + t < NOUT) ? mem_rd_data[t] : '0;
        end else if (cmd.is_ks) begin
          if (int'(ld_w) * T + t <= NIN) buf0[int'(ld_w) * T + t] <= mem_rd_data[t];
        end else begin
          if (int'(ld_w) * T + t < BUFN) buf0[int'(ld_w) * T + t] <= (int'(ld_w) * T + t < NOUT) ? mem_rd_data[t] : '0;
        end
      end
    end
  end

  // ---------------------------------------------------------------- result write
  assign mem_wr_en   = (state == S_WRITE);
  assign mem_wr_addr = cmd.addr2 + 64'(wcnt);
  always_comb begin
    for (int t = 0; t < T; t++)
      mem_wr_data[t] = (int'(wcnt) * T + t < NOUT) ? obuf[int'(wcnt) * T + t] : '0;
  end

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cmd <= '0;
      wcnt <= '0; ld_v <= 1'b0; ld_w <= '0; ld_sel <= 1'b0;
      icnt <= '0; gcnt <= '0; res_cnt <= '0; run_done <= 1'b0;
      done <= 1'b0;
    end else begin
      done   <= 1'b0;
      ld_v   <= mem_rd_req;
      ld_w   <= wcnt;
      ld_sel <= (state == S_LOAD1);
      if (tr_v && tg_last[DLAT]) res_cnt <= res_cnt + 1'b1;
      case (state)
        S_IDLE: begin
          if (!cq_empty) begin
            cmd <= cq_head;
            state <= S_LOAD0;
            wcnt <= '0;
          end
        end
        S_LOAD0: begin
          if (wcnt < load_words) wcnt <= wcnt + 1'b1;
          else if (!ld_v) begin
            wcnt <= '0;
            state <= cmd.is_ks ? S_RUN : S_LOAD1;
            icnt <= '0; gcnt <= '0; res_cnt <= '0; run_done <= 1'b0;
          end
        end
        S_LOAD1: begin
          if (wcnt < load_words) wcnt <= wcnt + 1'b1;
          else if (!ld_v) begin
            wcnt <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          if (!run_done) begin
            if (!cmd.is_ks || icnt == IW'(NIN - 1)) begin
              icnt <= '0;
              if (gcnt == GW'(G - 1)) run_done <= 1'b1;
              else gcnt <= gcnt + 1'b1;
            end else begin
              icnt <= icnt + 1'b1;
            end
          end else if (res_cnt == GW'(G)) begin
            state <= S_WRITE;
            wcnt <= '0;
          end
        end
        S_WRITE: begin
          if (wcnt == WW'(LWEW - 1)) begin
            state <= S_IDLE;
            done <= 1'b1;
          end else wcnt <= wcnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
