// pbs -- programmable bootstrapping unit with its memory logic (paper Fig. 9).
//
// For every command (input LWE address, lookup-table address, bootstrapping key
// index, sample-extract index h, return address) it computes
//   acc  = LUT * X^(-b)                          (initialisation, rotate right)
//   acc  = CMUX(BSK_i, acc, acc * X^(a_i))       for i = 0..NLWE-1
//   out  = SampleExtract(acc, h)                  (LWE of dimension K*N)
// and writes out to the return address.  Commands wait in a buffer chain; up to
// BATCH of them are bootstrapped together: every blind-rotation iteration streams
// all accumulators of the batch through one br_iteration, so each key element
// BSK_i is used BATCH times in a row (batched bootstrapping, as in the paper).
// The three rotations use three poly_rotate instances: the init rotation, the one
// inside br_iteration, and the sample extraction.
// Memory: all ports are word ports with one cycle of read latency and no stall,
// standing in for the HBM crossbar.  A data word holds T coefficients.
//   LWE at addr: ceil((NLWE+1)/T) words, a_0 .. a_(NLWE-1), b (zero padded)
//   LUT at addr: (K+1)*N/T words, polynomial 0 first
//   BSK word (key, i, o, c) at key*NLWE*(K+1)*N/T + (i*(K+1)+o)*N/T + c, holding
//     word c of output polynomial o of all (K+1)*L rows of BSK_i (NTT domain,
//     scaled by 1/N)
//   result at ret: K*N/T mask words, then one word with the body in lane 0.
// The LWE coefficients are in Z_q and are modulus-switched to Z_2N on loading by
// rounding to their top log2(2N) bits; the paper does not describe this step.
// The accumulators of a batch live in one on-chip store, one slot per ciphertext.
// Each accumulator is fed back into the blind-rotation iteration as soon as its
// previous iteration has been written back (the output of the iteration feeds
// its own input, in batch order), so with BATCH*(K+1)*N/T at least the iteration
// latency the pipeline never drains: one iteration of the whole batch takes
// BATCH*(K+1)*N/T cycles.  Smaller batches wait for their own results.
module pbs
  import tfhe_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned T     = 2,
  parameter int unsigned K     = 1,
  parameter int unsigned L     = 2,
  parameter int unsigned LOGB  = 10,
  parameter int unsigned NLWE  = 500,
  parameter int unsigned BATCH = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // command
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  logic [63:0]                 cmd_ct_addr,
  input  logic [63:0]                 cmd_lut_addr,
  input  logic [63:0]                 cmd_ret_addr,
  input  logic [15:0]                 cmd_key_idx,
  input  logic [15:0]                 cmd_ext_idx,
  // ciphertext / LUT read port
  output logic                        mem_rd_req,
  output logic [63:0]                 mem_rd_addr,
  input  coef_t [T-1:0]               mem_rd_data,
  // bootstrapping key read port
  output logic                        bsk_rd_req,
  output logic [63:0]                 bsk_rd_addr,
  input  coef_t [(K+1)*L-1:0][T-1:0]  bsk_rd_data,
  // result write port
  output logic                        mem_wr_en,
  output logic [63:0]                 mem_wr_addr,
  output coef_t [T-1:0]               mem_wr_data,
  // status
  output logic                        busy,
  output logic                        done,
  output logic [$clog2(BATCH+1)-1:0]  done_count
);
  localparam int unsigned W      = N / T;
  localparam int unsigned CTW    = (K + 1) * W;              // words per RLWE
  localparam int unsigned LWEW   = (NLWE + 1 + T - 1) / T;   // words per input LWE
  localparam int unsigned AW     = $clog2(2 * N);
  localparam int unsigned BW     = (BATCH <= 1) ? 1 : $clog2(BATCH);
  localparam int unsigned CBW    = $clog2(BATCH + 1);
  localparam int unsigned CW     = $clog2(CTW + 1);
  localparam int unsigned LW     = $clog2(LWEW + 1);
  localparam int unsigned IW     = $clog2(NLWE + 1);
  localparam longint unsigned KEYW = longint'(NLWE) * CTW;   // words per key

  typedef struct packed {
    logic [63:0] ct_addr;
    logic [63:0] lut_addr;
    logic [63:0] ret_addr;
    logic [15:0] key_idx;
    logic [15:0] ext_idx;
  } cmd_t;

  typedef enum logic [2:0] {S_IDLE, S_POP, S_LOAD, S_INIT, S_ROT, S_EXTRACT} state_e;
  state_e state;

  // ---------------------------------------------------------------- command buffer chain
  cmd_t cmd_in, cmd_head;
  logic cq_empty, cq_full, cq_pop;
  logic [$clog2(2*BATCH+1)-1:0] cq_count;
  assign cmd_in    = '{cmd_ct_addr, cmd_lut_addr, cmd_ret_addr, cmd_key_idx, cmd_ext_idx};
  assign cmd_ready = !cq_full;

  sync_fifo #(.W($bits(cmd_t)), .DEPTH(2 * BATCH)) u_cmd_chain (
    .clk, .rst_n, .push(cmd_valid && cmd_ready), .wr_data(cmd_in), .pop(cq_pop),
    .rd_data(cmd_head), .empty(cq_empty), .full(cq_full), .count(cq_count)
  );

  // ---------------------------------------------------------------- batch state
  cmd_t           bcmd  [BATCH];
  logic [AW-1:0]  a_ram [BATCH][NLWE+1];
  coef_t [T-1:0]  acc_mem [BATCH][CTW];
  logic [CBW-1:0] nb;                 // ciphertexts in this batch
  logic [IW-1:0]  it_of [BATCH];      // iterations finished per ciphertext
  logic [BATCH-1:0] rdy;              // accumulator written back, may re-enter
  logic           all_done;

  // issue-side counters
  logic [BW-1:0]  ib;                 // ciphertext being issued
  logic [CW-1:0]  iw;                 // word being issued
  logic           issuing;
  logic           issued_all;         // every ciphertext of this phase issued
  // receive-side counters
  logic [CBW-1:0] rb;
  logic [CW-1:0]  rw;
  logic [BW-1:0]  kb;                 // ciphertext whose key words are requested

  // read-return bookkeeping (one cycle of latency)
  logic           ld_v;
  logic [BW-1:0]  ld_b;
  logic [LW-1:0]  ld_w;

  // modulus switch Z_q -> Z_2N
  function automatic logic [AW-1:0] mswitch(input coef_t x);
    logic [64:0] s;
    s = {1'b0, x} + (65'd1 << (64 - AW - 1));
    return s[64-AW +: AW];
  endfunction

  // ---------------------------------------------------------------- init rotation
  logic          ri_v, ri_ready, ri_ov, ri_last;
  coef_t [T-1:0] ri_od;
  logic [AW-1:0] ri_amt;
  assign ri_v   = ld_v && (state == S_INIT);
  assign ri_amt = AW'(0) - a_ram[ld_b][NLWE];                 // X^(-b)

  poly_rotate #(.N(N), .T(T), .K(K)) u_init_rot (
    .clk, .rst_n, .in_valid(ri_v), .in_data(mem_rd_data), .in_amt(ri_amt), .in_extract(1'b0),
    .in_ready(ri_ready), .out_valid(ri_ov), .out_data(ri_od), .out_last(ri_last)
  );

  // ---------------------------------------------------------------- blind rotation
  logic          br_v, br_ov;
  coef_t [T-1:0] br_d, br_od;
  logic [AW-1:0] br_a;
  logic          br_bsk_req, br_bsk_last;
  logic [$clog2(K+1)-1:0] br_bsk_o;
  logic [$clog2(W)-1:0]   br_bsk_c;

  br_iteration #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB), .ACC_DEPTH(BATCH * CTW), .MAXCT(BATCH)) u_br (
    .clk, .rst_n, .in_valid(br_v), .in_data(br_d), .in_a(br_a),
    .bsk_req(br_bsk_req), .bsk_o(br_bsk_o), .bsk_c(br_bsk_c), .bsk_last(br_bsk_last),
    .bsk_data(bsk_rd_data), .out_valid(br_ov), .out_data(br_od)
  );

  assign bsk_rd_req  = br_bsk_req;
  assign bsk_rd_addr = 64'(bcmd[kb].key_idx) * 64'(KEYW)
                     + (64'(it_of[kb]) * 64'(K + 1) + 64'(br_bsk_o)) * 64'(W) + 64'(br_bsk_c);

  // ---------------------------------------------------------------- sample extraction
  logic          se_v, se_ready, se_ov, se_last;
  coef_t [T-1:0] se_d, se_od;
  logic [AW-1:0] se_h;

  poly_rotate #(.N(N), .T(T), .K(K)) u_extract (
    .clk, .rst_n, .in_valid(se_v), .in_data(se_d), .in_amt(se_h), .in_extract(1'b1),
    .in_ready(se_ready), .out_valid(se_ov), .out_data(se_od), .out_last(se_last)
  );

  // ---------------------------------------------------------------- feed from the accumulator store
  assign br_d = acc_mem[ib][iw[CW-2:0]];
  assign se_d = acc_mem[ib][iw[CW-2:0]];
  assign br_a = a_ram[ib][it_of[ib]];
  assign se_h = AW'(bcmd[ib].ext_idx);
  assign br_v = issuing && (state == S_ROT);
  assign se_v = issuing && (state == S_EXTRACT);

  // memory read port (LWE load and LUT fetch)
  assign mem_rd_req  = issuing && (state == S_LOAD || state == S_INIT);
  assign mem_rd_addr = (state == S_LOAD) ? bcmd[ib].ct_addr + 64'(iw) : bcmd[ib].lut_addr + 64'(iw);

  // result write port
  assign mem_wr_en   = se_ov;
  assign mem_wr_addr = bcmd[rb[BW-1:0]].ret_addr + 64'(rw);
  assign mem_wr_data = se_od;

  assign busy = (state != S_IDLE);

  // words per ciphertext in the current phase
  logic [CW-1:0] phase_words;
  always_comb begin
    case (state)
      S_LOAD:  phase_words = CW'(LWEW);
      default: phase_words = CW'(CTW);
    endcase
  end

  // a new ciphertext may start being issued
  logic can_start;
  always_comb begin
    case (state)
      S_INIT:    can_start = ri_ready && !ld_v;   // previous word absorbed first
      S_ROT:     can_start = rdy[ib] && (it_of[ib] != IW'(NLWE));
      S_EXTRACT: can_start = se_ready;
      default:   can_start = 1'b1;
    endcase
  end

  // ---------------------------------------------------------------- accumulator writes
  always_ff @(posedge clk) begin
    if (ri_ov) acc_mem[rb[BW-1:0]][rw[CW-2:0]] <= ri_od;
    if (br_ov) acc_mem[rb[BW-1:0]][rw[CW-2:0]] <= br_od;
    if (ld_v && state == S_LOAD) begin
      for (int t = 0; t < T; t++) begin
        if (int'(ld_w) * T + t <= NLWE) a_ram[ld_b][int'(ld_w) * T + t] <= mswitch(mem_rd_data[t]);
      end
    end
    if (cq_pop) bcmd[nb[BW-1:0]] <= cmd_head;
  end

  assign cq_pop = (state == S_POP) && !cq_empty && (nb < CBW'(BATCH));

  // every accumulator of the batch has finished all NLWE iterations
  always_comb begin
    all_done = 1'b1;
    for (int b = 0; b < BATCH; b++)
      if (CBW'(b) < nb && it_of[b] != IW'(NLWE)) all_done = 1'b0;
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      nb <= '0; rdy <= '0;
      for (int b = 0; b < BATCH; b++) it_of[b] <= '0;
      ib <= '0; iw <= '0; issuing <= 1'b0; issued_all <= 1'b0;
      rb <= '0; rw <= '0; kb <= '0;
      ld_v <= 1'b0; ld_b <= '0; ld_w <= '0;
      done <= 1'b0; done_count <= '0;
    end else begin
      done  <= 1'b0;
      ld_v  <= mem_rd_req;
      ld_b  <= ib;
      ld_w  <= LW'(iw);

      // issue counter shared by all phases: one ciphertext at a time, nb in total
      if (state inside {S_LOAD, S_INIT, S_ROT, S_EXTRACT}) begin
        if (!issuing) begin
          if (!issued_all && can_start) begin
            issuing <= 1'b1;
            if (state == S_ROT) rdy[ib] <= 1'b0;
          end
        end else if (iw == phase_words - 1'b1) begin
          issuing <= 1'b0;
          iw <= '0;
          if (CBW'(ib) == nb - 1'b1) begin
            ib <= '0;
            if (state != S_ROT) issued_all <= 1'b1;   // rotation loops over the batch
          end else ib <= ib + 1'b1;
        end else begin
          iw <= iw + 1'b1;
        end
      end

      // key-word requests follow the accumulators through the external product
      if (br_bsk_req && br_bsk_last) kb <= (CBW'(kb) == nb - 1'b1) ? '0 : kb + 1'b1;

      case (state)
        S_IDLE: begin
          nb <= '0;
          if (!cq_empty && (cq_count >= ($clog2(2*BATCH+1))'(BATCH) || !cmd_valid)) state <= S_POP;
        end
        S_POP: begin
          if (cq_pop) nb <= nb + 1'b1;
          else begin
            state <= S_LOAD;
            ib <= '0; iw <= '0; rb <= '0; rw <= '0; issued_all <= 1'b0;
          end
        end
        S_LOAD: begin
          // done when everything is issued and the last word has returned
          if (issued_all && !issuing && !ld_v) begin
            state <= S_INIT;
            issued_all <= 1'b0;
          end
        end
        S_INIT: begin
          if (ri_ov) begin
            if (ri_last) begin rw <= '0; rb <= rb + 1'b1; end
            else rw <= rw + 1'b1;
          end
          if (rb == nb) begin
            state <= S_ROT;
            kb <= '0;
            for (int b = 0; b < BATCH; b++) begin
              it_of[b] <= '0;
              rdy[b]   <= (CBW'(b) < nb);
            end
            ib <= '0; iw <= '0; rb <= '0; rw <= '0; issued_all <= 1'b0;
          end
        end
        S_ROT: begin
          if (br_ov) begin
            if (rw == CW'(CTW - 1)) begin
              rw <= '0;
              rb <= (rb == nb - 1'b1) ? '0 : rb + 1'b1;
              it_of[rb[BW-1:0]] <= it_of[rb[BW-1:0]] + 1'b1;
              rdy[rb[BW-1:0]]   <= 1'b1;
            end else rw <= rw + 1'b1;
          end
          if (all_done) begin
            state <= S_EXTRACT;
            ib <= '0; iw <= '0; rb <= '0; rw <= '0; issued_all <= 1'b0; kb <= '0;
          end
        end
        S_EXTRACT: begin
          if (se_ov) begin
            if (se_last) begin rw <= '0; rb <= rb + 1'b1; end
            else rw <= rw + 1'b1;
          end
          if (rb == nb) begin
            state <= S_IDLE;
            done <= 1'b1;
            done_count <= nb;
            ib <= '0; iw <= '0; rb <= '0; rw <= '0; issued_all <= 1'b0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
