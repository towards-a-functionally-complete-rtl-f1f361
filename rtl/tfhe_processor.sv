// tfhe_processor -- programmable TFHE processor core (paper Fig. 11, FPGA part).
//
// Instructions (tfhe_pkg::instr_t) enter a buffer chain and are dispatched in
// order to one of two execution units:
//   OP_PBS    -> pbs        programmable bootstrapping with sample extraction,
//                           batched (up to BATCH commands share each key read)
//   OP_KS     -> ks_muladd  key switch from dimension K*N back to NLWE
//   OP_MULADD -> ks_muladd  s0 * x + s1 * y on LWE ciphertexts of dimension NLWE
// Both units read operands from and write results to memory themselves, using
// the addresses in the instruction.  Hazards: consecutive instructions for the
// same unit are issued back to back; when the target unit changes, dispatch
// waits until the other unit has finished everything it was given, so a key
// switch always sees the result of an earlier bootstrap and vice versa (this
// rule is this design's choice; the paper leaves hazard handling open).
// Memory ports: each unit has a word read port for ciphertexts / lookup tables,
// a key read port and a write port.  All reads return data exactly one cycle
// after the request and never stall; in the paper these are AXI ports of the
// HBM crossbar, which are outside this design.
// Status: busy while anything is queued or executing; retired counts completed
// instructions.
module tfhe_processor
  import tfhe_pkg::*;
#(
  parameter int unsigned N        = 1024,
  parameter int unsigned T        = 2,
  parameter int unsigned K        = 1,
  parameter int unsigned L        = 2,
  parameter int unsigned LOGB     = 10,
  parameter int unsigned NLWE     = 500,
  parameter int unsigned BATCH    = 4,
  parameter int unsigned KS_L     = 2,
  parameter int unsigned KS_LOGB  = 10,
  parameter int unsigned KS_LANES = 2,
  parameter int unsigned IQ_DEPTH = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // instruction stream
  input  logic                                instr_valid,
  output logic                                instr_ready,
  input  instr_t                              instr,
  // PBS unit memory ports
  output logic                                pbs_rd_req,
  output logic [63:0]                         pbs_rd_addr,
  input  coef_t [T-1:0]                       pbs_rd_data,
  output logic                                bsk_rd_req,
  output logic [63:0]                         bsk_rd_addr,
  input  coef_t [(K+1)*L-1:0][T-1:0]          bsk_rd_data,
  output logic                                pbs_wr_en,
  output logic [63:0]                         pbs_wr_addr,
  output coef_t [T-1:0]                       pbs_wr_data,
  // key-switch / MulAdd unit memory ports
  output logic                                ks_rd_req,
  output logic [63:0]                         ks_rd_addr,
  input  coef_t [T-1:0]                       ks_rd_data,
  output logic                                ksk_rd_req,
  output logic [63:0]                         ksk_rd_addr,
  input  coef_t [KS_L-1:0][KS_LANES-1:0]      ksk_rd_data,
  output logic                                ks_wr_en,
  output logic [63:0]                         ks_wr_addr,
  output coef_t [T-1:0]                       ks_wr_data,
  // status
  output logic                                busy,
  output logic [31:0]                         retired
);
  // ---------------------------------------------------------------- instruction buffer chain
  instr_t iq_head;
  logic   iq_empty, iq_full, iq_pop;
  logic [$clog2(IQ_DEPTH+1)-1:0] iq_count;
  assign instr_ready = !iq_full;

  sync_fifo #(.W($bits(instr_t)), .DEPTH(IQ_DEPTH)) u_instr_chain (
    .clk, .rst_n, .push(instr_valid && instr_ready), .wr_data(instr), .pop(iq_pop),
    .rd_data(iq_head), .empty(iq_empty), .full(iq_full), .count(iq_count)
  );

  // ---------------------------------------------------------------- dispatch
  logic pbs_cmd_ready, ks_cmd_ready, pbs_busy, ks_busy, pbs_done, ks_done;
  logic [$clog2(BATCH+1)-1:0] pbs_done_count;
  logic [31:0] pbs_pending, ks_pending;       // issued, not yet completed
  logic head_pbs, pbs_go, ks_go;

  assign head_pbs = (iq_head.op == OP_PBS);
  assign pbs_go   = !iq_empty &&  head_pbs && pbs_cmd_ready && (ks_pending == '0);
  assign ks_go    = !iq_empty && !head_pbs && ks_cmd_ready  && (pbs_pending == '0);
  assign iq_pop   = pbs_go || ks_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pbs_pending <= '0;
      ks_pending  <= '0;
      retired     <= '0;
    end else begin
      pbs_pending <= pbs_pending + (pbs_go ? 32'd1 : 32'd0) - (pbs_done ? 32'(pbs_done_count) : 32'd0);
      ks_pending  <= ks_pending + (ks_go ? 32'd1 : 32'd0) - (ks_done ? 32'd1 : 32'd0);
      retired     <= retired + (pbs_done ? 32'(pbs_done_count) : 32'd0) + (ks_done ? 32'd1 : 32'd0);
    end
  end

  assign busy = !iq_empty || (pbs_pending != '0) || (ks_pending != '0) || pbs_busy || ks_busy;

  // ---------------------------------------------------------------- PBS unit
  pbs #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB), .NLWE(NLWE), .BATCH(BATCH)) u_pbs (
    .clk, .rst_n,
    .cmd_valid(pbs_go), .cmd_ready(pbs_cmd_ready),
    .cmd_ct_addr(iq_head.addr0), .cmd_lut_addr(iq_head.addr1), .cmd_ret_addr(iq_head.addr2),
    .cmd_key_idx(iq_head.key_idx), .cmd_ext_idx(iq_head.ext_idx),
    .mem_rd_req(pbs_rd_req), .mem_rd_addr(pbs_rd_addr), .mem_rd_data(pbs_rd_data),
    .bsk_rd_req, .bsk_rd_addr, .bsk_rd_data,
    .mem_wr_en(pbs_wr_en), .mem_wr_addr(pbs_wr_addr), .mem_wr_data(pbs_wr_data),
    .busy(pbs_busy), .done(pbs_done), .done_count(pbs_done_count)
  );

  // ---------------------------------------------------------------- key-switch / MulAdd unit
  ks_muladd #(.N(N), .T(T), .K(K), .NLWE(NLWE), .L(KS_L), .LOGB(KS_LOGB), .LANES(KS_LANES)) u_ks (
    .clk, .rst_n,
    .cmd_valid(ks_go), .cmd_ready(ks_cmd_ready), .cmd_is_ks(iq_head.op == OP_KS),
    .cmd_addr0(iq_head.addr0), .cmd_addr1(iq_head.addr1), .cmd_addr2(iq_head.addr2),
    .cmd_key_idx(iq_head.key_idx), .cmd_s0(iq_head.scalar0), .cmd_s1(iq_head.scalar1),
    .mem_rd_req(ks_rd_req), .mem_rd_addr(ks_rd_addr), .mem_rd_data(ks_rd_data),
    .ksk_rd_req, .ksk_rd_addr, .ksk_rd_data,
    .mem_wr_en(ks_wr_en), .mem_wr_addr(ks_wr_addr), .mem_wr_data(ks_wr_data),
    .busy(ks_busy), .done(ks_done)
  );
endmodule
