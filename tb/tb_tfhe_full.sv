// tb_tfhe_full -- one full batch of programmable bootstraps on the processor at its
// default size (n = 500, N = 1024, k = 1, l = 2, log2(beta) = 10, T = 2,
// q = 2^64-2^32+1, batch of 4).  The testbench generates a random bootstrapping
// key (NTT domain), four input LWEs and a lookup table, issues four PBS
// instructions with different extract indices, and compares every
// 1025-coefficient output LWE with the reference chain
//   modulus switch -> rotate LUT by -b -> 500 blind-rotation steps -> extract.
// It reports the cycles for the batch and checks that the blind rotation kept
// the pipeline full: at most 500 * 4 * 1024 cycles plus loading, one iteration latency and extraction.
module tb_tfhe_full;
  import tfhe_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 1024, T = 2, K = 1, L = 2, LOGB = 10, NLWE = 500;
  localparam int KS_L = 2, KS_LANES = 2;
  localparam int R = (K + 1) * L, W = N / T, CTW = (K + 1) * W;
  localparam longint KEYW = longint'(NLWE) * CTW;
  localparam longint CT_ADDR = 64'h1000, LUT_ADDR = 64'h2000, RET_ADDR = 64'h4000;
  localparam int NB = 4, CTSTRIDE = 256, RETSTRIDE = 1024;
  localparam int H [NB] = '{7, 0, 100, 1023};

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready;
  instr_t instr;
  logic pbs_rd_req, bsk_rd_req, pbs_wr_en, ks_rd_req, ksk_rd_req, ks_wr_en, busy;
  logic [63:0] pbs_rd_addr, bsk_rd_addr, pbs_wr_addr, ks_rd_addr, ksk_rd_addr, ks_wr_addr;
  coef_t [T-1:0] pbs_rd_data, pbs_wr_data, ks_rd_data, ks_wr_data;
  coef_t [R-1:0][T-1:0] bsk_rd_data;
  coef_t [KS_L-1:0][KS_LANES-1:0] ksk_rd_data;
  logic [31:0] retired;
  int checks = 0, failures = 0;

  u64 lwe [NB][NLWE + 1];
  u64 lut [(K + 1) * N];
  u64 outw [NB][K * N + 1];
  u64 bsk [NLWE][];

  always #5 clk = ~clk;
  tfhe_processor dut (.*);

  // memory model: LWE and LUT regions, BSK, result region
  always @(posedge clk) begin
    if (pbs_rd_req) for (int t = 0; t < T; t++) begin
      longint unsigned a;
      a = pbs_rd_addr;
      if (a >= CT_ADDR && a < CT_ADDR + NB * CTSTRIDE && ((a - CT_ADDR) % CTSTRIDE) * T + t <= NLWE)
        pbs_rd_data[t] <= lwe[(a - CT_ADDR) / CTSTRIDE][((a - CT_ADDR) % CTSTRIDE) * T + t];
      else if (a >= LUT_ADDR && (a - LUT_ADDR) * T + t < (K + 1) * N) pbs_rd_data[t] <= lut[(a - LUT_ADDR) * T + t];
      else pbs_rd_data[t] <= '0;
    end
    if (bsk_rd_req) begin
      longint unsigned ii, oo, cc, rem;
      rem = bsk_rd_addr % KEYW;
      ii = rem / CTW; rem = rem % CTW;
      oo = rem / W; cc = rem % W;
      for (int r = 0; r < R; r++) for (int t = 0; t < T; t++)
        bsk_rd_data[r][t] <= bsk[ii][(r * (K + 1) + oo) * N + cc * T + t];
    end
    if (pbs_wr_en) for (int t = 0; t < T; t++)
      if (((pbs_wr_addr - RET_ADDR) % RETSTRIDE) * T + t <= K * N)
        outw[(pbs_wr_addr - RET_ADDR) / RETSTRIDE][((pbs_wr_addr - RET_ADDR) % RETSTRIDE) * T + t] = pbs_wr_data[t];
    ks_rd_data <= '0;
    ksk_rd_data <= '0;
  end

  initial begin
    #400000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    u64 acc [], ref_lwe [NB][];
    int bb;
    longint t0, t1;
    for (int i = 0; i < NLWE; i++) begin
      bsk[i] = new[R * (K + 1) * N];
      foreach (bsk[i][j]) bsk[i][j] = rand64();
    end
    foreach (lwe[c, i]) lwe[c][i] = rand64();
    foreach (lut[i]) lut[i] = rand64();
    foreach (outw[c, i]) outw[c][i] = '0;
    instr = '0;
    // reference
    for (int c = 0; c < NB; c++) begin
      acc = new[(K + 1) * N];
      foreach (acc[i]) acc[i] = lut[i];
      bb = mswitch(lwe[c][NLWE], N);
      rotate(N, K, (2 * N - bb) % (2 * N), acc);
      for (int i = 0; i < NLWE; i++) br_step(N, K, L, LOGB, mswitch(lwe[c][i], N), acc, bsk[i]);
      extract(N, K, H[c], acc, ref_lwe[c]);
    end
    $display("reference done");

    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    t0 = $time;
    for (int c = 0; c < NB; c++) begin
      instr_valid = 1;
      instr = '{OP_PBS, CT_ADDR + c * CTSTRIDE, LUT_ADDR, RET_ADDR + c * RETSTRIDE, 16'(H[c]), 16'd0, 64'd0, 64'd0};
      @(negedge clk);
    end
    instr_valid = 0;
    while (retired < NB) @(negedge clk);
    t1 = $time;
    $display("cycles for a batch of %0d bootstraps: %0d", NB, (t1 - t0) / 10);
    checks++;
    // 500 iterations x 4 ciphertexts x 1024 words of streaming, plus loading,
    // the pipeline latency of the last iteration and the sample extraction
    if ((t1 - t0) / 10 > NLWE * NB * CTW + 40000) failures++;
    for (int c = 0; c < NB; c++)
      for (int i = 0; i <= K * N; i++) begin
        checks++;
        if (outw[c][i] !== ref_lwe[c][i]) begin
          failures++;
          if (failures < 10) $display("ct %0d coef %0d got %h exp %h", c, i, outw[c][i], ref_lwe[c][i]);
        end
      end
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
