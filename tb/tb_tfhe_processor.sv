// tb_tfhe_processor -- end-to-end test of the processor at reduced size
// (N = 16, n = 4, batch of 2).  One shared memory serves both units.  The
// program is a dependent chain as an application would issue it:
//   PBS x3 (two keys, different LUTs and extract indices)
//   KS  of two PBS results          (must wait for the PBS unit: hazard stall)
//   MULADD  ks0 - ks1  and  s * ks0 + t * ks1
//   PBS of a MulAdd result           (must wait for the key-switch unit)
// Every result word is compared with a reference computed by tb_ref_pkg.  The
// testbench also counts the mechanisms of the design and fails if one of them
// never happened: full batch, partial batch, accumulator fed back while other
// results of the batch are still arriving, rotation by
// an amount >= N (negacyclic wrap), dispatch stall on a hazard, key switch,
// MulAdd, subtraction by scalar q - 1.
module tb_tfhe_processor;
  import tfhe_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 16, T = 2, K = 1, L = 2, LOGB = 10, NLWE = 4, BATCH = 2;
  localparam int KS_L = 2, KS_LOGB = 10, KS_LANES = 2;
  localparam int R = (K + 1) * L, W = N / T, CTW = (K + 1) * W;
  localparam int NIN = K * N, NOUT = NLWE + 1, G = (NOUT + KS_LANES - 1) / KS_LANES;
  localparam longint KEYW = longint'(NLWE) * CTW;
  localparam int NKEY = 2, NINSTR = 8;

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

  u64 dmem [longint unsigned];        // lane-expanded: word address * T + lane
  u64 bsk [NKEY][NLWE][];
  u64 nksk [NIN][KS_L][G * KS_LANES];

  always #5 clk = ~clk;
  tfhe_processor #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB), .NLWE(NLWE), .BATCH(BATCH),
                   .KS_L(KS_L), .KS_LOGB(KS_LOGB), .KS_LANES(KS_LANES)) dut (.*);

  // ---------------------------------------------------------------- memory model
  always @(posedge clk) begin
    if (pbs_rd_req) for (int t = 0; t < T; t++)
      pbs_rd_data[t] <= dmem.exists(pbs_rd_addr * T + t) ? dmem[pbs_rd_addr * T + t] : 64'd0;
    if (ks_rd_req) for (int t = 0; t < T; t++)
      ks_rd_data[t] <= dmem.exists(ks_rd_addr * T + t) ? dmem[ks_rd_addr * T + t] : 64'd0;
    if (bsk_rd_req) begin
      longint unsigned kk, ii, oo, cc, rem;
      kk = bsk_rd_addr / KEYW; rem = bsk_rd_addr % KEYW;
      ii = rem / CTW; rem = rem % CTW;
      oo = rem / W; cc = rem % W;
      for (int r = 0; r < R; r++) for (int t = 0; t < T; t++)
        bsk_rd_data[r][t] <= bsk[kk][ii][(r * (K + 1) + oo) * N + cc * T + t];
    end
    if (ksk_rd_req) begin
      longint unsigned gg, ii;
      gg = ksk_rd_addr / NIN; ii = ksk_rd_addr % NIN;
      for (int j = 0; j < KS_L; j++) for (int ln = 0; ln < KS_LANES; ln++)
        ksk_rd_data[j][ln] <= nksk[ii][j][gg * KS_LANES + ln];
    end
    if (pbs_wr_en) for (int t = 0; t < T; t++) dmem[pbs_wr_addr * T + t] = pbs_wr_data[t];
    if (ks_wr_en)  for (int t = 0; t < T; t++) dmem[ks_wr_addr * T + t] = ks_wr_data[t];
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_full = 0, n_partial = 0, n_feedback = 0, n_wrap = 0, n_stall = 0, n_ks = 0, n_muladd = 0, n_sub = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.pbs_done && dut.pbs_done_count == BATCH) n_full++;
    if (dut.pbs_done && dut.pbs_done_count != BATCH) n_partial++;
    if (dut.u_pbs.br_v && dut.u_pbs.br_ov) n_feedback++;
    if (dut.u_pbs.u_br.in_first && dut.u_pbs.u_br.in_a >= N) n_wrap++;
    if (!dut.iq_empty && !dut.iq_pop &&
        ((dut.head_pbs && dut.ks_pending != 0) || (!dut.head_pbs && dut.pbs_pending != 0))) n_stall++;
    if (dut.ks_go && dut.iq_head.op == OP_KS) n_ks++;
    if (dut.ks_go && dut.iq_head.op == OP_MULADD) n_muladd++;
    if (dut.ks_go && dut.iq_head.op == OP_MULADD && dut.iq_head.scalar0 == Q - 1) n_sub++;
  end

  initial begin
    #50000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(opcode_e op, longint unsigned a0, longint unsigned a1, longint unsigned a2,
                       int key, int h, u64 s0, u64 s1);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr_valid = 1;
    instr = '{op, a0, a1, a2, 16'(h), 16'(key), s0, s1};
    @(negedge clk);
    instr_valid = 0;
  endtask

  // ---------------------------------------------------------------- program
  // PBS jobs: input LWE address, LUT address, key, extract index, result address
  longint unsigned pj_ct [4] = '{100, 108, 116, 1500};
  longint unsigned pj_lut [4] = '{200, 300, 200, 300};
  int              pj_key [4] = '{0, 1, 0, 1};
  int              pj_h   [4] = '{0, 5, N - 1, 3};
  longint unsigned pj_ret [4] = '{1000, 1100, 1200, 1700};

  initial begin
    u64 expv [8][];
    longint unsigned expa [8];
    u64 s_a, s_b;
    for (int k = 0; k < NKEY; k++) for (int i = 0; i < NLWE; i++) begin
      bsk[k][i] = new[R * (K + 1) * N];
      foreach (bsk[k][i][j]) bsk[k][i][j] = rand64();
    end
    foreach (nksk[i, j, m]) nksk[i][j][m] = (m < NOUT) ? rand64() : 64'd0;
    // inputs: three LWE ciphertexts and two LUTs
    for (int c = 0; c < 3; c++)
      for (int i = 0; i <= NLWE; i++) dmem[(100 + c * 8) * T + i] = rand64();
    for (int i = 0; i < (K + 1) * N; i++) begin
      dmem[200 * T + i] = rand64();
      dmem[300 * T + i] = rand64();
    end
    s_a = rand64(); s_b = rand64();

    // reference: the same chain computed directly, results stored in the reference
    // memory image so later steps read them; compared afterwards
    for (int jb = 0; jb < 4; jb++) begin
      u64 acc [], res [];
      int bb;
      if (jb == 3) begin
        // key switches of PBS 0 and 1, then the two MulAdds
        for (int q2 = 0; q2 < 2; q2++) begin
          u64 ksr [];
          ksr = new[NOUT];
          for (int m = 0; m < NOUT; m++) ksr[m] = (m == NLWE) ? dmem[(1000 + q2 * 100) * T + NIN] : 64'd0;
          for (int i = 0; i < NIN; i++) begin
            u64 d [];
            decomp(dmem[(1000 + q2 * 100) * T + i], KS_L, KS_LOGB, d);
            for (int j = 0; j < KS_L; j++)
              for (int m = 0; m < NOUT; m++) ksr[m] = radd(ksr[m], rmul(d[j], nksk[i][j][m]));
          end
          expv[3 + q2] = ksr; expa[3 + q2] = 1300 + q2 * 100;
          foreach (ksr[m]) dmem[(1300 + q2 * 100) * T + m] = ksr[m];
        end
        expv[5] = new[NOUT]; expv[6] = new[NOUT];
        for (int m = 0; m < NOUT; m++) begin
          expv[5][m] = rsub(expv[3][m], expv[4][m]);
          expv[6][m] = radd(rmul(s_a, expv[3][m]), rmul(s_b, expv[4][m]));
          dmem[1500 * T + m] = expv[5][m];
        end
        expa[5] = 1500; expa[6] = 1600;
      end
      acc = new[(K + 1) * N];
      foreach (acc[i]) acc[i] = dmem[pj_lut[jb] * T + i];
      bb = mswitch(dmem[pj_ct[jb] * T + NLWE], N);
      rotate(N, K, (2 * N - bb) % (2 * N), acc);
      for (int i = 0; i < NLWE; i++) br_step(N, K, L, LOGB, mswitch(dmem[pj_ct[jb] * T + i], N), acc, bsk[pj_key[jb]][i]);
      extract(N, K, pj_h[jb], acc, res);
      foreach (res[i]) dmem[pj_ret[jb] * T + i] = res[i];
      expv[jb < 3 ? jb : 7] = res;
      expa[jb < 3 ? jb : 7] = pj_ret[jb];
    end
    // clear the result area so the hardware has to produce it
    begin
      longint unsigned keys [$];
      foreach (dmem[a]) if (a >= 1000 * T) keys.push_back(a);
      foreach (keys[i]) dmem.delete(keys[i]);
    end

    repeat (3) @(negedge clk); rst_n = 1;
    for (int jb = 0; jb < 3; jb++) issue(OP_PBS, pj_ct[jb], pj_lut[jb], pj_ret[jb], pj_key[jb], pj_h[jb], 0, 0);
    issue(OP_KS, 1000, 0, 1300, 0, 0, 0, 0);
    issue(OP_KS, 1100, 0, 1400, 0, 0, 0, 0);
    issue(OP_MULADD, 1400, 1300, 1500, 0, 0, Q - 1, 64'd1);   // ks0 - ks1 = (q-1)*ks1 + ks0
    issue(OP_MULADD, 1300, 1400, 1600, 0, 0, s_a, s_b);
    issue(OP_PBS, pj_ct[3], pj_lut[3], pj_ret[3], pj_key[3], pj_h[3], 0, 0);
    while (retired < NINSTR) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int e = 0; e < 8; e++)
      foreach (expv[e][i]) begin
        checks++;
        if (!dmem.exists(expa[e] * T + i) || dmem[expa[e] * T + i] !== expv[e][i]) begin
          failures++;
          if (failures < 20) $display("result %0d coef %0d exp %h", e, i, expv[e][i]);
        end
      end
    $display("full=%0d partial=%0d feedback=%0d wrap=%0d stall=%0d ks=%0d muladd=%0d sub=%0d",
             n_full, n_partial, n_feedback, n_wrap, n_stall, n_ks, n_muladd, n_sub);
    checks += 9;
    if (n_full == 0) failures++;
    if (n_partial == 0) failures++;
    if (n_feedback == 0) failures++;
    if (n_wrap == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_ks != 2) failures++;
    if (n_muladd != 2) failures++;
    if (n_sub == 0) failures++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
