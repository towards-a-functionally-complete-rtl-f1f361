// tb_pbs -- bootstraps five LWE ciphertexts (two keys, several lookup tables and
// sample-extract indices) on a reduced-size unit (N = 16, n = 4, batch of 2) and
// compares every result word with the reference chain
// modulus switch -> rotate LUT by -b -> n blind-rotation steps -> sample extract.
// Commands arrive as a burst of three and, after a pause, a burst of two, so both
// full and partial batches occur.
module tb_pbs;
  import tb_ref_pkg::*;
  localparam int N = 16, T = 2, K = 1, L = 2, LOGB = 10, NLWE = 4, BATCH = 2;
  localparam int R = (K + 1) * L, W = N / T, CTW = (K + 1) * W, LWEW = (NLWE + 1 + T - 1) / T;
  localparam int NCMD = 5, NKEY = 2;
  localparam longint KEYW = longint'(NLWE) * CTW;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready;
  logic [63:0] cmd_ct_addr, cmd_lut_addr, cmd_ret_addr;
  logic [15:0] cmd_key_idx, cmd_ext_idx;
  logic mem_rd_req, bsk_rd_req, mem_wr_en, busy, done;
  logic [63:0] mem_rd_addr, bsk_rd_addr, mem_wr_addr;
  logic [T-1:0][63:0] mem_rd_data, mem_wr_data;
  logic [R-1:0][T-1:0][63:0] bsk_rd_data;
  logic [$clog2(BATCH+1)-1:0] done_count;
  int checks = 0, failures = 0, batches = 0, partial = 0, finished = 0;

  u64 dmem [longint unsigned];        // word-addressed, lane-expanded: addr*T + t
  u64 bsk [NKEY][NLWE][];

  always #5 clk = ~clk;
  pbs #(.N(N), .T(T), .K(K), .L(L), .LOGB(LOGB), .NLWE(NLWE), .BATCH(BATCH)) dut (.*);

  always @(posedge clk) begin
    if (mem_rd_req) for (int t = 0; t < T; t++)
      mem_rd_data[t] <= dmem.exists(mem_rd_addr * T + t) ? dmem[mem_rd_addr * T + t] : 64'd0;
    if (bsk_rd_req) begin
      longint unsigned kk, ii, oo, cc, rem;
      kk = bsk_rd_addr / KEYW; rem = bsk_rd_addr % KEYW;
      ii = rem / CTW; rem = rem % CTW;
      oo = rem / W; cc = rem % W;
      for (int r = 0; r < R; r++) for (int t = 0; t < T; t++)
        bsk_rd_data[r][t] <= bsk[kk][ii][(r * (K + 1) + oo) * N + cc * T + t];
    end
    if (mem_wr_en) for (int t = 0; t < T; t++) dmem[mem_wr_addr * T + t] = mem_wr_data[t];
    if (done) begin
      batches++;
      finished += int'(done_count);
      if (done_count != BATCH) partial++;
    end
  end

  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    u64 expect_lwe [NCMD][];
    longint unsigned ct_a [NCMD], lut_a [NCMD], ret_a [NCMD];
    int key_of [NCMD], h_of [NCMD];
    for (int k = 0; k < NKEY; k++) for (int i = 0; i < NLWE; i++) begin
      bsk[k][i] = new[R * (K + 1) * N];
      foreach (bsk[k][i][j]) bsk[k][i][j] = rand64();
    end
    // workload and reference results
    for (int c = 0; c < NCMD; c++) begin
      u64 lwe [], lut [], acc [];
      int b;
      ct_a[c]  = 1000 + c * 16;
      lut_a[c] = 2000 + (c % 3) * 64;
      ret_a[c] = 5000 + c * 64;
      key_of[c] = c % NKEY;
      h_of[c] = (c == 0) ? 0 : (c == 1) ? N - 1 : $urandom_range(0, N - 1);
      lwe = new[NLWE + 1];
      foreach (lwe[i]) begin lwe[i] = rand64(); dmem[(ct_a[c] * T) + i] = lwe[i]; end
      lut = new[(K + 1) * N];
      foreach (lut[i]) begin
        if (!dmem.exists(lut_a[c] * T + i)) dmem[lut_a[c] * T + i] = rand64();
        lut[i] = dmem[lut_a[c] * T + i];
      end
      acc = new[(K + 1) * N];
      foreach (lut[i]) acc[i] = lut[i];
      b = mswitch(lwe[NLWE], N);
      rotate(N, K, (2 * N - b) % (2 * N), acc);
      for (int i = 0; i < NLWE; i++) br_step(N, K, L, LOGB, mswitch(lwe[i], N), acc, bsk[key_of[c]][i]);
      extract(N, K, h_of[c], acc, expect_lwe[c]);
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCMD; c++) begin
      if (c == 3) begin
        @(negedge clk);
        cmd_valid = 0;
        wait (done); @(negedge clk);
      end
      @(negedge clk);
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1;
      cmd_ct_addr = ct_a[c]; cmd_lut_addr = lut_a[c]; cmd_ret_addr = ret_a[c];
      cmd_key_idx = 16'(key_of[c]); cmd_ext_idx = 16'(h_of[c]);
    end
    @(negedge clk); cmd_valid = 0;
    while (finished < NCMD) @(negedge clk);
    repeat (5) @(negedge clk);
    for (int c = 0; c < NCMD; c++) begin
      for (int i = 0; i < K * N; i++) begin
        checks++;
        if (dmem[ret_a[c] * T + i] !== expect_lwe[c][i]) begin
          failures++;
          if (failures < 40) $display("ct %0d coef %0d got %h exp %h", c, i, dmem[ret_a[c] * T + i], expect_lwe[c][i]);
        end
      end
      checks++;
      if (dmem[ret_a[c] * T + K * N] !== expect_lwe[c][K * N]) failures++;
    end
    checks++; if (batches < 3) begin failures++; $display("batches %0d", batches); end
    checks++; if (partial < 1) failures++;
    $display("batches=%0d partial=%0d", batches, partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
