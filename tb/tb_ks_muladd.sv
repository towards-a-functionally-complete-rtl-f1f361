// tb_ks_muladd -- runs key switches (two keys) and MulAdds (including a
// subtraction with scalar q - 1) on a reduced-size unit (N = 16, output
// dimension 5, two lanes) and compares every output coefficient with
// (0, b) + sum_i sum_j decomp(a_i)_j * nKSK_(i,j) and s0 * x + s1 * y.
// Commands are issued back to back, so the command buffer chain is exercised.
module tb_ks_muladd;
  import tb_ref_pkg::*;
  localparam int N = 16, T = 2, K = 1, NLWE = 5, L = 2, LOGB = 10, LANES = 2;
  localparam int NIN = K * N, NOUT = NLWE + 1, G = (NOUT + LANES - 1) / LANES, LWEW = (NOUT + T - 1) / T;
  localparam int NKEY = 2, NCMD = 6;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_is_ks;
  logic [63:0] cmd_addr0, cmd_addr1, cmd_addr2, cmd_s0, cmd_s1;
  logic [15:0] cmd_key_idx;
  logic mem_rd_req, ksk_rd_req, mem_wr_en, busy, done;
  logic [63:0] mem_rd_addr, ksk_rd_addr, mem_wr_addr;
  logic [T-1:0][63:0] mem_rd_data, mem_wr_data;
  logic [L-1:0][LANES-1:0][63:0] ksk_rd_data;
  int checks = 0, failures = 0, finished = 0;

  u64 dmem [longint unsigned];
  u64 nksk [NKEY][NIN][L][G * LANES];

  always #5 clk = ~clk;
  ks_muladd #(.N(N), .T(T), .K(K), .NLWE(NLWE), .L(L), .LOGB(LOGB), .LANES(LANES)) dut (.*);

  always @(posedge clk) begin
    if (mem_rd_req) for (int t = 0; t < T; t++)
      mem_rd_data[t] <= dmem.exists(mem_rd_addr * T + t) ? dmem[mem_rd_addr * T + t] : 64'd0;
    if (ksk_rd_req) begin
      longint unsigned kk, gg, ii;
      kk = ksk_rd_addr / (G * NIN); gg = (ksk_rd_addr % (G * NIN)) / NIN; ii = ksk_rd_addr % NIN;
      for (int j = 0; j < L; j++) for (int ln = 0; ln < LANES; ln++)
        ksk_rd_data[j][ln] <= nksk[kk][ii][j][gg * LANES + ln];
    end
    if (mem_wr_en) for (int t = 0; t < T; t++) dmem[mem_wr_addr * T + t] = mem_wr_data[t];
    if (done) finished++;
  end

  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    u64 expect_out [NCMD][NOUT];
    longint unsigned ret_a [NCMD];
    int is_ks [NCMD], key_of [NCMD];
    u64 s0_of [NCMD], s1_of [NCMD];
    longint unsigned a0_of [NCMD], a1_of [NCMD];
    foreach (nksk[k, i, j, m]) nksk[k][i][j][m] = (m < NOUT) ? rand64() : 64'd0;
    for (int c = 0; c < NCMD; c++) begin
      is_ks[c] = (c % 2 == 0);
      key_of[c] = (c / 2) % NKEY;
      ret_a[c] = 9000 + c * 16;
      a0_of[c] = 1000 + c * 32;
      a1_of[c] = 3000 + c * 32;
      s0_of[c] = rand64();
      s1_of[c] = (c == 1) ? 64'hFFFF_FFFF_0000_0000 : rand64();   // q - 1 : subtraction
      if (is_ks[c]) begin
        u64 a [];
        a = new[NIN + 1];
        foreach (a[i]) a[i] = rand64();
        for (int i = 0; i < NIN; i++) dmem[a0_of[c] * T + i] = a[i];
        dmem[(a0_of[c] + NIN / T) * T] = a[NIN];
        for (int m = 0; m < NOUT; m++) expect_out[c][m] = (m == NLWE) ? a[NIN] : 64'd0;
        for (int i = 0; i < NIN; i++) begin
          u64 d [];
          decomp(a[i], L, LOGB, d);
          for (int j = 0; j < L; j++)
            for (int m = 0; m < NOUT; m++)
              expect_out[c][m] = radd(expect_out[c][m], rmul(d[j], nksk[key_of[c]][i][j][m]));
        end
      end else begin
        for (int m = 0; m < NOUT; m++) begin
          u64 x, y;
          x = rand64(); y = rand64();
          dmem[a0_of[c] * T + m] = x;
          dmem[a1_of[c] * T + m] = y;
          expect_out[c][m] = radd(rmul(s0_of[c], x), rmul(s1_of[c], y));
          if (c == 1) begin
            checks++;
            if (expect_out[c][m] != rsub(rmul(s0_of[c], x), y)) failures++;
          end
        end
      end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NCMD; c++) begin
      @(negedge clk);
      cmd_valid = 0;
      while (!cmd_ready) @(negedge clk);
      cmd_valid = 1; cmd_is_ks = is_ks[c] != 0;
      cmd_addr0 = a0_of[c]; cmd_addr1 = a1_of[c]; cmd_addr2 = ret_a[c];
      cmd_key_idx = 16'(key_of[c]); cmd_s0 = s0_of[c]; cmd_s1 = s1_of[c];
    end
    @(negedge clk); cmd_valid = 0;
    while (finished < NCMD) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int c = 0; c < NCMD; c++)
      for (int m = 0; m < NOUT; m++) begin
        checks++;
        if (dmem[ret_a[c] * T + m] !== expect_out[c][m]) begin
          failures++;
          if (failures < 20) $display("cmd %0d (ks=%0d) coef %0d got %h exp %h", c, is_ks[c], m, dmem[ret_a[c] * T + m], expect_out[c][m]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
