// tb_decompose -- compares the digits with an independent decomposition and
// checks that the signed digits recompose to the rounded value and stay in
// [-beta/2, beta/2); latency two cycles.
module tb_decompose;
  // note: block-local variables below are assigned explicitly (initial blocks are static)
  import tb_ref_pkg::*;
  localparam int T = 2, L = 2, LOGB = 10;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [T-1:0][63:0] in_data;
  logic [L-1:0][T-1:0][63:0] out_digits;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  decompose #(.T(T), .L(L), .LOGB(LOGB)) dut (.*);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      u64 x [T];
      @(negedge clk);
      in_valid = 1;
      for (int t = 0; t < T; t++) begin
        x[t] = rand64();
        if (i == 0) x[t] = (t == 0) ? RQ - 1 : 0;
        if (i == 1) x[t] = (t == 0) ? (64'd1 << 53) : (64'd3 << 43);
        in_data[t] = x[t];
      end
      @(negedge clk); in_valid = 0;
      checks++; if (out_valid) failures++;
      @(negedge clk);
      checks++; if (!out_valid) failures++;
      for (int t = 0; t < T; t++) begin
        u64 d[];
        longint rec;
        rec = 0;
        decomp(x[t], L, LOGB, d);
        for (int j = 0; j < L; j++) begin
          longint sd;
          sd = (out_digits[j][t] > RQ / 2) ? -longint'(RQ - out_digits[j][t]) : longint'(out_digits[j][t]);
          checks += 2;
          if (out_digits[j][t] !== d[j]) begin failures++; if (failures < 4) $display("x=%h j=%0d got %h exp %h", x[t], j, out_digits[j][t], d[j]); end
          if (sd < -(longint'(1) << (LOGB - 1)) || sd >= (longint'(1) << (LOGB - 1))) begin failures++; if (failures<4) $display("range %0d", sd); end
          rec = rec * (longint'(1) << LOGB) + sd;
        end
        // recomposition equals the rounded value modulo beta^L
        checks++;
        begin
          logic [64:0] s;
          longint unsigned rv;
          s = {1'b0, x[t]} + (65'd1 << (64 - L * LOGB - 1));
          rv = 64'(s >> (64 - L * LOGB)) & ((64'd1 << (L * LOGB)) - 1);
          if ((64'(rec) & ((64'd1 << (L * LOGB)) - 1)) != rv) begin failures++; if (failures<4) $display("rec %h %h", rec, rv); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
