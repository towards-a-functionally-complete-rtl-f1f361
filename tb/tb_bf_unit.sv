// tb_bf_unit -- checks the CT and GS butterflies against their definitions.
module tb_bf_unit;
  import tb_ref_pkg::*;
  u64 x, y, w, cx, cy, gx, gy;
  int checks = 0, failures = 0;
  bf_unit #(.GS(1'b0)) u_ct (.x, .y, .w, .xo(cx), .yo(cy));
  bf_unit #(.GS(1'b1)) u_gs (.x, .y, .w, .xo(gx), .yo(gy));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      x = rand64(); y = rand64(); w = rand64();
      if (i == 0) begin x = RQ - 1; y = RQ - 1; end
      #1;
      checks += 4;
      if (cx !== radd(x, rmul(w, y))) failures++;
      if (cy !== rsub(x, rmul(w, y))) failures++;
      if (gx !== radd(x, y)) failures++;
      if (gy !== rmul(rsub(x, y), w)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
