// tb_sync_fifo -- random push/pop traffic against a queue model.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full;
  logic [15:0] wr_data = 0, rd_data;
  logic [3:0] count;
  logic [15:0] model [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sync_fifo #(.W(16), .DEPTH(8)) dut (.*);
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks += 3;
      if (empty !== (model.size() == 0)) failures++;
      if (full !== (model.size() == 8)) failures++;
      if (count !== 4'(model.size())) failures++;
      if (model.size() > 0) begin checks++; if (rd_data !== model[0]) failures++; end
      push = !full && ($urandom_range(0, 1) == 1);
      pop  = !empty && ($urandom_range(0, 1) == 1);
      wr_data = 16'($urandom);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(wr_data);
    end
    @(negedge clk); push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
