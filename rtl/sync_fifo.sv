// sync_fifo -- synchronous show-ahead FIFO used for the design's buffer chains.
//
// The paper moves per-ciphertext side information (addresses, key indices,
// rotation amounts, flags) and delayed accumulator data along "buffer chains".
// Their insides are not described; this design implements each chain as a
// first-in first-out memory of DEPTH words of W bits.  The head word is visible on
// rd_data while empty is low (show-ahead); a pop advances it.  Pushing while full
// or popping while empty is a protocol error and is flagged by assertions.
// count reports the occupancy.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               wr_data,
  input  logic                       pop,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
