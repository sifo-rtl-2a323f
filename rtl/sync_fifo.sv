// sync_fifo: single-clock first-in first-out queue of DEPTH entries.
//
// Write with push when not full; the head is on dout whenever not empty and
// is removed by pop. 'level' counts the entries held. Pushing into a full
// queue or popping an empty one is ignored (and flagged by an assertion).
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 32,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  level
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (level == 0);
  assign full  = (level == (AW+1)'(DEPTH));
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (push && !full) begin
        mem[wp] <= din;
        wp      <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty)
        rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
