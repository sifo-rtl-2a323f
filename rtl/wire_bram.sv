// wire_bram: on-chip store for wire values, used ping-pong per layer.
//
// Two halves of DEPTH_HALF words of 108 bits (80 used). During a layer the
// gates read their BRAM operands from one half (the read half) and write
// their BRAM results into the other; 'swap' exchanges the roles at the end
// of a layer, so values produced in layer L are read in layer L+1. This is
// the paper's directly-used policy with ping-pong buffering: only wires
// used once, by a gate of the next layer, are put here by the host.
//
// Interface: one read port and one write port, as the paper gives. A read
// returns data on the cycle after rd_en; a write takes effect at the edge.
// Address is the word index inside a half. Reset only selects half 0 for
// reading; memory contents are not reset. The 108/80-bit word and the sizes
// follow the paper; the explicit swap strobe is this design's choice. Bits
// 107:80 of a word are written as zero and never read (unused-bit lint
// warning on q): the width is kept so that the array maps onto 108-bit
// block RAM words as in the paper.
module wire_bram
  import sifo_pkg::*;
#(
  parameter int DEPTH_HALF = 65536,
  localparam int AW = $clog2(DEPTH_HALF)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output key_t          rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  key_t          wr_data,
  output logic          rd_bank
);
  logic [BRAM_W-1:0] mem [2*DEPTH_HALF];
  logic [BRAM_W-1:0] q;

  always_ff @(posedge clk) begin
    if (!rst_n)    rd_bank <= 1'b0;
    else if (swap) rd_bank <= ~rd_bank;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[{~rd_bank, wr_addr}] <= {{(BRAM_W-KEY_W){1'b0}}, wr_data};
    if (rd_en) q <= mem[{rd_bank, rd_addr}];
  end

  assign rd_data = q[KEY_W-1:0];

endmodule
