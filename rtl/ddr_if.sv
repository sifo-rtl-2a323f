// ddr_if: wire-value access to the 512-bit on-board DDR memory.
//
// The DDR word is 512 bits and holds four wire values, one per 128-bit
// slot (80 bits used): wire w lives in word w>>2, slot w&3. Two DDR ports
// are used in parallel: port 0 carries operand reads and port 1 carries
// result writes, so a write-back can proceed while the next gate's
// operands are being fetched. A write touches only its slot through the
// byte enables, so no read-modify-write is needed.
//
// Handshake on both sides: a request (rd_req / wr_req) is held with its
// address and data until the matching ack; the ack is a one-cycle pulse
// given in the cycle the DDR port raises 'complete', which may take any
// number of cycles. rd_data is valid with rd_ack. The word width, the four
// values per word, the two ports and the complete flag follow the paper;
// the slot layout, byte-enable writes and the port roles are this design's.
module ddr_if
  import sifo_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // read side (dispatcher)
  input  logic              rd_req,
  input  logic [WIDX_W-1:0] rd_addr,
  output logic              rd_ack,
  output key_t              rd_data,
  // write side (dispatcher)
  input  logic              wr_req,
  input  logic [WIDX_W-1:0] wr_addr,
  input  key_t              wr_data,
  output logic              wr_ack,
  // DDR ports
  output ddr_req_t          ddr_req_o [2],
  input  ddr_rsp_t          ddr_rsp_i [2]
);
  logic [1:0] rd_slot;
  logic [1:0] wr_slot;
  assign rd_slot = rd_addr[1:0];
  assign wr_slot = wr_addr[1:0];

  always_comb begin
    ddr_req_o[0]       = '0;
    ddr_req_o[0].req   = rd_req;
    ddr_req_o[0].we    = 1'b0;
    ddr_req_o[0].addr  = rd_addr[WIDX_W-1:2];

    ddr_req_o[1]       = '0;
    ddr_req_o[1].req   = wr_req;
    ddr_req_o[1].we    = 1'b1;
    ddr_req_o[1].addr  = wr_addr[WIDX_W-1:2];
    ddr_req_o[1].wdata = DDR_W'({{(DDR_SLOT_W-KEY_W){1'b0}}, wr_data}) << (DDR_SLOT_W * wr_slot);
    ddr_req_o[1].be    = DDR_BE_W'({(DDR_SLOT_W/8){1'b1}}) << ((DDR_SLOT_W/8) * wr_slot);
  end

  assign rd_ack  = rd_req && ddr_rsp_i[0].complete;
  assign rd_data = ddr_rsp_i[0].rdata[DDR_SLOT_W*rd_slot +: KEY_W];
  assign wr_ack  = wr_req && ddr_rsp_i[1].complete;

  // A request must stay up, unchanged, until it completes.
  property p_hold(logic req, logic ack, logic [WIDX_W-1:0] addr);
    @(posedge clk) disable iff (!rst_n) (req && !ack) |=> (req && $stable(addr));
  endproperty
  a_rd_hold: assert property (p_hold(rd_req, rd_ack, rd_addr));
  a_wr_hold: assert property (p_hold(wr_req, wr_ack, wr_addr));

endmodule
