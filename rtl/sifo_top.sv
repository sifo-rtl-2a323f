// sifo_top: the garbling overlay on the FPGA.
//
// A sea of N_AND garbled-AND cells and N_XOR garbled-XOR cells, fed by one
// workload dispatcher and data controller. The host writes R once, then,
// layer by layer, writes each gate's three wire addresses into the
// registers of the cell that should run it; the dispatcher fetches the
// input keys from on-chip BRAM or off-chip DDR (chosen per wire by the
// address flag), runs the cell, writes the output key back and streams
// each AND gate's garbled table out. Between layers the host waits for
// STATUS.idle and swaps the BRAM halves. Any circuit of AND and XOR gates
// can be garbled this way without changing the hardware.
//
// Ports: a 32-bit register port (the PCIe register path), the garbled
// table stream (valid/ready) toward the host, and two DDR ports (request
// held until 'complete'). The initial input keys are put into DDR by the
// host's DMA, outside this module. One clock (the paper's 200 MHz local
// clock). 15 + 15 cells is the paper's final configuration.
module sifo_top
  import sifo_pkg::*;
#(
  parameter int N_AND      = 15,
  parameter int N_XOR      = 15,
  parameter int BRAM_DEPTH = 65536,
  parameter int CMD_DEPTH  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // host registers
  input  logic              reg_we,
  input  logic              reg_re,
  input  logic [REG_AW-1:0] reg_addr,
  input  logic [REG_W-1:0]  reg_wdata,
  output logic [REG_W-1:0]  reg_rdata,
  // garbled tables to the host
  output logic              gt_valid,
  input  logic              gt_ready,
  output gtable_t           gt_data,
  // on-board DDR
  output ddr_req_t          ddr_req_o [2],
  input  ddr_rsp_t          ddr_rsp_i [2]
);
  localparam int BRAM_AW = $clog2(BRAM_DEPTH);

  gate_cmd_t        cmd;
  logic             cmd_valid, cmd_ready;
  key_t             r;
  logic             swap, gid_clear, idle, rd_bank;
  logic [REG_W-1:0] done_count;

  logic             and_start [N_AND];
  logic             and_clear [N_AND];
  logic             and_busy  [N_AND];
  logic             and_done  [N_AND];
  key_t             and_kout  [N_AND];
  key_t             and_tab   [N_AND][1:3];
  key_t             and_k0, and_k1;
  logic [GID_W-1:0] and_gid;

  key_t             xor_k0   [N_XOR];
  key_t             xor_k1   [N_XOR];
  key_t             xor_kout [N_XOR];

  logic               bram_rd_en, bram_wr_en;
  logic [BRAM_AW-1:0] bram_rd_addr, bram_wr_addr;
  key_t               bram_rd_data, bram_wr_data;

  logic              ddr_rd_req, ddr_rd_ack, ddr_wr_req, ddr_wr_ack;
  logic [WIDX_W-1:0] ddr_rd_addr, ddr_wr_addr;
  key_t              ddr_rd_data, ddr_wr_data;

  host_regs #(.N_AND(N_AND), .N_XOR(N_XOR), .CMD_DEPTH(CMD_DEPTH)) u_regs (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata,
    .cmd_o (cmd), .cmd_valid, .cmd_ready, .r_o (r), .swap_o (swap),
    .gid_clear_o (gid_clear), .idle_i (idle), .rd_bank_i (rd_bank),
    .done_count_i (done_count)
  );

  dispatcher #(.N_AND(N_AND), .N_XOR(N_XOR), .BRAM_AW(BRAM_AW)) u_disp (
    .clk, .rst_n,
    .cmd_i (cmd), .cmd_valid, .cmd_ready, .gid_clear,
    .and_start, .and_clear, .and_k0, .and_k1, .and_gid, .and_done, .and_kout, .and_tab,
    .xor_k0, .xor_k1, .xor_kout,
    .bram_rd_en, .bram_rd_addr, .bram_rd_data, .bram_wr_en, .bram_wr_addr, .bram_wr_data,
    .ddr_rd_req, .ddr_rd_addr, .ddr_rd_ack, .ddr_rd_data,
    .ddr_wr_req, .ddr_wr_addr, .ddr_wr_data, .ddr_wr_ack,
    .gt_valid, .gt_ready, .gt_data,
    .idle, .done_count
  );

  for (genvar i = 0; i < N_AND; i++) begin : g_and
    gand_cell u_and (
      .clk, .rst_n,
      .start   (and_start[i]),
      .clear   (and_clear[i]),
      .k0      (and_k0),
      .k1      (and_k1),
      .r       (r),
      .gate_id (and_gid),
      .busy    (and_busy[i]),
      .done    (and_done[i]),
      .k_out   (and_kout[i]),
      .table_o (and_tab[i])
    );
    // a cell reports done only while it holds a gate
    a_done_busy: assert property (@(posedge clk) disable iff (!rst_n)
      and_done[i] |-> and_busy[i]);
  end

  for (genvar j = 0; j < N_XOR; j++) begin : g_xor
    gxor_cell u_xor (
      .k0    (xor_k0[j]),
      .k1    (xor_k1[j]),
      .k_out (xor_kout[j])
    );
  end

  wire_bram #(.DEPTH_HALF(BRAM_DEPTH)) u_bram (
    .clk, .rst_n, .swap,
    .rd_en (bram_rd_en), .rd_addr (bram_rd_addr), .rd_data (bram_rd_data),
    .wr_en (bram_wr_en), .wr_addr (bram_wr_addr), .wr_data (bram_wr_data),
    .rd_bank
  );

  ddr_if u_ddr (
    .clk, .rst_n,
    .rd_req (ddr_rd_req), .rd_addr (ddr_rd_addr), .rd_ack (ddr_rd_ack), .rd_data (ddr_rd_data),
    .wr_req (ddr_wr_req), .wr_addr (ddr_wr_addr), .wr_data (ddr_wr_data), .wr_ack (ddr_wr_ack),
    .ddr_req_o, .ddr_rsp_i
  );

endmodule
