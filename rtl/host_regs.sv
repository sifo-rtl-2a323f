// host_regs: registers the host writes over PCIe, and the gate-command queue.
//
// Each overlay cell owns two 32-bit registers at REG_CELL0 + 2*n and
// REG_CELL0 + 2*n + 1, where n counts the gAND cells first and then the
// gXOR cells; so the register pair a host writes decides which cell, and
// therefore which gate type, runs a gate. The pair carries the gate's three
// 21-bit wire addresses packed as ADD1 = r0[31:11], ADD2 = {r0[10:0],
// r1[31:22]}, ADD3 = r1[21:1] (r1[0] unused), saving one register write per
// gate over one register per address. Writing the second register queues
// the gate at once, so cells can start while the host is still sending the
// rest of the batch. The queue is CMD_DEPTH deep; a write to a full queue
// is dropped and sets a sticky overflow bit.
//
// Other registers: CTRL (bit0 swaps the BRAM halves at a layer boundary,
// bit1 clears the gate counter; both self-clearing pulses), R split over
// three registers (R[79:64] in the third), STATUS (bit0 idle, bit1
// overflow, bit2 BRAM read half, bits 15:8 queue level; reading STATUS
// clears the overflow bit) and DONE (gates completed). Reads are
// combinational on reg_addr. The address packing and per-cell registers
// follow the paper; the register map, the queue and its depth are this
// design's. One clock domain is assumed.
module host_regs
  import sifo_pkg::*;
#(
  parameter int N_AND     = 15,
  parameter int N_XOR     = 15,
  parameter int CMD_DEPTH = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // host side
  input  logic              reg_we,
  input  logic              reg_re,
  input  logic [REG_AW-1:0] reg_addr,
  input  logic [REG_W-1:0]  reg_wdata,
  output logic [REG_W-1:0]  reg_rdata,
  // to the overlay
  output gate_cmd_t         cmd_o,
  output logic              cmd_valid,
  input  logic              cmd_ready,
  output key_t              r_o,
  output logic              swap_o,
  output logic              gid_clear_o,
  // status in
  input  logic              idle_i,
  input  logic              rd_bank_i,
  input  logic [REG_W-1:0]  done_count_i
);
  localparam int N_CELLS = N_AND + N_XOR;
  localparam int LVL_W   = $clog2(CMD_DEPTH) + 1;

  logic [REG_W-1:0] r0_shadow;
  logic             overflow;
  logic             q_push, q_full, q_empty;
  logic [LVL_W-1:0] q_level;
  gate_cmd_t        q_din;

  // Decode a cell-register write.
  logic [REG_AW-1:0] cell_off;
  logic              is_cell;
  int unsigned       cell_n;
  assign cell_off = reg_addr - REG_CELL0;
  assign is_cell  = (reg_addr >= REG_CELL0) && (cell_off < REG_AW'(2*N_CELLS));
  assign cell_n   = int'(cell_off[REG_AW-1:1]);

  always_comb begin
    waddr_t a, b, c;
    unpack_addrs(r0_shadow, reg_wdata, a, b, c);
    q_din      = '0;
    q_din.a    = a;
    q_din.b    = b;
    q_din.c    = c;
    if (cell_n < N_AND) begin
      q_din.kind = GATE_AND;
      q_din.unit = 5'(cell_n);
    end else begin
      q_din.kind = GATE_XOR;
      q_din.unit = 5'(cell_n - N_AND);
    end
  end

  assign q_push = reg_we && is_cell && cell_off[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r0_shadow   <= '0;
      r_o         <= '0;
      overflow    <= 1'b0;
      swap_o      <= 1'b0;
      gid_clear_o <= 1'b0;
    end else begin
      swap_o      <= 1'b0;
      gid_clear_o <= 1'b0;
      if (reg_re && reg_addr == REG_STATUS) overflow <= 1'b0;
      if (reg_we) begin
        if (is_cell && !cell_off[0]) r0_shadow <= reg_wdata;
        if (q_push && q_full)        overflow  <= 1'b1;
        case (reg_addr)
          REG_CTRL: begin
            swap_o      <= reg_wdata[0];
            gid_clear_o <= reg_wdata[1];
          end
          REG_R0:  r_o[31:0]  <= reg_wdata;
          REG_R1:  r_o[63:32] <= reg_wdata;
          REG_R2:  r_o[79:64] <= reg_wdata[15:0];
          default: ;
        endcase
      end
    end
  end

  sync_fifo #(.W($bits(gate_cmd_t)), .DEPTH(CMD_DEPTH)) u_q (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (q_push && !q_full),
    .din   (q_din),
    .pop   (cmd_valid && cmd_ready),
    .dout  (cmd_o),
    .empty (q_empty),
    .full  (q_full),
    .level (q_level)
  );
  assign cmd_valid = !q_empty;

  always_comb begin
    reg_rdata = '0;
    case (reg_addr)
      REG_R0:     reg_rdata = r_o[31:0];
      REG_R1:     reg_rdata = r_o[63:32];
      REG_R2:     reg_rdata = {16'd0, r_o[79:64]};
      REG_STATUS: reg_rdata = {16'd0, 8'(q_level), 5'd0, rd_bank_i, overflow, idle_i && q_empty};
      REG_DONE:   reg_rdata = done_count_i;
      default:    reg_rdata = '0;
    endcase
  end

endmodule
