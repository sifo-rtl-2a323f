// dispatcher: workload dispatcher and data controller of the overlay.
//
// Takes gate commands in the order the host sent them and runs each in
// three steps. Step 1/2 (read engine): fetch the zero keys of both input
// wires (ADD1, ADD2), each from BRAM (one-cycle read) or DDR (variable
// latency, until 'complete') according to the address flag bit, and hand
// them to the addressed cell: a gAND cell is started (82 cycles), a gXOR
// cell's In1/In2 registers are loaded (its XOR is combinational). Step 3
// (write-back engine): take a finished cell, write its garbled value to
// ADD3 in BRAM or DDR, send an AND gate's three-row garbled table to the
// host, and release the cell in a one-cycle reset step.
//
// The two engines run at once, so the memory reads of later gates overlap
// the hashing and write-back of earlier ones; reads are serialised through
// one engine as in the paper's timing diagram (tr, 82, tw, 1 per gate). A
// command whose cell is still busy waits at the head of the queue. Every
// command gets the next value of a 32-bit counter as its gate identifier g
// (hashed by gAND, returned with the table); the host can clear it.
// Finished cells are written back lowest gAND index first, then gXOR.
// The steps, the flag bit and the one-cycle reset follow the paper; the
// in-order issue, the counter as g and the priorities are this design's.
module dispatcher
  import sifo_pkg::*;
#(
  parameter int N_AND   = 15,
  parameter int N_XOR   = 15,
  parameter int BRAM_AW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands
  input  gate_cmd_t         cmd_i,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              gid_clear,
  // gAND cells (In1/In2 and g are shared; start selects the cell)
  output logic              and_start [N_AND],
  output logic              and_clear [N_AND],
  output key_t              and_k0,
  output key_t              and_k1,
  output logic [GID_W-1:0]  and_gid,
  input  logic              and_done  [N_AND],
  input  key_t              and_kout  [N_AND],
  input  key_t              and_tab   [N_AND][1:3],
  // gXOR cells
  output key_t              xor_k0    [N_XOR],
  output key_t              xor_k1    [N_XOR],
  input  key_t              xor_kout  [N_XOR],
  // BRAM
  output logic              bram_rd_en,
  output logic [BRAM_AW-1:0] bram_rd_addr,
  input  key_t              bram_rd_data,
  output logic              bram_wr_en,
  output logic [BRAM_AW-1:0] bram_wr_addr,
  output key_t              bram_wr_data,
  // DDR (through ddr_if)
  output logic              ddr_rd_req,
  output logic [WIDX_W-1:0] ddr_rd_addr,
  input  logic              ddr_rd_ack,
  input  key_t              ddr_rd_data,
  output logic              ddr_wr_req,
  output logic [WIDX_W-1:0] ddr_wr_addr,
  output key_t              ddr_wr_data,
  input  logic              ddr_wr_ack,
  // garbled tables to the host
  output logic              gt_valid,
  input  logic              gt_ready,
  output gtable_t           gt_data,
  // status
  output logic              idle,
  output logic [REG_W-1:0]  done_count
);
  // cell index widths: the low bits of the command's unit field
  localparam int AI = (N_AND > 1) ? $clog2(N_AND) : 1;
  localparam int XI = (N_XOR > 1) ? $clog2(N_XOR) : 1;

  typedef enum logic [2:0] {R_IDLE, R_A, R_A_WAIT, R_B, R_B_WAIT, R_ISSUE} rd_state_e;
  typedef enum logic [2:0] {W_IDLE, W_WRITE, W_TABLE, W_RESET} wb_state_e;

  rd_state_e rs;
  wb_state_e ws;

  gate_cmd_t        cur;
  key_t             op_a, op_b;
  logic [GID_W-1:0] gid_cnt;

  logic             and_busy [N_AND];
  waddr_t           and_dst  [N_AND];
  logic [GID_W-1:0] and_g    [N_AND];
  logic             xor_busy [N_XOR];
  waddr_t           xor_dst  [N_XOR];
  key_t             xin1     [N_XOR];
  key_t             xin2     [N_XOR];

  // write-back selection
  logic             w_is_and;
  logic [4:0]       w_cell;
  waddr_t           w_dst;
  key_t             w_key;
  gtable_t          w_tab;

  // ---------------------------------------------------------------------
  // Read engine, combinational outputs
  logic target_busy;
  always_comb begin
    if (cmd_i.kind == GATE_AND) target_busy = and_busy[cmd_i.unit[AI-1:0]];
    else                        target_busy = xor_busy[cmd_i.unit[XI-1:0]];
  end

  assign cmd_ready = (rs == R_IDLE) && cmd_valid && !target_busy;

  waddr_t rd_src;
  assign rd_src = (rs == R_A || rs == R_A_WAIT) ? cur.a : cur.b;

  assign bram_rd_en   = (rs == R_A || rs == R_B) && rd_src.bram;
  assign bram_rd_addr = rd_src.idx[BRAM_AW-1:0];
  assign ddr_rd_req   = (rs == R_A || rs == R_B) && !rd_src.bram;
  assign ddr_rd_addr  = rd_src.idx;

  assign and_k0  = op_a;
  assign and_k1  = op_b;
  assign and_gid = gid_cnt;

  always_comb begin
    for (int i = 0; i < N_AND; i++)
      and_start[i] = (rs == R_ISSUE) && (cur.kind == GATE_AND) && (int'(cur.unit) == i);
    for (int j = 0; j < N_XOR; j++) begin
      xor_k0[j] = xin1[j];
      xor_k1[j] = xin2[j];
    end
  end

  // ---------------------------------------------------------------------
  // Write-back engine, combinational outputs
  logic       pick_valid, pick_and;
  logic [4:0] pick_cell;
  always_comb begin
    pick_valid = 1'b0;
    pick_and   = 1'b0;
    pick_cell  = '0;
    for (int j = N_XOR - 1; j >= 0; j--)
      if (xor_busy[j]) begin
        pick_valid = 1'b1;
        pick_and   = 1'b0;
        pick_cell  = 5'(j);
      end
    for (int i = N_AND - 1; i >= 0; i--)
      if (and_busy[i] && and_done[i]) begin
        pick_valid = 1'b1;
        pick_and   = 1'b1;
        pick_cell  = 5'(i);
      end
  end

  assign bram_wr_en   = (ws == W_WRITE) && w_dst.bram;
  assign bram_wr_addr = w_dst.idx[BRAM_AW-1:0];
  assign bram_wr_data = w_key;
  assign ddr_wr_req   = (ws == W_WRITE) && !w_dst.bram;
  assign ddr_wr_addr  = w_dst.idx;
  assign ddr_wr_data  = w_key;
  assign gt_valid     = (ws == W_TABLE);
  assign gt_data      = w_tab;

  always_comb begin
    for (int i = 0; i < N_AND; i++)
      and_clear[i] = (ws == W_RESET) && w_is_and && (int'(w_cell) == i);
  end

  logic any_busy;
  always_comb begin
    any_busy = 1'b0;
    for (int i = 0; i < N_AND; i++) any_busy |= and_busy[i];
    for (int j = 0; j < N_XOR; j++) any_busy |= xor_busy[j];
  end
  assign idle = (rs == R_IDLE) && !cmd_valid && (ws == W_IDLE) && !any_busy;

  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rs         <= R_IDLE;
      ws         <= W_IDLE;
      cur        <= '0;
      op_a       <= '0;
      op_b       <= '0;
      gid_cnt    <= '0;
      done_count <= '0;
      w_is_and   <= 1'b0;
      w_cell     <= '0;
      w_dst      <= '0;
      w_key      <= '0;
      w_tab      <= '0;
      for (int i = 0; i < N_AND; i++) begin
        and_busy[i] <= 1'b0;
        and_dst[i]  <= '0;
        and_g[i]    <= '0;
      end
      for (int j = 0; j < N_XOR; j++) begin
        xor_busy[j] <= 1'b0;
        xor_dst[j]  <= '0;
        xin1[j]     <= '0;
        xin2[j]     <= '0;
      end
    end else begin
      if (gid_clear) gid_cnt <= '0;

      // Steps 1 and 2: fetch operands, start the cell.
      case (rs)
        R_IDLE:
          if (cmd_ready) begin
            cur <= cmd_i;
            rs  <= R_A;
          end
        R_A:
          if (cur.a.bram)      rs <= R_A_WAIT;
          else if (ddr_rd_ack) begin
            op_a <= ddr_rd_data;
            rs   <= R_B;
          end
        R_A_WAIT: begin
          op_a <= bram_rd_data;
          rs   <= R_B;
        end
        R_B:
          if (cur.b.bram)      rs <= R_B_WAIT;
          else if (ddr_rd_ack) begin
            op_b <= ddr_rd_data;
            rs   <= R_ISSUE;
          end
        R_B_WAIT: begin
          op_b <= bram_rd_data;
          rs   <= R_ISSUE;
        end
        R_ISSUE: begin
          if (cur.kind == GATE_AND) begin
            and_busy[cur.unit[AI-1:0]] <= 1'b1;
            and_dst[cur.unit[AI-1:0]]  <= cur.c;
            and_g[cur.unit[AI-1:0]]    <= gid_cnt;
          end else begin
            xor_busy[cur.unit[XI-1:0]] <= 1'b1;
            xor_dst[cur.unit[XI-1:0]]  <= cur.c;
            xin1[cur.unit[XI-1:0]]     <= op_a;
            xin2[cur.unit[XI-1:0]]     <= op_b;
          end
          if (!gid_clear) gid_cnt <= gid_cnt + 1'b1;
          rs <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase

      // Step 3: write back, send table, one-cycle reset.
      case (ws)
        W_IDLE:
          if (pick_valid) begin
            w_is_and <= pick_and;
            w_cell   <= pick_cell;
            if (pick_and) begin
              w_dst     <= and_dst[pick_cell[AI-1:0]];
              w_key     <= and_kout[pick_cell[AI-1:0]];
              w_tab.gid <= and_g[pick_cell[AI-1:0]];
              w_tab.t1  <= and_tab[pick_cell[AI-1:0]][1];
              w_tab.t2  <= and_tab[pick_cell[AI-1:0]][2];
              w_tab.t3  <= and_tab[pick_cell[AI-1:0]][3];
            end else begin
              w_dst     <= xor_dst[pick_cell[XI-1:0]];
              w_key     <= xor_kout[pick_cell[XI-1:0]];
            end
            ws <= W_WRITE;
          end
        W_WRITE:
          if (w_dst.bram || ddr_wr_ack) ws <= w_is_and ? W_TABLE : W_RESET;
        W_TABLE:
          if (gt_ready) ws <= W_RESET;
        W_RESET: begin
          if (w_is_and) and_busy[w_cell[AI-1:0]] <= 1'b0;
          else          xor_busy[w_cell[XI-1:0]] <= 1'b0;
          done_count <= done_count + 1'b1;
          ws <= W_IDLE;
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  // A cell is only started when free.
  a_start_free: assert property (@(posedge clk) disable iff (!rst_n)
    (rs == R_ISSUE && cur.kind == GATE_AND) |-> !and_busy[cur.unit[AI-1:0]]);
  // The table stream holds its data while waiting.
  a_gt_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (gt_valid && !gt_ready) |=> (gt_valid && $stable(gt_data)));

endmodule
