// tb_dispatcher: drives gate commands straight into the dispatcher, wired
// to real gAND/gXOR cells, a small ping-pong BRAM and the DDR interface
// with a behavioural DDR. Over several layers it checks every output key
// written to BRAM or DDR and every garbled table (with its gate number)
// against the reference garbler, and checks the timing the paper gives:
// a BRAM operand costs one wait cycle, a gAND computes for 82 cycles, and
// write-back plus the one-cycle reset follow. It also makes a command wait
// for a busy cell, holds the table stream back, and checks that operand
// fetches of one gate overlap the hashing of another.
module tb_dispatcher;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

  localparam int NA = 2, NX = 2, BD = 256;
  logic clk = 0, rst_n = 0;
  gate_cmd_t cmd;
  logic cmd_valid = 0, cmd_ready, gid_clear = 0, swap = 0;
  key_t r;
  logic and_start [NA], and_clear [NA], and_busy [NA], and_done [NA];
  key_t and_kout [NA], and_tab [NA][1:3], and_k0, and_k1;
  logic [31:0] and_gid;
  key_t xor_k0 [NX], xor_k1 [NX], xor_kout [NX];
  logic bram_rd_en, bram_wr_en, rd_bank;
  logic [7:0] bram_rd_addr, bram_wr_addr;
  key_t bram_rd_data, bram_wr_data;
  logic ddr_rd_req, ddr_rd_ack, ddr_wr_req, ddr_wr_ack;
  logic [WIDX_W-1:0] ddr_rd_addr, ddr_wr_addr;
  key_t ddr_rd_data, ddr_wr_data;
  ddr_req_t dreq [2];
  ddr_rsp_t drsp [2];
  logic gt_valid, gt_ready = 1;
  gtable_t gt_data;
  logic idle;
  logic [31:0] done_count;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dispatcher #(.N_AND(NA), .N_XOR(NX), .BRAM_AW(8)) dut (
    .clk, .rst_n, .cmd_i(cmd), .cmd_valid, .cmd_ready, .gid_clear,
    .and_start, .and_clear, .and_k0, .and_k1, .and_gid, .and_done, .and_kout, .and_tab,
    .xor_k0, .xor_k1, .xor_kout,
    .bram_rd_en, .bram_rd_addr, .bram_rd_data, .bram_wr_en, .bram_wr_addr, .bram_wr_data,
    .ddr_rd_req, .ddr_rd_addr, .ddr_rd_ack, .ddr_rd_data,
    .ddr_wr_req, .ddr_wr_addr, .ddr_wr_data, .ddr_wr_ack,
    .gt_valid, .gt_ready, .gt_data, .idle, .done_count);

  for (genvar i = 0; i < NA; i++) begin : g_and
    gand_cell u (.clk, .rst_n, .start(and_start[i]), .clear(and_clear[i]), .k0(and_k0),
                 .k1(and_k1), .r, .gate_id(and_gid), .busy(and_busy[i]), .done(and_done[i]),
                 .k_out(and_kout[i]), .table_o(and_tab[i]));
  end
  for (genvar j = 0; j < NX; j++) begin : g_xor
    gxor_cell u (.k0(xor_k0[j]), .k1(xor_k1[j]), .k_out(xor_kout[j]));
  end
  wire_bram #(.DEPTH_HALF(BD)) u_bram (.clk, .rst_n, .swap, .rd_en(bram_rd_en),
    .rd_addr(bram_rd_addr), .rd_data(bram_rd_data), .wr_en(bram_wr_en),
    .wr_addr(bram_wr_addr), .wr_data(bram_wr_data), .rd_bank);
  ddr_if u_ddr (.clk, .rst_n, .rd_req(ddr_rd_req), .rd_addr(ddr_rd_addr), .rd_ack(ddr_rd_ack),
    .rd_data(ddr_rd_data), .wr_req(ddr_wr_req), .wr_addr(ddr_wr_addr), .wr_data(ddr_wr_data),
    .wr_ack(ddr_wr_ack), .ddr_req_o(dreq), .ddr_rsp_i(drsp));
  ddr_model #(.LAT_MIN(30), .LAT_MAX(42)) u_mem (.clk, .req_i(dreq), .rsp_o(drsp));

  // ---------------- reference state of the host ----------------
  key_t ddr_ref [int];
  key_t bram_rd_ref [int], bram_wr_ref [int];
  gtable_t exp_tab [$];
  int seq = 0;
  int n_tables = 0, n_stall = 0, n_overlap = 0, n_bram_rd = 0, n_ddr_rd = 0;
  int n_bram_wr = 0, n_ddr_wr = 0, n_backpressure = 0;

  function automatic key_t val(input waddr_t w);
    return w.bram ? bram_rd_ref[int'(w.idx)] : ddr_ref[int'(w.idx)];
  endfunction

  task automatic gate(input gate_kind_e k, input int unit, input waddr_t a, input waddr_t b, input waddr_t c);
    key_t ko, t [4];
    gtable_t g;
    if (k == GATE_AND) begin
      garble_and(val(a), val(b), r, seq, ko, t);
      g.gid = seq; g.t1 = t[1]; g.t2 = t[2]; g.t3 = t[3];
      exp_tab.push_back(g);
    end else ko = val(a) ^ val(b);
    if (c.bram) bram_wr_ref[int'(c.idx)] = ko; else ddr_ref[int'(c.idx)] = ko;
    seq++;
    @(negedge clk);
    cmd = '0; cmd.kind = k; cmd.unit = 5'(unit); cmd.a = a; cmd.b = b; cmd.c = c;
    cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_idle();
    do @(negedge clk); while (!idle);
  endtask

  task automatic next_layer();
    wait_idle();
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    bram_rd_ref = bram_wr_ref;
    bram_wr_ref.delete();
  endtask

  function automatic waddr_t D(input int i); waddr_t w; w.bram = 0; w.idx = 20'(i); return w; endfunction
  function automatic waddr_t B(input int i); waddr_t w; w.bram = 1; w.idx = 20'(i); return w; endfunction

  // ---------------- monitors ----------------
  always @(posedge clk) if (rst_n) begin
    if (gt_valid && gt_ready) begin
      gtable_t e;
      n_tables++;
      checks++;
      if (exp_tab.size() == 0) begin failures++; $display("FAIL unexpected table"); end
      else begin
        e = exp_tab.pop_front();
        if (gt_data !== e) begin failures++; $display("FAIL table gid %0d got gid %0d", e.gid, gt_data.gid); end
      end
    end
    if (gt_valid && !gt_ready) n_backpressure++;
    if (cmd_valid && !cmd_ready && dut.rs == 0) n_stall++;
    if ((ddr_rd_req || bram_rd_en) && (and_busy[0] || and_busy[1])) n_overlap++;
    if (bram_rd_en) n_bram_rd++;
    if (ddr_rd_ack) n_ddr_rd++;
    if (bram_wr_en) n_bram_wr++;
    if (ddr_wr_ack) n_ddr_wr++;
  end

  // latency: start edge to done, per cell
  // Signals are sampled before each edge, so a done that rises at edge
  // t_start + 82 is first seen at edge t_start + 83.
  int t_start [NA];
  logic done_q [NA];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int i = 0; i < NA; i++) begin
      if (and_start[i]) t_start[i] = cyc;
      if (and_done[i] && !done_q[i]) begin
        checks++;
        if (cyc - t_start[i] - 1 != 82) begin failures++; $display("FAIL gAND latency %0d", cyc - t_start[i] - 1); end
      end
      done_q[i] = and_done[i];
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    r = rand_key(); r[0] = 1'b1;
    for (int i = 0; i < 16; i++) begin ddr_ref[i] = rand_key(); u_mem.put_key(i, ddr_ref[i]); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // layer 1: inputs from DDR, results to BRAM and DDR
    gate(GATE_AND, 0, D(0), D(1), B(0));
    gate(GATE_AND, 0, D(8), D(9), D(21));      // waits for cell 0
    gate(GATE_AND, 1, D(2), D(3), B(1));       // overlaps the second
    gate(GATE_XOR, 0, D(4), D(5), B(2));
    gate(GATE_XOR, 1, D(6), D(7), D(20));
    next_layer();
    // layer 2: BRAM operands, table stream held back
    gt_ready = 0;
    gate(GATE_AND, 1, B(0), B(1), B(5));
    gate(GATE_XOR, 0, B(2), D(20), B(6));
    repeat (120) @(negedge clk);
    gt_ready = 1;
    next_layer();
    // layer 3: timing of one gate with BRAM operands and a BRAM result
    wait_idle();
    t0 = cyc;
    gate(GATE_AND, 0, B(5), B(6), B(9));
    t1 = cyc;
    wait_idle();
    // command accepted at edge t1; then R_A, R_A_WAIT, R_B, R_B_WAIT and the
    // start edge: two BRAM reads of one wait cycle each
    checks++;
    if (t_start[0] - t1 != 5) begin failures++; $display("FAIL BRAM read timing %0d", t_start[0] - t1); end
    next_layer();
    gate(GATE_XOR, 1, B(9), D(21), D(30));
    wait_idle();
    // check every result held in DDR and the BRAM read half
    foreach (ddr_ref[i]) begin
      checks++;
      if (u_mem.get_key(i) !== ddr_ref[i]) begin failures++; $display("FAIL ddr[%0d]", i); end
    end
    foreach (bram_rd_ref[i]) begin
      checks++;
      if (u_bram.mem[{rd_bank, 8'(i)}][79:0] !== bram_rd_ref[i]) begin failures++; $display("FAIL bram[%0d]", i); end
    end
    checks++;
    if (exp_tab.size() != 0 || n_tables != 5) begin failures++; $display("FAIL tables %0d", n_tables); end
    checks++;
    if (done_count != 9) begin failures++; $display("FAIL done_count %0d", done_count); end
    checks++;
    if (n_stall == 0 || n_overlap == 0 || n_backpressure == 0 || n_bram_rd == 0 ||
        n_ddr_rd == 0 || n_bram_wr == 0 || n_ddr_wr == 0) begin
      failures++;
      $display("FAIL mechanism not seen: stall %0d overlap %0d bp %0d", n_stall, n_overlap, n_backpressure);
    end
    $display("stall=%0d overlap=%0d backpressure=%0d bram_rd=%0d ddr_rd=%0d bram_wr=%0d ddr_wr=%0d",
             n_stall, n_overlap, n_backpressure, n_bram_rd, n_ddr_rd, n_bram_wr, n_ddr_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
