// tb_host_regs: writes gate register pairs for random cells and addresses
// and checks the queued commands (cell, type and the three unpacked 21-bit
// addresses against an independent bit-level packing), the R and control
// registers, the status word, queue overflow and the sticky overflow bit.
module tb_host_regs;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

  localparam int NA = 3, NX = 2, DEPTH = 4;
  logic clk = 0, rst_n = 0, reg_we = 0, reg_re = 0;
  logic [REG_AW-1:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  gate_cmd_t cmd;
  logic cmd_valid, cmd_ready = 0, swap, gid_clear;
  key_t r;
  int checks = 0, failures = 0, swaps = 0, clears = 0;

  always #5 clk = ~clk;

  host_regs #(.N_AND(NA), .N_XOR(NX), .CMD_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata,
    .cmd_o(cmd), .cmd_valid, .cmd_ready, .r_o(r), .swap_o(swap), .gid_clear_o(gid_clear),
    .idle_i(1'b1), .rd_bank_i(1'b1), .done_count_i(32'd1234));

  always @(posedge clk) begin
    if (swap) swaps++;
    if (gid_clear) clears++;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wreg(input int a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = REG_AW'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic rreg(input int a, output logic [31:0] d);
    reg_addr = REG_AW'(a);
    #1;
    d = reg_rdata;
  endtask

  // Figure-based packing written bit by bit: ADD1 -> r0[31:11],
  // ADD2 -> {r0[10:0], r1[31:22]}, ADD3 -> r1[21:1].
  task automatic send(input int n, input logic [20:0] a1, input logic [20:0] a2, input logic [20:0] a3);
    logic [31:0] r0, r1;
    r0 = '0; r1 = '0;
    for (int i = 0; i < 21; i++) r0[11 + i] = a1[i];
    for (int i = 0; i < 10; i++) r1[22 + i] = a2[i];
    for (int i = 0; i < 11; i++) r0[i] = a2[10 + i];
    for (int i = 0; i < 21; i++) r1[1 + i] = a3[i];
    wreg(REG_CELL0 + 2*n, r0);
    wreg(REG_CELL0 + 2*n + 1, r1);
  endtask

  initial begin
    logic [20:0] a1, a2, a3;
    logic [31:0] st;
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wreg(REG_R0, 32'h89abcdef); wreg(REG_R1, 32'h01234567); wreg(REG_R2, 32'hffff5a5b);
    checks++; if (r !== 80'h5a5b_01234567_89abcdef) begin failures++; $display("FAIL R %h", r); end
    rreg(REG_R2, st); checks++; if (st !== 32'h00005a5b) begin failures++; $display("FAIL R2 read"); end
    wreg(REG_CTRL, 32'h1); wreg(REG_CTRL, 32'h2); wreg(REG_CTRL, 32'h3);
    repeat (2) @(negedge clk);
    checks++; if (swaps != 2 || clears != 2) begin failures++; $display("FAIL ctrl %0d %0d", swaps, clears); end
    rreg(REG_DONE, st); checks++; if (st !== 32'd1234) begin failures++; $display("FAIL done"); end
    for (int it = 0; it < 40; it++) begin
      n = $urandom_range(NA + NX - 1);
      a1 = 21'($urandom); a2 = 21'($urandom); a3 = 21'($urandom);
      send(n, a1, a2, a3);
      checks++;
      if (!cmd_valid) begin failures++; $display("FAIL no cmd"); end
      checks++;
      if (cmd.a !== waddr_t'(a1) || cmd.b !== waddr_t'(a2) || cmd.c !== waddr_t'(a3)) begin
        failures++; $display("FAIL addrs %h %h %h", cmd.a, cmd.b, cmd.c);
      end
      checks++;
      if ((n < NA && (cmd.kind !== GATE_AND || int'(cmd.unit) != n)) ||
          (n >= NA && (cmd.kind !== GATE_XOR || int'(cmd.unit) != n - NA))) begin
        failures++; $display("FAIL cell n=%0d kind=%0d unit=%0d", n, cmd.kind, cmd.unit);
      end
      checks++;
      if (cmd.a.bram !== a1[0] || cmd.c.idx !== a3[20:1]) begin failures++; $display("FAIL flag/idx"); end
      @(negedge clk); cmd_ready = 1; @(negedge clk); cmd_ready = 0;
    end
    // overflow: DEPTH + 1 gates without draining
    for (int it = 0; it <= DEPTH; it++) send(0, 21'(it), 21'(it), 21'(it));
    rreg(REG_STATUS, st);
    checks++;
    if (st[1] !== 1'b1 || st[15:8] !== 8'(DEPTH) || st[0] !== 1'b0 || st[2] !== 1'b1) begin
      failures++; $display("FAIL status %h", st);
    end
    @(negedge clk); reg_re = 1; reg_addr = REG_STATUS; @(negedge clk); reg_re = 0;
    rreg(REG_STATUS, st);
    checks++; if (st[1] !== 1'b0) begin failures++; $display("FAIL overflow not cleared"); end
    // the queue kept the first DEPTH gates in order
    for (int it = 0; it < DEPTH; it++) begin
      checks++;
      if (!cmd_valid || cmd.a !== waddr_t'(21'(it))) begin failures++; $display("FAIL order %0d", it); end
      @(negedge clk); cmd_ready = 1; @(negedge clk); cmd_ready = 0;
    end
    checks++; if (cmd_valid) begin failures++; $display("FAIL dropped gate queued"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
