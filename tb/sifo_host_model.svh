// sifo_host_model.svh: host model and evaluator for the overlay's system
// testbenches; included inside a testbench module body.
//
// It instantiates sifo_top at its default size (15 gAND + 15 gXOR cells,
// 2 x 65536-word BRAM) with a DDR model, and provides:
//   * netlist builders: a netlist is a list of AND/XOR gates over wire
//     numbers; wires 0..n_in-1 are the inputs and out_w[0..n_out-1] the
//     outputs. A constant-0 wire is made as x ^ x, whose zero key is 0,
//     so the evaluator always holds key 0 for it: no constant inputs are
//     needed. Adders use one AND per bit (s = a^b^c,
//     cout = c ^ ((a^c) & (b^c))); the comparator uses
//     gt' = c ^ ((a^b) & (a^c)); a multiplexer uses one AND per bit.
//   * plan(): levels the netlist (layer = 1 + deepest input) and applies
//     the directly-used policy: a gate output read exactly once, by a gate
//     in the next layer and not a circuit output, gets the next free BRAM
//     index of its layer (while one is left); all other wires live in DDR
//     at their wire number.
//   * garble(): the host program. Random input zero keys go into DDR (the
//     DMA); each layer's XOR gates, then AND gates, are written into the
//     registers of cells taken round-robin, one register access every
//     host_gap cycles (10 = 50 ns at 200 MHz); the queue level is read
//     every 8 gates; at the end of a layer it waits for STATUS.idle and
//     swaps the BRAM halves. A reference garbler computes every wire's
//     zero key alongside.
//   * check_tables_and_outputs(): each AND gate's table (received on the
//     stream, by gate number) and each output key in DDR against the
//     reference garbler.
//   * evaluate(): the evaluator. Given plaintext input bits, it takes the
//     matching labels, ungarbles the circuit from the received tables only,
//     and decodes the outputs; a label that is neither key is a failure.
//   * monitors that count the mechanisms: BRAM/DDR reads and writes, layer
//     swaps, commands waiting for a busy cell, table back-pressure (the
//     stream is held back at random), gAND and gXOR gates.

  localparam int N_AND = 15, N_XOR = 15, QDEPTH = 32, BRAM_HALF = 65536;
  localparam int MAXW = 65536, MAXIO = 1024;

  int host_gap = 10;   // cycles per host register access

  logic clk = 0, rst_n = 0;
  logic reg_we = 0, reg_re = 0;
  logic [REG_AW-1:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic gt_valid, gt_ready = 1;
  gtable_t gt_data;
  ddr_req_t dreq [2];
  ddr_rsp_t drsp [2];

  always #5 clk = ~clk;

  sifo_top dut (.clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata,
                .gt_valid, .gt_ready, .gt_data, .ddr_req_o(dreq), .ddr_rsp_i(drsp));
  ddr_model u_mem (.clk, .req_i(dreq), .rsp_o(drsp));

  int checks = 0, failures = 0;
  int cyc = 0;

  // ---------------- netlist ----------------
  typedef int vec_t [130];
  int n_wires, n_gates, n_in, n_out, zero_w;
  gate_kind_e g_kind [MAXW];
  int g_a [MAXW], g_b [MAXW], g_c [MAXW], g_layer [MAXW], g_seq [MAXW];
  int w_layer [MAXW], w_fanout [MAXW], w_use_layer [MAXW], w_bram_idx [MAXW];
  int out_w [MAXIO];

  function automatic int new_gate(input gate_kind_e k, input int a, input int b);
    g_kind[n_gates] = k; g_a[n_gates] = a; g_b[n_gates] = b; g_c[n_gates] = n_wires;
    n_gates++;
    return n_wires++;
  endfunction

  // A problem with nin input wires (0..nin-1) and a constant-0 wire.
  function automatic void new_problem(input int nin);
    n_wires = nin; n_gates = 0; n_in = nin; n_out = 0;
    zero_w = new_gate(GATE_XOR, 0, 0);
  endfunction

  function automatic void add_out(input int w);
    out_w[n_out++] = w;
  endfunction

  // nb-bit ripple adder; s[0..nb-1] sum, s[nb] carry out.
  function automatic vec_t build_adder(input int nb, input vec_t a, input vec_t b);
    vec_t s;
    int c, t1, t2;
    s[0] = new_gate(GATE_XOR, a[0], b[0]);
    c    = new_gate(GATE_AND, a[0], b[0]);
    for (int i = 1; i < nb; i++) begin
      t1   = new_gate(GATE_XOR, a[i], c);
      t2   = new_gate(GATE_XOR, b[i], c);
      s[i] = new_gate(GATE_XOR, t1, b[i]);
      t1   = new_gate(GATE_AND, t1, t2);
      c    = new_gate(GATE_XOR, c, t1);
    end
    s[nb] = c;
    return s;
  endfunction

  // nb x nb -> 2nb multiplier: shift-and-add of partial-product rows.
  function automatic vec_t build_mult(input int nb, input vec_t a, input vec_t b);
    vec_t acc, pp, x, p;
    for (int j = 0; j < nb; j++) acc[j] = new_gate(GATE_AND, a[j], b[0]);
    acc[nb] = zero_w;
    p[0] = acc[0];
    for (int i = 1; i < nb; i++) begin
      for (int j = 0; j < nb; j++) pp[j] = new_gate(GATE_AND, a[j], b[i]);
      for (int j = 0; j < nb; j++) x[j] = acc[j + 1];
      acc = build_adder(nb, x, pp);
      p[i] = acc[0];
    end
    for (int j = 1; j <= nb; j++) p[nb - 1 + j] = acc[j];
    return p;
  endfunction

  // [a > b] for nb-bit unsigned values, from the lsb up.
  function automatic int build_gt(input int nb, input vec_t a, input vec_t b);
    int c, t1, t2;
    c = zero_w;
    for (int i = 0; i < nb; i++) begin
      t1 = new_gate(GATE_XOR, a[i], b[i]);
      t2 = new_gate(GATE_XOR, a[i], c);
      t1 = new_gate(GATE_AND, t1, t2);
      c  = new_gate(GATE_XOR, c, t1);
    end
    return c;
  endfunction

  // Compare-exchange: lo = min(a, b), hi = max(a, b).
  function automatic void build_cmpx(input int nb, inout vec_t a, inout vec_t b);
    int gt, d, t;
    gt = build_gt(nb, a, b);
    for (int i = 0; i < nb; i++) begin
      d = new_gate(GATE_XOR, a[i], b[i]);
      t = new_gate(GATE_AND, gt, d);
      a[i] = new_gate(GATE_XOR, a[i], t);   // min
      b[i] = new_gate(GATE_XOR, a[i], d);   // max = min ^ a ^ b
    end
  endfunction

  // ---- problems: inputs are packed lsb first, operand after operand ----
  function automatic vec_t in_vec(input int base, input int nb);
    vec_t v;
    for (int i = 0; i < nb; i++) v[i] = base + i;
    return v;
  endfunction

  function automatic void make_adder(input int nb);
    vec_t s;
    new_problem(2 * nb);
    s = build_adder(nb, in_vec(0, nb), in_vec(nb, nb));
    for (int i = 0; i < nb; i++) add_out(s[i]);   // carry out dropped
  endfunction

  function automatic void make_mult(input int nb);
    vec_t p;
    new_problem(2 * nb);
    p = build_mult(nb, in_vec(0, nb), in_vec(nb, nb));
    for (int i = 0; i < 2 * nb; i++) add_out(p[i]);
  endfunction

  // Hamming distance of two nb-bit words: XOR, then an adder tree that
  // adds the difference bits as numbers of growing width.
  function automatic void make_hd(input int nb);
    vec_t num [64];
    int w [64];
    int cnt;
    new_problem(2 * nb);
    for (int i = 0; i < nb; i++) begin num[i][0] = new_gate(GATE_XOR, i, nb + i); w[i] = 1; end
    cnt = nb;
    while (cnt > 1) begin
      int k;
      k = 0;
      for (int i = 0; i + 1 < cnt; i += 2) begin
        vec_t x, y;
        int wd;
        wd = (w[i] > w[i+1]) ? w[i] : w[i+1];
        for (int j = 0; j < wd; j++) begin
          x[j] = (j < w[i])   ? num[i][j]   : zero_w;
          y[j] = (j < w[i+1]) ? num[i+1][j] : zero_w;
        end
        num[k] = build_adder(wd, x, y);
        w[k] = wd + 1;
        k++;
      end
      if (cnt % 2) begin num[k] = num[cnt-1]; w[k] = w[cnt-1]; k++; end
      cnt = k;
    end
    for (int j = 0; j < w[0]; j++) add_out(num[0][j]);
  endfunction

  // Sort n nb-bit values ascending (odd-even transposition network).
  function automatic void make_sort(input int n, input int nb);
    vec_t v [64];
    new_problem(n * nb);
    for (int i = 0; i < n; i++) v[i] = in_vec(i * nb, nb);
    for (int r = 0; r < n; r++)
      for (int i = r % 2; i + 1 < n; i += 2) build_cmpx(nb, v[i], v[i+1]);
    for (int i = 0; i < n; i++) for (int j = 0; j < nb; j++) add_out(v[i][j]);
  endfunction

  // C = A * B for n x n matrices of nb-bit values, entries of C taken
  // modulo 2^(2nb). A is row-major first, then B.
  function automatic void make_mmult(input int n, input int nb);
    vec_t s, p;
    new_problem(2 * n * n * nb);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        for (int k = 0; k < n; k++) begin
          p = build_mult(nb, in_vec((i * n + k) * nb, nb), in_vec((n * n + k * n + j) * nb, nb));
          s = (k == 0) ? p : build_adder(2 * nb, s, p);
        end
        for (int b = 0; b < 2 * nb; b++) add_out(s[b]);
      end
  endfunction

  // ---------------- layering and memory policy ----------------
  int n_layers;
  function automatic void plan();
    int cnt [int];
    for (int w = 0; w < n_wires; w++) begin
      w_layer[w] = 0; w_fanout[w] = 0; w_use_layer[w] = -1; w_bram_idx[w] = -1;
    end
    n_layers = 0;
    for (int g = 0; g < n_gates; g++) begin
      int la, lb;
      la = w_layer[g_a[g]]; lb = w_layer[g_b[g]];
      g_layer[g] = ((la > lb) ? la : lb) + 1;
      w_layer[g_c[g]] = g_layer[g];
      if (g_layer[g] > n_layers) n_layers = g_layer[g];
      w_fanout[g_a[g]]++; w_fanout[g_b[g]]++;
      w_use_layer[g_a[g]] = g_layer[g]; w_use_layer[g_b[g]] = g_layer[g];
    end
    // circuit outputs are read by the host, so they must end up in DDR
    for (int o = 0; o < n_out; o++) w_fanout[out_w[o]]++;
    for (int g = 0; g < n_gates; g++) begin
      int w;
      w = g_c[g];
      if (!cnt.exists(w_layer[w])) cnt[w_layer[w]] = 0;
      if (w_fanout[w] == 1 && w_use_layer[w] == w_layer[w] + 1 && cnt[w_layer[w]] < BRAM_HALF) begin
        w_bram_idx[w] = cnt[w_layer[w]];
        cnt[w_layer[w]]++;
      end
    end
  endfunction

  function automatic waddr_t wa(input int w);
    waddr_t x;
    if (w_bram_idx[w] >= 0) begin x.bram = 1; x.idx = 20'(w_bram_idx[w]); end
    else begin x.bram = 0; x.idx = 20'(w); end
    return x;
  endfunction

  // ---------------- host register access ----------------
  task automatic wreg(input logic [REG_AW-1:0] a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
    repeat (host_gap - 2) @(negedge clk);
  endtask

  task automatic rreg(input logic [REG_AW-1:0] a, output logic [31:0] d);
    @(negedge clk); reg_addr = a; reg_re = 1;
    #1 d = reg_rdata;
    @(negedge clk); reg_re = 0;
    repeat (host_gap - 2) @(negedge clk);
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do rreg(REG_STATUS, st); while (!st[0]);
    checks++;
    if (st[1]) begin failures++; $display("FAIL command queue overflow"); end
  endtask

  // ---------------- garbler ----------------
  key_t r, k0 [MAXW];
  gtable_t tabs [int];      // received, by gate number
  int seq;
  int n_swap = 0, n_and = 0, n_xor = 0;

  task automatic send_gate(input int g, input int unit);
    logic [63:0] p;
    logic [31:0] st;
    logic [REG_AW-1:0] ra;
    // every 8 gates, wait until 8 more fit in the command queue
    if (seq % 8 == 0) do rreg(REG_STATUS, st); while (int'(st[15:8]) > QDEPTH - 8);
    p = pack_addrs(wa(g_a[g]), wa(g_b[g]), wa(g_c[g]));
    g_seq[g] = seq++;
    if (g_kind[g] == GATE_AND) begin
      key_t ko, t [4];
      garble_and(k0[g_a[g]], k0[g_b[g]], r, g_seq[g], ko, t);
      k0[g_c[g]] = ko;
      n_and++;
      ra = REG_CELL0 + REG_AW'(2 * unit);
    end else begin
      k0[g_c[g]] = k0[g_a[g]] ^ k0[g_b[g]];
      n_xor++;
      ra = REG_CELL0 + REG_AW'(2 * (N_AND + unit));
    end
    wreg(ra, p[63:32]);
    wreg(ra + 1'b1, p[31:0]);
  endtask

  task automatic set_r();
    r = rand_key(); r[0] = 1'b1;
    wreg(REG_R0, r[31:0]); wreg(REG_R1, r[63:32]); wreg(REG_R2, {16'd0, r[79:64]});
  endtask

  task automatic garble(output int cycles);
    int t0, ua, ux;
    t0 = cyc;
    seq = 0;
    tabs.delete();
    wreg(REG_CTRL, 32'h2);   // gate numbers restart at 0
    for (int i = 0; i < n_in; i++) begin k0[i] = rand_key(); u_mem.put_key(20'(i), k0[i]); end
    for (int l = 1; l <= n_layers; l++) begin
      ua = 0; ux = 0;
      for (int g = 0; g < n_gates; g++)
        if (g_layer[g] == l && g_kind[g] == GATE_XOR) begin send_gate(g, ux); ux = (ux + 1) % N_XOR; end
      for (int g = 0; g < n_gates; g++)
        if (g_layer[g] == l && g_kind[g] == GATE_AND) begin send_gate(g, ua); ua = (ua + 1) % N_AND; end
      wait_idle();
      wreg(REG_CTRL, 32'h1);  // swap BRAM halves
      n_swap++;
    end
    cycles = cyc - t0;
  endtask

  // ---------------- evaluator ----------------
  typedef bit [MAXIO-1:0] bits_t;
  key_t lab [MAXW];

  task automatic evaluate(input bits_t inv, output bits_t outv);
    for (int i = 0; i < n_in; i++) lab[i] = inv[i] ? (k0[i] ^ r) : k0[i];
    for (int g = 0; g < n_gates; g++) begin
      if (g_kind[g] == GATE_XOR) lab[g_c[g]] = lab[g_a[g]] ^ lab[g_b[g]];
      else begin
        gtable_t t;
        t = tabs.exists(g_seq[g]) ? tabs[g_seq[g]] : '0;
        lab[g_c[g]] = eval_and(lab[g_a[g]], lab[g_b[g]], 32'(g_seq[g]), t.t1, t.t2, t.t3);
      end
    end
    outv = '0;
    for (int o = 0; o < n_out; o++) begin
      if (lab[out_w[o]] === (k0[out_w[o]] ^ r)) outv[o] = 1'b1;
      else if (lab[out_w[o]] !== k0[out_w[o]]) begin
        checks++; failures++; $display("FAIL output %0d label matches neither key", o);
      end
    end
  endtask

  task automatic check_tables_and_outputs();
    for (int g = 0; g < n_gates; g++) if (g_kind[g] == GATE_AND) begin
      key_t ko, t [4];
      garble_and(k0[g_a[g]], k0[g_b[g]], r, g_seq[g], ko, t);
      checks++;
      if (!tabs.exists(g_seq[g]) || tabs[g_seq[g]].t1 !== t[1] || tabs[g_seq[g]].t2 !== t[2] ||
          tabs[g_seq[g]].t3 !== t[3]) begin
        failures++; $display("FAIL table of gate %0d", g);
      end
    end
    for (int o = 0; o < n_out; o++) begin
      checks++;
      if (u_mem.get_key(20'(out_w[o])) !== k0[out_w[o]]) begin
        failures++; $display("FAIL output key %0d wire %0d got %h exp %h", o, out_w[o], u_mem.get_key(20'(out_w[o])), k0[out_w[o]]);
      end
    end
  endtask

  // ---------------- monitors ----------------
  int n_bram_rd = 0, n_bram_wr = 0, n_ddr_rd = 0, n_ddr_wr = 0, n_stall = 0, n_bp = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (gt_valid && gt_ready) begin
        checks++;
        if (tabs.exists(int'(gt_data.gid))) begin failures++; $display("FAIL duplicate table"); end
        tabs[int'(gt_data.gid)] = gt_data;
      end
      if (gt_valid && !gt_ready) n_bp++;
      if (dut.u_disp.bram_rd_en) n_bram_rd++;
      if (dut.u_disp.bram_wr_en) n_bram_wr++;
      if (dut.u_disp.ddr_rd_ack) n_ddr_rd++;
      if (dut.u_disp.ddr_wr_ack) n_ddr_wr++;
      if (dut.u_disp.cmd_valid && !dut.u_disp.cmd_ready && dut.u_disp.rs == 0) n_stall++;
    end
  end
  always @(negedge clk) gt_ready = ($urandom_range(3) != 0);
