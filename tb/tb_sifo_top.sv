// tb_sifo_top: end-to-end garbling on the overlay at its default size
// (15 gAND + 15 gXOR cells, 2 x 65536-word BRAM), driven by a host model
// (sifo_host_model.svh).
//
// The host model builds AND/XOR netlists (a 6-bit adder, an 8-bit
// multiplier and a 64-bit all-bits-differ AND tree, on the same hardware without any change: the overlay idea),
// levels them into layers, applies the directly-used policy (a gate output
// used exactly once, by a gate of the next layer, goes to BRAM; every
// other wire lives in DDR at its wire number), puts random input keys into
// DDR as the host DMA would, and writes each gate's packed addresses into
// the registers of a cell, XOR gates of a layer first, then AND gates,
// spacing register accesses 10 cycles apart (50 ns at 200 MHz; a
// third run uses a 2-cycle host so that the cells become the bottleneck). It waits for
// STATUS.idle and swaps the BRAM halves between layers, and holds back the
// table stream at random.
//
// Checks: every garbled table (by gate number) and every output key
// against the reference garbler; then, acting as the evaluator with the
// labels of random plaintext inputs, it ungarbles the whole circuit from
// the tables and checks that the decoded outputs equal a+b and a*b.
// It counts each mechanism (BRAM and DDR reads and writes, layer swaps,
// commands waiting for a busy cell, table back-pressure, gAND/gXOR use) and
// fails if one never happened.
module tb_sifo_top;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

`include "sifo_host_model.svh"

  // "All bits differ" test of two nb-bit words: nb XOR gates, then an AND
  // tree. Every tree level is one layer whose operands are all in BRAM.
  function automatic void make_differ_tree(input int nb);
    int lvl [64], n;
    new_problem(2 * nb);
    for (int i = 0; i < nb; i++) lvl[i] = new_gate(GATE_XOR, i, nb + i);
    n = nb;
    while (n > 1) begin
      for (int j = 0; j < n / 2; j++) lvl[j] = new_gate(GATE_AND, lvl[2*j], lvl[2*j+1]);
      n = n / 2;
    end
    add_out(lvl[0]);
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    bits_t inv, outv;
    logic [63:0] x, y;
    repeat (3) @(negedge clk);
    rst_n = 1;
    set_r();

    // 6-bit adder
    make_adder(6);
    plan();
    garble(cycles);
    $display("6-bit adder: %0d gates, %0d layers, %0d cycles", n_gates, n_layers, cycles);
    check_tables_and_outputs();
    for (int n = 0; n < 20; n++) begin
      x = 64'($urandom_range(63)); y = 64'($urandom_range(63));
      inv = '0; inv[5:0] = x[5:0]; inv[11:6] = y[5:0];
      evaluate(inv, outv);
      checks++;
      if (outv[5:0] != 6'(x + y)) begin failures++; $display("FAIL %0d + %0d = %0d", x, y, outv[5:0]); end
    end

    // 8-bit multiplier, same hardware; then again with a fast host
    // (2 cycles per register access): the cells, not the link, now limit
    // the rate, so commands wait for busy cells and the queue fills.
    make_mult(8);
    plan();
    for (int pass = 0; pass < 2; pass++) begin
      host_gap = pass ? 2 : 10;
      garble(cycles);
      $display("8-bit mult (host %0d cycles/access): %0d gates, %0d layers, %0d cycles",
               host_gap, n_gates, n_layers, cycles);
      check_tables_and_outputs();
      for (int n = 0; n < 20; n++) begin
        x = 64'($urandom_range(255)); y = 64'($urandom_range(255));
        inv = '0; inv[7:0] = x[7:0]; inv[15:8] = y[7:0];
        evaluate(inv, outv);
        checks++;
        if (outv[15:0] != 16'(x * y)) begin failures++; $display("FAIL %0d * %0d = %0d", x, y, outv[15:0]); end
      end
    end

    // 64-bit "all bits differ": 63 ANDs in BRAM-fed layers, fast host
    make_differ_tree(64);
    plan();
    garble(cycles);
    $display("64-bit differ tree: %0d gates, %0d layers, %0d cycles", n_gates, n_layers, cycles);
    check_tables_and_outputs();
    for (int n = 0; n < 20; n++) begin
      x = {$urandom, $urandom};
      y = (n % 2) ? ~x : {$urandom, $urandom};
      if (n == 4) y = ~x ^ 64'h100;
      inv = '0; inv[63:0] = x; inv[127:64] = y;
      evaluate(inv, outv);
      checks++;
      if (outv[0] != ((x ^ y) == '1)) begin failures++; $display("FAIL differ %h %h = %0d", x, y, outv[0]); end
    end

    $display("mechanisms: bram_rd=%0d bram_wr=%0d ddr_rd=%0d ddr_wr=%0d swaps=%0d stall=%0d backpressure=%0d and=%0d xor=%0d",
             n_bram_rd, n_bram_wr, n_ddr_rd, n_ddr_wr, n_swap, n_stall, n_bp, n_and, n_xor);
    checks++;
    if (n_bram_rd == 0 || n_bram_wr == 0 || n_ddr_rd == 0 || n_ddr_wr == 0 || n_swap == 0 ||
        n_stall == 0 || n_bp == 0 || n_and == 0 || n_xor == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
