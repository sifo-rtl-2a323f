// tb_sifo_workloads: the overlay at its default size garbling the
// benchmark classes the architecture was evaluated with: Hamming distance
// (10, 30, 50 bits), multiplication (16, 32, 64 bits), sorting ten 4-bit
// values, and a 5 x 5 product of 4-bit matrices. The 6-bit adder and 8-bit
// multiplier are in tb_sifo_top.
//
// The netlists are generated here (sifo_host_model.svh) in the usual
// garbled-circuit style, so their gate counts are close to, not equal to,
// those of the netlists the published figures were measured with. For
// each problem the host model garbles the circuit through the register
// port at 50 ns per register access; every garbled table and output key is
// checked against the reference garbler, then the evaluator ungarbles the
// circuit for random plaintext inputs (and, for sorting, an all-equal and a
// reversed input) and the decoded result is compared with the plaintext
// function. It prints gates, layers, cycles and the BRAM share of memory
// traffic per problem, and fails if a mechanism (BRAM and DDR reads and
// writes, swaps, back-pressure, gAND and gXOR gates) never happened.
module tb_sifo_workloads;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

`include "sifo_host_model.svh"

  localparam int TRIALS = 4;

  initial begin
    #400ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_problem(input string name);
    int cycles, b0, d0;
    plan();
    b0 = n_bram_rd + n_bram_wr; d0 = n_ddr_rd + n_ddr_wr;
    garble(cycles);
    $display("%-18s %6d gates %4d layers %8d cycles  BRAM accesses %6d  DDR accesses %6d",
             name, n_gates, n_layers, cycles, n_bram_rd + n_bram_wr - b0, n_ddr_rd + n_ddr_wr - d0);
    check_tables_and_outputs();
  endtask

  function automatic int popcount(input logic [63:0] v, input int nb);
    int c = 0;
    for (int i = 0; i < nb; i++) c += int'(v[i]);
    return c;
  endfunction

  initial begin
    bits_t inv, outv;
    logic [63:0] x, y;
    repeat (3) @(negedge clk);
    rst_n = 1;
    set_r();

    // Hamming distance
    for (int k = 0; k < 3; k++) begin
      int nb, wo;
      nb = (k == 0) ? 10 : (k == 1) ? 30 : 50;
      make_hd(nb);
      run_problem($sformatf("%0d-bit HD", nb));
      wo = n_out;
      for (int n = 0; n < TRIALS; n++) begin
        x = {$urandom, $urandom}; y = {$urandom, $urandom};
        if (n == 1) y = x;
        if (n == 2) y = ~x;
        inv = '0;
        for (int i = 0; i < nb; i++) begin inv[i] = x[i]; inv[nb + i] = y[i]; end
        evaluate(inv, outv);
        checks++;
        if (int'(outv[31:0] & ((32'd1 << wo) - 1)) != popcount(x ^ y, nb)) begin
          failures++; $display("FAIL HD%0d = %0d", nb, outv[31:0]);
        end
      end
    end

    // multiplication
    for (int k = 0; k < 3; k++) begin
      int nb;
      logic [127:0] pr;
      nb = 16 << k;
      make_mult(nb);
      run_problem($sformatf("%0d-bit mult", nb));
      for (int n = 0; n < TRIALS; n++) begin
        x = {$urandom, $urandom}; y = {$urandom, $urandom};
        if (nb < 64) begin x &= (64'd1 << nb) - 1; y &= (64'd1 << nb) - 1; end
        if (n == 1) x = '1 >> (64 - nb);
        inv = '0;
        for (int i = 0; i < nb; i++) begin inv[i] = x[i]; inv[nb + i] = y[i]; end
        evaluate(inv, outv);
        pr = 128'(x) * 128'(y);
        checks++;
        for (int i = 0; i < 2 * nb; i++)
          if (outv[i] != pr[i]) begin
            failures++; $display("FAIL mult%0d bit %0d", nb, i); break;
          end
      end
    end

    // sorting ten 4-bit values
    make_sort(10, 4);
    run_problem("10 4-bit sorting");
    for (int n = 0; n < TRIALS; n++) begin
      int v [10], sv [10];
      for (int i = 0; i < 10; i++) v[i] = (n == 1) ? 7 : (n == 2) ? 15 - i : $urandom_range(15);
      inv = '0;
      for (int i = 0; i < 10; i++) for (int b = 0; b < 4; b++) inv[4*i + b] = v[i][b];
      evaluate(inv, outv);
      sv = v; sv.sort();
      checks++;
      for (int i = 0; i < 10; i++)
        if (int'(outv[4*i +: 4]) != sv[i]) begin failures++; $display("FAIL sort pos %0d", i); break; end
    end

    // 5 x 5 product of 4-bit matrices, entries mod 256
    make_mmult(5, 4);
    run_problem("5x5 4-bit m_mult");
    for (int n = 0; n < TRIALS; n++) begin
      int a [5][5], b [5][5], c;
      inv = '0;
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) begin
        a[i][j] = $urandom_range(15); b[i][j] = $urandom_range(15);
        for (int t = 0; t < 4; t++) begin
          inv[(i*5 + j)*4 + t] = a[i][j][t];
          inv[(25 + i*5 + j)*4 + t] = b[i][j][t];
        end
      end
      evaluate(inv, outv);
      checks++;
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) begin
        c = 0;
        for (int k = 0; k < 5; k++) c += a[i][k] * b[k][j];
        if (int'(outv[(i*5 + j)*8 +: 8]) != (c & 255)) begin
          failures++; $display("FAIL m_mult C[%0d][%0d]", i, j);
        end
      end
    end

    $display("mechanisms: bram_rd=%0d bram_wr=%0d ddr_rd=%0d ddr_wr=%0d swaps=%0d stall=%0d backpressure=%0d and=%0d xor=%0d",
             n_bram_rd, n_bram_wr, n_ddr_rd, n_ddr_wr, n_swap, n_stall, n_bp, n_and, n_xor);
    checks++;
    if (n_bram_rd == 0 || n_bram_wr == 0 || n_ddr_rd == 0 || n_ddr_wr == 0 || n_swap == 0 ||
        n_bp == 0 || n_and == 0 || n_xor == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
