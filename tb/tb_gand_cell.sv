// tb_gand_cell: garbles random AND gates and checks (1) the output zero key
// and the three table rows against the reference garbler, (2) that for all
// four input bit pairs an evaluator holding only the two input labels and
// the table recovers the label of a AND b, (3) the 82-cycle latency, and
// (4) that a start while the cell is held is ignored until clear.
module tb_gand_cell;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, clear = 0;
  key_t k0, k1, r, k_out;
  key_t table_o [1:3];
  logic [31:0] gid;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gand_cell dut (.clk, .rst_n, .start, .clear, .k0, .k1, .r, .gate_id(gid),
                 .busy, .done, .k_out, .table_o);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_t ek, et [4], la, lb, lo, zk;
    key_t sk0, sk1, sr;
    logic [31:0] sg;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 24; n++) begin
      sk0 = rand_key(); sk1 = rand_key(); sr = rand_key(); sr[0] = 1'b1; sg = $urandom;
      @(negedge clk);
      k0 = sk0; k1 = sk1; r = sr; gid = sg; start = 1;
      @(negedge clk);
      start = 0; k0 = rand_key(); k1 = rand_key(); r = rand_key(); gid = $urandom;
      cyc = 0;  // edges since the start edge
      // a second start while busy must be ignored
      if (n == 3) begin start = 1; @(negedge clk); start = 0; cyc++; end
      while (!done && cyc < 300) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 82) begin failures++; $display("FAIL latency %0d", cyc); end
      garble_and(sk0, sk1, sr, sg, ek, et);
      checks++;
      if (k_out !== ek) begin failures++; $display("FAIL k_out %h exp %h", k_out, ek); end
      for (int s = 1; s < 4; s++) begin
        checks++;
        if (table_o[s] !== et[s]) begin failures++; $display("FAIL table[%0d]", s); end
      end
      zk = k_out;
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          la = a ? (sk0 ^ sr) : sk0;
          lb = b ? (sk1 ^ sr) : sk1;
          lo = eval_and(la, lb, sg, table_o[1], table_o[2], table_o[3]);
          checks++;
          if (lo !== ((a && b) ? (zk ^ sr) : zk)) begin
            failures++; $display("FAIL evaluate a=%0d b=%0d", a, b);
          end
        end
      // results hold until clear
      repeat (5) @(negedge clk);
      checks++;
      if (!done || k_out !== zk) begin failures++; $display("FAIL hold"); end
      clear = 1; @(negedge clk); clear = 0;
      checks++;
      if (done || busy) begin failures++; $display("FAIL clear"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
