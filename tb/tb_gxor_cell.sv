// tb_gxor_cell: free XOR. Checks the output zero key against a^b, and that
// all four label combinations decode to the XOR truth table under the
// global offset R.
module tb_gxor_cell;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

  key_t k0, k1, k_out;
  int checks = 0, failures = 0;

  gxor_cell dut (.k0, .k1, .k_out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_t r, la, lb, lo;
    for (int n = 0; n < 50; n++) begin
      k0 = rand_key(); k1 = rand_key(); r = rand_key(); r[0] = 1'b1;
      #1;
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          la = a ? (k0 ^ r) : k0;
          lb = b ? (k1 ^ r) : k1;
          lo = la ^ lb;           // what the evaluator computes
          checks++;
          if (lo !== (((a ^ b) != 0) ? (k_out ^ r) : k_out)) begin
            failures++; $display("FAIL a=%0d b=%0d", a, b);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
