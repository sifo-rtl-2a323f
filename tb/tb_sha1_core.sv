// tb_sha1_core: checks the SHA-1 core against the FIPS "abc" vector and
// against a loop-based reference on random blocks, and checks that the
// digest is ready exactly 82 cycles after start.
module tb_sha1_core;
  import sifo_ref_pkg::*;

  logic         clk = 0, rst_n = 0, start = 0;
  logic [511:0] blk;
  logic         busy, done;
  logic [159:0] digest;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sha1_core dut (.clk, .rst_n, .start, .block_i(blk), .busy, .done, .digest);

  task automatic run(input logic [511:0] b, input logic [159:0] exp, input string what);
    int cyc = 0;
    @(negedge clk);
    blk = b; start = 1;
    @(negedge clk);
    start = 0; blk = '0;
    cyc = 0;  // edges since the start edge
    while (!done && cyc < 200) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 82) begin failures++; $display("FAIL %s latency %0d", what, cyc); end
    checks++;
    if (digest !== exp) begin failures++; $display("FAIL %s digest %h exp %h", what, digest, exp); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] b;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // "abc" padded
    b = {24'h616263, 1'b1, 423'd0, 64'd24};
    run(b, 160'ha9993e364706816aba3e25717850c26c9cd0d89d, "abc");
    checks++;
    if (sha1_ref(b) !== 160'ha9993e364706816aba3e25717850c26c9cd0d89d) begin
      failures++; $display("FAIL reference model");
    end
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < 16; i++) b[32*i +: 32] = $urandom;
      run(b, sha1_ref(b), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
