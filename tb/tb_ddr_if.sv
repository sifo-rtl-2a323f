// tb_ddr_if: random wire-value writes and reads through the DDR interface
// into the behavioural DDR model; checks that each value lands in its own
// slot without disturbing the other three values of the same 512-bit word,
// that reads return it, and that reads and writes run on separate ports at
// the same time.
module tb_ddr_if;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic rd_req = 0, rd_ack, wr_req = 0, wr_ack;
  logic [WIDX_W-1:0] rd_addr = '0, wr_addr = '0;
  key_t rd_data, wr_data = '0;
  ddr_req_t dreq [2];
  ddr_rsp_t drsp [2];
  key_t golden [64];
  int checks = 0, failures = 0, overlap = 0;

  always #5 clk = ~clk;

  ddr_if dut (.clk, .rst_n, .rd_req, .rd_addr, .rd_ack, .rd_data,
              .wr_req, .wr_addr, .wr_data, .wr_ack, .ddr_req_o(dreq), .ddr_rsp_i(drsp));
  ddr_model #(.LAT_MIN(3), .LAT_MAX(12)) mem (.clk, .req_i(dreq), .rsp_o(drsp));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rd_req && wr_req) overlap++;

  task automatic do_wr(input int a, input key_t k);
    @(negedge clk); wr_req = 1; wr_addr = WIDX_W'(a); wr_data = k;
    do @(posedge clk); while (!wr_ack);
    @(negedge clk); wr_req = 0;
  endtask

  task automatic do_rd(input int a, input key_t exp);
    @(negedge clk); rd_req = 1; rd_addr = WIDX_W'(a);
    do @(posedge clk); while (!rd_ack);
    checks++;
    if (rd_data !== exp) begin failures++; $display("FAIL rd %0d %h exp %h", a, rd_data, exp); end
    @(negedge clk); rd_req = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin golden[a] = rand_key(); do_wr(a, golden[a]); end
    for (int a = 0; a < 64; a++) begin
      checks++;
      if (mem.get_key(a) !== golden[a]) begin failures++; $display("FAIL slot %0d", a); end
    end
    for (int n = 0; n < 64; n++) begin int a; a = $urandom_range(63); do_rd(a, golden[a]); end
    // concurrent read and write on the two ports
    fork
      for (int n = 0; n < 20; n++) begin int a; a = $urandom_range(31); do_rd(a, golden[a]); end
      for (int n = 0; n < 20; n++) begin int a; a = 32 + $urandom_range(31); golden[a] = rand_key(); do_wr(a, golden[a]); end
    join
    for (int a = 0; a < 64; a++) do_rd(a, golden[a]);
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL no concurrent port use"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
