// tb_wire_bram: writes random keys into the write half, checks they are
// invisible to reads until the halves are swapped, then readable with one
// cycle of latency, and that the old read half becomes the write half.
module tb_wire_bram;
  import sifo_pkg::*;
  import sifo_ref_pkg::*;

  localparam int D = 256;
  logic clk = 0, rst_n = 0, swap = 0, rd_en = 0, wr_en = 0, rd_bank;
  logic [7:0] rd_addr, wr_addr;
  key_t rd_data, wr_data;
  key_t golden [2][D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wire_bram #(.DEPTH_HALF(D)) dut (.clk, .rst_n, .swap, .rd_en, .rd_addr, .rd_data,
                                   .wr_en, .wr_addr, .wr_data, .rd_bank);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input key_t k);
    @(negedge clk); wr_en = 1; wr_addr = 8'(a); wr_data = k;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic rd_check(input int a, input key_t exp);
    @(negedge clk); rd_en = 1; rd_addr = 8'(a);
    @(negedge clk); rd_en = 0;
    checks++;
    if (rd_data !== exp) begin failures++; $display("FAIL rd %0d %h exp %h", a, rd_data, exp); end
  endtask

  initial begin
    key_t k;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (rd_bank !== 1'b0) begin failures++; $display("FAIL reset bank"); end
    // fill both halves through two layers
    for (int layer = 0; layer < 4; layer++) begin
      int wb;
      wb = (layer % 2 == 0) ? 1 : 0;   // write half is the one not read
      for (int a = 0; a < D; a += 7) begin
        k = rand_key();
        wr(a, k);
        golden[wb][a] = k;
      end
      // previous layer's data still readable in the read half
      if (layer > 0)
        for (int a = 0; a < D; a += 7) rd_check(a, golden[1-wb][a]);
      @(negedge clk); swap = 1; @(negedge clk); swap = 0;
      checks++;
      if (rd_bank !== 1'(wb)) begin failures++; $display("FAIL bank after swap"); end
      for (int a = 0; a < D; a += 7) rd_check(a, golden[wb][a]);
    end
    // simultaneous read and write
    @(negedge clk);
    rd_en = 1; rd_addr = 8'd7; wr_en = 1; wr_addr = 8'd7; wr_data = rand_key();
    @(negedge clk); rd_en = 0; wr_en = 0;
    checks++;
    if (rd_data !== golden[rd_bank][7]) begin failures++; $display("FAIL concurrent"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
