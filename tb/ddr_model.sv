// ddr_model: behavioural model of the two-port on-board DDR memory.
//
// Not synthesizable. Each port accepts a request (held by the requester
// until 'complete'), waits a random latency between LAT_MIN and LAT_MAX
// cycles, then performs the 512-bit read or byte-enabled write and pulses
// 'complete' for one cycle (with rdata for a read). The default of about 36
// cycles corresponds to the ~180 ns access latency quoted for the board at
// a 200 MHz clock. Storage is sparse; unwritten words read as zero.
// put_key/get_key give back-door access to the value of one wire (the host
// DMA path), with four 128-bit slots per word.
module ddr_model
  import sifo_pkg::*;
#(
  parameter int LAT_MIN = 30,
  parameter int LAT_MAX = 42
) (
  input  logic     clk,
  input  ddr_req_t req_i [2],
  output ddr_rsp_t rsp_o [2]
);
  logic [DDR_W-1:0] mem [logic [DDR_AW-1:0]];
  int reads = 0, writes = 0;

  function automatic logic [DDR_W-1:0] rd(input logic [DDR_AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic put_key(input int idx, input key_t k);
    logic [DDR_W-1:0] w;
    w = rd(DDR_AW'(idx >> 2));
    w[DDR_SLOT_W*(idx & 3) +: DDR_SLOT_W] = DDR_SLOT_W'(k);
    mem[DDR_AW'(idx >> 2)] = w;
  endtask

  function automatic key_t get_key(input int idx);
    logic [DDR_W-1:0] w;
    w = rd(DDR_AW'(idx >> 2));
    return w[DDR_SLOT_W*(idx & 3) +: KEY_W];
  endfunction

  for (genvar p = 0; p < 2; p++) begin : g_port
    int wait_cnt = -1;
    initial rsp_o[p] = '0;
    always @(posedge clk) begin
      rsp_o[p].complete <= 1'b0;
      if (req_i[p].req && !rsp_o[p].complete) begin
        if (wait_cnt < 0) wait_cnt = LAT_MIN + int'($urandom_range(LAT_MAX - LAT_MIN));
        else if (wait_cnt == 0) begin
          if (req_i[p].we) begin
            logic [DDR_W-1:0] w;
            w = rd(req_i[p].addr);
            for (int b = 0; b < DDR_BE_W; b++)
              if (req_i[p].be[b]) w[8*b +: 8] = req_i[p].wdata[8*b +: 8];
            mem[req_i[p].addr] = w;
            writes++;
          end else begin
            rsp_o[p].rdata <= rd(req_i[p].addr);
            reads++;
          end
          rsp_o[p].complete <= 1'b1;
          wait_cnt = -1;
        end else wait_cnt--;
      end
    end
  end
endmodule
