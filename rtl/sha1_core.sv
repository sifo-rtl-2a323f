// sha1_core: one-block SHA-1 compression, one round per clock.
//
// Hashes a single, already padded 512-bit block starting from the standard
// SHA-1 initial value (FIPS 180-4). The message schedule is a 16-word
// sliding window: W[t+16] = rol1(W[t+13] ^ W[t+8] ^ W[t+2] ^ W[t]).
//
// Timing: 'start' is sampled on a rising edge (edge 0), which loads the
// block. Edges 1..80 perform the 80 rounds, edge 81 adds the initial value,
// and edge 82 raises 'done'. 'done' and 'digest' then hold until the next
// start. The total of 82 cycles is the latency the paper states for its
// SHA-1 core (and hence for a garbled AND gate); the split into load, rounds
// and final add is this design's choice. A start while busy is ignored.
module sha1_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block_i,
  output logic         busy,
  output logic         done,
  output logic [159:0] digest
);
  localparam logic [31:0] H0 = 32'h67452301;
  localparam logic [31:0] H1 = 32'hEFCDAB89;
  localparam logic [31:0] H2 = 32'h98BADCFE;
  localparam logic [31:0] H3 = 32'h10325476;
  localparam logic [31:0] H4 = 32'hC3D2E1F0;

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e;
  logic [6:0]  cnt;       // 1..80 rounds, 81 final add, 82 done
  logic [6:0]  t;         // round number
  logic [31:0] f, k, temp, w_next;

  assign t = cnt - 7'd1;

  always_comb begin
    if (t < 7'd20) begin
      f = (b & c) | (~b & d);
      k = 32'h5A827999;
    end else if (t < 7'd40) begin
      f = b ^ c ^ d;
      k = 32'h6ED9EBA1;
    end else if (t < 7'd60) begin
      f = (b & c) | (b & d) | (c & d);
      k = 32'h8F1BBCDC;
    end else begin
      f = b ^ c ^ d;
      k = 32'hCA62C1D6;
    end
    temp   = {a[26:0], a[31:27]} + f + e + k + w[0];
    w_next = w[13] ^ w[8] ^ w[2] ^ w[0];
    w_next = {w_next[30:0], w_next[31]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cnt    <= '0;
      digest <= '0;
    end else if (start && !busy) begin
      for (int i = 0; i < 16; i++) w[i] <= block_i[511-32*i -: 32];
      {a, b, c, d, e} <= {H0, H1, H2, H3, H4};
      cnt  <= 7'd1;
      busy <= 1'b1;
      done <= 1'b0;
    end else if (busy) begin
      cnt <= cnt + 7'd1;
      if (cnt <= 7'd80) begin
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= w_next;
        e <= d;
        d <= c;
        c <= {b[1:0], b[31:2]};
        b <= a;
        a <= temp;
      end else if (cnt == 7'd81) begin
        digest <= {a + H0, b + H1, c + H2, d + H3, e + H4};
      end else begin
        done <= 1'b1;
        busy <= 1'b0;
      end
    end
  end

endmodule
