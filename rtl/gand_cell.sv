// gand_cell: garbled AND overlay cell with garbled-row reduction.
//
// For an AND gate with input zero keys K0 = k0 and K1 = k1 and free-XOR
// offset R, four SHA-1 cores hash the four input-key pairs in parallel:
//   row 0: (K0,   K1  )   row 1: (K0,   K1^R)
//   row 2: (K0^R, K1  )   row 3: (K0^R, K1^R)
// each as SHA(ka || kb || g). The upper 80 digest bits H_i are XORed with
// the output key of the row: K2^0 for rows 0..2 and K2^1 = K2^0 ^ R for
// row 3 (only 1 AND 1 gives 1), giving c_i. K2^0 before reduction is zero.
//
// Arbitrator 1 picks the row s whose keys both have permute bit (lsb) 0,
// s = {k0[0], k1[0]}, and XORs c_s into the other three rows. This is the
// same as moving the output key to K2^0' = c_s, which makes row s all zero:
// it need not be stored. Arbitrator 2 places row i at table slot i ^ s (its
// point-and-permute position); slot 0 is the zero row, slots 1..3 are the
// garbled table that goes to the evaluator. k_out = c_s is the output
// wire's new zero key. R must have lsb 1.
//
// Timing: start is sampled on an edge; 82 edges later 'done' rises (the
// SHA-1 latency); the arbitrators are combinational so add nothing.
// Outputs hold until 'clear' (the dispatcher's one-cycle reset step);
// 'busy' is high from start until clear and a start while busy is ignored. The structure (four SHA-1 rows, two arbitrators, zero slot)
// follows the paper's figure; the hash input layout, the 80-bit truncation
// and the arbitration rule are this design's choices.
module gand_cell
  import sifo_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             clear,
  input  key_t             k0,
  input  key_t             k1,
  input  key_t             r,
  input  logic [GID_W-1:0] gate_id,
  output logic             busy,
  output logic             done,
  output key_t             k_out,
  output key_t             table_o [1:3]
);
  logic [3:0]   sha_busy, sha_done;
  logic [159:0] dig [4];
  key_t         c_row [4];
  logic [1:0]   s_q;     // row picked by arbitrator 1, fixed at start
  logic         held;    // results not yet released by clear

  for (genvar i = 0; i < 4; i++) begin : g_row
    // Row i uses input bits a = i[1], b = i[0].
    key_t ka, kb;
    assign ka = (i >= 2)    ? (k0 ^ r) : k0;
    assign kb = (i[0] == 1) ? (k1 ^ r) : k1;
    sha1_core u_sha (
      .clk     (clk),
      .rst_n   (rst_n),
      .start   (start && !busy),
      .block_i (sha_block(ka, kb, gate_id)),
      .busy    (sha_busy[i]),
      .done    (sha_done[i]),
      .digest  (dig[i])
    );
  end

  // R is needed again when the digests come back; hold it.
  key_t r_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      held <= 1'b0;
      s_q  <= '0;
      r_q  <= '0;
    end else if (start && !busy) begin
      held <= 1'b1;
      s_q  <= {k0[0], k1[0]};
      r_q  <= r;
    end else if (clear) begin
      held <= 1'b0;
    end
  end

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      c_row[i] = dig[i][159:80];
      if (i == 3) c_row[i] = c_row[i] ^ r_q;   // K2^1 = K2^0 ^ R, K2^0 = 0
    end
    // Arbitrator 1: reduce against row s. Arbitrator 2: slot = row ^ s.
    k_out = c_row[s_q];
    for (int slot = 1; slot < 4; slot++)
      table_o[slot] = c_row[2'(slot) ^ s_q] ^ c_row[s_q];
  end

  // The cell is occupied from start until the dispatcher's clear.
  assign busy = held;
  assign done = held && (&sha_done);

  // the four rows start together and so run in lock step
  a_rows_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    sha_busy == {4{sha_busy[0]}});

endmodule
