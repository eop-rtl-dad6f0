// seed_prng: self-updating seed for the stream cipher.
//
// Key and IV must differ at every power-up and be equal in both chips
// without being sent in clear. Each chip holds the previous seed S(t-1) in
// non-volatile storage (outside this module) and derives the new seed
// S(t) = PRNG(S(t-1)) with an identical PRNG; S(t) is written back and
// split into the 80-bit Trivium key (bits 79:0) and IV (bits 159:80). A
// short digest of S(t) lets the receiver confirm that both chips derived the
// same seed. The scheme is the paper's; the PRNG and the digest are not
// specified there, and this design uses the simplest choices: a 160-bit
// Fibonacci LFSR (taps 160, 159, 142, 141) advanced SEED_W steps, one per
// cycle, and a 32-bit XOR fold of the seed. Neither is cryptographically
// strong. An all-zero seed is a fixed point of the LFSR and must not be
// programmed.
//
// Timing: start (one cycle) loads seed_prev; done rises SEED_W cycles later
// and stays high, with seed and digest valid, until the next start.
module seed_prng
  import eop_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SEED_W-1:0] seed_prev,
  output logic              done,
  output logic [SEED_W-1:0] seed,
  output logic [31:0]       digest
);

  localparam int unsigned CW = $clog2(SEED_W + 1);

  logic [CW-1:0] cnt;
  logic          busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seed <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else if (start) begin
      seed <= seed_prev;
      cnt  <= CW'(SEED_W);
      busy <= 1'b1;
      done <= 1'b0;
    end else if (busy) begin
      seed <= {seed[SEED_W-2:0], seed[159] ^ seed[158] ^ seed[141] ^ seed[140]};
      cnt  <= cnt - 1'b1;
      if (cnt == CW'(1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_comb begin
    digest = '0;
    for (int i = 0; i < SEED_W; i++)
      digest[i % 32] = digest[i % 32] ^ seed[i];
  end

endmodule
