// eop_sender: the sending chip (chip 1) of the protected link.
//
// Holds the internal logic that produces the plain data p, the control-clock
// generator that turns every change of p into a clk_ctrl pulse, and the
// encryption module that answers each pulse with a fresh ciphertext
// e = p XOR k. Only e and clk_ctrl leave the chip over the board; p is also
// brought out for monitoring, as the test setup sends it to a host.
//
// Power-up sequence (this design's choice; the paper only requires new,
// synchronised key and IV at every power-up): one cycle after reset the
// seed PRNG derives S(t) from seed_prev; then the Trivium is loaded with
// key = S(t)[79:0], iv = S(t)[159:80] and warmed up; ready then rises. The
// internal logic changes p only while phase is execution and ready is high;
// the generator runs whenever ready is high, so a word that changes in the
// last execution cycle is still sent. seed_new must be written back to
// non-volatile storage and seed_digest goes to the receiver for its seed
// check.
module eop_sender
  import eop_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned THR     = 1,
  parameter int unsigned SYS_MHZ = 400
) (
  input  logic              clk,
  input  logic              rst_n,
  input  phase_e            phase,
  input  src_mode_e         mode,
  input  mhz_t              rate_u,
  input  mhz_t [N-1:0]      rate,
  input  logic [SEED_W-1:0] seed_prev,
  output logic [SEED_W-1:0] seed_new,
  output logic [31:0]       seed_digest,
  output logic              ready,
  output logic [N-1:0]      p,
  output logic [N-1:0]      e,
  output logic              clk_ctrl,
  output logic              glitch
);

  logic start_q, seed_done, seed_done_d, load, run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q     <= 1'b1;
      seed_done_d <= 1'b0;
    end else begin
      start_q     <= 1'b0;
      seed_done_d <= seed_done;
    end
  end

  assign load = seed_done && !seed_done_d;
  assign run  = ready && (phase == PH_EXEC);

  seed_prng u_seed (
    .clk, .rst_n, .start(start_q), .seed_prev,
    .done(seed_done), .seed(seed_new), .digest(seed_digest)
  );

  internal_logic #(.N(N), .SYS_MHZ(SYS_MHZ)) u_logic (
    .clk, .rst_n, .run, .mode, .rate_u, .rate, .p, .step_o()
  );

  ctrl_clk_gen #(.N(N), .THR(THR)) u_gen (
    .clk, .rst_n, .run(ready), .p, .clk_ctrl, .glitch
  );

  enc_module #(.N(N)) u_enc (
    .clk, .rst_n, .load,
    .key(seed_new[KEY_W-1:0]), .iv(seed_new[SEED_W-1:KEY_W]),
    .clk_ctrl, .p, .ready, .k(), .e
  );

endmodule
