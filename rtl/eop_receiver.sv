// eop_receiver: the receiving chip (chip 2) of the protected link.
//
// Samples the incoming ciphertext e and control clock through SYNC-stage
// synchronisers, decrypts e with its own Trivium (stepped on each clk_ctrl
// rising edge) and verifies that clock edges and ciphertext flips stay
// paired, counting violations of each kind. It derives its seed with the
// same PRNG as the sender and compares digests: seed_ok is high when the
// two chips hold the same seed, so their keypads match.
//
// The power-up sequence mirrors the sender's. Verification runs only while
// phase is execution and the cipher is ready; violation outputs are copied
// for the host while phase is pause. The synchronisers and the sequencing
// are this design's choices.
module eop_receiver
  import eop_pkg::*;
#(
  parameter int unsigned N    = 8,
  parameter int unsigned HOLD = 2,
  parameter int unsigned SYNC = 2,
  parameter int unsigned CW   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  phase_e            phase,
  input  logic [SEED_W-1:0] seed_prev,
  input  logic [31:0]       digest_in,
  input  logic [N-1:0]      e_in,
  input  logic              clk_ctrl_in,
  output logic [SEED_W-1:0] seed_new,
  output logic              seed_ok,
  output logic              ready,
  output logic [N-1:0]      p_dec,
  output logic              ver,
  output logic              clk_missing,
  output logic              data_missing,
  output logic [CW-1:0]     clk_ctrl_violation_monitor,
  output logic [CW-1:0]     counter_enc_msg_monitor,
  output logic [CW-1:0]     clk_ctrl_violation_output,
  output logic [CW-1:0]     enc_msg_violation_output
);

  logic start_q, seed_done, seed_done_d, load, run;
  logic [31:0]  digest;
  logic [N:0]   sync_q [SYNC];
  logic [N-1:0] e_s;
  logic         clk_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_q     <= 1'b1;
      seed_done_d <= 1'b0;
      for (int i = 0; i < SYNC; i++) sync_q[i] <= '0;
    end else begin
      start_q     <= 1'b0;
      seed_done_d <= seed_done;
      sync_q[0]   <= {clk_ctrl_in, e_in};
      for (int i = 1; i < SYNC; i++) sync_q[i] <= sync_q[i-1];
    end
  end

  assign {clk_s, e_s} = sync_q[SYNC-1];
  assign load    = seed_done && !seed_done_d;
  assign run     = ready && (phase == PH_EXEC);
  assign seed_ok = seed_done && (digest == digest_in);

  seed_prng u_seed (
    .clk, .rst_n, .start(start_q), .seed_prev,
    .done(seed_done), .seed(seed_new), .digest
  );

  dec_module #(.N(N)) u_dec (
    .clk, .rst_n, .load,
    .key(seed_new[KEY_W-1:0]), .iv(seed_new[SEED_W-1:KEY_W]),
    .clk_ctrl(clk_s), .e(e_s), .ready, .k(), .p_dec
  );

  ctrl_clk_ver #(.N(N), .HOLD(HOLD), .CW(CW)) u_ver (
    .clk, .rst_n, .run, .pause(phase == PH_PAUSE),
    .clk_ctrl(clk_s), .e(e_s),
    .ver, .clk_missing, .data_missing,
    .clk_ctrl_violation_monitor, .counter_enc_msg_monitor,
    .clk_ctrl_violation_output, .enc_msg_violation_output
  );

endmodule
