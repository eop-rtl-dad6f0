// eop_top: a sender and a receiver joined by the board wires of the link,
// plus an obfuscation chip that relays the same link to a fourth chip.
//
// The board carries the N-bit ciphertext (enc_msg) and the control clock
// (clk_ctrl) from chip 1 to chip 2, plus the sender's seed digest. Two
// tamper inputs model an attacker grounding a wire, as in the paper's
// experiments: tamper_clk forces clk_ctrl low, tamper_e forces the whole
// ciphertext bus low. The wires as seen by the receiver are brought out as
// clk_ctrl_tampered and enc_msg_tampered. All chips share clk and rst_n
// here; each receiver synchronises what it samples all the same.
//
// The same board wires also reach an obfuscation chip 3 (eop_obf_chip, in
// the paper's full-encryption scenario (d)). Chip 3 decrypts and verifies
// the link like chip 2. It routes the plain word through its key-controlled
// permutation (pkey) and re-encrypts it with its own keypad towards a fourth
// chip, an eop_receiver. The link from chip 3 to chip 4 has its own stored
// seed (obf_seed_prev) and its own clock grounding switch (tamper_obf_clk).
// Chip 3 keeps the same stored seed as chip 2, since both receive the link
// from chip 1. obf_p_dec is the word chip 4 receives: the permuted p. So the
// top shows scenario (a), a direct link to chip 2, and scenario (d), the
// relay through chip 3, side by side from one sender.
//
// The processor that sets the phase and the rates, and the non-volatile
// storage of the seeds, are outside this design: phase, mode, rates and the
// previous seeds are inputs, the new seeds outputs. p and p_dec are the two
// words a host would compare.
module eop_top
  import eop_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned THR     = 1,
  parameter int unsigned HOLD    = 2,
  parameter int unsigned SYNC    = 2,
  parameter int unsigned SYS_MHZ = 400,
  parameter int unsigned CW      = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  phase_e            phase_sel,
  input  src_mode_e         mode,
  input  mhz_t              rate_u,
  input  mhz_t [N-1:0]      rate,
  input  logic [SEED_W-1:0] tx_seed_prev,
  input  logic [SEED_W-1:0] rx_seed_prev,
  input  logic              tamper_clk,
  input  logic              tamper_e,
  input  logic [N*$clog2(N)-1:0] pkey,
  input  logic [SEED_W-1:0] obf_seed_prev,
  input  logic              tamper_obf_clk,
  output logic [SEED_W-1:0] tx_seed_new,
  output logic [SEED_W-1:0] rx_seed_new,
  output logic              seed_ok,
  output logic              tx_ready,
  output logic              rx_ready,
  output logic [N-1:0]      p,
  output logic [N-1:0]      p_dec,
  output logic              clk_ctrl,
  output logic [N-1:0]      enc_msg,
  output logic              clk_ctrl_tampered,
  output logic [N-1:0]      enc_msg_tampered,
  output logic              glitch,
  output logic              ver,
  output logic              clk_missing,
  output logic              data_missing,
  output logic [CW-1:0]     clk_ctrl_violation_monitor,
  output logic [CW-1:0]     counter_enc_msg_monitor,
  output logic [CW-1:0]     clk_ctrl_violation_output,
  output logic [CW-1:0]     enc_msg_violation_output,
  output logic [N-1:0]      obf_q,
  output logic [N-1:0]      obf_p_dec,
  output logic              obf_seed_ok,
  output logic              obf_ready,
  output logic [CW-1:0]     obf_in_clk_violation,
  output logic [CW-1:0]     obf_in_data_violation,
  output logic [CW-1:0]     obf_out_clk_violation,
  output logic [CW-1:0]     obf_out_data_violation
);

  logic [31:0] tx_digest;

  eop_sender #(.N(N), .THR(THR), .SYS_MHZ(SYS_MHZ)) u_tx (
    .clk, .rst_n, .phase(phase_sel), .mode, .rate_u, .rate,
    .seed_prev(tx_seed_prev), .seed_new(tx_seed_new), .seed_digest(tx_digest),
    .ready(tx_ready), .p, .e(enc_msg), .clk_ctrl, .glitch
  );

  // Board wires with the attacker's grounding switches.
  assign clk_ctrl_tampered = clk_ctrl & ~tamper_clk;
  assign enc_msg_tampered  = enc_msg & {N{~tamper_e}};

  eop_receiver #(.N(N), .HOLD(HOLD), .SYNC(SYNC), .CW(CW)) u_rx (
    .clk, .rst_n, .phase(phase_sel),
    .seed_prev(rx_seed_prev), .digest_in(tx_digest),
    .e_in(enc_msg_tampered), .clk_ctrl_in(clk_ctrl_tampered),
    .seed_new(rx_seed_new), .seed_ok, .ready(rx_ready), .p_dec,
    .ver, .clk_missing, .data_missing,
    .clk_ctrl_violation_monitor, .counter_enc_msg_monitor,
    .clk_ctrl_violation_output, .enc_msg_violation_output
  );

  // Scenario (d): relay through the obfuscation chip to a fourth chip.
  logic [N-1:0]  obf_e;
  logic [31:0]   obf_digest;
  logic          obf_clk, obf_in_ok, obf_out_ready, obf_rx_ready;

  eop_obf_chip #(.N(N), .THR(THR), .HOLD(HOLD), .SYNC(SYNC), .CW(CW), .ENC_OUT(1'b1)) u_obf (
    .clk, .rst_n, .phase(phase_sel), .pkey,
    .in_seed_prev(rx_seed_prev), .in_digest(tx_digest),
    .in_e(enc_msg_tampered), .in_clk_ctrl(clk_ctrl_tampered),
    .in_seed_new(), .in_seed_ok(obf_in_ok), .in_ready(),
    .ver(), .clk_missing(), .data_missing(),
    .clk_ctrl_violation_monitor(obf_in_clk_violation),
    .counter_enc_msg_monitor(obf_in_data_violation),
    .clk_ctrl_violation_output(), .enc_msg_violation_output(),
    .q(obf_q),
    .out_seed_prev(obf_seed_prev), .out_seed_new(), .out_digest(obf_digest),
    .out_ready(obf_out_ready), .out_e(obf_e), .out_clk_ctrl(obf_clk), .out_glitch()
  );

  eop_receiver #(.N(N), .HOLD(HOLD), .SYNC(SYNC), .CW(CW)) u_rx4 (
    .clk, .rst_n, .phase(phase_sel),
    .seed_prev(obf_seed_prev), .digest_in(obf_digest),
    .e_in(obf_e), .clk_ctrl_in(obf_clk & ~tamper_obf_clk),
    .seed_new(), .seed_ok(obf_seed_ok), .ready(obf_rx_ready), .p_dec(obf_p_dec),
    .ver(), .clk_missing(), .data_missing(),
    .clk_ctrl_violation_monitor(obf_out_clk_violation),
    .counter_enc_msg_monitor(obf_out_data_violation),
    .clk_ctrl_violation_output(), .enc_msg_violation_output()
  );

  assign obf_ready = obf_out_ready && obf_rx_ready && obf_in_ok;

endmodule
