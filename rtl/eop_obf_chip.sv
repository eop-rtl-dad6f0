// eop_obf_chip: the obfuscation chip (chip 3) placed between chip 1 and
// chip 2, in EOP application scenarios (c) and (d).
//
// The incoming link from chip 1 is received exactly as by eop_receiver:
// synchronisers, Trivium decryption stepped by the incoming control clock,
// control-clock verification with violation counters, and the seed-digest
// check. The decrypted word is routed through the key-controlled
// perm_block. What leaves towards chip 2 depends on ENC_OUT:
//   ENC_OUT = 1, scenario (d), full encryption: the permuted word is
//     re-encrypted with a second, independent keypad. A second seed PRNG,
//     control clock generator and encryption module form a complete EOP
//     sender for the outgoing link, so chip 2 is an ordinary eop_receiver.
//   ENC_OUT = 0, scenario (c), partial encryption: the permuted plain word
//     is driven out directly and out_clk_ctrl stays low.
//
// Timing: a word decrypted in cycle n (n + 4 after the pulse of chip 1) is
// permuted combinationally; with ENC_OUT = 1 the outgoing pulse follows in
// cycle n + 1 and the new ciphertext in cycle n + 2. The outgoing generator
// runs whenever its cipher is ready, not only in the execution phase, so a
// word that arrives as chip 1 enters pause is still forwarded.
//
// From the paper: the chip's contents (permutation, decryption and
// verification; plus re-encryption with different keypads in scenario (d)).
// This design's choices: reuse of the sender and receiver blocks, the
// second seed as a separate input, and forwarding outside the execution phase.
module eop_obf_chip
  import eop_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned THR     = 1,
  parameter int unsigned HOLD    = 2,
  parameter int unsigned SYNC    = 2,
  parameter int unsigned CW      = 16,
  parameter bit          ENC_OUT = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  phase_e                phase,
  input  logic [N*$clog2(N)-1:0] pkey,
  // link from chip 1
  input  logic [SEED_W-1:0]     in_seed_prev,
  input  logic [31:0]           in_digest,
  input  logic [N-1:0]          in_e,
  input  logic                  in_clk_ctrl,
  output logic [SEED_W-1:0]     in_seed_new,
  output logic                  in_seed_ok,
  output logic                  in_ready,
  output logic                  ver,
  output logic                  clk_missing,
  output logic                  data_missing,
  output logic [CW-1:0]         clk_ctrl_violation_monitor,
  output logic [CW-1:0]         counter_enc_msg_monitor,
  output logic [CW-1:0]         clk_ctrl_violation_output,
  output logic [CW-1:0]         enc_msg_violation_output,
  // permuted plain word (internal to the chip, brought out for observation)
  output logic [N-1:0]          q,
  // link to chip 2
  input  logic [SEED_W-1:0]     out_seed_prev,
  output logic [SEED_W-1:0]     out_seed_new,
  output logic [31:0]           out_digest,
  output logic                  out_ready,
  output logic [N-1:0]          out_e,
  output logic                  out_clk_ctrl,
  output logic                  out_glitch
);

  logic [N-1:0] p_dec;

  eop_receiver #(.N(N), .HOLD(HOLD), .SYNC(SYNC), .CW(CW)) u_rx (
    .clk, .rst_n, .phase,
    .seed_prev(in_seed_prev), .digest_in(in_digest),
    .e_in(in_e), .clk_ctrl_in(in_clk_ctrl),
    .seed_new(in_seed_new), .seed_ok(in_seed_ok), .ready(in_ready),
    .p_dec, .ver, .clk_missing, .data_missing,
    .clk_ctrl_violation_monitor, .counter_enc_msg_monitor,
    .clk_ctrl_violation_output, .enc_msg_violation_output
  );

  perm_block #(.N(N)) u_perm (.pkey, .in(p_dec), .out(q));

  generate
    if (ENC_OUT) begin : g_full
      logic start_q, seed_done, seed_done_d, load;

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

      seed_prng u_seed (
        .clk, .rst_n, .start(start_q), .seed_prev(out_seed_prev),
        .done(seed_done), .seed(out_seed_new), .digest(out_digest)
      );

      ctrl_clk_gen #(.N(N), .THR(THR)) u_gen (
        .clk, .rst_n, .run(out_ready), .p(q),
        .clk_ctrl(out_clk_ctrl), .glitch(out_glitch)
      );

      enc_module #(.N(N)) u_enc (
        .clk, .rst_n, .load,
        .key(out_seed_new[KEY_W-1:0]), .iv(out_seed_new[SEED_W-1:KEY_W]),
        .clk_ctrl(out_clk_ctrl), .p(q), .ready(out_ready), .k(), .e(out_e)
      );
    end else begin : g_partial
      assign out_seed_new = '0;
      assign out_digest   = '0;
      assign out_ready    = in_ready;
      assign out_e        = q;
      assign out_clk_ctrl = 1'b0;
      assign out_glitch   = 1'b0;
    end
  endgenerate

endmodule
