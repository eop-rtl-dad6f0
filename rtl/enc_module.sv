// enc_module: encryption module of the sending chip.
//
// An N-bit Trivium keystream generator and an array of N XOR gates, as in
// the paper's block diagram: each encrypted path is e_n = p_n XOR k_n. The
// control clock drives the module: in a cycle where clk_ctrl is high the
// cipher advances one N-bit step and the register e loads the current plain
// word XORed with the new keypad. The ciphertext therefore changes one cycle
// after the control-clock edge, the "slightly after" relation the receiver's
// verifier expects. Keeping e in a register, so that it only moves on a
// control clock, is this design's reading of "fetches new encrypted data".
//
// Interface: load/key/iv start the cipher (see trivium_core); ready rises
// after warm-up; clk_ctrl is ignored before ready. k is the keypad in use.
module enc_module
  import eop_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [KEY_W-1:0] key,
  input  logic [IV_W-1:0]  iv,
  input  logic             clk_ctrl,
  input  logic [N-1:0]     p,
  output logic             ready,
  output logic [N-1:0]     k,
  output logic [N-1:0]     e
);

  logic [N-1:0] k_next;
  logic         step;

  assign step = ready && clk_ctrl;

  trivium_core #(.W(N)) u_trivium (
    .clk, .rst_n, .load, .key, .iv, .step,
    .ready, .ks_next(k_next), .ks(k)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      e <= '0;
    else if (step)
      e <= p ^ k_next;
  end

  // The ciphertext moves only as the answer to a control-clock pulse. alive
  // is low from reset until the first clock edge after it; the check is
  // disabled through it so that rst_n drives only asynchronous resets.
  logic alive;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) alive <= 1'b0;
    else        alive <= 1'b1;
  end

  a_e_only_on_pulse: assert property (@(posedge clk) disable iff (!alive)
                                      !step |=> $stable(e))
    else $error("ciphertext changed without a control-clock pulse");

endmodule
