// dec_module: decryption module of the receiving chip.
//
// The same N-bit Trivium generator as the sender and N XOR gates: the plain
// data is recovered as p'_n = e_n XOR k_n. The cipher advances one step on
// each rising edge of the received control clock, so with equal key and IV
// its keypad sequence tracks the sender's. The output is registered and
// formed continuously from the current ciphertext and keypad, so a data edge
// that arrives a cycle after the clock edge still decrypts correctly; this
// is this design's choice.
//
// Interface: clk_ctrl and e must be synchronised to clk. p_dec is valid two
// cycles after the clock edge whose ciphertext follows one cycle after it.
module dec_module
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
  input  logic [N-1:0]     e,
  output logic             ready,
  output logic [N-1:0]     k,
  output logic [N-1:0]     p_dec
);

  logic         clk_d;
  logic         step;

  assign step = ready && clk_ctrl && !clk_d;

  trivium_core #(.W(N)) u_trivium (
    .clk, .rst_n, .load, .key, .iv, .step,
    .ready, .ks_next(), .ks(k)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_d <= 1'b0;
      p_dec <= '0;
    end else begin
      clk_d <= clk_ctrl;
      p_dec <= e ^ k;
    end
  end

endmodule
