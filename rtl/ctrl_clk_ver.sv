// ctrl_clk_ver: control-clock verification at the receiver.
//
// The module watches the received control clock and the received encrypted
// data bus and checks that they move together, as the paper's verification
// procedure prescribes:
//   * clock branch: every rising edge of clk_ctrl opens a window of HOLD
//     cycles in which a data flip must arrive (the sender updates the
//     ciphertext slightly after its clock edge). Each data flip closes the
//     oldest open window, so one flip cannot excuse two clock edges. A
//     window that closes empty means the data path was held or a clock
//     pulse was forged: a "data missing" violation.
//   * data branch: a data flip is safe only if a clock edge lies between the
//     previous data flip and this one, both ends included (the paper's
//     t0_data <= t_clk <= t1_data). Otherwise the clock was removed or the
//     data forged: a "clock missing" violation.
// Time is counted in cycles of the local sampling clock; the inputs must
// already be synchronised to it. The window length HOLD, the one-window-
// per-flip matching and the counter width are this design's choices.
//
// Counters (names from the paper's simulation trace):
//   clk_ctrl_violation_monitor  live count of clock-missing violations
//   counter_enc_msg_monitor     live count of data-missing violations
//   *_violation_output          copies of the monitors, updated while the
//                               phase is pause, as reported to the host
// The counters saturate. ver is the latest verdict, 1 = tampered.
// Checks run only while run is high (execution phase); edge and flip
// detectors keep tracking at all times so that entering execution does not
// create a false event. A clock edge whose new ciphertext happens to equal
// the old one (chance 2^-N per edge) shows no flip and is counted as data
// missing; the paper does not discuss this case.
module ctrl_clk_ver #(
  parameter int unsigned N    = 8,
  parameter int unsigned HOLD = 2,
  parameter int unsigned CW   = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          pause,
  input  logic          clk_ctrl,
  input  logic [N-1:0]  e,
  output logic          ver,
  output logic          clk_missing,
  output logic          data_missing,
  output logic [CW-1:0] clk_ctrl_violation_monitor,
  output logic [CW-1:0] counter_enc_msg_monitor,
  output logic [CW-1:0] clk_ctrl_violation_output,
  output logic [CW-1:0] enc_msg_violation_output
);

  logic          clk_d;
  logic [N-1:0]  e_d;
  logic [HOLD-1:0] pend;      // pend[k]: unmatched clock edge of age k+1
  logic          seen;        // clock edge seen since the previous data flip
  logic          clk_evt, flip;
  logic [HOLD:0] win, win_m;  // win[k]: unmatched clock edge of age k, this cycle

  assign clk_evt = run && clk_ctrl && !clk_d;
  assign flip    = run && (e != e_d);

  always_comb begin
    win   = {pend, clk_evt};
    win_m = win;
    if (flip) begin
      // close the oldest open window
      for (int k = 0; k <= HOLD; k++)
        if (win[k] && (win >> (k + 1)) == '0)
          win_m[k] = 1'b0;
    end
    data_missing = win_m[HOLD];
    clk_missing  = flip && !(seen || clk_evt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clk_d <= 1'b0;
      e_d   <= '0;
      pend  <= '0;
      seen  <= 1'b0;
      ver   <= 1'b0;
      clk_ctrl_violation_monitor <= '0;
      counter_enc_msg_monitor    <= '0;
      clk_ctrl_violation_output  <= '0;
      enc_msg_violation_output   <= '0;
    end else begin
      clk_d <= clk_ctrl;
      e_d   <= e;
      pend  <= run ? win_m[HOLD-1:0] : '0;
      if (clk_evt)
        seen <= 1'b1;
      else if (flip)
        seen <= 1'b0;
      if (clk_missing || data_missing)
        ver <= 1'b1;
      else if (flip)
        ver <= 1'b0;
      if (clk_missing && clk_ctrl_violation_monitor != '1)
        clk_ctrl_violation_monitor <= clk_ctrl_violation_monitor + 1'b1;
      if (data_missing && counter_enc_msg_monitor != '1)
        counter_enc_msg_monitor <= counter_enc_msg_monitor + 1'b1;
      if (pause) begin
        clk_ctrl_violation_output <= clk_ctrl_violation_monitor;
        enc_msg_violation_output  <= counter_enc_msg_monitor;
      end
    end
  end

endmodule
