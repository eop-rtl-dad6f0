// ctrl_clk_gen: control-clock generation from the plain data paths.
//
// A flipping event is any change of the N-bit plain data word p between two
// cycles of the sampling clock. For each flip the interval t1 - t0 since the
// previous reference instant is compared with THR; when it is larger, a
// control-clock pulse of one cycle (the smallest width available) is issued.
// A flip that comes THR cycles or less after the previous one is treated as
// a possible glitch and gets no pulse of its own; so that its value is still
// delivered, a pending flag then issues one pulse as soon as more than THR
// cycles have passed without a further flip. Both the THR comparison and the
// one-pulse-per-change goal follow the paper; the pending flag, counting
// time in sampling cycles and restarting the interval at every issued pulse
// (which keeps pulses more than THR cycles apart) are this design's choices.
//
// Interface and timing:
//   run      flips are acted on only while high (execution phase).
//   p        plain data, synchronous to clk.
//   clk_ctrl one-cycle pulse, registered: it is high in the cycle after the
//            flip (or after the pending interval) that caused it.
//   glitch   one-cycle strobe for each flip that was held back as a glitch.
// With THR >= 1 consecutive pulses always have a low cycle between them, so
// every pulse gives the receiver a rising edge.
module ctrl_clk_gen #(
  parameter int unsigned N   = 8,
  parameter int unsigned THR = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         run,
  input  logic [N-1:0] p,
  output logic         clk_ctrl,
  output logic         glitch
);

  localparam int unsigned CW = $clog2(THR + 2) + 1;
  localparam logic [CW-1:0] CMAX = CW'(THR + 1);

  logic [N-1:0]  p_prev;
  logic [CW-1:0] since;     // cycles since the last flip or issued pulse, saturating
  logic          pending;
  logic          flip, fire, held;

  assign flip = run && (p != p_prev);
  assign fire = run && ((flip && since > CW'(THR)) || (!flip && pending && since > CW'(THR)));
  assign held = flip && !(since > CW'(THR));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_prev   <= '0;
      since    <= CMAX;
      pending  <= 1'b0;
      clk_ctrl <= 1'b0;
      glitch   <= 1'b0;
    end else begin
      p_prev   <= p;
      clk_ctrl <= fire;
      glitch   <= held;
      if (flip || fire)
        since <= CW'(1);
      else if (since < CMAX)
        since <= since + 1'b1;
      if (fire)
        pending <= 1'b0;
      else if (held)
        pending <= 1'b1;
    end
  end

  // With THR >= 1 two pulses never touch, so each one is a separate edge.
  // alive is low from reset until the first clock edge after it; the check
  // is disabled through it so that rst_n drives only asynchronous resets.
  logic alive;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) alive <= 1'b0;
    else        alive <= 1'b1;
  end

  generate
    if (THR >= 1) begin : g_spacing
      a_pulse_gap: assert property (@(posedge clk) disable iff (!alive)
                                    clk_ctrl |=> !clk_ctrl)
        else $error("control-clock pulses in consecutive cycles");
    end
  endgenerate

endmodule
