// trivium_core: W-bit parallel Trivium keystream generator.
//
// Trivium keeps a 288-bit state s1..s288 in three shift registers of 93, 84
// and 111 bits. Each round computes
//   t1 = s66 + s93,  t2 = s162 + s177,  t3 = s243 + s288,  z = t1 + t2 + t3
//   t1 += s91*s92 + s171,  t2 += s175*s176 + s264,  t3 += s286*s287 + s69
// and shifts t3, t1, t2 into the heads of the three registers (+ is XOR,
// * is AND). This core unrolls W rounds per clock cycle, so one step yields a
// W-bit keypad with the same 288 flip-flops; ks[i] is the z of the i-th
// round of the step. The round equations are those of the Trivium
// specification; the paper's own listing of them carries copy errors.
//
// Interface and timing:
//   load  (one cycle)  copies key into s1..s80, iv into s94..s173, sets
//                      s286..s288 and starts the warm-up. key[0] is K1 and
//                      iv[0] is IV1.
//   warm-up            INIT_ROUNDS rounds (4 x 288 per the specification),
//                      W per cycle, outputs discarded; ready rises after it.
//   step  (when ready) advances W rounds; ks holds the new keypad from the
//                      next cycle. ks_next is the keypad that step would
//                      register, for callers that capture it on the same edge.
// Loading and warm-up on the system clock, independent of the stepping
// source, is this design's choice.
module trivium_core
  import eop_pkg::*;
#(
  parameter int unsigned W           = 8,
  parameter int unsigned INIT_ROUNDS = 1152
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [KEY_W-1:0] key,
  input  logic [IV_W-1:0]  iv,
  input  logic            step,
  output logic            ready,
  output logic [W-1:0]    ks_next,
  output logic [W-1:0]    ks
);

  localparam int unsigned WARM_CYC = (INIT_ROUNDS + W - 1) / W;
  localparam int unsigned CW = $clog2(WARM_CYC + 1);

  // st[i-1] holds s_i of the specification.
  logic [STATE_W-1:0] st, st_nxt;
  logic [CW-1:0]      warm_cnt;
  logic               warming;

  // W unrolled rounds.
  always_comb begin
    logic [STATE_W-1:0] s;
    logic t1, t2, t3;
    s = st;
    ks_next = '0;
    for (int i = 0; i < W; i++) begin
      t1 = s[65]  ^ s[92];
      t2 = s[161] ^ s[176];
      t3 = s[242] ^ s[287];
      ks_next[i] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[90]  & s[91])  ^ s[170];
      t2 = t2 ^ (s[174] & s[175]) ^ s[263];
      t3 = t3 ^ (s[285] & s[286]) ^ s[68];
      s = {s[286:177], t2, s[175:93], t1, s[91:0], t3};
    end
    st_nxt = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= '0;
      warm_cnt <= '0;
      warming  <= 1'b0;
      ready    <= 1'b0;
      ks       <= '0;
    end else if (load) begin
      st       <= {3'b111, 112'd0, iv, 13'd0, key};
      warm_cnt <= CW'(WARM_CYC);
      warming  <= 1'b1;
      ready    <= 1'b0;
      ks       <= '0;
    end else if (warming) begin
      st       <= st_nxt;
      warm_cnt <= warm_cnt - 1'b1;
      if (warm_cnt == CW'(1)) begin
        warming <= 1'b0;
        ready   <= 1'b1;
      end
    end else if (ready && step) begin
      st <= st_nxt;
      ks <= ks_next;
    end
  end

  // The keypad register only moves on a step after warm-up. alive is low
  // from reset until the first clock edge after it; the check is disabled
  // through it so that rst_n drives only asynchronous resets.
  logic alive;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) alive <= 1'b0;
    else        alive <= 1'b1;
  end

  a_ks_on_step: assert property (@(posedge clk) disable iff (!alive)
                                 !(ready && step) && !load |=> $stable(ks))
    else $error("keypad changed without a step");

endmodule
