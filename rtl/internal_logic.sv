// internal_logic: plain-data source of the sending chip.
//
// Mimics the traffic a real chip would put on the protected paths: N
// independent LFSRs, one per data path, with path n driven by bit 0 of
// LFSR n. Each LFSR steps at a configured rate given in MHz. In uniform
// mode all LFSRs step together at rate_u; in random mode LFSR n steps at
// rate[n]. Rates are produced from the sampling clock (SYS_MHZ) by a
// phase accumulator per path: add the rate each cycle and step whenever
// the sum reaches SYS_MHZ, so a rate r gives on average r/SYS_MHZ steps per
// cycle. The two modes and the 5..200 MHz range follow the paper; the LFSR
// polynomial (x^16+x^14+x^13+x^11+1), the seeds and the accumulator are this
// design's choices.
//
// Interface: run (execution phase) enables stepping, otherwise everything
// holds. Rates must not exceed SYS_MHZ. step_o shows which LFSRs stepped.
module internal_logic
  import eop_pkg::*;
#(
  parameter int unsigned N       = 8,
  parameter int unsigned SYS_MHZ = 400
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  src_mode_e         mode,
  input  mhz_t              rate_u,
  input  mhz_t [N-1:0]      rate,
  output logic [N-1:0]      p,
  output logic [N-1:0]      step_o
);

  localparam int unsigned LFSR_W = 16;
  localparam int unsigned AW = $clog2(SYS_MHZ) + 1;

  logic [LFSR_W-1:0] lfsr [N];
  logic [AW-1:0]     acc  [N];
  logic [N-1:0]      tick;
  logic [AW-1:0]     acc_nxt [N];

  function automatic logic [LFSR_W-1:0] seed_of(int unsigned n);
    return LFSR_W'(16'hACE1) ^ LFSR_W'(n << 4);
  endfunction

  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic [AW-1:0] r;
      r = (mode == MODE_UNIFORM) ? AW'(rate_u) : AW'(rate[n]);
      tick[n] = (acc[n] + r) >= AW'(SYS_MHZ);
      acc_nxt[n] = tick[n] ? acc[n] + r - AW'(SYS_MHZ) : acc[n] + r;
    end
    for (int n = 0; n < N; n++)
      step_o[n] = run && ((mode == MODE_UNIFORM) ? tick[0] : tick[n]);
    for (int n = 0; n < N; n++)
      p[n] = lfsr[n][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) begin
        lfsr[n] <= seed_of(n);
        acc[n]  <= '0;
      end
    end else if (run) begin
      for (int n = 0; n < N; n++) begin
        acc[n] <= acc_nxt[n];
        if (step_o[n])
          lfsr[n] <= {lfsr[n][LFSR_W-2:0],
                      lfsr[n][15] ^ lfsr[n][13] ^ lfsr[n][12] ^ lfsr[n][10]};
      end
    end
  end

endmodule
