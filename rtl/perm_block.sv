// perm_block: key-controlled permutation (router) of N signal lines, the
// obfuscation element of the board-level scheme that EOP can be combined with.
//
// Output line i carries input line sel_i, where sel_i is the i-th SW-bit
// field of the permutation key (SW = ceil(log2 N)). Loaded with the correct
// key, the block connects every input to its designated output (functional
// mode); any other key routes the signals elsewhere (obfuscated mode). A key
// that repeats a field copies one input to several outputs and drops another,
// which is still a wrong routing. Purely combinational, no latency.
//
// The paper takes the permutation block from prior work and only states that
// a key sets the input-output relationship; the field-per-output encoding
// is this design's choice.
module perm_block #(
  parameter int unsigned N = 8
) (
  input  logic [N*$clog2(N)-1:0] pkey,
  input  logic [N-1:0]           in,
  output logic [N-1:0]           out
);

  localparam int unsigned SW = $clog2(N);

  always_comb begin
    for (int i = 0; i < N; i++)
      out[i] = in[pkey[i*SW +: SW]];
  end

endmodule
