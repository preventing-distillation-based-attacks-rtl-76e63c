// pqn_trunc: poisoning by truncation, the pseudo-quantisation-noise defence.
//
// Each W-bit word keeps its Q most significant bits; the W-Q least significant bits
// are cleared. This is truncation towards minus infinity onto a coarser grid, so the
// injected error lies in (-2^(W-Q), 0] LSBs and behaves like additive quantisation
// noise while the order of the words (and hence the top class) is kept up to ties.
// The word keeps its width and binary point, so the stage plugs in without changing
// the surrounding datapath.
//
// In gates the stage is only wiring: kept bits pass straight through and cleared bits
// are constant zero, which is why the defence costs no logic and no cycle.
//
// Placed in front of SoftMax it is score truncation (ST); placed behind it, prediction
// truncation (PT). The same module serves both. Q = W passes the data unchanged.
// Keeping the upper bits (rather than dropping integer bits) is this design's reading
// of "truncation" to Q bits; the Q values themselves (ST 9/6/5, PT 9/8/7) follow the
// published evaluation. Combinational: zero clock cycles of latency.
module pqn_trunc
  import nn_pkg::*;
#(
  parameter int unsigned N = 10,
  parameter int unsigned W = DATA_W,
  parameter int unsigned Q = 5
) (
  input  logic signed [W-1:0] din  [N],
  output logic signed [W-1:0] dout [N]
);
  localparam logic [W-1:0] KEEP_MASK = (Q >= W) ? '1 : ~((W'(1) << (W - Q)) - W'(1));

  initial assert (Q >= 1 && Q <= W) else $error("pqn_trunc: Q must be in 1..W");

  always_comb begin
    for (int i = 0; i < N; i++)
      dout[i] = din[i] & KEEP_MASK;
  end
endmodule
