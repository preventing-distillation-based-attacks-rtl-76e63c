// topk_filter: the "ArgMax" truncation defences Top1 and Top3.
//
// Passes the K largest of N predictions unchanged and sets all other predictions to
// zero, so the oracle only reveals the top-K part of the distribution. A word's rank
// is the number of words that beat it; word j beats word i when it is larger, or equal
// and at a lower index, so exactly K words are kept even with ties (the tie rule is
// this design's choice). Purely combinational: zero clock cycles of latency, matching
// the zero-cycle overhead reported for the defences.
module topk_filter
  import nn_pkg::*;
#(
  parameter int unsigned N = 10,
  parameter int unsigned K = 1
) (
  input  data_t din  [N],
  output data_t dout [N]
);
  initial assert (K >= 1 && K <= N) else $error("topk_filter: K must be in 1..N");

  always_comb begin
    for (int i = 0; i < N; i++) begin
      int unsigned rank;
      rank = 0;
      for (int j = 0; j < N; j++) begin
        if (j != i && ((din[j] > din[i]) || (din[j] == din[i] && j < i)))
          rank++;
      end
      dout[i] = (rank < K) ? din[i] : '0;
    end
  end
endmodule
