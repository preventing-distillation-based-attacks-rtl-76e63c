// tb_softmax: self-checking test of the SoftMax unit.
// The reference is computed here from the definition: subtract the maximum score,
// quantise each difference to 1/16, take round(e^{-d} * 32768) (0 from d >= 16),
// then p_i = floor(e_i * 1024 / sum). Also checks that the probabilities add up to
// about 1.0 (1024), that the largest score gets the largest probability, and that
// done is high exactly 1 + N*27 cycles after the start cycle.
module tb_softmax;
  import nn_pkg::*;
  localparam int unsigned N   = 10;
  localparam int          LAT = 1 + N * (16 + 10 + 1);

  logic  clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic  busy, done;
  data_t scores [N], probs [N];
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  softmax #(.N(N)) dut (.clk, .rst_n, .start, .scores, .busy, .done, .probs);

  function automatic void ref_softmax(input data_t s [N], output int p [N]);
    int m, sum;
    int e [N];
    m = int'(s[0]);
    for (int i = 1; i < N; i++) if (int'(s[i]) > m) m = int'(s[i]);
    sum = 0;
    for (int i = 0; i < N; i++) begin
      int idx;
      idx = (m - int'(s[i])) / 64;
      e[i] = (idx < 256) ? int'($floor($exp(-real'(idx) / 16.0) * 32768.0 + 0.5)) : 0;
      sum += e[i];
    end
    for (int i = 0; i < N; i++) p[i] = int'((longint'(e[i]) * 1024) / sum);
  endfunction

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p [N];
    for (int i = 0; i < N; i++) scores[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 150; t++) begin
      int cyc, total, imax;
      for (int i = 0; i < N; i++)
        case (t % 3)
          0: scores[i] = data_t'($urandom_range(0, 8192) - 4096);   // +-4.0
          1: scores[i] = data_t'($urandom_range(0, 1024) - 512);    // +-0.5, flat
          default: scores[i] = data_t'($urandom);                  // full range
        endcase
      // start is high for one cycle (cycle 0); cyc counts cycles until done is seen high
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      ref_softmax(scores, p);
      checks++;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d != %0d", cyc, LAT); end
      total = 0; imax = 0;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(probs[i]) != p[i]) begin
          failures++;
          $display("FAIL t=%0d i=%0d s=%0d p=%0d exp=%0d", t, i, scores[i], probs[i], p[i]);
        end
        total += int'(probs[i]);
        if (scores[i] > scores[imax]) imax = i;
      end
      checks++;
      if (total > 1024 || total < 1024 - N) begin failures++; $display("FAIL sum %0d", total); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (probs[i] > probs[imax]) begin failures++; $display("FAIL order t=%0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
