// tb_topk_filter: self-checking test of the Top1 / Top3 filters.
// For random prediction vectors (including vectors with ties) the expected output is
// built here by selection: repeatedly pick the largest remaining word, the lowest index
// winning a tie, K times; those words pass, all others must read zero.
module tb_topk_filter;
  import nn_pkg::*;
  localparam int unsigned N = 10;

  logic  clk = 1'b0;
  data_t din [N], d1 [N], d3 [N];
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  topk_filter #(.N(N), .K(1)) dut1 (.din(din), .dout(d1));
  topk_filter #(.N(N), .K(3)) dut3 (.din(din), .dout(d3));

  function automatic void expect_topk(input data_t x [N], input int k, output data_t y [N]);
    bit taken [N];
    for (int i = 0; i < N; i++) begin taken[i] = 0; y[i] = '0; end
    for (int r = 0; r < k; r++) begin
      int best = -1;
      for (int i = 0; i < N; i++)
        if (!taken[i] && (best < 0 || x[i] > x[best])) best = i;
      taken[best] = 1;
      y[best] = x[best];
    end
  endfunction

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t e1 [N], e3 [N];
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N; i++)
        din[i] = (t % 2) ? data_t'($urandom_range(0, 1024)) : data_t'($urandom_range(0, 6) * 100);
      @(posedge clk);
      expect_topk(din, 1, e1);
      expect_topk(din, 3, e3);
      for (int i = 0; i < N; i++) begin
        checks += 2;
        if (d1[i] !== e1[i]) begin failures++; $display("FAIL top1 t=%0d i=%0d", t, i); end
        if (d3[i] !== e3[i]) begin failures++; $display("FAIL top3 t=%0d i=%0d", t, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
