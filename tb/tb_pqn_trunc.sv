// tb_pqn_trunc: self-checking test of the truncation (PQN) poisoning stage.
// Instantiates it at the evaluated widths Q = 16, 9, 8, 7, 6, 5, 4 and checks each
// output word against floor(x / 2^(16-Q)) * 2^(16-Q), computed here with integer
// arithmetic, and that the injected error lies in (-2^(16-Q), 0].
module tb_pqn_trunc;
  import nn_pkg::*;
  localparam int unsigned N  = 10;
  localparam int unsigned NQ = 7;
  localparam int QS [NQ] = '{16, 9, 8, 7, 6, 5, 4};

  logic  clk = 1'b0;
  data_t din [N];
  data_t dout [NQ][N];
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    pqn_trunc #(.N(N), .W(16), .Q(QS[q])) dut (.din(din), .dout(dout[q]));
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) din[i] = data_t'($urandom);
      if (t == 0) begin
        din[0] = 16'sh7fff; din[1] = 16'sh8000; din[2] = -16'sd1; din[3] = 16'sd0;
      end
      @(posedge clk);
      for (int q = 0; q < NQ; q++) begin
        int step;
        step = 1 << (16 - QS[q]);
        for (int i = 0; i < N; i++) begin
          int x, fl, err;
          x  = int'(din[i]);
          fl = (x >= 0) ? (x / step) * step : -(((-x) + step - 1) / step) * step;
          err = int'(dout[q][i]) - x;
          checks++;
          if (int'(dout[q][i]) != fl || err > 0 || err <= -step) begin
            failures++;
            $display("FAIL Q=%0d in=%0d out=%0d exp=%0d", QS[q], x, dout[q][i], fl);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
