// tb_relu: self-checking test of the element-wise rectifier.
// Drives random full-range vectors, vectors of small values around zero (-4..4), 0, 1, -1, 32767, -32768 and compares
// every element with max(x, 0) computed here.
module tb_relu;
  import nn_pkg::*;
  localparam int unsigned N = 12;

  logic  clk = 1'b0;
  data_t din [N], dout [N];
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  relu #(.N(N)) dut (.din, .dout);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++)
        din[i] = (t % 2) ? data_t'(int'($urandom_range(0, 8)) - 4) : data_t'($urandom);
      if (t == 0) begin
        din[0] = 16'sd0; din[1] = 16'sd1; din[2] = -16'sd1;
        din[3] = 16'sh7fff; din[4] = 16'sh8000;
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        data_t exp_v;
        exp_v = (din[i] > 0) ? din[i] : 16'sd0;
        checks++;
        if (dout[i] !== exp_v) begin
          failures++;
          $display("FAIL relu t=%0d i=%0d in=%0d out=%0d exp=%0d", t, i, din[i], dout[i], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
