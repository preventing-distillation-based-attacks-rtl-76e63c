// tb_nn_obf_full: the classifier at its default size, the MNIST perceptron
// 784-100-10 with 5-bit score truncation, left with all parameters at their defaults.
// Loads all 79,510 weights and biases, classifies five random images and compares
// every prediction with the bit-exact reference model (nn_ref_pkg), checks the output
// latency of 5,246 cycles after the last input word, and checks that the truncated
// network keeps the top class of the untruncated reference where that class wins by
// more than one truncation step.
module tb_nn_obf_full;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int N_IN = 784, N_HID = 100, NC = 10, ST_Q = 5, NIMG = 5;
  localparam int LAT  = 2 + 27 * NC + (N_HID * 49 + 2) + (NC * 7 + 2);

  logic   clk = 1'b0, rst_n = 1'b0;
  wload_t wl;
  logic   in_valid, in_ready, out_valid;
  data_t  in_data;
  data_t  out_pred [NC];
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  nn_obf_top dut (.clk, .rst_n, .wl, .in_valid, .in_data, .in_ready, .out_valid, .out_pred);

  int w0[], b0[], w1[], b1[];
  int n_margin = 0;   // images whose top class wins by more than one truncation step

  task automatic load(input int layer, input bit bias, input int o, input int i, input int v);
    @(negedge clk);
    wl = '{en: 1'b1, layer: 4'(layer), bias: bias, neuron: 12'(o), input_idx: 12'(i), data: data_t'(v)};
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = '0;
    in_valid = 1'b0;
    in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    w0 = new[N_IN * N_HID]; b0 = new[N_HID];
    w1 = new[N_HID * NC];   b1 = new[NC];
    for (int o = 0; o < N_HID; o++) begin
      for (int i = 0; i < N_IN; i++) begin
        w0[o*N_IN + i] = int'($urandom_range(0, 160)) - 80;    // +-0.08
        load(0, 1'b0, o, i, w0[o*N_IN + i]);
      end
      b0[o] = int'($urandom_range(0, 512)) - 256;
      load(0, 1'b1, o, 0, b0[o]);
    end
    for (int o = 0; o < NC; o++) begin
      for (int i = 0; i < N_HID; i++) begin
        w1[o*N_HID + i] = int'($urandom_range(0, 4400)) - 2200; // +-2.1
        load(1, 1'b0, o, i, w1[o*N_HID + i]);
      end
      b1[o] = int'($urandom_range(0, 512)) - 256;
      load(1, 1'b1, o, 0, b1[o]);
    end
    @(negedge clk);
    wl = '0;

    for (int img = 0; img < NIMG; img++) begin
      int x[], h[], s[], sd[], p[], p_plain[];
      int cyc;
      x = new[N_IN];
      foreach (x[i]) x[i] = int'($urandom_range(0, 1023));
      for (int i = 0; i < N_IN; i++) begin
        in_valid = 1'b1;
        in_data  = data_t'(x[i]);
        while (!in_ready) @(negedge clk);
        @(negedge clk);
      end
      in_valid = 1'b0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT) begin failures++; $display("FAIL img=%0d latency %0d != %0d", img, cyc, LAT); end

      dense(N_IN, N_HID, w0, b0, x, h);
      relu(h);
      dense(N_HID, NC, w1, b1, h, s);
      sd = s;
      trunc(ST_Q, sd);
      softmax(sd, p);
      softmax(s, p_plain);
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (int'(out_pred[c]) != p[c]) begin
          failures++;
          $display("FAIL img=%0d class=%0d got=%0d exp=%0d", img, c, out_pred[c], p[c]);
        end
      end
      begin
        int got[], second, top;
        got = new[NC];
        foreach (got[c]) got[c] = int'(out_pred[c]);
        top = argmax(s);
        second = -32768;
        foreach (s[c]) if (c != top && s[c] > second) second = s[c];
        if (s[top] - second > (1 << (16 - ST_Q))) begin
          n_margin++;
          checks++;
          if (argmax(got) != top) begin failures++; $display("FAIL img=%0d top class lost", img); end
        end
        $display("img %0d: class %0d, score margin %0d LSB, p_top %0d/1024 (untruncated %0d/1024)",
                 img, argmax(got), s[top] - second, got[argmax(got)], p_plain[top]);
      end
      @(negedge clk);
    end
    checks++;
    if (n_margin == 0) begin failures++; $display("FAIL no image with a clear top class"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
