// tb_dense_layer: self-checking test of one fully-connected layer.
// Uses a small layer (37 inputs, 5 neurons, 4 lanes, so the last chunk is padded) with
// LAYER_ID 2. Loads random weights and biases through the load port, also sends writes
// addressed to another layer (which must be ignored), then runs several input vectors.
// Each output is compared with sat16(floor((bias*2^10 + sum w*a) / 2^10)) computed here
// with 64-bit integers, and done must be high N_OUT*ceil(N_IN/LANES)+2 cycles after the start cycle.
// Some runs use large weights so that saturation occurs in both directions.
module tb_dense_layer;
  import nn_pkg::*;
  localparam int unsigned N_IN = 37, N_OUT = 5, LANES = 4, LID = 2;
  localparam int unsigned LAT  = N_OUT * ((N_IN + LANES - 1) / LANES) + 2;

  logic   clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  wload_t wl;
  logic   busy, done;
  data_t  in_vec [N_IN], out_vec [N_OUT];
  int     checks = 0, failures = 0;
  int     sat_hi = 0, sat_lo = 0;

  data_t  w [N_OUT][N_IN];
  data_t  b [N_OUT];

  always #5 clk = ~clk;

  dense_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .LANES(LANES), .LAYER_ID(LID)) dut (
    .clk, .rst_n, .wl, .start, .in_vec, .busy, .done, .out_vec);

  task automatic write_word(input int layer, input bit bias, input int o, input int i, input data_t d);
    // driven at the falling edge, so each word is held across exactly one rising edge
    @(negedge clk);
    wl = '{en: 1'b1, layer: 4'(layer), bias: bias, neuron: 12'(o), input_idx: 12'(i), data: d};
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = '0;
    for (int i = 0; i < N_IN; i++) in_vec[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 12; run++) begin
      int cyc;
      int range_w;
      range_w = (run % 4 == 3) ? 32767 : 600;
      // new weights every other run
      if (run % 2 == 0) begin
        for (int o = 0; o < N_OUT; o++) begin
          for (int i = 0; i < N_IN; i++) begin
            w[o][i] = data_t'(int'($urandom_range(0, 2 * range_w)) - range_w);
            write_word(LID, 1'b0, o, i, w[o][i]);
            // a write for another layer at the same address must not land here
            write_word(LID + 1, 1'b0, o, i, data_t'($urandom));
          end
          b[o] = data_t'(int'($urandom_range(0, 4000)) - 2000);
          write_word(LID, 1'b1, o, 0, b[o]);
          write_word(0, 1'b1, o, 0, data_t'($urandom));
        end
      end
      @(negedge clk);
      wl = '0;
      for (int i = 0; i < N_IN; i++) in_vec[i] = data_t'(int'($urandom_range(0, 4096)) - 2048);
      if (run % 4 == 3) for (int i = 0; i < N_IN; i++) in_vec[i] = data_t'(int'($urandom_range(0, 40000)) - 20000);
      // start is high for one cycle (cycle 0); cyc counts cycles until done is seen high
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d != %0d", cyc, LAT); end
      for (int o = 0; o < N_OUT; o++) begin
        longint acc, q;
        int     e;
        acc = longint'(b[o]) * 1024;
        for (int i = 0; i < N_IN; i++) acc += longint'(w[o][i]) * longint'(in_vec[i]);
        q = acc >>> 10;
        if (q > 32767) begin e = 32767; sat_hi++; end
        else if (q < -32768) begin e = -32768; sat_lo++; end
        else e = int'(q);
        checks++;
        if (int'(out_vec[o]) != e) begin
          failures++;
          $display("FAIL run=%0d o=%0d out=%0d exp=%0d", run, o, out_vec[o], e);
        end
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin
      failures++; $display("FAIL saturation not exercised (%0d, %0d)", sat_hi, sat_lo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
