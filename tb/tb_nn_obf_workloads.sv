// tb_nn_obf_workloads: the two other perceptrons of the evaluation at full size,
//   FashionMNIST  784-100-100-10          (3 dense layers, 2 ReLU)
//   SVHN          3072-200-200-200-200-10 (5 dense layers, 4 ReLU)
// each built with 5-bit score truncation. Random weights are loaded, two random images
// are classified per network, and every prediction and the output latency are
// compared with the bit-exact reference model (nn_ref_pkg).
module tb_nn_obf_workloads;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int NC = 10, LANES = 16, ST_Q = 5, NIMG = 2;
  localparam int NNET = 2;
  localparam int NIN  [NNET] = '{784, 3072};
  localparam int NHID [NNET] = '{100, 200};
  localparam int NHL  [NNET] = '{2, 4};

  logic   clk = 1'b0, rst_n = 1'b0;
  wload_t wl;
  logic   in_valid;
  data_t  in_data;
  logic   in_ready [NNET];
  logic   out_valid [NNET];
  data_t  out_pred [NNET][NC];
  logic   sel;            // which network takes the stream and the load bus
  wload_t wl_n [NNET];
  logic   in_valid_n [NNET];
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar n = 0; n < NNET; n++) begin : g_net
    assign wl_n[n] = (sel == 1'(n)) ? wl : '0;
    assign in_valid_n[n] = (sel == 1'(n)) && in_valid;
    nn_obf_top #(.N_IN(NIN[n]), .N_HID(NHID[n]), .N_HID_LAYERS(NHL[n]), .N_CLASS(NC),
                 .LANES(LANES), .POISON(POISON_ST), .TRUNC_Q(ST_Q)) dut (
      .clk, .rst_n, .wl(wl_n[n]), .in_valid(in_valid_n[n]), .in_data,
      .in_ready(in_ready[n]), .out_valid(out_valid[n]), .out_pred(out_pred[n]));
  end

  task automatic load(input int layer, input bit bias, input int o, input int i, input int v);
    @(negedge clk);
    wl = '{en: 1'b1, layer: 4'(layer), bias: bias, neuron: 12'(o), input_idx: 12'(i), data: data_t'(v)};
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = '0;
    in_valid = 1'b0;
    in_data = '0;
    sel = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NNET; n++) begin
      int wts [][];
      int bia [][];
      int lat;
      sel = 1'(n);
      wts = new[NHL[n] + 1];
      bia = new[NHL[n] + 1];
      lat = 2 + 27 * NC;
      for (int k = 0; k <= NHL[n]; k++) begin
        int ni, no, wr;
        ni = (k == 0) ? NIN[n] : NHID[n];
        no = (k == NHL[n]) ? NC : NHID[n];
        wr = (k == 0) ? 40 : (k == NHL[n]) ? 2200 : 300;    // keeps activations in range
        lat += no * ((ni + LANES - 1) / LANES) + 2;
        wts[k] = new[ni * no];
        bia[k] = new[no];
        for (int o = 0; o < no; o++) begin
          for (int i = 0; i < ni; i++) begin
            wts[k][o*ni + i] = int'($urandom_range(0, 2 * wr)) - wr;
            load(k, 1'b0, o, i, wts[k][o*ni + i]);
          end
          bia[k][o] = int'($urandom_range(0, 512)) - 256;
          load(k, 1'b1, o, 0, bia[k][o]);
        end
      end
      @(negedge clk);
      wl = '0;

      for (int img = 0; img < NIMG; img++) begin
        int x[], h[], s[], p[];
        int cyc;
        x = new[NIN[n]];
        foreach (x[i]) x[i] = int'($urandom_range(0, 1023));
        for (int i = 0; i < NIN[n]; i++) begin
          in_valid = 1'b1;
          in_data  = data_t'(x[i]);
          while (!in_ready[n]) @(negedge clk);
          @(negedge clk);
        end
        in_valid = 1'b0;
        cyc = 1;
        while (!out_valid[n]) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != lat) begin failures++; $display("FAIL net=%0d img=%0d latency %0d != %0d", n, img, cyc, lat); end
        h = x;
        for (int k = 0; k < NHL[n]; k++) begin
          int t[];
          dense((k == 0) ? NIN[n] : NHID[n], NHID[n], wts[k], bia[k], h, t);
          relu(t);
          h = t;
        end
        dense(NHID[n], NC, wts[NHL[n]], bia[NHL[n]], h, s);
        trunc(ST_Q, s);
        softmax(s, p);
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (int'(out_pred[n][c]) != p[c]) begin
            failures++;
            $display("FAIL net=%0d img=%0d class=%0d got=%0d exp=%0d", n, img, c, out_pred[n][c], p[c]);
          end
        end
        $display("net %0d img %0d: latency %0d cycles, class %0d", n, img, cyc, argmax(p));
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
