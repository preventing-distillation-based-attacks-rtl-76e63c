// tb_nn_obf_top: end-to-end test of the poisoned MLP classifier.
//
// Builds nine copies of the top at a reduced size (50 inputs, two hidden layers of 12,
// 10 classes, 4 lanes), one per evaluated defence setting: none, ST at 5, 6 and 9 bits,
// PT at 7, 8 and 9 bits, Top1 and Top3.
// All share one weight-load bus and one input stream. Random weights are loaded, then
// several images are streamed in. For each image and each copy the predictions are
// compared with the bit-exact reference model (nn_ref_pkg), and the output must arrive
// after the cycle count derived from the layer sizes, the same for every copy (the
// defences add no cycles). The testbench keeps offering data while an image is being
// processed, so input back-pressure happens.
//
// Mechanisms counted (each must occur at least once): ReLU clipping a negative hidden
// value, input stall, ST changing a score, PT changing a prediction, PT zeroing a
// non-zero prediction, Top1 and Top3 suppressing predictions, and the top class kept
// by every defence.
module tb_nn_obf_top;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int N_IN = 50, N_HID = 12, NHL = 2, NC = 10, LANES = 4;
  localparam int NDUT = 9;
  localparam int NIMG = 6;

  logic   clk = 1'b0, rst_n = 1'b0;
  wload_t wl;
  logic   in_valid;
  data_t  in_data;
  logic   in_ready [NDUT];
  logic   out_valid [NDUT];
  data_t  out_pred [NDUT][NC];
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  localparam poison_e MODES [NDUT] = '{POISON_NONE, POISON_ST, POISON_PT, POISON_TOP1, POISON_TOP3,
                                       POISON_ST, POISON_ST, POISON_PT, POISON_PT};
  localparam int      QS    [NDUT] = '{16, 5, 7, 16, 16, 6, 9, 8, 9};

  for (genvar d = 0; d < NDUT; d++) begin : g_dut
    nn_obf_top #(.N_IN(N_IN), .N_HID(N_HID), .N_HID_LAYERS(NHL), .N_CLASS(NC), .LANES(LANES),
                 .POISON(MODES[d]), .TRUNC_Q(QS[d])) dut (
      .clk, .rst_n, .wl, .in_valid, .in_data,
      .in_ready (in_ready[d]),
      .out_valid(out_valid[d]),
      .out_pred (out_pred[d])
    );
  end

  // reference weights, per layer, flattened row-major
  int wts [NHL+1][];
  int bia [NHL+1][];

  // mechanism counters
  int n_relu_clip = 0, n_stall = 0, n_st_change = 0, n_pt_change = 0, n_pt_zero = 0;
  int n_top1_sup = 0, n_top3_sup = 0, n_label_kept = 0;

  function automatic int lat_expected();
    int l;
    l = 2 + NC * 27;
    for (int k = 0; k <= NHL; k++) begin
      int ni, no;
      ni = (k == 0) ? N_IN : N_HID;
      no = (k == NHL) ? NC : N_HID;
      l += no * ((ni + LANES - 1) / LANES) + 2;
    end
    return l;
  endfunction

  function automatic bit all_seen(input int seen [NDUT]);
    foreach (seen[d]) if (seen[d] < 0) return 1'b0;
    return 1'b1;
  endfunction

  task automatic load(input int layer, input bit bias, input int o, input int i, input int v);
    @(negedge clk);
    wl = '{en: 1'b1, layer: 4'(layer), bias: bias, neuron: 12'(o), input_idx: 12'(i), data: data_t'(v)};
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
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

    // ---- load weights ----
    for (int k = 0; k <= NHL; k++) begin
      int ni, no;
      ni = (k == 0) ? N_IN : N_HID;
      no = (k == NHL) ? NC : N_HID;
      wts[k] = new[ni * no];
      bia[k] = new[no];
      for (int o = 0; o < no; o++) begin
        for (int i = 0; i < ni; i++) begin
          wts[k][o*ni + i] = int'($urandom_range(0, 1400)) - 700;
          load(k, 1'b0, o, i, wts[k][o*ni + i]);
        end
        bia[k][o] = int'($urandom_range(0, 1024)) - 512;
        load(k, 1'b1, o, 0, bia[k][o]);
      end
    end
    @(negedge clk);
    wl = '0;

    // ---- images ----
    for (int img = 0; img < NIMG; img++) begin
      int x[], h[], s[], p[], exp_out[];
      int cyc, lat;
      int seen [NDUT];
      x = new[N_IN];
      foreach (x[i]) x[i] = int'($urandom_range(0, 1023));   // pixels in [0,1)

      // stream the image; data offered while not ready counts as a stall
      for (int i = 0; i < N_IN; i++) begin
        in_valid = 1'b1;
        in_data  = data_t'(x[i]);
        while (!in_ready[0]) begin n_stall++; @(negedge clk); end
        @(negedge clk);
      end
      // keep offering the next word so back-pressure is exercised
      in_data = data_t'(0);
      in_valid = (img != NIMG - 1);

      // reference
      h = x;
      for (int k = 0; k < NHL; k++) begin
        int t[];
        dense((k == 0) ? N_IN : N_HID, N_HID, wts[k], bia[k], h, t);
        foreach (t[i]) if (t[i] < 0) n_relu_clip++;
        relu(t);
        h = t;
      end
      dense(N_HID, NC, wts[NHL], bia[NHL], h, s);

      // wait for all outputs; cyc counts cycles after the cycle of the last input word
      // (the streaming loop has already advanced one cycle past it)
      foreach (seen[d]) seen[d] = -1;
      cyc = 1;
      while (!all_seen(seen)) begin
        for (int d = 0; d < NDUT; d++) if (out_valid[d] && seen[d] < 0) seen[d] = cyc;
        if (!all_seen(seen)) begin
          @(negedge clk);
          cyc++;
          if (in_valid && !in_ready[0]) n_stall++;
        end
      end
      lat = lat_expected();
      // for the stall count above, the first word of the next image is pending

      for (int d = 0; d < NDUT; d++) begin
        int sd[], pd[];
        checks++;
        if (seen[d] != lat) begin
          failures++;
          $display("FAIL img=%0d dut=%0d latency %0d != %0d", img, d, seen[d], lat);
        end
        sd = s;
        if (MODES[d] == POISON_ST) begin
          trunc(QS[d], sd);
          foreach (sd[i]) if (sd[i] != s[i]) n_st_change++;
        end
        softmax(sd, pd);
        case (MODES[d])
          POISON_PT: begin
            int pp[];
            pp = pd;
            trunc(QS[d], pd);
            foreach (pd[i]) begin
              if (pd[i] != pp[i]) n_pt_change++;
              if (pd[i] == 0 && pp[i] != 0) n_pt_zero++;
            end
          end
          POISON_TOP1: begin
            int pp[];
            pp = pd;
            topk(1, pd);
            foreach (pd[i]) if (pd[i] != pp[i]) n_top1_sup++;
          end
          POISON_TOP3: begin
            int pp[];
            pp = pd;
            topk(3, pd);
            foreach (pd[i]) if (pd[i] != pp[i]) n_top3_sup++;
          end
          default: ;
        endcase
        exp_out = pd;
        for (int c = 0; c < NC; c++) begin
          checks++;
          if (int'(out_pred[d][c]) != exp_out[c]) begin
            failures++;
            $display("FAIL img=%0d dut=%0d class=%0d got=%0d exp=%0d", img, d, c, out_pred[d][c], exp_out[c]);
          end
        end
        // the defended top class agrees with the undefended one (up to ties the
        // truncation creates, which the tie rule resolves to the lower index)
        if (d > 0) begin
          int got[], ref0[];
          got = new[NC];
          ref0 = new[NC];
          foreach (got[c]) begin got[c] = int'(out_pred[d][c]); ref0[c] = int'(out_pred[0][c]); end
          if (argmax(got) == argmax(ref0)) n_label_kept++;
          if (MODES[d] == POISON_TOP1 || MODES[d] == POISON_TOP3) begin
            checks++;
            if (argmax(got) != argmax(ref0)) begin
              failures++;
              $display("FAIL img=%0d dut=%0d top class changed", img, d);
            end
          end
        end
      end
      @(negedge clk);
    end
    in_valid = 1'b0;

    $display("mechanisms: relu_clip=%0d stall=%0d st_change=%0d pt_change=%0d pt_zero=%0d top1_sup=%0d top3_sup=%0d label_kept=%0d/%0d",
             n_relu_clip, n_stall, n_st_change, n_pt_change, n_pt_zero, n_top1_sup, n_top3_sup,
             n_label_kept, NIMG * (NDUT - 1));
    checks++; if (n_relu_clip == 0) begin failures++; $display("FAIL no ReLU clipping"); end
    checks++; if (n_stall == 0)     begin failures++; $display("FAIL no input stall"); end
    checks++; if (n_st_change == 0) begin failures++; $display("FAIL ST never changed a score"); end
    checks++; if (n_pt_change == 0) begin failures++; $display("FAIL PT never changed a prediction"); end
    checks++; if (n_pt_zero == 0)   begin failures++; $display("FAIL PT never zeroed a prediction"); end
    checks++; if (n_top1_sup == 0)  begin failures++; $display("FAIL Top1 never suppressed"); end
    checks++; if (n_top3_sup == 0)  begin failures++; $display("FAIL Top3 never suppressed"); end
    checks++; if (n_label_kept == 0) begin failures++; $display("FAIL top class never kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
