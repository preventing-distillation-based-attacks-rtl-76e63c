// nn_obf_top: a multi-layer-perceptron classifier whose outputs are poisoned against
// distillation (model-stealing) attacks.
//
// Datapath, in order:
//   input buffer (N_IN words, streamed in one per cycle)
//   -> dense layer 0 + ReLU -> ... -> dense layer N_HID_LAYERS-1 + ReLU   (hidden)
//   -> dense layer N_HID_LAYERS                                          (class scores)
//   -> [ST: pqn_trunc] -> softmax -> [PT: pqn_trunc | Top1/Top3: topk_filter] -> out_pred
// Exactly one defence, POISON, is built in; the poisoning stages are combinational, so
// every defence has the same latency as the unprotected network. The defaults give
// the MNIST perceptron 784-100-10 with score truncation to 5 bits.
//
// Interface:
//   wl        : weight/bias load port, shared by all dense layers (wl.layer selects one);
//               use only while in_ready is high and no image has been partly streamed.
//   in_valid / in_data / in_ready : one input word per accepted cycle, N_IN per image,
//               element order = the network's flattened input order.
//   out_valid : one-cycle pulse when out_pred holds the (poisoned) predictions of the
//               last image; out_pred stays valid until the next image finishes.
// Timing: the image is processed only after its last word arrives; one image at a time
// (in_ready is low while it is processed). out_valid is high
//   2 + 27*N_CLASS + sum over dense layers of (N_OUT*ceil(N_IN/LANES) + 2)
// cycles after the cycle in which the last input word is accepted: 5,246 cycles at
// the defaults (4,902 and 72 for the two dense layers, 272 for start and SoftMax).
//
// The layer sequence (FC+ReLU hidden layers of equal width, FC output, SoftMax), the
// 16-bit words and the placement of the four defences around SoftMax follow the
// published design; the streaming input, the non-overlapped schedule, the load port
// and all widths other than 16 bits are this design's choices.
module nn_obf_top
  import nn_pkg::*;
#(
  parameter int unsigned N_IN         = 784,
  parameter int unsigned N_HID        = 100,
  parameter int unsigned N_HID_LAYERS = 1,
  parameter int unsigned N_CLASS      = 10,
  parameter int unsigned LANES        = 16,
  parameter poison_e     POISON       = POISON_ST,
  parameter int unsigned TRUNC_Q      = 5
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wload_t wl,
  input  logic   in_valid,
  input  data_t  in_data,
  output logic   in_ready,
  output logic   out_valid,
  output data_t  out_pred [N_CLASS]
);
  localparam int unsigned IW = $clog2(N_IN + 1);

  initial assert (N_HID_LAYERS >= 1 && N_HID_LAYERS <= 14)
    else $error("nn_obf_top: N_HID_LAYERS must be 1..14");

  // ---------------- input buffer and image sequencing ----------------
  data_t         in_buf [N_IN];
  logic [IW-1:0] in_cnt;
  logic          running;
  logic          net_start;
  logic          sm_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_cnt    <= '0;
      running   <= 1'b0;
      net_start <= 1'b0;
    end else begin
      net_start <= 1'b0;
      if (!running && in_valid) begin
        in_buf[in_cnt] <= in_data;
        if (in_cnt == IW'(N_IN - 1)) begin
          in_cnt    <= '0;
          running   <= 1'b1;
          net_start <= 1'b1;
        end else begin
          in_cnt <= in_cnt + 1'b1;
        end
      end
      if (sm_done) running <= 1'b0;
    end
  end

  assign in_ready = !running;

  // ---------------- hidden layers: dense + ReLU ----------------
  data_t hid_pre [N_HID_LAYERS][N_HID];
  data_t hid_act [N_HID_LAYERS][N_HID];
  logic  hid_done [N_HID_LAYERS];

  for (genvar g = 0; g < N_HID_LAYERS; g++) begin : g_hidden
    logic unused_busy;
    if (g == 0) begin : g_first
      dense_layer #(.N_IN(N_IN), .N_OUT(N_HID), .LANES(LANES), .LAYER_ID(0)) u_fc (
        .clk, .rst_n, .wl,
        .start   (net_start),
        .in_vec  (in_buf),
        .busy    (unused_busy),
        .done    (hid_done[g]),
        .out_vec (hid_pre[g])
      );
    end else begin : g_next
      dense_layer #(.N_IN(N_HID), .N_OUT(N_HID), .LANES(LANES), .LAYER_ID(g)) u_fc (
        .clk, .rst_n, .wl,
        .start   (hid_done[g-1]),
        .in_vec  (hid_act[g-1]),
        .busy    (unused_busy),
        .done    (hid_done[g]),
        .out_vec (hid_pre[g])
      );
    end
    relu #(.N(N_HID)) u_relu (.din(hid_pre[g]), .dout(hid_act[g]));
  end

  // ---------------- output layer: class scores ----------------
  data_t scores [N_CLASS];
  logic  out_fc_done;
  logic  out_fc_busy;

  dense_layer #(.N_IN(N_HID), .N_OUT(N_CLASS), .LANES(LANES), .LAYER_ID(N_HID_LAYERS)) u_fc_out (
    .clk, .rst_n, .wl,
    .start   (hid_done[N_HID_LAYERS-1]),
    .in_vec  (hid_act[N_HID_LAYERS-1]),
    .busy    (out_fc_busy),
    .done    (out_fc_done),
    .out_vec (scores)
  );

  // ---------------- score truncation (ST) ----------------
  data_t sm_in [N_CLASS];
  if (POISON == POISON_ST) begin : g_st
    pqn_trunc #(.N(N_CLASS), .W(DATA_W), .Q(TRUNC_Q)) u_st (.din(scores), .dout(sm_in));
  end else begin : g_no_st
    assign sm_in = scores;
  end

  // ---------------- SoftMax ----------------
  data_t probs [N_CLASS];
  logic  sm_busy;

  softmax #(.N(N_CLASS)) u_softmax (
    .clk, .rst_n,
    .start  (out_fc_done),
    .scores (sm_in),
    .busy   (sm_busy),
    .done   (sm_done),
    .probs  (probs)
  );

  // ---------------- prediction poisoning (PT, Top1, Top3) ----------------
  if (POISON == POISON_PT) begin : g_pt
    pqn_trunc #(.N(N_CLASS), .W(DATA_W), .Q(TRUNC_Q)) u_pt (.din(probs), .dout(out_pred));
  end else if (POISON == POISON_TOP1) begin : g_top1
    topk_filter #(.N(N_CLASS), .K(1)) u_top1 (.din(probs), .dout(out_pred));
  end else if (POISON == POISON_TOP3) begin : g_top3
    topk_filter #(.N(N_CLASS), .K(3)) u_top3 (.din(probs), .dout(out_pred));
  end else begin : g_no_pp
    assign out_pred = probs;
  end

  assign out_valid = sm_done;

  // Input words are only accepted while no image is in flight.
  a_stream_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                  (sm_busy || out_fc_busy) |-> running);
  // Weights are not reloaded while an image is processed.
  a_no_load_running: assert property (@(posedge clk) disable iff (!rst_n) !(wl.en && running));
endmodule
