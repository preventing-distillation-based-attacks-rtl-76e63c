// dense_layer: one fully-connected layer, out[o] = bias[o] + sum_i w[o][i] * a[i].
//
// The weights sit in LANES memory banks (one plain memory each): weight w[o][i] lives in bank i % LANES at
// address o*NCHUNK + i/LANES, so one read of all banks returns the LANES weights that
// multiply one chunk of LANES consecutive inputs. Each cycle the layer reads one chunk
// (synchronous read, as a block RAM would) and, one cycle later, multiplies it with
// the matching inputs, adds the LANES products in a tree and accumulates the sum
// (the "mult" and "acc" of the neuron datapath). After the last chunk of a neuron the
// accumulator, which carries 2*FRAC fractional bits, is shifted back to FRAC bits
// (floor) and saturated to 16 bits. Inputs past N_IN in the last chunk count as zero.
//
// Interface: weights and biases are written through `wl` whenever the layer is idle;
// a write is taken when wl.en is set and wl.layer equals LAYER_ID. `start` (one cycle)
// begins a pass over all N_OUT neurons; in_vec must stay stable until `done`.
// out_vec holds the results until the next start.
// Timing: done is high N_OUT*NCHUNK + 2 cycles after the cycle in which start is high
// (one cycle to begin, one per chunk, one for the read pipeline and the final write).
//
// The multiply-accumulate neuron and the 16-bit word follow the published design; the
// lane-parallel, time-multiplexed schedule (the number of multipliers), the memory
// layout, saturation and the load port are this design's choices, since the network's
// trained weights are the protected IP and are not part of the hardware description.
module dense_layer
  import nn_pkg::*;
#(
  parameter int unsigned N_IN     = 784,
  parameter int unsigned N_OUT    = 100,
  parameter int unsigned LANES    = 16,
  parameter int unsigned LAYER_ID = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wload_t wl,
  input  logic   start,
  input  data_t  in_vec  [N_IN],
  output logic   busy,
  output logic   done,
  output data_t  out_vec [N_OUT]
);
  localparam int unsigned NCHUNK  = (N_IN + LANES - 1) / LANES;
  localparam int unsigned DEPTH   = N_OUT * NCHUNK;
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned OW      = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned CW      = (NCHUNK > 1) ? $clog2(NCHUNK) : 1;
  localparam int unsigned ACC_W   = 48;

  // ---------------- weight and bias memories ----------------
  data_t bmem [N_OUT];
  data_t s1_w [LANES];

  logic                wl_hit;
  int unsigned         wr_bank;
  logic [AW-1:0]       wr_addr, rd_addr;
  assign wl_hit  = wl.en && (wl.layer == 4'(LAYER_ID));
  assign wr_bank = int'(wl.input_idx) % LANES;
  assign wr_addr = AW'(int'(wl.neuron) * NCHUNK + int'(wl.input_idx) / LANES);

  // one single-port-write, synchronous-read memory per lane
  for (genvar l = 0; l < LANES; l++) begin : g_bank
    data_t bank [DEPTH];
    always_ff @(posedge clk) begin
      if (wl_hit && !wl.bias && wr_bank == l) bank[wr_addr] <= wl.data;
      s1_w[l] <= bank[rd_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (wl_hit && wl.bias) bmem[int'(wl.neuron)] <= wl.data;
  end

  // ---------------- issue counters ----------------
  logic [OW-1:0] o_cnt;
  logic [CW-1:0] c_cnt;
  logic          issuing;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      o_cnt   <= '0;
      c_cnt   <= '0;
    end else if (start && !busy) begin
      issuing <= 1'b1;
      o_cnt   <= '0;
      c_cnt   <= '0;
    end else if (issuing) begin
      if (c_cnt == CW'(NCHUNK - 1)) begin
        c_cnt <= '0;
        if (o_cnt == OW'(N_OUT - 1)) issuing <= 1'b0;
        else                         o_cnt   <= o_cnt + 1'b1;
      end else begin
        c_cnt <= c_cnt + 1'b1;
      end
    end
  end

  // ---------------- stage 1: memory read, operand fetch ----------------
  data_t         s1_a [LANES];
  logic          s1_valid, s1_first, s1_last;
  logic [OW-1:0] s1_o;

  assign rd_addr = AW'(int'(o_cnt) * NCHUNK + int'(c_cnt));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_o     <= '0;
      for (int l = 0; l < LANES; l++) s1_a[l] <= '0;
    end else begin
      s1_valid <= issuing;
      s1_first <= (c_cnt == '0);
      s1_last  <= (c_cnt == CW'(NCHUNK - 1));
      s1_o     <= o_cnt;
      for (int l = 0; l < LANES; l++) begin
        int unsigned idx;
        idx = int'(c_cnt) * LANES + l;
        s1_a[l] <= (idx < N_IN) ? in_vec[idx] : '0;
      end
    end
  end

  // ---------------- stage 2: multiply, adder tree, accumulate ----------------
  logic signed [ACC_W-1:0] acc, chunk_sum, acc_next;

  always_comb begin
    chunk_sum = '0;
    for (int l = 0; l < LANES; l++)
      chunk_sum += ACC_W'(s1_w[l] * s1_a[l]);
    acc_next = (s1_first ? (ACC_W'(bmem[s1_o]) <<< FRAC_BITS) : acc) + chunk_sum;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
      for (int o = 0; o < N_OUT; o++) out_vec[o] <= '0;
    end else begin
      done <= 1'b0;
      if (s1_valid) begin
        acc <= acc_next;
        if (s1_last) begin
          out_vec[s1_o] <= sat16(64'(acc_next >>> FRAC_BITS));
          if (s1_o == OW'(N_OUT - 1)) done <= 1'b1;
        end
      end
    end
  end

  assign busy = issuing || s1_valid;

  // A new pass may only begin when the previous one has finished.
  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));
  // The weight memories are not written during a pass.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(wl_hit && busy));

endmodule
