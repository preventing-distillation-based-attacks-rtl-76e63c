// softmax: converts the N class scores into probabilities, P_i = e^{s_i} / sum_j e^{s_j}.
//
// The largest score is subtracted first (e^{s_i-m} / sum e^{s_j-m} is the same
// function and keeps every exponent <= 0). The exponential comes from a 256-entry
// table of e^{-k/16}, k = 0..255, stored as unsigned Q1.15 (1.0 = 32768); the
// difference m - s_i indexes it at a resolution of 1/16, and differences of 16 or
// more give 0. The table is computed at elaboration from that formula. Each
// probability is then the exact quotient floor(e_i * 2^FRAC / sum), produced by one
// restoring divider that handles the classes one after another, so the output has the
// same fixed-point format as the scores (FRAC fractional bits, 1.0 = 2^FRAC).
//
// Interface: `start` (one cycle) samples the scores, which are used only in that
// cycle. `done` pulses when all of `probs` are valid; probs hold until the next start.
// Timing: done is high 1 + N*(DIV_W+1) cycles after the cycle in which start is high,
// DIV_W = 16 + FRAC (271 cycles for 10 classes).
//
// The function (Eq. 1 of the published design, without the noise term, which the
// surrounding truncation supplies) follows the paper; the table resolution, the
// subtract-max form and the sequential divider are this design's choices.
module softmax
  import nn_pkg::*;
#(
  parameter int unsigned N = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t scores [N],
  output logic  busy,
  output logic  done,
  output data_t probs  [N]
);
  localparam int unsigned TAB_N  = 256;
  localparam int unsigned TAB_FB = 4;                   // table step 2^-4
  localparam int unsigned DIV_W  = DATA_W + FRAC_BITS;  // numerator width
  localparam int unsigned SUM_W  = 24;
  localparam int unsigned KW     = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned BW     = $clog2(DIV_W + 1);

  typedef logic [15:0] exp_tab_t [TAB_N];

  function automatic exp_tab_t make_exp_tab();
    exp_tab_t t;
    for (int k = 0; k < TAB_N; k++)
      t[k] = 16'(int'($floor($exp(-real'(k) / real'(1 << TAB_FB)) * 32768.0 + 0.5)));
    return t;
  endfunction

  localparam exp_tab_t EXP_TAB = make_exp_tab();

  // ---------------- exponentials of the sampled scores ----------------
  data_t             s_max;
  logic [15:0]       e_now [N];
  logic [SUM_W-1:0]  sum_now;

  always_comb begin
    s_max = scores[0];
    for (int i = 1; i < N; i++)
      if (scores[i] > s_max) s_max = scores[i];
    sum_now = '0;
    for (int i = 0; i < N; i++) begin
      logic [DATA_W:0] diff;
      logic [DATA_W:0] idx;
      diff = (DATA_W+1)'(signed'({s_max[DATA_W-1], s_max}) - signed'({scores[i][DATA_W-1], scores[i]}));
      idx  = diff >> (FRAC_BITS - TAB_FB);
      e_now[i] = (idx < (DATA_W+1)'(TAB_N)) ? EXP_TAB[idx[7:0]] : 16'd0;
      sum_now += SUM_W'(e_now[i]);
    end
  end

  // ---------------- sequential normalisation ----------------
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_DIV} state_e;
  state_e            state;
  logic [15:0]       e_reg [N];
  logic [SUM_W-1:0]  sum_reg;
  logic [KW-1:0]     k;
  logic [BW-1:0]     nbit;
  logic [DIV_W-1:0]  num;   // numerator bits still to shift in; quotient bits shift in behind
  logic [SUM_W-1:0]  rem;    // always below sum_reg

  logic [SUM_W:0]    rem_sh;
  assign rem_sh = {rem, num[DIV_W-1]};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      k       <= '0;
      nbit    <= '0;
      num     <= '0;
      rem     <= '0;
      sum_reg <= '0;
      for (int i = 0; i < N; i++) begin
        e_reg[i] <= '0;
        probs[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          e_reg   <= e_now;
          sum_reg <= sum_now;
          k       <= '0;
          state   <= S_LOAD;
        end
        S_LOAD: begin
          num   <= DIV_W'(e_reg[k]) << FRAC_BITS;
          rem   <= '0;
          nbit  <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          if (rem_sh >= {1'b0, sum_reg}) begin
            rem <= SUM_W'(rem_sh - {1'b0, sum_reg});
            num <= {num[DIV_W-2:0], 1'b1};
          end else begin
            rem <= SUM_W'(rem_sh);
            num <= {num[DIV_W-2:0], 1'b0};
          end
          nbit <= nbit + 1'b1;
          if (nbit == BW'(DIV_W - 1)) begin
            // the last quotient bit is the one being shifted in now
            probs[k] <= data_t'({num[DIV_W-2:0], (rem_sh >= {1'b0, sum_reg})});
            if (k == KW'(N - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              k     <= k + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));
endmodule
