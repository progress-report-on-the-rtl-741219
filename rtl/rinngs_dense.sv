// rinngs_dense: one fully connected layer of RiNNgs, out_j = act(b_j + sum_i w_ji * x_i).
//
// How it works: a start pulse latches the N_IN inputs and clears one accumulator
// per output neuron. During the next STEPS = ceil(N_IN/LANES) cycles every neuron
// multiplies LANES inputs by their weights and adds the products to its
// accumulator (N_OUT*LANES multipliers in all). In the last step the bias is
// added, the sum is brought back to the activation format by an arithmetic
// right shift (floor), negative values are cut to 0 (ReLU, when RELU=1) and the
// result is saturated to 18 bits and registered.
//
// Timing: start in cycle t  ->  done (one-cycle pulse) and out_vec valid in
// cycle t + STEPS + 1; out_vec holds until the next result. busy is high in
// between; a new start must not come while busy (asserted).
//
// Weights and biases sit in register arrays written through the wr_* port
// (row = output neuron, col = input). They have no reset, like block RAM.
// The layer function and number formats follow the published network; the
// time-multiplexed MAC organisation, the rounding and saturation are this
// design's own.
module rinngs_dense
  import rinngs_pkg::*;
#(
  parameter int unsigned N_IN  = N_HITS,
  parameter int unsigned N_OUT = L1_OUT,
  parameter int unsigned LANES = 4,
  parameter bit          RELU  = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  act_t             in_vec  [N_IN],
  output logic             busy,
  output logic             done,
  output act_t             out_vec [N_OUT],
  input  logic             wr_en,
  input  logic             wr_bias,
  input  logic [IDX_W-1:0] wr_row,
  input  logic [IDX_W-1:0] wr_col,
  input  logic [BW-1:0]    wr_data
);

  localparam int unsigned STEPS = (N_IN + LANES - 1) / LANES;
  localparam int unsigned N_PAD = STEPS * LANES;
  localparam int unsigned SH_B  = DFRAC + WFRAC - BFRAC;  // bias alignment
  localparam int unsigned ACCW  = DW + WW + $clog2(N_PAD + 1) + 1;
  localparam int unsigned SW    = $clog2(STEPS + 1);
  localparam int unsigned RW    = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned CWI   = (N_PAD > 1) ? $clog2(N_PAD) : 1;

  typedef logic signed [ACCW-1:0] acc_t;

  localparam acc_t ACT_MAX = acc_t'((1 << (DW - 1)) - 1);
  localparam acc_t ACT_MIN = -acc_t'(1 << (DW - 1));

  weight_t          w_mem [N_OUT][N_PAD];
  bias_t            b_mem [N_OUT];
  act_t             x_q   [N_PAD];
  acc_t             acc   [N_OUT];
  acc_t             acc_next [N_OUT];
  logic [SW-1:0]    step;

  function automatic act_t activate(acc_t a, bias_t b);
    acc_t t;
    t = a + (acc_t'(b) <<< SH_B);
    t = t >>> WFRAC;
    if (RELU && t < 0) return '0;
    if (t > ACT_MAX) return act_t'(ACT_MAX);
    if (t < ACT_MIN) return act_t'(ACT_MIN);
    return act_t'(t);
  endfunction

  // Products of the current step added to each accumulator.
  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      acc_t s;
      s = acc[j];
      for (int l = 0; l < LANES; l++) begin
        s += acc_t'(x_q[int'(step) * LANES + l]) * acc_t'(w_mem[j][int'(step) * LANES + l]);
      end
      acc_next[j] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      step <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        step <= '0;
      end else if (busy) begin
        if (int'(step) == STEPS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          step <= '0;
        end else begin
          step <= step + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      for (int i = 0; i < N_PAD; i++) x_q[i] <= (i < N_IN) ? in_vec[i] : '0;
      for (int j = 0; j < N_OUT; j++) acc[j] <= '0;
    end else if (busy) begin
      for (int j = 0; j < N_OUT; j++) acc[j] <= acc_next[j];
      if (int'(step) == STEPS - 1)
        for (int j = 0; j < N_OUT; j++) out_vec[j] <= activate(acc_next[j], b_mem[j]);
    end
  end

  // Parameter memories. Weights of the padding columns are always read as 0
  // through x_q, so they need no clearing.
  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_row) < N_OUT) begin
      if (wr_bias) b_mem[RW'(wr_row)] <= bias_t'(wr_data);
      else if (int'(wr_col) < N_IN) w_mem[RW'(wr_row)][CWI'(wr_col)] <= weight_t'(wr_data[WW-1:0]);
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("rinngs_dense: start while busy");

endmodule
