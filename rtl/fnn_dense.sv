// fnn_dense: one fully connected layer of the readout neural network, with
// multipliers shared over REUSE cycles.
//
// y[n] = act( b[n] + sum_i w[n][i] * x[i] ), in signed Q(FX_W-FX_FRAC).FX_FRAC
// fixed point. act is ReLU for hidden layers (RELU=1) and the identity for
// the output layer. The reuse factor follows the paper's meaning (one
// multiplier is shared by REUSE multiplications): each neuron owns
// LANES = ceil(IN/REUSE) multipliers and walks its inputs in
// STEPS = ceil(IN/LANES) cycles, so the layer holds OUT*LANES multipliers
// instead of OUT*IN. The lane/step schedule, ReLU, and the number format are
// this design's choices.
//
// Weights: w[n][i] is written through the configuration port in region
// REGION at offset n*(IN+1)+i; offset n*(IN+1)+IN holds the bias b[n] (same
// Q format as the activations).
//
// Interface and timing: a one-cycle `start` pulse begins a pass; x must stay
// stable until `done`. The accumulation takes STEPS cycles (the start cycle
// is the first); y is written and `done` pulses in the cycle after the last
// step, so a layer has a latency of STEPS cycles from start to done. Outputs
// saturate to FX_W bits.
module fnn_dense
  import herq_pkg::*;
#(
  parameter int unsigned IN     = 10,
  parameter int unsigned OUT    = 10,
  parameter int unsigned REUSE  = REUSE_FACTOR,
  parameter cfg_region_e REGION = CFG_FNN_L1,
  parameter bit          RELU   = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  input  logic                   start,
  input  logic signed [FX_W-1:0] x [IN],
  output logic                   done,
  output logic                   busy,
  output logic signed [FX_W-1:0] y [OUT]
);
  localparam int unsigned LANES = (IN + REUSE - 1) / REUSE;
  localparam int unsigned STEPS = (IN + LANES - 1) / LANES;
  localparam int unsigned SW    = (STEPS > 1) ? $clog2(STEPS) : 1;
  localparam int unsigned ACC_W = 2 * FX_W + $clog2(IN + 1) + 2;
  localparam int FX_MAX = (1 <<< (FX_W - 1)) - 1;
  localparam int FX_MIN = -(1 <<< (FX_W - 1));

  // ---- weight and bias memory ----
  logic signed [FX_W-1:0] w [OUT][IN+1];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.region == REGION && cfg.offset < 12'(OUT * (IN + 1)))
      w[int'(cfg.offset) / (IN + 1)][int'(cfg.offset) % (IN + 1)] <= cfg.data[FX_W-1:0];
  end

  // ---- shared-multiplier accumulation ----
  logic [SW-1:0]           step;
  logic                    active;
  logic signed [ACC_W-1:0] acc      [OUT];
  logic signed [ACC_W-1:0] acc_next [OUT];

  always_comb begin
    for (int n = 0; n < OUT; n++) begin
      acc_next[n] = start ? (ACC_W'(w[n][IN]) <<< FX_FRAC) : acc[n];
      for (int k = 0; k < LANES; k++) begin
        int unsigned idx;
        idx = (start ? 0 : int'(step)) * LANES + k;
        if (idx < IN)
          acc_next[n] = acc_next[n] + ACC_W'(w[n][idx]) * ACC_W'(x[idx]);
      end
    end
  end

  function automatic logic signed [FX_W-1:0] activate(logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    s = a >>> FX_FRAC;
    if (RELU && s < 0)           return '0;
    else if (s > ACC_W'(FX_MAX)) return FX_W'(FX_MAX);
    else if (s < ACC_W'(FX_MIN)) return FX_W'(FX_MIN);
    else                         return s[FX_W-1:0];
  endfunction

  logic last;
  assign last = (start ? SW'(0) : step) == SW'(STEPS - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      step   <= '0;
      active <= 1'b0;
      done   <= 1'b0;
      for (int n = 0; n < OUT; n++) begin
        acc[n] <= '0;
        y[n]   <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start || active) begin
        for (int n = 0; n < OUT; n++) acc[n] <= acc_next[n];
        if (last) begin
          active <= 1'b0;
          step   <= '0;
          done   <= 1'b1;
          for (int n = 0; n < OUT; n++) y[n] <= activate(acc_next[n]);
        end else begin
          active <= 1'b1;
          step   <= (start ? SW'(0) : step) + 1'b1;
        end
      end
    end
  end

  assign busy = active;

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(start && active));

endmodule
