// fnn_small: the small feed-forward network that turns the 2N filter
// outputs of a qubit group into the group's basis state.
//
// Shape 10-10-20-32 for N = 5: the input vector holds the five MF outputs
// (features 0..4, qubits 1..5) followed by the five RMF outputs (features
// 5..9), as in the design's block diagram; two hidden layers of 10 and 20
// neurons; 32 outputs, one per basis state. The network was trained offline
// with a softmax / cross-entropy output. Since softmax preserves order, the
// hardware returns the index of the largest logit (lowest index on a tie),
// which is the class the softmax would pick. Bit q of that index is taken as
// the state of qubit q+1 (this design's convention).
//
// The three layers are fnn_dense instances run one after another, each
// sharing its multipliers over REUSE cycles (reuse factor 4 by default,
// the configuration whose utilisation the paper reports for the full
// design). Weights are loaded per layer through the configuration port
// (regions CFG_FNN_L1..L3).
//
// Interface: in_valid/in_ready/features; the features are captured when
// both are high. out_valid/out_ready/state plus the winning logit. A new
// input is accepted only when the network is idle and its previous result
// has been taken. Timing with the defaults: capture in cycle 0, the layers
// take 4 + 4 + 4 cycles, the argmax is registered one cycle later, so
// out_valid rises 14 cycles after the capture edge (LATENCY below).
module fnn_small
  import herq_pkg::*;
#(
  parameter int unsigned NIN   = N_FEAT,
  parameter int unsigned NH1   = N_H1,
  parameter int unsigned NH2   = N_H2,
  parameter int unsigned NOUT  = N_CLASSES,
  parameter int unsigned REUSE = REUSE_FACTOR
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cfg_wr_t                cfg,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic signed [FX_W-1:0] features [NIN],
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [$clog2(NOUT)-1:0] state,
  output logic signed [FX_W-1:0] max_logit
);
  logic signed [FX_W-1:0] x0 [NIN];
  logic signed [FX_W-1:0] h1 [NH1];
  logic signed [FX_W-1:0] h2 [NH2];
  logic signed [FX_W-1:0] lo [NOUT];
  logic go, d1, d2, d3, b1, b2, b3, busy;

  fnn_dense #(.IN(NIN), .OUT(NH1), .REUSE(REUSE), .REGION(CFG_FNN_L1), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .cfg, .start(go), .x(x0), .done(d1), .busy(b1), .y(h1));
  fnn_dense #(.IN(NH1), .OUT(NH2), .REUSE(REUSE), .REGION(CFG_FNN_L2), .RELU(1'b1)) u_l2 (
    .clk, .rst_n, .cfg, .start(d1), .x(h1), .done(d2), .busy(b2), .y(h2));
  fnn_dense #(.IN(NH2), .OUT(NOUT), .REUSE(REUSE), .REGION(CFG_FNN_L3), .RELU(1'b0)) u_l3 (
    .clk, .rst_n, .cfg, .start(d2), .x(h2), .done(d3), .busy(b3), .y(lo));

  // ---- argmax over the output logits ----
  logic [$clog2(NOUT)-1:0] best_idx;
  logic signed [FX_W-1:0]  best_val;
  always_comb begin
    best_idx = '0;
    best_val = lo[0];
    for (int c = 1; c < NOUT; c++) begin
      if (lo[c] > best_val) begin
        best_val = lo[c];
        best_idx = ($clog2(NOUT))'(c);
      end
    end
  end

  // ---- sequencing ----
  logic running;
  assign busy     = running || go;
  assign in_ready = !busy && !out_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      go        <= 1'b0;
      running   <= 1'b0;
      out_valid <= 1'b0;
      state     <= '0;
      max_logit <= '0;
      for (int i = 0; i < NIN; i++) x0[i] <= '0;
    end else begin
      go <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int i = 0; i < NIN; i++) x0[i] <= features[i];
        go      <= 1'b1;
        running <= 1'b1;
      end
      if (d3) begin
        running   <= 1'b0;
        out_valid <= 1'b1;
        state     <= best_idx;
        max_logit <= best_val;
      end
    end
  end

  a_one_layer_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({b1, b2, b3}));

endmodule
