// matched_filter: one qubit's matched filter (MF) or relaxation matched
// filter (RMF), a multiply-and-accumulate over the demodulated trace.
//
// The filter reduces a readout trace of up to NB bins to one number,
//     y = sum_{t < duration} env_i[t]*tr_i[t] + env_q[t]*tr_q[t],
// the dot product of the trained I and Q envelopes with the trace, as the
// paper describes (one MAC unit, separate I and Q envelopes summed into a
// single scalar). The same hardware serves as MF and as RMF: only the
// envelope differs (trained from ground against excited traces for the MF,
// from ground against relaxation traces for the RMF). ENV_REGION selects
// which configuration region loads this instance's envelope.
//
// Shortened readout: `duration` (bins, written per qubit through the
// CFG_DURATION region, NB after reset) sets how many bins are integrated.
// Bins past it are accepted and ignored, so a filter trained on the full
// 1 us trace can be used on a shorter one without retraining, as the paper
// proposes. The MF and RMF of one qubit share the same duration register
// address.
//
// The result is the accumulator shifted right arithmetically by OUT_SHIFT
// and saturated to FX_W bits, the input format of the neural network; the
// shift is this design's choice (the paper gives no number formats).
//
// Interface: in_valid/in_ready/in_data carry trace bins (in_data.first marks
// bin 0). A bin flagged first is refused while the previous result has not
// been taken. res_valid/res_ready/result hand the scalar on. Timing: the MAC
// consumes one bin per cycle; the result is valid one cycle after the bin
// with index duration-1 is taken.
module matched_filter
  import herq_pkg::*;
#(
  parameter int unsigned QIDX       = 0,
  parameter cfg_region_e ENV_REGION = CFG_MF_ENV,
  parameter int unsigned NB         = N_BINS,
  parameter int unsigned OUT_SHIFT  = 15
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  trace_bin_t         in_data,
  output logic               res_valid,
  input  logic               res_ready,
  output logic signed [FX_W-1:0] result
);
  localparam int unsigned BW    = $clog2(NB + 1);
  localparam int unsigned ACC_W = TR_W + ENV_W + 1 + $clog2(NB) + 1;
  localparam int FX_MAX = (1 <<< (FX_W - 1)) - 1;
  localparam int FX_MIN = -(1 <<< (FX_W - 1));

  // ---- configuration: envelope memory and readout duration ----
  logic signed [ENV_W-1:0] env_i [NB];
  logic signed [ENV_W-1:0] env_q [NB];
  logic [BW-1:0] duration;

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.region == ENV_REGION &&
        int'(cfg.offset) / ENV_STRIDE == int'(QIDX) &&
        int'(cfg.offset) % ENV_STRIDE < int'(NB)) begin
      env_i[int'(cfg.offset) % ENV_STRIDE] <= cfg.data[ENV_W-1:0];
      env_q[int'(cfg.offset) % ENV_STRIDE] <= cfg.data[16 +: ENV_W];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) duration <= BW'(NB);
    else if (cfg.we && cfg.region == CFG_DURATION && cfg.offset == 12'(QIDX)) begin
      if (cfg.data == 0)            duration <= BW'(1);
      else if (cfg.data > 32'(NB))  duration <= BW'(NB);
      else                          duration <= BW'(cfg.data);
    end
  end

  // ---- MAC ----
  logic                    take;
  logic [BW-1:0]           bin_idx, bin_now;
  logic signed [ACC_W-1:0] acc, acc_next, prod;
  logic [$clog2(NB)-1:0]   env_idx;

  assign take    = in_valid && in_ready;
  assign bin_now = in_data.first ? '0 : bin_idx;
  assign env_idx = (bin_now < BW'(NB)) ? bin_now[$clog2(NB)-1:0] : '0;
  assign prod    = ACC_W'(env_i[env_idx]) * ACC_W'(in_data.i) +
                   ACC_W'(env_q[env_idx]) * ACC_W'(in_data.q);
  assign acc_next = (bin_now == '0 ? '0 : acc) + prod;

  function automatic logic signed [FX_W-1:0] scale(logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    s = a >>> OUT_SHIFT;
    if (s > ACC_W'(FX_MAX))      return FX_W'(FX_MAX);
    else if (s < ACC_W'(FX_MIN)) return FX_W'(FX_MIN);
    else                         return s[FX_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bin_idx   <= BW'(NB);
      acc       <= '0;
      res_valid <= 1'b0;
      result    <= '0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (take) begin
        if (bin_now < duration) acc <= acc_next;
        if (bin_now == duration - 1'b1) begin
          res_valid <= 1'b1;
          result    <= scale(acc_next);
        end
        if (bin_now < BW'(NB)) bin_idx <= bin_now + 1'b1;
      end
    end
  end

  assign in_ready = !(in_data.first && res_valid);

  a_no_result_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
      (res_valid && !res_ready) |=> res_valid);

endmodule
