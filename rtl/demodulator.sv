// demodulator: digital down-conversion of one qubit's tone, in 50 ns bins.
//
// Every qubit of the group is read through the same feedline at its own
// resonator frequency. This block picks one qubit out of the multiplexed
// I/Q stream: it multiplies each sample by a complex oscillator at that
// qubit's intermediate frequency, e^{-j phi},
//     di = i*cos(phi) + q*sin(phi),   dq = q*cos(phi) - i*sin(phi),
// and averages SAMPLES_PER_BIN (25) consecutive products, giving one trace
// bin per 50 ns. Mixing with a resonator-specific oscillator and averaging
// over 50 ns follow the paper; the oscillator itself is this design's choice:
// a numerically controlled oscillator whose phase accumulator (PH_W bits,
// step written per qubit) addresses a 256-entry {sin, cos} table, also
// written through the configuration port. The phase and the bin counter
// restart at the sample flagged `first`, so each trace starts at phase 0.
//
// Bin value: sum over the bin of the products, arithmetically shifted right
// by LO_FRAC (the table is Q1.15), divided by SAMPLES_PER_BIN (truncating
// toward zero) and saturated to TR_W bits.
//
// Interface: in_valid/in_ready/in_data carry ADC samples; the sample is
// taken when both valid and ready are high. in_ready is low only while a
// finished bin waits for out_ready. out_data.first marks bin 0 of a trace.
// Timing: the bin appears one cycle after its last sample is taken.
module demodulator
  import herq_pkg::*;
#(
  parameter int unsigned QIDX = 0,                // qubit this unit serves
  parameter int unsigned SPB  = SAMPLES_PER_BIN   // samples per bin
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_wr_t      cfg,
  input  logic         in_valid,
  output logic         in_ready,
  input  adc_sample_t  in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output trace_bin_t   out_data
);
  localparam int unsigned ACC_W = 2 * ADC_W + LO_W + $clog2(SPB) + 2;
  localparam int unsigned CW    = (SPB > 1) ? $clog2(SPB) : 1;
  localparam int TR_MAX = (1 <<< (TR_W - 1)) - 1;
  localparam int TR_MIN = -(1 <<< (TR_W - 1));

  // ---- configuration: phase step and oscillator table ----
  logic [PH_W-1:0] phase_step;
  logic signed [LO_W-1:0] lo_cos [2**LO_AW];
  logic signed [LO_W-1:0] lo_sin [2**LO_AW];

  always_ff @(posedge clk) begin
    if (!rst_n) phase_step <= '0;
    else if (cfg.we && cfg.region == CFG_LO_FREQ && cfg.offset == 12'(QIDX))
      phase_step <= cfg.data[PH_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.region == CFG_LO_TABLE &&
        cfg.offset[11:LO_AW] == (12-LO_AW)'(QIDX)) begin
      lo_cos[cfg.offset[LO_AW-1:0]] <= cfg.data[LO_W-1:0];
      lo_sin[cfg.offset[LO_AW-1:0]] <= cfg.data[16 +: LO_W];
    end
  end

  // ---- mixer ----
  logic              take;
  logic [PH_W-1:0]   phase, phase_now;
  logic [LO_AW-1:0]  lo_idx;
  logic signed [LO_W-1:0] c, s;
  logic signed [ACC_W-1:0] mix_i, mix_q;

  assign take      = in_valid && in_ready;
  assign phase_now = in_data.first ? '0 : phase;
  assign lo_idx    = phase_now[PH_W-1 -: LO_AW];
  assign c         = lo_cos[lo_idx];
  assign s         = lo_sin[lo_idx];

  always_comb begin
    mix_i = ACC_W'(in_data.i) * ACC_W'(c) + ACC_W'(in_data.q) * ACC_W'(s);
    mix_q = ACC_W'(in_data.q) * ACC_W'(c) - ACC_W'(in_data.i) * ACC_W'(s);
  end

  // ---- boxcar average over one bin ----
  logic [CW-1:0]           cnt, cnt_now;
  logic signed [ACC_W-1:0] acc_i, acc_q, sum_i, sum_q;
  logic                    bin_first, bin_first_now;

  assign cnt_now       = in_data.first ? '0 : cnt;
  assign bin_first_now = in_data.first ? 1'b1 : bin_first;
  assign sum_i         = (cnt_now == '0 ? '0 : acc_i) + mix_i;
  assign sum_q         = (cnt_now == '0 ? '0 : acc_q) + mix_q;

  function automatic logic signed [TR_W-1:0] to_bin(logic signed [ACC_W-1:0] sum);
    logic signed [ACC_W-1:0] avg;
    avg = (sum >>> LO_FRAC) / $signed(ACC_W'(SPB));
    if (avg > ACC_W'(TR_MAX))      return TR_W'(TR_MAX);
    else if (avg < ACC_W'(TR_MIN)) return TR_W'(TR_MIN);
    else                           return avg[TR_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase     <= '0;
      cnt       <= '0;
      acc_i     <= '0;
      acc_q     <= '0;
      bin_first <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        phase <= phase_now + phase_step;
        acc_i <= sum_i;
        acc_q <= sum_q;
        if (cnt_now == CW'(SPB - 1)) begin
          cnt            <= '0;
          bin_first      <= 1'b0;
          out_valid      <= 1'b1;
          out_data.first <= bin_first_now;
          out_data.i     <= to_bin(sum_i);
          out_data.q     <= to_bin(sum_q);
        end else begin
          cnt       <= cnt_now + 1'b1;
          bin_first <= bin_first_now;
        end
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

endmodule
