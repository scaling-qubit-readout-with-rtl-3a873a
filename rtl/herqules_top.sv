// herqules_top: hardware qubit-state discriminator for one frequency-
// multiplexed group of N_QUBITS qubits (matched filters, relaxation matched
// filters and a small neural network, "MF-RMF-NN").
//
// Data path, as in the design's block diagram:
//   ADC samples -> data_buffer -> N demodulators (one per qubit tone)
//     -> per qubit: matched filter (MF) and relaxation matched filter (RMF),
//        both fed the same demodulated trace
//     -> fnn_small on the 2N filter outputs -> N-bit basis state.
// The ADC itself is outside this module: its samples arrive on adc_valid /
// adc_data, one per clock at most, with `first` flagging the first sample of
// each readout trace. All trained values (oscillator tables and steps, MF and
// RMF envelopes, per-qubit readout durations, network weights) are written
// through `cfg` before use.
//
// Flow control: the buffer feeds all demodulators at once and a sample
// moves only when every demodulator can take it. A demodulator stalls while
// its finished bin is not taken; a filter refuses the first bin of a new
// trace while its previous result is still waiting for the network; the
// network takes the 2N results together once all are valid and it is idle
// with its previous state taken (state_ready). Back-pressure from the output
// therefore reaches the buffer, which drops ADC samples (and raises
// `overflow`) only when it is full. The handshakes and the buffer policy are
// this design's choices; the paper describes only the data path.
//
// Timing with the defaults (500 samples per 1 us trace, 25 per bin), when
// nothing stalls: the buffer, the demodulator and the filter each add one
// cycle, and the network takes 14, so state_valid rises 17 cycles after the
// clock edge that writes the last sample of the integrated window into the
// buffer. With a shortened readout duration the filters finish, and the
// state is ready, as soon as the shortened window has been integrated.
module herqules_top
  import herq_pkg::*;
#(
  parameter int unsigned NQ        = N_QUBITS,
  parameter int unsigned BUF_DEPTH = 512,
  parameter int unsigned SPB       = SAMPLES_PER_BIN,
  parameter int unsigned NB        = N_BINS,
  parameter int unsigned REUSE     = REUSE_FACTOR
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_wr_t       cfg,
  // ADC sample stream (the ADC cannot be stalled)
  input  logic          adc_valid,
  input  adc_sample_t   adc_data,
  // discriminated basis state of the group
  output logic          state_valid,
  input  logic          state_ready,
  output logic [NQ-1:0] state,
  output logic signed [FX_W-1:0] max_logit,
  // buffer status
  input  logic          clear_ovf,
  output logic          overflow,
  output logic [31:0]   drop_count,
  output logic [$clog2(BUF_DEPTH+1)-1:0] buf_level
);
  // ---- data buffer ----
  logic        buf_valid, buf_ready;
  adc_sample_t buf_data;

  data_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .in_valid(adc_valid), .in_data(adc_data),
    .out_valid(buf_valid), .out_ready(buf_ready), .out_data(buf_data),
    .clear_ovf, .overflow, .drop_count, .level(buf_level));

  // ---- per-qubit demodulation and filtering ----
  logic [NQ-1:0] dm_in_ready, dm_out_valid, dm_out_ready;
  trace_bin_t    dm_out [NQ];
  logic [NQ-1:0] mf_in_ready, rmf_in_ready, mf_res_valid, rmf_res_valid;
  logic signed [FX_W-1:0] feat [2*NQ];
  logic          fire, all_res, fnn_in_ready;

  assign buf_ready = &dm_in_ready;
  assign fire      = buf_valid && buf_ready;

  for (genvar q = 0; q < NQ; q++) begin : g_qubit
    demodulator #(.QIDX(q), .SPB(SPB)) u_demod (
      .clk, .rst_n, .cfg,
      .in_valid(fire), .in_ready(dm_in_ready[q]), .in_data(buf_data),
      .out_valid(dm_out_valid[q]), .out_ready(dm_out_ready[q]),
      .out_data(dm_out[q]));

    assign dm_out_ready[q] = mf_in_ready[q] && rmf_in_ready[q];

    matched_filter #(.QIDX(q), .ENV_REGION(CFG_MF_ENV), .NB(NB)) u_mf (
      .clk, .rst_n, .cfg,
      .in_valid(dm_out_valid[q] && rmf_in_ready[q]), .in_ready(mf_in_ready[q]),
      .in_data(dm_out[q]),
      .res_valid(mf_res_valid[q]), .res_ready(all_res && fnn_in_ready),
      .result(feat[q]));

    matched_filter #(.QIDX(q), .ENV_REGION(CFG_RMF_ENV), .NB(NB)) u_rmf (
      .clk, .rst_n, .cfg,
      .in_valid(dm_out_valid[q] && mf_in_ready[q]), .in_ready(rmf_in_ready[q]),
      .in_data(dm_out[q]),
      .res_valid(rmf_res_valid[q]), .res_ready(all_res && fnn_in_ready),
      .result(feat[NQ + q]));
  end

  assign all_res = (&mf_res_valid) && (&rmf_res_valid);

  // ---- neural network ----
  fnn_small #(.NIN(2 * NQ), .NH1(2 * NQ), .NH2(4 * NQ), .NOUT(2 ** NQ),
              .REUSE(REUSE)) u_fnn (
    .clk, .rst_n, .cfg,
    .in_valid(all_res), .in_ready(fnn_in_ready), .features(feat),
    .out_valid(state_valid), .out_ready(state_ready), .state(state),
    .max_logit(max_logit));

endmodule
