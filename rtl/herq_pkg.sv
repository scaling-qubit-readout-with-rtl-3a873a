// herq_pkg: types and constants shared by the readout discriminator.
//
// The pipeline reads out one frequency-multiplexed group of N_QUBITS qubits.
// The defaults follow the five-qubit group the design is built around: a 500
// MSample/s ADC, a 1 us readout (500 samples) demodulated into 50 ns bins
// (25 samples each, 20 bins per trace), one matched filter (MF) and one
// relaxation matched filter (RMF) per qubit, and a 10-10-20-32 feed-forward
// network. Word widths and the configuration address map are this design's
// own choices; the paper gives no bit widths.
package herq_pkg;

  // ---- group and timing (paper numbers) ----
  localparam int unsigned N_QUBITS        = 5;   // qubits per multiplexed group
  localparam int unsigned SAMPLES_PER_BIN = 25;  // 50 ns at 500 MSample/s
  localparam int unsigned N_BINS          = 20;  // 1 us readout / 50 ns
  localparam int unsigned N_FEAT          = 2 * N_QUBITS;  // MF + RMF outputs
  localparam int unsigned N_H1            = 10;  // first hidden layer
  localparam int unsigned N_H2            = 20;  // second hidden layer
  localparam int unsigned N_CLASSES       = 32;  // 2^N_QUBITS basis states
  localparam int unsigned REUSE_FACTOR    = 4;   // multipliers shared 4 ways

  // ---- word widths (assumed) ----
  localparam int unsigned ADC_W  = 14;  // ADC sample, signed
  localparam int unsigned LO_W   = 16;  // oscillator sample, signed Q1.15
  localparam int unsigned LO_FRAC = 15;
  localparam int unsigned LO_AW  = 8;   // oscillator table: 256 entries
  localparam int unsigned PH_W   = 24;  // phase accumulator
  localparam int unsigned TR_W   = 16;  // demodulated trace bin, signed
  localparam int unsigned ENV_W  = 16;  // MF envelope weight, signed
  localparam int unsigned FX_W   = 16;  // FNN activations and weights, signed
  localparam int unsigned FX_FRAC = 8;  // Q8.8 fixed point in the FNN

  // ---- one ADC sample of the multiplexed readout signal ----
  typedef struct packed {
    logic                     first;  // first sample of a readout trace
    logic signed [ADC_W-1:0]  i;
    logic signed [ADC_W-1:0]  q;
  } adc_sample_t;

  // ---- one demodulated 50 ns bin of one qubit's trace ----
  typedef struct packed {
    logic                     first;  // bin 0 of a trace
    logic signed [TR_W-1:0]   i;
    logic signed [TR_W-1:0]   q;
  } trace_bin_t;

  // ---- configuration write port ----
  // Envelopes, oscillator tables and FNN weights come from offline training
  // and are written through this port before readout starts.
  typedef enum logic [3:0] {
    CFG_LO_FREQ  = 4'd0,  // offset = qubit; data[PH_W-1:0] = phase step
    CFG_LO_TABLE = 4'd1,  // offset = qubit*256 + index; data = {sin, cos}
    CFG_MF_ENV   = 4'd2,  // offset = qubit*32 + bin; data = {env_q, env_i}
    CFG_RMF_ENV  = 4'd3,  // offset = qubit*32 + bin; data = {env_q, env_i}
    CFG_DURATION = 4'd4,  // offset = qubit; data = readout length in bins
    CFG_FNN_L1   = 4'd5,  // offset = neuron*(IN+1) + input; input IN = bias
    CFG_FNN_L2   = 4'd6,
    CFG_FNN_L3   = 4'd7
  } cfg_region_e;

  typedef struct packed {
    logic         we;
    cfg_region_e  region;
    logic [11:0]  offset;
    logic [31:0]  data;
  } cfg_wr_t;

  localparam int unsigned ENV_STRIDE = 32;  // envelope words per qubit

endpackage
