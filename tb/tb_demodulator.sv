// tb_demodulator: self-checking test of one qubit's demodulator.
//
// The oscillator table is filled with a sampled cosine/sine, the phase step
// set to a chosen intermediate frequency, and a multiplexed signal made of
// this qubit's tone (known amplitude and phase) plus an unrelated tone and
// noise is streamed in. Every output bin is compared with a reference that
// redoes the mixing and averaging in plain integer arithmetic, and the
// average over a trace is compared with the tone's amplitude and phase.
// Writes aimed at another qubit must not disturb the unit. The test also
// stalls the output at random to check that no sample is lost, and checks
// the bin count, the first-bin flag and the one-cycle output latency.
// Inputs are driven on the falling clock edge.
module tb_demodulator;
  import herq_pkg::*;
  localparam int unsigned QIDX = 2;
  localparam int unsigned SPB  = SAMPLES_PER_BIN;
  localparam int unsigned BINS = N_BINS;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  adc_sample_t in_data = '0;
  trace_bin_t out_data;
  int checks = 0, failures = 0;

  demodulator #(.QIDX(QIDX)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic cfg_write(input cfg_region_e r, input int off, input logic [31:0] d);
    @(negedge clk);
    cfg = '{we: 1'b1, region: r, offset: 12'(off), data: d};
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  int cos_t [256], sin_t [256];
  int unsigned step;
  int si [$], sq [$];
  int exp_i [$], exp_q [$];
  bit exp_first [$];

  // one trace of SPB*BINS samples and its expected bins
  task automatic make_trace(input real amp, input real theta);
    longint acc_i, acc_q;
    int unsigned ph;
    si.delete(); sq.delete();
    ph = 0;
    acc_i = 0; acc_q = 0;
    for (int n = 0; n < SPB * BINS; n++) begin
      real w, x_i, x_q;
      int ii, qq, c, s;
      w = 2.0 * PI * real'(step) / real'(1 << PH_W) * n;
      x_i = amp * $cos(w + theta) + 900.0 * $cos(0.37 * n) + real'($urandom_range(0, 200)) - 100.0;
      x_q = amp * $sin(w + theta) + 900.0 * $sin(0.37 * n) + real'($urandom_range(0, 200)) - 100.0;
      ii = int'(x_i); qq = int'(x_q);
      si.push_back(ii); sq.push_back(qq);
      c = cos_t[ph >> (PH_W - LO_AW)];
      s = sin_t[ph >> (PH_W - LO_AW)];
      acc_i += longint'(ii) * c + longint'(qq) * s;
      acc_q += longint'(qq) * c - longint'(ii) * s;
      ph = (ph + step) % (1 << PH_W);
      if (n % SPB == SPB - 1) begin
        exp_i.push_back(sat16((acc_i >>> LO_FRAC) / longint'(SPB)));
        exp_q.push_back(sat16((acc_q >>> LO_FRAC) / longint'(SPB)));
        exp_first.push_back(n == SPB - 1);
        acc_i = 0; acc_q = 0;
      end
    end
  endtask

  // collect outputs
  int got_i [$], got_q [$];
  bit got_first [$];
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      got_i.push_back(int'(out_data.i));
      got_q.push_back(int'(out_data.q));
      got_first.push_back(out_data.first);
    end
  end

  int stalls = 0;
  task automatic stream(input bit stall);
    int n = 0;
    while (n < si.size()) begin
      bit took;
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = '{first: (n == 0), i: 14'(si[n]), q: 14'(sq[n])};
      if (stall) out_ready = ($urandom_range(0, 3) == 0);
      #0.1;
      took = in_ready;
      if (!took) stalls++;
      @(posedge clk);
      if (took) n++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static real amp [2] = '{3000.0, 5000.0};
    static real th  [2] = '{0.6, -2.2};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // oscillator table, Q1.15
    for (int k = 0; k < 256; k++) begin
      cos_t[k] = int'($floor(32767.0 * $cos(2.0 * PI * k / 256.0) + 0.5));
      sin_t[k] = int'($floor(32767.0 * $sin(2.0 * PI * k / 256.0) + 0.5));
      cfg_write(CFG_LO_TABLE, QIDX * 256 + k, {16'(sin_t[k]), 16'(cos_t[k])});
      // a write to another qubit's table must be ignored
      cfg_write(CFG_LO_TABLE, (QIDX + 1) * 256 + k, 32'h7fff_7fff);
    end
    step = 32'd1342177 % (1 << PH_W);  // about 40 MHz at 500 MS/s
    cfg_write(CFG_LO_FREQ, QIDX, step);
    cfg_write(CFG_LO_FREQ, QIDX + 1, 32'h12345);
    // two traces; the second with random output stalls
    for (int t = 0; t < 2; t++) begin
      int base;
      real mi, mq;
      base = exp_i.size();
      make_trace(amp[t], th[t]);
      stream(t == 1);
      check(got_i.size() == exp_i.size(),
            $sformatf("bin count %0d vs %0d", got_i.size(), exp_i.size()));
      mi = 0; mq = 0;
      for (int b = base; b < exp_i.size() && b < got_i.size(); b++) begin
        check(got_i[b] == exp_i[b] && got_q[b] == exp_q[b],
              $sformatf("bin %0d: got (%0d,%0d) exp (%0d,%0d)", b, got_i[b], got_q[b], exp_i[b], exp_q[b]));
        check(got_first[b] == exp_first[b], "first flag");
        mi += got_i[b]; mq += got_q[b];
      end
      mi /= BINS; mq /= BINS;
      // the qubit's own tone comes out as the constant amp*e^{j theta}
      check(rabs(mi - amp[t] * $cos(th[t])) < 0.03 * amp[t] &&
            rabs(mq - amp[t] * $sin(th[t])) < 0.03 * amp[t],
            $sformatf("tone recovery (%f,%f)", mi, mq));
    end
    check(stalls > 0, "stall exercised");
    // latency: the bin appears the cycle after its last sample is taken
    make_trace(1000.0, 0.0);
    for (int n = 0; n < SPB; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = '{first: (n == 0), i: 14'(si[n]), q: 14'(sq[n])};
      @(posedge clk);
      #0.1;
      check(out_valid == (n == SPB - 1), $sformatf("latency at sample %0d", n));
    end
    // while the bin is not taken, in_ready must be low
    @(negedge clk);
    in_valid = 1'b0;
    out_ready = 1'b0;
    #0.1;
    check(!in_ready && out_valid, "stall holds input");
    @(negedge clk);
    out_ready = 1'b1;
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
