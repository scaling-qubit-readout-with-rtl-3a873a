// tb_herqules_top: end-to-end test of the five-qubit readout discriminator at
// its default sizes (1 us traces of 500 samples, 20 bins, 10-10-20-32 network).
//
// The testbench plays the part of the ADC and of the offline training. It
// synthesises the multiplexed I/Q signal of five qubits, each a tone at its
// own intermediate frequency ((q+1)*20 MHz at 500 MS/s) whose phase encodes
// the qubit state (ground: 0, excited: pi/2), plus noise. A qubit prepared
// in the excited state may relax part way through the trace, after which its
// tone takes the ground-state phase.
//
// Configuration written through the port:
//  * oscillator tables (cos/sin, Q1.15) and phase steps per qubit;
//  * MF envelope, constant over the trace, along mean(Tr0 - Tr1);
//  * RMF envelope along mean(Tr_relax - Tr0), nonzero over the first five
//    bins (the part of the trace where a late relaxation still looks excited);
//  * hand-set network weights: hidden layer 1 forms, per qubit,
//    e = -MF + 2*RMF and its negation through ReLU, layer 2 copies them,
//    and logit[c] adds e+ for each bit of c set and e- for each bit clear, so
//    the argmax is the state whose bits follow the sign of e.
//
// Checks: every shot without relaxation decodes to the prepared state; a
// late relaxation (bins 8 to 14) decodes as excited (the state nres0 the
// measurement), and the shots where the MF alone would have said ground are
// counted as corrections by the RMF; when nothing stalls, state_valid rises
// 17 cycles after the clock edge that stores the last sample of the
// integrated window (it is taken at the 18th edge); a
// shortened readout for qubit 5 (10 bins) and for all qubits (15 bins)
// still decodes correctly and finishes earlier; holding state_ready low
// stalls the pipeline back to the buffer, and long enough makes the buffer
// overflow, after which a fresh shot decodes correctly again. Each of these
// mechanisms is counted and must occur at least once. Inputs are driven on
// the falling clock edge.
module tb_herqules_top;
  import herq_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam int NQ = N_QUBITS;
  localparam int SPB = SAMPLES_PER_BIN;
  localparam int NB = N_BINS;
  localparam int AMP = 1200;
  localparam int E = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic adc_valid = 1'b0, state_valid, state_ready = 1'b1, clear_ovf = 1'b0;
  adc_sample_t adc_data = '0;
  logic [NQ-1:0] state;
  logic signed [FX_W-1:0] max_logit;
  logic overflow;
  logic [31:0] drop_count;
  logic [9:0] buf_level;
  int checks = 0, failures = 0;

  herqules_top dut (.*);

  always #1 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

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

  int unsigned step [NQ];
  int cos_t [256], sin_t [256];

  // mechanism counters
  int n_shots = 0, n_relax = 0, n_rmf_rescue = 0, n_short_q5 = 0, n_short_all = 0;
  int n_stall_cycles = 0, n_overflow = 0, n_latency_checked = 0;
  always @(posedge clk) if (rst_n && dut.buf_valid && !dut.buf_ready) n_stall_cycles++;

  // results in order of arrival
  int res_state [$], res_cyc [$];
  int res_mf [$];   // MF-only decision (sign of each MF feature), packed bits
  always @(posedge clk) begin
    if (rst_n && dut.all_res && dut.fnn_in_ready) begin
      automatic int b = 0;
      for (int q = 0; q < NQ; q++) if (dut.feat[q] <= 0) b |= (1 << q);
      res_mf.push_back(b);
    end
    if (rst_n && state_valid && state_ready) begin
      res_state.push_back(int'(state));
      res_cyc.push_back(cyc);
    end
  end

  // stream one shot; relax[q] = bin at which an excited qubit relaxes (NB = never)
  // returns the cycle at which sample `win_end` was presented
  task automatic shot(input logic [NQ-1:0] prep, input int relax [NQ], input int win_end,
                      output int win_cyc);
    win_cyc = -1;
    for (int n = 0; n < SPB * NB; n++) begin
      real xi, xq;
      xi = real'($urandom_range(0, 100)) - 50.0;
      xq = real'($urandom_range(0, 100)) - 50.0;
      for (int q = 0; q < NQ; q++) begin
        real ph, th;
        ph = 2.0 * PI * real'((longint'(n) * step[q]) % (1 << PH_W)) / real'(1 << PH_W);
        th = (prep[q] && (n / SPB) < relax[q]) ? PI / 2.0 : 0.0;
        xi += AMP * $cos(ph + th);
        xq += AMP * $sin(ph + th);
      end
      @(negedge clk);
      adc_valid = 1'b1;
      adc_data = '{first: (n == 0), i: 14'(int'(xi)), q: 14'(int'(xq))};
      @(posedge clk);
      if (n == win_end) win_cyc = cyc;
    end
    @(negedge clk);
    adc_valid = 1'b0;
    n_shots++;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic wait_results(input int n);
    int guard = 0;
    while (res_state.size() < n && guard < 5000) begin
      @(posedge clk);
      guard++;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int no_relax [NQ];
    int wc;
    for (int q = 0; q < NQ; q++) no_relax[q] = NB;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- oscillators ----
    for (int k = 0; k < 256; k++) begin
      cos_t[k] = int'($floor(32767.0 * $cos(2.0 * PI * k / 256.0) + 0.5));
      sin_t[k] = int'($floor(32767.0 * $sin(2.0 * PI * k / 256.0) + 0.5));
    end
    for (int q = 0; q < NQ; q++) begin
      step[q] = int'($floor(real'(1 << PH_W) * real'(q + 1) / 25.0 + 0.5));
      cfg_write(CFG_LO_FREQ, q, step[q]);
      for (int k = 0; k < 256; k++)
        cfg_write(CFG_LO_TABLE, q * 256 + k, {16'(sin_t[k]), 16'(cos_t[k])});
    end
    // ---- MF and RMF envelopes ----
    for (int q = 0; q < NQ; q++)
      for (int t = 0; t < NB; t++) begin
        // ground bin ~ (AMP, 0), excited ~ (0, AMP): Tr0 - Tr1 ~ (+, -)
        cfg_write(CFG_MF_ENV, q * ENV_STRIDE + t, {16'(-E), 16'(E)});
        cfg_write(CFG_RMF_ENV, q * ENV_STRIDE + t,
                  (t < 5) ? {16'(E), 16'(-E)} : 32'h0);
      end
    // ---- network ----
    for (int n = 0; n < N_H1; n++)
      for (int i = 0; i <= N_FEAT; i++) begin
        automatic int w = 0;
        if (n < NQ && i == n)           w = -256;  // e = -MF + 2 RMF
        if (n < NQ && i == NQ + n)      w = 512;
        if (n >= NQ && i == n - NQ)     w = 256;   // -e
        if (n >= NQ && i == n)          w = -512;
        cfg_write(CFG_FNN_L1, n * (N_FEAT + 1) + i, 32'(w));
      end
    for (int n = 0; n < N_H2; n++)
      for (int i = 0; i <= N_H1; i++)
        cfg_write(CFG_FNN_L2, n * (N_H1 + 1) + i, 32'((n < N_H1 && i == n) ? 256 : 0));
    for (int c = 0; c < N_CLASSES; c++)
      for (int i = 0; i <= N_H2; i++) begin
        automatic int w = 0;
        if (i < NQ && ((c >> i) & 1) != 0)         w = 256;
        if (i >= NQ && i < 2 * NQ && ((c >> (i - NQ)) & 1) == 0) w = 256;
        cfg_write(CFG_FNN_L3, c * (N_H2 + 1) + i, 32'(w));
      end

    // ---- 1: clean shots, every basis state once ----
    for (int s = 0; s < 32; s++) begin
      int nres0;
      nres0 = res_state.size();
      shot(NQ'(s), no_relax, SPB * NB - 1, wc);
      wait_results(nres0 + 1);
      check(res_state.size() == nres0 + 1, $sformatf("shot %0d produced a result", s));
      if (res_state.size() == nres0 + 1) begin
        check(res_state[nres0] == s, $sformatf("state %0d decoded as %0d", s, res_state[nres0]));
        check(res_cyc[nres0] - wc == 18, $sformatf("latency %0d", res_cyc[nres0] - wc));
        n_latency_checked++;
      end
      idle(5);
    end

    // ---- 2: relaxations late in the trace ----
    for (int s = 0; s < 24; s++) begin
      int nres0, prep;
      int rl [NQ];
      prep = int'($urandom_range(1, 31));
      for (int q = 0; q < NQ; q++)
        rl[q] = (((prep >> q) & 1) != 0 && $urandom_range(0, 1) != 0) ? int'($urandom_range(8, 14)) : NB;
      nres0 = res_state.size();
      shot(NQ'(prep), rl, SPB * NB - 1, wc);
      wait_results(nres0 + 1);
      check(res_state.size() == nres0 + 1, "relaxation shot produced a result");
      if (res_state.size() == nres0 + 1) begin
        check(res_state[nres0] == prep,
              $sformatf("relaxation shot: prepared %0d decoded %0d", prep, res_state[nres0]));
        for (int q = 0; q < NQ; q++) if (rl[q] < NB) begin
          n_relax++;
          if (((res_mf[nres0] >> q) & 1) == 0 && ((res_state[nres0] >> q) & 1) != 0) n_rmf_rescue++;
        end
      end
      idle(5);
    end

    // ---- 3: shortened readout, qubit 5 at 500 ns ----
    cfg_write(CFG_DURATION, 4, 10);
    for (int s = 0; s < 4; s++) begin
      int nres0, prep;
      prep = int'($urandom_range(0, 31));
      nres0 = res_state.size();
      shot(NQ'(prep), no_relax, SPB * NB - 1, wc);
      wait_results(nres0 + 1);
      if (res_state.size() == nres0 + 1) begin
        check(res_state[nres0] == prep, $sformatf("q5 short: %0d vs %0d", res_state[nres0], prep));
        n_short_q5++;
      end else check(0, "q5 short: no result");
      idle(5);
    end
    // ---- all qubits at 750 ns: the state comes 17 cycles after sample 374 ----
    for (int q = 0; q < NQ; q++) cfg_write(CFG_DURATION, q, 15);
    for (int s = 0; s < 4; s++) begin
      int nres0, prep;
      prep = int'($urandom_range(0, 31));
      nres0 = res_state.size();
      shot(NQ'(prep), no_relax, SPB * 15 - 1, wc);
      wait_results(nres0 + 1);
      if (res_state.size() == nres0 + 1) begin
        check(res_state[nres0] == prep, $sformatf("750 ns: %0d vs %0d", res_state[nres0], prep));
        check(res_cyc[nres0] - wc == 18, $sformatf("750 ns latency %0d", res_cyc[nres0] - wc));
        n_short_all++;
      end else check(0, "750 ns: no result");
      idle(5);
    end
    for (int q = 0; q < NQ; q++) cfg_write(CFG_DURATION, q, NB);

    // ---- 4: back-pressure: state_ready held low over two shots ----
    begin
      int nres0, p1, p2;
      p1 = 5; p2 = 26;
      nres0 = res_state.size();
      @(negedge clk);
      state_ready = 1'b0;
      shot(NQ'(p1), no_relax, 0, wc);
      shot(NQ'(p2), no_relax, 0, wc);
      check(!overflow, "no overflow from a short stall");
      idle(50);
      @(negedge clk);
      state_ready = 1'b1;
      wait_results(nres0 + 2);
      check(res_state.size() == nres0 + 2, "both stalled shots produced results");
      if (res_state.size() == nres0 + 2)
        check(res_state[nres0] == p1 && res_state[nres0 + 1] == p2, "stalled shots in order");
    end
    idle(20);

    // ---- 5: overflow: state_ready low over four shots ----
    begin
      int nres0;
      @(negedge clk);
      state_ready = 1'b0;
      for (int s = 0; s < 4; s++) shot(NQ'(s), no_relax, 0, wc);
      check(overflow && drop_count > 0, $sformatf("overflow, %0d samples dropped", drop_count));
      if (overflow) n_overflow++;
      @(negedge clk);
      state_ready = 1'b1;
      clear_ovf = 1'b1;
      @(negedge clk);
      clear_ovf = 1'b0;
      idle(2000);
      check(!overflow && buf_level == 0, "drained after overflow");
      nres0 = res_state.size();
      shot(NQ'(19), no_relax, SPB * NB - 1, wc);
      wait_results(nres0 + 1);
      check(res_state.size() == nres0 + 1 && res_state[nres0] == 19, "recovery after overflow");
    end

    $display("shots=%0d relaxations=%0d rmf_corrections=%0d short_q5=%0d short_all=%0d stall_cycles=%0d overflows=%0d latency_checks=%0d",
             n_shots, n_relax, n_rmf_rescue, n_short_q5, n_short_all, n_stall_cycles, n_overflow, n_latency_checked);
    check(n_relax > 0, "relaxation mechanism exercised");
    check(n_rmf_rescue > 0, "RMF corrected at least one MF decision");
    check(n_short_q5 > 0 && n_short_all > 0, "shortened readout exercised");
    check(n_stall_cycles > 0, "stall exercised");
    check(n_overflow > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
