// tb_matched_filter: self-checking test of the MF/RMF dot-product unit.
//
// An envelope is trained in the testbench the way the paper describes,
// env = mean(Tr0 - Tr1) / var(Tr0 - Tr1) per bin and per component, from
// synthetic ground and excited traces, scaled to 16-bit integers and
// written through the configuration port. Then traces are streamed in and
// every result is compared with an integer reference dot product (with the
// unit's shift and saturation). Also checked: ground traces score above
// excited ones; a shortened readout duration integrates only its first bins
// and finishes earlier (result one cycle after bin duration-1); the first
// bin of a new trace waits while the previous result is not taken; writes
// to the RMF region or another qubit do not reach this instance.
// Inputs are driven on the falling clock edge.
module tb_matched_filter;
  import herq_pkg::*;
  localparam int unsigned QIDX = 1;
  localparam int unsigned NB = N_BINS;
  localparam int unsigned SHIFT = 15;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic in_valid = 1'b0, in_ready, res_valid, res_ready = 1'b1;
  trace_bin_t in_data = '0;
  logic signed [FX_W-1:0] result;
  int checks = 0, failures = 0;

  matched_filter #(.QIDX(QIDX), .ENV_REGION(CFG_MF_ENV), .NB(NB), .OUT_SHIFT(SHIFT)) dut (.*);

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

  int env_i [NB], env_q [NB];
  int tr_i [NB], tr_q [NB];

  // synthetic trace: ground stays near (2000, 500), excited moves to
  // (-1500, 1500) with a rise over the first bins; Gaussian-ish noise
  task automatic gen_trace(input bit excited);
    for (int t = 0; t < NB; t++) begin
      real rise, ni, nq;
      rise = (t < 4) ? real'(t + 1) / 5.0 : 1.0;
      ni = real'($urandom_range(0, 800)) + real'($urandom_range(0, 800)) - 800.0;
      nq = real'($urandom_range(0, 800)) + real'($urandom_range(0, 800)) - 800.0;
      tr_i[t] = int'((excited ? -1500.0 : 2000.0) * rise + ni);
      tr_q[t] = int'((excited ? 1500.0 : 500.0) * rise + nq);
    end
  endtask

  function automatic int expected(input int dur);
    longint acc, s;
    acc = 0;
    for (int t = 0; t < dur; t++)
      acc += longint'(env_i[t]) * tr_i[t] + longint'(env_q[t]) * tr_q[t];
    s = acc >>> SHIFT;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  // stream one trace; returns cycle of the result and its value
  task automatic run_trace(output int res, output int res_cyc, output int last_bin_cyc,
                           input int dur);
    int t = 0;
    res_cyc = -1;
    last_bin_cyc = -1;
    while (t < NB) begin
      bit took;
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = '{first: (t == 0), i: 16'(tr_i[t]), q: 16'(tr_q[t])};
      #0.1;
      took = in_ready;
      @(posedge clk);
      if (took) begin
        if (t == dur - 1) last_bin_cyc = cyc;
        t++;
      end
      #0.1;
      if (res_valid && res_cyc < 0) begin
        res_cyc = cyc;
        res = int'(result);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real d_i [NB][200], d_q [NB][200];
    int r, rc, lc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---- train the envelope: mean / var of (Tr0 - Tr1) ----
    for (int n = 0; n < 200; n++) begin
      int g_i [NB], g_q [NB];
      gen_trace(1'b0);
      g_i = tr_i; g_q = tr_q;
      gen_trace(1'b1);
      for (int t = 0; t < NB; t++) begin
        d_i[t][n] = real'(g_i[t] - tr_i[t]);
        d_q[t][n] = real'(g_q[t] - tr_q[t]);
      end
    end
    for (int t = 0; t < NB; t++) begin
      real m_i, m_q, v_i, v_q;
      m_i = 0; m_q = 0; v_i = 0; v_q = 0;
      for (int n = 0; n < 200; n++) begin m_i += d_i[t][n]; m_q += d_q[t][n]; end
      m_i /= 200.0; m_q /= 200.0;
      for (int n = 0; n < 200; n++) begin
        v_i += (d_i[t][n] - m_i) ** 2; v_q += (d_q[t][n] - m_q) ** 2;
      end
      v_i /= 200.0; v_q /= 200.0;
      // scale so that the largest weight uses most of 16 bits
      env_i[t] = int'(m_i / v_i * 2.0e5);
      env_q[t] = int'(m_q / v_q * 2.0e5);
      if (env_i[t] > 32767) env_i[t] = 32767;
      if (env_i[t] < -32768) env_i[t] = -32768;
      if (env_q[t] > 32767) env_q[t] = 32767;
      if (env_q[t] < -32768) env_q[t] = -32768;
      cfg_write(CFG_MF_ENV, QIDX * ENV_STRIDE + t, {16'(env_q[t]), 16'(env_i[t])});
      // must be ignored: RMF region and another qubit's MF
      cfg_write(CFG_RMF_ENV, QIDX * ENV_STRIDE + t, 32'h1234_4321);
      cfg_write(CFG_MF_ENV, (QIDX + 1) * ENV_STRIDE + t, 32'h1234_4321);
    end
    // ---- full-length traces ----
    begin
      int n_sep = 0;
      for (int n = 0; n < 20; n++) begin
        int r0, r1;
        gen_trace(1'b0);
        run_trace(r0, rc, lc, NB);
        check(r0 == expected(NB), $sformatf("ground result %0d exp %0d", r0, expected(NB)));
        check(rc == lc + 1, $sformatf("result latency %0d", rc - lc));
        gen_trace(1'b1);
        run_trace(r1, rc, lc, NB);
        check(r1 == expected(NB), $sformatf("excited result %0d exp %0d", r1, expected(NB)));
        if (r0 > r1) n_sep++;
      end
      $display("envelope bin 5: %0d %0d", env_i[5], env_q[5]);
    check(n_sep == 20, $sformatf("ground above excited in %0d of 20", n_sep));
    end
    // ---- shortened readout durations (750 ns and 500 ns) ----
    for (int k = 0; k < 2; k++) begin
      int dur;
      dur = (k == 0) ? 15 : 10;
      cfg_write(CFG_DURATION, QIDX, dur);
      cfg_write(CFG_DURATION, QIDX + 1, 3);  // another qubit
      gen_trace(1'b1);
      run_trace(r, rc, lc, dur);
      check(r == expected(dur), $sformatf("dur %0d result %0d exp %0d", dur, r, expected(dur)));
      check(lc >= 0 && rc == lc + 1, $sformatf("dur %0d latency", dur));
    end
    cfg_write(CFG_DURATION, QIDX, NB);
    // ---- a new trace waits while the result is not taken ----
    @(negedge clk);
    res_ready = 1'b0;
    gen_trace(1'b0);
    run_trace(r, rc, lc, NB);
    @(negedge clk);
    in_valid = 1'b1;
    in_data = '{first: 1'b1, i: 16'sd5, q: 16'sd5};
    #0.1;
    check(res_valid && !in_ready, "first bin refused while result waits");
    @(negedge clk);
    res_ready = 1'b1;
    @(posedge clk);
    #0.1;
    check(in_ready && !res_valid, "accepted once taken");
    @(negedge clk);
    in_valid = 1'b0;
    res_ready = 1'b1;
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
