// tb_relaxation_filter: self-checking test of matched_filter used as a
// relaxation matched filter (RMF).
//
// The RMF envelope is trained in the testbench as the paper prescribes,
// mean(Tr_relax - Tr0) / var(Tr_relax - Tr0) per bin and component, from
// synthetic ground traces and traces of an excited qubit that relaxes at a
// random bin between 3 and 16. The instance loads its envelope from the
// RMF region; writes to the MF region of the same qubit must not reach it.
// Every result is compared with an integer reference dot product, and
// relaxation traces must score above ground traces in at least 90% of pairs.
// Inputs are driven on the falling clock edge.
module tb_relaxation_filter;
  import herq_pkg::*;
  localparam int unsigned QIDX = 3;
  localparam int unsigned NB = N_BINS;
  localparam int unsigned SHIFT = 15;
  localparam int NTRAIN = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic in_valid = 1'b0, in_ready, res_valid, res_ready = 1'b1;
  trace_bin_t in_data = '0;
  logic signed [FX_W-1:0] result;
  int checks = 0, failures = 0;

  matched_filter #(.QIDX(QIDX), .ENV_REGION(CFG_RMF_ENV)) dut (.*);

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

  int env_i [NB], env_q [NB];
  int tr_i [NB], tr_q [NB];

  // ground near (2000, 500); excited near (-1500, 1500) until bin `relax`
  task automatic gen_trace(input int relax);
    for (int t = 0; t < NB; t++) begin
      real ni, nq;
      bit exc;
      exc = (t < relax);
      ni = real'($urandom_range(0, 1000)) + real'($urandom_range(0, 1000)) - 1000.0;
      nq = real'($urandom_range(0, 1000)) + real'($urandom_range(0, 1000)) - 1000.0;
      tr_i[t] = int'((exc ? -1500.0 : 2000.0) + ni);
      tr_q[t] = int'((exc ? 1500.0 : 500.0) + nq);
    end
  endtask

  function automatic int expected();
    longint acc, s;
    acc = 0;
    for (int t = 0; t < NB; t++)
      acc += longint'(env_i[t]) * tr_i[t] + longint'(env_q[t]) * tr_q[t];
    s = acc >>> SHIFT;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  task automatic run_trace(output int res);
    for (int t = 0; t < NB; t++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = '{first: (t == 0), i: 16'(tr_i[t]), q: 16'(tr_q[t])};
    end
    @(negedge clk);
    in_valid = 1'b0;
    #0.1;
    res = res_valid ? int'(result) : 32'h7fff_ffff;
    @(negedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real d_i [NB][NTRAIN], d_q [NB][NTRAIN];
    int n_sep;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NTRAIN; n++) begin
      int g_i [NB], g_q [NB];
      gen_trace(0);
      g_i = tr_i; g_q = tr_q;
      gen_trace(int'($urandom_range(3, 16)));
      for (int t = 0; t < NB; t++) begin
        d_i[t][n] = real'(tr_i[t] - g_i[t]);
        d_q[t][n] = real'(tr_q[t] - g_q[t]);
      end
    end
    for (int t = 0; t < NB; t++) begin
      real m_i, m_q, v_i, v_q;
      m_i = 0; m_q = 0; v_i = 0; v_q = 0;
      for (int n = 0; n < NTRAIN; n++) begin m_i += d_i[t][n]; m_q += d_q[t][n]; end
      m_i /= NTRAIN; m_q /= NTRAIN;
      for (int n = 0; n < NTRAIN; n++) begin
        v_i += (d_i[t][n] - m_i) ** 2; v_q += (d_q[t][n] - m_q) ** 2;
      end
      v_i /= NTRAIN; v_q /= NTRAIN;
      env_i[t] = int'(m_i / v_i * 2.0e5);
      env_q[t] = int'(m_q / v_q * 2.0e5);
      cfg_write(CFG_RMF_ENV, QIDX * ENV_STRIDE + t, {16'(env_q[t]), 16'(env_i[t])});
      cfg_write(CFG_MF_ENV, QIDX * ENV_STRIDE + t, 32'h0bad_0bad);
    end
    n_sep = 0;
    for (int n = 0; n < 40; n++) begin
      int r0, r1;
      gen_trace(0);
      run_trace(r0);
      check(r0 == expected(), $sformatf("ground result %0d exp %0d", r0, expected()));
      gen_trace(int'($urandom_range(3, 16)));
      run_trace(r1);
      check(r1 == expected(), $sformatf("relaxation result %0d exp %0d", r1, expected()));
      if (r1 > r0) n_sep++;
    end
    check(n_sep >= 36, $sformatf("relaxation above ground in %0d of 40", n_sep));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
