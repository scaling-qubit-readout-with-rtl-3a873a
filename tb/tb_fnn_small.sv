// tb_fnn_small: self-checking test of the 10-10-20-32 readout network.
//
// Random weights and biases are loaded into two instances, one with the
// default reuse factor (4) and one with reuse factor 64 (every neuron then
// uses a single multiplier). For random feature vectors the testbench
// computes the network in plain integer arithmetic (Q8.8, ReLU on hidden
// layers, saturation to 16 bits, argmax with the lowest index winning ties)
// and compares the chosen state and its logit. It checks the latency of both
// instances from input handshake to out_valid, and that a new input is
// refused while a result waits to be taken. Inputs are driven on the falling
// clock edge.
module tb_fnn_small;
  import herq_pkg::*;
  localparam int NIN = N_FEAT, NH1 = N_H1, NH2 = N_H2, NOUT = N_CLASSES;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg = '0;
  logic in_valid = 1'b0, out_ready = 1'b1;
  logic signed [FX_W-1:0] features [NIN];
  logic in_ready_a, out_valid_a, in_ready_b, out_valid_b;
  logic [4:0] state_a, state_b;
  logic signed [FX_W-1:0] logit_a, logit_b;
  int checks = 0, failures = 0;

  fnn_small dut_a (.clk, .rst_n, .cfg, .in_valid, .in_ready(in_ready_a), .features,
                   .out_valid(out_valid_a), .out_ready, .state(state_a), .max_logit(logit_a));
  fnn_small #(.REUSE(64)) dut_b (.clk, .rst_n, .cfg, .in_valid, .in_ready(in_ready_b),
                   .features, .out_valid(out_valid_b), .out_ready, .state(state_b),
                   .max_logit(logit_b));

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

  int w1 [NH1][NIN+1], w2 [NH2][NH1+1], w3 [NOUT][NH2+1];
  int x [NIN], h1 [NH1], h2 [NH2], lo [NOUT];

  function automatic int act(longint a, bit relu);
    longint s;
    s = a >>> FX_FRAC;
    if (relu && s < 0) return 0;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  task automatic reference(output int st, output int best);
    for (int n = 0; n < NH1; n++) begin
      longint a = longint'(w1[n][NIN]) <<< FX_FRAC;
      for (int i = 0; i < NIN; i++) a += longint'(w1[n][i]) * x[i];
      h1[n] = act(a, 1'b1);
    end
    for (int n = 0; n < NH2; n++) begin
      longint a = longint'(w2[n][NH1]) <<< FX_FRAC;
      for (int i = 0; i < NH1; i++) a += longint'(w2[n][i]) * h1[i];
      h2[n] = act(a, 1'b1);
    end
    for (int n = 0; n < NOUT; n++) begin
      longint a = longint'(w3[n][NH2]) <<< FX_FRAC;
      for (int i = 0; i < NH2; i++) a += longint'(w3[n][i]) * h2[i];
      lo[n] = act(a, 1'b0);
    end
    st = 0;
    best = lo[0];
    for (int n = 1; n < NOUT; n++) if (lo[n] > best) begin best = lo[n]; st = n; end
  endtask

  function automatic int rnd(int lim);
    return int'($urandom_range(0, 2 * lim)) - lim;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat_a = -1, lat_b = -1;
    for (int i = 0; i < NIN; i++) features[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // weights within +-1.0, biases within +-0.5 (Q8.8)
    for (int n = 0; n < NH1; n++) for (int i = 0; i <= NIN; i++) begin
      w1[n][i] = (i == NIN) ? rnd(128) : rnd(256);
      cfg_write(CFG_FNN_L1, n * (NIN + 1) + i, 32'(w1[n][i]));
    end
    for (int n = 0; n < NH2; n++) for (int i = 0; i <= NH1; i++) begin
      w2[n][i] = (i == NH1) ? rnd(128) : rnd(256);
      cfg_write(CFG_FNN_L2, n * (NH1 + 1) + i, 32'(w2[n][i]));
    end
    for (int n = 0; n < NOUT; n++) for (int i = 0; i <= NH2; i++) begin
      w3[n][i] = (i == NH2) ? rnd(128) : rnd(256);
      cfg_write(CFG_FNN_L3, n * (NH2 + 1) + i, 32'(w3[n][i]));
    end
    for (int v = 0; v < 200; v++) begin
      int st, best, c0;
      bit done_a, done_b;
      for (int i = 0; i < NIN; i++) x[i] = rnd(v < 100 ? 1024 : 20000);
      reference(st, best);
      @(negedge clk);
      for (int i = 0; i < NIN; i++) features[i] = 16'(x[i]);
      in_valid = 1'b1;
      #0.1;
      check(in_ready_a && in_ready_b, "idle network ready");
      @(posedge clk);
      c0 = cyc;
      @(negedge clk);
      in_valid = 1'b0;
      done_a = 0; done_b = 0;
      out_ready = 1'b0;
      while (!(done_a && done_b)) begin
        @(posedge clk);
        #0.1;
        if (out_valid_a && !done_a) begin
          done_a = 1;
          if (lat_a < 0) lat_a = cyc - c0;
          check(cyc - c0 == lat_a, "constant latency (RF 4)");
          check(int'(state_a) == st && int'(logit_a) == best,
                $sformatf("RF4 state %0d/%0d logit %0d/%0d", state_a, st, logit_a, best));
        end
        if (out_valid_b && !done_b) begin
          done_b = 1;
          if (lat_b < 0) lat_b = cyc - c0;
          check(cyc - c0 == lat_b, "constant latency (RF 64)");
          check(int'(state_b) == st && int'(logit_b) == best,
                $sformatf("RF64 state %0d/%0d logit %0d/%0d", state_b, st, logit_b, best));
        end
      end
      // result waiting: a new input is refused
      @(negedge clk);
      in_valid = 1'b1;
      #0.1;
      check(!in_ready_a && !in_ready_b, "refuse input while result waits");
      in_valid = 1'b0;
      out_ready = 1'b1;
      @(posedge clk);
    end
    $display("latency RF4 = %0d cycles, RF64 = %0d cycles", lat_a, lat_b);
    check(lat_a == 14, "RF4 latency 14 cycles");
    check(lat_b == 1 + NIN + NH1 + NH2 + 1, "RF64 latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
