// tb_data_buffer: self-checking test of the ADC sample buffer.
//
// A reference queue models the FIFO. The test pushes a stream of random
// samples while the reader takes words at random, then blocks the reader
// until the buffer is full and checks that further samples are dropped and
// counted (overflow), that clear_ovf clears the flag, and that every word
// read matches the reference order. It also checks the one-cycle write-to-
// read latency.
module tb_data_buffer;
  import herq_pkg::*;
  localparam int unsigned DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_ready = 1'b0, clear_ovf = 1'b0;
  adc_sample_t in_data = '0, out_data;
  logic out_valid, overflow;
  logic [31:0] drop_count;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  adc_sample_t ref_q [$];
  int expected_drops = 0;

  data_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #1 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model and read-side checking
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(ref_q.size() > 0 && out_data == ref_q[0], "read data order");
      if (ref_q.size() > 0) void'(ref_q.pop_front());
    end
    if (in_valid) begin
      if (ref_q.size() < DEPTH || (out_valid && out_ready)) ref_q.push_back(in_data);
      else expected_drops++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(!out_valid && level == 0 && !overflow, "empty after reset");
    // latency: write in one cycle, readable in the next
    in_valid <= 1'b1;
    in_data  <= '{first: 1'b1, i: 14'sd100, q: -14'sd7};
    @(posedge clk);
    in_valid <= 1'b0;
    #0.1;
    check(out_valid && out_data.i == 14'sd100 && out_data.q == -14'sd7 && out_data.first,
          "one-cycle latency");
    // random traffic
    for (int n = 0; n < 2000; n++) begin
      in_valid  <= ($urandom_range(0, 3) != 0);
      in_data   <= '{first: 1'($urandom), i: 14'($urandom), q: 14'($urandom)};
      out_ready <= ($urandom_range(0, 2) != 0);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    out_ready <= 1'b0;
    @(posedge clk);
    // overflow: reader blocked, push DEPTH + 5 samples
    out_ready <= 1'b1;
    while (out_valid) @(posedge clk);
    out_ready <= 1'b0;
    clear_ovf <= 1'b1;
    @(posedge clk);
    clear_ovf <= 1'b0;
    expected_drops = 0;
    for (int n = 0; n < DEPTH + 5; n++) begin
      in_valid <= 1'b1;
      in_data  <= '{first: 1'b0, i: 14'(n), q: 14'(-n)};
      @(posedge clk);
    end
    in_valid <= 1'b0;
    @(posedge clk);
    check(level == DEPTH, "full level");
    check(overflow, "overflow flag set");
    check(drop_count == 5 && expected_drops == 5, $sformatf("drop count %0d", drop_count));
    // drain and compare
    out_ready <= 1'b1;
    repeat (DEPTH + 2) @(posedge clk);
    check(!out_valid && ref_q.size() == 0, "drained");
    clear_ovf <= 1'b1;
    @(posedge clk);
    clear_ovf <= 1'b0;
    @(posedge clk);
    check(!overflow && drop_count == 0, "overflow cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
