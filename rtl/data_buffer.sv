// data_buffer: first-in first-out buffer between the ADC and demodulation.
//
// The ADC delivers one I/Q sample per clock and cannot be stalled, so the
// input side has only a valid strobe. Samples wait here while the
// demodulators are stalled (their outputs not yet taken downstream). DEPTH
// defaults to 512 words, enough to hold a whole 1 us readout trace of 500
// samples. A sample that arrives while the buffer is full is dropped, the
// sticky `overflow` flag is set and `drop_count` is incremented; `clear_ovf`
// clears both.
//
// Interface: in_valid/in_data from the ADC; out_valid/out_ready/out_data in
// valid-ready style (a word moves when both are high; out_data is stable
// while out_valid waits). Timing: a sample written in cycle n can be read
// in cycle n+1. The buffer between ADC and demodulation is drawn in the
// design's block diagram; its depth, handshake and overflow policy are this
// design's own choices.
module data_buffer
  import herq_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  adc_sample_t  in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output adc_sample_t  out_data,
  input  logic         clear_ovf,
  output logic         overflow,
  output logic [31:0]  drop_count,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);

  adc_sample_t mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic push, pop;

  assign pop  = out_valid && out_ready;
  assign push = in_valid && (count < (AW+1)'(DEPTH) || pop);

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      overflow   <= 1'b0;
      drop_count <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (clear_ovf) begin
        overflow   <= 1'b0;
        drop_count <= '0;
      end else if (in_valid && !push) begin
        overflow   <= 1'b1;
        drop_count <= drop_count + 1'b1;
      end
    end
  end

  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign level     = count;

  // A waiting word must not change until it is taken.
  property p_stable_out;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_data));
  endproperty
  a_stable_out: assert property (p_stable_out);

  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   count <= (AW+1)'(DEPTH));

endmodule
