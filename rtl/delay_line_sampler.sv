// delay_line_sampler: BEHAVIOURAL MODEL (not synthesizable) of the delay
// line and DFF row of the metastability random bit generator.
//
// In silicon the global clock is sent down a chain of short routing
// segments, each adding a delay DELTA_PS (about 25 ps), and every segment
// output is sampled by a DFF clocked by the same global clock.  Taps whose
// delayed edge lands far from the sampling edge read a constant value; the
// one or two taps whose edge coincides with it, within the clock jitter, go
// metastable and resolve at random.  Such a line has to be placed and
// routed by hand for one FPGA, so it cannot be written as portable RTL;
// this model reproduces its behaviour at cycle level.
//
// Model: tap i sees the clock edge delayed by OFFSET_PS + i*DELTA_PS.  Each
// cycle a common jitter, uniform in [-JITTER_PS, JITTER_PS], plus a small
// per-DFF noise, uniform in [-NOISE_PS, NOISE_PS], is added; the DFF reads 1
// when the resulting position lies in the high half of the PERIOD_PS clock.
// DELTA_PS is the paper's value and PERIOD_PS matches a 200 MHz clock; the
// tap count, offset, jitter and noise are this model's own choices.
//
// Interface: clk in, taps[N_TAPS] out, updated on every rising clk edge.
module delay_line_sampler #(
  parameter int unsigned N_TAPS    = 128,
  parameter int unsigned DELTA_PS  = 25,
  parameter int unsigned PERIOD_PS = 5000,
  parameter int unsigned OFFSET_PS = 1200,
  parameter int unsigned JITTER_PS = 20,
  parameter int unsigned NOISE_PS  = 4
) (
  input  logic              clk,
  output logic [N_TAPS-1:0] taps
);

  always_ff @(posedge clk) begin
    int jit;
    int pos;
    jit = int'($urandom_range(2 * JITTER_PS)) - int'(JITTER_PS);
    for (int i = 0; i < int'(N_TAPS); i++) begin
      pos = int'(OFFSET_PS + i * DELTA_PS) + jit
          + int'($urandom_range(2 * NOISE_PS)) - int'(NOISE_PS);
      pos = (pos + 4 * int'(PERIOD_PS)) % int'(PERIOD_PS);
      taps[i] <= (pos >= int'(PERIOD_PS / 2));
    end
  end

endmodule
