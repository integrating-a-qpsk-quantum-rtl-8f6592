// trng: random bit generator of the MODEM, after Fig. 4 of the link design.
//
// The global clock runs down a delay line of ~25 ps segments sampled by a
// row of DFFs (delay_line_sampler, a behavioural model of that hand-placed
// structure).  The analysis and selection controller (meta_select) finds
// the most metastable DFF; its bit seeds the composed-LFSR pseudo-random
// generator (lfsr_combiner).  Following the drawing, the controller output
// and the LFSR output are also combined at the output; the figure prints no
// gate type, and XOR is this design's choice (it keeps the output balanced
// when either input is).  Before the first selection the seed is disabled
// and only the LFSR output leaves the block.
//
// Rate: one random bit per clock, i.e. 200 Mbps at the 200 MHz clock the
// paper gives as the FPGA limit.  `rnd_bit` is registered.
//
// Interface: clk, rst_n in; rnd_bit out; sel_idx, sel_valid, reselect out
// for status.
module trng #(
  parameter int unsigned N_TAPS    = 128,
  parameter int unsigned WINDOW    = 1024,
  parameter int unsigned DELTA_PS  = 25,
  parameter int unsigned PERIOD_PS = 5000,
  parameter int unsigned OFFSET_PS = 1200,
  parameter logic [30:0] INIT0     = 31'h2A5C_39E1,
  parameter logic [28:0] INIT1     = 29'h1234_5679,
  parameter logic [22:0] INIT2     = 23'h5E_D1C3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      rnd_bit,
  output logic [$clog2(N_TAPS)-1:0] sel_idx,
  output logic                      sel_valid,
  output logic                      reselect
);

  logic [N_TAPS-1:0]      taps;
  logic                   meta_bit;
  logic [$clog2(WINDOW):0] sel_dist;
  logic                   prng_bit;

  delay_line_sampler #(
    .N_TAPS   (N_TAPS),
    .DELTA_PS (DELTA_PS),
    .PERIOD_PS(PERIOD_PS),
    .OFFSET_PS(OFFSET_PS)
  ) u_line (
    .clk (clk),
    .taps(taps)
  );

  meta_select #(
    .N_TAPS(N_TAPS),
    .WINDOW(WINDOW)
  ) u_select (
    .clk      (clk),
    .rst_n    (rst_n),
    .taps     (taps),
    .meta_bit (meta_bit),
    .sel_idx  (sel_idx),
    .sel_dist (sel_dist),
    .sel_valid(sel_valid),
    .reselect (reselect)
  );

  lfsr_combiner #(
    .INIT0(INIT0),
    .INIT1(INIT1),
    .INIT2(INIT2)
  ) u_prng (
    .clk     (clk),
    .rst_n   (rst_n),
    .seed_bit(meta_bit),
    .seed_en (sel_valid),
    .prng_bit(prng_bit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd_bit <= 1'b0;
    else        rnd_bit <= prng_bit ^ (meta_bit & sel_valid);
  end

endmodule
