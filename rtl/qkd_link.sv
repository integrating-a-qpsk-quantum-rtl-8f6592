// qkd_link: the electronic side of a QPSK BB84 fiber link, Alice's and
// Bob's MODEM FPGAs side by side.
//
// Each MODEM runs from its own 200 MHz clock, divides it into 1 MHz pulse
// slots and draws its random choices from a metastability-seeded generator.
// Alice's MODEM drives the two electrodes of her modulator (phi1 = key bit,
// phi2 = base); Bob's drives his modulator (phi3 = base) and samples the two
// photon counters (det1, det2).  Between phi outputs and det inputs lies the
// optical channel (modulators, interferometers, fiber, APDs), which is not
// logic and is outside this module.  Both MODEMs keep their slot records in
// burst buffers read by their hosts (PC over USB in the original system),
// whose read ports are this module's ports; the hosts compare bases over
// the network to sift the key.
//
// Interface: per side a clock, an active-low reset and a slot sync input;
// the optical GPIOs; a first-word-fall-through record read port with
// overflow status; TRNG status.  All parameters default to the paper's
// numbers or this design's choices, listed in the blocks below.
module qkd_link
  import qkd_pkg::*;
#(
  parameter int unsigned PERIOD     = 200,
  parameter int unsigned WIN_START  = 8,
  parameter int unsigned WIN_END    = 196,
  parameter int unsigned N_TAPS     = 128,
  parameter int unsigned WINDOW     = 1024,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  // Alice's MODEM
  input  logic                      a_clk,
  input  logic                      a_rst_n,
  input  logic                      a_sync,
  output logic                      phi1,
  output logic                      phi2,
  input  logic                      a_rd_ready,
  output logic                      a_rd_valid,
  output qkd_rec_t                  a_rd_data,
  output logic [$clog2(FIFO_DEPTH):0] a_rd_count,
  output logic                      a_overflow,
  output logic [15:0]               a_drop_count,
  input  logic                      a_clr_overflow,
  output logic [$clog2(N_TAPS)-1:0] a_trng_sel_idx,
  output logic                      a_trng_sel_valid,
  output logic                      a_trng_reselect,
  // Bob's MODEM
  input  logic                      b_clk,
  input  logic                      b_rst_n,
  input  logic                      b_sync,
  output logic                      phi3,
  input  logic                      det1,
  input  logic                      det2,
  input  logic                      b_rd_ready,
  output logic                      b_rd_valid,
  output qkd_rec_t                  b_rd_data,
  output logic [$clog2(FIFO_DEPTH):0] b_rd_count,
  output logic                      b_overflow,
  output logic [15:0]               b_drop_count,
  input  logic                      b_clr_overflow,
  output logic [$clog2(N_TAPS)-1:0] b_trng_sel_idx,
  output logic                      b_trng_sel_valid,
  output logic                      b_trng_reselect
);

  alice_modem #(
    .PERIOD    (PERIOD),
    .N_TAPS    (N_TAPS),
    .WINDOW    (WINDOW),
    .FIFO_DEPTH(FIFO_DEPTH)
  ) u_alice (
    .clk           (a_clk),
    .rst_n         (a_rst_n),
    .sync          (a_sync),
    .phi1          (phi1),
    .phi2          (phi2),
    .rd_ready      (a_rd_ready),
    .rd_valid      (a_rd_valid),
    .rd_data       (a_rd_data),
    .rd_count      (a_rd_count),
    .overflow      (a_overflow),
    .drop_count    (a_drop_count),
    .clr_overflow  (a_clr_overflow),
    .trng_sel_idx  (a_trng_sel_idx),
    .trng_sel_valid(a_trng_sel_valid),
    .trng_reselect (a_trng_reselect)
  );

  bob_modem #(
    .PERIOD    (PERIOD),
    .WIN_START (WIN_START),
    .WIN_END   (WIN_END),
    .N_TAPS    (N_TAPS),
    .WINDOW    (WINDOW),
    .FIFO_DEPTH(FIFO_DEPTH)
  ) u_bob (
    .clk           (b_clk),
    .rst_n         (b_rst_n),
    .sync          (b_sync),
    .phi3          (phi3),
    .det1          (det1),
    .det2          (det2),
    .rd_ready      (b_rd_ready),
    .rd_valid      (b_rd_valid),
    .rd_data       (b_rd_data),
    .rd_count      (b_rd_count),
    .overflow      (b_overflow),
    .drop_count    (b_drop_count),
    .clr_overflow  (b_clr_overflow),
    .trng_sel_idx  (b_trng_sel_idx),
    .trng_sel_valid(b_trng_sel_valid),
    .trng_reselect (b_trng_reselect)
  );

endmodule
