// alice_modem: the logic of Alice's MODEM FPGA.
//
// A random bit generator (trng) feeds the QPSK phase driver
// (alice_encoder), which sets the two modulator electrodes Phi_1/Phi_2 once
// per pulse slot as paced by slot_timer.  Every slot's (slot, base, bit)
// record goes into the burst buffer (record_fifo) that the MODEM's host
// side reads for the base exchange over the network.  The split into these
// blocks follows the paper's MODEM and random-generator figures; the record
// interface is this design's own.
//
// Interface: clk (200 MHz), rst_n, sync (slot re-alignment); phi1, phi2
// (the two GPIOs toward the modulator buffers); host read port rd_ready/
// rd_valid/rd_data with overflow, drop_count and clr_overflow; TRNG status.
// Timing: phi1/phi2 change one clock after each slot tick; a record is
// readable two clocks after the tick.
module alice_modem
  import qkd_pkg::*;
#(
  parameter int unsigned PERIOD     = 200,
  parameter int unsigned N_TAPS     = 128,
  parameter int unsigned WINDOW     = 1024,
  parameter int unsigned OFFSET_PS  = 1200,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sync,
  output logic                      phi1,
  output logic                      phi2,
  input  logic                      rd_ready,
  output logic                      rd_valid,
  output qkd_rec_t                  rd_data,
  output logic [$clog2(FIFO_DEPTH):0] rd_count,
  output logic                      overflow,
  output logic [15:0]               drop_count,
  input  logic                      clr_overflow,
  output logic [$clog2(N_TAPS)-1:0] trng_sel_idx,
  output logic                      trng_sel_valid,
  output logic                      trng_reselect
);

  logic                      rnd_bit;
  logic                      tick;
  logic [$clog2(PERIOD)-1:0] phase;
  logic [SLOT_W-1:0]         slot;
  logic                      rec_valid;
  qkd_rec_t                  rec;

  trng #(
    .N_TAPS   (N_TAPS),
    .WINDOW   (WINDOW),
    .OFFSET_PS(OFFSET_PS),
    .INIT0    (31'h2A5C_39E1),
    .INIT1    (29'h1234_5679),
    .INIT2    (23'h5E_D1C3)
  ) u_trng (
    .clk      (clk),
    .rst_n    (rst_n),
    .rnd_bit  (rnd_bit),
    .sel_idx  (trng_sel_idx),
    .sel_valid(trng_sel_valid),
    .reselect (trng_reselect)
  );

  slot_timer #(
    .PERIOD(PERIOD)
  ) u_timer (
    .clk  (clk),
    .rst_n(rst_n),
    .sync (sync),
    .tick (tick),
    .phase(phase),
    .slot (slot)
  );

  alice_encoder u_enc (
    .clk      (clk),
    .rst_n    (rst_n),
    .rnd_bit  (rnd_bit),
    .tick     (tick),
    .slot     (slot),
    .phi1     (phi1),
    .phi2     (phi2),
    .rec_valid(rec_valid),
    .rec      (rec)
  );

  record_fifo #(
    .WIDTH(REC_W),
    .DEPTH(FIFO_DEPTH)
  ) u_fifo (
    .clk         (clk),
    .rst_n       (rst_n),
    .wr_valid    (rec_valid),
    .wr_data     (rec),
    .rd_ready    (rd_ready),
    .rd_valid    (rd_valid),
    .rd_data     (rd_data),
    .count       (rd_count),
    .overflow    (overflow),
    .drop_count  (drop_count),
    .clr_overflow(clr_overflow)
  );

endmodule
