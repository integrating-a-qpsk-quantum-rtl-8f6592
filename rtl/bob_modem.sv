// bob_modem: the logic of Bob's MODEM FPGA.
//
// A random bit generator (trng) gives Bob's base for every pulse slot; the
// base driver and detector capture (bob_decoder) sets Phi_3, the single
// GPIO toward Bob's modulator, and samples the two APD detector GPIOs in the
// slot's detection window.  Slots in which a detector clicked are written as
// records into the burst buffer (record_fifo) for the host, which sends the
// bases to Alice over the network to sift the key.  The block split follows
// the paper's MODEM and random-generator figures (three GPIOs on Bob's
// FPGA: Phi_3 out, two detectors in); the record format is this design's.
//
// Interface: clk (200 MHz), rst_n, sync; phi3 out; det1, det2 in
// (asynchronous); host read port as in alice_modem; TRNG status.
// Timing: phi3 changes one clock after each slot tick; a record is readable
// two clocks after phase WIN_END of a slot that had a click.
module bob_modem
  import qkd_pkg::*;
#(
  parameter int unsigned PERIOD     = 200,
  parameter int unsigned WIN_START  = 8,
  parameter int unsigned WIN_END    = 196,
  parameter int unsigned N_TAPS     = 128,
  parameter int unsigned WINDOW     = 1024,
  parameter int unsigned OFFSET_PS  = 1325,
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sync,
  output logic                      phi3,
  input  logic                      det1,
  input  logic                      det2,
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
    .INIT0    (31'h0F1E_2D3C),
    .INIT1    (29'h0BAD_CAFE),
    .INIT2    (23'h13_579B)
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

  bob_decoder #(
    .PERIOD   (PERIOD),
    .WIN_START(WIN_START),
    .WIN_END  (WIN_END)
  ) u_dec (
    .clk      (clk),
    .rst_n    (rst_n),
    .rnd_bit  (rnd_bit),
    .tick     (tick),
    .phase    (phase),
    .slot     (slot),
    .det1     (det1),
    .det2     (det2),
    .phi3     (phi3),
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
