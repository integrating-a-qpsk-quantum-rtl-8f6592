// bob_decoder: Bob's base driver and detector capture.
//
// At the start of every pulse slot it takes one random bit as Bob's base and
// drives Bob's modulator input Phi_3 with it (pi/4 for base 1, -pi/4 for
// base 2).  The two gated APD outputs come in as asynchronous pulses; each
// passes a two-flop synchroniser and is latched if it is high inside the
// detection window, clocks WIN_START..WIN_END of the slot.  At the end of the
// window, if either detector clicked, a record (slot, base, clicks, key bit)
// is written for the host.
//
// Decoding follows the link description: detector 1 clicks for a phase
// difference of 0 and detector 2 for pi, so in matching bases detector 1
// means bit 0 and detector 2 bit 1; the key bit is therefore the detector 2
// flag.  A double click keeps both flags (clicks = 2'b11) so the host can
// discard it.  Phi_3 = base, the window, the synchroniser and recording
// only clicked slots are this design's choices.
//
// Timing: phi3 changes on the clock after `tick` and holds for the slot;
// `rec_valid` pulses on the clock after phase == WIN_END.
module bob_decoder
  import qkd_pkg::*;
#(
  parameter int unsigned PERIOD    = 200,
  parameter int unsigned WIN_START = 8,
  parameter int unsigned WIN_END   = 196
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rnd_bit,
  input  logic                      tick,
  input  logic [$clog2(PERIOD)-1:0] phase,
  input  logic [SLOT_W-1:0]         slot,
  input  logic                      det1,
  input  logic                      det2,
  output logic                      phi3,
  output logic                      rec_valid,
  output qkd_rec_t                  rec
);

  localparam int unsigned PW = $clog2(PERIOD);

  logic [1:0]        d1_sync, d2_sync;
  logic              d1_seen, d2_seen;
  logic [SLOT_W-1:0] slot_q;
  logic              in_win;

  assign in_win = (phase >= PW'(WIN_START)) && (phase <= PW'(WIN_END));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1_sync   <= '0;
      d2_sync   <= '0;
      d1_seen   <= 1'b0;
      d2_seen   <= 1'b0;
      slot_q    <= '0;
      phi3      <= 1'b0;
      rec_valid <= 1'b0;
      rec       <= '0;
    end else begin
      d1_sync   <= {d1_sync[0], det1};
      d2_sync   <= {d2_sync[0], det2};
      rec_valid <= 1'b0;
      if (tick) begin
        phi3    <= rnd_bit;
        slot_q  <= slot;
        d1_seen <= 1'b0;
        d2_seen <= 1'b0;
      end else if (in_win) begin
        d1_seen <= d1_seen | d1_sync[1];
        d2_seen <= d2_seen | d2_sync[1];
      end
      if (phase == PW'(WIN_END) && !tick) begin
        if (d1_seen | d1_sync[1] | d2_seen | d2_sync[1]) begin
          rec_valid   <= 1'b1;
          rec.slot    <= slot_q;
          rec.base    <= base_e'(phi3);
          rec.key_bit <= d2_seen | d2_sync[1];
          rec.clicks  <= {d2_seen | d2_sync[1], d1_seen | d1_sync[1]};
        end
      end
    end
  end

  initial begin
    assert (WIN_START > 0 && WIN_START <= WIN_END && WIN_END < PERIOD)
      else $error("bob_decoder: window must lie inside the slot after its first clock");
  end

endmodule
