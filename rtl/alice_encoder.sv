// alice_encoder: Alice's QPSK phase driver.
//
// At the start of every pulse slot it takes two fresh random bits, a base
// and a key bit, and sets the two electrodes of Alice's two-electrode
// Mach-Zehnder modulator: Phi_1 carries the key bit and Phi_2 the base.
// Driving the electrodes separately gives the independent choice of base
// and symbol that BB84 needs; with Phi_2 selecting +pi/4 (base 1) or -pi/4
// (base 2) and Phi_1 adding 0 or pi, the optical phase is pi/4, -pi/4,
// -3pi/4 or 3pi/4 as the link description requires.  Which electrode takes
// which bit, and the binary drive levels, are this design's choices: the
// paper gives the four phases but not the electrode mapping.
//
// The random bits arrive one per clock; a two-bit shift register keeps the
// last two, so a slot uses bits drawn on the two clocks before its tick.
// The chosen (slot, base, bit) is written out as a record for the host.
//
// Timing: on the clock after `tick`, phi1/phi2 change and hold for the whole
// slot, and `rec_valid` pulses for one clock with the record.
module alice_encoder
  import qkd_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rnd_bit,
  input  logic              tick,
  input  logic [SLOT_W-1:0] slot,
  output logic              phi1,
  output logic              phi2,
  output logic              rec_valid,
  output qkd_rec_t          rec
);

  logic [1:0] rnd_sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rnd_sh    <= '0;
      phi1      <= 1'b0;
      phi2      <= 1'b0;
      rec_valid <= 1'b0;
      rec       <= '0;
    end else begin
      rnd_sh    <= {rnd_sh[0], rnd_bit};
      rec_valid <= 1'b0;
      if (tick) begin
        phi1        <= rnd_sh[0];
        phi2        <= rnd_sh[1];
        rec_valid   <= 1'b1;
        rec.slot    <= slot;
        rec.base    <= base_e'(rnd_sh[1]);
        rec.key_bit <= rnd_sh[0];
        rec.clicks  <= 2'b00;
      end
    end
  end

endmodule
