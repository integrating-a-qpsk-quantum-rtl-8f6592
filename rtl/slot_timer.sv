// slot_timer: bit-level synchronisation of the MODEM.
//
// The optical pulses repeat at 1 MHz while the FPGA runs at 200 MHz, so
// every pulse slot lasts PERIOD = 200 clocks.  The timer counts the clocks
// of a slot (`phase`), flags the first clock of every slot (`tick`) and
// numbers the slots since reset (`slot`), the number under which Alice and
// Bob later compare their bases.  A `sync` pulse from outside (the pulse
// source trigger, for instance) cuts the current slot short and starts a
// new one on the next clock, re-aligning the slot boundary without
// breaking the numbering.  The paper only says that bit-level
// synchronisation is done in the electronics; the divider, the numbering
// and the sync input are this design's choices.
//
// Timing: after reset phase = 0, slot = 0 and tick is high.  phase counts
// 0..PERIOD-1; when it wraps, or one clock after sync, phase is 0, tick is
// high and slot has advanced by one.
module slot_timer #(
  parameter int unsigned PERIOD = 200,
  parameter int unsigned SLOT_W = qkd_pkg::SLOT_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      sync,
  output logic                      tick,
  output logic [$clog2(PERIOD)-1:0] phase,
  output logic [SLOT_W-1:0]         slot
);

  localparam int unsigned PW = $clog2(PERIOD);

  assign tick = (phase == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      slot  <= '0;
    end else if (sync || phase == PW'(PERIOD - 1)) begin
      phase <= '0;
      slot  <= slot + 1'b1;
    end else begin
      phase <= phase + 1'b1;
    end
  end

endmodule
