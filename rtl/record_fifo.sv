// record_fifo: burst buffer between the MODEM and the host.
//
// The slot records are produced at the quantum rate (one per slot) but the
// host reads them over USB and exchanges bases over the network in bursts,
// asynchronously and much faster than they arrive.  This synchronous FIFO of
// DEPTH records decouples the two.  A record that arrives while the buffer
// is full is dropped and counted; `overflow` stays high until `clr_overflow`
// so the host knows that slot numbers are missing.  The paper asks only that
// the MODEM sustain burst reads; depth, drop policy and the single clock are
// this design's choices.
//
// Interface: write side `wr_valid`/`wr_data` (no back-pressure: the optics
// cannot be stalled); read side first-word-fall-through `rd_valid`/
// `rd_data`, popped on `rd_valid && rd_ready`; `count` records held.
module record_fifo #(
  parameter int unsigned WIDTH = qkd_pkg::REC_W,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_valid,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_ready,
  output logic                     rd_valid,
  output logic [WIDTH-1:0]         rd_data,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow,
  output logic [15:0]              drop_count,
  input  logic                     clr_overflow
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             full, do_wr, do_rd;

  assign full     = (count == (AW + 1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rd_ptr];
  assign do_rd    = rd_valid && rd_ready;
  assign do_wr    = wr_valid && (!full || do_rd);

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      count      <= '0;
      overflow   <= 1'b0;
      drop_count <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
      if (wr_valid && !do_wr) begin
        overflow <= 1'b1;
        if (drop_count != '1) drop_count <= drop_count + 1'b1;
      end else if (clr_overflow) begin
        overflow <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW + 1)'(DEPTH))
    else $error("record_fifo: count above depth");
  assert property (@(posedge clk) disable iff (!rst_n) do_rd |-> rd_valid)
    else $error("record_fifo: pop from empty buffer");

endmodule
