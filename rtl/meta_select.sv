// meta_select: analysis and selection controller of the random bit
// generator.
//
// It watches the word sampled from the delay line and finds the DFF with the
// highest metastability, whose bit then seeds the pseudo-random generator.
// The paper gives this function but not how it is measured; this design
// measures it by balance: over a window of WINDOW clocks every tap counts
// the cycles it read 1, and the tap whose count is nearest WINDOW/2 is the
// most random one (a tap whose delayed edge is far from the sampling edge
// reads a constant and scores WINDOW/2 away).
//
// Operation repeats forever: ACCUMULATE for WINDOW cycles (all counters in
// parallel), then SCAN one tap per cycle for N_TAPS cycles keeping the best
// distance, then load the new selection, pulse `reselect`, clear the counters
// and accumulate again.  A full round takes WINDOW + N_TAPS cycles.  Until
// the first round ends, `sel_valid` is low and tap 0 is forwarded.
//
// Interface: `taps` in (one word per clock); `meta_bit` out, the selected
// tap registered (one cycle latency); `sel_idx`, `sel_dist` (|count -
// WINDOW/2| of the selected tap), `sel_valid`, `reselect` (one-cycle pulse).
module meta_select #(
  parameter int unsigned N_TAPS = 128,
  parameter int unsigned WINDOW = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_TAPS-1:0]         taps,
  output logic                      meta_bit,
  output logic [$clog2(N_TAPS)-1:0] sel_idx,
  output logic [$clog2(WINDOW):0]   sel_dist,
  output logic                      sel_valid,
  output logic                      reselect
);

  localparam int unsigned IW = $clog2(N_TAPS);
  localparam int unsigned CW = $clog2(WINDOW) + 1;

  typedef enum logic {
    S_ACC,
    S_SCAN
  } state_e;

  state_e         state;
  logic [CW-1:0]  cnt [N_TAPS];
  logic [CW-1:0]  win_cnt;
  logic [IW-1:0]  scan_idx;
  logic [IW-1:0]  best_idx;
  logic [CW-1:0]  best_dist;

  // Distance from balance of the tap under scan, and the running best
  // including it.
  logic [CW-1:0] cur_cnt, cur_dist;
  logic          cur_better;

  always_comb begin
    cur_cnt    = cnt[scan_idx];
    cur_dist   = (cur_cnt >= CW'(WINDOW / 2)) ? cur_cnt - CW'(WINDOW / 2)
                                              : CW'(WINDOW / 2) - cur_cnt;
    cur_better = (cur_dist < best_dist);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_ACC;
      win_cnt   <= '0;
      scan_idx  <= '0;
      best_idx  <= '0;
      best_dist <= '1;
      sel_idx   <= '0;
      sel_dist  <= '1;
      sel_valid <= 1'b0;
      reselect  <= 1'b0;
      for (int i = 0; i < int'(N_TAPS); i++) cnt[i] <= '0;
    end else begin
      reselect <= 1'b0;
      case (state)
        S_ACC: begin
          for (int i = 0; i < int'(N_TAPS); i++) cnt[i] <= cnt[i] + CW'(taps[i]);
          if (win_cnt == CW'(WINDOW - 1)) begin
            win_cnt   <= '0;
            state     <= S_SCAN;
            scan_idx  <= '0;
            best_dist <= '1;
            best_idx  <= '0;
          end else begin
            win_cnt <= win_cnt + 1'b1;
          end
        end
        S_SCAN: begin
          if (cur_better) begin
            best_dist <= cur_dist;
            best_idx  <= scan_idx;
          end
          if (scan_idx == IW'(N_TAPS - 1)) begin
            sel_idx   <= cur_better ? scan_idx : best_idx;
            sel_dist  <= cur_better ? cur_dist : best_dist;
            sel_valid <= 1'b1;
            reselect  <= 1'b1;
            state     <= S_ACC;
            for (int i = 0; i < int'(N_TAPS); i++) cnt[i] <= '0;
          end else begin
            scan_idx <= scan_idx + 1'b1;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) meta_bit <= 1'b0;
    else        meta_bit <= taps[sel_idx];
  end

endmodule
