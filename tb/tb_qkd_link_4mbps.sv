// tb_qkd_link_4mbps: the end-to-end run of tb_qkd_link at the optical limit
// of 4 Mbit/s: 50-clock slots (4 MHz at 200 MHz), detection window 4..46,
// channel clicks at clock 20 and false clicks at clock 35 of the slot.  The
// rest (128-tap generators, 1024-record buffers, stall, sync, checks) is as
// in tb_qkd_link.
//
// The testbench supplies what is not logic: two 200 MHz clocks (Bob's
// shifted by 3 ns), the optical channel and the two hosts.  Channel model:
// in every slot, at Bob's clock 20, Alice's phase (from phi1/phi2) and
// Bob's (from phi3) are compared; with probability 1/10 (the paper's 0.1
// photon per pulse, detectors taken as ideal) a photon arrives and fires
// detector 1 for a difference of 0, detector 2 for pi, and either at random
// for +-pi/2; with probability 1/50 a false click (dark count) fires a
// random detector at clock 35.  Hosts pop both record buffers; Alice's
// host stalls for 1100 slots, more than the buffer holds.  Both sides get
// one common sync pulse half-way.
//
// Checks: every Bob record matches the clicks the channel produced in that
// slot and Bob's base on phi3; every Alice record matches phi1/phi2 seen by
// the channel; after sifting (same slot, same base, one click, no false
// click) Bob's bit equals Alice's bit.  Each mechanism must occur at least
// once: generator reselection (both sides, at taps 52 and 47), sync,
// buffer overflow with drops, matched and mismatched bases, detector 1 and
// detector 2 clicks, false clicks and double clicks.
module tb_qkd_link_4mbps;
  import qkd_pkg::*;
  localparam int P = 50, SLOTS = 4000;
  logic a_clk = 0, b_clk = 0, a_rst_n = 0, b_rst_n = 0, sync = 0;
  logic phi1, phi2, phi3, det1 = 0, det2 = 0;
  logic a_rd_ready = 1, a_rd_valid, a_overflow;
  logic b_rd_ready = 1, b_rd_valid, b_overflow;
  qkd_rec_t a_rd_data, b_rd_data;
  logic [15:0] a_drop_count, b_drop_count;
  logic [10:0] a_rd_count, b_rd_count;
  int a_max_count = 0;
  logic [6:0] a_trng_sel_idx, b_trng_sel_idx;
  logic a_trng_sel_valid, a_trng_reselect, b_trng_sel_valid, b_trng_reselect;
  int checks = 0, failures = 0;

  // what the channel saw and did, per slot
  logic [1:0] ch_alice [int];   // {phi2, phi1}
  logic       ch_bob   [int];   // phi3
  logic [1:0] ch_clicks[int];   // {det2, det1} produced
  bit         ch_false [int];
  qkd_rec_t   a_recs [int], b_recs [int];
  int n_a_resel = 0, n_b_resel = 0, n_sync = 0, n_d1 = 0, n_d2 = 0, n_false = 0, n_double = 0;
  int n_sift = 0, n_mism = 0, n_err = 0, n_sift_false = 0;

  qkd_link #(.PERIOD(50), .WIN_START(4), .WIN_END(46)) dut (
    .a_clk(a_clk), .a_rst_n(a_rst_n), .a_sync(sync), .phi1(phi1), .phi2(phi2),
    .a_rd_ready(a_rd_ready), .a_rd_valid(a_rd_valid), .a_rd_data(a_rd_data), .a_rd_count(a_rd_count),
    .a_overflow(a_overflow), .a_drop_count(a_drop_count), .a_clr_overflow(1'b0),
    .a_trng_sel_idx(a_trng_sel_idx), .a_trng_sel_valid(a_trng_sel_valid),
    .a_trng_reselect(a_trng_reselect),
    .b_clk(b_clk), .b_rst_n(b_rst_n), .b_sync(sync), .phi3(phi3), .det1(det1), .det2(det2),
    .b_rd_ready(b_rd_ready), .b_rd_valid(b_rd_valid), .b_rd_data(b_rd_data), .b_rd_count(b_rd_count),
    .b_overflow(b_overflow), .b_drop_count(b_drop_count), .b_clr_overflow(1'b0),
    .b_trng_sel_idx(b_trng_sel_idx), .b_trng_sel_valid(b_trng_sel_valid),
    .b_trng_reselect(b_trng_reselect)
  );

  initial forever #5 a_clk = ~a_clk;
  initial begin #3; forever #5 b_clk = ~b_clk; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    repeat ((SLOTS + 50) * P) @(posedge a_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // hosts
  always @(posedge a_clk) if (a_rst_n && int'(a_rd_count) > a_max_count) a_max_count = int'(a_rd_count);
  always @(posedge a_clk) if (a_rst_n && a_rd_valid && a_rd_ready) a_recs[int'(a_rd_data.slot)] = a_rd_data;
  always @(posedge b_clk) if (b_rst_n && b_rd_valid && b_rd_ready) b_recs[int'(b_rd_data.slot)] = b_rd_data;
  always @(posedge a_clk) if (a_rst_n && a_trng_reselect) begin
    n_a_resel++;
    chk(a_trng_sel_idx == 52, $sformatf("Alice generator tap %0d", a_trng_sel_idx));
  end
  always @(posedge b_clk) if (b_rst_n && b_trng_reselect) begin
    n_b_resel++;
    chk(b_trng_sel_idx == 47, $sformatf("Bob generator tap %0d", b_trng_sel_idx));
  end

  // channel, timed on Bob's clock
  initial begin
    int ph, sl, n;
    phase_t d;
    logic tc1, tc2, fc1, fc2;
    repeat (3) @(posedge a_clk);
    #1 a_rst_n = 1; b_rst_n = 1;
    // the first b_clk edge after release is Bob's slot-0 tick
    @(posedge b_clk); #1;
    ph = 0; sl = 0;
    while (sl < SLOTS) begin
      a_rd_ready = !(sl >= 1500 && sl < 2600);
      if (ph == 20) begin
        ch_alice[sl] = {phi2, phi1};
        ch_bob[sl]   = phi3;
        tc1 = 0; tc2 = 0; fc1 = 0; fc2 = 0;
        if ($urandom_range(9) == 0) begin
          d = alice_phase(base_e'(phi2), phi1) - bob_phase(base_e'(phi3));
          case (d)
            3'd0:    tc1 = 1;
            3'd4:    tc2 = 1;
            default: if ($urandom_range(1) == 1) tc1 = 1; else tc2 = 1;
          endcase
        end
        if ($urandom_range(49) == 0) begin
          if ($urandom_range(1) == 1) fc1 = 1; else fc2 = 1;
        end
        ch_clicks[sl] = {tc2 | fc2, tc1 | fc1};
        ch_false[sl]  = fc1 | fc2;
        n_d1 += int'(tc1 | fc1);
        n_d2 += int'(tc2 | fc2);
        n_false += int'(fc1 | fc2);
        n_double += int'((tc1 | fc1) & (tc2 | fc2));
      end
      // APD pulses: three clocks wide, asynchronous to nothing in particular
      det1 = ((ph >= 20 && ph < 23) && tc1) || ((ph >= 35 && ph < 38) && fc1);
      det2 = ((ph >= 20 && ph < 23) && tc2) || ((ph >= 35 && ph < 38) && fc2);
      sync = (sl == 2000 && ph == 27);
      @(posedge b_clk); #1;
      if (sync) begin n_sync++; ph = 0; sl++; end
      else if (ph == P - 1) begin ph = 0; sl++; end
      else ph++;
    end
    det1 = 0; det2 = 0;
    repeat (2 * P) @(posedge b_clk);

    // compare
    for (int s = 0; s < SLOTS - 1; s++) begin
      if (a_recs.exists(s)) begin
        chk(a_recs[s].key_bit == ch_alice[s][0] && a_recs[s].base == base_e'(ch_alice[s][1]),
            $sformatf("Alice slot %0d record vs channel", s));
      end
      if (ch_clicks[s] != 0) begin
        chk(b_recs.exists(s), $sformatf("Bob slot %0d record missing", s));
        if (b_recs.exists(s)) begin
          chk(b_recs[s].clicks == ch_clicks[s] && b_recs[s].base == base_e'(ch_bob[s]),
              $sformatf("Bob slot %0d record vs channel", s));
          if (a_recs.exists(s) && b_recs[s].clicks != 2'b11) begin
            if (a_recs[s].base == b_recs[s].base) begin
              if (ch_false[s]) n_sift_false++;
              else begin
                n_sift++;
                if (b_recs[s].key_bit != a_recs[s].key_bit) n_err++;
              end
            end else n_mism++;
          end
        end
      end else begin
        chk(!b_recs.exists(s), $sformatf("Bob slot %0d unexpected record", s));
      end
    end
    n = 0;
    for (int s = 0; s < SLOTS - 1; s++) if (!a_recs.exists(s)) n++;
    chk(n_err == 0, $sformatf("%0d sifted bit errors without false clicks", n_err));
    chk(n == int'(a_drop_count), $sformatf("Alice missing slots %0d vs drop count %0d", n, a_drop_count));
    chk(b_drop_count == 0, "Bob drops");
    chk(a_max_count == 1024, $sformatf("Alice buffer peak fill %0d, expected full (1024)", a_max_count));
    chk(n_a_resel > 0, "mechanism: Alice generator reselection");
    chk(n_b_resel > 0, "mechanism: Bob generator reselection");
    chk(n_sync > 0, "mechanism: sync");
    chk(a_overflow && a_drop_count > 0, "mechanism: buffer overflow");
    chk(n_sift > 0, "mechanism: matching bases (sifted bits)");
    chk(n_mism > 0, "mechanism: mismatching bases");
    chk(n_d1 > 0 && n_d2 > 0, "mechanism: detector 1 and detector 2 clicks");
    chk(n_false > 0, "mechanism: false clicks");
    chk(n_double > 0, "mechanism: double clicks");
    $display("slots %0d: reselections A %0d B %0d, sync %0d, Alice drops %0d", SLOTS, n_a_resel, n_b_resel, n_sync, a_drop_count);
    $display("clicks det1 %0d det2 %0d false %0d double %0d", n_d1, n_d2, n_false, n_double);
    $display("sifted %0d (errors %0d), sifted with false click %0d, mismatched bases %0d", n_sift, n_err, n_sift_false, n_mism);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
