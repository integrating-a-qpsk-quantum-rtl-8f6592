// tb_alice_modem: Alice's MODEM at PERIOD = 20, 64 taps, 128-clock window,
// 16-record buffer.  The testbench keeps its own slot count from the clock,
// samples phi1/phi2 in every slot and reads the records.  Checks: one
// record per slot with consecutive slot numbers, record = sampled phases,
// the record appears two clocks after the slot starts, a sync pulse keeps
// the numbering, a stalled host causes exactly the expected drops and the
// overflow flag, and the generator selects tap (2500-1200)/25 = 52.
module tb_alice_modem;
  import qkd_pkg::*;
  localparam int P = 20, N = 64;
  logic clk = 0, rst_n = 0, sync = 0, phi1, phi2;
  logic rd_ready = 0, rd_valid, overflow, clr_overflow = 0;
  qkd_rec_t rd_data;
  logic [15:0] drop_count;
  logic [4:0] rd_count;
  logic [$clog2(N)-1:0] trng_sel_idx;
  logic trng_sel_valid, trng_reselect;
  int checks = 0, failures = 0;
  logic [1:0] phi_at [int];
  qkd_rec_t recs [int];
  int cyc = 0, n_resel = 0, n_pop = 0;

  alice_modem #(.PERIOD(P), .N_TAPS(N), .WINDOW(128), .FIFO_DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host side: pop whenever ready
  always @(posedge clk) if (rst_n && rd_valid && rd_ready) begin
    recs[int'(rd_data.slot)] = rd_data;
    n_pop++;
  end
  always @(posedge clk) if (rst_n && trng_reselect) begin
    n_resel++;
    chk(trng_sel_idx == 52, $sformatf("selected tap %0d", trng_sel_idx));
  end

  initial begin
    int ph, sl, drops_exp, first_rec_delay;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    rd_ready = 1;
    ph = 0; sl = 0; drops_exp = 0;
    for (int c = 0; c < 12000; c++) begin
      // host stalls for 30 slots: 16 kept, 14 dropped
      rd_ready = !(c >= 4000 && c < 4000 + 30 * P);
      clr_overflow = (c == 8000);
      sync = (c == 2345);
      @(posedge clk); #1;
      if (c == 1) chk(rd_valid && rd_data.slot == 0, "first record two clocks after reset tick");
      // tb slot model: this edge moved the DUT to phase ph
      if (sync) begin ph = 0; sl++; end
      else if (ph == P - 1) begin ph = 0; sl++; end
      else ph++;
      if (ph == 1) phi_at[sl] = {phi2, phi1};
      if (ph == 5) chk(phi_at[sl] == {phi2, phi1}, "phi held in slot");
      if (c == 4000 + 30 * P - 2) chk(overflow && rd_count == 16, "overflow and full buffer while host stalled");
      if (c == 8001) chk(!overflow, "overflow cleared");
    end
    chk(drop_count == 14, $sformatf("drop count %0d", drop_count));
    begin
      int missing = 0, matched = 0, ones_b = 0, ones_k = 0;
      for (int s = 0; s < sl - 1; s++) begin
        if (!recs.exists(s)) missing++;
        else if (phi_at.exists(s)) begin
          matched++;
          ones_b += int'(recs[s].base); ones_k += int'(recs[s].key_bit);
          chk(recs[s].key_bit == phi_at[s][0] && recs[s].base == base_e'(phi_at[s][1]) && recs[s].clicks == 0,
              $sformatf("slot %0d record vs phases", s));
        end
      end
      chk(missing == 14, $sformatf("missing slots %0d", missing));
      chk(n_resel >= 50, $sformatf("reselections %0d", n_resel));
      chk(ones_b > matched / 2 - matched / 8 && ones_b < matched / 2 + matched / 8, "base balance");
      chk(ones_k > matched / 2 - matched / 8 && ones_k < matched / 2 + matched / 8, "bit balance");
      $display("slots %0d records %0d missing %0d bases=1:%0d bits=1:%0d", sl, n_pop, missing, ones_b, ones_k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
