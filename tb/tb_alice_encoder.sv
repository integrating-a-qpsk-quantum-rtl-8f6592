// tb_alice_encoder: feeds random bits and slot ticks every 7 clocks.  An
// independent two-bit history of the random input predicts each slot's base
// (older bit) and key bit (newer bit); the checks compare phi1/phi2, their
// hold over the slot, the record, and the resulting optical phase, which
// must be one of the four QPSK points of the link.
module tb_alice_encoder;
  import qkd_pkg::*;
  logic clk = 0, rst_n = 0, rnd_bit = 0, tick = 0;
  logic [SLOT_W-1:0] slot = 0;
  logic phi1, phi2, rec_valid;
  qkd_rec_t rec;
  int checks = 0, failures = 0;
  int seen_phase [8];

  alice_encoder dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic older, newer, exp_base, exp_bit;
    phase_t ph;
    foreach (seen_phase[i]) seen_phase[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    older = 0; newer = 0; exp_base = 0; exp_bit = 0;
    for (int c = 0; c < 2100; c++) begin
      rnd_bit = 1'($urandom_range(1));
      tick    = (c % 7 == 6);
      if (tick) begin exp_base = older; exp_bit = newer; end
      @(posedge clk);
      older = newer; newer = rnd_bit;
      #1;
      if (tick) begin
        chk(rec_valid, "record after tick");
        chk(phi1 == exp_bit && phi2 == exp_base, "phi1/phi2");
        chk(rec.slot == slot && rec.base == base_e'(exp_base) && rec.key_bit == exp_bit && rec.clicks == 0, "record");
        ph = alice_phase(base_e'(phi2), phi1);
        seen_phase[ph]++;
        slot++;
      end else begin
        chk(!rec_valid, "no record between ticks");
        chk(phi1 == exp_bit && phi2 == exp_base, "phi hold over slot");
      end
    end
    chk(seen_phase[1] > 40 && seen_phase[7] > 40 && seen_phase[5] > 40 && seen_phase[3] > 40, "all four QPSK phases used");
    chk(seen_phase[0] + seen_phase[2] + seen_phase[4] + seen_phase[6] == 0, "only QPSK phases");
    $display("phases +pi/4 %0d, -pi/4 %0d, -3pi/4 %0d, 3pi/4 %0d", seen_phase[1], seen_phase[7], seen_phase[5], seen_phase[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
