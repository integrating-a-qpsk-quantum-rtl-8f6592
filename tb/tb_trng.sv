// tb_trng: runs the full random bit generator at its default size (128
// taps, 1024-clock analysis window).  Checks: the controller settles on the
// tap whose delayed edge meets the sampling edge, (2500-1200)/25 = 52;
// reselection happens every WINDOW + N_TAPS clocks; the output gives one
// bit per clock, is balanced, and differs from the unseeded LFSR sequence
// (so the metastable seed is really used); before the first selection it
// equals the unseeded LFSRs exactly.
module tb_trng;
  localparam int N = 128, W = 1024, EXP_TAP = (2500 - 1200) / 25;
  logic clk = 0, rst_n = 0;
  logic rnd_bit, sel_valid, reselect;
  logic [$clog2(N)-1:0] sel_idx;
  int checks = 0, failures = 0;
  int resel = 0, ones = 0, trans = 0, differ = 0, nbits = 0;
  logic prev = 0;
  logic [30:0] r0 = 31'h2A5C_39E1;
  logic [28:0] r1 = 29'h1234_5679;
  logic [22:0] r2 = 23'h5E_D1C3;
  logic ref_bit;

  trng dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Unseeded reference LFSRs, stepped in lock-step with the DUT from reset:
  // before the first selection the output must equal them exactly (one
  // clock of output register); afterwards the seed must make it depart.
  function automatic logic ref_step();
    logic b;
    b  = r0[30] ^ r1[28] ^ r2[22];
    r0 = {r0[29:0], r0[30] ^ r0[27]};
    r1 = {r1[27:0], r1[28] ^ r1[26]};
    r2 = {r2[21:0], r2[22] ^ r2[17]};
    return b;
  endfunction

  initial begin
    int t;
    int pre_mism = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    t = 0;
    do begin
      @(posedge clk); #1; t++;
      ref_bit = ref_step();
      if (!reselect) pre_mism += int'(rnd_bit != ref_bit);
    end while (!reselect);
    chk(pre_mism == 0, $sformatf("unseeded output differs from LFSR reference %0d times", pre_mism));
    chk(t == W + N, $sformatf("first selection after %0d clocks", t));
    chk(sel_valid, "sel_valid");
    chk(sel_idx == EXP_TAP, $sformatf("selected tap %0d, expected %0d", sel_idx, EXP_TAP));
    for (int c = 0; c < 20000; c++) begin
      @(posedge clk); #1;
      ref_bit = ref_step();
      nbits++;
      ones  += int'(rnd_bit);
      trans += int'(rnd_bit != prev);
      differ += int'(rnd_bit != ref_bit);
      prev = rnd_bit;
      if (reselect) begin
        resel++;
        chk(sel_idx == EXP_TAP, $sformatf("reselected tap %0d", sel_idx));
      end
    end
    chk(resel == 20000 / (W + N) || resel == 20000 / (W + N) + 1, $sformatf("reselections %0d", resel));
    chk(ones > 9500 && ones < 10500, $sformatf("ones %0d / 20000", ones));
    chk(trans > 9500 && trans < 10500, $sformatf("transitions %0d / 20000", trans));
    chk(differ > 8000, $sformatf("seeded output follows the unseeded LFSR (differ %0d / 20000)", differ));
    chk(nbits == 20000, "one bit per clock");
    $display("ones=%0d transitions=%0d reselections=%0d differ=%0d", ones, trans, resel, differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
