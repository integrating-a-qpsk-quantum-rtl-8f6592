// tb_lfsr_combiner: compares the composed LFSRs with a bit-array reference
// model (bit j of each register kept separately, shifted by hand).  The
// seed bit and its enable are random; 3000 clocks are compared and the
// output balance is checked.
module tb_lfsr_combiner;
  logic clk = 0, rst_n = 0;
  logic seed_bit = 0, seed_en = 0, prng_bit;
  int checks = 0, failures = 0;
  bit h0 [31], h1 [29], h2 [23];
  int ones = 0;

  lfsr_combiner dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit n0, n1, n2, s;
    logic [30:0] i0 = 31'h2A5C_39E1;
    logic [28:0] i1 = 29'h1234_5679;
    logic [22:0] i2 = 23'h5E_D1C3;
    for (int j = 0; j < 31; j++) h0[j] = i0[j];
    for (int j = 0; j < 29; j++) h1[j] = i1[j];
    for (int j = 0; j < 23; j++) h2[j] = i2[j];
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      checks++;
      if (prng_bit !== (h0[30] ^ h1[28] ^ h2[22])) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d prng_bit=%0b", c, prng_bit);
      end
      ones += int'(prng_bit);
      seed_bit = 1'($urandom_range(1));
      seed_en  = (c > 1000) ? ($urandom_range(3) != 0) : 1'b0;
      s  = seed_bit & seed_en;
      n0 = h0[30] ^ h0[27] ^ s;
      n1 = h1[28] ^ h1[26] ^ s;
      n2 = h2[22] ^ h2[17] ^ s;
      for (int j = 30; j > 0; j--) h0[j] = h0[j-1];
      for (int j = 28; j > 0; j--) h1[j] = h1[j-1];
      for (int j = 22; j > 0; j--) h2[j] = h2[j-1];
      h0[0] = n0; h1[0] = n1; h2[0] = n2;
      @(posedge clk);
      #1;
    end
    checks++;
    if (ones < 1300 || ones > 1700) begin failures++; $display("FAIL balance ones=%0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
