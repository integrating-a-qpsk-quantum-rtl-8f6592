// tb_delay_line_sampler: checks the behavioural delay-line model.
// With the default geometry (offset 1200 ps, 25 ps segments, 5 ns clock,
// +-20 ps jitter, +-4 ps noise) tap i sees its edge at 1200 + 25*i ps; only
// a tap within 24 ps of the 2500 ps falling edge may change from cycle to
// cycle.  The expected class of every tap (always 0, always 1, random) is
// worked out here from that geometry and compared over 4000 samples.
module tb_delay_line_sampler;
  localparam int N = 128;
  logic clk = 0;
  logic [N-1:0] taps;
  int checks = 0, failures = 0;
  int ones [N];

  delay_line_sampler dut (.clk(clk), .taps(taps));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos, lo, hi;
    foreach (ones[i]) ones[i] = 0;
    repeat (3) @(posedge clk);
    repeat (4000) begin
      @(posedge clk);
      #1;
      for (int i = 0; i < N; i++) ones[i] += int'(taps[i]);
    end
    for (int i = 0; i < N; i++) begin
      pos = 1200 + 25 * i;
      checks++;
      if (pos + 24 < 2500) begin
        if (ones[i] != 0) begin failures++; $display("FAIL tap %0d should be 0, ones=%0d", i, ones[i]); end
      end else if (pos - 24 >= 2500) begin
        if (ones[i] != 4000) begin failures++; $display("FAIL tap %0d should be 1, ones=%0d", i, ones[i]); end
      end else begin
        lo = 1400; hi = 2600;
        if (ones[i] < lo || ones[i] > hi) begin failures++; $display("FAIL tap %0d not metastable, ones=%0d", i, ones[i]); end
        else $display("metastable tap %0d ones=%0d/4000", i, ones[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
