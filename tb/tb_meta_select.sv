// tb_meta_select: drives the selection controller with a synthetic tap
// word: one tap random (p = 1/2), one biased (p = 3/4), the rest constant.
// Checks that each round selects the random tap, that a round takes WINDOW +
// N_TAPS clocks, that meta_bit is the selected tap one clock later, and that
// moving the random tap moves the selection.
module tb_meta_select;
  localparam int N = 16, W = 64;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] taps;
  logic meta_bit, sel_valid, reselect;
  logic [$clog2(N)-1:0] sel_idx;
  logic [$clog2(W):0] sel_dist;
  int checks = 0, failures = 0;
  int rnd_tap = 5, bias_tap = 9;
  logic [N-1:0] const_pat = 16'b1010_0110_0011_1001;
  logic [N-1:0] taps_d;

  meta_select #(.N_TAPS(N), .WINDOW(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // New tap word after every rising edge.
  always @(posedge clk) begin
    logic [N-1:0] t;
    t = const_pat;
    t[rnd_tap]  = $urandom_range(1);
    t[bias_tap] = ($urandom_range(3) != 0);
    taps_d <= taps;
    taps   <= t;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // meta_bit must follow the selected tap with one clock of latency.
  always @(posedge clk) if (rst_n && sel_valid) begin
    #1 chk(meta_bit == taps_d[sel_idx], "meta_bit is not the selected tap");
  end

  initial begin
    int t0, t1;
    taps = const_pat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = 0;
    chk(!sel_valid, "sel_valid before first round");
    for (int round = 0; round < 4; round++) begin
      t1 = 0;
      do begin @(posedge clk); #1; t1++; end while (!reselect);
      if (round > 0) chk(t1 == W + N, $sformatf("round length %0d", t1));
      chk(sel_valid, "sel_valid after round");
      chk(sel_idx == rnd_tap, $sformatf("round %0d selected %0d expected %0d (dist %0d)", round, sel_idx, rnd_tap, sel_dist));
      chk(sel_dist < 16, "selected tap not balanced");
      if (round == 1) rnd_tap = 12;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
