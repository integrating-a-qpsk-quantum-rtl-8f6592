// tb_slot_timer: PERIOD = 10.  Checks tick every 10 clocks with phase 0,
// slot numbers counting from 0, and that a sync pulse starts a new slot on
// the next clock with the next slot number.
module tb_slot_timer;
  localparam int P = 10;
  logic clk = 0, rst_n = 0, sync = 0, tick;
  logic [$clog2(P)-1:0] phase;
  logic [31:0] slot;
  int checks = 0, failures = 0;

  slot_timer #(.PERIOD(P)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_phase, exp_slot;
    repeat (2) @(posedge clk);
    #1 chk(tick && phase == 0 && slot == 0, "reset state");
    #1 rst_n = 1;
    exp_phase = 0; exp_slot = 0;
    for (int c = 0; c < 300; c++) begin
      chk(phase == exp_phase && slot == exp_slot && tick == (exp_phase == 0),
          $sformatf("c=%0d phase %0d/%0d slot %0d/%0d", c, phase, exp_phase, slot, exp_slot));
      sync = (c == 123 || c == 200);
      if (sync || exp_phase == P - 1) begin exp_phase = 0; exp_slot++; end
      else exp_phase++;
      @(posedge clk); #1;
      sync = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
