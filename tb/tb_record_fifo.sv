// tb_record_fifo: DEPTH = 8.  Random writes and reads against a queue
// model, with phases of no reads to force overflow.  Checks data order,
// count, rd_valid, dropped-record count, the sticky overflow flag and its
// clear.
module tb_record_fifo;
  localparam int W = 36, D = 8;
  logic clk = 0, rst_n = 0, wr_valid = 0, rd_ready = 0, clr_overflow = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic rd_valid, overflow;
  logic [$clog2(D):0] count;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  int drops = 0, pops = 0;
  bit exp_ovf = 0;

  record_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit do_rd, do_wr;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      wr_valid = ($urandom_range(2) != 0);
      wr_data  = {$urandom, 4'($urandom)};
      rd_ready = ((c / 200) % 3 == 1) ? 1'b0 : ($urandom_range(1) == 1);
      clr_overflow = (c % 500 == 499);
      #1;
      chk(rd_valid == (q.size() != 0), "rd_valid");
      chk(count == q.size(), $sformatf("count %0d/%0d", count, q.size()));
      if (q.size() != 0) chk(rd_data == q[0], "rd_data order");
      do_rd = rd_valid && rd_ready;
      do_wr = wr_valid && (q.size() < D || do_rd);
      @(posedge clk);
      if (do_rd) begin void'(q.pop_front()); pops++; end
      if (do_wr) q.push_back(wr_data);
      if (wr_valid && !do_wr) begin drops++; exp_ovf = 1; end
      else if (clr_overflow) exp_ovf = 0;
      #1;
      chk(overflow == exp_ovf, "overflow flag");
      chk(drop_count == drops, "drop count");
    end
    chk(drops > 0 && pops > 0, "overflow and reads both exercised");
    $display("pops %0d drops %0d", pops, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
