// tb_bob_decoder: PERIOD = 40 with window 6..34.  The testbench runs its
// own slot counter, feeds random bits, and per slot sends nothing, one
// click on a random detector, a double click, or a click outside the
// window.  Expected records (base = random bit at the tick, clicks only
// from pulses inside the window after the two-flop synchroniser) are
// computed here and compared.
module tb_bob_decoder;
  import qkd_pkg::*;
  localparam int P = 40, WS = 6, WE = 34;
  logic clk = 0, rst_n = 0, rnd_bit = 0, tick, det1 = 0, det2 = 0;
  logic [$clog2(P)-1:0] phase = 0;
  logic [SLOT_W-1:0] slot = 0;
  logic phi3, rec_valid;
  qkd_rec_t rec;
  int checks = 0, failures = 0;
  int n_rec = 0, n_exp = 0, n_d1 = 0, n_d2 = 0, n_dbl = 0, n_out = 0;

  bob_decoder #(.PERIOD(P), .WIN_START(WS), .WIN_END(WE)) dut (.*);

  assign tick = (phase == 0);
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
    int kind, at;
    logic base;
    logic [1:0] exp_clicks;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 400; s++) begin
      kind = $urandom_range(4);
      // click pulse position: the pulse is high at tb phases at..at+1, seen by the
      // decoder two clocks later through its synchroniser
      at = (kind == 4) ? (($urandom_range(1) == 1) ? 1 : WE) : $urandom_range(WS, WE - 4);
      exp_clicks = 2'b00;
      for (int ph = 0; ph < P; ph++) begin
        rnd_bit = 1'($urandom_range(1));
        if (ph == 0) base = rnd_bit;
        det1 = 0; det2 = 0;
        if (ph >= at && ph <= at + 1) begin
          case (kind)
            1: det1 = 1;
            2: det2 = 1;
            3: begin det1 = 1; det2 = 1; end
            4: det1 = 1;
            default: ;
          endcase
        end
        @(posedge clk);
        #1;
        if (ph == 0) chk(phi3 == base, "phi3 = base");
        if (ph == WE) begin
          case (kind)
            1: exp_clicks = 2'b01;
            2: exp_clicks = 2'b10;
            3: exp_clicks = 2'b11;
            default: exp_clicks = 2'b00;
          endcase
          if (exp_clicks != 0) begin
            n_exp++;
            chk(rec_valid, $sformatf("slot %0d record expected", s));
            chk(rec.slot == s && rec.base == base_e'(base) && rec.clicks == exp_clicks
                && rec.key_bit == exp_clicks[1], $sformatf("slot %0d record content", s));
          end else begin
            chk(!rec_valid, $sformatf("slot %0d no record expected (kind %0d at %0d)", s, kind, at));
          end
          if (kind == 1) n_d1++;
          if (kind == 2) n_d2++;
          if (kind == 3) n_dbl++;
          if (kind == 4) n_out++;
        end else begin
          chk(!rec_valid, "record only at window end");
        end
        if (rec_valid) n_rec++;
        phase = (ph == P - 1) ? '0 : phase + 1'b1;
        if (ph == P - 1) slot++;
      end
    end
    chk(n_rec == n_exp, "record count");
    chk(n_d1 > 0 && n_d2 > 0 && n_dbl > 0 && n_out > 0, "all click kinds exercised");
    $display("records %0d: det1 %0d det2 %0d double %0d outside %0d", n_rec, n_d1, n_d2, n_dbl, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
