// tb_bob_modem: Bob's MODEM at PERIOD = 20 (window 3..17), 64 taps,
// 128-clock window, 16-record buffer.  The testbench plays Alice and the
// optical channel: each slot it picks Alice's base and bit, reads phi3, and
// with probability 1/2 fires a detector by the phase-difference rule of the
// link (0: detector 1, pi: detector 2, +-pi/2: either at random).  Checks:
// a record exactly for each slot with a click, carrying the slot number,
// Bob's base as driven on phi3 and the detector flags; in matching bases
// the key bit equals Alice's bit; the generator selects tap
// (2500-1325)/25 = 47.
module tb_bob_modem;
  import qkd_pkg::*;
  localparam int P = 20, N = 64;
  logic clk = 0, rst_n = 0, sync = 0, phi3, det1 = 0, det2 = 0;
  logic rd_ready = 1, rd_valid, overflow, clr_overflow = 0;
  qkd_rec_t rd_data;
  logic [15:0] drop_count;
  logic [4:0] rd_count;
  logic [$clog2(N)-1:0] trng_sel_idx;
  logic trng_sel_valid, trng_reselect;
  int checks = 0, failures = 0;
  logic [1:0] exp_clicks [int];
  logic exp_base [int], a_bit [int], a_base [int];
  qkd_rec_t recs [int];
  int n_resel = 0, n_sift = 0, n_mismatch = 0;

  bob_modem #(.PERIOD(P), .WIN_START(3), .WIN_END(17), .N_TAPS(N), .WINDOW(128),
              .FIFO_DEPTH(16)) dut (.*);

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

  always @(posedge clk) if (rst_n && rd_valid && rd_ready) recs[int'(rd_data.slot)] = rd_data;
  always @(posedge clk) if (rst_n && trng_reselect) begin
    n_resel++;
    chk(trng_sel_idx == 47, $sformatf("selected tap %0d", trng_sel_idx));
  end

  initial begin
    int ph, sl;
    logic ab, ak;
    phase_t d;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    ph = 0; sl = 0;
    for (int c = 0; c < 12000; c++) begin
      det1 = 0; det2 = 0;
      if (ph == 6 && $urandom_range(1) == 1) begin
        ab = 1'($urandom_range(1)); ak = 1'($urandom_range(1));
        d = alice_phase(base_e'(ab), ak) - bob_phase(base_e'(phi3));
        a_bit[sl] = ak; a_base[sl] = ab; exp_base[sl] = phi3;
        case (d)
          3'd0: begin det1 = 1; exp_clicks[sl] = 2'b01; end
          3'd4: begin det2 = 1; exp_clicks[sl] = 2'b10; end
          default: if ($urandom_range(1) == 1) begin det1 = 1; exp_clicks[sl] = 2'b01; end
                   else begin det2 = 1; exp_clicks[sl] = 2'b10; end
        endcase
      end
      sync = (c == 5003);
      @(posedge clk); #1;
      if (sync) begin ph = 0; sl++; end
      else if (ph == P - 1) begin ph = 0; sl++; end
      else ph++;
    end
    for (int s = 0; s < sl - 1; s++) begin
      if (exp_clicks.exists(s)) begin
        chk(recs.exists(s), $sformatf("slot %0d record missing", s));
        if (recs.exists(s)) begin
          chk(recs[s].clicks == exp_clicks[s] && recs[s].base == base_e'(exp_base[s])
              && recs[s].key_bit == exp_clicks[s][1], $sformatf("slot %0d record", s));
          if (a_base[s] == exp_base[s]) begin
            n_sift++;
            chk(recs[s].key_bit == a_bit[s], $sformatf("slot %0d sifted bit", s));
          end else n_mismatch++;
        end
      end else begin
        chk(!recs.exists(s), $sformatf("slot %0d unexpected record", s));
      end
    end
    chk(n_sift > 50 && n_mismatch > 50, "both matching and mismatching bases seen");
    chk(n_resel >= 50, "reselections");
    chk(drop_count == 0 && !overflow, "no drops");
    $display("slots %0d sifted %0d mismatched-base %0d", sl, n_sift, n_mismatch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
