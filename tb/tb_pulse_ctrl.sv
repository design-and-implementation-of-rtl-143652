// tb_pulse_ctrl: self-checking test of the pulse/switch controller.
//
// Short widths (SQ 6, BLANK 4 clocks) are used. A reference state machine
// written here predicts, every clock, dac_data, dac_wr, both switch pairs,
// pulse_start, missed and stalled from the same z, amp_valid, amp and xtal
// stimulus. Events are random, amp_valid is sometimes held low to force
// stalls, and each channel, stall and dropped event must occur.
module tb_pulse_ctrl;
  import siggen_pkg::*;
  localparam int SQ = 6, BL = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic z = 0, amp_valid = 0, amp_ready, dac_wr, pulse_start, missed, stalled, busy;
  logic [DAC_W-1:0] amp = '0, dac_data;
  xtal_e xtal = XTAL_NAI;
  logic [1:0] sw1, sw2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pulse_ctrl #(.SQ_CYCLES(SQ), .BLANK_CYCLES(BL)) dut (
    .clk, .rst_n, .z, .amp_valid, .amp_ready, .amp, .xtal, .dac_data, .dac_wr,
    .sw1, .sw2, .pulse_start, .missed, .stalled, .busy);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // reference model state
  int st = 0, cnt = 0, rx = 0, rdata = 0, rwr = 0, rstart = 0;
  int npulse[2], nstall = 0, nmiss = 0, width = 0, widths_ok = 1;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < 20000; k++) begin
      // drive inputs for this cycle
      z = ($urandom_range(0, 9) == 0);
      amp_valid = ($urandom_range(0, 3) != 0);
      amp = 12'($urandom);
      xtal = xtal_e'($urandom_range(0, 1));
      #1;
      // combinational outputs against the model
      check(amp_ready == (st == 1), "amp_ready");
      check(stalled == (st == 1 && !amp_valid), "stalled");
      check(missed == (z && st != 0), "missed");
      check(busy == (st != 0), "busy");
      check(sw1 == ((st == 2) ? (2'b01 << rx) : 2'b00), "switch1");
      check(sw2 == ((st == 2) ? (2'b01 << rx) : 2'b00), "switch2");
      check(int'(dac_data) == rdata && int'(dac_wr) == rwr && int'(pulse_start) == rstart, "DAC write");
      if (stalled) nstall++;
      if (missed) nmiss++;
      if (st == 2) width++;
      // advance the model
      rwr = 0; rstart = 0;
      case (st)
        0: if (z) st = 1;
        1: if (amp_valid) begin
             st = 2; cnt = SQ - 1; rx = int'(xtal); rdata = int'(amp); rwr = 1; rstart = 1;
             npulse[rx]++;
             width = 0;
           end
        2: if (cnt == 0) begin
             st = 3; cnt = BL - 1; rdata = 0; rwr = 1;
             if (width != SQ) widths_ok = 0;
           end else cnt--;
        default: if (cnt == 0) st = 0; else cnt--;
      endcase
      @(posedge clk); #1;
    end
    $display("pulses NaI=%0d CsI=%0d stalls=%0d missed=%0d", npulse[0], npulse[1], nstall, nmiss);
    check(widths_ok == 1, "square wave lasts SQ_CYCLES");
    check(npulse[0] > 0 && npulse[1] > 0, "both channels used");
    check(nstall > 0, "stall occurred");
    check(nmiss > 0, "dead-time drop occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
