// tb_rejection_sampler: self-checking test of the rejection sampler.
//
// A four-step spectrum (counts 1000, 3000, 0, 2000 over four quarters of the
// channels) is loaded. Random A and B words are driven from here; every clock
// the accept strobe is compared with B < spectrum[A] of the try two clocks
// earlier (B = rnd_b * 3000 / 2^16), and every accepted channel entering the output register with A.
// While ready is low the held channel must not change. Over 20 000 samples the
// quarters must be drawn in the ratio 1 : 3 : 0 : 2.
module tb_rejection_sampler;
  import siggen_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] rnd_a = '0, rnd_b = 16'hFFFF;  // no accepts while loading
  logic [16:0] b_range = 17'd3000;  // the peak count
  logic ram_we = 1'b0;
  logic [9:0] ram_waddr = '0;
  logic [15:0] ram_wdata = '0;
  logic valid, ready = 1'b0, accept;
  logic [9:0] channel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rejection_sampler dut (.clk, .rst_n, .rnd_a, .rnd_b, .b_range, .ram_we, .ram_waddr,
                         .ram_wdata, .valid, .ready, .channel, .accept);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int spec(input int ch);
    case (ch / 256)
      0: return 1000;
      1: return 3000;
      2: return 0;
      default: return 2000;
    endcase
  endfunction

  int quarter [4];
  int got = 0, tries = 0, acc = 0;
  int a1, b1;          // try issued one clock earlier
  bit exp_acc;
  logic [9:0] held;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    ram_we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      ram_waddr = 10'(i); ram_wdata = 16'(spec(i));
      @(posedge clk); #1;
    end
    ram_we = 1'b0;
    ready = 1'b1;
    a1 = -1;
    while (got < 20000) begin
      int a0, b0;
      rnd_a = 16'($urandom); rnd_b = 16'($urandom);
      a0 = int'(rnd_a) >> 6; b0 = int'((longint'(rnd_b) * longint'(b_range)) >> 16);
      // the try issued last clock is judged in this clock
      exp_acc = (a1 >= 0) && (b1 < spec(a1));
      #1 check(accept == exp_acc, "accept = B < C");
      if (accept) acc++;
      @(posedge clk); #1;
      if (exp_acc) begin
        check(valid && channel == 10'(a1), "accepted channel is A");
        quarter[a1 / 256]++;
        got++;
      end
      tries++;
      a1 = a0; b1 = b0;
    end
    $display("tries=%0d accepted=%0d quarters=%0d %0d %0d %0d", tries, got,
             quarter[0], quarter[1], quarter[2], quarter[3]);
    check(quarter[2] == 0, "empty channels never drawn");
    check(real'(quarter[1]) / quarter[0] > 2.7 && real'(quarter[1]) / quarter[0] < 3.3, "ratio 3:1");
    check(real'(quarter[3]) / quarter[0] > 1.8 && real'(quarter[3]) / quarter[0] < 2.2, "ratio 2:1");
    check(real'(got) / tries > 0.46 && real'(got) / tries < 0.54, "acceptance = mean count / b_range");
    // back-pressure: with ready low the held sample must stay
    ready = 1'b0;
    repeat (50) @(posedge clk);
    #1 held = channel;
    check(valid, "sample held while not taken");
    repeat (200) begin
      rnd_a = 16'($urandom); rnd_b = 16'($urandom);
      @(posedge clk); #1;
      check(valid && channel == held, "held sample stable");
    end
    ready = 1'b1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
