// tb_shaping_channel: self-checking test of the shaping-channel model.
//
// A 1 V square wave of 250 clocks (20 ns each) is applied through switch1 to a
// NaI (RC 230 ns) and a CsI (RC 630 ns) channel with R0C0 = 300 ns. While
// switch2 is closed the output must follow
//   V(t) = U0 RC/(RC - R0C0) (exp(-t/RC) - exp(-t/R0C0)),
// computed here in closed form. The peak time must be
// t = ln(RC/R0C0) RC R0C0/(RC - R0C0). After the falling edge the internal
// response goes negative and the output must stay 0 with switch2 open.
module tb_shaping_channel;
  logic clk = 1'b0, rst_n = 1'b0, sw1 = 1'b0, sw2 = 1'b0;
  real vin = 0.0, vn, vc;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  shaping_channel #(.RC_NS(230.0)) u_nai (.clk, .rst_n, .sw1, .sw2, .vin, .vout(vn));
  shaping_channel #(.RC_NS(630.0)) u_csi (.clk, .rst_n, .sw1, .sw2, .vin, .vout(vc));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic real model(input real rc, input real t);
    return rc / (rc - 300.0) * ($exp(-t / rc) - $exp(-t / 300.0));
  endfunction

  function automatic real tpeak(input real rc);
    return $ln(rc / 300.0) * rc * 300.0 / (rc - 300.0);
  endfunction

  real pk_n = 0.0, pk_c = 0.0, t;
  int ipk_n = 0, ipk_c = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk); #1;
    check(vn == 0.0 && vc == 0.0, "idle output is zero");
    vin = 1.0; sw1 = 1'b1; sw2 = 1'b1;
    for (int k = 1; k <= 250; k++) begin
      @(posedge clk); #1;
      t = 20.0 * k;
      check(vn > model(230.0, t) - 1e-6 && vn < model(230.0, t) + 1e-6, $sformatf("NaI V(%0.0f ns)", t));
      check(vc > model(630.0, t) - 1e-6 && vc < model(630.0, t) + 1e-6, $sformatf("CsI V(%0.0f ns)", t));
      if (vn > pk_n) begin pk_n = vn; ipk_n = k; end
      if (vc > pk_c) begin pk_c = vc; ipk_c = k; end
    end
    $display("NaI peak %f V at %0d ns (model %f ns); CsI peak %f V at %0d ns (model %f ns)",
             pk_n, ipk_n * 20, tpeak(230.0), pk_c, ipk_c * 20, tpeak(630.0));
    check(ipk_n * 20.0 > tpeak(230.0) - 20.0 && ipk_n * 20.0 < tpeak(230.0) + 20.0, "NaI peak time");
    check(ipk_c * 20.0 > tpeak(630.0) - 20.0 && ipk_c * 20.0 < tpeak(630.0) + 20.0, "CsI peak time");
    check(pk_c > pk_n, "slower decay gives a larger peak");
    // falling edge: switch1 grounds the input, switch2 blocks the negative pulse
    sw1 = 1'b0; sw2 = 1'b0;
    repeat (20) begin
      @(posedge clk); #1;
      check(vn == 0.0 && vc == 0.0, "negative pulse blocked");
    end
    check(u_nai.v < -0.1 && u_csi.v < -0.1, "falling edge gives a negative pulse inside");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
