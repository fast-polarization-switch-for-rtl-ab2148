// hv_driver_tb -- self-checking test of hv_driver.
// Checks the static transfer Vout = 14*(2*Vdac - 5 V) at several DAC
// voltages, the +-70 V rails, and the published transition time: a full
// -70 V to +70 V swing must take 8 us, i.e. 800 model clocks of 10 ns
// (125 kHz switching), and come back the same way.
module hv_driver_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic volt_t to_volt(input real v);
    return volt_t'($rtoi(v * 65536.0));
  endfunction

  function automatic real from_volt(input volt_t v);
    return real'(v) / 65536.0;
  endfunction

  volt_t vin, vout;

  hv_driver dut (.*);

  task automatic settle_and_check(input real vdac);
    real want;
    vin = to_volt(vdac);
    want = 14.0 * (2.0 * from_volt(vin) - 5.0);
    if (want > 70.0) want = 70.0;
    if (want < -70.0) want = -70.0;
    repeat (900) @(negedge clk);
    check(near(from_volt(vout), want, 0.0, 0.01),
          $sformatf("Vdac %f: vout %f want %f", vdac, from_volt(vout), want));
  endtask

  // clocks until vout is within 0.1 V of v
  task automatic time_to(input real v, output int n);
    n = 0;
    while (!near(from_volt(vout), v, 0.0, 0.1) && n < 5000) begin
      @(negedge clk);
      n++;
    end
  endtask

  initial begin
    int n;
    vin = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(vout == '0, "0 V after reset");
    settle_and_check(2.5);      // mid-scale -> 0 V
    settle_and_check(3.75);     // +35 V
    settle_and_check(1.0);      // -42 V
    settle_and_check(0.0);      // -70 V
    settle_and_check(6.0);      // beyond range -> +70 V rail
    for (int k = 0; k < 20; k++) settle_and_check(urand(0.0, 5.0));
    // full swing timing
    settle_and_check(0.0);
    vin = to_volt(5.0);
    time_to(70.0, n);
    check(n >= 795 && n <= 805, $sformatf("rise -70 -> +70 V took %0d clocks (want 800 = 8 us)", n));
    vin = to_volt(0.0);
    repeat (400) @(negedge clk);
    check(near(from_volt(vout), 0.0, 0.0, 1.0), $sformatf("halfway through the fall at %f V", from_volt(vout)));
    time_to(-70.0, n);
    check(n >= 395 && n <= 405, $sformatf("second half of the fall took %0d clocks", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
