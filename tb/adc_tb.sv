// adc_tb -- self-checking test of adc.
// Converts random voltages (some beyond the +-10 V range) and checks the
// code trunc(v*32768/10), saturation, that done comes exactly CONV_CYCLES
// clocks after start, and that a start during a conversion is ignored.
module adc_tb;
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

  volt_t       vin;
  logic        start, done;
  logic [15:0] code;

  adc dut (.*);

  initial begin
    real v, w;
    int  want, lat;
    vin = '0;
    start = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      v = (n == 0) ? 12.5 : (n == 1) ? -11.0 : urand(-10.0, 10.0);
      vin   = to_volt(v);
      v     = from_volt(vin);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      vin   = to_volt(urand(-10.0, 10.0));   // must not affect the sample
      lat = 1;
      while (!done && lat < 50) begin
        if (lat == 2) start = 1'b1;          // ignored: conversion running
        @(negedge clk);
        start = 1'b0;
        lat++;
      end
      // start is sampled at the first edge, done rises CONV_CYCLES = 4 edges later
      check(lat == 5, $sformatf("done seen at falling edge %0d, want 5 (4 clocks after the sampling edge)", lat));
      w = v * 32768.0 / 10.0;
      want = $rtoi(w);
      if (want > 32767) want = 32767;
      if (want < -32768) want = -32768;
      check(int'($signed(code)) == want, $sformatf("v %f code %0d want %0d", v, $signed(code), want));
      @(negedge clk);
      check(!done, "done lasts one clock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
