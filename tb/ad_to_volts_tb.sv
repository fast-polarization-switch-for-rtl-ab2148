// ad_to_volts_tb -- self-checking test of ad_to_volts.
// Feeds random ADC codes (as floats) and checks each lane against
// code * 10 V / 32768 worked out in double precision, and the one-clock latency.
module ad_to_volts_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
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

  logic  in_valid, out_valid;
  vec4_t in_fp, out_volts;

  ad_to_volts dut (.*);

  initial begin
    real c [4];
    in_valid = 1'b0;
    in_fp    = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        c[i] = real'(int'($urandom_range(0, 65535)) - 32768);
        in_fp[i] = to_fp(c[i]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      for (int i = 0; i < 4; i++)
        check(near(from_fp(out_volts[i]), c[i] * 10.0 / 32768.0, 1e-6, 1e-9),
              $sformatf("lane %0d code %f gave %f V", i, c[i], from_fp(out_volts[i])));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
