// dac_tb -- self-checking test of dac.
// Loads random codes and checks Vout = 5 V * code / 65536, the hold
// between loads and the 0 V reset value.
module dac_tb;
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

  logic        load;
  logic [15:0] code;
  volt_t       vout;

  dac dut (.*);

  initial begin
    real want;
    load = 1'b0;
    code = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(vout == '0, "0 V after reset");
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      code = (n == 0) ? 16'hFFFF : (n == 1) ? 16'h8000 : 16'($urandom);
      load = 1'b1;
      want = 5.0 * real'(code) / 65536.0;
      @(negedge clk);
      load = 1'b0;
      check(near(from_volt(vout), want, 0.0, 2.0 / 65536.0),
            $sformatf("code %0d vout %f want %f", code, from_volt(vout), want));
      code = ~code;
      @(negedge clk);
      check(near(from_volt(vout), want, 0.0, 2.0 / 65536.0), "holds without load");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
