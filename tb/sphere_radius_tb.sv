// sphere_radius_tb -- self-checking test of sphere_radius.
// Drives random vectors and checks the default scaling (+200, -200, +200
// pixels per unit) and the one-clock latency.
module sphere_radius_tb;
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
  vec3_t in_iso, out_scaled;

  sphere_radius dut (.*);

  initial begin
    real v [3];
    real sc [3];
    sc = '{200.0, -200.0, 200.0};
    in_valid = 1'b0;
    in_iso   = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        in_iso[i] = to_fp(urand(-1.0, 1.0));
        v[i] = from_fp(in_iso[i]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      for (int k = 0; k < 3; k++)
        check(near(from_fp(out_scaled[k]), v[k] * sc[k], 1e-6, 1e-9),
              $sformatf("lane %0d want %f got %f", k, v[k] * sc[k], from_fp(out_scaled[k])));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
