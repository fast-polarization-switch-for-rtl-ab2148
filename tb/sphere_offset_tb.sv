// sphere_offset_tb -- self-checking test of sphere_offset.
// Drives random scaled coordinates and checks the pixel coordinates
// trunc(x + centre) with the default centre (320, 240, 0), saturation at
// the 12-bit limits +2047 / -2048, and the one-clock latency.
module sphere_offset_tb;
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

  logic                 in_valid, out_valid;
  vec3_t                in_scaled;
  logic [2:0][11:0]     out_pix;

  sphere_offset dut (.*);

  initial begin
    real v [3];
    real ctr [3];
    real w;
    int  want, got;
    ctr = '{320.0, 240.0, 0.0};
    in_valid  = 1'b0;
    in_scaled = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        v[i] = (n == 0) ? 5000.0 : (n == 1) ? -9000.0 : urand(-250.0, 250.0);
        in_scaled[i] = to_fp(v[i]);
        v[i] = from_fp(in_scaled[i]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      for (int k = 0; k < 3; k++) begin
        w    = v[k] + ctr[k];
        want = $rtoi(w);
        if (want > 2047) want = 2047;
        if (want < -2048) want = -2048;
        got  = int'($signed(out_pix[k]));
        // a sum within float rounding of an integer may truncate either way
        check(got == want || (fabs(w - $floor(w + 0.5)) < 1e-3 && (got - want <= 1 && want - got <= 1)),
              $sformatf("lane %0d x %f want %0d got %0d", k, v[k], want, got));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
