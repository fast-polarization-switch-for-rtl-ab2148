// calibration_matrix_tb -- self-checking test of calibration_matrix.
// Loads random 4x4 calibration matrices, drives random voltages and checks
// S = M*V against a double-precision product, and the one-clock latency.
module calibration_matrix_tb;
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
  mat4_t cal_m;
  vec4_t in_volts, out_stokes;

  calibration_matrix dut (.*);

  initial begin
    real m [4][4];
    real v [4];
    real want, mag;
    in_valid = 1'b0;
    in_volts = '0;
    cal_m    = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          m[r][c] = urand(-2.0, 2.0);
          cal_m[r][c] = to_fp(m[r][c]);
          m[r][c] = from_fp(cal_m[r][c]);
        end
      for (int c = 0; c < 4; c++) begin
        v[c] = urand(-10.0, 10.0);
        in_volts[c] = to_fp(v[c]);
        v[c] = from_fp(in_volts[c]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      for (int r = 0; r < 4; r++) begin
        want = 0.0;
        mag  = 0.0;
        for (int c = 0; c < 4; c++) begin
          want += m[r][c] * v[c];
          mag  += fabs(m[r][c] * v[c]);
        end
        check(near(from_fp(out_stokes[r]), want, 0.0, 1e-6 * mag + 1e-9),
              $sformatf("S%0d want %f got %f", r, want, from_fp(out_stokes[r])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
