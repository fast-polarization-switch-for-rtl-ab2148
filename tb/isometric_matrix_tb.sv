// isometric_matrix_tb -- self-checking test of isometric_matrix.
// Drives random points of the unit sphere and checks the rotated vector
// against the isometric rotation computed here in double precision, that its
// length stays 1, and the one-clock latency. The poles map as expected:
// s3 = +1 lies straight up.
module isometric_matrix_tb;
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
  vec3_t in_sop, out_iso;

  isometric_matrix dut (.*);

  initial begin
    real r [3][3];
    real s [3];
    real want, len, nrm;
    r[0] = '{ 1.0 / $sqrt(2.0), -1.0 / $sqrt(2.0), 0.0};
    r[1] = '{-1.0 / $sqrt(6.0), -1.0 / $sqrt(6.0), 2.0 / $sqrt(6.0)};
    r[2] = '{ 1.0 / $sqrt(3.0),  1.0 / $sqrt(3.0), 1.0 / $sqrt(3.0)};
    in_valid = 1'b0;
    in_sop   = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if (n == 0) s = '{0.0, 0.0, 1.0};
      else begin
        for (int i = 0; i < 3; i++) s[i] = urand(-1.0, 1.0);
        nrm = $sqrt(s[0] * s[0] + s[1] * s[1] + s[2] * s[2]);
        for (int i = 0; i < 3; i++) s[i] = s[i] / nrm;
      end
      for (int i = 0; i < 3; i++) begin
        in_sop[i] = to_fp(s[i]);
        s[i] = from_fp(in_sop[i]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      len = 0.0;
      for (int k = 0; k < 3; k++) begin
        want = r[k][0] * s[0] + r[k][1] * s[1] + r[k][2] * s[2];
        check(near(from_fp(out_iso[k]), want, 0.0, 1e-5),
              $sformatf("lane %0d want %f got %f", k, want, from_fp(out_iso[k])));
        len += from_fp(out_iso[k]) * from_fp(out_iso[k]);
      end
      check(near(len, 1.0, 0.0, 1e-4), $sformatf("length %f", len));
      if (n == 0) check(near(from_fp(out_iso[1]), 2.0 / $sqrt(6.0), 0.0, 1e-5), "s3 pole points up");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
