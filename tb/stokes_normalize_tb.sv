// stokes_normalize_tb -- self-checking test of stokes_normalize.
// Drives random Stokes vectors (S0 > 0, |Sk| <= S0) and checks Sk/S0
// against double precision; S0 = 0 and S0 < 0 must give the zero vector
// with out_dark set.
module stokes_normalize_tb;
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

  logic  in_valid, out_valid, out_dark;
  vec4_t in_stokes;
  vec3_t out_sop;

  stokes_normalize dut (.*);

  initial begin
    real s [4];
    in_valid  = 1'b0;
    in_stokes = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      s[0] = (n == 0) ? 0.0 : (n == 1) ? -1.5 : urand(0.01, 50.0);
      for (int i = 1; i < 4; i++) s[i] = urand(-s[0], s[0]);
      if (n == 2) s[0] = 1.0;        // S0 exactly a power of two
      for (int i = 0; i < 4; i++) begin
        in_stokes[i] = to_fp(s[i]);
        s[i] = from_fp(in_stokes[i]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      if (s[0] <= 0.0) begin
        check(out_dark, "S0 <= 0 flags dark");
        for (int i = 0; i < 3; i++) check(out_sop[i] == '0, "dark sample gives zero vector");
      end else begin
        check(!out_dark, "S0 > 0 not dark");
        for (int i = 0; i < 3; i++)
          check(near(from_fp(out_sop[i]), s[i+1] / s[0], 1e-6, 1e-9),
                $sformatf("s%0d want %f got %f", i+1, s[i+1] / s[0], from_fp(out_sop[i])));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
