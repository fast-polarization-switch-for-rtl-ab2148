// pcm_voltage_tb -- self-checking test of pcm_voltage.
// Loads random retarder settings (alpha, delta) and calibration constants for
// the three stages and checks Va and Vc against the control equations worked
// out with $sin/$cos in double precision, the DAC codes against
// 2^15 + V*2^15/70 (a 14 V/V driver on a 5 V reference), the clipping of
// voltages beyond +-70 V, the one-clock latency and that outputs hold
// between loads.
module pcm_voltage_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  localparam real PI = 3.14159265358979323846;
  localparam int  NS = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_clip = 0;

  logic                    in_valid, out_valid;
  logic  [NS-1:0][15:0]    in_alpha, in_delta;
  volt_t [NS-1:0]          cal_v0, cal_vpi, cal_vab, cal_vcb;
  volt_t [NS-1:0]          out_va, out_vc;
  logic  [2*NS-1:0][15:0]  out_code;
  logic  [2*NS-1:0]        out_clip;

  pcm_voltage dut (.*);

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

  function automatic volt_t to_volt(input real v);
    return volt_t'($rtoi(v * 65536.0));
  endfunction

  function automatic real from_volt(input volt_t v);
    return real'(v) / 65536.0;
  endfunction

  task automatic check_code(input real v, input logic [15:0] code, input logic clip, input string what);
    real want;
    want = 32768.0 + v * 32768.0 / 70.0;
    if (want > 65535.0 + 12.0) check(code == 16'hFFFF && clip, {what, " clipped high"});
    else if (want < -12.0)     check(code == 16'h0000 && clip, {what, " clipped low"});
    else if (want > 12.0 && want < 65523.0)
      check(!clip && fabs(real'(code) - want) <= 12.0,
            $sformatf("%s code %0d want %f", what, code, want));
    if (clip) n_clip++;
  endtask

  initial begin
    real a, d, v0, vpi, vab, vcb, t;
    in_valid = 1'b0;
    in_alpha = '0; in_delta = '0;
    cal_v0 = '0; cal_vpi = '0; cal_vab = '0; cal_vcb = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int c = 0; c < 2 * NS; c++) check(out_code[c] == 16'h8000, "reset code is mid-scale (0 V)");
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) begin
        in_alpha[s] = (n == 0) ? 16'd0 : 16'($urandom);
        in_delta[s] = (n == 0) ? 16'd0 : 16'($urandom);
        cal_v0[s]  = to_volt(urand(5.0, (n % 10 == 9) ? 60.0 : 25.0));
        cal_vpi[s] = to_volt(urand(10.0, (n % 10 == 9) ? 80.0 : 30.0));
        cal_vab[s] = to_volt(urand(-20.0, 20.0));
        cal_vcb[s] = to_volt(urand(-20.0, 20.0));
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "latency one clock");
      for (int s = 0; s < NS; s++) begin
        a   = 2.0 * PI * real'(in_alpha[s]) / 65536.0;
        d   = real'(in_delta[s]) / 65536.0;
        v0  = from_volt(cal_v0[s]);
        vpi = from_volt(cal_vpi[s]);
        vab = from_volt(cal_vab[s]);
        vcb = from_volt(cal_vcb[s]);
        t   = 2.0 * v0 * d * $sin(a) - vpi * d * $cos(a);
        check(near(from_volt(out_va[s]), t + vab, 0.0, 0.02),
              $sformatf("stage %0d Va %f want %f", s, from_volt(out_va[s]), t + vab));
        check(near(from_volt(out_vc[s]), t + vcb, 0.0, 0.02),
              $sformatf("stage %0d Vc %f want %f", s, from_volt(out_vc[s]), t + vcb));
        check_code(t + vab, out_code[2*s],   out_clip[2*s],   $sformatf("stage %0d A", s));
        check_code(t + vcb, out_code[2*s+1], out_clip[2*s+1], $sformatf("stage %0d C", s));
        if (n == 0) begin
          check(out_va[s] == cal_vab[s] && out_vc[s] == cal_vcb[s], "delta = 0 gives the bias only");
        end
      end
      // outputs hold while no new setting is loaded
      begin
        logic [2*NS-1:0][15:0] held;
        held = out_code;
        in_alpha = ~in_alpha;
        repeat (2) @(negedge clk);
        check(!out_valid && out_code == held, "outputs hold between loads");
      end
    end
    check(n_clip > 0, "clipping beyond +-70 V was exercised");
    $display("clipped channels: %0d", n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
