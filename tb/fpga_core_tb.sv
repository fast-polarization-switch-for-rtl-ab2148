// fpga_core_tb -- self-checking test of fpga_core, the digital part alone.
//
// The test plays the ADC: it answers each adc_start two clocks later with
// adc_done and four codes computed here from a state of polarization through
// a tetrahedral four-detector polarimeter model (V = g*T*S, g = 3 V) and a
// +-10 V 16-bit converter, and loads the matching calibration matrix. It
// checks the sampling period (100 clocks), the pixel coordinates
// trunc(320 + 200*x), trunc(240 - 200*y), trunc(200*z) of the isometric view
// within one pixel, the dark flag for zero light, and for random retarder
// settings the DAC codes 2^15 + V*2^15/70 of the control equations, with
// dac_load one clock after set_valid.
module fpga_core_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  localparam real PI   = 3.14159265358979323846;
  localparam real GAIN = 3.0;
  localparam int  NS   = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                  adc_start, adc_done;
  logic [3:0][15:0]      adc_code;
  mat4_t                 cal_m;
  logic                  pix_valid, pix_dark;
  logic [2:0][11:0]      pix;
  logic                  set_valid;
  logic [NS-1:0][15:0]   set_alpha, set_delta;
  volt_t [NS-1:0]        cal_v0, cal_vpi, cal_vab, cal_vcb, pcm_va, pcm_vc;
  logic                  dac_load;
  logic [2*NS-1:0][15:0] dac_code;
  logic [2*NS-1:0]       dac_clip;

  fpga_core dut (.*);

  real tet [4][3];
  real rot [3][3];
  real sop [4];            // S0..S3 presented to the polarimeter model
  int  start_t = -1, start_period = -1, cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
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

  // ADC stand-in: codes two clocks after each start
  logic [1:0] pend;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (adc_start) begin
      if (start_t >= 0) start_period <= cyc - start_t;
      start_t <= cyc;
    end
    pend     <= {pend[0], adc_start};
    adc_done <= pend[1];
    if (pend[1]) begin
      for (int k = 0; k < 4; k++) begin
        real v;
        v = sop[0];
        for (int j = 0; j < 3; j++) v += tet[k][j] * sop[j+1];
        adc_code[k] <= 16'($rtoi(GAIN * v * 32768.0 / 10.0));
      end
    end
  end

  task automatic show(input real s0, input real s1, input real s2, input real s3);
    real w [3];
    int  want [3];
    int  got;
    sop = '{s0, s1, s2, s3};
    @(posedge clk iff pix_valid);
    @(posedge clk iff pix_valid);
    #1;
    check(start_period == 100, $sformatf("sampling period %0d, want 100", start_period));
    if (s0 <= 0.0) begin
      check(pix_dark, "dark flagged");
      return;
    end
    check(!pix_dark, "not dark");
    for (int i = 0; i < 3; i++)
      w[i] = (rot[i][0] * s1 + rot[i][1] * s2 + rot[i][2] * s3) / s0;
    want = '{$rtoi(320.0 + 200.0 * w[0]), $rtoi(240.0 - 200.0 * w[1]), $rtoi(200.0 * w[2])};
    for (int i = 0; i < 3; i++) begin
      got = int'($signed(pix[i]));
      check(got - want[i] <= 1 && want[i] - got <= 1, $sformatf("lane %0d got %0d want %0d", i, got, want[i]));
    end
  endtask

  initial begin
    real s1, s2, s3, nrm, al, de, t, v, wc;
    pend = '0;
    adc_done = 1'b0;
    adc_code = '0;
    sop = '{0.0, 0.0, 0.0, 0.0};
    tet[0] = '{ 1.0,  1.0,  1.0};
    tet[1] = '{ 1.0, -1.0, -1.0};
    tet[2] = '{-1.0,  1.0, -1.0};
    tet[3] = '{-1.0, -1.0,  1.0};
    for (int k = 0; k < 4; k++) for (int j = 0; j < 3; j++) tet[k][j] /= $sqrt(3.0);
    for (int k = 0; k < 4; k++) begin
      cal_m[0][k] = to_fp(0.25 / GAIN);
      for (int j = 0; j < 3; j++) cal_m[j+1][k] = to_fp(0.75 / GAIN * tet[k][j]);
    end
    rot[0] = '{ 1.0 / $sqrt(2.0), -1.0 / $sqrt(2.0), 0.0};
    rot[1] = '{-1.0 / $sqrt(6.0), -1.0 / $sqrt(6.0), 2.0 / $sqrt(6.0)};
    rot[2] = '{ 1.0 / $sqrt(3.0),  1.0 / $sqrt(3.0), 1.0 / $sqrt(3.0)};
    set_valid = 1'b0;
    set_alpha = '0;
    set_delta = '0;
    for (int s = 0; s < NS; s++) begin
      cal_v0[s]  = to_volt(25.0);
      cal_vpi[s] = to_volt(40.0 + s);
      cal_vab[s] = to_volt(3.0);
      cal_vcb[s] = to_volt(-6.0 + s);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    show(0.0, 0.0, 0.0, 0.0);
    show(1.0, 0.0, 0.0, -1.0);
    for (int i = 0; i < 20; i++) begin
      s1 = urand(-1.0, 1.0); s2 = urand(-1.0, 1.0); s3 = urand(-1.0, 1.0);
      nrm = $sqrt(s1 * s1 + s2 * s2 + s3 * s3) / urand(0.2, 1.2);
      show(1.0, s1 / nrm, s2 / nrm, s3 / nrm);
    end

    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) begin
        set_alpha[s] = 16'($urandom);
        set_delta[s] = 16'($urandom);
      end
      set_valid = 1'b1;
      @(negedge clk);
      set_valid = 1'b0;
      check(dac_load, "dac_load one clock after set_valid");
      for (int c = 0; c < 2 * NS; c++) begin
        al = 2.0 * PI * real'(set_alpha[c/2]) / 65536.0;
        de = real'(set_delta[c/2]) / 65536.0;
        t  = 2.0 * 25.0 * de * $sin(al) - from_volt(cal_vpi[c/2]) * de * $cos(al);
        v  = t + from_volt((c % 2 == 1) ? cal_vcb[c/2] : cal_vab[c/2]);
        wc = 32768.0 + v * 32768.0 / 70.0;
        if (wc > 65547.0)  check(dac_code[c] == 16'hFFFF && dac_clip[c], "clip high");
        else if (wc < -12.0) check(dac_code[c] == 16'h0000 && dac_clip[c], "clip low");
        else if (wc > 12.0 && wc < 65523.0)
          check(fabs(real'(dac_code[c]) - wc) <= 12.0, $sformatf("ch %0d code %0d want %f", c, dac_code[c], wc));
      end
      @(negedge clk);
      check(!dac_load, "dac_load is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
