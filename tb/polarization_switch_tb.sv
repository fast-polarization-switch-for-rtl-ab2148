// polarization_switch_tb -- end-to-end test of the polarization switch unit
// at its default parameters (3 controller stages, 16-bit converters,
// 100-clock sampling period).
//
// A polarimeter model drives the four analog inputs: four detectors behind
// analysers whose Stokes directions form a regular tetrahedron, so the
// detector voltages are V = g*T*S with T rows (1, t_k) and g = 3 V per unit
// intensity. Because sum(t_k t_k^T) = (4/3) I and sum(t_k) = 0, the exact
// calibration matrix is M = (1/g) diag(1/4, 3/4, 3/4, 3/4) T^T, which the
// test loads into the unit.
//
// Checked, against values worked out here in double precision:
//  * visualisation: for random states of polarization (full and partial
//    polarization, random intensity) the pixel coordinates equal
//    trunc(320 + 200*x), trunc(240 - 200*y), trunc(200*z) within one pixel,
//    (x, y, z) being the state rotated to the isometric view; a new point
//    every 100 clocks; seven clocks from ADC result to pixel;
//  * no light gives the dark flag;
//  * switching: for random retarder settings every electrode settles to the
//    voltage of the control equations (or to the +-70 V rail when out of
//    reach, with dac_clip set); a full -70 V to +70 V swing of an electrode
//    completes in 8 us (800 clocks of 10 ns), the published 125 kHz rate;
//  * the display keeps updating while the controller switches.
// Each mechanism is counted and must occur at least once.
module polarization_switch_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  localparam real PI   = 3.14159265358979323846;
  localparam real GAIN = 3.0;
  localparam int  NS   = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_pix = 0, n_dark = 0, n_switch = 0, n_clip = 0, n_full_swing = 0, n_pix_while_switching = 0;

  volt_t [3:0]            pol_v;
  mat4_t                  cal_m;
  logic                   pix_valid, pix_dark;
  logic  [2:0][11:0]      pix;
  logic                   set_valid;
  logic  [NS-1:0][15:0]   set_alpha, set_delta;
  volt_t [NS-1:0]         cal_v0, cal_vpi, cal_vab, cal_vcb;
  volt_t [NS-1:0]         pcm_va, pcm_vc;
  volt_t [2*NS-1:0]       electrode_v;
  logic  [2*NS-1:0]       dac_clip;

  polarization_switch dut (.*);

  real tet [4][3];
  real rot [3][3];

  initial begin
    repeat (400000) @(posedge clk);
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

  // ---------------- visualisation ----------------
  int adc_to_pix = -1;
  int last_pix_t = -1, pix_period = -1;
  int cyc = 0;
  logic switching = 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_core.adc_done) adc_to_pix <= 0;
    else if (adc_to_pix >= 0) adc_to_pix <= adc_to_pix + 1;
    if (pix_valid) begin
      if (last_pix_t >= 0) pix_period <= cyc - last_pix_t;
      last_pix_t <= cyc;
      if (switching) n_pix_while_switching++;
    end
  end

  task automatic show_sop(input real s0, input real s1, input real s2, input real s3);
    real sv [4];
    real v;
    real w [3];
    int  want [3];
    int  got;
    sv = '{s0, s1, s2, s3};
    for (int k = 0; k < 4; k++) begin
      v = sv[0];
      for (int j = 0; j < 3; j++) v += tet[k][j] * sv[j+1];
      pol_v[k] = to_volt(GAIN * v);
    end
    // the second display update after the change comes from a new sample
    @(posedge clk iff pix_valid);
    @(posedge clk iff pix_valid);
    #1;
    check(adc_to_pix == 7, $sformatf("ADC result to pixel took %0d clocks, want 7", adc_to_pix));
    check(pix_period == 100, $sformatf("display update period %0d clocks, want 100", pix_period));
    if (s0 <= 0.0) begin
      check(pix_dark, "no light flagged dark");
      if (pix_dark) n_dark++;
      return;
    end
    check(!pix_dark, "light not flagged dark");
    for (int i = 0; i < 3; i++)
      w[i] = rot[i][0] * s1 / s0 + rot[i][1] * s2 / s0 + rot[i][2] * s3 / s0;
    want[0] = $rtoi(320.0 + 200.0 * w[0]);
    want[1] = $rtoi(240.0 - 200.0 * w[1]);
    want[2] = $rtoi(200.0 * w[2]);
    for (int i = 0; i < 3; i++) begin
      got = int'($signed(pix[i]));
      check(got - want[i] <= 1 && want[i] - got <= 1,
            $sformatf("pixel lane %0d got %0d want %0d", i, got, want[i]));
    end
    n_pix++;
  endtask

  // ---------------- switching ----------------
  task automatic apply_setting(input logic [NS-1:0][15:0] a, input logic [NS-1:0][15:0] d);
    @(negedge clk);
    set_alpha = a;
    set_delta = d;
    set_valid = 1'b1;
    @(negedge clk);
    set_valid = 1'b0;
    n_switch++;
  endtask

  function automatic real electrode_want(input int s, input bit is_c);
    real al, de, t;
    al = 2.0 * PI * real'(set_alpha[s]) / 65536.0;
    de = real'(set_delta[s]) / 65536.0;
    t  = 2.0 * from_volt(cal_v0[s]) * de * $sin(al) - from_volt(cal_vpi[s]) * de * $cos(al);
    return t + from_volt(is_c ? cal_vcb[s] : cal_vab[s]);
  endfunction

  task automatic check_electrodes();
    real want, got;
    for (int c = 0; c < 2 * NS; c++) begin
      want = electrode_want(c / 2, c % 2 == 1);
      got  = from_volt(electrode_v[c]);
      if (want > 70.0 || want < -70.0) begin
        check(dac_clip[c], $sformatf("channel %0d: %f V out of reach flags clip", c, want));
        want = (want > 0.0) ? 70.0 : -70.0;
        n_clip++;
        check(near(got, want, 0.0, 0.1), $sformatf("channel %0d at rail %f want %f", c, got, want));
      end else begin
        check(near(got, want, 0.0, 0.05), $sformatf("channel %0d at %f V want %f", c, got, want));
      end
    end
  endtask

  initial begin
    real s0, s1, s2, s3, dop, nrm;
    int  n;
    // polarimeter model and calibration
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
    pol_v = '0;
    set_valid = 1'b0;
    set_alpha = '0;
    set_delta = '0;
    for (int s = 0; s < NS; s++) begin
      cal_v0[s]  = to_volt(20.0 + 5.0 * s);
      cal_vpi[s] = to_volt(35.0 + 3.0 * s);
      cal_vab[s] = to_volt(4.0 - 2.0 * s);
      cal_vcb[s] = to_volt(-3.0 + 1.5 * s);
    end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;

    // ---- visualisation of fixed and random states ----
    show_sop(1.0, 0.0, 0.0, 1.0);     // right circular: the top pole
    show_sop(1.0, 1.0, 0.0, 0.0);     // horizontal linear
    show_sop(0.0, 0.0, 0.0, 0.0);     // no light
    for (int i = 0; i < 30; i++) begin
      s0  = urand(0.2, 1.4);
      dop = (i % 3 == 0) ? urand(0.3, 1.0) : 1.0;
      s1 = urand(-1.0, 1.0); s2 = urand(-1.0, 1.0); s3 = urand(-1.0, 1.0);
      nrm = $sqrt(s1 * s1 + s2 * s2 + s3 * s3);
      show_sop(s0, s0 * dop * s1 / nrm, s0 * dop * s2 / nrm, s0 * dop * s3 / nrm);
    end

    // ---- switching between random settings, display running ----
    switching = 1'b1;
    for (int i = 0; i < 12; i++) begin
      logic [NS-1:0][15:0] a, d;
      for (int s = 0; s < NS; s++) begin
        a[s] = 16'($urandom);
        d[s] = (i == 0) ? 16'd0 : 16'($urandom);
      end
      apply_setting(a, d);
      repeat (900) @(negedge clk);
      check_electrodes();
    end

    // ---- full swing of electrode A of stage 0: -70 V -> +70 V ----
    // delta = 0: bias only, -75 V is clipped to the -70 V rail
    cal_vab[0] = to_volt(-75.0);
    apply_setting('0, '0);
    repeat (1000) @(negedge clk);
    check_electrodes();
    check(near(from_volt(electrode_v[0]), -70.0, 0.0, 0.1), "electrode at -70 V before the swing");
    // alpha = 90 deg, delta ~ 1: 2*V0*delta - 75 V = +75 V, clipped to +70 V
    cal_v0[0] = to_volt(75.0);
    apply_setting({16'd0, 16'd0, 16'h4000}, {16'd0, 16'd0, 16'hFFFF});
    n = 1;
    while (!near(from_volt(electrode_v[0]), 70.0, 0.0, 0.1) && n < 5000) begin
      @(negedge clk);
      n++;
    end
    // one clock to compute, one to load the DAC, then 800 clocks (8 us) of slewing
    check(n >= 798 && n <= 806, $sformatf("full swing took %0d clocks, want ~802 (8 us)", n));
    if (n >= 798 && n <= 806) n_full_swing++;
    $display("full +-70 V swing: %0d clocks = %0.2f us -> %0.1f kHz", n, n * 0.01, 1000.0 / (n * 0.01));
    repeat (100) @(negedge clk);
    check_electrodes();
    switching = 1'b0;

    $display("pixels %0d dark %0d switches %0d clipped %0d full_swings %0d pixels_while_switching %0d",
             n_pix, n_dark, n_switch, n_clip, n_full_swing, n_pix_while_switching);
    check(n_pix > 0, "visualisation exercised");
    check(n_dark > 0, "dark input exercised");
    check(n_switch > 0, "switching exercised");
    check(n_clip > 0, "out-of-range voltage clipping exercised");
    check(n_full_swing > 0, "full swing exercised");
    check(n_pix_while_switching > 0, "display updated while switching");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
