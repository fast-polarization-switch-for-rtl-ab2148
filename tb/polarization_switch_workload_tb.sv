// polarization_switch_workload_tb -- the driver switching workloads, run on
// the whole unit at its default parameters (10 ns per clock).
//
// Part 1, full-swing square wave: electrode A of stage 0 is switched
// between settings that ask for -75 V and +75 V (both beyond reach, so the
// driver goes rail to rail, -70 V <-> +70 V) every 10 us, for five periods.
// Every transition must finish in 8 us (800 clocks of slewing plus two
// clocks of digital latency) and the electrode must then hold the rail.
//
// Part 2, stepped levels: ten random retarder settings, each held for 1 ms
// (100,000 clocks). For every channel the settling time must not exceed
// |step| / 17.5 V/us plus the two-clock digital latency, and the settled
// voltage must match the control equations (or the rail).
module polarization_switch_workload_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  localparam real PI = 3.14159265358979323846;
  localparam int  NS = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_swings = 0, n_steps = 0;

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

  initial begin
    repeat (1_300_000) @(posedge clk);
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

  function automatic real clamp70(input real v);
    return (v > 70.0) ? 70.0 : (v < -70.0) ? -70.0 : v;
  endfunction

  function automatic real electrode_want(input int c);
    real al, de, t;
    int  s;
    s  = c / 2;
    al = 2.0 * PI * real'(set_alpha[s]) / 65536.0;
    de = real'(set_delta[s]) / 65536.0;
    t  = 2.0 * from_volt(cal_v0[s]) * de * $sin(al) - from_volt(cal_vpi[s]) * de * $cos(al);
    return clamp70(t + from_volt((c % 2 == 1) ? cal_vcb[s] : cal_vab[s]));
  endfunction

  task automatic apply_setting(input logic [NS-1:0][15:0] a, input logic [NS-1:0][15:0] d);
    @(negedge clk);
    set_alpha = a;
    set_delta = d;
    set_valid = 1'b1;
    @(negedge clk);
    set_valid = 1'b0;
  endtask

  initial begin
    real start_v [2*NS];
    real want [2*NS];
    int  settle [2*NS];
    int  limit;
    pol_v = '0;
    cal_m = '0;
    set_valid = 1'b0;
    set_alpha = '0;
    set_delta = '0;
    for (int s = 0; s < NS; s++) begin
      cal_v0[s]  = to_volt(25.0 + 4.0 * s);
      cal_vpi[s] = to_volt(40.0 - 3.0 * s);
      cal_vab[s] = to_volt(2.0 * s);
      cal_vcb[s] = to_volt(-1.0 - s);
    end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;

    // ---- part 1: +-70 V square wave, 10 us per level ----
    cal_v0[0]  = to_volt(75.0);
    cal_vab[0] = to_volt(-75.0);
    apply_setting('0, '0);                         // -75 V requested
    repeat (1000) @(negedge clk);
    for (int half = 0; half < 10; half++) begin
      int  n;
      real tgt;
      tgt = (half % 2 == 0) ? 70.0 : -70.0;
      if (half % 2 == 0) apply_setting({16'd0, 16'd0, 16'h4000}, {16'd0, 16'd0, 16'hFFFF});  // +75 V
      else               apply_setting('0, '0);                                              // -75 V
      n = 1;
      while (!near(from_volt(electrode_v[0]), tgt, 0.0, 0.1) && n < 998) begin
        @(negedge clk);
        n++;
      end
      check(n >= 798 && n <= 806, $sformatf("swing to %0.0f V took %0d clocks, want ~802", tgt, n));
      repeat (998 - n) @(negedge clk);
      check(near(from_volt(electrode_v[0]), tgt, 0.0, 0.01) && dac_clip[0],
            $sformatf("holds the %0.0f V rail until the next switch", tgt));
      n_swings++;
    end

    // ---- part 2: stepped levels, 1 ms each ----
    cal_v0[0]  = to_volt(25.0);
    cal_vab[0] = to_volt(0.0);
    for (int step = 0; step < 10; step++) begin
      logic [NS-1:0][15:0] a, d;
      for (int c = 0; c < 2 * NS; c++) begin
        start_v[c] = from_volt(electrode_v[c]);
        settle[c]  = -1;
      end
      for (int s = 0; s < NS; s++) begin
        a[s] = 16'($urandom);
        d[s] = 16'($urandom);
      end
      apply_setting(a, d);
      for (int c = 0; c < 2 * NS; c++) want[c] = electrode_want(c);
      for (int t = 1; t < 100_000; t++) begin
        @(negedge clk);
        for (int c = 0; c < 2 * NS; c++)
          if (settle[c] < 0 && near(from_volt(electrode_v[c]), want[c], 0.0, 0.05)) settle[c] = t;
      end
      for (int c = 0; c < 2 * NS; c++) begin
        limit = $rtoi(fabs(want[c] - start_v[c]) / 0.175) + 3;
        check(settle[c] >= 0 && settle[c] <= limit,
              $sformatf("step %0d ch %0d: %f -> %f V settled in %0d clocks, limit %0d",
                        step, c, start_v[c], want[c], settle[c], limit));
        check(near(from_volt(electrode_v[c]), want[c], 0.0, 0.05),
              $sformatf("step %0d ch %0d holds %f V, want %f", step, c, from_volt(electrode_v[c]), want[c]));
      end
      n_steps++;
    end

    $display("square-wave transitions %0d, stepped levels %0d", n_swings, n_steps);
    check(n_swings == 10, "all square-wave transitions run");
    check(n_steps == 10, "all stepped levels run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
