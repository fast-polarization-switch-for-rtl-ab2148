// fpga_core -- the digital part of the polarization switch.
//
// Two independent datapaths run side by side in the FPGA:
//
//  * Visualisation. Every SAMPLE_DIV clocks the core starts a conversion of
//    the four polarimeter channels. When the ADC reports the codes, they go
//    through seven one-clock stages:
//      int_to_float -> ad_to_volts -> calibration_matrix (S = M*V, 4 lanes)
//      -> stokes_normalize (S1..S3 / S0, 3 lanes) -> isometric_matrix
//      -> sphere_radius -> sphere_offset
//    and come out as pixel coordinates of the state of polarization on an
//    isometric drawing of the Poincare sphere, seven clocks after adc_done.
//
//  * Control. A new retarder setting (alpha, delta of each of the NUM_STAGES
//    controller stages), from a tracking algorithm outside this core, is
//    turned by pcm_voltage into electrode voltages and DAC codes; dac_load
//    pulses one clock after set_valid so all DAC channels change together.
//
// The stage order and lane counts of the visualisation chain, the three
// controller stages with two driven electrodes each, and the control
// equations follow the published design. The ADC sampling schedule
// (SAMPLE_DIV), all word widths and the fixed-point / floating-point
// formats are this design's choice.
module fpga_core
  import polsw_pkg::*;
#(
  parameter int unsigned ADC_BITS   = 16,
  parameter int unsigned DAC_BITS   = 16,
  parameter int unsigned NUM_STAGES = 3,
  parameter int unsigned PIX_BITS   = 12,
  parameter int unsigned SAMPLE_DIV = 100   // clocks between ADC conversions
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // polarimeter ADC
  output logic                                   adc_start,
  input  logic                                   adc_done,
  input  logic  [N_RAW-1:0][ADC_BITS-1:0]        adc_code,
  // per-device calibration of the polarimeter, S = cal_m * V
  input  mat4_t                                  cal_m,
  // display side
  output logic                                   pix_valid,
  output logic                                   pix_dark,
  output logic  [N_SOP-1:0][PIX_BITS-1:0]        pix,
  // retarder settings from the tracking algorithm
  input  logic                                   set_valid,
  input  logic  [NUM_STAGES-1:0][15:0]           set_alpha,
  input  logic  [NUM_STAGES-1:0][15:0]           set_delta,
  // per-stage controller calibration
  input  volt_t [NUM_STAGES-1:0]                 cal_v0,
  input  volt_t [NUM_STAGES-1:0]                 cal_vpi,
  input  volt_t [NUM_STAGES-1:0]                 cal_vab,
  input  volt_t [NUM_STAGES-1:0]                 cal_vcb,
  // requested electrode voltages (A and C of each stage; B is grounded)
  output volt_t [NUM_STAGES-1:0]                 pcm_va,
  output volt_t [NUM_STAGES-1:0]                 pcm_vc,
  // DAC side
  output logic                                   dac_load,
  output logic  [2*NUM_STAGES-1:0][DAC_BITS-1:0] dac_code,
  output logic  [2*NUM_STAGES-1:0]               dac_clip
);

  initial assert (SAMPLE_DIV >= 2) else $error("fpga_core: SAMPLE_DIV must be at least 2");

  // ---------------- ADC sampling schedule ----------------
  logic [$clog2(SAMPLE_DIV)-1:0] div_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt   <= '0;
      adc_start <= 1'b0;
    end else begin
      adc_start <= (div_cnt == '0);
      div_cnt   <= (div_cnt == ($clog2(SAMPLE_DIV))'(SAMPLE_DIV - 1)) ? '0 : div_cnt + 1'b1;
    end
  end

  // ---------------- visualisation pipeline ----------------
  logic  v1, v2, v3, v4, v5, v6;
  logic  pix_dark_n4, dark5, dark6;
  vec4_t fp_code, volts, stokes;
  vec3_t sop, iso, scaled;

  int_to_float #(.ADC_BITS(ADC_BITS)) u_i2f (
    .clk, .rst_n, .in_valid(adc_done), .in_code(adc_code), .out_valid(v1), .out_fp(fp_code));

  ad_to_volts u_a2v (
    .clk, .rst_n, .in_valid(v1), .in_fp(fp_code), .out_valid(v2), .out_volts(volts));

  calibration_matrix u_cal (
    .clk, .rst_n, .cal_m, .in_valid(v2), .in_volts(volts), .out_valid(v3), .out_stokes(stokes));

  stokes_normalize u_norm (
    .clk, .rst_n, .in_valid(v3), .in_stokes(stokes), .out_valid(v4), .out_dark(pix_dark_n4),
    .out_sop(sop));

  isometric_matrix u_iso (
    .clk, .rst_n, .in_valid(v4), .in_sop(sop), .out_valid(v5), .out_iso(iso));

  sphere_radius u_rad (
    .clk, .rst_n, .in_valid(v5), .in_iso(iso), .out_valid(v6), .out_scaled(scaled));

  sphere_offset #(.PIX_BITS(PIX_BITS)) u_off (
    .clk, .rst_n, .in_valid(v6), .in_scaled(scaled), .out_valid(pix_valid), .out_pix(pix));

  // the dark flag travels alongside the last three stages

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dark5    <= 1'b0;
      dark6    <= 1'b0;
      pix_dark <= 1'b0;
    end else begin
      if (v4) dark5    <= pix_dark_n4;
      if (v5) dark6    <= dark5;
      if (v6) pix_dark <= dark6;
    end
  end

  // every ADC result reaches the display exactly seven clocks later, and a
  // new setting reaches the DACs one clock later
  a_pix_latency : assert property (@(posedge clk) disable iff (!rst_n) adc_done |-> ##7 pix_valid)
    else $error("fpga_core: ADC result did not reach the display in 7 clocks");
  a_dac_latency : assert property (@(posedge clk) disable iff (!rst_n) set_valid |=> dac_load)
    else $error("fpga_core: setting did not reach the DACs in 1 clock");

  // ---------------- controller voltages ----------------
  pcm_voltage #(
    .NUM_STAGES(NUM_STAGES), .DAC_BITS(DAC_BITS)
  ) u_pcm (
    .clk, .rst_n,
    .in_valid(set_valid), .in_alpha(set_alpha), .in_delta(set_delta),
    .cal_v0, .cal_vpi, .cal_vab, .cal_vcb,
    .out_valid(dac_load), .out_va(pcm_va), .out_vc(pcm_vc), .out_code(dac_code), .out_clip(dac_clip));

endmodule
