// polarization_switch -- the mixed analog-digital polarization switch unit.
//
// Closes the loop around a lithium-niobate polarization controller (PCM):
// the light leaving the controller is measured by a polarimeter, whose four
// analog outputs are digitised by four ADC channels and turned by the FPGA
// core into a point on an isometric drawing of the Poincare sphere; in
// parallel the FPGA turns retarder settings (alpha, delta per stage) into DAC
// codes, and six DAC channels feed six +-70 V drivers, electrodes A and C of
// each of the three controller stages (electrode B is grounded).
//
// Contents: fpga_core (synthesizable) plus behavioural models of the parts
// around it on the board: adc (x4), dac (x2*NUM_STAGES) and hv_driver
// (x2*NUM_STAGES). The polarimeter, the controller itself, the tracking
// algorithm that chooses alpha and delta, the display and the power supply
// are outside: their signals are ports.
//
// Ports: pol_v are the four polarimeter output voltages; electrode_v the
// driver outputs (channel 2s = electrode A of stage s, 2s+1 = C), all volt_t.
// One clock is taken to be 10 ns (100 MHz), the time step of the driver
// model; with SAMPLE_DIV = 100 the polarimeter is sampled at 1 MS/s.
// The block structure follows the published system; clock rate, sampling
// rate and converter resolutions are this design's choice.
module polarization_switch
  import polsw_pkg::*;
#(
  parameter int unsigned ADC_BITS   = 16,
  parameter int unsigned DAC_BITS   = 16,
  parameter int unsigned NUM_STAGES = 3,
  parameter int unsigned PIX_BITS   = 12,
  parameter int unsigned SAMPLE_DIV = 100
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // polarimeter outputs
  input  volt_t [N_RAW-1:0]                      pol_v,
  input  mat4_t                                  cal_m,
  // display
  output logic                                   pix_valid,
  output logic                                   pix_dark,
  output logic  [N_SOP-1:0][PIX_BITS-1:0]        pix,
  // tracking algorithm
  input  logic                                   set_valid,
  input  logic  [NUM_STAGES-1:0][15:0]           set_alpha,
  input  logic  [NUM_STAGES-1:0][15:0]           set_delta,
  input  volt_t [NUM_STAGES-1:0]                 cal_v0,
  input  volt_t [NUM_STAGES-1:0]                 cal_vpi,
  input  volt_t [NUM_STAGES-1:0]                 cal_vab,
  input  volt_t [NUM_STAGES-1:0]                 cal_vcb,
  // requested electrode voltages of each stage (before DAC and driver)
  output volt_t [NUM_STAGES-1:0]                 pcm_va,
  output volt_t [NUM_STAGES-1:0]                 pcm_vc,
  // polarization controller electrodes
  output volt_t [2*NUM_STAGES-1:0]               electrode_v,
  output logic  [2*NUM_STAGES-1:0]               dac_clip
);

  logic                                   adc_start;
  logic [N_RAW-1:0]                       adc_done;
  logic [N_RAW-1:0][ADC_BITS-1:0]         adc_code;
  logic                                   dac_load;
  logic [2*NUM_STAGES-1:0][DAC_BITS-1:0]  dac_code;
  volt_t [2*NUM_STAGES-1:0]               dac_v;

  for (genvar c = 0; c < N_RAW; c++) begin : g_adc
    adc #(.BITS(ADC_BITS)) u_adc (
      .clk, .rst_n, .vin(pol_v[c]), .start(adc_start), .done(adc_done[c]), .code(adc_code[c]));
  end

  fpga_core #(
    .ADC_BITS(ADC_BITS), .DAC_BITS(DAC_BITS), .NUM_STAGES(NUM_STAGES),
    .PIX_BITS(PIX_BITS), .SAMPLE_DIV(SAMPLE_DIV)
  ) u_core (
    .clk, .rst_n,
    .adc_start, .adc_done(&adc_done), .adc_code,   // channels convert in lock-step
    .cal_m,
    .pix_valid, .pix_dark, .pix,
    .set_valid, .set_alpha, .set_delta,
    .cal_v0, .cal_vpi, .cal_vab, .cal_vcb,
    .pcm_va, .pcm_vc,
    .dac_load, .dac_code, .dac_clip);

  for (genvar c = 0; c < 2 * NUM_STAGES; c++) begin : g_drive
    dac #(.BITS(DAC_BITS)) u_dac (
      .clk, .rst_n, .load(dac_load), .code(dac_code[c]), .vout(dac_v[c]));
    hv_driver u_drv (
      .clk, .rst_n, .vin(dac_v[c]), .vout(electrode_v[c]));
  end

endmodule
