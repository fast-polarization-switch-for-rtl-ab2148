// hv_driver -- behavioural model of one +-70 V electrode driver stage.
//
// Not synthesizable logic of the design: it stands for the analog driver
// between one DAC channel and one electrode of the polarization controller.
// The circuit has two amplifiers:
//   1. a low-voltage op-amp (ADA4610) with equal input and feedback
//      resistors (10k/10k) and +5 Vref on its inverting side, giving
//      V1 = 2*Vdac - Vref, so a 0..5 V DAC maps to -5..+5 V;
//   2. a high-voltage op-amp (LTC6090-5) in non-inverting gain of
//      1 + 130k/10k = 14 V/V on +-70 V rails, giving Vout = 14*V1.
// The model computes the target 14*(2*Vdac - Vref), limits it to the rails,
// and moves the output toward it by at most one slew step per clock. The
// slew rate is set so that the full 140 V swing takes 8 us, the published
// transition time at 14 V/V (a 125 kHz switching rate); the rounded,
// exponential end of a real transition and the RC input filter are not
// modelled. One clock stands for CLK_NS nanoseconds. The output is 0 V
// after reset.
//
// Ports: vin is the DAC voltage, vout the electrode voltage, both volt_t.
module hv_driver
  import polsw_pkg::*;
#(
  parameter int unsigned GAIN           = 14,      // V/V of stage 2
  parameter int unsigned VREF_MV        = 5000,
  parameter int unsigned VRAIL_V        = 70,
  parameter int unsigned SLEW_MV_PER_US = 17500,   // 140 V in 8 us
  parameter int unsigned CLK_NS         = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  input  volt_t vin,
  output volt_t vout
);

  localparam longint VREF_Q  = (longint'(VREF_MV) << VOLT_FRAC) / 1000;
  localparam longint RAIL_Q  = longint'(VRAIL_V) << VOLT_FRAC;
  localparam longint STEP_Q  = (longint'(SLEW_MV_PER_US) * longint'(CLK_NS) << VOLT_FRAC) / 1_000_000;

  longint target, diff;

  always_comb begin
    target = longint'(GAIN) * (2 * longint'(vin) - VREF_Q);
    if (target > RAIL_Q)  target = RAIL_Q;
    if (target < -RAIL_Q) target = -RAIL_Q;
    diff = target - longint'(vout);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               vout <= '0;
    else if (diff > STEP_Q)   vout <= vout + volt_t'(STEP_Q);
    else if (diff < -STEP_Q)  vout <= vout - volt_t'(STEP_Q);
    else                      vout <= volt_t'(target);
  end

endmodule
