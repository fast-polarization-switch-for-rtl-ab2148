// pcm_voltage -- electrode voltages and DAC codes for the lithium-niobate
// polarization controller (PCM).
//
// Each PCM stage is a linear retarder whose eigen-mode angle alpha and phase
// delay theta = 2*pi*delta are set by three electrode voltages:
//   Va = 2*V0*delta*sin(alpha) - Vpi*delta*cos(alpha) + Vab
//   Vb = 0
//   Vc = 2*V0*delta*sin(alpha) - Vpi*delta*cos(alpha) + Vcb
// where V0, Vpi, Vab and Vcb are per-stage calibration constants. These
// equations are taken as published for the device; note that they give A and
// C the same signal term and differ only in the bias. Electrode B is tied to
// ground, so each stage needs two drive channels: channel 2s is A of stage s,
// channel 2s+1 is C.
//
// Each voltage is then turned into the DAC code that makes the +-70 V driver
// output it. The driver (see hv_driver) outputs G*(2*Vdac - Vref) with
// Vdac = Vref*code/2^DAC_BITS, hence
//   code = 2^(DAC_BITS-1) + V * 2^(DAC_BITS-1) / (G*Vref),
// clamped to the code range; out_clip marks a channel whose voltage was out
// of the driver's reach.
//
// Number formats (this design's choice): alpha is a phase word (alpha =
// 2*pi*in_alpha/2^16), delta an unsigned fraction (delta = in_delta/2^16,
// so 0 <= delta < 1), voltages are volt_t (signed, 16 fraction bits). The
// stage count (three) and the driver gain (14 V/V) and reference (5 V)
// follow the published design; the DAC resolution is assumed.
//
// Timing: in_valid loads a new setting for all stages; out_valid and the new
// voltages and codes follow one clock later and are held until the next
// load. sin/cos are computed combinationally by cordic_sincos.
module pcm_voltage
  import polsw_pkg::*;
#(
  parameter int unsigned NUM_STAGES = 3,
  parameter int unsigned DAC_BITS   = 16,
  parameter int unsigned DRV_GAIN   = 14,     // V/V of the high-voltage stage
  parameter int unsigned VREF_MV    = 5000    // driver / DAC reference, mV
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic  [NUM_STAGES-1:0][15:0]           in_alpha,
  input  logic  [NUM_STAGES-1:0][15:0]           in_delta,
  input  volt_t [NUM_STAGES-1:0]                 cal_v0,
  input  volt_t [NUM_STAGES-1:0]                 cal_vpi,
  input  volt_t [NUM_STAGES-1:0]                 cal_vab,
  input  volt_t [NUM_STAGES-1:0]                 cal_vcb,
  output logic                                   out_valid,
  output volt_t [NUM_STAGES-1:0]                 out_va,
  output volt_t [NUM_STAGES-1:0]                 out_vc,
  output logic  [2*NUM_STAGES-1:0][DAC_BITS-1:0] out_code,
  output logic  [2*NUM_STAGES-1:0]               out_clip
);

  localparam int unsigned KFRAC = 16;
  // 2^(DAC_BITS-1) / (G*Vref) in codes per volt, with KFRAC fraction bits
  localparam longint KSCALE = ((longint'(1) << (DAC_BITS - 1)) * 1000 * (longint'(1) << KFRAC))
                              / (longint'(DRV_GAIN) * longint'(VREF_MV));
  localparam longint CODE_MID = longint'(1) << (DAC_BITS - 1);
  localparam longint CODE_MAX = (longint'(1) << DAC_BITS) - 1;

  initial assert (DAC_BITS >= 4 && DAC_BITS <= 24) else $error("pcm_voltage: DAC_BITS must be 4..24");

  logic [NUM_STAGES-1:0][15:0] sin_a, cos_a;   // Q1.15, two's complement

  for (genvar s = 0; s < NUM_STAGES; s++) begin : g_trig
    cordic_sincos u_cordic (.phase(in_alpha[s]), .sin_q15(sin_a[s]), .cos_q15(cos_a[s]));
  end

  function automatic logic [DAC_BITS:0] to_code(input volt_t v);   // {clip, code}
    longint c;
    c = CODE_MID + ((longint'(v) * KSCALE) >>> (VOLT_FRAC + KFRAC));
    if (c < 0)        return {1'b1, DAC_BITS'(0)};
    if (c > CODE_MAX) return {1'b1, DAC_BITS'(CODE_MAX)};
    return {1'b0, DAC_BITS'(c)};
  endfunction

  volt_t [NUM_STAGES-1:0] va, vc;

  always_comb begin
    longint v0d, vpid, term;
    for (int s = 0; s < NUM_STAGES; s++) begin
      v0d  = (longint'(cal_v0[s])  * longint'({1'b0, in_delta[s]})) >>> 16;   // V0*delta
      vpid = (longint'(cal_vpi[s]) * longint'({1'b0, in_delta[s]})) >>> 16;   // Vpi*delta
      term = ((2 * v0d * longint'($signed(sin_a[s]))) >>> 15) - ((vpid * longint'($signed(cos_a[s]))) >>> 15);
      va[s] = volt_t'(term + longint'(cal_vab[s]));
      vc[s] = volt_t'(term + longint'(cal_vcb[s]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_va    <= '0;
      out_vc    <= '0;
      out_code  <= {(2*NUM_STAGES){DAC_BITS'(CODE_MID)}};   // 0 V at the drivers
      out_clip  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_va <= va;
        out_vc <= vc;
        for (int s = 0; s < NUM_STAGES; s++) begin
          {out_clip[2*s],   out_code[2*s]}   <= to_code(va[s]);
          {out_clip[2*s+1], out_code[2*s+1]} <= to_code(vc[s]);
        end
      end
    end
  end

endmodule
