// ad_to_volts -- second stage of the polarimeter display pipeline.
//
// Multiplies each floating-point ADC code by the ADC step (volts per least
// significant bit), giving back the voltage the polarimeter put on the ADC
// input, still as binary32.
//
// Interface: one sample of four lanes in, the scaled sample out one clock
// later; no back-pressure.
// The stage itself follows the block diagram of the visualisation pipeline.
// The default step, 10 V / 2^15 (a +-10 V, 16-bit converter), is this
// design's choice: the converter's range is not specified.
module ad_to_volts
  import polsw_pkg::*;
#(
  parameter fp32_t VOLTS_PER_LSB = 32'h39A0_0000   // 10/32768 = 3.0517578e-4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  vec4_t in_fp,
  output logic  out_valid,
  output vec4_t out_volts
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_volts <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N_RAW; i++)
          out_volts[i] <= fp_mul(in_fp[i], VOLTS_PER_LSB);
      end
    end
  end

endmodule
