// int_to_float -- first stage of the polarimeter display pipeline.
//
// Converts the four signed ADC codes of one polarimeter sample to IEEE-754
// binary32, lane by lane, so that every later stage can work in floating
// point. Conversion is exact for codes of up to 24 bits.
//
// Interface: in_valid/in_code carry one sample (four lanes); out_valid/out_fp
// follow exactly one clock later. There is no back-pressure: the pipeline
// accepts a sample on every clock in which in_valid is high.
// The stage and its four lanes follow the block diagram of the visualisation
// pipeline; the two's-complement code format and ADC_BITS = 16 are this
// design's choice (the ADC resolution is not specified).
module int_to_float
  import polsw_pkg::*;
#(
  parameter int unsigned ADC_BITS = 16
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  input  logic [N_RAW-1:0][ADC_BITS-1:0]        in_code,   // two's complement
  output logic                                  out_valid,
  output vec4_t                                 out_fp
);

  initial assert (ADC_BITS >= 2 && ADC_BITS <= 24)
    else $error("int_to_float: ADC_BITS must be 2..24 for exact conversion");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_fp    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N_RAW; i++)
          out_fp[i] <= fp_from_int(32'($signed(in_code[i])));
      end
    end
  end

endmodule
