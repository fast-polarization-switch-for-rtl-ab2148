// stokes_normalize -- fourth stage of the polarimeter display pipeline.
//
// Divides the three polarisation components of the Stokes vector by the
// total intensity S0: it forms 1/S0 once and multiplies S1, S2 and S3 by
// it. The result is the 3-component normalised Stokes vector, a point on
// (for fully polarised light, of) the unit Poincare sphere. From here on the
// pipeline is three lanes wide.
//
// A sample with S0 <= 0 (no light, or a bad calibration) cannot be
// normalised: it is passed on as the zero vector with out_dark set. That
// guard is this design's choice.
//
// Interface: one sample in, the normalised vector out one clock later.
module stokes_normalize
  import polsw_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  vec4_t in_stokes,
  output logic  out_valid,
  output logic  out_dark,
  output vec3_t out_sop
);

  fp32_t inv_s0;
  logic  dark;

  always_comb begin
    inv_s0 = fp_recip(in_stokes[0]);
    dark   = in_stokes[0][31] || fp_is_zero(in_stokes[0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_dark  <= 1'b0;
      out_sop   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_dark <= dark;
        for (int i = 0; i < N_SOP; i++)
          out_sop[i] <= dark ? FP_ZERO : fp_mul(in_stokes[i+1], inv_s0);
      end
    end
  end

endmodule
