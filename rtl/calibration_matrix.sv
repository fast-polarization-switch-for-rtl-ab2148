// calibration_matrix -- third stage of the polarimeter display pipeline.
//
// Maps the four voltages measured by the polarimeter to the four
// un-normalised Stokes parameters, S = M * V, with M a 4x4 binary32 matrix.
// M belongs to the individual polarimeter and to the operating wavelength,
// so it is an input (cal_m[row][col], row k giving S_k) that a host loads,
// not a constant. Each S_k is the sum of four products, added as a tree
// ((p0+p1)+(p2+p3)).
//
// Interface: one sample in, the Stokes vector out one clock later; cal_m is
// read in the clock the sample is taken and must otherwise be stable.
module calibration_matrix
  import polsw_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  mat4_t cal_m,
  input  logic  in_valid,
  input  vec4_t in_volts,
  output logic  out_valid,
  output vec4_t out_stokes     // [0] = S0 (intensity) .. [3] = S3
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_stokes <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < N_RAW; k++)
          out_stokes[k] <= fp_dot4(cal_m[k], in_volts);
      end
    end
  end

endmodule
