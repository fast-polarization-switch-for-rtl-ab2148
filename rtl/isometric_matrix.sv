// isometric_matrix -- fifth stage of the polarimeter display pipeline.
//
// Rotates the normalised Stokes vector (s1, s2, s3) so that the Poincare
// sphere is seen in isometric view: out = R * in, R a 3x3 binary32 matrix.
// Output lane 0 is the horizontal screen axis, lane 1 the vertical axis
// (pointing up) and lane 2 the depth toward the viewer, which a display can
// use to draw the hidden half of the sphere differently.
//
// The stage and its 3-lane width follow the block diagram of the
// visualisation pipeline; the matrix itself is not specified, and the default
// below is this design's choice: the orthonormal rotation that looks down
// the (1,1,1) diagonal with s3 (circular polarisation) pointing up,
//   row 0 = ( 1/sqrt2, -1/sqrt2,  0      )
//   row 1 = (-1/sqrt6, -1/sqrt6,  2/sqrt6)
//   row 2 = ( 1/sqrt3,  1/sqrt3,  1/sqrt3)
//
// Interface: one vector in, the rotated vector out one clock later.
module isometric_matrix
  import polsw_pkg::*;
#(
  parameter mat3_t ROT = '{
    // packed array: the first entry is the highest index, so rows are
    // listed 2, 1, 0 and within a row the columns 2, 1, 0
    '{32'h3F13_CD3A, 32'h3F13_CD3A, 32'h3F13_CD3A},   // row 2
    '{32'h3F51_05EC, 32'hBED1_05EC, 32'hBED1_05EC},   // row 1
    '{32'h0000_0000, 32'hBF35_04F3, 32'h3F35_04F3}    // row 0
  }
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  vec3_t in_sop,
  output logic  out_valid,
  output vec3_t out_iso
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_iso   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < N_SOP; k++)
          out_iso[k] <= fp_dot3(ROT[k], in_sop);
      end
    end
  end

endmodule
