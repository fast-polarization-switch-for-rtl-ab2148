// sphere_radius -- sixth stage of the polarimeter display pipeline
// ("correct sphere radius").
//
// Scales the unit sphere to the size it is drawn at, lane by lane:
// out[k] = in[k] * SCALE[k]. The default scale is a radius of 200 pixels
// with the vertical lane negated, because screen rows count downward while
// the vertical lane of the isometric view points up. Radius and sign
// convention are this design's choice.
//
// Interface: one vector in, the scaled vector out one clock later.
module sphere_radius
  import polsw_pkg::*;
#(
  parameter vec3_t SCALE = '{32'h4348_0000, 32'hC348_0000, 32'h4348_0000}  // [2]=+200, [1]=-200, [0]=+200
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  vec3_t in_iso,
  output logic  out_valid,
  output vec3_t out_scaled
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_scaled <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < N_SOP; k++)
          out_scaled[k] <= fp_mul(in_iso[k], SCALE[k]);
      end
    end
  end

endmodule
