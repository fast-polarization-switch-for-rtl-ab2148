// sphere_offset -- last stage of the polarimeter display pipeline
// ("offset sphere center").
//
// Adds the position of the sphere centre on the display to each lane and
// turns the result into integer pixel coordinates (truncated toward zero,
// clamped to PIX_BITS signed bits): out_pix[0] is the column, out_pix[1]
// the row and out_pix[2] the depth, which keeps its sign.
// The default centre (320, 240, 0), the middle of a 640x480 screen, and the
// integer output format are this design's choice.
//
// Interface: one vector in, the pixel coordinates out one clock later.
module sphere_offset
  import polsw_pkg::*;
#(
  parameter int unsigned PIX_BITS = 12,
  parameter vec3_t       CENTER   = '{32'h0000_0000, 32'h4370_0000, 32'h43A0_0000}  // [2]=0, [1]=240, [0]=320
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  vec3_t                              in_scaled,
  output logic                               out_valid,
  output logic [N_SOP-1:0][PIX_BITS-1:0]     out_pix    // two's complement
);

  localparam logic signed [31:0] PMAX = (32'sd1 <<< (PIX_BITS - 1)) - 32'sd1;
  localparam logic signed [31:0] PMIN = -(32'sd1 <<< (PIX_BITS - 1));

  function automatic logic [PIX_BITS-1:0] clamp_pix(input logic signed [31:0] v);
    if (v > PMAX) return PIX_BITS'(PMAX);
    if (v < PMIN) return PIX_BITS'(PMIN);
    return PIX_BITS'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int k = 0; k < N_SOP; k++)
          out_pix[k] <= clamp_pix(fp_to_int(fp_add(in_scaled[k], CENTER[k])));
      end
    end
  end

endmodule
