// adc -- behavioural model of one channel of the polarimeter ADC.
//
// Not synthesizable logic of the design: it stands for the analog-to-digital
// converter that digitises one polarimeter output. The analog input is
// carried as a volt_t (signed fixed point, 16 fraction bits). On a clock in
// which `start` is high the model samples the input; CONV_CYCLES clocks
// later it presents the signed two's-complement code
//   code = trunc(v * 2^(BITS-1) / FS),  saturated to the code range,
// with `done` high for one clock. A start while a conversion runs is ignored.
// The four-channel ADC between polarimeter and FPGA is part of the published
// system; resolution (16 bits), full scale (+-10 V) and conversion time are
// this model's assumptions, the converter part is not specified.
module adc
  import polsw_pkg::*;
#(
  parameter int unsigned BITS        = 16,
  parameter int unsigned FS_MV       = 10000,   // input range +-FS
  parameter int unsigned CONV_CYCLES = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  volt_t           vin,
  input  logic            start,
  output logic            done,
  output logic [BITS-1:0] code
);

  localparam longint CMAX = (longint'(1) << (BITS - 1)) - 1;
  localparam longint CMIN = -(longint'(1) << (BITS - 1));

  logic [$clog2(CONV_CYCLES+1)-1:0] busy;
  volt_t                            held;

  function automatic logic [BITS-1:0] convert(input volt_t v);
    longint c;
    c = (longint'(v) * (longint'(1) << (BITS - 1)) * 1000) / (longint'(FS_MV) << VOLT_FRAC);
    if (c > CMAX) c = CMAX;
    if (c < CMIN) c = CMIN;
    return BITS'(c);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      held <= '0;
      done <= 1'b0;
      code <= '0;
    end else begin
      done <= 1'b0;
      if (busy != 0) begin
        busy <= busy - 1'b1;
        if (busy == 1) begin
          done <= 1'b1;
          code <= convert(held);
        end
      end else if (start) begin
        held <= vin;
        busy <= ($clog2(CONV_CYCLES+1))'(CONV_CYCLES);
      end
    end
  end

endmodule
