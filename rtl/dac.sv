// dac -- behavioural model of one DAC channel feeding a driver stage.
//
// Not synthesizable logic of the design: it stands for one channel of the
// digital-to-analog converter array between the FPGA and the +-70 V
// drivers. On a clock in which `load` is high it takes the unsigned code
// and, from the next clock on, outputs Vout = VREF * code / 2^BITS as a
// volt_t (signed fixed point, 16 fraction bits). The output is 0 V after
// reset. The unipolar output on a +5 V reference follows the driver
// schematic (the driver subtracts +5 Vref after a gain of two); the
// resolution of 16 bits is this model's assumption.
module dac
  import polsw_pkg::*;
#(
  parameter int unsigned BITS    = 16,
  parameter int unsigned VREF_MV = 5000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [BITS-1:0] code,
  output volt_t           vout
);

  localparam longint VREF_Q = (longint'(VREF_MV) << VOLT_FRAC) / 1000;   // Vref as volt_t

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vout <= '0;
    else if (load) vout <= volt_t'((longint'(code) * VREF_Q) >>> BITS);
  end

endmodule
