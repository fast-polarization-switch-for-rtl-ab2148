// int_to_float_tb -- self-checking test of int_to_float.
// Drives random 16-bit codes (plus the extremes and zero) on all four lanes
// and checks that each float equals the code exactly and appears exactly one
// clock after the input, with no output when in_valid is low.
module int_to_float_tb;
  import polsw_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic                   in_valid;
  logic [3:0][15:0]       in_code;
  logic                   out_valid;
  vec4_t                  out_fp;

  int_to_float dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int code [4];
    in_valid = 1'b0;
    in_code  = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        case (n)
          0: code[i] = 0;
          1: code[i] = 32767;
          2: code[i] = -32768;
          3: code[i] = (i == 0) ? 1 : -1;
          default: code[i] = int'($urandom_range(0, 65535)) - 32768;
        endcase
        in_code[i] = 16'(code[i]);
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      check(out_valid, "out_valid one clock after in_valid");
      for (int i = 0; i < 4; i++)
        check(from_fp(out_fp[i]) == real'(code[i]),
              $sformatf("lane %0d code %0d gave %f", i, code[i], from_fp(out_fp[i])));
      @(negedge clk);
      check(!out_valid, "out_valid drops with in_valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
