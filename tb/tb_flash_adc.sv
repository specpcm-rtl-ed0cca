// tb_flash_adc: sweeps the differential input over and beyond full scale at
// every precision from 1 to 6 bits and compares code and enabled-comparator
// count with the quantisation reference.
module tb_flash_adc;
  import specpcm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sample;
  logic signed [12:0] vin;
  logic [2:0] adc_bits;
  adc_code_t code;
  logic [5:0] n_active;
  int checks = 0, failures = 0;

  flash_adc #(.LSB(8)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = 0; vin = 0; adc_bits = 6;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 1; b <= 6; b++)
      for (int v = -300; v <= 300; v += 3) begin
        @(negedge clk);
        vin = 13'(v); adc_bits = 3'(b); sample = 1;
        @(negedge clk);
        sample = 0;
        checks++;
        if (int'(code) != ref_adc(v, 8, b) || int'(n_active) != (1 << b) - 1) begin
          failures++;
          if (failures < 10) $display("b%0d v%0d got %0d exp %0d", b, v, code, ref_adc(v, 8, b));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
