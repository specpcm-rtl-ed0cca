// flash_adc: behavioural model of one 6-bit flash ADC with 63 comparators.
//
// This is a behavioural model of a mixed-signal circuit. Its input is the
// differential bit-line value vin = BL+ - BL- of one row, in the integer units
// of pcm_cim_bank. Comparator k (k = 1..63) fires when vin >= (k-32)*LSB; the
// output is the thermometer count minus 32, a signed code in [-32, 31].
//
// The paper lowers the precision to 1..6 bits by enabling only part of the
// comparators. Here, with b = adc_bits, only comparators whose index is a
// multiple of 2^(6-b) are enabled (2^b - 1 of them), so the code keeps the
// 6-bit scale but moves in steps of 2^(6-b). Which comparators stay enabled,
// and the LSB size, are this design's choices. n_active reports how many
// comparators are enabled (the energy knob).
// Timing: sample is registered; code is valid one cycle after sample.
module flash_adc
  import specpcm_pkg::*;
#(
  parameter int unsigned LSB = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sample,
  input  logic signed [12:0] vin,
  input  logic [2:0]        adc_bits,
  output adc_code_t         code,
  output logic [5:0]        n_active
);
  logic [6:0] step;   // 2^(6-b)

  always_comb begin
    logic [2:0] b;
    b = (adc_bits == 0) ? 3'd1 : ((adc_bits > 3'd6) ? 3'd6 : adc_bits);
    step     = 7'(1) << (3'd6 - b);
    n_active = 6'((7'd64 >> (3'd6 - b)) - 7'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= '0;
    end else if (sample) begin
      int cnt;
      cnt = 0;
      for (int k = 1; k < 64; k++)
        if ((k % int'(step)) == 0 && int'(vin) >= (k - 32) * int'(LSB))
          cnt += int'(step);
      code <= adc_code_t'(cnt - 32);
    end
  end
endmodule
