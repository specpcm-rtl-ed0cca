// tb_score_argmax: streams eight random ADC phases from four arrays (one
// disabled) and checks the per-row sums, the masking of inactive rows and the
// best row with the lower-index tie rule.
module tb_score_argmax;
  import specpcm_pkg::*;
  localparam int NA = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, ph_valid, best_valid, done;
  logic [NA-1:0] arr_en;
  logic [2:0] ph_idx;
  adc_code_t ph_code [NA][ADC_UNITS];
  logic [ADC_UNITS-1:0] ph_act;
  score_t scores [ROWS];
  logic [6:0] best_row;
  score_t best_score;
  int checks = 0, failures = 0;

  score_argmax #(.NUM_ARRAYS(NA)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ph_valid = 0; ph_idx = 0; arr_en = '0; ph_act = '0;
    for (int k = 0; k < NA; k++) for (int a = 0; a < ADC_UNITS; a++) ph_code[k][a] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      int sum [ROWS];
      bit ac [ROWS];
      int br, bs;
      bit bv;
      @(negedge clk);
      arr_en = 4'b1011;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int r = 0; r < ROWS; r++) begin sum[r] = 0; ac[r] = (it % 3 != 0) || (r % 5 != 0); end
      for (int p = 0; p < 8; p++) begin
        ph_valid = 1; ph_idx = 3'(p);
        for (int a = 0; a < ADC_UNITS; a++) begin
          int r;
          r = 8 * a + p;
          ph_act[a] = ac[r];
          for (int k = 0; k < NA; k++) begin
            // small range so that ties happen
            ph_code[k][a] = adc_code_t'((it < 10) ? $urandom_range(0, 4) : $urandom_range(0, 63) - 32);
            if (k != 2) sum[r] += int'(ph_code[k][a]);
          end
        end
        @(negedge clk);
      end
      ph_valid = 0;
      checks++;
      if (!done) begin failures++; $display("done missing"); end
      bv = 0; br = 0; bs = 0;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (int'(scores[r]) != (ac[r] ? sum[r] : 0)) begin
          failures++;
          if (failures < 10) $display("row %0d got %0d exp %0d", r, scores[r], sum[r]);
        end
        if (ac[r] && (!bv || sum[r] > bs)) begin bv = 1; br = r; bs = sum[r]; end
      end
      checks++;
      if (int'(best_row) != br || int'(best_score) != bs || best_valid != bv) begin
        failures++;
        $display("it %0d best %0d/%0d exp %0d/%0d", it, best_row, best_score, br, bs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
