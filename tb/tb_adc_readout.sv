// tb_adc_readout: converts random bit-line pairs for all rows, checks the
// streamed phases (row 8a+p on unit a in phase p), the merged codes with
// inactive rows forced to 0, and the eight-phase timing.
module tb_adc_readout;
  import specpcm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  logic [2:0] adc_bits;
  bl_t bl_p [ROWS], bl_n [ROWS];
  logic [ROWS-1:0] act;
  logic busy, done, ph_valid;
  logic [2:0] ph_idx;
  adc_code_t ph_code [ADC_UNITS];
  logic [ADC_UNITS-1:0] ph_act;
  adc_code_t codes [ROWS];
  logic [5:0] n_active;
  int checks = 0, failures = 0;

  adc_readout dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; adc_bits = 6; act = '0;
    for (int r = 0; r < ROWS; r++) begin bl_p[r] = 0; bl_n[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      int b, lat, nph;
      int v [ROWS];
      b = 1 + it % 6;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        bl_p[r] = bl_t'($urandom_range(0, 400));
        bl_n[r] = bl_t'($urandom_range(0, 400));
        v[r] = int'(bl_p[r]) - int'(bl_n[r]);
        act[r] = (it % 2 == 0) ? 1'b1 : 1'($urandom_range(0, 1));
      end
      adc_bits = 3'(b);
      start = 1;
      @(posedge clk);
      lat = 1; nph = 0;
      @(negedge clk);
      start = 0;
      while (!done) begin
        if (ph_valid) begin
          nph++;
          for (int a = 0; a < ADC_UNITS; a++) begin
            int r;
            r = 8 * a + int'(ph_idx);
            checks++;
            if (int'(ph_code[a]) != ref_adc(v[r], 8, b) || ph_act[a] != act[r]) begin
              failures++;
              if (failures < 10) $display("phase %0d unit %0d got %0d exp %0d", ph_idx, a, ph_code[a], ref_adc(v[r], 8, b));
            end
          end
        end
        @(posedge clk); lat++;
        @(negedge clk);
      end
      checks += 2;
      if (lat != 9) begin failures++; $display("latency %0d", lat); end
      if (nph != 8) begin failures++; $display("phases %0d", nph); end
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (int'(codes[r]) != (act[r] ? ref_adc(v[r], 8, b) : 0)) begin
          failures++;
          if (failures < 10) $display("row %0d got %0d", r, codes[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
