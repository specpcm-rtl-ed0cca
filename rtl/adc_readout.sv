// adc_readout: the 16 flash ADCs of a bank and their interleaved 8:1 row
// select and merge.
//
// As published, each of the 16 ADCs is shared by eight rows and one conversion
// takes one cycle, so all 128 rows are converted in eight cycles. This design
// connects ADC a to rows 8a..8a+7 and converts row 8a+p in phase p. Rows whose
// word lines were not activated (act[r] = 0) read as code 0 and are flagged
// invalid. Each phase's 16 codes are also streamed out (ph_valid/ph_idx/
// ph_code), so a consumer can reduce them while the next phase converts.
// Timing: start (while idle) samples phase 0 on the same edge; phase p codes
// appear on ph_code one cycle after their sample; done is a registered pulse
// one cycle after the last phase, when codes[] holds all eight phases.
module adc_readout
  import specpcm_pkg::*;
#(
  parameter int unsigned ROWS_P      = ROWS,
  parameter int unsigned ADC_UNITS_P = ADC_UNITS,
  parameter int unsigned LSB         = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  adc_bits,
  input  bl_t         bl_p [ROWS_P],
  input  bl_t         bl_n [ROWS_P],
  input  logic [ROWS_P-1:0] act,
  output logic        busy,
  output logic        done,
  output logic        ph_valid,
  output logic [2:0]  ph_idx,
  output adc_code_t   ph_code [ADC_UNITS_P],
  output logic [ADC_UNITS_P-1:0] ph_act,
  output adc_code_t   codes [ROWS_P],
  output logic [5:0]  n_active
);
  localparam int unsigned SHARE = ROWS_P / ADC_UNITS_P;

  logic [2:0] phase, ph_q;
  logic       smp_q;
  logic       sample;
  logic [2:0] cur;
  logic [2:0] bits_q;
  logic [ROWS_P-1:0] act_q;
  logic signed [12:0] vin [ADC_UNITS_P];
  logic [5:0] na [ADC_UNITS_P];

  assign sample = (start && !busy) || busy;
  assign cur    = (start && !busy) ? 3'd0 : phase;

  always_comb begin
    for (int a = 0; a < ADC_UNITS_P; a++) begin
      int unsigned r;
      r = SHARE * a + int'(cur);
      vin[a] = 13'(signed'({1'b0, bl_p[r]}) - signed'({1'b0, bl_n[r]}));
    end
  end

  for (genvar a = 0; a < ADC_UNITS_P; a++) begin : g_adc
    flash_adc #(.LSB(LSB)) u_adc (
      .clk      (clk),
      .rst_n    (rst_n),
      .sample   (sample),
      .vin      (vin[a]),
      .adc_bits ((start && !busy) ? adc_bits : bits_q),
      .code     (ph_code[a]),
      .n_active (na[a])
    );
  end

  assign n_active = na[0];
  assign ph_valid = smp_q;
  assign ph_idx   = ph_q;
  always_comb
    for (int a = 0; a < ADC_UNITS_P; a++) ph_act[a] = act_q[SHARE * a + int'(ph_q)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      phase  <= '0;
      ph_q   <= '0;
      smp_q  <= 1'b0;
      bits_q <= 3'd6;
      act_q  <= '0;
    end else begin
      smp_q <= sample;
      ph_q  <= cur;
      if (start && !busy) begin
        bits_q <= adc_bits;
        act_q  <= act;
      end
      if (sample) begin
        phase <= cur + 3'd1;
        busy  <= (cur != 3'(SHARE - 1));
      end
    end
  end

  // done: registered, so codes[] already holds the last phase
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= smp_q && (ph_q == 3'(SHARE - 1));
  end

  // merge the streamed phases into the full row vector
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS_P; r++) codes[r] <= '0;
    end else if (smp_q) begin
      for (int a = 0; a < ADC_UNITS_P; a++)
        codes[SHARE * a + int'(ph_q)] <= act_q[SHARE * a + int'(ph_q)] ? ph_code[a] : adc_code_t'(0);
    end
  end
endmodule
