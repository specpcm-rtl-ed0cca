// score_argmax: near-memory score reduction for DB search (and for building
// the clustering similarity rows).
//
// A hypervector longer than one array row is split into segments held in the
// same row of several arrays, so the dot product of a query with a stored HV
// is the sum of the partial sums that the arrays' ADCs return for that row.
// This block adds those partial sums (only arrays with arr_en set) and keeps
// the row with the highest total, which is the DB-search match the paper's
// near-memory logic reports. Rows whose word lines were not activated are
// left out. Ties go to the lower row index (this design's choice).
//
// Interface: the arrays run in lockstep and stream one ADC phase per cycle
// (ph_valid, ph_idx, 16 codes per array); ADC unit a in phase p carries row
// 8a+p. start clears the state. After phase 7, done pulses (registered) with
// scores[] complete and best_row/best_score/best_valid final.
module score_argmax
  import specpcm_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS  = 22,
  parameter int unsigned ROWS_P      = ROWS,
  parameter int unsigned ADC_UNITS_P = ADC_UNITS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [NUM_ARRAYS-1:0] arr_en,
  input  logic       ph_valid,
  input  logic [2:0] ph_idx,
  input  adc_code_t  ph_code [NUM_ARRAYS][ADC_UNITS_P],
  input  logic [ADC_UNITS_P-1:0] ph_act,
  output score_t     scores [ROWS_P],
  output logic [6:0] best_row,
  output score_t     best_score,
  output logic       best_valid,
  output logic       done
);
  localparam int unsigned SHARE = ROWS_P / ADC_UNITS_P;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS_P; r++) scores[r] <= '0;
      best_row   <= '0;
      best_score <= '0;
      best_valid <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        for (int r = 0; r < ROWS_P; r++) scores[r] <= '0;
        best_row   <= '0;
        best_score <= '0;
        best_valid <= 1'b0;
      end else if (ph_valid) begin
        logic [6:0] br;
        score_t     bs;
        logic       bv;
        br = best_row;
        bs = best_score;
        bv = best_valid;
        for (int a = 0; a < ADC_UNITS_P; a++) begin
          score_t     s;
          logic [6:0] r;
          s = '0;
          r = 7'(SHARE * a + int'(ph_idx));
          for (int k = 0; k < NUM_ARRAYS; k++)
            if (arr_en[k]) s = s + score_t'(ph_code[k][a]);
          scores[r] <= ph_act[a] ? s : score_t'(0);
          if (ph_act[a] && (!bv || s > bs || (s == bs && r < br))) begin
            br = r;
            bs = s;
            bv = 1'b1;
          end
        end
        best_row   <= br;
        best_score <= bs;
        best_valid <= bv;
        done       <= (ph_idx == 3'(SHARE - 1));
      end
    end
  end
endmodule
