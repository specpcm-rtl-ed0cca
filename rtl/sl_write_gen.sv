// sl_write_gen: write pulse generator and source-line (SL) drivers of a bank.
//
// A 2T2R cell holding the signed value v is programmed as two device levels,
// max(v,0) on its + device and max(-v,0) on its - device. For every one of the
// 256 SLs (SL+[c] and SL-[c] of the 128 columns) this block keeps the target
// level, the pulse amplitude code and a pending flag. The paper states that
// the SL voltage is set by the target level and, during write-verify, raised
// when the read-back level is below the target and lowered when above; this
// block does exactly that with a +/-1 step on a 3-bit amplitude code (the code
// and step size are this design's choice). Lines that verify correctly stop
// being pulsed.
//
// The 64 drivers are time-shared over the 256 SLs through an interleaved 4:1
// select: SL line L = 2*col + pol (pol 1 = SL+) is driven by unit L/4 in
// phase L%4. Only lines inside the column window [win_lo, win_lo+win_size)
// are pulsed.
//
// Interface: load latches targets and window; verify takes read-back device
// levels of the row and updates amplitudes/pending; drive with phase outputs
// that phase's pulses on the next cycle (registered). pending is high while
// any line still needs a pulse.
module sl_write_gen
  import specpcm_pkg::*;
#(
  parameter int unsigned COLS_P   = COLS,
  parameter int unsigned SL_UNITS_P = SL_UNITS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      load,
  input  cell_t     load_tgt [COLS_P],
  input  logic [6:0] win_lo,
  input  logic [7:0] win_size,   // 0 means COLS_P
  input  logic      verify,
  input  glevel_t   rb_p [COLS_P],
  input  glevel_t   rb_n [COLS_P],
  input  logic      drive,
  input  logic [1:0] phase,
  output logic      sl_p_en  [COLS_P],
  output amp_t      sl_p_amp [COLS_P],
  output logic      sl_n_en  [COLS_P],
  output amp_t      sl_n_amp [COLS_P],
  output logic      pending
);
  localparam int unsigned LINES = 2 * COLS_P;

  glevel_t tgt [LINES];
  amp_t    amp [LINES];
  logic    pen [LINES];

  function automatic amp_t step(input amp_t a, input glevel_t rb, input glevel_t t);
    if (rb < t)      return (a == 3'd7) ? a : a + 3'd1;
    else if (rb > t) return (a == 3'd0) ? a : a - 3'd1;
    else             return a;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LINES; l++) begin
        tgt[l] <= '0;
        amp[l] <= '0;
        pen[l] <= 1'b0;
      end
      for (int c = 0; c < COLS_P; c++) begin
        sl_p_en[c]  <= 1'b0;
        sl_n_en[c]  <= 1'b0;
        sl_p_amp[c] <= '0;
        sl_n_amp[c] <= '0;
      end
    end else begin
      if (load) begin
        for (int c = 0; c < COLS_P; c++) begin
          logic [8:0] hi;
          logic       inw;
          hi  = (win_size == 0) ? 9'(COLS_P) : 9'(win_lo) + 9'(win_size);
          inw = (9'(c) >= 9'(win_lo)) && (9'(c) < hi);
          tgt[2*c+1] <= pos_level(load_tgt[c]);
          tgt[2*c]   <= neg_level(load_tgt[c]);
          amp[2*c+1] <= amp_t'(pos_level(load_tgt[c]));
          amp[2*c]   <= amp_t'(neg_level(load_tgt[c]));
          pen[2*c+1] <= inw;
          pen[2*c]   <= inw;
        end
      end else if (verify) begin
        for (int c = 0; c < COLS_P; c++) begin
          if (pen[2*c+1]) begin
            amp[2*c+1] <= step(amp[2*c+1], rb_p[c], tgt[2*c+1]);
            pen[2*c+1] <= (rb_p[c] != tgt[2*c+1]);
          end
          if (pen[2*c]) begin
            amp[2*c] <= step(amp[2*c], rb_n[c], tgt[2*c]);
            pen[2*c] <= (rb_n[c] != tgt[2*c]);
          end
        end
      end
      // interleaved 4:1 select: unit u drives line 4u+phase
      for (int c = 0; c < COLS_P; c++) begin
        sl_p_en[c] <= 1'b0;
        sl_n_en[c] <= 1'b0;
      end
      if (drive) begin
        for (int u = 0; u < SL_UNITS_P; u++) begin
          int unsigned l;
          l = 4 * u + int'(phase);
          if (l % 2 == 1) begin
            sl_p_en[l/2]  <= pen[l];
            sl_p_amp[l/2] <= amp[l];
          end else begin
            sl_n_en[l/2]  <= pen[l];
            sl_n_amp[l/2] <= amp[l];
          end
        end
      end
    end
  end

  always_comb begin
    pending = 1'b0;
    for (int l = 0; l < LINES; l++) pending |= pen[l];
  end
endmodule
