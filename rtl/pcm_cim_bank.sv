// pcm_cim_bank: behavioural model of one 128x128 2T2R PCM compute-in-memory
// bank, including its 3-bit DAC inputs and read pulse generator.
//
// This is a behavioural model, not a circuit: the real part is an analog array
// of superlattice PCM devices. Voltages and currents are represented by
// integers in units of one conductance level times one DAC step.
//
// Each cell holds two device levels, gp (the + device, WL+/SL+) and gn (the -
// device, WL-/SL-), each 0..3; the cell's signed value is gp - gn, as in the
// paper's differential 2T2R storage. Three operations:
//  * prog: every device whose WL is active and whose SL is enabled takes the
//    SL pulse amplitude as its new level, saturated to 0..3, and with a
//    pseudo-random +/-1 level error of probability ERR_THRESH/256. The error
//    stands for the programming non-ideality that write-verify corrects; its
//    rate is a parameter of this model, not a device measurement.
//  * read: read current of each column, rd_p[c] = sum of gp over rows with WL+
//    active, rd_n[c] likewise for gn (saturated to 4 bits).
//  * mvm: the signed DAC code x[c] is applied on SL+[c]/SL-[c]; for every row
//    with both WLs active the bank returns bl_p[r] and bl_n[r], the two
//    bit-line sums, whose difference is sum_c x[c] * (gp - gn). Rows whose WLs
//    are off return 0. How positive and negative inputs split over the SL pair
//    is this model's choice.
// Timing: results are registered one cycle after the strobe.
// The array starts erased (all levels 0) in simulation.
// The per-row and per-column loops over the whole array are written for
// clarity of the model; a synthesis flow with a loop-unroll limit below
// 128 x 128 iterations rejects them, which is expected for an analog model.
module pcm_cim_bank
  import specpcm_pkg::*;
#(
  parameter int unsigned ROWS_P     = ROWS,
  parameter int unsigned COLS_P     = COLS,
  parameter int unsigned ERR_THRESH = 77,
  parameter logic [31:0] ERR_SEED   = 32'h0BAD_5EED
) (
  input  logic          clk,
  input  logic [ROWS_P-1:0] wl_p,
  input  logic [ROWS_P-1:0] wl_n,
  input  logic          prog,
  input  logic          sl_p_en  [COLS_P],
  input  amp_t          sl_p_amp [COLS_P],
  input  logic          sl_n_en  [COLS_P],
  input  amp_t          sl_n_amp [COLS_P],
  input  logic          read,
  output logic [3:0]    rd_p [COLS_P],
  output logic [3:0]    rd_n [COLS_P],
  input  logic          mvm,
  input  cell_t         dac_in [COLS_P],
  output bl_t           bl_p [ROWS_P],
  output bl_t           bl_n [ROWS_P]
);
  glevel_t     gp [ROWS_P][COLS_P];
  glevel_t     gn [ROWS_P][COLS_P];
  logic [31:0] pulse_cnt;

  initial begin
    for (int r = 0; r < ROWS_P; r++)
      for (int c = 0; c < COLS_P; c++) begin
        gp[r][c] = '0;
        gn[r][c] = '0;
      end
    for (int c = 0; c < COLS_P; c++) begin
      rd_p[c] = '0;
      rd_n[c] = '0;
    end
    for (int r = 0; r < ROWS_P; r++) begin
      bl_p[r] = '0;
      bl_n[r] = '0;
    end
    pulse_cnt = '0;
  end

  // programmed level: amplitude, saturated, plus a rare +/-1 error
  function automatic glevel_t program_level(input amp_t a, input logic [31:0] cnt,
                                            input int unsigned r, input int unsigned c,
                                            input logic pol);
    logic [31:0] h;
    int          lv;
    h  = ERR_SEED ^ (cnt * 32'h0001_0003) ^ (32'(r) << 17) ^ (32'(c) << 1) ^ 32'(pol);
    h  = h * 32'h9E37_79B1;
    h  = h ^ (h >> 15);
    h  = h * 32'h2C1B_3C6D;
    h  = h ^ (h >> 12);
    lv = (a > 3'd3) ? 3 : int'(a);
    if (h[7:0] < 8'(ERR_THRESH)) lv = h[8] ? lv + 1 : lv - 1;
    if (lv < 0) lv = 0;
    if (lv > 3) lv = 3;
    return glevel_t'(lv);
  endfunction

  // plain always: the same arrays are preset by the initial block above
  always @(posedge clk) begin
    if (prog) begin
      pulse_cnt <= pulse_cnt + 1;
      for (int r = 0; r < ROWS_P; r++) begin
        if (wl_p[r])
          for (int c = 0; c < COLS_P; c++)
            if (sl_p_en[c]) gp[r][c] <= program_level(sl_p_amp[c], pulse_cnt, r, c, 1'b1);
        if (wl_n[r])
          for (int c = 0; c < COLS_P; c++)
            if (sl_n_en[c]) gn[r][c] <= program_level(sl_n_amp[c], pulse_cnt, r, c, 1'b0);
      end
    end
    if (read) begin
      for (int c = 0; c < COLS_P; c++) begin
        int sp, sn;
        sp = 0;
        sn = 0;
        for (int r = 0; r < ROWS_P; r++) begin
          if (wl_p[r]) sp += int'(gp[r][c]);
          if (wl_n[r]) sn += int'(gn[r][c]);
        end
        rd_p[c] <= (sp > 15) ? 4'd15 : 4'(sp);
        rd_n[c] <= (sn > 15) ? 4'd15 : 4'(sn);
      end
    end
    if (mvm) begin
      for (int r = 0; r < ROWS_P; r++) begin
        int sp, sn;
        sp = 0;
        sn = 0;
        if (wl_p[r] && wl_n[r]) begin
          for (int c = 0; c < COLS_P; c++) begin
            int x;
            x = int'(dac_in[c]);
            if (x > 0) begin
              sp += x * int'(gp[r][c]);
              sn += x * int'(gn[r][c]);
            end else begin
              sp += (-x) * int'(gn[r][c]);
              sn += (-x) * int'(gp[r][c]);
            end
          end
        end
        bl_p[r] <= bl_t'(sp);
        bl_n[r] <= bl_t'(sn);
      end
    end
  end
endmodule
