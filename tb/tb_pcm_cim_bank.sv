// tb_pcm_cim_bank: programs random rows of an error-free bank and checks
// normal read (single device and differential) and the MVM bit-line sums
// against a reference; a second bank with a 50% programming error rate must
// show errors of exactly one level at a plausible rate.
module tb_pcm_cim_bank;
  import specpcm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [ROWS-1:0] wl_p, wl_n;
  logic prog, read, mvm;
  logic sl_p_en [COLS];
  amp_t sl_p_amp [COLS];
  logic sl_n_en [COLS];
  amp_t sl_n_amp [COLS];
  logic [3:0] rd_p [COLS], rd_n [COLS], rd_p2 [COLS], rd_n2 [COLS];
  cell_t dac_in [COLS];
  bl_t bl_p [ROWS], bl_n [ROWS], bl_p2 [ROWS], bl_n2 [ROWS];
  int checks = 0, failures = 0;
  int gp [8][COLS], gn [8][COLS];

  pcm_cim_bank #(.ERR_THRESH(0)) dut (.*);
  pcm_cim_bank #(.ERR_THRESH(128)) dut_err (
    .clk, .wl_p, .wl_n, .prog, .sl_p_en, .sl_p_amp, .sl_n_en, .sl_n_amp,
    .read, .rd_p(rd_p2), .rd_n(rd_n2), .mvm, .dac_in, .bl_p(bl_p2), .bl_n(bl_n2));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nerr, nbig;
    wl_p = '0; wl_n = '0; prog = 0; read = 0; mvm = 0;
    for (int c = 0; c < COLS; c++) begin
      sl_p_en[c] = 0; sl_n_en[c] = 0; sl_p_amp[c] = 0; sl_n_amp[c] = 0; dac_in[c] = 0;
    end
    nerr = 0; nbig = 0;
    // program rows 0..7 (row r uses bank row 10*r)
    for (int r = 0; r < 8; r++) begin
      @(negedge clk);
      wl_p = '0; wl_n = '0;
      wl_p[10 * r] = 1; wl_n[10 * r] = 1;
      for (int c = 0; c < COLS; c++) begin
        int v;
        v = $urandom_range(0, 6) - 3;
        gp[r][c] = (v > 0) ? v : 0;
        gn[r][c] = (v < 0) ? -v : 0;
        sl_p_en[c] = 1; sl_n_en[c] = 1;
        // amplitude above 3 saturates to level 3
        sl_p_amp[c] = amp_t'((gp[r][c] == 3 && c % 2 == 0) ? 6 : gp[r][c]);
        sl_n_amp[c] = amp_t'(gn[r][c]);
      end
      prog = 1;
      @(negedge clk);
      prog = 0;
    end
    for (int c = 0; c < COLS; c++) begin sl_p_en[c] = 0; sl_n_en[c] = 0; end
    // normal read of each row; WL+ only for odd rows
    for (int r = 0; r < 8; r++) begin
      @(negedge clk);
      wl_p = '0; wl_n = '0;
      wl_p[10 * r] = 1; wl_n[10 * r] = (r % 2 == 0);
      read = 1;
      @(negedge clk);
      read = 0;
      for (int c = 0; c < COLS; c++) begin
        int en, d2;
        en = (r % 2 == 0) ? gn[r][c] : 0;
        checks++;
        if (int'(rd_p[c]) != gp[r][c] || int'(rd_n[c]) != en) begin
          failures++;
          if (failures < 10) $display("read r%0d c%0d got %0d/%0d exp %0d/%0d", r, c, rd_p[c], rd_n[c], gp[r][c], en);
        end
        d2 = int'(rd_p2[c]) - gp[r][c];
        if (d2 != 0) nerr++;
        if (d2 > 1 || d2 < -1) nbig++;
      end
    end
    // MVM over rows 0..79 (the programmed rows plus erased ones)
    for (int it = 0; it < 5; it++) begin
      int x [COLS];
      @(negedge clk);
      wl_p = '0; wl_n = '0;
      for (int r = 0; r < 80; r++) begin wl_p[r] = 1; wl_n[r] = 1; end
      for (int c = 0; c < COLS; c++) begin
        x[c] = $urandom_range(0, 6) - 3;
        dac_in[c] = cell_t'(x[c]);
      end
      mvm = 1;
      @(negedge clk);
      mvm = 0;
      for (int r = 0; r < ROWS; r++) begin
        int d;
        d = 0;
        if (r < 80 && r % 10 == 0)
          for (int c = 0; c < COLS; c++) d += x[c] * (gp[r / 10][c] - gn[r / 10][c]);
        checks++;
        if (int'(bl_p[r]) - int'(bl_n[r]) != d) begin
          failures++;
          if (failures < 10) $display("mvm r%0d got %0d exp %0d", r, int'(bl_p[r]) - int'(bl_n[r]), d);
        end
        if (r >= 80) begin
          checks++;
          if (bl_p[r] != 0 || bl_n[r] != 0) failures++;
        end
      end
    end
    // error model: ~50% of devices touched are off by one, never more
    checks++;
    if (nerr < 100 || nerr > 500 || nbig != 0) begin
      failures++;
      $display("error model: %0d errors, %0d large", nerr, nbig);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
