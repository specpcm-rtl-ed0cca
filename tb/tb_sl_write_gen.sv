// tb_sl_write_gen: loads random targets with a column window, checks the
// interleaved 4:1 drive pattern of every phase, and checks the write-verify
// amplitude steps (up when read-back is low, down when high, stop when equal).
module tb_sl_write_gen;
  import specpcm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, verify, drive;
  cell_t load_tgt [COLS];
  logic [6:0] win_lo;
  logic [7:0] win_size;
  glevel_t rb_p [COLS];
  glevel_t rb_n [COLS];
  logic [1:0] phase;
  logic sl_p_en [COLS];
  amp_t sl_p_amp [COLS];
  logic sl_n_en [COLS];
  amp_t sl_n_amp [COLS];
  logic pending;
  int checks = 0, failures = 0;
  int tp [COLS], tn [COLS], ap [COLS], an [COLS];
  bit pp [COLS], pn [COLS];

  sl_write_gen dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_drive();
    for (int p = 0; p < 4; p++) begin
      @(negedge clk);
      drive = 1; phase = 2'(p);
      @(negedge clk);
      drive = 0;
      for (int c = 0; c < COLS; c++) begin
        // line 2c+1 (SL+) is in phase (2c+1)%4, line 2c (SL-) in phase (2c)%4
        bit ep, en;
        ep = ((2 * c + 1) % 4 == p) && pp[c];
        en = ((2 * c) % 4 == p) && pn[c];
        checks++;
        if (sl_p_en[c] !== ep || sl_n_en[c] !== en ||
            (ep && int'(sl_p_amp[c]) != ap[c]) || (en && int'(sl_n_amp[c]) != an[c])) begin
          failures++;
          if (failures < 10) $display("phase %0d col %0d en %b/%b exp %b/%b amp %0d/%0d exp %0d/%0d",
            p, c, sl_p_en[c], sl_n_en[c], ep, en, sl_p_amp[c], sl_n_amp[c], ap[c], an[c]);
        end
      end
    end
  endtask

  initial begin
    load = 0; verify = 0; drive = 0; phase = 0; win_lo = 0; win_size = 0;
    for (int c = 0; c < COLS; c++) begin load_tgt[c] = '0; rb_p[c] = '0; rb_n[c] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4; it++) begin
      int lo, sz;
      lo = (it == 0) ? 0 : $urandom_range(0, 100);
      sz = (it == 0) ? 0 : $urandom_range(1, 128 - lo);
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        int v;
        bit inw;
        v = $urandom_range(0, 6) - 3;
        load_tgt[c] = cell_t'(v);
        inw = (sz == 0) || (c >= lo && c < lo + sz);
        tp[c] = (v > 0) ? v : 0;
        tn[c] = (v < 0) ? -v : 0;
        ap[c] = tp[c]; an[c] = tn[c];
        pp[c] = inw; pn[c] = inw;
      end
      win_lo = 7'(lo); win_size = 8'(sz);
      load = 1;
      @(negedge clk);
      load = 0;
      checks++;
      if (!pending) begin failures++; $display("pending low after load"); end
      check_drive();
      // three verify rounds with random read-back errors
      for (int v = 0; v < 3; v++) begin
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          int rp, rn;
          rp = (v == 2) ? tp[c] : $urandom_range(0, 3);
          rn = (v == 2) ? tn[c] : $urandom_range(0, 3);
          rb_p[c] = glevel_t'(rp); rb_n[c] = glevel_t'(rn);
          if (pp[c]) begin
            if (rp < tp[c] && ap[c] < 7) ap[c]++;
            else if (rp > tp[c] && ap[c] > 0) ap[c]--;
            pp[c] = (rp != tp[c]);
          end
          if (pn[c]) begin
            if (rn < tn[c] && an[c] < 7) an[c]++;
            else if (rn > tn[c] && an[c] > 0) an[c]--;
            pn[c] = (rn != tn[c]);
          end
        end
        verify = 1;
        @(negedge clk);
        verify = 0;
        check_drive();
      end
      checks++;
      if (pending) begin failures++; $display("pending after full verify"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
