// tb_specpcm_top: end-to-end test of the accelerator at its default size
// (22 arrays of 128x128 cells, HD dimension 8192 for search, 2048 for
// clustering), driven only through the instruction port.
//
//  1. DB search: four reference spectra are encoded, packed (3 bits/cell)
//     and stored with 3 write-verify cycles in rows 0..3 of every array. A
//     noisy copy of reference 2 is encoded as the query; MVM_COMPUTE over the
//     four rows must report row 2, at 6-bit and at 3-bit ADC precision. The
//     packed buffer is checked against a reference encoder.
//  2. READ_HV of one array and of a column window back into the buffer.
//  3. Clustering: six spectra in two families are stored without verify in
//     rows 0..5 (2048 dims, 6 arrays); each row is read, MVM'd against all
//     six, the score row written to the similarity matrix, and complete-
//     linkage clustering must find the two families.
//  4. 2-bit and 1-bit packing: encode at MLC 2 and 1 and check element range
//     and array count.
// Every mechanism (write-verify, verify skipped, broadcast and single-array
// access, column window, ADC precision switch, MLC switch, merge, threshold
// stop, search hit) is counted and must occur at least once.
module tb_specpcm_top;
  import specpcm_pkg::*;
  import tb_ref_pkg::*;
  localparam int NA = 22;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready;
  instr_t instr;
  logic peak_we;
  logic [5:0] peak_waddr;
  logic [15:0] peak_idx;
  logic [3:0] peak_lvl;
  cell_t hv_buf [NA][COLS];
  logic search_valid, cluster_done;
  logic [6:0] best_row;
  score_t best_score;
  score_t scores [ROWS];
  logic [6:0] labels [128];
  logic [7:0] num_merges;
  logic [4:0] arrays_used;
  logic [3:0] verify_rounds;
  logic [15:0] pulse_rounds;

  specpcm_top dut (.*);

  int checks = 0, failures = 0;
  int n_wv = 0, n_nowv = 0, n_bcast = 0, n_single = 0, n_window = 0, n_adc_low = 0;
  int n_mlc [4] = '{0, 0, 0, 0};
  int n_merge = 0, n_thrstop = 0, n_hit = 0;
  int spk_i [8][24];
  int spk_l [8][24];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send(input instr_t i);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = i;
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!instr_ready) @(negedge clk);
  endtask

  function automatic instr_t mk(input opcode_e op);
    instr_t i;
    i = '0;
    i.op = op;
    i.mlc_bits = 2'd3;
    i.adc_bits = 3'd6;
    return i;
  endfunction

  task automatic load_peaks(input int s, input int np);
    for (int p = 0; p < np; p++) begin
      @(negedge clk);
      peak_we = 1; peak_waddr = 6'(p);
      peak_idx = 16'(spk_i[s][p]); peak_lvl = 4'(spk_l[s][p]);
    end
    @(negedge clk);
    peak_we = 0;
  endtask

  task automatic encode(input int s, input int mlc);
    instr_t i;
    load_peaks(s, 24);
    i = mk(OP_ENCODE);
    i.mlc_bits = 2'(mlc);
    i.num_peaks = 7'd24;
    send(i);
    n_mlc[mlc]++;
  endtask

  // reference packed element e of segment g for spectrum s
  function automatic int ref_elem(input int s, input int g, input int e, input int n, input int d);
    int v;
    v = 0;
    for (int t = 0; t < n; t++) begin
      int dim, acc;
      dim = (g * COLS + e) * n + t;
      if (dim < d) begin
        acc = 0;
        for (int p = 0; p < 24; p++)
          acc += (ref_hv_bit(32'h1D5EED01, spk_i[s][p], dim) == ref_hv_bit(32'h7A3C91B5, spk_l[s][p], dim)) ? 1 : -1;
        v += (acc > 0) ? 1 : -1;
      end
    end
    return v;
  endfunction

  initial begin
    instr_t i;
    int saved [NA][COLS];
    int pre [NA][COLS];
    int bad, mvm_lat, t0;
    instr_valid = 0; instr = '0; peak_we = 0; peak_waddr = 0; peak_idx = 0; peak_lvl = 0;
    // spectra 0..3: references; 4: query = ref 2 with 4 of 24 peaks replaced
    for (int s = 0; s < 4; s++)
      for (int p = 0; p < 24; p++) begin
        spk_i[s][p] = $urandom_range(0, 20000);
        spk_l[s][p] = $urandom_range(0, 15);
      end
    for (int p = 0; p < 24; p++) begin
      spk_i[4][p] = (p < 4) ? $urandom_range(0, 20000) : spk_i[2][p];
      spk_l[4][p] = spk_l[2][p];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ================= 1. DB search, D = 8192, 3 bits per cell =================
    for (int s = 0; s < 4; s++) begin
      encode(s, 3);
      check(arrays_used == 5'd22, "8192 dims at 3 bits/cell need 22 arrays");
      if (s == 0) begin
        for (int e = 0; e < COLS; e += 9) begin
          check(int'(hv_buf[0][e]) == ref_elem(0, 0, e, 3, 8192), "encoded segment 0");
          check(int'(hv_buf[21][e]) == ref_elem(0, 21, e, 3, 8192), "encoded last segment");
        end
        // dims past 8191 in the last segment are empty: element 43 covers 8193..
        check(hv_buf[21][100] == 0, "padding beyond the HV dimension");
      end
      if (s == 1) for (int a = 0; a < NA; a++) for (int c = 0; c < COLS; c++) saved[a][c] = int'(hv_buf[a][c]);
      i = mk(OP_STORE_HV);
      i.arr_all = 1; i.row_addr = 7'(s); i.write_cycles = 3'd3;
      send(i);
      n_bcast++;
      if (verify_rounds > 0) n_wv++;
    end
    encode(4, 3);
    for (int pass = 0; pass < 2; pass++) begin
      i = mk(OP_MVM);
      i.row_addr = 0; i.num_rows = 8'd4; i.adc_bits = (pass == 0) ? 3'd6 : 3'd3;
      @(negedge clk);
      while (!instr_ready) @(negedge clk);
      instr = i; instr_valid = 1; t0 = cyc;
      @(negedge clk);
      instr_valid = 0;
      while (!search_valid) @(negedge clk);
      mvm_lat = cyc - t0;
      while (!instr_ready) @(negedge clk);
      $display("search (ADC %0d bits): best row %0d score %0d, scores %0d %0d %0d %0d, %0d cycles",
               i.adc_bits, best_row, best_score, scores[0], scores[1], scores[2], scores[3], mvm_lat);
      check(best_row == 7'd2, "query matches reference 2");
      check(scores[5] == 0, "row outside the activated range scores 0");
      check(mvm_lat >= 10 && mvm_lat <= 14, "MVM instruction latency");
      if (best_row == 2) n_hit++;
      if (pass == 1) n_adc_low++;
    end

    // ================= 2. READ_HV ==============================================
    for (int a = 0; a < NA; a++) for (int c = 0; c < COLS; c++) pre[a][c] = int'(hv_buf[a][c]);
    i = mk(OP_READ_HV);
    i.arr_all = 0; i.arr_idx = 5'd5; i.row_addr = 7'd1;
    send(i);
    n_single++;
    bad = 0;
    for (int c = 0; c < COLS; c++) if (int'(hv_buf[5][c]) != saved[5][c]) bad++;
    $display("READ_HV array 5 row 1: %0d of 128 cells differ from the stored HV", bad);
    check(bad < 20, "read back after write-verify mostly correct");
    bad = 0;
    for (int a = 0; a < NA; a++) for (int c = 0; c < COLS; c++) if (a != 5 && int'(hv_buf[a][c]) != pre[a][c]) bad++;
    check(bad == 0, "single-array read leaves other segments alone");
    for (int a = 0; a < NA; a++) for (int c = 0; c < COLS; c++) pre[a][c] = int'(hv_buf[a][c]);
    i = mk(OP_READ_HV);
    i.arr_all = 1; i.row_addr = 7'd3; i.col_addr = 7'd64; i.data_size = 8'd16;
    send(i);
    n_window++;
    bad = 0;
    for (int a = 0; a < NA; a++) for (int c = 0; c < COLS; c++) if ((c < 64 || c >= 80) && int'(hv_buf[a][c]) != pre[a][c]) bad++;
    check(bad == 0, "columns outside the window keep the buffer");
    bad = 0;
    for (int a = 0; a < NA; a++) for (int c = 64; c < 80; c++) if (int'(hv_buf[a][c]) != pre[a][c]) bad++;
    check(bad > 0, "window columns replaced by row 3");

    // ================= 3. clustering, D = 2048 ==================================
    i = mk(OP_CONFIG);
    i.hd_dim = 14'd2048;
    send(i);
    // spectra 2..7 reused: families A (2,3,4) and B (5,6,7)
    for (int s = 2; s < 8; s++)
      for (int p = 0; p < 24; p++) begin
        int base;
        base = (s < 5) ? 0 : 1;
        if (p < 20) begin spk_i[s][p] = spk_i[base][p]; spk_l[s][p] = spk_l[base][p]; end
        else begin spk_i[s][p] = $urandom_range(0, 20000); spk_l[s][p] = $urandom_range(0, 15); end
      end
    for (int k = 0; k < 6; k++) begin
      encode(k + 2, 3);
      check(arrays_used == 5'd6, "2048 dims at 3 bits/cell need 6 arrays");
      i = mk(OP_STORE_HV);
      i.arr_all = 1; i.row_addr = 7'(k); i.write_cycles = 3'd0;
      send(i);
      n_nowv++;
    end
    for (int k = 0; k < 6; k++) begin
      i = mk(OP_READ_HV);
      i.arr_all = 1; i.row_addr = 7'(k);
      send(i);
      i = mk(OP_MVM);
      i.row_addr = 0; i.num_rows = 8'd6; i.to_linkage = 1; i.dst_row = 7'(k);
      send(i);
    end
    i = mk(OP_CLUSTER);
    i.num_rows = 8'd6; i.threshold = score_t'(60);
    @(negedge clk);
    instr = i; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!cluster_done) @(negedge clk);
    $display("clustering: %0d merges, labels %0d %0d %0d %0d %0d %0d", num_merges,
             labels[0], labels[1], labels[2], labels[3], labels[4], labels[5]);
    n_merge = int'(num_merges);
    if (num_merges < 5) n_thrstop++;
    check(num_merges == 8'd4, "two clusters remain");
    check(labels[1] == 0 && labels[2] == 0, "family A together");
    check(labels[3] == 3 && labels[4] == 3 && labels[5] == 3, "family B together");

    // ================= 4. other packings ========================================
    encode(0, 2);
    check(arrays_used == 5'd8, "2048 dims at 2 bits/cell need 8 arrays");
    bad = 0;
    for (int c = 0; c < COLS; c++) if (hv_buf[7][c] > 2 || hv_buf[7][c] < -2 || hv_buf[7][c] == 1 || hv_buf[7][c] == -1) bad++;
    check(bad == 0, "2-bit packing gives -2, 0, 2");
    check(hv_buf[8][0] == 0, "arrays past the HV stay empty");
    encode(0, 1);
    check(arrays_used == 5'd16, "2048 dims at 1 bit/cell need 16 arrays");
    check(int'(hv_buf[15][127]) == ref_elem(0, 15, 127, 1, 2048), "1-bit packing");

    // ================= mechanisms ===============================================
    $display("mechanisms: write-verify %0d, no verify %0d, broadcast %0d, single array %0d, window %0d,",
             n_wv, n_nowv, n_bcast, n_single, n_window);
    $display("            low-precision ADC %0d, MLC1/2/3 %0d/%0d/%0d, merges %0d, threshold stop %0d, search hits %0d",
             n_adc_low, n_mlc[1], n_mlc[2], n_mlc[3], n_merge, n_thrstop, n_hit);
    check(n_wv > 0, "write-verify happened");
    check(n_nowv > 0, "store without verify happened");
    check(n_bcast > 0 && n_single > 0 && n_window > 0, "array/column addressing modes");
    check(n_adc_low > 0, "ADC precision switch happened");
    check(n_mlc[1] > 0 && n_mlc[2] > 0 && n_mlc[3] > 0, "all packings used");
    check(n_merge > 0 && n_thrstop > 0, "merges and threshold stop");
    check(n_hit > 0, "search hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
