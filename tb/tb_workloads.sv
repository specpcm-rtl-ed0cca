// tb_workloads: the two evaluated workloads at the size one pass of the
// accelerator holds, run on the top at its default parameters.
//
//  A. DB search (D = 8192, 3 bits per cell, 3 write-verify cycles, 6-bit ADC):
//     a full batch of 128 reference spectra is encoded and stored, one per
//     row of all 22 arrays. Then 16 queries, each a reference with 4 of its 24
//     peaks replaced, are searched against all 128 rows at once; each must
//     return its reference, with a clear margin over the runner-up.
//  B. Clustering (D = 2048, 3 bits per cell, no write-verify): one bucket of
//     128 spectra in 32 families of 4 (20 of 24 peaks shared inside a family)
//     is stored; each row is read back and multiplied against all 128 rows,
//     giving the 128x128 similarity matrix, and complete-linkage clustering
//     runs on it. The labels are compared with a software complete linkage
//     run on the same similarity scores (same tie rule: the first pair in
//     row-major order), and every family must end up in one cluster of its own.
// Spectra are random: feature indices 0..20000, levels 0..15. The real
// datasets hold millions of spectra; the host streams them through the
// arrays 128 at a time, which is the unit tested here.
module tb_workloads;
  import specpcm_pkg::*;
  localparam int NA = 22;
  localparam int NP = 24;
  localparam int NQ = 16;
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
  int cyc = 0;
  always @(posedge clk) cyc++;
  int spk_i [ROWS][NP];
  int spk_l [ROWS][NP];
  int qi [NP];
  int ql [NP];
  int sim [ROWS][ROWS];

  initial begin
    repeat (5000000) @(posedge clk);
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

  task automatic encode(input int pi [NP], input int pl [NP]);
    instr_t i;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      peak_we = 1; peak_waddr = 6'(p);
      peak_idx = 16'(pi[p]); peak_lvl = 4'(pl[p]);
    end
    @(negedge clk);
    peak_we = 0;
    i = mk(OP_ENCODE);
    i.num_peaks = 7'(NP);
    send(i);
  endtask

  task automatic store_all(input int wc);
    instr_t i;
    for (int r = 0; r < ROWS; r++) begin
      encode(spk_i[r], spk_l[r]);
      i = mk(OP_STORE_HV);
      i.arr_all = 1; i.row_addr = 7'(r); i.write_cycles = 3'(wc);
      send(i);
    end
  endtask

  // software complete linkage on sim[][] (upper triangle = row-major source)
  task automatic ref_cluster(input int thr, output int lab [ROWS], output int merges);
    int s [ROWS][ROWS];
    bit act [ROWS];
    merges = 0;
    for (int a = 0; a < ROWS; a++) begin
      lab[a] = a;
      act[a] = 1;
      for (int b = 0; b < ROWS; b++) s[a][b] = (a < b) ? sim[a][b] : sim[b][a];
    end
    forever begin
      int bi, bj, best;
      bit found;
      found = 0; bi = 0; bj = 0; best = 0;
      for (int a = 0; a < ROWS; a++)
        for (int b = a + 1; b < ROWS; b++)
          if (act[a] && act[b] && (!found || s[a][b] > best)) begin
            found = 1; best = s[a][b]; bi = a; bj = b;
          end
      if (!found || best < thr) break;
      merges++;
      for (int k = 0; k < ROWS; k++) begin
        int v;
        v = (s[bi][k] < s[bj][k]) ? s[bi][k] : s[bj][k];
        if (k != bi && k != bj) begin s[bi][k] = v; s[k][bi] = v; end
        if (lab[k] == bj) lab[k] = bi;
      end
      act[bj] = 0;
    end
  endtask

  initial begin
    instr_t i;
    int hits, margin_min, t0, merges_ref;
    int lab_ref [ROWS];
    instr_valid = 0; instr = '0; peak_we = 0; peak_waddr = 0; peak_idx = 0; peak_lvl = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ======================= A. DB search batch ================================
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < NP; p++) begin
        spk_i[r][p] = $urandom_range(0, 20000);
        spk_l[r][p] = $urandom_range(0, 15);
      end
    t0 = cyc;
    store_all(3);
    $display("A: stored 128 references in %0d cycles", cyc - t0);
    hits = 0; margin_min = 1 << 20;
    for (int q = 0; q < NQ; q++) begin
      int tgt, second;
      tgt = $urandom_range(0, ROWS - 1);
      for (int p = 0; p < NP; p++) begin
        qi[p] = (p < 4) ? $urandom_range(0, 20000) : spk_i[tgt][p];
        ql[p] = spk_l[tgt][p];
      end
      encode(qi, ql);
      i = mk(OP_MVM);
      i.row_addr = 0; i.num_rows = 8'd128;
      send(i);
      second = -4096;
      for (int r = 0; r < ROWS; r++) if (r != tgt && int'(scores[r]) > second) second = int'(scores[r]);
      check(best_row == 7'(tgt), $sformatf("query %0d finds reference %0d (got %0d)", q, tgt, best_row));
      check(int'(best_score) == int'(scores[best_row]), "best score is the score of the best row");
      if (best_row == 7'(tgt)) hits++;
      if (int'(scores[tgt]) - second < margin_min) margin_min = int'(scores[tgt]) - second;
    end
    $display("A: %0d of %0d queries matched, smallest margin over the runner-up %0d", hits, NQ, margin_min);
    check(margin_min > 100, "search margin");

    // ======================= B. clustering bucket ==============================
    i = mk(OP_CONFIG);
    i.hd_dim = 14'd2048;
    send(i);
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < NP; p++)
        if (r % 4 != 0 && p < 20) begin
          spk_i[r][p] = spk_i[r - r % 4][p];
          spk_l[r][p] = spk_l[r - r % 4][p];
        end
    t0 = cyc;
    store_all(0);
    check(arrays_used == 5'd6, "2048 dims use 6 arrays");
    for (int k = 0; k < ROWS; k++) begin
      i = mk(OP_READ_HV);
      i.arr_all = 1; i.row_addr = 7'(k);
      send(i);
      i = mk(OP_MVM);
      i.row_addr = 0; i.num_rows = 8'd128; i.to_linkage = 1; i.dst_row = 7'(k);
      send(i);
      for (int c = 0; c < ROWS; c++) sim[k][c] = int'(scores[c]);
    end
    $display("B: similarity matrix built in %0d cycles", cyc - t0);
    t0 = cyc;
    i = mk(OP_CLUSTER);
    i.num_rows = 8'd128; i.threshold = score_t'(60);
    @(negedge clk);
    while (!instr_ready) @(negedge clk);
    instr = i; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    while (!cluster_done) @(negedge clk);
    $display("B: clustering took %0d cycles, %0d merges", cyc - t0, num_merges);
    ref_cluster(60, lab_ref, merges_ref);
    check(int'(num_merges) == merges_ref, $sformatf("merge count %0d vs reference %0d", num_merges, merges_ref));
    for (int k = 0; k < ROWS; k++)
      check(int'(labels[k]) == lab_ref[k], $sformatf("label of point %0d", k));
    for (int k = 0; k < ROWS; k++)
      check(int'(labels[k]) == k - k % 4, $sformatf("point %0d clustered with its family", k));
    check(num_merges == 8'd96, "32 families remain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
