// tb_linkage_engine: writes random symmetric similarity matrices for 3..12
// points, runs complete-linkage clustering at several thresholds and
// compares the merge sequence, the merge count and the final labels with a
// straightforward software reference.
module tb_linkage_engine;
  import specpcm_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, start, busy, done, merge_valid;
  logic [3:0] wr_row, merge_a, merge_b;
  score_t wr_scores [N];
  logic [4:0] npts, num_merges;
  score_t threshold, merge_sim;
  logic [3:0] labels [N];
  int checks = 0, failures = 0;
  int S [N][N];
  int ra [$], rb [$], rs [$];

  linkage_engine #(.N(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (merge_valid) begin
    ra.push_back(int'(merge_a)); rb.push_back(int'(merge_b)); rs.push_back(int'(merge_sim));
  end

  initial begin
    wr_en = 0; start = 0; wr_row = 0; npts = 0; threshold = 0;
    for (int c = 0; c < N; c++) wr_scores[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      int np, thr, nm;
      int T [N][N];
      bit alive [N];
      int lab [N];
      int ea [$], eb [$], es [$];
      ea.delete(); eb.delete(); es.delete();
      np  = 3 + it % 10;
      thr = (it % 4 == 0) ? -2000 : $urandom_range(0, 300) - 100;
      for (int i = 0; i < N; i++)
        for (int j = i; j < N; j++) begin
          S[i][j] = $urandom_range(0, 600) - 300;
          S[j][i] = S[i][j];
        end
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 4'(i);
        for (int j = 0; j < N; j++) wr_scores[j] = score_t'(S[i][j]);
      end
      @(negedge clk);
      wr_en = 0;
      ra.delete(); rb.delete(); rs.delete();
      npts = 5'(np); threshold = score_t'(thr); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      // reference
      for (int i = 0; i < N; i++) begin alive[i] = (i < np); lab[i] = i; for (int j = 0; j < N; j++) T[i][j] = S[i][j]; end
      nm = 0;
      forever begin
        int bi, bj, bs;
        bit f;
        f = 0; bi = 0; bj = 0; bs = 0;
        for (int i = 0; i < np; i++)
          for (int j = i + 1; j < np; j++)
            if (alive[i] && alive[j] && (!f || T[i][j] > bs)) begin f = 1; bs = T[i][j]; bi = i; bj = j; end
        if (!f || bs < thr) break;
        ea.push_back(bi); eb.push_back(bj); es.push_back(bs);
        nm++;
        for (int k = 0; k < np; k++) begin
          int v;
          v = (T[bi][k] < T[bj][k]) ? T[bi][k] : T[bj][k];
          if (k != bi && k != bj) begin T[bi][k] = v; T[k][bi] = v; end
          if (lab[k] == bj) lab[k] = bi;
        end
        alive[bj] = 0;
      end
      checks++;
      if (int'(num_merges) != nm || ra.size() != nm) begin
        failures++;
        $display("it %0d merges %0d exp %0d", it, num_merges, nm);
      end else begin
        for (int m = 0; m < nm; m++) begin
          checks++;
          if (ra[m] != ea[m] || rb[m] != eb[m] || rs[m] != es[m]) begin
            failures++;
            $display("it %0d merge %0d got (%0d,%0d,%0d) exp (%0d,%0d,%0d)", it, m, ra[m], rb[m], rs[m], ea[m], eb[m], es[m]);
          end
        end
      end
      for (int k = 0; k < np; k++) begin
        checks++;
        if (int'(labels[k]) != lab[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
