// linkage_engine: near-memory agglomerative clustering with complete linkage.
//
// The paper's clustering starts with every spectrum in its own cluster and
// repeatedly merges the two closest clusters, using complete linkage (the
// distance between two clusters is the largest distance between their
// members), until a distance threshold is reached. The in-memory dot products
// deliver similarities, so this block works on similarity (distance =
// -similarity): the closest pair is the pair with the highest similarity, the
// linkage value of a merged cluster is the minimum similarity, and merging
// stops when the best similarity falls below `threshold`.
//
// The similarity matrix S is written one row at a time (wr_en/wr_row/
// wr_scores, e.g. the score vector of one MVM). S[i][j] with i < j is the
// canonical entry. Clustering (start, npts points):
//   SCAN  : visit every pair i < j of active clusters, one per cycle, and keep
//           the best (ties: first found);
//   MERGE : if best >= threshold, fold cluster j into i: for every k,
//           S(i,k) = min(S(i,k), S(j,k)) and label[k] = i where it was j, one
//           k per cycle; then j is retired and SCAN restarts;
//   else done pulses; labels[k] names the lowest point of k's cluster.
// The paper keeps this matrix in a separate PCM array that the logic
// re-programs; here it is a register array inside the block.
module linkage_engine
  import specpcm_pkg::*;
#(
  parameter int unsigned N = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  logic [$clog2(N)-1:0] wr_row,
  input  score_t     wr_scores [N],
  input  logic       start,
  input  logic [$clog2(N):0] npts,
  input  score_t     threshold,
  output logic       busy,
  output logic       done,
  output logic [$clog2(N)-1:0] labels [N],
  output logic [$clog2(N):0]   num_merges,
  output logic       merge_valid,
  output logic [$clog2(N)-1:0] merge_a,
  output logic [$clog2(N)-1:0] merge_b,
  output score_t     merge_sim
);
  localparam int unsigned IW = $clog2(N);

  typedef enum logic [1:0] {L_IDLE, L_SCAN, L_DECIDE, L_MERGE} lstate_e;

  lstate_e      state;
  score_t       S [N][N];
  logic [N-1:0] active;
  logic [IW:0]  np_q;
  logic [IW:0]  ia, ib, k;
  logic         found;
  score_t       best;
  logic [IW-1:0] bi, bj;
  score_t       thr_q;

  function automatic score_t smin(input score_t x, input score_t y);
    return (x < y) ? x : y;
  endfunction

  // canonical (upper-triangle) read
  function automatic score_t sget(input logic [IW-1:0] x, input logic [IW-1:0] y);
    return (x < y) ? S[x][y] : S[y][x];
  endfunction

  assign busy = (state != L_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= L_IDLE;
      active      <= '0;
      np_q        <= '0;
      ia          <= '0;
      ib          <= '0;
      k           <= '0;
      found       <= 1'b0;
      best        <= '0;
      bi          <= '0;
      bj          <= '0;
      thr_q       <= '0;
      done        <= 1'b0;
      num_merges  <= '0;
      merge_valid <= 1'b0;
      merge_a     <= '0;
      merge_b     <= '0;
      merge_sim   <= '0;
      for (int r = 0; r < N; r++) begin
        labels[r] <= IW'(r);
        for (int c = 0; c < N; c++) S[r][c] <= '0;
      end
    end else begin
      done        <= 1'b0;
      merge_valid <= 1'b0;
      unique case (state)
        L_IDLE: begin
          if (wr_en)
            for (int c = 0; c < N; c++) S[wr_row][c] <= wr_scores[c];
          if (start) begin
            for (int r = 0; r < N; r++) begin
              labels[r] <= IW'(r);
              active[r] <= (r < int'(npts));
            end
            np_q       <= npts;
            thr_q      <= threshold;
            num_merges <= '0;
            ia         <= '0;
            ib         <= (IW+1)'(1);
            found      <= 1'b0;
            state      <= (npts > 1) ? L_SCAN : L_DECIDE;
          end
        end
        L_SCAN: begin
          score_t s;
          s = sget(ia[IW-1:0], ib[IW-1:0]);
          if (active[ia[IW-1:0]] && active[ib[IW-1:0]] && (!found || s > best)) begin
            found <= 1'b1;
            best  <= s;
            bi    <= ia[IW-1:0];
            bj    <= ib[IW-1:0];
          end
          if (ib + 1'b1 < np_q) begin
            ib <= ib + 1'b1;
          end else if (ia + (IW+1)'(2) < np_q) begin
            ia <= ia + 1'b1;
            ib <= ia + (IW+1)'(2);
          end else begin
            state <= L_DECIDE;
          end
        end
        L_DECIDE: begin
          if (found && best >= thr_q) begin
            state       <= L_MERGE;
            k           <= '0;
            num_merges  <= num_merges + 1'b1;
            merge_valid <= 1'b1;
            merge_a     <= bi;
            merge_b     <= bj;
            merge_sim   <= best;
          end else begin
            state <= L_IDLE;
            done  <= 1'b1;
          end
        end
        L_MERGE: begin
          logic [IW-1:0] kk;
          score_t v;
          kk = k[IW-1:0];
          v  = smin(sget(bi, kk), sget(bj, kk));
          if (kk != bi && kk != bj) begin
            if (bi < kk) S[bi][kk] <= v;
            else         S[kk][bi] <= v;
          end
          if (labels[kk] == bj) labels[kk] <= bi;
          if (k + 1'b1 < np_q) begin
            k <= k + 1'b1;
          end else begin
            active[bj] <= 1'b0;
            ia         <= '0;
            ib         <= (IW+1)'(1);
            found      <= 1'b0;
            state      <= L_SCAN;
          end
        end
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
