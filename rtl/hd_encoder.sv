// hd_encoder: ID-level hyperdimensional encoder for one spectrum.
//
// A spectrum is given as a list of peaks, each a feature index (m/z bin) and a
// quantised intensity level. For every HV dimension d the encoder accumulates
// ID_f[d] * LV_l[d] over all peaks (bipolar product, i.e. +1 when the two bits
// agree) and outputs sign(sum), a 1 for a positive sum and a 0 (-1) otherwise,
// as in the paper's ID-level encoding. The ID and level hypervectors are not
// stored: each element is produced on the fly by a hash of (vector, dimension),
// which is this design's choice in place of a stored random codebook.
//
// Work is organised per packed segment: one run produces the 128 x n bits that
// dimension packing turns into the 128 elements one PCM array row holds. Lane
// (e, t) computes dimension (seg*128 + e)*n + t for t < n; lanes with t >= n or
// with a dimension at or beyond hd_dim are marked invalid.
//
// Interface: peaks are written through peak_we/peak_waddr/peak_idx/peak_lvl.
// start (one cycle, while idle) launches a run for segment seg with n = mlc_bits.
// Timing: one peak per cycle; done pulses num_peaks + 1 cycles after start,
// with bits/valid held until the next start.
module hd_encoder
  import specpcm_pkg::*;
#(
  parameter int unsigned MAX_PEAKS = 64,
  parameter int unsigned LVL_W     = 4,
  parameter int unsigned COLS_P    = COLS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // peak list
  input  logic                          peak_we,
  input  logic [$clog2(MAX_PEAKS)-1:0]  peak_waddr,
  input  logic [15:0]                   peak_idx,
  input  logic [LVL_W-1:0]              peak_lvl,
  // control
  input  logic                          start,
  input  logic [4:0]                    seg,
  input  logic [1:0]                    mlc_bits,
  input  logic [13:0]                   hd_dim,
  input  logic [$clog2(MAX_PEAKS):0]    num_peaks,
  output logic                          busy,
  output logic                          done,
  output logic [COLS_P-1:0][MAX_MLC-1:0] bits,
  output logic [COLS_P-1:0][MAX_MLC-1:0] valid
);
  localparam int unsigned AW  = $clog2(MAX_PEAKS);
  localparam int unsigned ACW = AW + 2;   // accumulator: |sum| <= MAX_PEAKS

  logic [15:0]      pk_idx [MAX_PEAKS];
  logic [LVL_W-1:0] pk_lvl [MAX_PEAKS];

  logic signed [ACW-1:0] acc [COLS_P][MAX_MLC];
  logic [AW:0]           p;
  logic [4:0]            seg_q;
  logic [1:0]            n_q;
  logic [13:0]           dim_q;
  logic [AW:0]           np_q;

  always_ff @(posedge clk) begin
    if (peak_we) begin
      pk_idx[peak_waddr] <= peak_idx;
      pk_lvl[peak_waddr] <= peak_lvl;
    end
  end

  // dimension handled by lane (e, t) in the current run
  function automatic logic [16:0] lane_dim(input logic [4:0] s, input int unsigned e,
                                           input int unsigned t, input logic [1:0] n);
    return 17'((32'(s) * COLS_P + e) * 32'(n) + t);
  endfunction

  function automatic logic lane_ok(input logic [4:0] s, input int unsigned e,
                                   input int unsigned t, input logic [1:0] n,
                                   input logic [13:0] d);
    return (t < 32'(n)) && (lane_dim(s, e, t, n) < 17'(d));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      p     <= '0;
      seg_q <= '0;
      n_q   <= 2'd1;
      dim_q <= '0;
      np_q  <= '0;
      bits  <= '0;
      valid <= '0;
      for (int e = 0; e < COLS_P; e++)
        for (int t = 0; t < MAX_MLC; t++) acc[e][t] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        p     <= '0;
        seg_q <= seg;
        n_q   <= mlc_bits;
        dim_q <= hd_dim;
        np_q  <= num_peaks;
        for (int e = 0; e < COLS_P; e++)
          for (int t = 0; t < MAX_MLC; t++) acc[e][t] <= '0;
      end else if (busy) begin
        if (p < np_q) begin
          for (int e = 0; e < COLS_P; e++)
            for (int t = 0; t < MAX_MLC; t++) begin
              logic [15:0] d;
              logic        idb, lvb;
              d   = 16'(lane_dim(seg_q, e, t, n_q));
              idb = hv_bit(ID_SEED, pk_idx[p[AW-1:0]], d);
              lvb = hv_bit(LV_SEED, 16'(pk_lvl[p[AW-1:0]]), d);
              acc[e][t] <= (idb == lvb) ? acc[e][t] + 1'b1 : acc[e][t] - 1'b1;
            end
          p <= p + 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          for (int e = 0; e < COLS_P; e++)
            for (int t = 0; t < MAX_MLC; t++) begin
              valid[e][t] <= lane_ok(seg_q, e, t, n_q, dim_q);
              bits[e][t]  <= lane_ok(seg_q, e, t, n_q, dim_q) && (acc[e][t] > 0);
            end
        end
      end
    end
  end

endmodule
