// dim_packer: dimension packing of a binary hypervector for multi-level cells.
//
// Following the paper, n adjacent HV bits (n = MLC_bits, 1..3) are summed into
// one element so that a D-dimensional binary HV becomes a D/n-element vector
// that n-bit cells can hold. Bits are bipolar (1 = +1, 0 = -1), so an element
// is the signed sum of n values and lies in [-n, n]; a 2T2R cell stores it as
// the difference of its two device levels. Bits whose lane is marked invalid
// (beyond n, or beyond the HV dimension in the last segment) contribute 0,
// which is this design's handling of a D that n does not divide.
//
// Interface: in_valid with bits/valid for 128 elements x 3 lanes; out_valid
// and packed one cycle later (registered).
module dim_packer
  import specpcm_pkg::*;
#(
  parameter int unsigned COLS_P = COLS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic [COLS_P-1:0][MAX_MLC-1:0] bits,
  input  logic [COLS_P-1:0][MAX_MLC-1:0] valid,
  output logic                           out_valid,
  output cell_t                          packed_hv [COLS_P]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int e = 0; e < COLS_P; e++) packed_hv[e] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int e = 0; e < COLS_P; e++) begin
          cell_t s;
          s = '0;
          for (int t = 0; t < MAX_MLC; t++)
            if (valid[e][t]) s = bits[e][t] ? s + 3'sd1 : s - 3'sd1;
          packed_hv[e] <= s;
        end
      end
    end
  end
endmodule
