// wl_decoder: 8-bit word-line decoder and the 256 word-line drivers of a bank.
//
// Each of the 128 rows has two word lines, WL+ and WL-, one per PCM device of
// the 2T2R cell, so the 8-bit address names one of 256 lines: addr[7:1] is the
// row and addr[0] the polarity (1 = WL+). This split of the address is this
// design's choice. Modes: WL_ONE drives the single addressed line (used to
// read back one device during write-verify), WL_PAIR both lines of row
// addr[7:1] (program, normal read), WL_RANGE both lines of rows
// row .. row+num-1 (in-memory MVM; the paper enables all WLs at once, the
// ISA's num_activated_row limits the range), WL_OFF none.
// Timing: the driver outputs are registered, one cycle after the inputs.
module wl_decoder
  import specpcm_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  wl_mode_e              mode,
  input  logic [7:0]            addr,
  input  logic [7:0]            num,     // WL_RANGE: number of rows (0 means all)
  output logic [ROWS_P-1:0]     wl_p,
  output logic [ROWS_P-1:0]     wl_n
);
  logic [ROWS_P-1:0] dec_p, dec_n;

  always_comb begin
    logic [6:0] row;
    logic [8:0] last;
    row   = addr[7:1];
    last  = (num == 0) ? 9'(ROWS_P) : 9'(row) + 9'(num);
    dec_p = '0;
    dec_n = '0;
    unique case (mode)
      WL_ONE: begin
        if (addr[0]) dec_p[row] = 1'b1;
        else         dec_n[row] = 1'b1;
      end
      WL_PAIR: begin
        dec_p[row] = 1'b1;
        dec_n[row] = 1'b1;
      end
      WL_RANGE: begin
        for (int r = 0; r < ROWS_P; r++)
          if (9'(r) >= 9'(row) && 9'(r) < last) begin
            dec_p[r] = 1'b1;
            dec_n[r] = 1'b1;
          end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_p <= '0;
      wl_n <= '0;
    end else begin
      wl_p <= dec_p;
      wl_n <= dec_n;
    end
  end
endmodule
