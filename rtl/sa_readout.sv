// sa_readout: behavioural model of the 32 3-bit sense amplifiers of a bank
// together with their interleaved 4:1 column select and merge logic.
//
// This is a behavioural model: a sense amplifier is an analog comparator
// circuit; here it compares the SL+ and SL- read currents of one 2T2R cell and
// resolves their difference into a signed 3-bit code, clamped to [-lim, lim]
// with lim = mlc_bits (the range the cell can hold at that packing). With only
// the WL+ (WL-) line of a row active the code is the + device level (minus the
// - device level), which write-verify uses to read each device alone.
//
// Following the published configuration, 32 amplifiers serve 128 columns, each
// shared by four columns; this design connects amplifier k to columns 4k..4k+3
// and senses column 4k+p in phase p. The four phases are merged into one
// 128-element row word.
// Timing: start (while idle) begins phase 0 on the same edge; one phase per
// cycle; done pulses when the row word is complete, 4 cycles after start.
module sa_readout
  import specpcm_pkg::*;
#(
  parameter int unsigned COLS_P     = COLS,
  parameter int unsigned SA_UNITS_P = SA_UNITS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [1:0] mlc_bits,
  input  logic [3:0] rd_p [COLS_P],
  input  logic [3:0] rd_n [COLS_P],
  output logic       busy,
  output logic       done,
  output cell_t      row [COLS_P]
);
  localparam int unsigned SHARE = COLS_P / SA_UNITS_P;

  logic [1:0] phase;
  logic [1:0] lim;

  function automatic cell_t sense(input logic [3:0] ip, input logic [3:0] in_,
                                  input logic [1:0] l);
    int d;
    d = int'(ip) - int'(in_);
    if (d > int'(l))  d = int'(l);
    if (d < -int'(l)) d = -int'(l);
    return cell_t'(d);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      phase <= '0;
      lim   <= 2'd3;
      for (int c = 0; c < COLS_P; c++) row[c] <= '0;
    end else begin
      done <= 1'b0;
      if ((start && !busy) || busy) begin
        logic [1:0] ph;
        logic [1:0] l;
        ph = (start && !busy) ? 2'd0 : phase;
        l  = (start && !busy) ? mlc_bits : lim;
        if (start && !busy) lim <= mlc_bits;
        for (int k = 0; k < SA_UNITS_P; k++) begin
          int unsigned c;
          c = SHARE * k + int'(ph);
          row[c] <= sense(rd_p[c], rd_n[c], l);
        end
        phase <= ph + 2'd1;
        if (ph == 2'(SHARE - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          busy <= 1'b1;
        end
      end
    end
  end
endmodule
