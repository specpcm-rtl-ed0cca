// tb_sa_readout: drives random column read currents and checks the merged
// 3-bit codes (difference of the SL pair, clamped to +/-mlc_bits) and the
// four-cycle latency of the interleaved 4:1 readout.
module tb_sa_readout;
  import specpcm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  logic [1:0] mlc_bits;
  logic [3:0] rd_p [COLS], rd_n [COLS];
  logic busy, done;
  cell_t row [COLS];
  int checks = 0, failures = 0;

  sa_readout dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; mlc_bits = 3;
    for (int c = 0; c < COLS; c++) begin rd_p[c] = 0; rd_n[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      int lat, n;
      n = 1 + it % 3;
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        rd_p[c] = 4'($urandom_range(0, 5));
        rd_n[c] = 4'($urandom_range(0, 5));
      end
      mlc_bits = 2'(n);
      start = 1;
      @(posedge clk);
      lat = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        @(posedge clk); lat++;
        @(negedge clk);
      end
      checks++;
      if (lat != 4) begin failures++; $display("latency %0d", lat); end
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = clampi(int'(rd_p[c]) - int'(rd_n[c]), -n, n);
        checks++;
        if (int'(row[c]) != e) begin
          failures++;
          if (failures < 10) $display("c%0d got %0d exp %0d", c, row[c], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
