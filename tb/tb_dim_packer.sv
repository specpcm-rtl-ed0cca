// tb_dim_packer: checks dimension packing against a bit-counting reference
// for random bit patterns at n = 1, 2 and 3 and with partly invalid lanes.
module tb_dim_packer;
  import specpcm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid;
  logic [COLS-1:0][MAX_MLC-1:0] bits, valid;
  logic out_valid;
  cell_t packed_hv [COLS];
  int checks = 0, failures = 0;

  dim_packer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; bits = '0; valid = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int n;
      int exp_v [COLS];
      n = 1 + (it % 3);
      @(negedge clk);
      for (int e = 0; e < COLS; e++) begin
        exp_v[e] = 0;
        for (int t = 0; t < 3; t++) begin
          bits[e][t]  = $urandom_range(0, 1);
          valid[e][t] = (t < n) && (it < 50 || e < 100);
          if (valid[e][t]) exp_v[e] += bits[e][t] ? 1 : -1;
        end
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int e = 0; e < COLS; e++) begin
        checks++;
        if (int'(packed_hv[e]) != exp_v[e]) begin
          failures++;
          if (failures < 10) $display("it %0d e %0d got %0d exp %0d", it, e, packed_hv[e], exp_v[e]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
