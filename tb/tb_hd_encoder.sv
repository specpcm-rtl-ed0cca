// tb_hd_encoder: encodes random peak lists and compares every output bit with
// a reference ID-level encoding; checks lane masking for n = 1..3, a partial
// last segment, and the num_peaks + 1 cycle latency.
module tb_hd_encoder;
  import specpcm_pkg::*;
  import tb_ref_pkg::*;
  localparam int MP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic peak_we;
  logic [3:0] peak_waddr;
  logic [15:0] peak_idx;
  logic [3:0] peak_lvl;
  logic start;
  logic [4:0] seg;
  logic [1:0] mlc_bits;
  logic [13:0] hd_dim;
  logic [4:0] num_peaks;
  logic busy, done;
  logic [COLS-1:0][MAX_MLC-1:0] bits, valid;
  int checks = 0, failures = 0;
  int pk_i [MP];
  int pk_l [MP];

  hd_encoder #(.MAX_PEAKS(MP), .LVL_W(4)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int s, input int n, input int d, input int np);
    int lat;
    @(negedge clk);
    seg = 5'(s); mlc_bits = 2'(n); hd_dim = 14'(d); num_peaks = 5'(np);
    start = 1;
    @(posedge clk);
    lat = 0;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk); lat++;
      @(negedge clk);
    end
    checks++;
    if (lat != np + 1) begin
      failures++;
      $display("latency %0d expected %0d", lat, np + 1);
    end
    for (int e = 0; e < COLS; e++)
      for (int t = 0; t < 3; t++) begin
        int dim, acc;
        bit ok, eb;
        dim = (s * COLS + e) * n + t;
        ok  = (t < n) && (dim < d);
        acc = 0;
        for (int p = 0; p < np; p++)
          acc += (ref_hv_bit(32'h1D5EED01, pk_i[p], dim) == ref_hv_bit(32'h7A3C91B5, pk_l[p], dim)) ? 1 : -1;
        eb = ok && (acc > 0);
        checks++;
        if (valid[e][t] !== ok || bits[e][t] !== eb) begin
          failures++;
          if (failures < 10) $display("s%0d n%0d e%0d t%0d got %b/%b exp %b/%b", s, n, e, t,
                                      valid[e][t], bits[e][t], ok, eb);
        end
      end
  endtask

  initial begin
    peak_we = 0; start = 0; peak_waddr = 0; peak_idx = 0; peak_lvl = 0;
    seg = 0; mlc_bits = 3; hd_dim = 8192; num_peaks = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < MP; p++) begin
      @(negedge clk);
      pk_i[p] = $urandom_range(0, 30000);
      pk_l[p] = $urandom_range(0, 15);
      peak_we = 1; peak_waddr = 4'(p); peak_idx = 16'(pk_i[p]); peak_lvl = 4'(pk_l[p]);
    end
    @(negedge clk);
    peak_we = 0;
    run(0, 3, 8192, 16);
    run(21, 3, 8192, 16);   // last segment: dims 8064..8447, only up to 8191 valid
    run(3, 2, 2048, 9);
    run(5, 1, 2048, 16);
    run(7, 1, 2048, 1);     // beyond hd_dim: everything invalid
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
