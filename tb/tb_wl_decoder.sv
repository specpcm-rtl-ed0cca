// tb_wl_decoder: checks every decoder mode against the expected WL+/WL-
// patterns, including the wrap-free range limit and the one-cycle register.
module tb_wl_decoder;
  import specpcm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wl_mode_e mode;
  logic [7:0] addr, num;
  logic [ROWS-1:0] wl_p, wl_n;
  int checks = 0, failures = 0;

  wl_decoder dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input wl_mode_e m, input int a, input int nm);
    logic [ROWS-1:0] ep, en;
    int row, last;
    ep = '0; en = '0;
    row = a / 2;
    last = (nm == 0) ? ROWS : row + nm;
    case (m)
      WL_ONE:  if (a % 2) ep[row] = 1; else en[row] = 1;
      WL_PAIR: begin ep[row] = 1; en[row] = 1; end
      WL_RANGE: for (int r = 0; r < ROWS; r++) if (r >= row && r < last) begin ep[r] = 1; en[r] = 1; end
      default: ;
    endcase
    @(negedge clk);
    mode = m; addr = 8'(a); num = 8'(nm);
    checks++;
    // output is registered: still the previous value until the edge
    @(negedge clk);
    checks++;
    if (wl_p !== ep || wl_n !== en) begin
      failures++;
      $display("mode %0d addr %0d num %0d mismatch", m, a, nm);
    end
  endtask

  initial begin
    mode = WL_OFF; addr = 0; num = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      apply(WL_ONE, $urandom_range(0, 255), 0);
      apply(WL_PAIR, $urandom_range(0, 255), 0);
      apply(WL_RANGE, 2 * $urandom_range(0, 127), $urandom_range(0, 40));
      apply(WL_OFF, 0, 0);
    end
    apply(WL_RANGE, 0, 0);
    apply(WL_RANGE, 2 * 100, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
