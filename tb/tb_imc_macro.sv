// tb_imc_macro: exercises one bank through its sequencer.
//   * STORE without verify on an error-free bank, READ back (full row and a
//     column window), with the 4 x PULSE_CYCLES program time checked;
//   * MVM at 6 and 3 ADC bits against a reference dot product + ADC, with the
//     10-cycle latency checked and non-activated rows returning 0;
//   * on a bank with programming errors, STORE with 0 and with 7 write-verify
//     cycles: verify must run and must leave fewer wrong cells.
//     Eight more rows are stored with 7 verify cycles; each must show a
//     re-program round and read back with at most 3 wrong cells.
module tb_imc_macro;
  import specpcm_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // shared command bus, two banks
  logic cmd_valid [2];
  logic cmd_ready [2];
  mop_e cmd_op;
  logic [6:0] cmd_row, cmd_col;
  logic [7:0] cmd_num, cmd_size;
  logic [1:0] cmd_mlc;
  logic [2:0] cmd_wc, cmd_adcb;
  cell_t cmd_data [COLS];
  logic done [2];
  cell_t rd_data [2][COLS];
  logic [COLS-1:0] rd_mask [2];
  logic ph_valid [2];
  logic [2:0] ph_idx [2];
  adc_code_t ph_code [2][ADC_UNITS];
  logic [ADC_UNITS-1:0] ph_act [2];
  adc_code_t codes [2][ROWS];
  logic [ROWS-1:0] act [2];
  logic [3:0] verify_rounds [2];
  logic [15:0] pulse_rounds [2];
  int checks = 0, failures = 0;
  int w [8][COLS];

  for (genvar i = 0; i < 2; i++) begin : g
    imc_macro #(.ERR_THRESH(i == 0 ? 0 : 100)) dut (
      .clk, .rst_n, .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd_op, .cmd_row,
      .cmd_num, .cmd_col, .cmd_size, .cmd_mlc, .cmd_wc, .cmd_adcb, .cmd_data,
      .done(done[i]), .rd_data(rd_data[i]), .rd_mask(rd_mask[i]), .ph_valid(ph_valid[i]),
      .ph_idx(ph_idx[i]), .ph_code(ph_code[i]), .ph_act(ph_act[i]), .codes(codes[i]),
      .act(act[i]), .verify_rounds(verify_rounds[i]), .pulse_rounds(pulse_rounds[i]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input int b, input mop_e op, input int row, input int num, input int col,
                       input int size, input int mlc, input int wc, input int adcb,
                       output int lat);
    @(negedge clk);
    cmd_op = op; cmd_row = 7'(row); cmd_num = 8'(num); cmd_col = 7'(col); cmd_size = 8'(size);
    cmd_mlc = 2'(mlc); cmd_wc = 3'(wc); cmd_adcb = 3'(adcb);
    cmd_valid[b] = 1;
    @(posedge clk);
    lat = 0;
    @(negedge clk);
    cmd_valid[b] = 0;
    while (!done[b]) begin
      @(posedge clk); lat++;
      @(negedge clk);
    end
  endtask

  initial begin
    int lat, bad0, bad7;
    cmd_valid[0] = 0; cmd_valid[1] = 0;
    cmd_op = MOP_STORE; cmd_row = 0; cmd_col = 0; cmd_num = 0; cmd_size = 0;
    cmd_mlc = 3; cmd_wc = 0; cmd_adcb = 6;
    for (int c = 0; c < COLS; c++) cmd_data[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- store rows 0..7 on the clean bank, values of 3-bit packing
    for (int r = 0; r < 8; r++) begin
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = 2 * $urandom_range(0, 3) - 3;   // -3,-1,1,3
        cmd_data[c] = cell_t'(w[r][c]);
      end
      issue(0, MOP_STORE, r, 0, 0, 0, 3, 0, 6, lat);
      checks++;
      if (lat != 40) begin failures++; $display("store latency %0d", lat); end
    end
    // ---- windowed store into row 7: columns 20..59 get new values
    for (int c = 0; c < COLS; c++) begin
      int nv;
      nv = 2 * $urandom_range(0, 3) - 3;
      cmd_data[c] = cell_t'(nv);
      if (c >= 20 && c < 60) w[7][c] = nv;
    end
    issue(0, MOP_STORE, 7, 0, 20, 40, 3, 0, 6, lat);
    // ---- read back every row
    for (int r = 0; r < 8; r++) begin
      issue(0, MOP_READ, r, 0, 0, 0, 3, 0, 6, lat);
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (int'(rd_data[0][c]) != w[r][c]) begin
          failures++;
          if (failures < 10) $display("read r%0d c%0d got %0d exp %0d", r, c, rd_data[0][c], w[r][c]);
        end
      end
    end
    // ---- windowed read at MLC 1 (clamp to +/-1)
    issue(0, MOP_READ, 3, 0, 100, 10, 1, 0, 6, lat);
    for (int c = 0; c < COLS; c++) begin
      bit inw;
      inw = (c >= 100 && c < 110);
      checks++;
      if (rd_mask[0][c] != inw || int'(rd_data[0][c]) != (inw ? clampi(w[3][c], -1, 1) : 0)) failures++;
    end
    // ---- MVM
    for (int it = 0; it < 4; it++) begin
      int x [COLS];
      int b, lo, nr;
      b  = (it < 2) ? 6 : 3;
      lo = (it == 3) ? 2 : 0;
      nr = (it == 3) ? 4 : 8;
      for (int c = 0; c < COLS; c++) begin
        x[c] = (it == 0) ? w[5][c] : $urandom_range(0, 6) - 3;
        cmd_data[c] = cell_t'(x[c]);
      end
      issue(0, MOP_MVM, lo, nr, 0, 0, 3, 0, b, lat);
      checks++;
      if (lat != 10) begin failures++; $display("mvm latency %0d", lat); end
      for (int r = 0; r < ROWS; r++) begin
        int d, e;
        d = 0;
        if (r < 8) for (int c = 0; c < COLS; c++) d += x[c] * w[r][c];
        e = (r >= lo && r < lo + nr) ? ref_adc(d, 8, b) : 0;
        checks++;
        if (int'(codes[0][r]) != e || act[0][r] != (r >= lo && r < lo + nr)) begin
          failures++;
          if (failures < 20) $display("mvm it%0d r%0d got %0d exp %0d", it, r, codes[0][r], e);
        end
      end
    end
    // ---- write-verify on the noisy bank
    for (int c = 0; c < COLS; c++) cmd_data[c] = cell_t'(w[0][c]);
    issue(1, MOP_STORE, 0, 0, 0, 0, 3, 0, 6, lat);
    issue(1, MOP_READ, 0, 0, 0, 0, 3, 0, 6, lat);
    bad0 = 0;
    for (int c = 0; c < COLS; c++) if (int'(rd_data[1][c]) != w[0][c]) bad0++;
    issue(1, MOP_STORE, 1, 0, 0, 0, 3, 7, 6, lat);
    checks++;
    if (verify_rounds[1] == 0 || lat <= 40) begin
      failures++; $display("no verify: rounds %0d lat %0d", verify_rounds[1], lat);
    end
    issue(1, MOP_READ, 1, 0, 0, 0, 3, 0, 6, lat);
    bad7 = 0;
    for (int c = 0; c < COLS; c++) if (int'(rd_data[1][c]) != w[0][c]) bad7++;
    checks++;
    if (bad0 < 10 || bad7 * 3 > bad0) begin
      failures++;
      $display("write-verify did not help: %0d -> %0d wrong cells", bad0, bad7);
    end
    $display("wrong cells: %0d without verify, %0d with 7 verify cycles (%0d used)", bad0, bad7, verify_rounds[1]);
    // more rows with write-verify: each must re-program some devices (more
    // than one program round) and read back with at most 3 wrong cells
    for (int r = 2; r < 10; r++) begin
      int pr0, nb;
      for (int c = 0; c < COLS; c++) cmd_data[c] = cell_t'(w[r % 4][c]);
      pr0 = int'(pulse_rounds[1]);
      issue(1, MOP_STORE, r, 0, 0, 0, 3, 7, 6, lat);
      checks++;
      if (int'(pulse_rounds[1]) - pr0 < 2) begin
        failures++; $display("row %0d: no re-program round after verify", r);
      end
      issue(1, MOP_READ, r, 0, 0, 0, 3, 0, 6, lat);
      nb = 0;
      for (int c = 0; c < COLS; c++) if (int'(rd_data[1][c]) != w[r % 4][c]) nb++;
      checks++;
      if (nb > 3) begin
        failures++; $display("row %0d: %0d wrong cells after write-verify", r, nb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
