// imc_macro: one PCM compute-in-memory bank with its peripherals and the
// sequencer that runs the three array operations of the instruction set.
//
// Contents: wl_decoder (WL decode/drive), sl_write_gen (write pulse generator,
// SL drivers, 4:1 select), pcm_cim_bank (2T2R array, DAC, read pulse
// generator), sa_readout (sense amplifiers, 4:1 select & merge) and
// adc_readout (16 flash ADCs, 8:1 select & merge).
//
// Operations (cmd_op, accepted when cmd_valid && cmd_ready):
//  * MOP_STORE: program row cmd_row, columns [cmd_col, cmd_col+cmd_size), with
//    the signed values cmd_data, then up to cmd_wc write-verify cycles. A
//    program round drives the four SL phases, each for PULSE_CYCLES cycles
//    (the paper gives 20 ns = 10 cycles for programming). A verify cycle reads
//    the + devices (WL+ only) and then the - devices (WL- only) of the row,
//    lets sl_write_gen adjust amplitudes, and re-programs only the devices
//    that are still wrong; it ends early once every device verifies. The
//    order program, (verify, re-program) x cmd_wc is this design's reading of
//    "write-verify cycles".
//  * MOP_READ: normal read of row cmd_row; rd_data holds the row clamped to
//    +/-cmd_mlc, rd_mask marks the requested column window.
//  * MOP_MVM: cmd_data (clamped to +/-cmd_mlc, the DAC range) is applied to
//    rows cmd_row .. cmd_row+cmd_num-1 at once and all 128 rows are converted
//    by the ADCs at cmd_adcb bits. As published, the MVM takes ten cycles:
//    one to set up word lines and DAC inputs, one for the array, eight ADC
//    phases; done rises 10 cycles after the command is accepted.
// ADC phases are streamed on ph_* for the score reduction outside.
module imc_macro
  import specpcm_pkg::*;
#(
  parameter int unsigned PULSE_CYCLES = 10,
  parameter int unsigned ERR_THRESH   = 77,
  parameter logic [31:0] ERR_SEED     = 32'h0BAD_5EED,
  parameter int unsigned ADC_LSB      = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  mop_e        cmd_op,
  input  logic [6:0]  cmd_row,
  input  logic [7:0]  cmd_num,
  input  logic [6:0]  cmd_col,
  input  logic [7:0]  cmd_size,
  input  logic [1:0]  cmd_mlc,
  input  logic [2:0]  cmd_wc,
  input  logic [2:0]  cmd_adcb,
  input  cell_t       cmd_data [COLS],
  output logic        done,
  output cell_t       rd_data [COLS],
  output logic [COLS-1:0] rd_mask,
  output logic        ph_valid,
  output logic [2:0]  ph_idx,
  output adc_code_t   ph_code [ADC_UNITS],
  output logic [ADC_UNITS-1:0] ph_act,
  output adc_code_t   codes [ROWS],
  output logic [ROWS-1:0] act,
  output logic [3:0]  verify_rounds,   // verify cycles used by the last STORE
  output logic [15:0] pulse_rounds     // program rounds since reset
);
  typedef enum logic [3:0] {
    S_IDLE, S_PROG, S_VSET, S_VREAD, S_VSA, S_VUPD, S_VCHK,
    S_RSET, S_RREAD, S_RSA, S_MCMP, S_MADC, S_MWAIT
  } state_e;

  state_e     state;
  mop_e       op_q;
  logic [6:0] row_q, col_q;
  logic [7:0] num_q, size_q;
  logic [1:0] mlc_q;
  logic [2:0] wc_q, adcb_q;
  logic [3:0] vcnt;
  logic [1:0] phase;
  logic [$clog2(PULSE_CYCLES+1)-1:0] pcnt;
  logic       vpol;   // 1: reading + devices
  cell_t      dac_q [COLS];
  glevel_t    rb_p [COLS];
  glevel_t    rb_n [COLS];

  // peripherals
  wl_mode_e   wl_mode;
  logic [7:0] wl_addr, wl_num;
  logic [ROWS-1:0] wl_p, wl_n;
  logic       sl_load, sl_verify, sl_drive;
  logic       sl_p_en [COLS];
  amp_t       sl_p_amp [COLS];
  logic       sl_n_en [COLS];
  amp_t       sl_n_amp [COLS];
  logic       sl_pending;
  logic       bk_prog, bk_read, bk_mvm;
  logic [3:0] rd_p [COLS];
  logic [3:0] rd_n [COLS];
  bl_t        bl_p [ROWS];
  bl_t        bl_n [ROWS];
  logic       sa_start, sa_busy, sa_done;
  logic [1:0] sa_mlc;
  cell_t      sa_row [COLS];
  logic       adc_start, adc_busy, adc_done;
  logic [5:0] adc_nact;

  logic accept;
  logic done_r;
  assign cmd_ready = (state == S_IDLE);
  assign accept    = cmd_valid && cmd_ready;

  function automatic logic in_window(input int unsigned c, input logic [6:0] lo,
                                     input logic [7:0] sz);
    logic [8:0] hi;
    hi = (sz == 0) ? 9'(COLS) : 9'(lo) + 9'(sz);
    return (9'(c) >= 9'(lo)) && (9'(c) < hi);
  endfunction

  function automatic cell_t clamp_mlc(input cell_t v, input logic [1:0] n);
    if (v > cell_t'(n))  return cell_t'(n);
    if (v < -cell_t'(n)) return -cell_t'(n);
    return v;
  endfunction

  // ---- peripheral control --------------------------------------------------
  always_comb begin
    wl_mode   = WL_OFF;
    wl_addr   = {row_q, 1'b0};
    wl_num    = num_q;
    sl_load   = 1'b0;
    sl_verify = 1'b0;
    sl_drive  = 1'b0;
    bk_prog   = 1'b0;
    bk_read   = 1'b0;
    bk_mvm    = 1'b0;
    sa_start  = 1'b0;
    sa_mlc    = 2'd3;
    adc_start = 1'b0;
    unique case (state)
      S_IDLE: begin
        if (accept && cmd_op == MOP_STORE) begin
          sl_load = 1'b1;
          wl_mode = WL_PAIR;
          wl_addr = {cmd_row, 1'b0};
        end else if (accept && cmd_op == MOP_READ) begin
          wl_mode = WL_PAIR;
          wl_addr = {cmd_row, 1'b0};
        end else if (accept && cmd_op == MOP_MVM) begin
          wl_mode = WL_RANGE;
          wl_addr = {cmd_row, 1'b0};
          wl_num  = cmd_num;
        end
      end
      S_PROG: begin
        wl_mode  = WL_PAIR;
        sl_drive = (pcnt == 0);
        bk_prog  = (pcnt == 1);
      end
      S_VSET, S_VREAD, S_VSA: begin
        wl_mode  = WL_ONE;
        wl_addr  = {row_q, vpol};
        bk_read  = (state == S_VREAD);
        sa_start = (state == S_VSA) && !sa_busy && !sa_done && (pcnt == 0);
        sa_mlc   = 2'd3;
      end
      S_VUPD: sl_verify = 1'b1;
      S_VCHK: wl_mode = WL_PAIR;
      S_RSET, S_RREAD, S_RSA: begin
        wl_mode  = WL_PAIR;
        bk_read  = (state == S_RREAD);
        sa_start = (state == S_RSA) && (pcnt == 0);
        sa_mlc   = mlc_q;
      end
      S_MCMP: begin
        wl_mode = WL_RANGE;
        bk_mvm  = 1'b1;
      end
      S_MADC: begin
        wl_mode   = WL_RANGE;
        adc_start = 1'b1;
      end
      S_MWAIT: wl_mode = WL_RANGE;
      default: ;
    endcase
  end

  // ---- sequencer -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      op_q   <= MOP_STORE;
      row_q  <= '0;
      col_q  <= '0;
      num_q  <= '0;
      size_q <= '0;
      mlc_q  <= 2'd3;
      wc_q   <= '0;
      adcb_q <= 3'd6;
      vcnt   <= '0;
      phase  <= '0;
      pcnt   <= '0;
      vpol   <= 1'b1;
      done_r <= 1'b0;
      rd_mask <= '0;
      verify_rounds <= '0;
      pulse_rounds  <= '0;
      for (int c = 0; c < COLS; c++) begin
        dac_q[c]   <= '0;
        rb_p[c]    <= '0;
        rb_n[c]    <= '0;
        rd_data[c] <= '0;
      end
    end else begin
      done_r <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          op_q   <= cmd_op;
          row_q  <= cmd_row;
          col_q  <= cmd_col;
          num_q  <= cmd_num;
          size_q <= cmd_size;
          mlc_q  <= cmd_mlc;
          wc_q   <= cmd_wc;
          adcb_q <= cmd_adcb;
          vcnt   <= '0;
          phase  <= '0;
          pcnt   <= '0;
          unique case (cmd_op)
            MOP_STORE: begin
              state <= S_PROG;
              verify_rounds <= '0;
            end
            MOP_READ:  state <= S_RSET;
            default: begin
              state <= S_MCMP;
              for (int c = 0; c < COLS; c++) dac_q[c] <= clamp_mlc(cmd_data[c], cmd_mlc);
            end
          endcase
        end
        // ---------------- STORE ----------------
        S_PROG: begin
          if (32'(pcnt) == PULSE_CYCLES - 1) begin
            pcnt  <= '0;
            phase <= phase + 2'd1;
            if (phase == 2'd3) begin
              pulse_rounds <= pulse_rounds + 16'd1;
              if (vcnt < 4'(wc_q)) begin
                state <= S_VSET;
                vpol  <= 1'b1;
              end else begin
                state <= S_IDLE;
                done_r <= 1'b1;
              end
            end
          end else begin
            pcnt <= pcnt + 1'b1;
          end
        end
        S_VSET:  state <= S_VREAD;   // WL decoder output settles
        S_VREAD: begin               // array read current registered
          state <= S_VSA;
          pcnt  <= '0;
        end
        S_VSA: begin
          pcnt <= 1;
          if (sa_done) begin
            pcnt <= '0;
            for (int c = 0; c < COLS; c++) begin
              if (vpol) rb_p[c] <= (sa_row[c] > 0) ? glevel_t'(sa_row[c]) : glevel_t'(0);
              else      rb_n[c] <= (sa_row[c] < 0) ? glevel_t'(-sa_row[c]) : glevel_t'(0);
            end
            if (vpol) begin
              vpol  <= 1'b0;
              state <= S_VSET;
            end else begin
              state <= S_VUPD;
            end
          end
        end
        S_VUPD: begin
          vcnt  <= vcnt + 4'd1;
          verify_rounds <= vcnt + 4'd1;
          state <= S_VCHK;
        end
        S_VCHK: begin
          if (sl_pending) begin
            state <= S_PROG;
            phase <= '0;
            pcnt  <= '0;
          end else begin
            state <= S_IDLE;
            done_r <= 1'b1;
          end
        end
        // ---------------- READ ----------------
        S_RSET:  state <= S_RREAD;
        S_RREAD: begin
          state <= S_RSA;
          pcnt  <= '0;
        end
        S_RSA: begin
          pcnt <= 1;
          if (sa_done) begin
            for (int c = 0; c < COLS; c++) begin
              rd_data[c] <= in_window(c, col_q, size_q) ? sa_row[c] : cell_t'(0);
              rd_mask[c] <= in_window(c, col_q, size_q);
            end
            state <= S_IDLE;
            done_r <= 1'b1;
          end
        end
        // ---------------- MVM -----------------
        S_MCMP: state <= S_MADC;
        S_MADC: state <= S_MWAIT;
        S_MWAIT: if (adc_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // MVM completion comes straight from the ADC block (already registered)
  assign done = done_r || (state == S_MWAIT && adc_done);

  // ---- submodules ---------------------------------------------------------
  wl_decoder u_wl (
    .clk(clk), .rst_n(rst_n), .mode(wl_mode), .addr(wl_addr), .num(wl_num),
    .wl_p(wl_p), .wl_n(wl_n)
  );

  sl_write_gen u_sl (
    .clk(clk), .rst_n(rst_n), .load(sl_load), .load_tgt(cmd_data),
    .win_lo(cmd_col), .win_size(cmd_size), .verify(sl_verify),
    .rb_p(rb_p), .rb_n(rb_n), .drive(sl_drive), .phase(phase),
    .sl_p_en(sl_p_en), .sl_p_amp(sl_p_amp), .sl_n_en(sl_n_en), .sl_n_amp(sl_n_amp),
    .pending(sl_pending)
  );

  pcm_cim_bank #(.ERR_THRESH(ERR_THRESH), .ERR_SEED(ERR_SEED)) u_bank (
    .clk(clk), .wl_p(wl_p), .wl_n(wl_n), .prog(bk_prog),
    .sl_p_en(sl_p_en), .sl_p_amp(sl_p_amp), .sl_n_en(sl_n_en), .sl_n_amp(sl_n_amp),
    .read(bk_read), .rd_p(rd_p), .rd_n(rd_n),
    .mvm(bk_mvm), .dac_in(dac_q), .bl_p(bl_p), .bl_n(bl_n)
  );

  sa_readout u_sa (
    .clk(clk), .rst_n(rst_n), .start(sa_start), .mlc_bits(sa_mlc),
    .rd_p(rd_p), .rd_n(rd_n), .busy(sa_busy), .done(sa_done), .row(sa_row)
  );

  adc_readout #(.LSB(ADC_LSB)) u_adc (
    .clk(clk), .rst_n(rst_n), .start(adc_start), .adc_bits(adcb_q),
    .bl_p(bl_p), .bl_n(bl_n), .act(wl_p & wl_n),
    .busy(adc_busy), .done(adc_done),
    .ph_valid(ph_valid), .ph_idx(ph_idx), .ph_code(ph_code), .ph_act(ph_act),
    .codes(codes), .n_active(adc_nact)
  );

  assign act = wl_p & wl_n;

endmodule
