// specpcm_top: the SpecPCM accelerator, an analog PCM in-memory computing
// engine for hyperdimensional (HD) mass-spectrometry clustering and DB search.
//
// A spectrum's peaks are HD-encoded (hd_encoder), dimension-packed
// (dim_packer) into an HV buffer of NUM_ARRAYS segments of 128 signed
// elements, and stored row-wise into NUM_ARRAYS PCM banks (imc_macro): segment
// a of every HV lives in array a, at the HV's row. An MVM applies the buffer
// to all arrays at once; score_argmax adds the arrays' partial sums per row
// and picks the best row (DB search); the same score row can be written into
// the similarity matrix of linkage_engine, which then clusters the stored
// HVs with complete linkage.
//
// Instructions (instr_t, valid/ready, one at a time):
//   OP_CONFIG   hd_dim: HV dimension (reset value 8192, the DB-search default)
//   OP_ENCODE   num_peaks, mlc_bits: encode the loaded peak list into the buffer
//   OP_STORE_HV arr_all/arr_idx, col_addr, data_size, row_addr, mlc_bits,
//               write_cycles: program buffer segment(s) into the arrays
//   OP_READ_HV  arr_all/arr_idx, col_addr, data_size, row_addr, mlc_bits:
//               normal read of array row(s) into the buffer
//   OP_MVM      row_addr, num_rows, adc_bits, mlc_bits, to_linkage, dst_row:
//               in-memory dot product of the buffer with the activated rows
//   OP_CLUSTER  num_rows (points), threshold: complete-linkage clustering
// STORE_HV, READ_HV and MVM_COMPUTE with their fields are the paper's ISA;
// CONFIG, ENCODE and CLUSTER, the field widths and the arr_all broadcast are
// this design's additions to drive the encoder and the clustering logic.
// The arrays in use are the first ceil(hd_dim / (mlc_bits * 128)) ones.
module specpcm_top
  import specpcm_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS   = 22,
  parameter int unsigned MAX_PEAKS    = 64,
  parameter int unsigned LVL_W        = 4,
  parameter int unsigned PULSE_CYCLES = 10,
  parameter int unsigned ERR_THRESH   = 77,
  parameter int unsigned ADC_LSB      = 8,
  parameter int unsigned LINK_N       = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction port
  input  logic        instr_valid,
  output logic        instr_ready,
  input  instr_t      instr,
  // peak list (encoder input)
  input  logic        peak_we,
  input  logic [$clog2(MAX_PEAKS)-1:0] peak_waddr,
  input  logic [15:0] peak_idx,
  input  logic [LVL_W-1:0] peak_lvl,
  // HV buffer
  output cell_t       hv_buf [NUM_ARRAYS][COLS],
  // DB search result
  output logic        search_valid,
  output logic [6:0]  best_row,
  output score_t      best_score,
  output score_t      scores [ROWS],
  // clustering result
  output logic        cluster_done,
  output logic [$clog2(LINK_N)-1:0] labels [LINK_N],
  output logic [$clog2(LINK_N):0]   num_merges,
  // status
  output logic [4:0]  arrays_used,
  output logic [3:0]  verify_rounds,
  output logic [15:0] pulse_rounds
);
  typedef enum logic [2:0] {T_IDLE, T_ENC, T_ENCW, T_PACKW, T_ARR, T_MVMW, T_CLUS} tstate_e;

  tstate_e     state;
  instr_t      iq;
  logic [13:0] hd_dim;
  logic [4:0]  seg;
  logic [NUM_ARRAYS-1:0] pend, issue, arr_mask;
  logic        mvm_macro_done, mvm_score_done;

  // arrays needed for the HV at mlc_bits n: ceil(hd_dim / (128 n))
  function automatic logic [5:0] nseg_of(input logic [13:0] d, input logic [1:0] n);
    int unsigned w;
    w = 128 * ((n == 0) ? 1 : int'(n));
    return 6'((int'(d) + w - 1) / w);
  endfunction

  logic [5:0] nseg_cur;
  assign nseg_cur    = nseg_of(hd_dim, iq.mlc_bits);
  assign arrays_used = (nseg_cur > 6'(NUM_ARRAYS)) ? 5'(NUM_ARRAYS) : nseg_cur[4:0];
  assign instr_ready = (state == T_IDLE);

  // ---- encoder and packer ---------------------------------------------------
  logic enc_start, enc_busy, enc_done;
  logic [COLS-1:0][MAX_MLC-1:0] enc_bits, enc_valid;
  logic  pk_valid;
  cell_t pk_hv [COLS];

  hd_encoder #(.MAX_PEAKS(MAX_PEAKS), .LVL_W(LVL_W)) u_enc (
    .clk(clk), .rst_n(rst_n),
    .peak_we(peak_we), .peak_waddr(peak_waddr), .peak_idx(peak_idx), .peak_lvl(peak_lvl),
    .start(enc_start), .seg(seg), .mlc_bits(iq.mlc_bits), .hd_dim(hd_dim),
    .num_peaks(($clog2(MAX_PEAKS)+1)'(iq.num_peaks)),
    .busy(enc_busy), .done(enc_done), .bits(enc_bits), .valid(enc_valid)
  );

  dim_packer u_pack (
    .clk(clk), .rst_n(rst_n), .in_valid(enc_done), .bits(enc_bits), .valid(enc_valid),
    .out_valid(pk_valid), .packed_hv(pk_hv)
  );

  // ---- IMC arrays -------------------------------------------------------------
  logic        m_ready [NUM_ARRAYS];
  logic        m_done  [NUM_ARRAYS];
  cell_t       m_rd    [NUM_ARRAYS][COLS];
  logic [COLS-1:0] m_rdmask [NUM_ARRAYS];
  logic        m_phv   [NUM_ARRAYS];
  logic [2:0]  m_phi   [NUM_ARRAYS];
  adc_code_t   m_phc   [NUM_ARRAYS][ADC_UNITS];
  logic [ADC_UNITS-1:0] m_pha [NUM_ARRAYS];
  adc_code_t   m_codes [NUM_ARRAYS][ROWS];
  logic [ROWS-1:0] m_act [NUM_ARRAYS];
  logic [3:0]  m_vr    [NUM_ARRAYS];
  logic [15:0] m_pr    [NUM_ARRAYS];
  mop_e        mop;

  always_comb begin
    unique case (iq.op)
      OP_STORE_HV: mop = MOP_STORE;
      OP_READ_HV:  mop = MOP_READ;
      default:     mop = MOP_MVM;
    endcase
  end

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_arr
    imc_macro #(
      .PULSE_CYCLES(PULSE_CYCLES), .ERR_THRESH(ERR_THRESH),
      .ERR_SEED(32'h0BAD_5EED + 32'(a) * 32'h0101_0101), .ADC_LSB(ADC_LSB)
    ) u_macro (
      .clk(clk), .rst_n(rst_n),
      .cmd_valid(issue[a]), .cmd_ready(m_ready[a]), .cmd_op(mop),
      .cmd_row(iq.row_addr), .cmd_num(iq.num_rows), .cmd_col(iq.col_addr),
      .cmd_size(iq.data_size), .cmd_mlc(iq.mlc_bits), .cmd_wc(iq.write_cycles),
      .cmd_adcb(iq.adc_bits), .cmd_data(hv_buf[a]),
      .done(m_done[a]), .rd_data(m_rd[a]), .rd_mask(m_rdmask[a]),
      .ph_valid(m_phv[a]), .ph_idx(m_phi[a]), .ph_code(m_phc[a]), .ph_act(m_pha[a]),
      .codes(m_codes[a]), .act(m_act[a]),
      .verify_rounds(m_vr[a]), .pulse_rounds(m_pr[a])
    );
  end

  assign verify_rounds = m_vr[0];
  assign pulse_rounds  = m_pr[0];

  // ---- score reduction / search ----------------------------------------------
  logic sc_start, sc_done, sc_bvalid;

  score_argmax #(.NUM_ARRAYS(NUM_ARRAYS)) u_score (
    .clk(clk), .rst_n(rst_n), .start(sc_start), .arr_en(arr_mask),
    .ph_valid(m_phv[0]), .ph_idx(m_phi[0]), .ph_code(m_phc), .ph_act(m_pha[0]),
    .scores(scores), .best_row(best_row), .best_score(best_score),
    .best_valid(sc_bvalid), .done(sc_done)
  );

  // ---- clustering ------------------------------------------------------------
  logic lk_wr, lk_start, lk_busy, lk_done, lk_mv;
  logic [$clog2(LINK_N)-1:0] lk_ma, lk_mb;
  score_t lk_ms;
  score_t lk_row [LINK_N];

  always_comb
    for (int r = 0; r < LINK_N; r++) lk_row[r] = (r < ROWS) ? scores[r] : score_t'(0);

  linkage_engine #(.N(LINK_N)) u_link (
    .clk(clk), .rst_n(rst_n),
    .wr_en(lk_wr), .wr_row($clog2(LINK_N)'(iq.dst_row)), .wr_scores(lk_row),
    .start(lk_start),
    .npts((iq.num_rows == 0) ? ($clog2(LINK_N)+1)'(LINK_N) : ($clog2(LINK_N)+1)'(iq.num_rows)),
    .threshold(iq.threshold),
    .busy(lk_busy), .done(lk_done), .labels(labels), .num_merges(num_merges),
    .merge_valid(lk_mv), .merge_a(lk_ma), .merge_b(lk_mb), .merge_sim(lk_ms)
  );

  // ---- instruction sequencer -------------------------------------------------
  always_comb begin
    enc_start = (state == T_ENC);
    sc_start  = (state == T_IDLE) && instr_valid && (instr.op == OP_MVM);
    lk_start  = (state == T_CLUS) && !lk_busy && !lk_done && (pend != '0);
    lk_wr     = (state == T_MVMW) && mvm_macro_done && mvm_score_done && iq.to_linkage;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= T_IDLE;
      iq             <= '0;
      hd_dim         <= 14'd8192;
      seg            <= '0;
      pend           <= '0;
      issue          <= '0;
      arr_mask       <= '0;
      mvm_macro_done <= 1'b0;
      mvm_score_done <= 1'b0;
      search_valid   <= 1'b0;
      cluster_done   <= 1'b0;
      for (int a = 0; a < NUM_ARRAYS; a++)
        for (int c = 0; c < COLS; c++) hv_buf[a][c] <= '0;
    end else begin
      search_valid <= 1'b0;
      cluster_done <= 1'b0;
      issue        <= '0;
      unique case (state)
        T_IDLE: if (instr_valid) begin
          logic [NUM_ARRAYS-1:0] m;
          logic [5:0] ns;
          iq <= instr;
          ns = nseg_of(hd_dim, instr.mlc_bits);
          for (int a = 0; a < NUM_ARRAYS; a++)
            m[a] = (instr.op == OP_MVM || instr.arr_all) ? (6'(a) < ns) : (5'(a) == instr.arr_idx);
          arr_mask <= m;
          unique case (instr.op)
            OP_CONFIG: hd_dim <= instr.hd_dim;
            OP_ENCODE: begin
              seg   <= '0;
              state <= T_ENC;
              for (int a = 0; a < NUM_ARRAYS; a++)
                for (int c = 0; c < COLS; c++) hv_buf[a][c] <= '0;
            end
            OP_STORE_HV, OP_READ_HV: begin
              issue <= m;
              pend  <= m;
              state <= T_ARR;
            end
            OP_MVM: begin
              issue <= m;
              pend  <= m;
              mvm_macro_done <= 1'b0;
              mvm_score_done <= 1'b0;
              state <= T_MVMW;
            end
            OP_CLUSTER: begin
              pend  <= '1;
              state <= T_CLUS;
            end
            default: ;
          endcase
        end
        T_ENC:   state <= T_ENCW;
        T_ENCW:  if (enc_done) state <= T_PACKW;
        T_PACKW: if (pk_valid) begin
          for (int c = 0; c < COLS; c++) hv_buf[seg][c] <= pk_hv[c];
          if (6'(seg) + 6'd1 < nseg_cur && 6'(seg) + 6'd1 < 6'(NUM_ARRAYS)) begin
            seg   <= seg + 5'd1;
            state <= T_ENC;
          end else begin
            state <= T_IDLE;
          end
        end
        T_ARR: begin
          logic [NUM_ARRAYS-1:0] p;
          p = pend;
          for (int a = 0; a < NUM_ARRAYS; a++)
            if (m_done[a] && pend[a]) begin
              p[a] = 1'b0;
              if (iq.op == OP_READ_HV)
                for (int c = 0; c < COLS; c++)
                  if (m_rdmask[a][c]) hv_buf[a][c] <= m_rd[a][c];
            end
          pend <= p;
          if (p == '0) state <= T_IDLE;
        end
        T_MVMW: begin
          if (m_done[0]) mvm_macro_done <= 1'b1;
          if (sc_done)   mvm_score_done <= 1'b1;
          if (mvm_macro_done && mvm_score_done) begin
            search_valid <= 1'b1;
            state        <= T_IDLE;
          end
        end
        T_CLUS: begin
          pend <= '0;
          if (lk_done) begin
            cluster_done <= 1'b1;
            state        <= T_IDLE;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

endmodule
