// specpcm_pkg: constants, types and helper functions shared by the SpecPCM RTL.
//
// The array geometry (128x128 2T2R cells), the peripheral counts (16 ADCs,
// 32 sense amplifiers, 64 SL drivers, 8-bit WL decoder), the 3-bit cell and
// DAC precision and the 6-bit ADC follow the published configuration.
// The instruction encoding, field widths and the hash that generates the
// ID and level hypervectors are choices of this implementation.
package specpcm_pkg;

  // ---- array geometry --------------------------------------------------
  localparam int unsigned ROWS      = 128;  // rows (stored HVs) per bank
  localparam int unsigned COLS      = 128;  // 2T2R cells per row
  localparam int unsigned SL_UNITS  = 64;   // SL generator / driver units
  localparam int unsigned SA_UNITS  = 32;   // sense amplifiers
  localparam int unsigned ADC_UNITS = 16;   // flash ADCs
  localparam int unsigned ADC_MAXB  = 6;    // full flash ADC precision
  localparam int unsigned MAX_MLC   = 3;    // bits per cell (dimension packing n)

  // ---- value types -----------------------------------------------------
  // One packed HV element / one 2T2R cell value: the signed sum of n bipolar
  // bits, n <= 3, so it lies in [-3, 3].
  typedef logic signed [2:0] cell_t;
  // Conductance level of a single PCM device of the 2T2R pair (0..3).
  typedef logic [1:0]        glevel_t;
  // Write pulse amplitude code of one SL (0..7).
  typedef logic [2:0]        amp_t;
  // ADC output code, signed, on the 6-bit scale ([-32, 31]).
  typedef logic signed [5:0] adc_code_t;
  // Bit-line sum of one row: up to 128 * 3 * 3 = 1152.
  typedef logic [11:0]       bl_t;
  // Signed score after summing the ADC codes of all arrays.
  localparam int unsigned SCORE_W = 12;
  typedef logic signed [SCORE_W-1:0] score_t;

  // ---- macro (single bank) operations ----------------------------------
  typedef enum logic [1:0] {MOP_STORE = 2'd0, MOP_READ = 2'd1, MOP_MVM = 2'd2} mop_e;

  // ---- word-line decoder modes ------------------------------------------
  typedef enum logic [1:0] {WL_OFF = 2'd0, WL_ONE = 2'd1, WL_PAIR = 2'd2, WL_RANGE = 2'd3} wl_mode_e;

  // ---- instruction set ---------------------------------------------------
  typedef enum logic [2:0] {
    OP_NOP      = 3'd0,
    OP_CONFIG   = 3'd1,  // set HD_dimensions
    OP_ENCODE   = 3'd2,  // encode + pack the loaded peak list into the HV buffer
    OP_STORE_HV = 3'd3,  // STORE_HV(arr_idx, col_addr, row_addr, MLC_bits, write_cycles)
    OP_READ_HV  = 3'd4,  // READ_HV(data_size, arr_idx, col_addr, row_addr, MLC_bits)
    OP_MVM      = 3'd5,  // MVM_COMPUTE(row_addr, num_activated_row, ADC_bits, MLC_bits)
    OP_CLUSTER  = 3'd6   // complete-linkage clustering of the similarity matrix
  } opcode_e;

  typedef struct packed {
    opcode_e            op;
    logic               arr_all;       // STORE/READ: every array in use, else arr_idx only
    logic [4:0]         arr_idx;
    logic [6:0]         col_addr;
    logic [7:0]         data_size;     // columns, 1..128 (0 means 128)
    logic [6:0]         row_addr;
    logic [7:0]         num_rows;      // MVM: activated rows; CLUSTER: number of points (0 means 128)
    logic [1:0]         mlc_bits;      // 1..3
    logic [2:0]         write_cycles;  // write-verify cycles, 0..7
    logic [2:0]         adc_bits;      // 1..6
    logic               to_linkage;    // MVM: write the scores as similarity row dst_row
    logic [6:0]         dst_row;
    logic [13:0]        hd_dim;        // CONFIG
    logic [6:0]         num_peaks;     // ENCODE
    logic signed [SCORE_W-1:0] threshold; // CLUSTER: merge while similarity >= threshold
  } instr_t;

  // ---- hypervector generation -------------------------------------------
  localparam logic [31:0] ID_SEED = 32'h1D5E_ED01;
  localparam logic [31:0] LV_SEED = 32'h7A3C_91B5;

  // One element of a pseudo-random bipolar hypervector (1 = +1, 0 = -1):
  // element `dim` of vector number `idx` of the family selected by `seed`.
  function automatic logic hv_bit(input logic [31:0] seed, input logic [15:0] idx,
                                  input logic [15:0] dim);
    logic [31:0] x;
    x = seed ^ {idx, dim};
    x = x * 32'h9E37_79B1;
    x = x ^ (x >> 16);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return x[31];
  endfunction

  // Signed cell value -> conductance levels of the two devices of a 2T2R cell.
  function automatic glevel_t pos_level(input cell_t v);
    return (v > 0) ? glevel_t'(v) : glevel_t'(0);
  endfunction
  function automatic glevel_t neg_level(input cell_t v);
    return (v < 0) ? glevel_t'(-v) : glevel_t'(0);
  endfunction

endpackage
