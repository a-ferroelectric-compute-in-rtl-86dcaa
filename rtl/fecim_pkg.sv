// fecim_pkg: types and constants shared by the FeFET compute-in-memory annealer.
//
// The array is a 32x32 crossbar of 1FeFET1R cells (one stored bit per cell). A QUBO
// matrix element of M bits occupies M neighbouring columns of one row, so the 32 columns
// form COLS/M element columns ("groups"). Four ADCs are shared by the columns through
// multiplexers. These sizes follow the prototype chip; M = 2 follows the ternary
// demonstration, which stores each element in two FeFETs. Line drive levels are carried
// as symbolic codes whose voltages (read 1.2 V / 0.1 V, write 3.4 V with 0.8 V / 1.8 V
// inhibit) are the ones used to operate the prototype; the erase level is a -4 V gate pulse.
package fecim_pkg;

  localparam int unsigned ROWS     = 32;        // word lines (Fig. 2b: 32x32 array)
  localparam int unsigned COLS     = 32;        // source/data lines
  localparam int unsigned M_BITS   = 2;         // cells per matrix element
  localparam int unsigned NGROUPS  = COLS / M_BITS;
  localparam int unsigned NADC     = 4;         // Fig. 2b: 4x ADCs
  localparam int unsigned ADC_BITS = 6;         // enough for a full column of 32 cells
  localparam int unsigned NVARS    = 32;        // binary problem variables held on chip
  localparam int unsigned VIDX_W   = $clog2(NVARS);
  localparam int unsigned EW       = 20;        // signed energy width
  localparam int unsigned TW       = 16;        // temperature / probability width

  // Word-line levels (gate of the FeFET).
  typedef enum logic [2:0] {
    WL_OFF     = 3'd0,   // 0 V: x = 0 in read, idle
    WL_READ    = 3'd1,   // 1.2 V read bias: x = 1
    WL_WRITE   = 3'd2,   // 3.4 V: row selected for programming
    WL_INHIBIT = 3'd3,   // 0.8 V: row not selected while another row is written
    WL_ERASE   = 3'd4    // -4 V gate pulse: all cells of the row to high-VTH (q = 0)
  } wl_level_e;

  // Source-line levels.
  typedef enum logic [1:0] {
    SL_OFF     = 2'd0,   // line floating / 0 V in read: y = 0
    SL_READ    = 2'd1,   // 0.1 V bit-line bias: y = 1
    SL_SELECT  = 2'd2,   // 0 V while writing: the cell on the selected row is written to q = 1
    SL_INHIBIT = 2'd3    // 1.8 V while writing: cell keeps its state
  } sl_level_e;

  // Array operating modes issued by the CiM sequencer.
  typedef enum logic [1:0] {
    ARR_IDLE  = 2'd0,
    ARR_READ  = 2'd1,
    ARR_WRITE = 2'd2,
    ARR_ERASE = 2'd3
  } arr_mode_e;

  // Routing of one array line to a problem variable (input buffer map entry).
  typedef enum logic [1:0] {
    SRC_OFF   = 2'd0,    // line never driven
    SRC_VAR   = 2'd1,    // line follows x[idx]
    SRC_ONE   = 2'd2     // line always on (linear terms: x^T q * 1)
  } src_kind_e;

  typedef struct packed {
    src_kind_e          kind;
    logic [VIDX_W-1:0]  idx;
  } line_map_t;

  // Register addresses behind the serial port (word addressed, 32-bit data).
  typedef enum logic [6:0] {
    REG_CTRL      = 7'h00,  // W: [0] run MESA [1] single VMV [2] erase [3] program word
                            //    [4] read back row REG_PROG_ROW
    REG_STATUS    = 7'h01,  // R: [0] busy [1] mesa done [2] vmv done
    REG_CFG       = 7'h02,  // [0] unary weighting (all cells weight 1)
    REG_PROG_ROW  = 7'h03,
    REG_PROG_DATA = 7'h04,
    REG_X         = 7'h05,  // variable vector (initial state / single VMV input)
    REG_ENERGY    = 7'h06,  // R: last VMV result
    REG_EOPT      = 7'h07,  // R: best energy
    REG_XOPT      = 7'h08,  // R: best vector
    REG_GROUP_NEG = 7'h09,  // element columns that hold Q- (subtracted)
    REG_T0        = 7'h0A,  // start temperature of each epoch
    REG_TSHIFT    = 7'h0B,  // cooling: T -= T >> TSHIFT per iteration
    REG_COUNT_MAX = 7'h0C,
    REG_EPS       = 7'h0D,
    REG_MAX_ITER  = 7'h0E,
    REG_FIXED     = 7'h0F,  // variables never flipped
    REG_SEED      = 7'h10,
    REG_NFLIP     = 7'h11,  // bits flipped per perturbation
    REG_NVARS     = 7'h12,  // number of variables in use
    REG_ITER      = 7'h13,  // R: iterations run
    REG_EPOCH     = 7'h14,  // R: epochs started
    REG_ECUR      = 7'h15,  // R: energy E_o of the annealer's current state
    REG_TEMP      = 7'h16,  // R: current temperature
    REG_TRAP      = 7'h17,  // R: current trap count
    REG_RDBK      = 7'h18,  // R: bits of the row last read back
    REG_ROW_MAP   = 7'h20,  // 0x20..0x3F: word-line map
    REG_COL_MAP   = 7'h40   // 0x40..0x4F: element-column map
  } reg_addr_e;

endpackage
