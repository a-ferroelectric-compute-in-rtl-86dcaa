// sl_dl_driver: source-line / data-line driver of the FeFET crossbar.
//
// Each matrix element of M bits sits in M neighbouring columns, so one input bit y_g of
// the column vector x_v drives all M source lines of element column g.
//   ARR_READ  : source lines of element columns with y_g = 1 get the 0.1 V bit-line bias,
//               the others are off. The data lines then carry x^T Q y per column.
//   ARR_WRITE : columns whose bit in the write word is 1 are selected (0 V), the rest are
//               inhibited (1.8 V). Together with the selected word line at 3.4 V, only
//               the selected cells see the full write voltage.
//   ARR_ERASE, ARR_IDLE : all lines off (0 V).
// The output is combinational. The voltages are those used on the prototype. The grouping
// of M columns per element follows the mapping of M-bit elements onto M cells.
module sl_dl_driver
  import fecim_pkg::*;
#(
  parameter int unsigned C = COLS,
  parameter int unsigned M = M_BITS,
  parameter int unsigned G = C / M
) (
  input  arr_mode_e           mode,
  input  logic [G-1:0]        y_grp,     // x_v, one bit per element column
  input  logic [C-1:0]        wdata,     // word written into the selected row
  output sl_level_e [C-1:0]   sl_lvl
);

  always_comb begin
    for (int c = 0; c < C; c++) begin
      unique case (mode)
        ARR_READ:  sl_lvl[c] = y_grp[c / M] ? SL_READ : SL_OFF;
        ARR_WRITE: sl_lvl[c] = wdata[c] ? SL_SELECT : SL_INHIBIT;
        default:   sl_lvl[c] = SL_OFF;
      endcase
    end
  end

endmodule
