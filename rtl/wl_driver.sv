// wl_driver: word-line driver of the FeFET crossbar.
//
// It turns the array mode and the row inputs into one drive level per word line.
//   ARR_READ  : rows whose input x_h bit is 1 get the read bias (1.2 V), the rest 0 V.
//               All rows are driven in parallel, so one read covers the whole matrix.
//   ARR_WRITE : the addressed row gets the write level (3.4 V). Every other row gets the
//               inhibit level (0.8 V) of the V_W/3 scheme, so the matrix is written one
//               word (one row) at a time.
//   ARR_ERASE : every row gets the negative erase pulse. A whole-array erase is used
//               before the matrix is written again.
//   ARR_IDLE  : all rows at 0 V.
// The output is combinational from the inputs, so the levels follow the sequencer in the
// same cycle. The read/write voltages are those used on the prototype. The level codes and
// the whole-array erase are this design's choices.
module wl_driver
  import fecim_pkg::*;
#(
  parameter int unsigned R = ROWS
) (
  input  arr_mode_e                mode,
  input  logic [R-1:0]             x_row,     // x_h, one bit per word line
  input  logic [$clog2(R)-1:0]     sel_row,   // row written in ARR_WRITE
  output wl_level_e [R-1:0]        wl_lvl
);

  always_comb begin
    for (int r = 0; r < R; r++) begin
      unique case (mode)
        ARR_READ:  wl_lvl[r] = x_row[r] ? WL_READ : WL_OFF;
        ARR_WRITE: wl_lvl[r] = (sel_row == r[$clog2(R)-1:0]) ? WL_WRITE : WL_INHIBIT;
        ARR_ERASE: wl_lvl[r] = WL_ERASE;
        default:   wl_lvl[r] = WL_OFF;
      endcase
    end
  end

endmodule
