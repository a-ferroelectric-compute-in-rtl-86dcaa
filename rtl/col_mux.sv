// col_mux: data-line multiplexer in front of one shared ADC.
//
// The ADCs are shared by the columns. Lane a serves the CPA neighbouring data lines
// a*CPA .. a*CPA+CPA-1 and converts them one after another. sel picks the data line
// whose current goes to the ADC in this step. The input is the full set of data-line
// currents, and the module takes its own slice, so every lane is the same module with a
// different LANE. Combinational. Sharing through multiplexers follows the paper. The
// contiguous column slices are this design's choice.
module col_mux
  import fecim_pkg::*;
#(
  parameter int unsigned C    = COLS,
  parameter int unsigned NA   = NADC,
  parameter int unsigned LANE = 0,
  parameter int unsigned CW   = $clog2(ROWS + 1),
  parameter int unsigned CPA  = C / NA
) (
  input  logic [C-1:0][CW-1:0]     dl_count,
  input  logic [$clog2(CPA)-1:0]   sel,
  output logic [CW-1:0]            ain
);

  assign ain = dl_count[LANE * CPA + 32'(sel)];

endmodule
