// row_readback: reads the stored bits of one row back through the normal read path.
//
// The host uses it to verify a programmed word (program and verify). A read-back is an
// ordinary evaluation with overridden inputs: only the word line of the chosen row is on,
// and every source line is on. Each data line then carries that row's cell, 0 or 1 cell
// currents. The ADC lanes convert the columns as usual, and every conversion is stored
// as one bit of the read-back word (code != 0). The shift-and-add path still runs, so
// the energy register then holds the row's weighted sum.
// Interface: start (with the input buffer's load strobe) selects row `row` and clears
// the word. The override outputs x_row_o / y_grp_o replace the input buffer's vectors
// while active. The active flag holds until the next load strobe without start. On each
// en strobe (the shift-and-add accumulate strobe), lane a stores bit a*CPA + col_k.
// Timing is that of one evaluation (19 cycles at the defaults). The word is complete
// when the evaluation's done strobe comes.
// The paper states that the macro supports single-bit reading as well as parallel
// reads. Doing it through the shared ADCs, for a whole row at a time, is this design's
// choice.
module row_readback
  import fecim_pkg::*;
#(
  parameter int unsigned R   = ROWS,
  parameter int unsigned C   = COLS,
  parameter int unsigned G   = NGROUPS,
  parameter int unsigned NA  = NADC,
  parameter int unsigned B   = ADC_BITS,
  parameter int unsigned CPA = C / NA
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,       // input buffer load strobe (start of any read)
  input  logic                    start,      // this read is a read-back
  input  logic [$clog2(R)-1:0]    row,
  input  logic [R-1:0]            x_row,      // from the input buffer
  input  logic [G-1:0]            y_grp,
  input  logic                    en,
  input  logic [$clog2(CPA)-1:0]  col_k,
  input  logic [NA-1:0][B-1:0]    dout,
  output logic [R-1:0]            x_row_o,    // to the word-line driver
  output logic [G-1:0]            y_grp_o,    // to the source-line driver
  output logic                    active,
  output logic [C-1:0]            word
);

  logic [$clog2(R)-1:0] row_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      row_q  <= '0;
      word   <= '0;
    end else if (load) begin
      active <= start;
      if (start) begin
        row_q <= row;
        word  <= '0;
      end
    end else if (en && active) begin
      for (int a = 0; a < NA; a++) word[a * CPA + 32'(col_k)] <= (dout[a] != '0);
    end
  end

  always_comb begin
    x_row_o = x_row;
    y_grp_o = y_grp;
    if (active) begin
      x_row_o = '0;
      x_row_o[row_q] = 1'b1;
      y_grp_o = '1;
    end
  end

endmodule
