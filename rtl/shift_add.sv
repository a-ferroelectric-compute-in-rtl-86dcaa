// shift_add: shift-and-add accumulator behind one ADC lane.
//
// A matrix element of M bits is stored as M cells in neighbouring columns, least
// significant bit first. The ADC lane converts its columns one by one. Each code is
// shifted left by the bit position of its column and added to a running sum. The sum is
// then the lane's share of x^T Q y. Two additions of this design:
//   * group_neg marks element columns that hold the negative part Q- of the matrix.
//     Their contribution is subtracted, so a signed QUBO is stored as Q+ and Q-.
//   * unary = 1 gives every cell weight 1. An element is then the count of its set cells
//     (0..M), as in the ternary demonstration where two FeFETs encode 0, 1, 2.
// Timing: clear zeroes the sum. On every cycle with en = 1, the code din of local column
// col_k is added. The sum is registered. The Shift, Add and Sum stages follow the paper.
module shift_add
  import fecim_pkg::*;
#(
  parameter int unsigned C    = COLS,
  parameter int unsigned NA   = NADC,
  parameter int unsigned M    = M_BITS,
  parameter int unsigned LANE = 0,
  parameter int unsigned B    = ADC_BITS,
  parameter int unsigned W    = EW,
  parameter int unsigned CPA  = C / NA,
  parameter int unsigned G    = C / M
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    en,
  input  logic [$clog2(CPA)-1:0]  col_k,
  input  logic [B-1:0]            din,
  input  logic [G-1:0]            group_neg,
  input  logic                    unary,
  output logic signed [W-1:0]     sum
);

  int unsigned        col;
  int unsigned        bitpos;
  logic signed [W-1:0] term;

  always_comb begin
    col    = LANE * CPA + 32'(col_k);
    bitpos = unary ? 0 : col % M;
    term   = W'(din) <<< bitpos;
    if (group_neg[col / M]) term = -term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sum <= '0;
    else if (clear) sum <= '0;
    else if (en)    sum <= sum + term;
  end

endmodule
