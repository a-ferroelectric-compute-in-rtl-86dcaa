// input_buffer: holds the variable vector and routes it to the two array inputs.
//
// After lossless compression the QUBO x^T Q x becomes x_h^T Q' x_v, where x_h (applied to
// the word lines) and x_v (applied to the source lines) are subsets of the variables x.
// A variable may sit in both. This buffer latches the full vector x on load. Two routing
// tables then decide which variable drives each word line and each element column:
//   SRC_OFF : the line is never on (unused row or column);
//   SRC_VAR : the line follows x[idx];
//   SRC_ONE : the line is always on. A column held at 1 turns its row entries into
//             linear terms x_i * q.
// The tables are written once, when the compressed matrix is loaded. The outputs are
// registered and valid the cycle after load. The buffer itself is named in the paper.
// The table-based routing is this design's way of applying x_h and x_v.
module input_buffer
  import fecim_pkg::*;
#(
  parameter int unsigned R  = ROWS,
  parameter int unsigned G  = NGROUPS,
  parameter int unsigned NV = NVARS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [NV-1:0]        x_in,
  input  line_map_t [R-1:0]    row_map,
  input  line_map_t [G-1:0]    col_map,
  output logic [R-1:0]         x_row,      // x_h to the word-line driver
  output logic [G-1:0]         y_grp       // x_v to the source-line driver
);

  logic [NV-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x_q <= '0;
    else if (load) x_q <= x_in;
  end

  function automatic logic route(line_map_t m, logic [NV-1:0] x);
    unique case (m.kind)
      SRC_VAR: route = x[m.idx];
      SRC_ONE: route = 1'b1;
      default: route = 1'b0;
    endcase
  endfunction

  always_comb begin
    for (int r = 0; r < R; r++) x_row[r] = route(row_map[r], x_q);
    for (int g = 0; g < G; g++) y_grp[g] = route(col_map[g], x_q);
  end

endmodule
