// fefet_array: behavioural model of the 1FeFET1R compute-in-memory crossbar.
//
// This is a model of an analog, process-specific macro, not synthesizable logic meant
// for a standard-cell flow. Each cell is a FeFET in series with a current-limiting
// transistor. Its stored bit q is the polarization state: low threshold voltage means
// q = 1, high threshold voltage means q = 0. The word line carries input x on the gate
// and the source line carries input y on the drain side, so a cell conducts one unit of
// ON current (about 0.095 uA in the prototype) exactly when x = q = y = 1. A data line sums
// the currents of its column. Here the current is given as a count of conducting cells,
// dl_count[c] = sum_r x_r * q_rc * y_c, and i_total is the whole-array current in the same
// units. That whole-array sum is what the ternary demonstration measures in one read.
//
// Writing follows the V_W/3 inhibit scheme. On a clock edge with pulse = 1, a cell whose
// word line is WL_WRITE and whose source line is SL_SELECT is set to q = 1. A word line
// at WL_ERASE clears every cell of its row to q = 0. Inhibited cells keep their state.
// The pulse length (1 ms in the prototype) is timed by the sequencer, not here. Reads are
// combinational. The cells are nonvolatile and have no reset; erase the array before use.
// The count model is ideal. It leaves out the residual ON-current spread (the series
// resistor suppresses it) and the OFF current, which is more than 1000x smaller.
module fefet_array
  import fecim_pkg::*;
#(
  parameter int unsigned R  = ROWS,
  parameter int unsigned C  = COLS,
  parameter int unsigned CW = $clog2(R + 1),
  parameter int unsigned TOTW = $clog2(R * C + 1)
) (
  input  logic                   clk,
  input  logic                   pulse,            // apply write/erase levels this cycle
  input  wl_level_e [R-1:0]      wl_lvl,
  input  sl_level_e [C-1:0]      sl_lvl,
  output logic [C-1:0][CW-1:0]   dl_count,         // per data-line current, cell units
  output logic [TOTW-1:0]        i_total,          // sum of all data-line currents
  output logic [R-1:0][C-1:0]    q_state           // cell states, for observation only
);

  logic [R-1:0][C-1:0] q;

  always_ff @(posedge clk) begin
    if (pulse) begin
      for (int r = 0; r < R; r++) begin
        for (int c = 0; c < C; c++) begin
          if (wl_lvl[r] == WL_ERASE)
            q[r][c] <= 1'b0;
          else if (wl_lvl[r] == WL_WRITE && sl_lvl[c] == SL_SELECT)
            q[r][c] <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    i_total = '0;
    for (int c = 0; c < C; c++) begin
      dl_count[c] = '0;
      for (int r = 0; r < R; r++) begin
        if (wl_lvl[r] == WL_READ && sl_lvl[c] == SL_READ && q[r][c])
          dl_count[c] = dl_count[c] + CW'(1);
      end
      i_total = i_total + TOTW'(dl_count[c]);
    end
  end

  assign q_state = q;

endmodule
