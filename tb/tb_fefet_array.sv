// tb_fefet_array: self-checking test of the crossbar model.
// Erases the array, writes random words row by row with the inhibit levels on all other
// rows, then applies random read vectors. Each data-line count and the total current are
// compared with x^T q y worked out from a shadow copy of the written matrix. It also checks
// that an inhibited row keeps its contents and that erase clears every cell.
module tb_fefet_array;
  import fecim_pkg::*;
  localparam int R = ROWS, C = COLS, CW = $clog2(R + 1), TOTW = $clog2(R * C + 1);

  logic clk = 0;
  logic pulse;
  wl_level_e [R-1:0] wl_lvl;
  sl_level_e [C-1:0] sl_lvl;
  logic [C-1:0][CW-1:0] dl_count;
  logic [TOTW-1:0] i_total;
  logic [R-1:0][C-1:0] q_state;
  logic [C-1:0] shadow [R];
  int checks = 0, failures = 0;

  fefet_array dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic idle();
    pulse = 0;
    for (int r = 0; r < R; r++) wl_lvl[r] = WL_OFF;
    for (int c = 0; c < C; c++) sl_lvl[c] = SL_OFF;
  endtask

  task automatic erase();
    for (int r = 0; r < R; r++) wl_lvl[r] = WL_ERASE;
    pulse = 1;
    @(posedge clk); #1;
    idle();
    for (int r = 0; r < R; r++) shadow[r] = '0;
  endtask

  task automatic write_word(int row, logic [C-1:0] data);
    for (int r = 0; r < R; r++) wl_lvl[r] = (r == row) ? WL_WRITE : WL_INHIBIT;
    for (int c = 0; c < C; c++) sl_lvl[c] = data[c] ? SL_SELECT : SL_INHIBIT;
    pulse = 1;
    @(posedge clk); #1;
    idle();
    shadow[row] = shadow[row] | data;
  endtask

  task automatic read_check(logic [R-1:0] x, logic [C-1:0] y);
    int exp_col, exp_tot;
    for (int r = 0; r < R; r++) wl_lvl[r] = x[r] ? WL_READ : WL_OFF;
    for (int c = 0; c < C; c++) sl_lvl[c] = y[c] ? SL_READ : SL_OFF;
    #1;
    exp_tot = 0;
    for (int c = 0; c < C; c++) begin
      exp_col = 0;
      for (int r = 0; r < R; r++) exp_col += int'(x[r] & shadow[r][c] & y[c]);
      exp_tot += exp_col;
      check(int'(dl_count[c]) == exp_col, $sformatf("column %0d count %0d exp %0d", c, dl_count[c], exp_col));
    end
    check(int'(i_total) == exp_tot, $sformatf("total %0d exp %0d", i_total, exp_tot));
    idle();
  endtask

  initial begin
    idle();
    @(posedge clk); #1;
    erase();
    check(q_state == '0, "erase clears all cells");
    for (int r = 0; r < R; r++) write_word(r, C'({$urandom, $urandom}) & C'({$urandom, $urandom}));
    for (int r = 0; r < R; r++) check(q_state[r] == shadow[r], $sformatf("row %0d contents", r));
    // a write pulse without the write level changes nothing
    for (int r = 0; r < R; r++) wl_lvl[r] = WL_INHIBIT;
    for (int c = 0; c < C; c++) sl_lvl[c] = SL_SELECT;
    pulse = 1; @(posedge clk); #1; idle();
    for (int r = 0; r < R; r++) check(q_state[r] == shadow[r], $sformatf("inhibited row %0d kept", r));
    // all ones read: full column
    read_check('1, '1);
    for (int i = 0; i < 40; i++) read_check(R'($urandom), C'($urandom));
    erase();
    write_word(3, '1);
    read_check('1, '1);
    #1;
    check(int'(i_total) == 0, "no current once the read levels are removed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
