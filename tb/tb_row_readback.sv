// tb_row_readback: checks the row read-back unit on its own.
// The testbench plays the sequencer and the ADC lanes. For random rows and random
// stored words, it starts a read-back with the load strobe. While the unit is active, it
// checks the overrides: the one-hot word line of the chosen row, and all element
// columns on. It then feeds 8 column steps per lane. Each lane's code is 0 when the cell
// is empty, and a random non-zero code when it holds a 1. The word must equal the stored
// word. An ordinary evaluation (load without start) must pass x_row / y_grp through
// unchanged and leave the word alone.
module tb_row_readback;
  import fecim_pkg::*;
  localparam int R = ROWS, C = COLS, G = NGROUPS, NA = NADC, B = ADC_BITS, CPA = C / NA;

  logic clk = 0, rst_n = 0;
  logic load = 0, start = 0, en = 0;
  logic [$clog2(R)-1:0] row = '0;
  logic [R-1:0] x_row = '0, x_row_o;
  logic [G-1:0] y_grp = '0, y_grp_o;
  logic [$clog2(CPA)-1:0] col_k = '0;
  logic [NA-1:0][B-1:0] dout = '0;
  logic active;
  logic [C-1:0] word;

  row_readback u_dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [C-1:0] stored, last;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(!active && word == '0, "reset state");
    for (int t = 0; t < 40; t++) begin
      int r;
      r = $urandom_range(R - 1);
      stored = $urandom;
      x_row = $urandom; y_grp = 16'($urandom);
      // start
      row = 5'(r); load = 1; start = 1;
      @(posedge clk); #1;
      load = 0; start = 0; row = 5'($urandom);    // later changes of row must not matter
      check(active, "active after start");
      check(x_row_o == (R'(1) << r), $sformatf("one-hot word line %0d", r));
      check(y_grp_o == '1, "all element columns on");
      for (int k = 0; k < CPA; k++) begin
        col_k = 3'(k);
        for (int a = 0; a < NA; a++)
          dout[a] = stored[a * CPA + k] ? B'($urandom_range(2 ** B - 1, 1)) : '0;
        en = 1;
        @(posedge clk); #1;
        en = 0;
        @(posedge clk); #1;       // a gap, as between conversions
      end
      check(word == stored, $sformatf("word of row %0d: %h exp %h", r, word, stored));
      last = word;
      // an ordinary evaluation
      load = 1; start = 0;
      @(posedge clk); #1;
      load = 0;
      check(!active, "inactive for an ordinary read");
      check(x_row_o == x_row && y_grp_o == y_grp, "pass-through when inactive");
      dout = '1; en = 1;
      @(posedge clk); #1;
      en = 0;
      check(word == last, "word kept during an ordinary read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
