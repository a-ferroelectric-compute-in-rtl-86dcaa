// tb_pfp35: the prime-factorisation example 35 = 5 x 7 on the full-size annealer, from
// its compressed QUBO:
//   f = x4 (4 4)(x1 x2)^T - x3 (6 6 16)(x1 x2 x4)^T + (4 4 -9 20)(x1 x2 x3 x4)^T
// The minimum of f is -13 at (x1 x2 x3 x4) = (1 1 1 0). It is unique, and the testbench
// checks both by brute force.
// The coefficients need up to 5 bits, and an element holds 2. Large coefficients are
// spread over several word lines: rows that follow the same variable add their cells in
// the same column, so a coefficient v on variable a takes ceil(v/3) rows of a. The
// elements of those rows are 3, 3, ..., rest.
// Element columns: 0 x1 (+), 1 x2 (+), 2 x1 (-), 3 x2 (-), 4 x4 (-), 5 one (+), 6 one (-).
// That makes 17 rows and 7 element columns.
// The testbench programs the array and verifies every row by read-back. It checks all 16
// energies with single evaluations, then runs MESA and checks that it reaches the
// minimum.
module tb_pfp35;
  import fecim_pkg::*;
  localparam int NV = 4, NT = 9, GN = NGROUPS;
  // terms: row variable, element column, value (variables 0..3 are x1..x4)
  int t_var [NT] = '{3, 3, 2, 2, 2, 0, 1, 3, 2};
  int t_col [NT] = '{0, 1, 2, 3, 4, 5, 5, 5, 6};
  int t_val [NT] = '{4, 4, 6, 6, 16, 4, 4, 20, 9};

  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso, irq, busy;
  logic [$clog2(ROWS*COLS+1)-1:0] i_total;

  fecim_top u_top (.*);
  always #10 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic half(); repeat (5) @(posedge clk); endtask
  task automatic spi(input logic rw, input logic [6:0] a, input logic [31:0] wd,
                     output logic [31:0] rd);
    logic [39:0] out;
    out = {rw, a, wd};
    rd = '0;
    cs_n = 0; half();
    for (int i = 0; i < 40; i++) begin
      mosi = out[39 - i];
      half(); sclk = 1;
      if (i >= 8) rd = {rd[30:0], miso};
      half(); sclk = 0;
    end
    half(); cs_n = 1; half(); half();
  endtask
  task automatic wr(logic [6:0] a, logic [31:0] d);
    logic [31:0] dummy;
    spi(1'b1, a, d, dummy);
  endtask
  task automatic rd(logic [6:0] a, output logic [31:0] d);
    spi(1'b0, a, 32'h0, d);
  endtask
  task automatic wait_idle();
    logic [31:0] s;
    do rd(REG_STATUS, s); while (s[0]);
  endtask

  function automatic int f(logic [3:0] x);   // the compressed QUBO as printed
    return 4 * x[0] * x[3] + 4 * x[1] * x[3] - 6 * x[0] * x[2] - 6 * x[1] * x[2] - 16 * x[2] * x[3]
           + 4 * x[0] + 4 * x[1] - 9 * x[2] + 20 * x[3];
  endfunction

  initial begin
    int rows_of [NV];
    int first [NV];
    int elem [ROWS][GN];
    int colvar [GN];
    bit colneg [GN], colone [GN];
    int nrows, emin, nmin, xmin;
    logic [31:0] d, eopt, xopt;
    // brute-force minimum
    emin = 1 << 30; nmin = 0; xmin = 0;
    for (int v = 0; v < 16; v++) if (f(4'(v)) < emin) begin emin = f(4'(v)); xmin = v; end
    for (int v = 0; v < 16; v++) if (f(4'(v)) == emin) nmin++;
    check(emin == -13 && xmin == 7 && nmin == 1, "unique minimum -13 at x = (1 1 1 0)");
    // columns
    colvar = '{0, 1, 0, 1, 3, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    colneg = '{0, 0, 1, 1, 1, 0, 1, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    colone = '{0, 0, 0, 0, 0, 1, 1, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    // rows: ceil(v / 3) replicas of the row variable for its largest coefficient
    for (int a = 0; a < NV; a++) rows_of[a] = 0;
    for (int t = 0; t < NT; t++)
      if ((t_val[t] + 2) / 3 > rows_of[t_var[t]]) rows_of[t_var[t]] = (t_val[t] + 2) / 3;
    nrows = 0;
    for (int a = 0; a < NV; a++) begin first[a] = nrows; nrows += rows_of[a]; end
    check(nrows == 17 && nrows <= ROWS, $sformatf("%0d rows fit the array", nrows));
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < GN; g++) elem[r][g] = 0;
    for (int t = 0; t < NT; t++)
      for (int k = 0; k < rows_of[t_var[t]]; k++) begin
        int rest;
        rest = t_val[t] - 3 * k;
        elem[first[t_var[t]] + k][t_col[t]] += rest > 3 ? 3 : (rest > 0 ? rest : 0);
      end
    // program and verify
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    wr(REG_CTRL, 32'h4); wait_idle();
    for (int r = 0; r < nrows; r++) begin
      logic [31:0] w;
      w = '0;
      for (int g = 0; g < GN; g++) w[2 * g +: 2] = 2'(elem[r][g]);
      wr(REG_PROG_ROW, r);
      wr(REG_PROG_DATA, w);
      wr(REG_CTRL, 32'h8);
      wait_idle();
      wr(REG_CTRL, 32'h10);
      wait_idle();
      rd(REG_RDBK, d);
      check(d == w, $sformatf("row %0d verified", r));
    end
    for (int a = 0; a < NV; a++)
      for (int k = 0; k < rows_of[a]; k++)
        wr(7'(int'(REG_ROW_MAP) + first[a] + k), 32'(line_map_t'{kind: SRC_VAR, idx: VIDX_W'(a)}));
    for (int r = nrows; r < ROWS; r++)
      wr(7'(REG_ROW_MAP + r), 32'(line_map_t'{kind: SRC_OFF, idx: '0}));
    for (int g = 0; g < GN; g++)
      wr(7'(REG_COL_MAP + g), 32'(line_map_t'(g > 6 ? line_map_t'{kind: SRC_OFF, idx: '0} :
                                  colone[g] ? line_map_t'{kind: SRC_ONE, idx: '0} :
                                  line_map_t'{kind: SRC_VAR, idx: VIDX_W'(colvar[g])})));
    begin
      logic [31:0] neg;
      neg = '0;
      for (int g = 0; g < GN; g++) neg[g] = colneg[g];
      wr(REG_GROUP_NEG, neg);
    end
    // every energy
    for (int v = 0; v < 16; v++) begin
      wr(REG_X, v); wr(REG_CTRL, 32'h2); wait_idle();
      rd(REG_ENERGY, d);
      check(int'(d) == f(4'(v)), $sformatf("energy of x=%b: %0d exp %0d", 4'(v), int'(d), f(4'(v))));
    end
    // anneal
    wr(REG_NVARS, NV);
    wr(REG_NFLIP, 1);
    wr(REG_T0, 32'h2000);
    wr(REG_TSHIFT, 3);
    wr(REG_COUNT_MAX, 6);
    wr(REG_EPS, 1);
    wr(REG_MAX_ITER, 200);
    wr(REG_SEED, 32'h0000_0023);
    wr(REG_X, 32'h8);
    wr(REG_CTRL, 32'h1);
    while (!irq) @(posedge clk);
    rd(REG_EOPT, eopt);
    rd(REG_XOPT, xopt);
    $display("MESA: E_opt=%0d x_opt=%b", int'(eopt), xopt[3:0]);
    check(int'(eopt) == emin, $sformatf("minimum %0d reached (got %0d)", emin, int'(eopt)));
    check(xopt == 32'(xmin), "best vector is the minimiser");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
