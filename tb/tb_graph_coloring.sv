// tb_graph_coloring: solves a 7-node, 3-colour graph colouring problem on the full-size
// annealer, the size of the on-chip demonstration (21 binary variables).
//
// The testbench plays the host:
//  1. Builds the QUBO of K-colouring, sum_i (sum_p x_ip - 1)^2 + sum_(m,n) in E sum_p
//     x_mp x_np. Without its constant 7 this is: couplings 2 between the colours of a
//     node, 1 between equal colours of adjacent nodes, and -1 on every variable. Its
//     minimum, -7, is reached exactly by proper colourings. The graph is this test's own.
//  2. Compresses the coupling part losslessly. Variables are sorted by increasing
//     degree. In that order a column with no fixed element is folded onto its
//     symmetric position in the row of its variable (Q[v][i] += Q[i][v]). The elements of
//     that row then become fixed. Columns left empty are dropped. All 21 rows are kept,
//     since the array has 32. The compression is checked to be lossless on random
//     vectors.
//  3. Maps the result: row i = variable i. Element columns 0..nc-1 hold the kept
//     columns. Column 15 is a constant-one column holding the -1 linear terms as Q-.
//     It erases, writes every row over SPI and runs MESA.
//  4. Checks that the best energy is -7 and that x_opt decodes to a proper colouring.
module tb_graph_coloring;
  import fecim_pkg::*;
  localparam int NN = 7, K = 3, NV = NN * K, GN = NGROUPS;
  localparam int NE = 10;
  int edges [NE][2] = '{'{0,1}, '{0,3}, '{1,2}, '{1,4}, '{2,5}, '{3,4}, '{4,5}, '{4,6}, '{5,6}, '{3,6}};

  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso, irq, busy;
  logic [$clog2(ROWS*COLS+1)-1:0] i_total;

  fecim_top u_top (.*);
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  int q [NV][NV];      // coupling part, upper triangle before compression
  int qc [NV][NV];     // after compression
  int colvar [GN];
  int ncols;

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

  function automatic int var_of(int node, int colour); return node * K + colour; endfunction

  function automatic int energy_full(logic [31:0] x);   // x^T Q x of the uncompressed QUBO
    int e = 0;
    for (int i = 0; i < NV; i++) begin
      if (x[i]) e -= 1;
      for (int j = 0; j < NV; j++) if (x[i] && x[j]) e += q[i][j];
    end
    return e;
  endfunction
  function automatic int energy_comp(logic [31:0] x);   // x_h^T Q' x_v, linear part as -1s
    int e = 0;
    for (int i = 0; i < NV; i++) begin
      if (x[i]) e -= 1;
      for (int k = 0; k < ncols; k++) if (x[i] && x[colvar[k]]) e += qc[i][colvar[k]];
    end
    return e;
  endfunction

  initial begin
    int deg [NV];
    int order [NV];
    bit fixedm [NV][NV];
    logic [31:0] d, eopt, xopt;
    bit colourable;
    // ---- QUBO ----
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) q[i][j] = 0;
    for (int n = 0; n < NN; n++)
      for (int p = 0; p < K; p++)
        for (int r = p + 1; r < K; r++) q[var_of(n, p)][var_of(n, r)] = 2;
    for (int e = 0; e < NE; e++)
      for (int p = 0; p < K; p++) begin
        int a, b;
        a = var_of(edges[e][0], p); b = var_of(edges[e][1], p);
        if (a > b) begin int t; t = a; a = b; b = t; end
        q[a][b] += 1;
      end
    // the graph is 3-colourable (brute force over 3^7 colourings)
    colourable = 0;
    for (int c = 0; c < 2187; c++) begin
      int col [NN];
      bit ok;
      int cc;
      cc = c;
      for (int n = 0; n < NN; n++) begin col[n] = cc % 3; cc /= 3; end
      ok = 1;
      for (int e = 0; e < NE; e++) if (col[edges[e][0]] == col[edges[e][1]]) ok = 0;
      if (ok) colourable = 1;
    end
    check(colourable, "test graph is 3-colourable");
    // ---- compression: sort by degree, fold columns ----
    for (int i = 0; i < NV; i++) begin
      deg[i] = 0;
      for (int j = 0; j < NV; j++) if (q[i][j] != 0 || q[j][i] != 0) deg[i]++;
      order[i] = i;
    end
    for (int i = 0; i < NV; i++)
      for (int j = 0; j < NV - 1 - i; j++)
        if (deg[order[j]] > deg[order[j + 1]]) begin
          int t; t = order[j]; order[j] = order[j + 1]; order[j + 1] = t;
        end
    qc = q;
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) fixedm[i][j] = 0;
    for (int o = 0; o < NV; o++) begin
      int v;
      bit has_fixed;
      v = order[o];
      has_fixed = 0;
      for (int i = 0; i < NV; i++) if (fixedm[i][v]) has_fixed = 1;
      if (!has_fixed)
        for (int i = 0; i < NV; i++)
          if (qc[i][v] != 0) begin
            qc[v][i] += qc[i][v];
            qc[i][v] = 0;
          end
      // row v now holds every coupling of v; fixing it keeps later folds out of column v
      if (!has_fixed)
        for (int j = 0; j < NV; j++) if (qc[v][j] != 0) fixedm[v][j] = 1;
    end
    ncols = 0;
    for (int j = 0; j < NV; j++) begin
      bit used;
      used = 0;
      for (int i = 0; i < NV; i++) if (qc[i][j] != 0) used = 1;
      if (used) begin
        if (ncols < GN - 1) colvar[ncols] = j;
        ncols++;
      end
    end
    $display("compressed coupling matrix: %0d rows x %0d columns (uncompressed %0dx%0d)", NV, ncols, NV, NV);
    check(ncols <= GN - 1, "compressed matrix fits the element columns");
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++)
      check(qc[i][j] >= 0 && qc[i][j] <= 3, "element fits in two cells");
    for (int t = 0; t < 200; t++) begin
      logic [31:0] x;
      x = $urandom & ((1 << NV) - 1);
      check(energy_comp(x) == energy_full(x), "compression is lossless");
    end
    // ---- program the chip ----
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    wr(REG_CTRL, 32'h4); wait_idle();
    for (int r = 0; r < NV; r++) begin
      logic [31:0] w;
      w = '0;
      for (int k = 0; k < ncols; k++) w[2 * k +: 2] = 2'(qc[r][colvar[k]]);
      w[2 * (GN - 1) +: 2] = 2'd1;      // -1 linear term (Q- column)
      wr(REG_PROG_ROW, r);
      wr(REG_PROG_DATA, w);
      wr(REG_CTRL, 32'h8);
      wait_idle();
    end
    for (int r = 0; r < ROWS; r++)
      wr(7'(REG_ROW_MAP + r), 32'(line_map_t'(r < NV ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(r)} :
                                  line_map_t'{kind: SRC_OFF, idx: '0})));
    for (int g = 0; g < GN; g++)
      wr(7'(REG_COL_MAP + g), 32'(line_map_t'(g < ncols ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(colvar[g])} :
                                  g == GN - 1 ? line_map_t'{kind: SRC_ONE, idx: '0} :
                                  line_map_t'{kind: SRC_OFF, idx: '0})));
    wr(REG_GROUP_NEG, 32'(1 << (GN - 1)));
    // spot-check the mapped energy
    for (int t = 0; t < 6; t++) begin
      logic [31:0] x;
      x = $urandom & ((1 << NV) - 1);
      wr(REG_X, x); wr(REG_CTRL, 32'h2); wait_idle();
      rd(REG_ENERGY, d);
      check(int'(d) == energy_full(x), $sformatf("chip energy %0d exp %0d", int'(d), energy_full(x)));
    end
    // ---- anneal from the all-uncoloured state ----
    wr(REG_NVARS, NV);
    wr(REG_NFLIP, 1);
    wr(REG_T0, 32'h2000);
    wr(REG_TSHIFT, 4);
    wr(REG_COUNT_MAX, 30);
    wr(REG_EPS, 1);
    wr(REG_MAX_ITER, 3000);
    wr(REG_SEED, 32'h2468_ACE1);
    wr(REG_X, 32'h0);
    wr(REG_CTRL, 32'h1);
    while (!irq) @(posedge clk);
    rd(REG_EOPT, eopt);
    rd(REG_XOPT, xopt);
    rd(REG_EPOCH, d);
    $display("MESA: E_opt=%0d x_opt=%h epochs=%0d", int'(eopt), xopt, d);
    check(int'(eopt) == energy_full(xopt), "best energy matches best vector");
    check(int'(eopt) == -NN, $sformatf("ground state -7 reached (got %0d)", int'(eopt)));
    begin
      int col [NN];
      for (int n = 0; n < NN; n++) begin
        int cnt;
        cnt = 0;
        for (int p = 0; p < K; p++) if (xopt[var_of(n, p)]) begin cnt++; col[n] = p; end
        check(cnt == 1, $sformatf("node %0d has exactly one colour", n));
      end
      for (int e = 0; e < NE; e++)
        check(col[edges[e][0]] != col[edges[e][1]], $sformatf("edge %0d joins different colours", e));
      $display("colouring: %0d %0d %0d %0d %0d %0d %0d", col[0], col[1], col[2], col[3], col[4], col[5], col[6]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
