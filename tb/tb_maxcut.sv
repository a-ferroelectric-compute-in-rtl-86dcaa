// tb_maxcut: a Max-Cut problem on the full-size annealer, scaled down to what the chip
// holds. It has 20 nodes and 30 edges, generated here from a fixed LFSR seed with node
// degrees capped at 6.
//
// The testbench plays the host:
//  1. Max-Cut as a QUBO to minimise: E = sum_(i,j) in E (2 x_i x_j - x_i - x_j). That is
//     coupling +2 per edge and a linear term -deg(i) on every node; the cut size is -E.
//  2. Compresses the couplings as tb_graph_coloring does (degree order; fold a column with
//     no fixed element into its row; the row is then fixed). It checks on random vectors
//     that the compression is lossless.
//  3. Maps: row i = node i. Element columns 0..nc-1 hold the kept couplings. The two
//     last element columns are constant-one Q- columns whose 2-bit elements together hold
//     deg(i) (at most 3 + 3).
//  4. Runs MESA and compares the best cut with the brute-force maximum over all 2^20 cuts.
//     It also checks that the best vector really cuts that many edges.
module tb_maxcut;
  import fecim_pkg::*;
  localparam int NV = 20, NE = 30, GN = NGROUPS, MAXDEG = 6;

  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso, irq, busy;
  logic [$clog2(ROWS*COLS+1)-1:0] i_total;

  fecim_top u_top (.*);
  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  int ea [NE], eb [NE];
  int deg [NV];
  int q [NV][NV];
  int qc [NV][NV];
  int colvar [GN];
  int ncols;

  initial begin
    #400_000_000;
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

  function automatic int cut_of(logic [31:0] x);
    int c;
    c = 0;
    for (int e = 0; e < NE; e++) if (x[ea[e]] != x[eb[e]]) c++;
    return c;
  endfunction
  function automatic int energy_full(logic [31:0] x);
    int e;
    e = 0;
    for (int i = 0; i < NV; i++) begin
      if (x[i]) e -= deg[i];
      for (int j = 0; j < NV; j++) if (x[i] && x[j]) e += q[i][j];
    end
    return e;
  endfunction
  function automatic int energy_comp(logic [31:0] x);
    int e;
    e = 0;
    for (int i = 0; i < NV; i++) begin
      if (x[i]) e -= deg[i];
      for (int k = 0; k < ncols; k++) if (x[i] && x[colvar[k]]) e += qc[i][colvar[k]];
    end
    return e;
  endfunction

  initial begin
    int order [NV];
    bit fixedm [NV][NV];
    logic [31:0] d, eopt, xopt, lfsr;
    int best_cut;
    // ---- graph: distinct random edges, degree capped ----
    lfsr = 32'h1234_5678;
    for (int i = 0; i < NV; i++) begin
      deg[i] = 0;
      for (int j = 0; j < NV; j++) q[i][j] = 0;
    end
    for (int e = 0; e < NE; ) begin
      int a, b;
      lfsr = {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      a = int'(lfsr[15:0]) % NV;
      b = int'(lfsr[31:16]) % NV;
      if (a > b) begin int t; t = a; a = b; b = t; end
      if (a != b && q[a][b] == 0 && deg[a] < MAXDEG && deg[b] < MAXDEG) begin
        q[a][b] = 2; deg[a]++; deg[b]++;
        ea[e] = a; eb[e] = b;
        e++;
      end
    end
    for (int i = 0; i < NV; i++) check(deg[i] <= 6, "degree fits two constant columns");
    // brute-force maximum cut
    best_cut = 0;
    for (int v = 0; v < (1 << NV); v++) begin
      int c;
      c = cut_of(32'(v));
      if (c > best_cut) best_cut = c;
    end
    // ---- compression ----
    for (int i = 0; i < NV; i++) order[i] = i;
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
      if (!has_fixed) begin
        for (int i = 0; i < NV; i++)
          if (qc[i][v] != 0) begin
            qc[v][i] += qc[i][v];
            qc[i][v] = 0;
          end
        for (int j = 0; j < NV; j++) if (qc[v][j] != 0) fixedm[v][j] = 1;
      end
    end
    ncols = 0;
    for (int j = 0; j < NV; j++) begin
      bit used;
      used = 0;
      for (int i = 0; i < NV; i++) if (qc[i][j] != 0) used = 1;
      if (used) begin
        if (ncols < GN - 2) colvar[ncols] = j;
        ncols++;
      end
    end
    $display("graph: %0d nodes, %0d edges, maximum cut %0d; compressed %0dx%0d -> %0dx%0d",
             NV, NE, best_cut, NV, NV, NV, ncols);
    check(ncols <= GN - 2, "compressed matrix fits the element columns");
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++)
      check(qc[i][j] >= 0 && qc[i][j] <= 3, "element fits in two cells");
    for (int t = 0; t < 200; t++) begin
      logic [31:0] x;
      x = $urandom & ((1 << NV) - 1);
      check(energy_comp(x) == energy_full(x), "compression is lossless");
      check(energy_full(x) == -cut_of(x), "energy is minus the cut");
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
      w[2 * (GN - 2) +: 2] = 2'(deg[r] > 3 ? 3 : deg[r]);
      w[2 * (GN - 1) +: 2] = 2'(deg[r] > 3 ? deg[r] - 3 : 0);
      wr(REG_PROG_ROW, r);
      wr(REG_PROG_DATA, w);
      wr(REG_CTRL, 32'h8);
      wait_idle();
      wr(REG_CTRL, 32'h10);       // verify the row
      wait_idle();
      rd(REG_RDBK, d);
      check(d == w, $sformatf("row %0d verified", r));
    end
    for (int r = 0; r < ROWS; r++)
      wr(7'(REG_ROW_MAP + r), 32'(line_map_t'(r < NV ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(r)} :
                                  line_map_t'{kind: SRC_OFF, idx: '0})));
    for (int g = 0; g < GN; g++)
      wr(7'(REG_COL_MAP + g), 32'(line_map_t'(g < ncols ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(colvar[g])} :
                                  g >= GN - 2 ? line_map_t'{kind: SRC_ONE, idx: '0} :
                                  line_map_t'{kind: SRC_OFF, idx: '0})));
    wr(REG_GROUP_NEG, 32'(3 << (GN - 2)));
    for (int t = 0; t < 6; t++) begin
      logic [31:0] x;
      x = $urandom & ((1 << NV) - 1);
      wr(REG_X, x); wr(REG_CTRL, 32'h2); wait_idle();
      rd(REG_ENERGY, d);
      check(int'(d) == energy_full(x), $sformatf("chip energy %0d exp %0d", int'(d), energy_full(x)));
    end
    // ---- anneal ----
    wr(REG_NVARS, NV);
    wr(REG_NFLIP, 1);
    wr(REG_T0, 32'h2000);
    wr(REG_TSHIFT, 4);
    wr(REG_COUNT_MAX, 30);
    wr(REG_EPS, 1);
    wr(REG_MAX_ITER, 3000);
    wr(REG_SEED, 32'h1357_9BDF);
    wr(REG_X, 32'h0);
    wr(REG_CTRL, 32'h1);
    while (!irq) @(posedge clk);
    rd(REG_EOPT, eopt);
    rd(REG_XOPT, xopt);
    rd(REG_EPOCH, d);
    $display("MESA: E_opt=%0d cut=%0d x_opt=%h epochs=%0d", int'(eopt), cut_of(xopt), xopt, d);
    check(int'(eopt) == energy_full(xopt), "best energy matches best vector");
    check(cut_of(xopt) == -int'(eopt), "best vector cuts -E_opt edges");
    check(-int'(eopt) == best_cut, $sformatf("maximum cut %0d reached (got %0d)", best_cut, -int'(eopt)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
