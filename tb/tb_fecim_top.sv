// tb_fecim_top: end-to-end test of the annealer at its default size, driven over SPI.
// The testbench acts as the host. It erases the 32x32 array and writes all 32 rows word by
// word with the full 1 ms pulses. It then maps a 7-variable signed QUBO:
//   rows 0..6 = x0..x6, rows 7..30 unused (written with random bits that must not count),
//   row 31 = constant 1;
//   element columns 0..6 = Q+ for x0..x6, 7..13 = Q- for x0..x6 (subtracted),
//   column 14 = constant 1 (extra linear terms), column 15 unused.
// It checks single evaluations in binary and in unary weighting against x^T Q x worked out
// here, the whole-array current pin, and the 19-cycle evaluation latency. Then it runs
// MESA and checks that the best solution reported is the brute-force minimum, that its
// energy matches, and the iteration count. It finally erases and checks a zero result.
// Every row is also read back through the ADCs and compared with what was written.
// Each mechanism (erase, word write, row read-back, evaluation, unary mode, Q- subtraction, constant
// lines, the six annealing decisions, epoch restart) is counted and must occur.
module tb_fecim_top;
  import fecim_pkg::*;
  localparam int NU = 7, GN = NGROUPS;

  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso, irq, busy;
  logic [$clog2(ROWS*COLS+1)-1:0] i_total;

  fecim_top u_top (.*);
  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;
  int wq [ROWS][GN];           // element values written, 0..3
  logic [COLS-1:0] word [ROWS];
  int n_erase = 0, n_write = 0, n_rdbk = 0, n_vmv = 0, n_unary = 0, n_neg = 0, n_one = 0;
  int n_down = 0, n_best = 0, n_stag = 0, n_upacc = 0, n_uprej = 0, n_epoch = 0;

  initial begin
    #100_000_000;   // 100 ms of chip time
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- SPI master, mode 0, SCLK = clk/10 ----
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

  // ---- reference model of the mapped problem ----
  function automatic bit row_on(int r, logic [NVARS-1:0] x);
    if (r < NU) return x[r];
    return r == ROWS - 1;
  endfunction
  function automatic bit col_on(int g, logic [NVARS-1:0] x);
    if (g < NU) return x[g];
    if (g < 2 * NU) return x[g - NU];
    return g == 2 * NU;
  endfunction
  function automatic int popc2(int v); return (v & 1) + ((v >> 1) & 1); endfunction
  function automatic int ref_energy(logic [NVARS-1:0] x, bit unary);
    int e = 0;
    for (int r = 0; r < ROWS; r++)
      for (int g = 0; g < GN; g++)
        if (row_on(r, x) && col_on(g, x)) begin
          int v;
          v = unary ? popc2(wq[r][g]) : wq[r][g];
          e += (g >= NU && g < 2 * NU) ? -v : v;
        end
    return e;
  endfunction
  function automatic int ref_current(logic [NVARS-1:0] x);
    int n = 0;
    for (int r = 0; r < ROWS; r++)
      for (int g = 0; g < GN; g++)
        if (row_on(r, x) && col_on(g, x)) n += popc2(wq[r][g]);
    return n;
  endfunction

  // evaluation latency and whole-array current, observed inside the chip
  int lat_start = -1, cyc = 0, last_lat = -1, i_seen = -1;
  always @(posedge clk) begin
    cyc++;
    if (u_top.u_cim.ib_load) lat_start = cyc;
    if (u_top.u_cim.mode == ARR_READ) i_seen = int'(i_total);
    if (u_top.e_valid) last_lat = cyc - lat_start;
    if (u_top.u_mesa.ev_downhill)      n_down++;
    if (u_top.u_mesa.ev_new_best)      n_best++;
    if (u_top.u_mesa.ev_stagnant)      n_stag++;
    if (u_top.u_mesa.ev_uphill_accept) n_upacc++;
    if (u_top.u_mesa.ev_uphill_reject) n_uprej++;
    if (u_top.u_mesa.ev_new_epoch)     n_epoch++;
  end

  task automatic vmv_check(logic [NVARS-1:0] x, bit unary);
    logic [31:0] e;
    int exp;
    wr(REG_X, x);
    wr(REG_CTRL, 32'h2);
    wait_idle();
    rd(REG_ENERGY, e);
    exp = ref_energy(x, unary);
    check(int'(e) == exp, $sformatf("energy of x=%h: %0d exp %0d (unary %0d)", x, int'(e), exp, unary));
    check(last_lat == 19, $sformatf("evaluation latency %0d cycles", last_lat));
    check(i_seen == ref_current(x), $sformatf("array current %0d exp %0d", i_seen, ref_current(x)));
    n_vmv++;
    if (unary) n_unary++;
  endtask

  initial begin
    logic [31:0] d, eopt, xopt;
    int gmin, t_start;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    // matrix: random 2-bit elements everywhere; the map decides what counts
    for (int r = 0; r < ROWS; r++) begin
      word[r] = '0;
      for (int g = 0; g < GN; g++) begin
        wq[r][g] = $urandom % 4;
        if (r < NU && g < NU && g < r) wq[r][g] = 0;         // upper triangle for Q+
        if (r < NU && g >= NU && g < 2 * NU && (g - NU) < r) wq[r][g] = 0;
        word[r][2 * g +: 2] = 2'(wq[r][g]);
      end
    end
    // erase and write every row
    t_start = cyc;
    wr(REG_CTRL, 32'h4); wait_idle(); n_erase++;
    check(u_top.u_array.q_state == '0, "array erased");
    for (int r = 0; r < ROWS; r++) begin
      wr(REG_PROG_ROW, r);
      wr(REG_PROG_DATA, word[r]);
      wr(REG_CTRL, 32'h8);
      wait_idle();
      n_write++;
    end
    for (int r = 0; r < ROWS; r++) check(u_top.u_array.q_state[r] == word[r], $sformatf("row %0d written", r));
    check(cyc - t_start >= ROWS * 50_000, "write pulses take 1 ms each");
    // verify every row through the read path (row read-back)
    for (int r = 0; r < ROWS; r++) begin
      wr(REG_PROG_ROW, r);
      wr(REG_CTRL, 32'h10);
      wait_idle();
      rd(REG_RDBK, d);
      check(d == word[r], $sformatf("row %0d read back %h exp %h", r, d, word[r]));
      check(last_lat == 19, "read-back takes one evaluation");
      n_rdbk++;
    end
    // routing
    for (int r = 0; r < ROWS; r++)
      wr(7'(REG_ROW_MAP + r), 32'(r < NU ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(r)} :
                                  r == ROWS - 1 ? line_map_t'{kind: SRC_ONE, idx: '0} :
                                  line_map_t'{kind: SRC_OFF, idx: '0}));
    for (int g = 0; g < GN; g++)
      wr(7'(REG_COL_MAP + g), 32'(g < NU ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(g)} :
                                  g < 2 * NU ? line_map_t'{kind: SRC_VAR, idx: VIDX_W'(g - NU)} :
                                  g == 2 * NU ? line_map_t'{kind: SRC_ONE, idx: '0} :
                                  line_map_t'{kind: SRC_OFF, idx: '0}));
    wr(REG_GROUP_NEG, 32'(((1 << NU) - 1) << NU));
    n_neg++; n_one++;
    // single evaluations
    vmv_check('0, 0);
    vmv_check(NVARS'((1 << NU) - 1), 0);
    for (int i = 0; i < 12; i++) vmv_check(NVARS'($urandom % (1 << NU)), 0);
    wr(REG_CFG, 1);
    for (int i = 0; i < 4; i++) vmv_check(NVARS'($urandom % (1 << NU)), 1);
    wr(REG_CFG, 0);
    // MESA run
    gmin = 1 << 30;
    for (int v = 0; v < (1 << NU); v++) if (ref_energy(NVARS'(v), 0) < gmin) gmin = ref_energy(NVARS'(v), 0);
    wr(REG_NVARS, NU);
    wr(REG_NFLIP, 1);
    wr(REG_T0, 32'h3000);
    wr(REG_TSHIFT, 3);
    wr(REG_COUNT_MAX, 5);
    wr(REG_EPS, 1);
    wr(REG_MAX_ITER, 400);
    wr(REG_SEED, 32'h00C0_FFEE);
    wr(REG_X, 32'h55);
    wr(REG_CTRL, 32'h1);
    t_start = cyc;
    while (!irq && cyc - t_start < 2_000_000) @(posedge clk);
    check(irq, "MESA run finished");
    rd(REG_EOPT, eopt);
    rd(REG_XOPT, xopt);
    rd(REG_ITER, d);
    check(d == 400, $sformatf("iterations %0d", d));
    check(int'(eopt) == ref_energy(xopt, 0), "best energy matches best vector");
    check(int'(eopt) == gmin, $sformatf("minimum %0d found (got %0d)", gmin, int'(eopt)));
    rd(REG_ECUR, d);
    check(int'(d) >= int'(eopt), "current energy not below the best");
    rd(REG_TEMP, d);
    check(d <= 32'h3000, "temperature within T0");
    rd(REG_TRAP, d);
    check(d <= 5, "trap count within Count_max");
    rd(REG_EPOCH, d);
    $display("MESA: E_opt=%0d x_opt=%h epochs=%0d, cycles=%0d", int'(eopt), xopt, d, cyc - t_start);
    $display("decisions: downhill=%0d new_best=%0d stagnant=%0d uphill_acc=%0d uphill_rej=%0d epochs=%0d",
             n_down, n_best, n_stag, n_upacc, n_uprej, n_epoch);
    // erase again: nothing conducts, only the constant part is gone too
    wr(REG_CTRL, 32'h4); wait_idle(); n_erase++;
    for (int r = 0; r < ROWS; r++) for (int g = 0; g < GN; g++) wq[r][g] = 0;
    vmv_check(NVARS'(32'h7F), 0);
    wr(REG_PROG_ROW, 3); wr(REG_CTRL, 32'h10); wait_idle(); rd(REG_RDBK, d);
    check(d == '0, "erased row reads back as zero");
    n_rdbk++;
    // every mechanism happened
    check(n_erase > 0, "erase happened");
    check(n_write > 0, "word write happened");
    check(n_rdbk > 0, "row read-back happened");
    check(n_vmv > 0, "evaluation happened");
    check(n_unary > 0, "unary weighting happened");
    check(n_neg > 0 && n_one > 0, "Q- columns and constant lines used");
    check(n_down > 0, "downhill acceptance happened");
    check(n_best > 0, "best-solution update happened");
    check(n_stag > 0, "stagnation happened");
    check(n_upacc > 0, "uphill acceptance happened");
    check(n_uprej > 0, "uphill rejection happened");
    check(n_epoch > 0, "epoch restart happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
