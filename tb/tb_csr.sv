// tb_csr: self-checking test of the register file.
// Checks the reset values, write/read-back of every configuration register and of the
// routing tables, the one-cycle command pulses from REG_CTRL, the sticky done flags, and
// the read-only status words, including the annealer state and the read-back word.
module tb_csr;
  import fecim_pkg::*;
  localparam int R = ROWS, C = COLS, G = NGROUPS, NV = NVARS, W = EW, T = TW;
  logic clk = 0, rst_n = 0;
  logic [6:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic bus_we = 0;
  logic go_mesa, go_vmv, go_erase, go_write, go_rdbk, unary;
  logic [$clog2(R)-1:0] prog_row;
  logic [C-1:0] prog_data;
  logic [NV-1:0] x_host, fixed;
  logic [G-1:0] group_neg;
  logic [T-1:0] t0;
  logic [3:0] tshift, nflip;
  logic [15:0] count_max;
  logic signed [W-1:0] eps;
  logic [31:0] max_iter, seed;
  logic [$clog2(NV):0] nvars;
  line_map_t [R-1:0] row_map;
  line_map_t [G-1:0] col_map;
  logic busy = 0, mesa_done = 0, vmv_done = 0;
  logic signed [W-1:0] energy, e_opt;
  logic [NV-1:0] x_opt;
  logic [31:0] iter, epoch;
  logic signed [W-1:0] e_cur;
  logic [T-1:0] temp;
  logic [15:0] trap_count;
  logic [C-1:0] rdbk_word;
  int checks = 0, failures = 0;

  csr dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [6:0] a, logic [31:0] d);
    bus_addr = a; bus_wdata = d; bus_we = 1;
    @(posedge clk); #1;
    bus_we = 0;
  endtask

  task automatic rdchk(logic [6:0] a, logic [31:0] exp, string what);
    bus_addr = a;
    #1;
    check(bus_rdata == exp, $sformatf("%s: read %h exp %h", what, bus_rdata, exp));
  endtask

  initial begin
    energy = -20'sd77; e_opt = -20'sd123; x_opt = 32'h0F0F; iter = 42; epoch = 3;
    e_cur = -20'sd5; temp = 16'h0ABC; trap_count = 16'd6; rdbk_word = 32'hDEAD_BEEF;
    bus_addr = '0; bus_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // reset routing: row r -> x[r], element column g -> x[g]
    check(row_map[5].kind == SRC_VAR && row_map[5].idx == 5, "row map reset");
    check(col_map[9].kind == SRC_VAR && col_map[9].idx == 9, "column map reset");
    check(max_iter == 100 && nflip == 1 && nvars == NV, "annealing reset values");
    // configuration registers
    wr(REG_PROG_ROW, 17);   bus_addr = REG_PROG_ROW; #1; check(prog_row == 17 && bus_rdata == 17, "prog row");
    wr(REG_PROG_DATA, 32'hA5A5_0FF0); #1; check(prog_data == 32'hA5A5_0FF0 && bus_rdata == 32'hA5A5_0FF0, "prog data");
    wr(REG_X, 32'h1357_9BDF);  #1; check(x_host == 32'h1357_9BDF && bus_rdata == 32'h1357_9BDF, "x");
    wr(REG_GROUP_NEG, 32'h8001); #1; check(group_neg == 16'h8001, "group neg");
    wr(REG_T0, 32'h1234);    #1; check(t0 == 16'h1234 && bus_rdata == 32'h1234, "t0");
    wr(REG_TSHIFT, 5);       #1; check(tshift == 5, "tshift");
    wr(REG_COUNT_MAX, 77);   #1; check(count_max == 77, "count max");
    wr(REG_EPS, 3);          #1; check(eps == 3, "eps");
    wr(REG_MAX_ITER, 1000);  #1; check(max_iter == 1000 && bus_rdata == 1000, "max iter");
    wr(REG_FIXED, 32'h80);   #1; check(fixed == 32'h80, "fixed");
    wr(REG_SEED, 32'hBEEF);  #1; check(seed == 32'hBEEF, "seed");
    wr(REG_NFLIP, 3);        #1; check(nflip == 3, "nflip");
    wr(REG_NVARS, 21);       #1; check(nvars == 21, "nvars");
    wr(REG_CFG, 1);          #1; check(unary == 1'b1, "unary");
    wr(7'(REG_ROW_MAP + 31), 32'(line_map_t'{kind: SRC_ONE, idx: 5'd0}));
    check(row_map[31].kind == SRC_ONE, "row map write");
    rdchk(7'(REG_ROW_MAP + 31), 32'(line_map_t'{kind: SRC_ONE, idx: 5'd0}), "row map read");
    wr(7'(REG_COL_MAP + 15), 32'(line_map_t'{kind: SRC_VAR, idx: 5'd20}));
    check(col_map[15].kind == SRC_VAR && col_map[15].idx == 20, "column map write");
    check(row_map[30].idx == 30, "neighbouring map entry untouched");
    // command pulses
    bus_addr = REG_CTRL; bus_wdata = 32'h1F; bus_we = 1;
    @(posedge clk); #1; bus_we = 0;
    check(go_mesa && go_vmv && go_erase && go_write && go_rdbk, "command pulses");
    @(posedge clk); #1;
    check(!go_mesa && !go_vmv && !go_erase && !go_write && !go_rdbk, "pulses last one cycle");
    for (int b = 0; b < 5; b++) begin
      bus_addr = REG_CTRL; bus_wdata = 32'(1 << b); bus_we = 1;
      @(posedge clk); #1; bus_we = 0;
      check({go_rdbk, go_write, go_erase, go_vmv, go_mesa} == 5'(1 << b), $sformatf("command bit %0d alone", b));
    end
    // status
    busy = 1; mesa_done = 1; vmv_done = 1;
    @(posedge clk); #1; mesa_done = 0; vmv_done = 0;
    rdchk(REG_STATUS, 32'h7, "status bits");
    busy = 0;
    wr(REG_CTRL, 32'h1);
    rdchk(REG_STATUS, 32'h4, "mesa done cleared by a new run");
    rdchk(REG_ENERGY, 32'hFFFF_FFB3, "energy sign-extended");
    rdchk(REG_EOPT, 32'hFFFF_FF85, "best energy");
    rdchk(REG_XOPT, 32'h0F0F, "best vector");
    rdchk(REG_ITER, 42, "iterations");
    rdchk(REG_EPOCH, 3, "epochs");
    rdchk(REG_ECUR, 32'hFFFF_FFFB, "current energy sign-extended");
    rdchk(REG_TEMP, 32'h0ABC, "temperature");
    rdchk(REG_TRAP, 6, "trap count");
    rdchk(REG_RDBK, 32'hDEAD_BEEF, "read-back word");
    // a read-back command clears the evaluation-done flag like a single evaluation
    vmv_done = 1; @(posedge clk); #1; vmv_done = 0;
    rdchk(REG_STATUS, 32'h4, "evaluation done set");
    wr(REG_CTRL, 32'h10);
    rdchk(REG_STATUS, 32'h0, "read-back clears evaluation done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
