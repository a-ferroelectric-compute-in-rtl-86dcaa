// tb_cim_ctrl: self-checking test of the macro sequencer, with the ADC model attached.
// A VMV read must take 3 + CPA*(1+CONV) = 19 cycles. It must load the input buffer once,
// stay in read mode, give the shift-and-add units the codes of columns 0..CPA-1 in order,
// and capture once. A word write must hold write mode for WRITE_CYCLES cycles with
// one pulse on the last, and an erase likewise for ERASE_CYCLES. Starts while busy
// are ignored. Pulse lengths are shortened here.
module tb_cim_ctrl;
  import fecim_pkg::*;
  localparam int R = ROWS, C = COLS, CPA = COLS / NADC, WC = 20, EC = 5;
  logic clk = 0, rst_n = 0;
  logic start_vmv = 0, start_write = 0, start_erase = 0;
  logic [$clog2(R)-1:0] wr_row;
  logic [C-1:0] wr_data;
  logic adc_valid;
  arr_mode_e mode;
  logic [$clog2(R)-1:0] sel_row;
  logic [C-1:0] wdata;
  logic pulse, ib_load, adc_start, sa_clear, sa_en, ob_capture, busy, done;
  logic [$clog2(CPA)-1:0] mux_sel;
  logic [ADC_BITS-1:0] dout;
  int checks = 0, failures = 0;

  cim_ctrl #(.WRITE_CYCLES(WC), .ERASE_CYCLES(EC)) dut (.*);
  adc u_adc (.clk, .rst_n, .start(adc_start), .ain(6'(mux_sel) + 6'd1), .dout, .valid(adc_valid));

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

  task automatic run_vmv();
    int cycles, loads, caps, ens, not_read;
    start_vmv = 1;
    cycles = 0; loads = 0; caps = 0; ens = 0; not_read = 0;
    #1;
    loads += int'(ib_load);
    check(sa_clear == 1'b1, "shift-add cleared at start");
    @(posedge clk); #1;
    start_vmv = 0;
    cycles = 1;
    while (!done && cycles < 100) begin
      if (busy && mode != ARR_READ && !ob_capture) not_read++;
      loads += int'(ib_load);
      caps  += int'(ob_capture);
      if (sa_en) begin
        check(int'(mux_sel) == ens, $sformatf("column order: step %0d got %0d", ens, mux_sel));
        check(int'(dout) == ens + 1, "code of the selected column");
        ens++;
      end
      // a second start while busy is ignored
      start_write = (cycles == 5);
      @(posedge clk); #1;
      start_write = 0;
      cycles++;
    end
    check(cycles == 3 + CPA * 2, $sformatf("VMV latency %0d exp %0d", cycles, 3 + CPA * 2));
    check(loads == 1, "one input-buffer load");
    check(caps == 1, "one capture");
    check(ens == CPA, $sformatf("%0d shift-add steps", ens));
    check(not_read == 0, "read mode held during conversion");
    @(posedge clk); #1;
    check(!busy, "idle after VMV");
  endtask

  task automatic run_write(int row, logic [C-1:0] data);
    int cycles, pulses, wrong;
    wr_row = $clog2(R)'(row); wr_data = data;
    start_write = 1;
    @(posedge clk); #1;
    start_write = 0;
    wr_row = '0; wr_data = '0;
    cycles = 0; pulses = 0; wrong = 0;
    while (mode == ARR_WRITE && cycles < 1000) begin
      if (int'(sel_row) != row || wdata != data) wrong++;
      if (pulse) begin
        pulses++;
        check(cycles == WC - 1, $sformatf("pulse on cycle %0d", cycles));
      end
      start_erase = 1;   // ignored while busy
      @(posedge clk); #1;
      start_erase = 0;
      cycles++;
    end
    check(cycles == WC, $sformatf("write mode for %0d cycles", cycles));
    check(pulses == 1, "one write pulse");
    check(wrong == 0, "row and word latched");
    check(done, "done after write");
    check(!busy, "idle after write");
  endtask

  task automatic run_erase();
    int cycles, pulses;
    start_erase = 1;
    @(posedge clk); #1;
    start_erase = 0;
    cycles = 0; pulses = 0;
    while (mode == ARR_ERASE && cycles < 1000) begin
      pulses += int'(pulse);
      @(posedge clk); #1;
      cycles++;
    end
    check(cycles == EC, $sformatf("erase mode for %0d cycles", cycles));
    check(pulses == 1, "one erase pulse");
    check(done, "done after erase");
  endtask

  initial begin
    wr_row = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(mode == ARR_IDLE && !busy, "idle after reset");
    run_vmv();
    run_write(7, 32'hDEAD_BEEF);
    run_erase();
    run_vmv();
    run_write(31, 32'h0000_0001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
