// tb_spi_if: self-checking test of the SPI slave.
// A mode-0 master in the testbench (SCLK = clk/10) sends write frames and read frames.
// Writes must produce one bus_we with the right address and data. Reads must return the
// word of a register model in the testbench on MISO. A frame cut short by cs_n must
// write nothing.
module tb_spi_if;
  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic [6:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic bus_we, bus_re;
  logic [31:0] regs [128];
  int checks = 0, failures = 0, nwe = 0;
  logic [6:0] last_addr;
  logic [31:0] last_data;

  spi_if dut (.*);
  always #5 clk = ~clk;
  assign bus_rdata = regs[bus_addr];

  always @(posedge clk) if (bus_we) begin
    nwe++; last_addr = bus_addr; last_data = bus_wdata;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic half(); repeat (5) @(posedge clk); endtask

  task automatic frame(input logic [7:0] cmd, input logic [31:0] wd, output logic [31:0] rd,
                       input int nbits = 40);
    logic [39:0] out;
    out = {cmd, wd};
    rd = '0;
    cs_n = 0; half();
    for (int i = 0; i < nbits; i++) begin
      mosi = out[39 - i];
      half();
      sclk = 1;
      if (i >= 8) rd = {rd[30:0], miso};
      half();
      sclk = 0;
    end
    half(); cs_n = 1; half(); half();
  endtask

  initial begin
    logic [31:0] rd;
    int n0;
    for (int i = 0; i < 128; i++) regs[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      logic [6:0] a;
      logic [31:0] d;
      a = 7'($urandom); d = $urandom;
      n0 = nwe;
      frame({1'b1, a}, d, rd);
      check(nwe == n0 + 1, "one bus write per write frame");
      check(last_addr == a && last_data == d, $sformatf("write addr %h data %h", last_addr, last_data));
      regs[a] = d;
      a = 7'($urandom);
      n0 = nwe;
      frame({1'b0, a}, 32'h0, rd);
      check(nwe == n0, "read frame writes nothing");
      check(rd == regs[a], $sformatf("read %h got %h exp %h", a, rd, regs[a]));
    end
    n0 = nwe;
    frame({1'b1, 7'h05}, 32'h1234_5678, rd, 20);
    check(nwe == n0, "aborted frame writes nothing");
    frame({1'b1, 7'h06}, 32'hCAFE_F00D, rd);
    check(nwe == n0 + 1 && last_addr == 7'h06 && last_data == 32'hCAFE_F00D, "frame after abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
