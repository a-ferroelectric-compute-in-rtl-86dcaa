// tb_adc: self-checking test of the ADC model.
// Converts random currents with the default one-cycle latency and with a 4-cycle
// latency, checking the code, the saturation at full scale and the cycle on which
// valid rises. A 4-bit instance checks saturation, since a 32-cell column exceeds it.
module tb_adc;
  import fecim_pkg::*;
  localparam int CW = $clog2(ROWS + 1);
  logic clk = 0, rst_n = 0, start = 0;
  logic [CW-1:0] ain;
  logic [ADC_BITS-1:0] d1;
  logic [3:0] d4;
  logic v1, v4;
  int checks = 0, failures = 0;

  adc u1 (.clk, .rst_n, .start, .ain, .dout(d1), .valid(v1));
  adc #(.B(4), .CONV_CYCLES(4)) u4 (.clk, .rst_n, .start, .ain, .dout(d4), .valid(v4));

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

  initial begin
    ain = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 60; i++) begin
      int a, lat1, lat4;
      a = (i == 0) ? ROWS : int'($urandom % (ROWS + 1));
      ain = CW'(a);
      start = 1;
      @(posedge clk); #1;
      start = 0;
      ain = '0;   // the sample is taken at start
      lat1 = -1; lat4 = -1;
      for (int c = 1; c <= 6; c++) begin
        if (v1 && lat1 < 0) begin
          lat1 = c;
          check(int'(d1) == a, $sformatf("6-bit code %0d exp %0d", d1, a));
        end
        if (v4 && lat4 < 0) begin
          lat4 = c;
          check(int'(d4) == ((a > 15) ? 15 : a), $sformatf("4-bit code %0d for %0d", d4, a));
        end
        @(posedge clk); #1;
      end
      check(lat1 == 1, $sformatf("latency 1 got %0d", lat1));
      check(lat4 == 4, $sformatf("latency 4 got %0d", lat4));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
