// tb_output_buffer: self-checking test of the final lane adder and output register.
// Captures random signed lane sums and checks the held energy, the one-cycle valid
// pulse, and that the value holds while the lanes change without capture.
module tb_output_buffer;
  import fecim_pkg::*;
  logic clk = 0, rst_n = 0, capture = 0;
  logic signed [NADC-1:0][EW-1:0] lane_sum;
  logic signed [EW-1:0] energy;
  logic valid;
  int checks = 0, failures = 0;

  output_buffer dut (.*);
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
    lane_sum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int e;
      e = 0;
      for (int a = 0; a < NADC; a++) begin
        int v;
        v = int'($urandom % 4001) - 2000;
        lane_sum[a] = EW'(v);
        e += v;
      end
      capture = 1; @(posedge clk); #1; capture = 0;
      check(valid == 1'b1, "valid after capture");
      check(int'(energy) == e, $sformatf("energy %0d exp %0d", energy, e));
      lane_sum = ~lane_sum;
      @(posedge clk); #1;
      check(valid == 1'b0, "valid is one cycle");
      check(int'(energy) == e, "energy held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
