// tb_shift_add: self-checking test of the shift-and-add accumulators.
// For each lane, feeds the codes of all its columns in random order and with random
// Q- marks, in binary and in unary weighting. It compares the sum with
// sum(+-code << bit) worked out in the testbench. It also checks that clear restarts the sum.
module tb_shift_add;
  import fecim_pkg::*;
  localparam int C = COLS, NA = NADC, M = M_BITS, CPA = C / NA, G = C / M;
  logic clk = 0, rst_n = 0, clear = 0, en = 0, unary = 0;
  logic [$clog2(CPA)-1:0] col_k;
  logic [ADC_BITS-1:0] din;
  logic [G-1:0] group_neg;
  logic signed [NA-1:0][EW-1:0] sum;
  int checks = 0, failures = 0;

  for (genvar a = 0; a < NA; a++) begin : g_lane
    shift_add #(.LANE(a)) dut (.clk, .rst_n, .clear, .en, .col_k, .din, .group_neg,
                               .unary, .sum(sum[a]));
  end
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv [NA];
    col_k = '0; din = '0; group_neg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      group_neg = G'($urandom);
      unary = t[0];
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int a = 0; a < NA; a++) expv[a] = 0;
      for (int s = 0; s < CPA + 3; s++) begin
        int k, d;
        k = $urandom % CPA;
        d = $urandom % (1 << ADC_BITS);
        col_k = $clog2(CPA)'(k);
        din = ADC_BITS'(d);
        en = ($urandom % 4) != 0;
        if (en)
          for (int a = 0; a < NA; a++) begin
            int col, w;
            col = a * CPA + k;
            w = unary ? d : d << (col % M);
            expv[a] += group_neg[col / M] ? -w : w;
          end
        @(posedge clk); #1;
        en = 0;
      end
      for (int a = 0; a < NA; a++) begin
        checks++;
        if (int'($signed(sum[a])) != expv[a]) begin
          failures++; $display("FAIL lane %0d sum %0d exp %0d", a, sum[a], expv[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
