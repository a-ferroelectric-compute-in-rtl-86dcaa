// tb_col_mux: self-checking test of the column multiplexers of all four lanes.
// Drives random data-line counts and checks that each lane delivers the data line
// LANE*CPA + sel for every select value.
module tb_col_mux;
  import fecim_pkg::*;
  localparam int C = COLS, NA = NADC, CW = $clog2(ROWS + 1), CPA = C / NA;
  logic [C-1:0][CW-1:0] dl_count;
  logic [$clog2(CPA)-1:0] sel;
  logic [NA-1:0][CW-1:0] ain;
  int checks = 0, failures = 0;

  for (genvar a = 0; a < NA; a++) begin : g_lane
    col_mux #(.LANE(a)) dut (.dl_count, .sel, .ain(ain[a]));
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20; i++) begin
      for (int c = 0; c < C; c++) dl_count[c] = CW'($urandom);
      for (int s = 0; s < CPA; s++) begin
        sel = $clog2(CPA)'(s);
        #1;
        for (int a = 0; a < NA; a++) begin
          checks++;
          if (ain[a] != dl_count[a * CPA + s]) begin
            failures++; $display("FAIL lane %0d sel %0d", a, s);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
