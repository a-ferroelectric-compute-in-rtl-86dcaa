// tb_sl_dl_driver: self-checking test of the source-line driver in every mode.
// Checks that in read mode all M lines of an element column follow its y bit, that in
// write mode the data word selects or inhibits each line, and that lines are off otherwise.
module tb_sl_dl_driver;
  import fecim_pkg::*;
  localparam int C = COLS, M = M_BITS, G = C / M;
  arr_mode_e mode;
  logic [G-1:0] y_grp;
  logic [C-1:0] wdata;
  sl_level_e [C-1:0] sl_lvl;
  int checks = 0, failures = 0;

  sl_dl_driver dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      sl_level_e exp;
      mode  = arr_mode_e'(i % 4);
      y_grp = G'($urandom);
      wdata = C'($urandom);
      #1;
      for (int c = 0; c < C; c++) begin
        case (mode)
          ARR_READ:  exp = y_grp[c / M] ? SL_READ : SL_OFF;
          ARR_WRITE: exp = wdata[c] ? SL_SELECT : SL_INHIBIT;
          default:   exp = SL_OFF;
        endcase
        checks++;
        if (sl_lvl[c] != exp) begin
          failures++;
          $display("FAIL mode %0d col %0d got %0d exp %0d", mode, c, sl_lvl[c], exp);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
