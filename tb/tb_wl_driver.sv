// tb_wl_driver: self-checking test of the word-line driver in every mode.
// For random inputs it checks each word line against the expected level: the read
// bias for x = 1, write on the selected row with inhibit elsewhere, erase everywhere,
// and off when idle.
module tb_wl_driver;
  import fecim_pkg::*;
  localparam int R = ROWS;
  arr_mode_e mode;
  logic [R-1:0] x_row;
  logic [$clog2(R)-1:0] sel_row;
  wl_level_e [R-1:0] wl_lvl;
  int checks = 0, failures = 0;

  wl_driver dut (.*);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      wl_level_e exp;
      mode    = arr_mode_e'(i % 4);
      x_row   = R'($urandom);
      sel_row = $clog2(R)'($urandom);
      #1;
      for (int r = 0; r < R; r++) begin
        case (mode)
          ARR_READ:  exp = x_row[r] ? WL_READ : WL_OFF;
          ARR_WRITE: exp = (r == int'(sel_row)) ? WL_WRITE : WL_INHIBIT;
          ARR_ERASE: exp = WL_ERASE;
          default:   exp = WL_OFF;
        endcase
        checks++;
        if (wl_lvl[r] != exp) begin
          failures++;
          $display("FAIL mode %0d row %0d got %0d exp %0d", mode, r, wl_lvl[r], exp);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
