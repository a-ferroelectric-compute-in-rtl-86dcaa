// tb_input_buffer: self-checking test of the variable routing.
// Loads random vectors under random routing tables and checks every word-line and
// element-column input one cycle after load, and that the vector is held without load.
module tb_input_buffer;
  import fecim_pkg::*;
  localparam int R = ROWS, G = NGROUPS, NV = NVARS;
  logic clk = 0, rst_n = 0, load = 0;
  logic [NV-1:0] x_in;
  line_map_t [R-1:0] row_map;
  line_map_t [G-1:0] col_map;
  logic [R-1:0] x_row;
  logic [G-1:0] y_grp;
  int checks = 0, failures = 0;

  input_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_route(line_map_t m, logic [NV-1:0] x);
    if (m.kind == SRC_VAR) return x[m.idx];
    if (m.kind == SRC_ONE) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    logic [NV-1:0] held;
    x_in = '0;
    for (int r = 0; r < R; r++) row_map[r] = '{kind: SRC_OFF, idx: '0};
    for (int g = 0; g < G; g++) col_map[g] = '{kind: SRC_OFF, idx: '0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      for (int r = 0; r < R; r++) row_map[r] = '{kind: src_kind_e'($urandom % 3), idx: VIDX_W'($urandom)};
      for (int g = 0; g < G; g++) col_map[g] = '{kind: src_kind_e'($urandom % 3), idx: VIDX_W'($urandom)};
      x_in = NV'($urandom);
      held = x_in;
      load = 1;
      @(posedge clk); #1;
      load = 0;
      x_in = ~x_in;  // must not be taken without load
      @(posedge clk); #1;
      for (int r = 0; r < R; r++) begin
        checks++;
        if (x_row[r] != ref_route(row_map[r], held)) begin
          failures++; $display("FAIL row %0d", r);
        end
      end
      for (int g = 0; g < G; g++) begin
        checks++;
        if (y_grp[g] != ref_route(col_map[g], held)) begin
          failures++; $display("FAIL col %0d", g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
