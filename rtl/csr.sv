// csr: control and status registers of the annealer, written and read over the SPI port.
//
// The host uses them to erase and program the matrix word by word, to set the routing
// of the variables to the array lines (input buffer maps), to start single
// vector-matrix-vector (VMV) evaluations or a whole MESA run, and to read the energies and
// the best solution. Addresses are in fecim_pkg (reg_addr_e). Writes take effect on the
// bus_we cycle. A write to REG_CTRL gives one-cycle start pulses: bit 0 MESA run, bit 1
// single VMV on REG_X, bit 2 erase, bit 3 write word REG_PROG_DATA into row REG_PROG_ROW,
// bit 4 read back the cells of row REG_PROG_ROW. The annealer's current energy,
// temperature and trap count and the read-back word are read-only registers.
// Reads are combinational from bus_addr. After reset every word line follows the variable
// of the same index and every element column follows variable g. The register map is
// this design's own. The paper does not describe one.
module csr
  import fecim_pkg::*;
#(
  parameter int unsigned R  = ROWS,
  parameter int unsigned C  = COLS,
  parameter int unsigned G  = NGROUPS,
  parameter int unsigned NV = NVARS,
  parameter int unsigned W  = EW,
  parameter int unsigned T  = TW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [6:0]            bus_addr,
  input  logic [31:0]           bus_wdata,
  input  logic                  bus_we,
  output logic [31:0]           bus_rdata,
  // commands
  output logic                  go_mesa,
  output logic                  go_vmv,
  output logic                  go_erase,
  output logic                  go_write,
  output logic                  go_rdbk,
  // configuration
  output logic                  unary,
  output logic [$clog2(R)-1:0]  prog_row,
  output logic [C-1:0]          prog_data,
  output logic [NV-1:0]         x_host,
  output logic [G-1:0]          group_neg,
  output logic [T-1:0]          t0,
  output logic [3:0]            tshift,
  output logic [15:0]           count_max,
  output logic signed [W-1:0]   eps,
  output logic [31:0]           max_iter,
  output logic [NV-1:0]         fixed,
  output logic [31:0]           seed,
  output logic [3:0]            nflip,
  output logic [$clog2(NV):0]   nvars,
  output line_map_t [R-1:0]     row_map,
  output line_map_t [G-1:0]     col_map,
  // status
  input  logic                  busy,
  input  logic                  mesa_done,
  input  logic                  vmv_done,
  input  logic signed [W-1:0]   energy,
  input  logic signed [W-1:0]   e_opt,
  input  logic [NV-1:0]         x_opt,
  input  logic [31:0]           iter,
  input  logic [31:0]           epoch,
  input  logic signed [W-1:0]   e_cur,
  input  logic [T-1:0]          temp,
  input  logic [15:0]           trap_count,
  input  logic [C-1:0]          rdbk_word
);

  localparam int unsigned MW = $bits(line_map_t);

  logic mesa_done_q, vmv_done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {go_mesa, go_vmv, go_erase, go_write, go_rdbk} <= '0;
      unary      <= 1'b0;
      prog_row   <= '0;
      prog_data  <= '0;
      x_host     <= '0;
      group_neg  <= '0;
      t0         <= T'(1 << (T - 3));
      tshift     <= 4'd4;
      count_max  <= 16'd8;
      eps        <= W'(1);
      max_iter   <= 32'd100;
      fixed      <= '0;
      seed       <= 32'h1;
      nflip      <= 4'd1;
      nvars      <= ($clog2(NV)+1)'(NV);
      for (int r = 0; r < R; r++) row_map[r] <= '{kind: SRC_VAR, idx: VIDX_W'(r % NV)};
      for (int g = 0; g < G; g++) col_map[g] <= '{kind: SRC_VAR, idx: VIDX_W'(g % NV)};
      mesa_done_q <= 1'b0;
      vmv_done_q  <= 1'b0;
    end else begin
      {go_mesa, go_vmv, go_erase, go_write, go_rdbk} <= '0;
      if (mesa_done) mesa_done_q <= 1'b1;
      if (vmv_done)  vmv_done_q  <= 1'b1;
      if (bus_we) begin
        if (bus_addr >= REG_ROW_MAP && bus_addr < 7'(REG_ROW_MAP + R))
          row_map[bus_addr - REG_ROW_MAP] <= line_map_t'(bus_wdata[MW-1:0]);
        else if (bus_addr >= REG_COL_MAP && bus_addr < 7'(REG_COL_MAP + G))
          col_map[bus_addr - REG_COL_MAP] <= line_map_t'(bus_wdata[MW-1:0]);
        else begin
          case (bus_addr)
            REG_CTRL: begin
              go_mesa  <= bus_wdata[0];
              go_vmv   <= bus_wdata[1];
              go_erase <= bus_wdata[2];
              go_write <= bus_wdata[3];
              go_rdbk  <= bus_wdata[4];
              if (bus_wdata[0]) mesa_done_q <= 1'b0;
              if (bus_wdata[1] || bus_wdata[4]) vmv_done_q <= 1'b0;
            end
            REG_CFG:       unary     <= bus_wdata[0];
            REG_PROG_ROW:  prog_row  <= bus_wdata[$clog2(R)-1:0];
            REG_PROG_DATA: prog_data <= bus_wdata[C-1:0];
            REG_X:         x_host    <= bus_wdata[NV-1:0];
            REG_GROUP_NEG: group_neg <= bus_wdata[G-1:0];
            REG_T0:        t0        <= bus_wdata[T-1:0];
            REG_TSHIFT:    tshift    <= bus_wdata[3:0];
            REG_COUNT_MAX: count_max <= bus_wdata[15:0];
            REG_EPS:       eps       <= bus_wdata[W-1:0];
            REG_MAX_ITER:  max_iter  <= bus_wdata;
            REG_FIXED:     fixed     <= bus_wdata[NV-1:0];
            REG_SEED:      seed      <= bus_wdata;
            REG_NFLIP:     nflip     <= bus_wdata[3:0];
            REG_NVARS:     nvars     <= bus_wdata[$clog2(NV):0];
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    bus_rdata = '0;
    if (bus_addr >= REG_ROW_MAP && bus_addr < 7'(REG_ROW_MAP + R))
      bus_rdata = 32'(row_map[bus_addr - REG_ROW_MAP]);
    else if (bus_addr >= REG_COL_MAP && bus_addr < 7'(REG_COL_MAP + G))
      bus_rdata = 32'(col_map[bus_addr - REG_COL_MAP]);
    else begin
      case (bus_addr)
        REG_STATUS:    bus_rdata = {29'd0, vmv_done_q, mesa_done_q, busy};
        REG_CFG:       bus_rdata = {31'd0, unary};
        REG_PROG_ROW:  bus_rdata = 32'(prog_row);
        REG_PROG_DATA: bus_rdata = 32'(prog_data);
        REG_X:         bus_rdata = 32'(x_host);
        REG_ENERGY:    bus_rdata = 32'(energy);
        REG_EOPT:      bus_rdata = 32'(e_opt);
        REG_XOPT:      bus_rdata = 32'(x_opt);
        REG_GROUP_NEG: bus_rdata = 32'(group_neg);
        REG_T0:        bus_rdata = 32'(t0);
        REG_TSHIFT:    bus_rdata = 32'(tshift);
        REG_COUNT_MAX: bus_rdata = 32'(count_max);
        REG_EPS:       bus_rdata = 32'(eps);
        REG_MAX_ITER:  bus_rdata = max_iter;
        REG_FIXED:     bus_rdata = 32'(fixed);
        REG_SEED:      bus_rdata = seed;
        REG_NFLIP:     bus_rdata = 32'(nflip);
        REG_NVARS:     bus_rdata = 32'(nvars);
        REG_ITER:      bus_rdata = iter;
        REG_EPOCH:     bus_rdata = epoch;
        REG_ECUR:      bus_rdata = 32'(e_cur);
        REG_TEMP:      bus_rdata = 32'(temp);
        REG_TRAP:      bus_rdata = 32'(trap_count);
        REG_RDBK:      bus_rdata = 32'(rdbk_word);
        default:       bus_rdata = '0;
      endcase
    end
  end

endmodule
