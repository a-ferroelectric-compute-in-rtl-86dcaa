// fecim_top: FeFET compute-in-memory annealer for QUBO problems.
//
// The chip evaluates the QUBO energy E = x_h^T Q' x_v in one pass over a 32x32 1FeFET1R
// crossbar. Q' is the (compressed) coupling matrix, stored one bit per cell. It runs
// multi-epoch simulated annealing (MESA) around that evaluation. Data path of one
// evaluation: the input buffer routes the variables to the word lines (x_h) and to the
// source lines (x_v). All word lines are driven at once, so every data line carries
// sum_r x_r q_rc y_c. Four ADCs, each behind a column multiplexer, convert the 32 data
// lines in 8 steps. The shift-and-add units weight each column by its bit position within
// the M-bit element. The output buffer adds the four lanes into E. The MESA controller
// decides on each E, perturbs the state and starts the next evaluation.
// The row read-back unit can take over the input vectors for one evaluation. It then
// reads the bits of one stored row back through the ADCs, so the host can verify
// programming.
//
// Ports: clk/rst_n (active-low asynchronous reset); an SPI slave port (sclk, cs_n, mosi,
// miso) for all host access (see csr for the registers); irq, a level that goes high when
// a MESA run has finished (cleared by the next run); busy; and i_total, the whole-array
// current in cell units. i_total is the analog quantity a bench instrument measures when
// the array is read in a single cycle without the ADCs, as in the ternary demonstration.
// Timing: one energy evaluation takes 19 clock cycles (cim_ctrl). A MESA iteration adds
// 3 + nflip cycles of decision and perturbation.
// WRITE_CYCLES and ERASE_CYCLES set the program and erase pulse lengths in clock cycles.
// The defaults are 1 ms and 1 us at 50 MHz.
// The crossbar, its drivers, the shared ADCs, the shift-and-add stage, the output buffer,
// the SPI port, single-row reading and the MESA loop follow the paper. The register map, the routing tables,
// the Q+/Q- column signs and the parameters of the random choices are this design's own.
module fecim_top
  import fecim_pkg::*;
#(
  parameter int unsigned WRITE_CYCLES = 50_000,
  parameter int unsigned ERASE_CYCLES = 50
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sclk,
  input  logic                        cs_n,
  input  logic                        mosi,
  output logic                        miso,
  output logic                        irq,
  output logic                        busy,
  output logic [$clog2(ROWS*COLS+1)-1:0] i_total
);

  localparam int unsigned CPA = COLS / NADC;
  localparam int unsigned CW  = $clog2(ROWS + 1);

  // host bus
  logic [6:0]  bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic        bus_we, bus_re;

  // configuration
  logic                  go_mesa, go_vmv, go_erase, go_write, go_rdbk, unary;
  logic [$clog2(ROWS)-1:0] prog_row;
  logic [COLS-1:0]       prog_data;
  logic [NVARS-1:0]      x_host, fixed;
  logic [NGROUPS-1:0]    group_neg;
  logic [TW-1:0]         t0;
  logic [3:0]            tshift, nflip;
  logic [15:0]           count_max;
  logic signed [EW-1:0]  eps;
  logic [31:0]           max_iter, seed;
  logic [$clog2(NVARS):0] nvars;
  line_map_t [ROWS-1:0]    row_map;
  line_map_t [NGROUPS-1:0] col_map;

  // annealer
  logic                 mesa_req, mesa_busy, mesa_done;
  logic [NVARS-1:0]     x_cand, x_opt;
  logic signed [EW-1:0] e_opt, e_cur;
  logic [TW-1:0]        temp;
  logic [15:0]          trap_count;
  logic [31:0]          iter, epoch;
  logic                 ev_downhill, ev_new_best, ev_stagnant, ev_uphill_accept,
                        ev_uphill_reject, ev_new_epoch;

  // macro
  arr_mode_e               mode;
  logic [$clog2(ROWS)-1:0] sel_row;
  logic [COLS-1:0]         wdata;
  logic                    pulse, ib_load, adc_start, sa_clear, sa_en, ob_capture;
  logic                    cim_busy, cim_done;
  logic [$clog2(CPA)-1:0]  mux_sel;
  logic [ROWS-1:0]         x_row;
  logic [NGROUPS-1:0]      y_grp;
  logic [ROWS-1:0]         x_row_d;     // after the read-back override
  logic [NGROUPS-1:0]      y_grp_d;
  logic                    rdbk_active;
  logic [COLS-1:0]         rdbk_word;
  wl_level_e [ROWS-1:0]    wl_lvl;
  sl_level_e [COLS-1:0]    sl_lvl;
  logic [COLS-1:0][CW-1:0] dl_count;
  logic [ROWS-1:0][COLS-1:0] q_state;
  logic [NADC-1:0][CW-1:0]       ain;
  logic [NADC-1:0][ADC_BITS-1:0] dout;
  logic [NADC-1:0]               adc_valid;
  logic signed [NADC-1:0][EW-1:0] lane_sum;
  logic signed [EW-1:0]          energy;
  logic                          e_valid;

  spi_if u_spi (
    .clk, .rst_n, .sclk, .cs_n, .mosi, .miso,
    .bus_addr, .bus_wdata, .bus_we, .bus_re, .bus_rdata
  );

  csr u_csr (
    .clk, .rst_n, .bus_addr, .bus_wdata, .bus_we, .bus_rdata,
    .go_mesa, .go_vmv, .go_erase, .go_write, .go_rdbk,
    .unary, .prog_row, .prog_data, .x_host, .group_neg, .t0, .tshift, .count_max, .eps,
    .max_iter, .fixed, .seed, .nflip, .nvars, .row_map, .col_map,
    .busy, .mesa_done, .vmv_done(e_valid && !mesa_busy), .energy, .e_opt, .x_opt, .iter, .epoch,
    .e_cur, .temp, .trap_count, .rdbk_word
  );

  mesa_ctrl u_mesa (
    .clk, .rst_n,
    .start(go_mesa && !cim_busy && !mesa_busy),
    .x_init(x_host), .fixed, .nvars, .nflip, .t0, .tshift, .count_max, .eps, .max_iter, .seed,
    .vmv_req(mesa_req), .x_cand, .vmv_done(e_valid), .energy,
    .busy(mesa_busy), .done(mesa_done), .x_opt, .e_opt, .e_cur, .temp, .trap_count,
    .iter, .epoch,
    .ev_downhill, .ev_new_best, .ev_stagnant, .ev_uphill_accept, .ev_uphill_reject,
    .ev_new_epoch
  );

  cim_ctrl #(.WRITE_CYCLES(WRITE_CYCLES), .ERASE_CYCLES(ERASE_CYCLES)) u_cim (
    .clk, .rst_n,
    .start_vmv(mesa_req || ((go_vmv || go_rdbk) && !mesa_busy)),
    .start_write(go_write && !mesa_busy),
    .start_erase(go_erase && !mesa_busy),
    .wr_row(prog_row), .wr_data(prog_data),
    .adc_valid(adc_valid[0]),
    .mode, .sel_row, .wdata, .pulse, .ib_load, .mux_sel, .adc_start, .sa_clear, .sa_en,
    .ob_capture, .busy(cim_busy), .done(cim_done)
  );

  input_buffer u_ib (
    .clk, .rst_n, .load(ib_load), .x_in(mesa_busy ? x_cand : x_host),
    .row_map, .col_map, .x_row, .y_grp
  );

  row_readback u_rb (
    .clk, .rst_n, .load(ib_load), .start(go_rdbk && !mesa_busy), .row(prog_row),
    .x_row, .y_grp, .en(sa_en), .col_k(mux_sel), .dout,
    .x_row_o(x_row_d), .y_grp_o(y_grp_d), .active(rdbk_active), .word(rdbk_word)
  );

  wl_driver u_wl (.mode, .x_row(x_row_d), .sel_row, .wl_lvl);

  sl_dl_driver u_sl (.mode, .y_grp(y_grp_d), .wdata, .sl_lvl);

  fefet_array u_array (.clk, .pulse, .wl_lvl, .sl_lvl, .dl_count, .i_total, .q_state);

  for (genvar a = 0; a < NADC; a++) begin : g_lane
    col_mux #(.LANE(a)) u_mux (.dl_count, .sel(mux_sel), .ain(ain[a]));

    adc u_adc (.clk, .rst_n, .start(adc_start), .ain(ain[a]), .dout(dout[a]),
               .valid(adc_valid[a]));

    shift_add #(.LANE(a)) u_sa (
      .clk, .rst_n, .clear(sa_clear), .en(sa_en), .col_k(mux_sel), .din(dout[a]),
      .group_neg, .unary, .sum(lane_sum[a])
    );
  end

  output_buffer u_ob (.clk, .rst_n, .capture(ob_capture), .lane_sum, .energy,
                      .valid(e_valid));

  // irq stays high from the end of a MESA run until the next run starts.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         irq <= 1'b0;
    else if (mesa_done) irq <= 1'b1;
    else if (go_mesa)   irq <= 1'b0;
  end

  assign busy = cim_busy || mesa_busy;

endmodule
