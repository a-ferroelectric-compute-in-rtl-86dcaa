// cim_ctrl: sequencer of the compute-in-memory macro.
//
// It runs the three array operations.
//   VMV read (start_vmv): loads the variable vector into the input buffer, puts the array
//     in read mode (all word lines at once, source lines per x_v), then steps the column
//     multiplexers through the CPA data lines of each ADC lane. For each step it starts a
//     conversion, waits for the code and lets the shift-and-add units accumulate it. At
//     the end the output buffer captures the sum of the lanes.
//     Latency, from the start cycle to the cycle in which the output buffer shows the
//     energy: 3 + CPA * (1 + CONV_CYCLES) clock cycles (19 with the defaults).
//   Word write (start_write): holds the array in write mode for WRITE_CYCLES cycles. It
//     selects row wr_row and the columns set in wr_data, and applies the pulse on the
//     last cycle. One row of the matrix is written per operation.
//   Erase (start_erase): holds all word lines at the erase level for ERASE_CYCLES cycles.
// A start is taken only while idle (busy = 0). done pulses for one cycle when a write or
// erase completes, and when a VMV result is captured.
// Pulse lengths: the 1 ms word write and the 1 us erase pulse are the prototype's, counted
// at a 50 MHz clock. The prototype's external clock runs at up to 50 MHz. The one-cycle
// settling step and the serial column order are this design's choices.
// Two assertions guard the array handshake: pulses only in write/erase, accumulation only
// in read. Their disable iff clause reads rst_n, which makes Verilator report rst_n as
// both a synchronous and an asynchronous net. No flip-flop uses it synchronously.
module cim_ctrl
  import fecim_pkg::*;
#(
  parameter int unsigned R            = ROWS,
  parameter int unsigned C            = COLS,
  parameter int unsigned NA           = NADC,
  parameter int unsigned CPA          = C / NA,
  parameter int unsigned WRITE_CYCLES = 50_000,
  parameter int unsigned ERASE_CYCLES = 50
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_vmv,
  input  logic                    start_write,
  input  logic                    start_erase,
  input  logic [$clog2(R)-1:0]    wr_row,
  input  logic [C-1:0]            wr_data,
  input  logic                    adc_valid,
  output arr_mode_e               mode,
  output logic [$clog2(R)-1:0]    sel_row,
  output logic [C-1:0]            wdata,
  output logic                    pulse,
  output logic                    ib_load,
  output logic [$clog2(CPA)-1:0]  mux_sel,
  output logic                    adc_start,
  output logic                    sa_clear,
  output logic                    sa_en,
  output logic                    ob_capture,
  output logic                    busy,
  output logic                    done
);

  typedef enum logic [2:0] {S_IDLE, S_SETTLE, S_CONV, S_WAIT, S_CAPTURE, S_WRITE, S_ERASE} state_e;

  state_e                   state;
  logic [$clog2(CPA)-1:0]   k;
  logic [31:0]              timer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      k       <= '0;
      timer   <= '0;
      sel_row <= '0;
      wdata   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          k <= '0;
          if (start_vmv) begin
            state <= S_SETTLE;
          end else if (start_write) begin
            state   <= S_WRITE;
            sel_row <= wr_row;
            wdata   <= wr_data;
            timer   <= 32'(WRITE_CYCLES - 1);
          end else if (start_erase) begin
            state <= S_ERASE;
            timer <= 32'(ERASE_CYCLES - 1);
          end
        end
        S_SETTLE: state <= S_CONV;
        S_CONV:   state <= S_WAIT;
        S_WAIT: begin
          if (adc_valid) begin
            if (k == $clog2(CPA)'(CPA - 1)) state <= S_CAPTURE;
            else begin
              k     <= k + 1'b1;
              state <= S_CONV;
            end
          end
        end
        S_CAPTURE: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        S_WRITE, S_ERASE: begin
          if (timer == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            timer <= timer - 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    unique case (state)
      S_SETTLE, S_CONV, S_WAIT: mode = ARR_READ;
      S_WRITE:                  mode = ARR_WRITE;
      S_ERASE:                  mode = ARR_ERASE;
      default:                  mode = ARR_IDLE;
    endcase
  end

  assign ib_load    = (state == S_IDLE) && start_vmv;
  assign sa_clear   = ib_load;
  assign mux_sel    = k;
  assign adc_start  = (state == S_CONV);
  assign sa_en      = (state == S_WAIT) && adc_valid;
  assign ob_capture = (state == S_CAPTURE);
  assign pulse      = ((state == S_WRITE) || (state == S_ERASE)) && (timer == 0);
  assign busy       = (state != S_IDLE);


  // A write or erase pulse may only reach the array while its levels are applied, and an
  // ADC result is only taken while a read is in progress.
  a_pulse_mode: assert property (@(posedge clk) disable iff (!rst_n)
    pulse |-> (mode == ARR_WRITE || mode == ARR_ERASE));
  a_acc_read: assert property (@(posedge clk) disable iff (!rst_n)
    sa_en |-> mode == ARR_READ);
endmodule
