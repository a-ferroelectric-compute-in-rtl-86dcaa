// adc: behavioural model of one column-shared analog-to-digital converter.
//
// This is a model of an analog block, not synthesizable logic. Its input is the
// data-line current in units of one cell's ON current, which a 1FeFET1R column delivers
// linearly in the number of conducting cells. It converts that current to a B-bit code.
// A conversion starts on a clock edge with start = 1, which samples the input. The code
// appears on dout with valid high for one cycle, CONV_CYCLES cycles after the start cycle
// (in the next cycle for CONV_CYCLES = 1).
// Currents above full scale give the largest code. The paper names the ADCs (four on the
// prototype) and notes that higher matrix precision needs more ADC resolution. It gives
// no architecture, resolution or latency. B = 6 covers a full 32-cell column exactly, and
// the one-cycle latency is this design's choice.
module adc
  import fecim_pkg::*;
#(
  parameter int unsigned B           = ADC_BITS,
  parameter int unsigned CW          = $clog2(ROWS + 1),
  parameter int unsigned CONV_CYCLES = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] ain,
  output logic [B-1:0]  dout,
  output logic          valid
);

  localparam int unsigned FULL = (1 << B) - 1;

  logic [CW-1:0] sample;

  function automatic logic [B-1:0] quantise(logic [CW-1:0] a);
    return (32'(a) > FULL) ? B'(FULL) : B'(a);
  endfunction
  int unsigned   remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= 0;
      valid     <= 1'b0;
      dout      <= '0;
      sample    <= '0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        sample <= ain;
        if (CONV_CYCLES <= 1) begin
          valid <= 1'b1;
          dout  <= quantise(ain);
        end else begin
          remaining <= CONV_CYCLES - 1;
        end
      end else if (remaining != 0) begin
        remaining <= remaining - 1;
        if (remaining == 1) begin
          valid <= 1'b1;
          dout  <= quantise(sample);
        end
      end
    end
  end

endmodule
