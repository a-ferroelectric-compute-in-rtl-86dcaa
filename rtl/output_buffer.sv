// output_buffer: final sum of the ADC lanes, holding the result of one iteration.
//
// On capture the lane sums are added into the energy E = x_h^T Q' x_v of the current
// annealing iteration. The result is held until the next capture, and valid pulses high
// for one cycle. The result is registered and valid the cycle after capture. The paper
// describes the final accumulation and the output buffer. The single adder tree is this
// design's choice.
module output_buffer
  import fecim_pkg::*;
#(
  parameter int unsigned NA = NADC,
  parameter int unsigned W  = EW
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        capture,
  input  logic signed [NA-1:0][W-1:0] lane_sum,
  output logic signed [W-1:0]         energy,
  output logic                        valid
);

  logic signed [W-1:0] total;

  always_comb begin
    total = '0;
    for (int a = 0; a < NA; a++) total = total + $signed(lane_sum[a]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      energy <= '0;
      valid  <= 1'b0;
    end else begin
      valid <= capture;
      if (capture) energy <= total;
    end
  end

endmodule
