// mesa_ctrl: multi-epoch simulated annealing (MESA) controller.
//
// It runs the annealing loop around the compute-in-memory energy evaluation. Each
// iteration asks the macro for E_new = E(x_new) and then decides:
//   E_new < E_o            : accept (E_o, x_o <- E_new, x_new). If E_new < E_opt, the epoch's
//                            best (E_opt, x_opt) is updated too. The trap count is reset.
//   E_new - E_o < eps      : the energy is stagnant, so the state is kept and count += 1.
//   otherwise (uphill)     : accept with probability p = T / 2^TW, then reset the count.
//                            Otherwise keep the state and count += 1.
// If count > count_max, the system is trapped. The epoch ends: the temperature is reset
// to t0, the count is cleared, and the state restarts from the best solution found
// (E_o, x_o <- E_opt, x_opt). Otherwise the temperature cools, T <- T - (T >> tshift).
// Each iteration then perturbs x_o by flipping nflip randomly chosen variables (variables
// in fixed are never flipped). That gives x_new for the next iteration. The run stops
// after max_iter iterations. x_opt and E_opt then hold the best solution of all epochs.
//
// Interface: start (one cycle, while idle) begins a run from x_init, whose energy is
// evaluated first. vmv_req asks for E(x_cand). vmv_done with energy answers it. The
// ev_* outputs pulse once per decision, for observation.
// Timing per iteration: 1 decide cycle, 1 + nflip perturbation cycles, 1 request cycle,
// plus the macro's VMV latency.
// The paper gives the loop, its decisions and epoch restart. These are this design's
// choices: the form of p, the cooling rule, the 32-bit Galois LFSR (polynomial
// x^32+x^22+x^2+x+1) used for random numbers, how flipped variables are chosen
// (idx = (r16 * nvars) >> 16), and the iteration limit.
module mesa_ctrl
  import fecim_pkg::*;
#(
  parameter int unsigned NV = NVARS,
  parameter int unsigned W  = EW,
  parameter int unsigned T  = TW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NV-1:0]         x_init,
  input  logic [NV-1:0]         fixed,
  input  logic [$clog2(NV):0]   nvars,
  input  logic [3:0]            nflip,
  input  logic [T-1:0]          t0,
  input  logic [3:0]            tshift,
  input  logic [15:0]           count_max,
  input  logic signed [W-1:0]   eps,
  input  logic [31:0]           max_iter,
  input  logic [31:0]           seed,
  // energy evaluation on the CiM macro
  output logic                  vmv_req,
  output logic [NV-1:0]         x_cand,
  input  logic                  vmv_done,
  input  logic signed [W-1:0]   energy,
  // results
  output logic                  busy,
  output logic                  done,
  output logic [NV-1:0]         x_opt,
  output logic signed [W-1:0]   e_opt,
  output logic signed [W-1:0]   e_cur,
  output logic [T-1:0]          temp,
  output logic [15:0]           trap_count,
  output logic [31:0]           iter,
  output logic [31:0]           epoch,
  // one-cycle event strobes
  output logic                  ev_downhill,
  output logic                  ev_new_best,
  output logic                  ev_stagnant,
  output logic                  ev_uphill_accept,
  output logic                  ev_uphill_reject,
  output logic                  ev_new_epoch
);

  typedef enum logic [2:0] {M_IDLE, M_REQ, M_WAIT, M_DECIDE, M_PERTURB, M_DONE} mstate_e;

  mstate_e         state;
  logic            first;          // the current evaluation is of x_init
  logic [NV-1:0]   x_o;
  logic [NV-1:0]   x_new;
  logic signed [W-1:0] e_new;
  logic [31:0]     lfsr;
  logic [3:0]      flips_left;

  function automatic logic [31:0] lfsr_next(logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  // Random choices of this cycle.
  logic [15:0]            r_prob;
  logic [15:0]            r_idx;
  logic [$clog2(NV)-1:0]  flip_idx;
  logic [16+$clog2(NV):0] prod;
  assign r_prob   = lfsr[31:16];
  assign r_idx    = lfsr[15:0];
  assign prod     = r_idx * nvars;
  assign flip_idx = prod[16 +: $clog2(NV)];

  // Decision of this iteration.
  logic signed [W-1:0] diff;
  logic is_down, is_stag, up_acc;
  assign diff    = e_new - e_cur;
  assign is_down = e_new < e_cur;
  assign is_stag = !is_down && (diff < eps);
  assign up_acc  = !is_down && !is_stag && (r_prob < 16'(temp));

  logic [15:0] count_nx;
  logic        accept;
  assign accept   = is_down || up_acc;
  assign count_nx = accept ? 16'd0 : trap_count + 16'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= M_IDLE;
      first      <= 1'b0;
      x_o        <= '0;
      x_new      <= '0;
      x_opt      <= '0;
      e_new      <= '0;
      e_cur      <= '0;
      e_opt      <= '0;
      temp       <= '0;
      trap_count <= '0;
      iter       <= '0;
      epoch      <= '0;
      lfsr       <= 32'h1;
      flips_left <= '0;
      done       <= 1'b0;
      {ev_downhill, ev_new_best, ev_stagnant, ev_uphill_accept, ev_uphill_reject, ev_new_epoch} <= '0;
    end else begin
      {ev_downhill, ev_new_best, ev_stagnant, ev_uphill_accept, ev_uphill_reject, ev_new_epoch} <= '0;
      done <= 1'b0;
      if (state != M_IDLE) lfsr <= lfsr_next(lfsr);
      unique case (state)
        M_IDLE: begin
          if (start) begin
            state      <= M_REQ;
            first      <= 1'b1;
            x_new      <= x_init;
            x_o        <= x_init;
            iter       <= '0;
            epoch      <= 32'd1;
            trap_count <= '0;
            temp       <= t0;
            lfsr       <= (seed == 0) ? 32'h1 : seed;
          end
        end
        M_REQ:  state <= M_WAIT;
        M_WAIT: begin
          if (vmv_done) begin
            e_new <= energy;
            if (first) begin
              // energy/input initialisation of the first epoch
              first <= 1'b0;
              e_cur <= energy;
              e_opt <= energy;
              x_opt <= x_new;
              state      <= M_PERTURB;
              flips_left <= nflip;
              x_new      <= x_o;
            end else begin
              state <= M_DECIDE;
            end
          end
        end
        M_DECIDE: begin
          iter <= iter + 1;
          ev_downhill      <= is_down;
          ev_stagnant      <= is_stag;
          ev_uphill_accept <= up_acc;
          ev_uphill_reject <= !is_down && !is_stag && !up_acc;
          // solution after this decision
          begin
            logic [NV-1:0]       xo_n;
            logic signed [W-1:0] eo_n;
            logic [NV-1:0]       xb_n;
            logic signed [W-1:0] eb_n;
            xo_n = accept ? x_new : x_o;
            eo_n = accept ? e_new : e_cur;
            xb_n = x_opt;
            eb_n = e_opt;
            if (is_down && e_new < e_opt) begin
              xb_n = x_new;
              eb_n = e_new;
              ev_new_best <= 1'b1;
            end
            x_opt <= xb_n;
            e_opt <= eb_n;
            if (count_nx > count_max) begin
              // new epoch setup: temperature and trap count reset, restart from the best
              ev_new_epoch <= 1'b1;
              epoch      <= epoch + 1;
              temp       <= t0;
              trap_count <= '0;
              xo_n = xb_n;
              eo_n = eb_n;
            end else begin
              trap_count <= count_nx;
              temp       <= temp - (temp >> tshift);
            end
            x_o   <= xo_n;
            e_cur <= eo_n;
            x_new <= xo_n;
          end
          if (iter + 1 >= max_iter) state <= M_DONE;
          else begin
            state      <= M_PERTURB;
            flips_left <= nflip;
          end
        end
        M_PERTURB: begin
          // one random bit flip per cycle
          if (flips_left == 0) state <= M_REQ;
          else begin
            flips_left <= flips_left - 1;
            if (32'(flip_idx) < 32'(nvars) && !fixed[flip_idx])
              x_new[flip_idx] <= ~x_new[flip_idx];
          end
        end
        M_DONE: begin
          done  <= 1'b1;
          state <= M_IDLE;
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  assign vmv_req = (state == M_REQ);
  assign x_cand  = x_new;
  assign busy    = (state != M_IDLE);

endmodule
