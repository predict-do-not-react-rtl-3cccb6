// dvfs_freq_selector: frequency decision of the local DVFS manager.
//
// The paper models the instructions a domain commits in a fixed-time epoch
// as linear in frequency, I_f = I_0 + S*f, where S is the sensitivity that
// PCSTALL predicts. Given S, the frequency-independent work I_0 and a
// relative power figure for each V/f state, this block evaluates every
// allowed state and picks the one that minimises the chosen objective:
//   OBJ_EDP        min P_k / I_k^2      (energy x delay per unit of work)
//   OBJ_ED2P       min P_k / I_k^3      (energy x delay^2 per unit of work)
//   OBJ_ENERGY_LIM min P_k / I_k  among states with
//                  I_k >= I_max * (1 - perf_loss_q8/256), I_max the work at
//                  the highest allowed state (the paper's fixed-performance
//                  energy savings with a 5 % or 10 % degradation limit)
// For a fixed amount of work over epochs of length T, energy is P*T*W/I and
// delay T*W/I, which gives the ratios above. Ratios are compared by
// cross-multiplication, so there is no divider; ties keep the lower state.
//
// The allowed range [min_state, max_state] is set by a higher-level power
// manager (paper Sec 5.4). The power per state comes from a power model the
// paper does not give, so it is an input (any consistent scale).
//
// Timing: start is a one-cycle pulse; inputs are sampled with it. One state
// is evaluated per cycle and done pulses with sel_state valid
// (max_state - min_state + 1) cycles after the edge that samples start. The objectives, state range
// and linear model follow the paper; the evaluation order and the
// cross-multiplied comparison are this design's own.
module dvfs_freq_selector
  import pcstall_pkg::*;
#(
  parameter int unsigned S_W  = 14,  // sensitivity sum width
  parameter int unsigned I0_W = 22,  // base-work width
  parameter int unsigned P_W  = 16   // relative power width
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [S_W-1:0]                  sens,
  input  logic [I0_W-1:0]                 i0,
  input  logic [NUM_STATES-1:0][P_W-1:0]  power,
  input  objective_t                      objective,
  input  logic [7:0]                      perf_loss_q8,
  input  vf_state_t                       min_state,
  input  vf_state_t                       max_state,
  output vf_state_t                       sel_state,
  output logic                            done,
  output logic                            busy
);

  localparam int unsigned I_W = ((I0_W > S_W + F_UNITS_W) ? I0_W : S_W + F_UNITS_W) + 1;
  localparam int unsigned C_W = P_W + 3 * I_W;

  logic [S_W-1:0]  s_q;
  logic [I0_W-1:0] i0_q;
  objective_t      obj_q;
  logic [7:0]      loss_q;
  vf_state_t       k, k_last;
  logic            have_best;
  vf_state_t       best_k;
  logic [I_W-1:0]  best_i;
  logic [P_W-1:0]  best_p;
  logic [I_W-1:0]  imax;

  logic [I_W-1:0]  ik;
  logic [P_W-1:0]  pk;
  logic [C_W-1:0]  lhs, rhs;
  logic            better, feasible;
  vf_state_t       hi_clamped, lo_clamped;

  function automatic logic [I_W-1:0] work(input logic [I0_W-1:0] b,
                                          input logic [S_W-1:0] s,
                                          input vf_state_t st);
    return I_W'(b) + I_W'(s) * I_W'(state_units(st));
  endfunction

  function automatic logic [C_W-1:0] pow_n(input logic [I_W-1:0] x, input int unsigned n);
    logic [C_W-1:0] r;
    r = C_W'(x);
    for (int j = 1; j < 3; j++) if (j < n) r = r * C_W'(x);
    return r;
  endfunction

  always_comb begin
    hi_clamped = (max_state > vf_state_t'(NUM_STATES - 1)) ? vf_state_t'(NUM_STATES - 1) : max_state;
    lo_clamped = (min_state > hi_clamped) ? hi_clamped : min_state;
  end

  always_comb begin
    int unsigned n;
    ik = work(i0_q, s_q, k);
    pk = power[k];
    n  = (obj_q == OBJ_EDP) ? 2 : (obj_q == OBJ_ED2P) ? 3 : 1;
    // candidate better if pk / ik^n < best_p / best_i^n
    lhs = C_W'(pk) * pow_n(best_i, n);
    rhs = C_W'(best_p) * pow_n(ik, n);
    better = lhs < rhs;
    feasible = (obj_q != OBJ_ENERGY_LIM) ||
               ((C_W'(ik) << 8) >= C_W'(imax) * C_W'(9'd256 - 9'(loss_q)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      sel_state <= vf_state_t'(4);
      s_q       <= '0;
      i0_q      <= '0;
      obj_q     <= OBJ_ED2P;
      loss_q    <= '0;
      k         <= '0;
      k_last    <= '0;
      have_best <= 1'b0;
      best_k    <= '0;
      best_i    <= '0;
      best_p    <= '0;
      imax      <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy      <= 1'b1;
        s_q       <= sens;
        i0_q      <= i0;
        obj_q     <= objective;
        loss_q    <= perf_loss_q8;
        k         <= lo_clamped;
        k_last    <= hi_clamped;
        have_best <= 1'b0;
        imax      <= work(i0, sens, hi_clamped);
      end else if (busy) begin
        if (feasible && (!have_best || better)) begin
          have_best <= 1'b1;
          best_k    <= k;
          best_i    <= ik;
          best_p    <= pk;
        end
        if (k == k_last) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          sel_state <= (feasible && (!have_best || better)) ? k : best_k;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

endmodule
