// pcstall_dvfs_domain: one fine-grain V/f domain with PCSTALL-driven DVFS.
//
// The domain holds N_CU compute units (one in the paper's main
// configuration; up to 32 in its scalability study) that share one supply
// and clock. Every fixed-time epoch (1 us by default) the domain predicts
// how sensitive the coming epoch will be to frequency and picks the V/f
// state for it, instead of reacting to the epoch that just ended:
//
//   epoch_timer         epochs of fixed duration, lookup LOOKUP_LEAD cycles
//                       before each boundary
//   wf_perf_counters    per CU: stall and commit counts of every wavefront
//   pcstall_predictor   per CU: PC-indexed table; lookup -> CU sensitivity,
//                       update -> table entries of the epoch just ended
//   domain aggregator   (here) sum of the CU sensitivities, the domain
//                       sensitivity S; and the base work
//                       I_0 = max(0, I_last - S_est * f_last) of the last
//                       completed epoch, from the instructions it committed
//                       and the sum of its estimated sensitivities
//   dvfs_freq_selector  state that minimises the objective for
//                       I_f = I_0 + S*f; applied at the next boundary
//
// Timeline of one epoch n (cycles before its end counted by the timer):
//   start of n      update walk of epoch n-1 (NUM_WF cycles), then I_0
//   LOOKUP_LEAD     lookup walk with the wavefronts' current PCs
//   +NUM_WF+2       domain S ready, selector starts (range+1 cycles)
//   end of n        vf_state <= selected state; the timer reloads for it
//
// The PC table can be instantiated once per CU (default) or shared by all
// CUs of the domain (SHARED_TABLE=1), as the paper allows. A shared table
// is walked serially over all N_CU*NUM_WF slots, CU 0 first, so its lookup
// takes N_CU*NUM_WF+1 cycles and LOOKUP_LEAD must be raised to at least
// N_CU*NUM_WF+16 (checked at elaboration, as is the room for the update
// walk: at most 16 CUs share a table at 1 us); when two slots started at the
// same entry the higher slot's estimate is kept. Its hit, miss and write
// counts appear in entry 0 of the per-CU statistics. The serial walk is
// this design's choice; it keeps one read and one write port.
//
// The compute units, the integrated voltage regulator with its clock
// generator, the power model and the higher-level power manager are outside
// this block: wavefront signals come in as ports, the selected state goes
// out on vf_state, per-state power, objective and state range come in.
// The I_0 estimate and the reset state (1.7 GHz, the paper's static
// baseline) are this design's choices; the rest of the flow follows the
// paper.
module pcstall_dvfs_domain
  import pcstall_pkg::*;
#(
  parameter int unsigned N_CU        = 1,    // paper: one CU per V/f domain
  parameter int unsigned NUM_WF      = 40,   // paper: 40 wavefronts per CU
  parameter int unsigned PC_W        = 48,   // assumed
  parameter int unsigned PC_OFFSET   = 4,    // paper
  parameter int unsigned ENTRIES     = 128,  // paper
  parameter int unsigned SENS_W      = 8,    // paper (1 byte per entry)
  parameter int unsigned STALL_W     = 32,   // paper (4 bytes per wavefront)
  parameter int unsigned INSTR_W     = 16,   // assumed
  parameter int unsigned AGE_SHIFT   = 6,    // assumed
  parameter int unsigned EPOCH_NS    = 1000, // paper: 1 us
  parameter int unsigned LOOKUP_LEAD = 64,   // assumed
  parameter int unsigned P_W         = 16,   // assumed
  parameter bit          SHARED_TABLE = 1'b0, // paper: one table per CU or shared
  parameter int unsigned RANK_W      = $clog2(NUM_WF),
  parameter int unsigned CU_SUM_W    = SENS_W + $clog2(NUM_WF + 1),
  parameter int unsigned DOM_SUM_W   = CU_SUM_W + $clog2(N_CU + 1),
  parameter int unsigned ISUM_W      = INSTR_W + $clog2(NUM_WF + 1) + $clog2(N_CU + 1)
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  // from the compute units
  input  logic [N_CU-1:0][NUM_WF-1:0]               wf_active,
  input  logic [N_CU-1:0][NUM_WF-1:0][PC_W-1:0]     wf_pc,
  input  logic [N_CU-1:0][NUM_WF-1:0][RANK_W-1:0]   wf_age_rank,
  input  logic [N_CU-1:0][NUM_WF-1:0]               wf_stall,
  input  logic [N_CU-1:0][NUM_WF-1:0]               wf_commit,
  // from the higher-level power manager / power model
  input  logic [NUM_STATES-1:0][P_W-1:0]            power,
  input  objective_t                                objective,
  input  logic [7:0]                                perf_loss_q8,
  input  vf_state_t                                 min_state,
  input  vf_state_t                                 max_state,
  // to the voltage regulator and clock generator
  output vf_state_t                                 vf_state,
  output logic                                      epoch_end,
  output logic [31:0]                               epoch_count,
  // observation
  output logic [DOM_SUM_W-1:0]                      sens_domain,
  output logic [ISUM_W-1:0]                         base_work,
  output logic [31:0]                               decisions,
  output logic [31:0]                               state_changes,
  output logic [N_CU-1:0][31:0]                     lookup_hits,
  output logic [N_CU-1:0][31:0]                     lookup_misses,
  output logic [N_CU-1:0][31:0]                     table_writes
);

  localparam int unsigned I0_W = ISUM_W;

  logic      lookup_start;
  vf_state_t next_state;
  vf_state_t last_state;   // state of the last completed epoch

  epoch_timer #(.EPOCH_NS(EPOCH_NS), .LOOKUP_LEAD(LOOKUP_LEAD),
                .RESET_STATE(vf_state_t'(4))) u_timer (
    .clk, .rst_n,
    .next_state  (next_state),
    .lookup_start(lookup_start),
    .epoch_end   (epoch_end),
    .epoch_count (epoch_count)
  );

  // ---------------- counters and predictors ----------------
  // One predictor per CU, or with SHARED_TABLE one predictor whose walks
  // cover all N_CU*NUM_WF slots (CU 0 first) and whose table all CUs share.
  localparam int unsigned N_PRED      = SHARED_TABLE ? 1 : N_CU;
  localparam int unsigned PRED_WF     = SHARED_TABLE ? N_CU * NUM_WF : NUM_WF;
  localparam int unsigned PRED_RANK_W = $clog2(PRED_WF);
  localparam int unsigned PRED_SUM_W  = SENS_W + $clog2(PRED_WF + 1);
  localparam int unsigned PRED_ISUM_W = INSTR_W + $clog2(PRED_WF + 1);

  // The lookup walk, the domain sum and the state search must all end
  // before the boundary, and the update walk before the next lookup.
  initial begin
    assert (LOOKUP_LEAD >= PRED_WF + NUM_STATES + 6)
      else $error("LOOKUP_LEAD %0d too short for %0d lookups", LOOKUP_LEAD, PRED_WF);
    assert (PRED_WF + 1 + LOOKUP_LEAD < epoch_cycles(vf_state_t'(0), EPOCH_NS))
      else $error("%0d slots do not fit two walks in the shortest epoch", PRED_WF);
  end

  logic [N_PRED-1:0][PRED_WF-1:0]                   p_active, p_stall, p_commit;
  logic [N_PRED-1:0][PRED_WF-1:0][PC_W-1:0]         p_pc;
  logic [N_PRED-1:0][PRED_WF-1:0][PRED_RANK_W-1:0]  p_rank;
  logic [N_PRED-1:0][PRED_SUM_W-1:0]                sens_cu, est_sum;
  logic [N_PRED-1:0][PRED_ISUM_W-1:0]               instr_sum;
  logic [N_PRED-1:0]                                sens_cu_valid, est_valid;

  // Same bits, regrouped: slot w of CU c is slot c*NUM_WF+w when shared.
  assign p_active = wf_active;
  assign p_stall  = wf_stall;
  assign p_commit = wf_commit;
  assign p_pc     = wf_pc;
  always_comb
    for (int c = 0; c < N_CU; c++)
      for (int w = 0; w < NUM_WF; w++)
        p_rank[(c * NUM_WF + w) / PRED_WF][(c * NUM_WF + w) % PRED_WF]
          = PRED_RANK_W'(wf_age_rank[c][w]);

  for (genvar c = 0; c < N_PRED; c++) begin : g_cu
    logic [PRED_WF-1:0][STALL_W-1:0] stall_snap;
    logic [PRED_WF-1:0][INSTR_W-1:0] instr_snap;

    wf_perf_counters #(.NUM_WF(PRED_WF), .STALL_W(STALL_W), .INSTR_W(INSTR_W)) u_cnt (
      .clk, .rst_n,
      .wf_stall  (p_stall[c]),
      .wf_commit (p_commit[c]),
      .epoch_end (epoch_end),
      .stall_snap(stall_snap),
      .instr_snap(instr_snap)
    );

    pcstall_predictor #(
      .NUM_WF(PRED_WF), .PC_W(PC_W), .PC_OFFSET(PC_OFFSET), .ENTRIES(ENTRIES),
      .SENS_W(SENS_W), .STALL_W(STALL_W), .INSTR_W(INSTR_W),
      .AGE_SHIFT(AGE_SHIFT), .EPOCH_NS(EPOCH_NS)
    ) u_pred (
      .clk, .rst_n,
      .wf_active    (p_active[c]),
      .wf_pc        (p_pc[c]),
      .wf_age_rank  (p_rank[c]),
      .lookup_start (lookup_start),
      .epoch_end    (epoch_end),
      .elapsed_state(vf_state),
      .stall_snap   (stall_snap),
      .instr_snap   (instr_snap),
      .sens_cu      (sens_cu[c]),
      .sens_cu_valid(sens_cu_valid[c]),
      .est_sum      (est_sum[c]),
      .instr_sum    (instr_sum[c]),
      .est_valid    (est_valid[c]),
      .lookup_hits  (lookup_hits[c]),
      .lookup_misses(lookup_misses[c]),
      .table_writes (table_writes[c])
    );
  end
  // With a shared table its statistics appear in entry 0.
  for (genvar c = N_PRED; c < N_CU; c++) begin : g_no_table
    assign lookup_hits[c]   = '0;
    assign lookup_misses[c] = '0;
    assign table_writes[c]  = '0;
  end

  // ---------------- domain aggregator ----------------
  logic [DOM_SUM_W-1:0] sens_sum, est_dom;
  logic [ISUM_W-1:0]    instr_dom;
  logic [ISUM_W+DOM_SUM_W+F_UNITS_W:0] est_work;
  logic                 sel_start;

  always_comb begin
    sens_sum  = '0;
    est_dom   = '0;
    instr_dom = '0;
    for (int c = 0; c < N_PRED; c++) begin
      sens_sum  = sens_sum  + DOM_SUM_W'(sens_cu[c]);
      est_dom   = est_dom   + DOM_SUM_W'(est_sum[c]);
      instr_dom = instr_dom + ISUM_W'(instr_sum[c]);
    end
    est_work = ($bits(est_work))'(est_dom) * ($bits(est_work))'(state_units(last_state));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sens_domain <= '0;
      base_work   <= '0;
      sel_start   <= 1'b0;
      last_state  <= vf_state_t'(4);
    end else begin
      sel_start <= sens_cu_valid[0];
      if (sens_cu_valid[0]) sens_domain <= sens_sum;
      if (epoch_end) last_state <= vf_state;
      if (est_valid[0])
        base_work <= (est_work >= ($bits(est_work))'(instr_dom)) ? '0
                   : ISUM_W'(($bits(est_work))'(instr_dom) - est_work);
    end
  end

  // ---------------- frequency decision ----------------
  vf_state_t sel_state;
  logic      sel_done, sel_busy;

  dvfs_freq_selector #(.S_W(DOM_SUM_W), .I0_W(I0_W), .P_W(P_W)) u_sel (
    .clk, .rst_n,
    .start       (sel_start),
    .sens        (sens_domain),
    .i0          (base_work),
    .power       (power),
    .objective   (objective),
    .perf_loss_q8(perf_loss_q8),
    .min_state   (min_state),
    .max_state   (max_state),
    .sel_state   (sel_state),
    .done        (sel_done),
    .busy        (sel_busy)
  );

  // The decided state waits in next_state and takes effect at the boundary.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_state    <= vf_state_t'(4);
      vf_state      <= vf_state_t'(4);
      decisions     <= '0;
      state_changes <= '0;
    end else begin
      if (sel_done) begin
        next_state <= sel_state;
        decisions  <= decisions + 32'd1;
      end
      if (epoch_end) begin
        vf_state <= next_state;
        if (next_state != vf_state) state_changes <= state_changes + 32'd1;
      end
    end
  end

  a_decision_in_time: assert property (@(posedge clk) disable iff (!rst_n)
    epoch_end |-> !sel_busy && !sel_start);

endmodule
