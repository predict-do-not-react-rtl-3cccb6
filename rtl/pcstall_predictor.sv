// pcstall_predictor: PC-based sensitivity predictor of one compute unit.
//
// PCSTALL predicts how many more instructions a compute unit (CU) would
// commit in the coming epoch per unit of extra frequency (its sensitivity)
// from the wavefronts' program counters. GPU kernels are small loops run by
// many wavefronts, so the sensitivity measured for an epoch that began at a
// given PC is a good prediction for the next epoch that begins at that PC,
// in the same or another wavefront. Two mechanisms share one table:
//
// Lookup (before each epoch). At lookup_start the block walks the NUM_WF
// wavefront slots one per cycle, as the paper describes ("one by one at a
// fixed cycle before the start of a time epoch"). Each active wavefront's
// current PC is turned into a table index (PC bits [PC_OFFSET +: IDX_W]),
// the entry is read and, on a hit, added to a running sum. The sum of all
// active wavefronts is the CU sensitivity, sens_cu, signalled by a one-cycle
// sens_cu_valid NUM_WF+1 cycles after lookup_start. A miss (entry never
// written) adds nothing and is counted in lookup_misses.
//
// Update (after each epoch). At epoch_end every slot's starting-PC index
// register is moved to an update copy and reloaded from the current PC, so
// the update copy names the PC at which the elapsed epoch began. From the
// next cycle the block walks the slots one per cycle: the STALL-model
// estimator turns the slot's stall and commit counts of the elapsed epoch
// into a sensitivity, which is written to the entry of the slot's starting
// PC. Slots inactive at the start of the elapsed epoch are skipped. The sum
// of the estimates (est_sum) and of the instructions committed (instr_sum)
// are output with est_valid once all slots are done; the DVFS manager uses
// them to estimate the frequency-independent part of the CU's work.
//
// Follows the paper: PC-indexed table, per-wavefront starting-PC and stall
// registers, lookup with the current PC and update with the starting PC,
// sum over active wavefronts, serial lookup. This design's choices: the
// lookup sum ignores misses; the update is serial too; the starting-PC
// register is double-buffered (40 more bytes than the paper's Table I) so
// the lookup of the next epoch and the update of the last never share it;
// the estimator uses the age rank current during the update.
module pcstall_predictor
  import pcstall_pkg::*;
#(
  parameter int unsigned NUM_WF    = 40,   // paper: 40 wavefronts per CU
  parameter int unsigned PC_W      = 48,   // assumed: GCN program counter width
  parameter int unsigned PC_OFFSET = 4,    // paper: 4 offset bits
  parameter int unsigned ENTRIES   = 128,  // paper: 128 entries
  parameter int unsigned SENS_W    = 8,    // paper: 1 byte per entry
  parameter int unsigned STALL_W   = 32,   // paper: 4 bytes per wavefront
  parameter int unsigned INSTR_W   = 16,   // assumed
  parameter int unsigned AGE_SHIFT = 6,    // assumed
  parameter int unsigned EPOCH_NS  = 1000, // paper: 1 us
  parameter int unsigned IDX_W     = $clog2(ENTRIES),
  parameter int unsigned RANK_W    = $clog2(NUM_WF),
  parameter int unsigned SUM_W     = SENS_W + $clog2(NUM_WF + 1),
  parameter int unsigned ISUM_W    = INSTR_W + $clog2(NUM_WF + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // wavefront state from the compute unit
  input  logic [NUM_WF-1:0]              wf_active,
  input  logic [NUM_WF-1:0][PC_W-1:0]    wf_pc,
  input  logic [NUM_WF-1:0][RANK_W-1:0]  wf_age_rank,
  // epoch timing
  input  logic                           lookup_start,
  input  logic                           epoch_end,
  input  vf_state_t                      elapsed_state,  // state of the epoch ending
  // counters of the elapsed epoch (valid from the cycle after epoch_end)
  input  logic [NUM_WF-1:0][STALL_W-1:0] stall_snap,
  input  logic [NUM_WF-1:0][INSTR_W-1:0] instr_snap,
  // lookup result
  output logic [SUM_W-1:0]               sens_cu,
  output logic                           sens_cu_valid,
  // update result
  output logic [SUM_W-1:0]               est_sum,
  output logic [ISUM_W-1:0]              instr_sum,
  output logic                           est_valid,
  // statistics
  output logic [31:0]                    lookup_hits,
  output logic [31:0]                    lookup_misses,
  output logic [31:0]                    table_writes
);

  localparam int unsigned CNT_W = $clog2(NUM_WF + 1);

  function automatic logic [IDX_W-1:0] pc_index(input logic [PC_W-1:0] pc);
    return pc[PC_OFFSET +: IDX_W];
  endfunction

  // ---------------- table ----------------
  logic              rd_en, rd_hit, wr_en;
  logic [IDX_W-1:0]  rd_idx, wr_idx;
  logic [SENS_W-1:0] rd_data, wr_data;

  sens_table #(.ENTRIES(ENTRIES), .SENS_W(SENS_W), .IDX_W(IDX_W)) u_table (
    .clk, .rst_n,
    .rd_en, .rd_idx, .rd_data, .rd_hit,
    .wr_en, .wr_idx, .wr_data
  );

  // ---------------- starting-PC registers ----------------
  logic [NUM_WF-1:0][IDX_W-1:0] start_idx, upd_idx;
  logic [NUM_WF-1:0]            start_act, upd_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_idx <= '0;
      upd_idx   <= '0;
      start_act <= '0;
      upd_act   <= '0;
    end else if (epoch_end) begin
      upd_idx   <= start_idx;
      upd_act   <= start_act;
      start_act <= wf_active;
      for (int i = 0; i < NUM_WF; i++) start_idx[i] <= pc_index(wf_pc[i]);
    end
  end

  // ---------------- lookup ----------------
  logic             lk_busy;
  logic [CNT_W-1:0] lk_i;
  logic             lk_pend;     // a read was issued last cycle
  logic [SUM_W-1:0] lk_acc, lk_acc_nxt;
  logic             lk_issue;

  assign lk_issue = lk_busy && (lk_i < CNT_W'(NUM_WF));
  assign rd_en    = lk_issue && wf_active[lk_i];
  assign rd_idx   = pc_index(wf_pc[lk_i]);
  assign lk_acc_nxt = (lk_pend && rd_hit) ? lk_acc + SUM_W'(rd_data) : lk_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_busy       <= 1'b0;
      lk_i          <= '0;
      lk_pend       <= 1'b0;
      lk_acc        <= '0;
      sens_cu       <= '0;
      sens_cu_valid <= 1'b0;
      lookup_hits   <= '0;
      lookup_misses <= '0;
    end else begin
      sens_cu_valid <= 1'b0;
      lk_pend       <= rd_en;
      if (lk_pend) begin
        if (rd_hit) lookup_hits   <= lookup_hits + 32'd1;
        else        lookup_misses <= lookup_misses + 32'd1;
      end
      if (lookup_start) begin
        lk_busy <= 1'b1;
        lk_i    <= '0;
        lk_acc  <= '0;
      end else if (lk_busy) begin
        lk_acc <= lk_acc_nxt;
        if (lk_issue) begin
          lk_i <= lk_i + 1'b1;
        end else begin
          // all slots issued; lk_acc_nxt includes the last read
          lk_busy       <= 1'b0;
          sens_cu       <= lk_acc_nxt;
          sens_cu_valid <= 1'b1;
        end
      end
    end
  end

  // ---------------- update ----------------
  logic              up_busy;
  logic [CNT_W-1:0]  up_i;
  vf_state_t         up_state;
  logic [SENS_W-1:0] est;
  logic [SUM_W-1:0]  up_acc;
  logic [ISUM_W-1:0] up_iacc;
  logic              up_do;

  sens_estimator #(
    .STALL_W(STALL_W), .INSTR_W(INSTR_W), .SENS_W(SENS_W),
    .RANK_W(RANK_W), .AGE_SHIFT(AGE_SHIFT), .EPOCH_NS(EPOCH_NS)
  ) u_est (
    .instr   (instr_snap[up_i]),
    .stall   (stall_snap[up_i]),
    .state   (up_state),
    .age_rank(wf_age_rank[up_i]),
    .sens    (est)
  );

  assign up_do   = up_busy && upd_act[up_i];
  assign wr_en   = up_do;
  assign wr_idx  = upd_idx[up_i];
  assign wr_data = est;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_busy      <= 1'b0;
      up_i         <= '0;
      up_state     <= '0;
      up_acc       <= '0;
      up_iacc      <= '0;
      est_sum      <= '0;
      instr_sum    <= '0;
      est_valid    <= 1'b0;
      table_writes <= '0;
    end else begin
      est_valid <= 1'b0;
      if (epoch_end) begin
        up_busy  <= 1'b1;
        up_i     <= '0;
        up_state <= elapsed_state;
        up_acc   <= '0;
        up_iacc  <= '0;
      end else if (up_busy) begin
        if (up_do) table_writes <= table_writes + 32'd1;
        if (up_i == CNT_W'(NUM_WF - 1)) begin
          up_busy   <= 1'b0;
          est_valid <= 1'b1;
          est_sum   <= up_do ? up_acc + SUM_W'(est) : up_acc;
          instr_sum <= up_do ? up_iacc + ISUM_W'(instr_snap[up_i]) : up_iacc;
        end else begin
          up_i <= up_i + 1'b1;
          if (up_do) begin
            up_acc  <= up_acc + SUM_W'(est);
            up_iacc <= up_iacc + ISUM_W'(instr_snap[up_i]);
          end
        end
      end
    end
  end

  // The epoch timer must leave each walk time to finish.
  a_lookup_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    lookup_start |-> !lk_busy);
  a_update_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    epoch_end |-> !up_busy);

endmodule
