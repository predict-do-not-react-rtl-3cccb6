// wf_perf_counters: per-wavefront performance data for the STALL model.
//
// For every wavefront slot of a compute unit the block counts, within the
// current epoch, the cycles the wavefront spends blocked at an s_waitcnt
// instruction (its stall time register; the paper budgets 4 bytes per
// wavefront, hence STALL_W = 32) and the instructions it commits. On the
// last cycle of an epoch (epoch_end) each counter, including that cycle's
// event, is copied to a snapshot register and cleared, so the snapshot holds
// the whole elapsed epoch from the following cycle until the next boundary.
// Counters saturate instead of wrapping.
//
// Interface and timing:
//   wf_stall[i]   1 in a cycle wavefront i is blocked at s_waitcnt
//   wf_commit[i]  1 in a cycle wavefront i commits an instruction
//   epoch_end     last cycle of an epoch
//   stall_snap[i], instr_snap[i]  counts of the last completed epoch
// The stall counter follows the paper; the commit counter width (INSTR_W)
// is this design's choice (a 1 us epoch at 2.2 GHz has 2200 cycles).
module wf_perf_counters #(
  parameter int unsigned NUM_WF  = 40,  // paper Table I: 40 wavefronts per CU
  parameter int unsigned STALL_W = 32,  // paper Table I: 4 B per wavefront
  parameter int unsigned INSTR_W = 16   // assumed
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NUM_WF-1:0]        wf_stall,
  input  logic [NUM_WF-1:0]        wf_commit,
  input  logic                     epoch_end,
  output logic [NUM_WF-1:0][STALL_W-1:0] stall_snap,
  output logic [NUM_WF-1:0][INSTR_W-1:0] instr_snap
);

  logic [NUM_WF-1:0][STALL_W-1:0] stall_cnt;
  logic [NUM_WF-1:0][INSTR_W-1:0] instr_cnt;
  logic [NUM_WF-1:0][STALL_W-1:0] stall_nxt;
  logic [NUM_WF-1:0][INSTR_W-1:0] instr_nxt;

  // Count including this cycle's event, saturating.
  always_comb begin
    for (int i = 0; i < NUM_WF; i++) begin
      stall_nxt[i] = (wf_stall[i] && stall_cnt[i] != '1) ? stall_cnt[i] + 1'b1 : stall_cnt[i];
      instr_nxt[i] = (wf_commit[i] && instr_cnt[i] != '1) ? instr_cnt[i] + 1'b1 : instr_cnt[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall_cnt  <= '0;
      instr_cnt  <= '0;
      stall_snap <= '0;
      instr_snap <= '0;
    end else if (epoch_end) begin
      stall_snap <= stall_nxt;
      instr_snap <= instr_nxt;
      stall_cnt  <= '0;
      instr_cnt  <= '0;
    end else begin
      stall_cnt  <= stall_nxt;
      instr_cnt  <= instr_nxt;
    end
  end

endmodule
