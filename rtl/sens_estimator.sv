// sens_estimator: STALL-model sensitivity of one wavefront for one epoch.
//
// The paper estimates each wavefront's frequency sensitivity (extra
// instructions committed per unit of frequency) as
//     Sens_WF = IPC_WF x T_core,WF
// where the stall time is the time the wavefront sat at s_waitcnt waiting
// for memory and the core time is the rest of the epoch. With IPC taken over
// the whole epoch (instr / cycles) and T_core = core_cycles / f this is
//     sens = instr * core_cycles / (cycles * f)
// in instructions per 100 MHz (f in 100 MHz units). cycles and f depend only
// on the V/f state of the elapsed epoch, so 1/(cycles*f) is a per-state
// fixed-point constant (pcstall_pkg::sens_recip_table) and the datapath is
// one multiply-add chain, no divider.
//
// The paper further normalises the estimate by the wavefront's age
// (scheduling priority under oldest-first scheduling) but does not give the
// formula. Here a wavefront of age rank r (0 = oldest) is scaled by
// (1 + r / 2^AGE_SHIFT): a younger wavefront only issues when older ones
// leave slots, so its measured core time understates how much of its code is
// compute bound. This scaling is this design's own choice. The result is
// rounded and saturated to SENS_W bits, the width of a table entry (the
// paper's table holds 128 entries in 128 bytes).
//
// Purely combinational: sens is valid in the cycle its inputs are.
module sens_estimator
  import pcstall_pkg::*;
#(
  parameter int unsigned STALL_W   = 32,
  parameter int unsigned INSTR_W   = 16,
  parameter int unsigned SENS_W    = 8,     // paper Table I: 1 B per entry
  parameter int unsigned RANK_W    = 6,
  parameter int unsigned AGE_SHIFT = 6,     // assumed
  parameter int unsigned EPOCH_NS  = 1000
) (
  input  logic [INSTR_W-1:0] instr,
  input  logic [STALL_W-1:0] stall,
  input  vf_state_t          state,
  input  logic [RANK_W-1:0]  age_rank,
  output logic [SENS_W-1:0]  sens
);

  localparam state_table_t CYCLES = epoch_cycles_table(EPOCH_NS);
  localparam state_table_t RECIP  = sens_recip_table(EPOCH_NS);
  localparam int unsigned  PW     = INSTR_W + 32 + 32;

  logic [31:0]        cycles;
  logic [31:0]        core;
  logic [PW-1:0]      prod;
  logic [PW+RANK_W:0] scaled;
  logic [PW+RANK_W:0] rounded;

  always_comb begin
    cycles = (state < vf_state_t'(NUM_STATES)) ? CYCLES[state] : CYCLES[NUM_STATES-1];
    // Core time: epoch cycles not spent stalled (never negative).
    if (32'(stall) >= cycles) core = '0;
    else                      core = cycles - 32'(stall);
    // sens with RECIP_SHIFT fraction bits
    prod    = PW'(instr) * PW'(core) *
              PW'((state < vf_state_t'(NUM_STATES)) ? RECIP[state] : RECIP[NUM_STATES-1]);
    // age normalisation before rounding: x (1 + rank / 2^AGE_SHIFT)
    scaled  = (PW+RANK_W+1)'(prod) + (((PW+RANK_W+1)'(prod) * (PW+RANK_W+1)'(age_rank)) >> AGE_SHIFT);
    rounded = (scaled + ((PW+RANK_W+1)'(1) << (RECIP_SHIFT - 1))) >> RECIP_SHIFT;
    sens    = (rounded > (PW+RANK_W+1)'({SENS_W{1'b1}})) ? '1 : SENS_W'(rounded);
  end

endmodule
