// pcstall_pkg: types, constants and small pure functions shared by the
// PCSTALL fine-grain DVFS predictor and its DVFS manager.
//
// V/f states: a domain runs at one of NUM_STATES frequencies, state k being
// (F_MIN_UNITS + k) * 100 MHz, i.e. 1.3 GHz .. 2.2 GHz in 100 MHz steps for
// the ten states the paper evaluates. All frequencies inside the design are
// kept in these "100 MHz units" (13 .. 22), so a sensitivity is expressed in
// instructions per epoch per 100 MHz.
//
// Epochs have a fixed length in time (EPOCH_NS). The logic runs on the
// domain's own clock, so the length of an epoch in cycles depends on the
// state: cycles = units * 100 MHz * EPOCH_NS = units * EPOCH_NS / 10.
//
// PC index: the table is indexed by PC bits [PC_OFFSET +: IDX_W]; with the
// paper's 4 offset bits and 128 entries one entry covers 16 bytes, about four
// instructions. Frequency range, table size and offset follow the paper; the
// unit conventions and the fixed-point reciprocal used by the estimator are
// this design's own.
package pcstall_pkg;

  // ---- V/f states (paper: 10 states, 1.3-2.2 GHz, 100 MHz steps) ----
  localparam int unsigned NUM_STATES  = 10;
  localparam int unsigned STATE_W     = 4;
  localparam int unsigned F_MIN_UNITS = 13;   // 1.3 GHz in 100 MHz units
  localparam int unsigned F_UNITS_W   = 5;    // holds 13 .. 22

  typedef logic [STATE_W-1:0] vf_state_t;

  // Objective the DVFS manager minimises (paper Sec 5.2 and 6.4).
  typedef enum logic [1:0] {
    OBJ_EDP        = 2'd0,  // energy x delay
    OBJ_ED2P       = 2'd1,  // energy x delay^2
    OBJ_ENERGY_LIM = 2'd2   // least energy within a performance-loss limit
  } objective_t;

  // Fixed-point shift of the per-state reciprocal used by the estimator.
  localparam int unsigned RECIP_SHIFT = 28;

  // Frequency of state s in 100 MHz units.
  function automatic logic [F_UNITS_W-1:0] state_units(input vf_state_t s);
    return F_UNITS_W'(F_MIN_UNITS + 32'(s));
  endfunction

  // Cycles in one fixed-time epoch of length epoch_ns at state s.
  function automatic logic [31:0] epoch_cycles(input vf_state_t s,
                                               input int unsigned epoch_ns);
    return 32'((F_MIN_UNITS + 32'(s)) * epoch_ns / 10);
  endfunction

  // round(2^RECIP_SHIFT / (units * epoch_cycles)): turns
  // instr * core_cycles into instr * core_cycles / (cycles * f).
  function automatic logic [31:0] sens_recip(input vf_state_t s,
                                             input int unsigned epoch_ns);
    longint unsigned den;
    den = 64'(F_MIN_UNITS + 32'(s)) * 64'(epoch_cycles(s, epoch_ns));
    return 32'(((64'd1 << RECIP_SHIFT) + den / 2) / den);
  endfunction

  // Per-state tables, built at elaboration so that no divider is synthesized.
  typedef logic [31:0] state_table_t [NUM_STATES];

  function automatic state_table_t epoch_cycles_table(input int unsigned epoch_ns);
    state_table_t t;
    for (int s = 0; s < NUM_STATES; s++) t[s] = epoch_cycles(vf_state_t'(s), epoch_ns);
    return t;
  endfunction

  function automatic state_table_t sens_recip_table(input int unsigned epoch_ns);
    state_table_t t;
    for (int s = 0; s < NUM_STATES; s++) t[s] = sens_recip(vf_state_t'(s), epoch_ns);
    return t;
  endfunction

endpackage
