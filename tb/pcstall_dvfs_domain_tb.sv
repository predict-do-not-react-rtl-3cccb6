// pcstall_dvfs_domain_tb: end-to-end run of one V/f domain at its default
// size (one CU, 40 wavefront slots, 128-entry table, 1 us epochs).
//
// A small compute-unit model drives the wavefront ports. Every wavefront
// loops over the same 160-instruction kernel (4-byte instructions); the
// first half has an s_waitcnt every 16 instructions with a 150 ns memory
// latency (memory bound), the second half one in 80 instructions with
// 40 ns (compute bound). Memory latency is fixed in time, so a wait lasts
// more cycles at a higher frequency. At most 4 ready wavefronts commit per
// cycle, oldest first (slot 0 is the oldest, its age rank is its slot).
//
// The bench keeps its own model of the whole flow: per-wavefront counts,
// starting PCs, the table contents, the lookup walk (slot i read i+1 cycles
// after the lookup point, 64 cycles before the boundary), the base work
// I_0 and a real-number search for the best state. Each epoch it checks
// the epoch length in cycles against the state (fixed 1 us), the domain
// sensitivity, the base work and the state applied at the boundary.
//
// Phases: ED2P over the full range, then EDP, then least energy within a
// 10 % performance-loss limit, then ED2P with the range capped at state 5;
// ten slots are idle for four epochs. Power per state is
// 0.8 + f * V^2 (V from 0.85 V to 1.00 V), a test curve with a static part.
// It counts table hits, misses and
// writes, rises and falls of the state, decisions per objective, capped
// decisions and epochs with idle slots; any of these that never happens is
// a failure.
module pcstall_dvfs_domain_tb;
  import pcstall_pkg::*;

  localparam int unsigned NW       = 40;
  localparam int unsigned PROG_LEN = 160;
  localparam int unsigned ISSUE_W  = 4;
  localparam int unsigned EPOCHS   = 34;
  localparam int unsigned LEAD     = 64;
  localparam int unsigned NC       = 1;   // compute units in the domain
  localparam int unsigned SD_W     = 14 + $clog2(NC + 1);
  localparam int unsigned BW_W     = 22 + $clog2(NC + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NC-1:0][NW-1:0]        wf_active, wf_stall, wf_commit;
  logic [NC-1:0][NW-1:0][47:0]  wf_pc;
  logic [NC-1:0][NW-1:0][5:0]   wf_age_rank;
  logic [NUM_STATES-1:0][15:0] power;
  objective_t                objective;
  logic [7:0]                perf_loss_q8;
  vf_state_t                 min_state, max_state, vf_state;
  logic                      epoch_end;
  logic [31:0]               epoch_count, decisions, state_changes;
  logic [SD_W-1:0]           sens_domain;
  logic [BW_W-1:0]           base_work;
  logic [NC-1:0][31:0]       lookup_hits, lookup_misses, table_writes;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pcstall_dvfs_domain dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (EPOCHS * 2300 + 5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference helpers ----------------
  function automatic int unsigned ref_est(int unsigned instr, int unsigned stall,
                                          int unsigned st, int unsigned rank);
    longint unsigned f, cyc, core, recip;
    logic [127:0] p;
    f = 13 + st; cyc = f * 100;
    core = (stall >= cyc) ? 0 : cyc - stall;
    recip = ((64'd1 << 28) + (f * cyc) / 2) / (f * cyc);
    p = 128'(instr) * 128'(core) * 128'(recip);
    p = p + ((p * 128'(rank)) >> 6);
    p = (p + (128'd1 << 27)) >> 28;
    return (p > 255) ? 255 : int'(p);
  endfunction

  function automatic real cost(int unsigned k, int unsigned s, int unsigned b, objective_t o);
    real ik, p;
    ik = real'(b) + real'(s) * (13 + k);
    p  = real'(power[k]);
    if (ik == 0.0) return 1.0e300;
    case (o)
      OBJ_EDP:  return p / (ik * ik);
      OBJ_ED2P: return p / (ik * ik * ik);
      default:  return p / ik;
    endcase
  endfunction

  function automatic bit feasible(int unsigned k, int unsigned hi, int unsigned s, int unsigned b);
    longint unsigned ik, im;
    ik = longint'(b) + longint'(s) * (13 + k);
    im = longint'(b) + longint'(s) * (13 + hi);
    return (objective != OBJ_ENERGY_LIM) || (ik * 256 >= im * (256 - perf_loss_q8));
  endfunction

  function automatic int unsigned best_state(int unsigned s, int unsigned b,
                                             int unsigned lo, int unsigned hi);
    real bc = 1.0e301, c;
    int unsigned best = lo;
    for (int k = lo; k <= hi; k++)
      if (feasible(k, hi, s, b)) begin
        c = cost(k, s, b, objective);
        if (c < bc) begin bc = c; best = k; end
      end
    return best;
  endfunction

  function automatic bit is_wait(int unsigned off);
    return (off < PROG_LEN / 2) ? (off % 16 == 15) : (off % 80 == 79);
  endfunction

  // ---------------- compute-unit model state ----------------
  int unsigned off [NC][NW];
  int unsigned stall_left [NC][NW];

  // ---------------- reference predictor state ----------------
  logic [7:0]  t_mem [NC][128];
  bit          t_val [NC][128];
  int unsigned cnt_s [NC][NW], cnt_i [NC][NW];
  int unsigned start_idx [NC][NW];
  bit          start_act [NC][NW];
  int unsigned ref_cnt, cur_state, exp_next, ref_base, lk_pos, lk_sum, exp_sens;
  bit          lk_on;
  bit          verbose = 0;

  // mechanism counters
  int n_up = 0, n_down = 0, n_cap = 0, n_idle = 0;
  int n_obj [3];

  initial begin
    int unsigned e = 0, len = 0, ep_len;
    int unsigned lo, hi, issued, got, unc;
    for (int k = 0; k < NUM_STATES; k++) begin
      real v, f;
      f = 1.3 + 0.1 * k;
      v = 0.85 + 0.15 * k / 9.0;
      power[k] = 16'($rtoi((0.8 + f * v * v) * 10000.0));
    end
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < 128; i++) t_val[c][i] = 0;
      for (int i = 0; i < NW; i++) begin
        off[c][i] = (i * 7 + c * 13) % PROG_LEN; stall_left[c][i] = 0;
        cnt_s[c][i] = 0; cnt_i[c][i] = 0; start_idx[c][i] = 0; start_act[c][i] = 0;
        wf_age_rank[c][i] = 6'(i);
      end
    end
    for (int o = 0; o < 3; o++) n_obj[o] = 0;
    objective = OBJ_ED2P; perf_loss_q8 = 8'd26; min_state = 0; max_state = 9;
    wf_active = '1; wf_stall = '0; wf_commit = '0;
    cur_state = 4; exp_next = 4; ref_base = 0; lk_on = 0; exp_sens = 0;
    ref_cnt = 1700 - 1;
    for (int c = 0; c < NC; c++)
      for (int i = 0; i < NW; i++) wf_pc[c][i] = 48'h40_1000 + 48'(off[c][i] * 4);
    verbose = $test$plusargs("verbose");
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    while (e < EPOCHS) begin
      // ---- this cycle's wavefront activity (inputs for the next edge) ----
      for (int c = 0; c < NC; c++) begin
        issued = 0;
        for (int i = 0; i < NW; i++) begin
          wf_stall[c][i] = 0; wf_commit[c][i] = 0;
          if (wf_active[c][i]) begin
            if (stall_left[c][i] > 0) begin
              wf_stall[c][i] = 1;
              stall_left[c][i]--;
            end else if (issued < ISSUE_W) begin
              wf_commit[c][i] = 1;
              issued++;
            end
          end
          wf_pc[c][i] = 48'h40_1000 + 48'(off[c][i] * 4);
          cnt_s[c][i] += wf_stall[c][i];
          cnt_i[c][i] += wf_commit[c][i];
        end
      end

      // ---- reference lookup walk: slot lk_pos read on this edge ----
      if (lk_on) begin
        for (int c = 0; c < NC; c++)
          if (wf_active[c][lk_pos] && t_val[c][wf_pc[c][lk_pos][10:4]])
            lk_sum += t_mem[c][wf_pc[c][lk_pos][10:4]];
        lk_pos++;
        if (lk_pos == NW) begin
          lk_on = 0;
          exp_sens = lk_sum;
          lo = min_state; hi = (max_state > 9) ? 9 : max_state;
          if (lo > hi) lo = hi;
          exp_next = best_state(exp_sens, ref_base, lo, hi);
          unc = best_state(exp_sens, ref_base, 0, 9);
          if (unc > hi || unc < lo) n_cap++;
          if (verbose) $display("epoch %0d: S=%0d I0=%0d obj=%0d -> state %0d (unlimited %0d)",
                                e, exp_sens, ref_base, objective, exp_next, unc);
          n_obj[objective]++;
        end
      end
      if (ref_cnt == LEAD) begin lk_on = 1; lk_pos = 0; lk_sum = 0; end

      len++;
      check(epoch_end == (ref_cnt == 0), $sformatf("epoch %0d: boundary at cycle %0d", e, len));

      if (ref_cnt == 0) begin
        int unsigned est_tot, ins_tot, w;
        longint signed b;
        est_tot = 0; ins_tot = 0;
        // expected outputs at the boundary
        check(sens_domain == SD_W'(exp_sens),
              $sformatf("epoch %0d: sens_domain %0d expected %0d", e, sens_domain, exp_sens));
        ep_len = (13 + cur_state) * 100;
        check(len == ep_len, $sformatf("epoch %0d: %0d cycles at state %0d", e, len, cur_state));
        // update: starting PCs of the elapsed epoch, counts of the elapsed epoch
        for (int c = 0; c < NC; c++)
          for (int i = 0; i < NW; i++) begin
            if (start_act[c][i]) begin
              w = ref_est(cnt_i[c][i], cnt_s[c][i], cur_state, i);
              t_mem[c][start_idx[c][i]] = 8'(w); t_val[c][start_idx[c][i]] = 1;
              est_tot += w; ins_tot += cnt_i[c][i];
            end
            start_idx[c][i] = int'(wf_pc[c][i][10:4]);
            start_act[c][i] = wf_active[c][i];
            cnt_s[c][i] = 0; cnt_i[c][i] = 0;
          end
        b = longint'(ins_tot) - longint'(est_tot) * (13 + cur_state);
        ref_base = (b < 0) ? 0 : int'(b);
        // state change at the boundary
        if (exp_next > cur_state) n_up++;
        if (exp_next < cur_state) n_down++;
        @(posedge clk); #1;
        check(vf_state == vf_state_t'(exp_next),
              $sformatf("epoch %0d: state %0d expected %0d (S=%0d)", e, vf_state, exp_next, exp_sens));
        cur_state = exp_next;
        ref_cnt = (13 + cur_state) * 100 - 1;
        len = 0;
        e++;
        // scenario for the next epoch
        if (e == 10) objective = OBJ_EDP;
        if (e == 18) objective = OBJ_ENERGY_LIM;
        if (e == 26) begin objective = OBJ_ED2P; max_state = 5; end
        if (e >= 12 && e < 16) begin
          for (int c = 0; c < NC; c++)
            for (int i = 30; i < NW; i++) wf_active[c][i] = 0;
          n_idle++;
        end else wf_active = '1;
        @(negedge clk);
      end else begin
        ref_cnt--;
        @(negedge clk);
      end

      // ---- advance the CU model on the edge just taken ----
      for (int c = 0; c < NC; c++)
        for (int i = 0; i < NW; i++)
          if (wf_commit[c][i]) begin
            off[c][i] = (off[c][i] + 1) % PROG_LEN;
            if (is_wait(off[c][i]))
              stall_left[c][i] = ((off[c][i] < PROG_LEN / 2 ? 150 : 40) * (13 + cur_state)) / 10;
          end
      // base work is ready well before the lookup
      if (ref_cnt == LEAD + 1)
        check(base_work == BW_W'(ref_base),
              $sformatf("epoch %0d: base_work %0d expected %0d", e, base_work, ref_base));
    end

    check(epoch_count == EPOCHS, "epoch count");
    check(decisions == EPOCHS, $sformatf("decisions %0d", decisions));
    $display("hits=%0d misses=%0d writes=%0d up=%0d down=%0d cap=%0d idle=%0d edp=%0d ed2p=%0d elim=%0d",
             lookup_hits[0], lookup_misses[0], table_writes[0], n_up, n_down, n_cap, n_idle,
             n_obj[0], n_obj[1], n_obj[2]);
    for (int c = 0; c < NC; c++) begin
      check(lookup_hits[c] > 0,   $sformatf("mechanism: table hit in CU %0d", c));
      check(lookup_misses[c] > 0, $sformatf("mechanism: table miss in CU %0d", c));
      check(table_writes[c] > 0,  $sformatf("mechanism: table update in CU %0d", c));
    end
    check(n_up > 0,   "mechanism: frequency raised");
    check(n_down > 0, "mechanism: frequency lowered");
    check(n_cap > 0,  "mechanism: range cap from the power manager");
    check(n_idle > 0, "mechanism: idle wavefront slots");
    check(n_obj[0] > 0 && n_obj[1] > 0 && n_obj[2] > 0, "mechanism: all three objectives");
    check(state_changes == n_up + n_down, "state change count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
