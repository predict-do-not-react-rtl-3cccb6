// pcstall_predictor_tb: lookup and update of the PC-indexed predictor
// against a reference model kept in the bench.
//
// Each round: (1) a lookup with the wavefronts' current PCs, checking the
// CU sensitivity (sum of the hit entries of the active wavefronts), the
// hit/miss counts and the latency of NUM_WF+1 cycles; (2) an epoch boundary
// with random per-wavefront counts, checking the estimate sum, the
// instruction sum, the number of table writes and the latency of NUM_WF
// cycles. The reference estimate is the STALL formula in fixed point,
// round(instr*core*R*(64+rank)/64 / 2^28), R = round(2^28/(f*cycles)),
// saturated to 255. PCs come from a small pool, with random low bits (inside
// one 16-byte entry) and random high bits above the index, so wavefronts
// share and alias entries the way loop code does.
module pcstall_predictor_tb;
  import pcstall_pkg::*;

  localparam int unsigned NW = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NW-1:0]            wf_active;
  logic [NW-1:0][47:0]      wf_pc;
  logic [NW-1:0][5:0]       wf_age_rank;
  logic                     lookup_start, epoch_end;
  vf_state_t                elapsed_state;
  logic [NW-1:0][31:0]      stall_snap;
  logic [NW-1:0][15:0]      instr_snap;
  logic [13:0]              sens_cu, est_sum;
  logic [21:0]              instr_sum;
  logic                     sens_cu_valid, est_valid;
  logic [31:0]              lookup_hits, lookup_misses, table_writes;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  pcstall_predictor dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  logic [47:0] pool [12];
  logic [7:0]  ref_mem [128];
  bit          ref_val [128];
  int unsigned start_idx [NW], upd_idx [NW];
  bit          start_act [NW], upd_act [NW];
  int unsigned exp_hits = 0, exp_miss = 0, exp_writes = 0;

  task automatic new_pcs();
    for (int i = 0; i < NW; i++) begin
      wf_active[i]   = ($urandom_range(0, 9) != 0);
      wf_pc[i]       = pool[$urandom_range(0, 11)] + 48'($urandom_range(0, 15))
                     + (48'($urandom_range(0, 3)) << 11);
      wf_age_rank[i] = 6'($urandom_range(0, 39));
    end
  endtask

  task automatic do_lookup(int r);
    int unsigned exp_sum = 0, lat = 0;
    for (int i = 0; i < NW; i++) if (wf_active[i]) begin
      int unsigned idx = int'(wf_pc[i][10:4]);
      if (ref_val[idx]) begin exp_sum += ref_mem[idx]; exp_hits++; end
      else exp_miss++;
    end
    lookup_start = 1'b1;
    @(negedge clk);
    lookup_start = 1'b0;
    while (!sens_cu_valid) begin @(negedge clk); lat++; end
    check(lat == NW + 1, $sformatf("round %0d lookup latency %0d", r, lat));
    check(sens_cu == 14'(exp_sum), $sformatf("round %0d sens_cu %0d expected %0d", r, sens_cu, exp_sum));
    @(negedge clk);
    check(lookup_hits == exp_hits && lookup_misses == exp_miss,
          $sformatf("round %0d hits %0d/%0d misses %0d/%0d", r, lookup_hits, exp_hits, lookup_misses, exp_miss));
  endtask

  task automatic do_epoch_end(int r);
    int unsigned st, exp_est = 0, exp_instr = 0, lat = 0, e, cyc;
    st = $urandom_range(0, NUM_STATES - 1);
    cyc = (13 + st) * 100;
    elapsed_state = vf_state_t'(st);
    // starting-PC registers move to the update copy, then reload
    for (int i = 0; i < NW; i++) begin
      upd_idx[i] = start_idx[i]; upd_act[i] = start_act[i];
      start_idx[i] = int'(wf_pc[i][10:4]); start_act[i] = wf_active[i];
    end
    epoch_end = 1'b1;
    @(negedge clk);
    epoch_end = 1'b0;
    // counters of the elapsed epoch, stable during the update walk
    for (int i = 0; i < NW; i++) begin
      stall_snap[i] = 32'($urandom_range(0, cyc));
      instr_snap[i] = 16'($urandom_range(0, cyc - int'(stall_snap[i])));
    end
    for (int i = 0; i < NW; i++) if (upd_act[i]) begin
      e = ref_est(instr_snap[i], stall_snap[i], st, wf_age_rank[i]);
      exp_est += e; exp_instr += instr_snap[i]; exp_writes++;
      ref_mem[upd_idx[i]] = 8'(e); ref_val[upd_idx[i]] = 1;
    end
    while (!est_valid) begin @(negedge clk); lat++; end
    check(lat == NW, $sformatf("round %0d update latency %0d", r, lat));
    check(est_sum == 14'(exp_est), $sformatf("round %0d est_sum %0d expected %0d", r, est_sum, exp_est));
    check(instr_sum == 22'(exp_instr), $sformatf("round %0d instr_sum %0d expected %0d", r, instr_sum, exp_instr));
    check(table_writes == exp_writes, $sformatf("round %0d writes %0d expected %0d", r, table_writes, exp_writes));
  endtask

  initial begin
    for (int i = 0; i < 12; i++) pool[i] = 48'h7f00_0000_0000 + 48'(i * 48);
    for (int i = 0; i < 128; i++) ref_val[i] = 0;
    for (int i = 0; i < NW; i++) begin start_idx[i] = 0; start_act[i] = 0; end
    lookup_start = 0; epoch_end = 0; elapsed_state = '0;
    stall_snap = '0; instr_snap = '0;
    new_pcs();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int r = 0; r < 25; r++) begin
      do_lookup(r);
      repeat (5) @(negedge clk);
      do_epoch_end(r);
      repeat (3) @(negedge clk);
      new_pcs();
      repeat (2) @(negedge clk);
    end
    check(exp_hits > 100 && exp_miss > 20, "hits and misses both exercised");
    $display("hits=%0d misses=%0d writes=%0d", exp_hits, exp_miss, exp_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
