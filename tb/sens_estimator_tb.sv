// sens_estimator_tb: compares the STALL-model estimate with a real-number
// reference, sens = instr * (cycles - stall) / (cycles * f) * (1 + rank/64),
// cycles = f * 100 for a 1 us epoch, f = 13 + state. Hand-worked cases
// first, then random ones (allowed error: one unit, from the fixed-point
// reciprocal and rounding), then saturation and a stall longer than the
// epoch.
module sens_estimator_tb;
  import pcstall_pkg::*;

  logic [15:0] instr;
  logic [31:0] stall;
  vf_state_t   state;
  logic [5:0]  age_rank;
  logic [7:0]  sens;
  int checks = 0, failures = 0;

  sens_estimator dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real ref_sens(int unsigned i, int unsigned s, int unsigned st, int unsigned r);
    real f, cyc, core, v;
    f = 13.0 + st;
    cyc = f * 100.0;
    core = (s >= cyc) ? 0.0 : cyc - s;
    v = i * core / (cyc * f);
    v = v + v * r / 64.0;
    return (v > 255.0) ? 255.0 : v;
  endfunction

  task automatic apply(int unsigned i, int unsigned s, int unsigned st, int unsigned r);
    instr = 16'(i); stall = 32'(s); state = vf_state_t'(st); age_rank = 6'(r);
    #1;
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r;
    int d;
    // hand-worked: 650 instr, no stall, 1.3 GHz -> 650/13 = 50
    apply(650, 0, 0, 0);    check(sens == 8'd50, $sformatf("650/13: %0d", sens));
    // half the epoch stalled -> 25
    apply(650, 650, 0, 0);  check(sens == 8'd25, $sformatf("half stalled: %0d", sens));
    // age rank 32 -> x1.5 -> 75
    apply(650, 0, 0, 32);   check(sens == 8'd75, $sformatf("rank 32: %0d", sens));
    // 2.2 GHz, 1100 instr, 1100 of 2200 cycles stalled -> 1100*1100/(2200*22) = 25
    apply(1100, 1100, 9, 0); check(sens == 8'd25, $sformatf("2.2 GHz: %0d", sens));
    // stall longer than the epoch -> 0
    apply(1000, 5000, 3, 0); check(sens == 8'd0, $sformatf("over-stall: %0d", sens));
    // saturation
    apply(60000, 0, 0, 63); check(sens == 8'd255, $sformatf("saturate: %0d", sens));
    for (int n = 0; n < 3000; n++) begin
      int unsigned st, cyc;
      st  = $urandom_range(0, NUM_STATES - 1);
      cyc = (13 + st) * 100;
      apply($urandom_range(0, cyc), $urandom_range(0, cyc + 100), st, $urandom_range(0, 39));
      r = ref_sens(instr, stall, state, age_rank);
      d = int'(sens) - int'(r + 0.5);
      check(d <= 1 && d >= -1,
            $sformatf("instr %0d stall %0d state %0d rank %0d: %0d vs %f", instr, stall, state, age_rank, sens, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
