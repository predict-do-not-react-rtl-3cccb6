// dvfs_freq_selector_tb: checks the chosen V/f state against a real-number
// search over the allowed states.
//
// Power per state is P = f * V^2 with V rising linearly from 0.70 V at
// 1.3 GHz to 1.00 V at 2.2 GHz (a plausible curve for the test; the design
// takes any table). For EDP and ED2P the chosen state must have the least
// P/I^2 or P/I^3 (I = i0 + S*f); for the energy objective the least P/I
// among states whose I is within the loss limit of the top state's. Also
// hand-worked corner cases (a memory-bound epoch picks the lowest allowed
// state, a compute-bound one under ED2P the highest), the clamping of the
// range and the latency of (max-min+1) cycles.
module dvfs_freq_selector_tb;
  import pcstall_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start;
  logic [13:0] sens;
  logic [21:0] i0;
  logic [NUM_STATES-1:0][15:0] power;
  objective_t objective;
  logic [7:0] perf_loss_q8;
  vf_state_t min_state, max_state, sel_state;
  logic done, busy;
  int checks = 0, failures = 0;
  int n_obj [3];

  always #5 clk = ~clk;

  dvfs_freq_selector #(.S_W(14), .I0_W(22)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real cost(int unsigned k, objective_t o);
    real ik, p;
    ik = real'(i0) + real'(sens) * (13 + k);
    p  = real'(power[k]);
    if (ik == 0.0) return 1.0e300;
    case (o)
      OBJ_EDP:  return p / (ik * ik);
      OBJ_ED2P: return p / (ik * ik * ik);
      default:  return p / ik;
    endcase
  endfunction

  function automatic bit feasible(int unsigned k, int unsigned hi);
    longint unsigned ik, im;
    ik = longint'(i0) + longint'(sens) * (13 + k);
    im = longint'(i0) + longint'(sens) * (13 + hi);
    return (objective != OBJ_ENERGY_LIM) || (ik * 256 >= im * (256 - perf_loss_q8));
  endfunction

  // run one decision, return chosen state, check latency
  task automatic decide(output int unsigned got, input int unsigned lo, input int unsigned hi);
    int unsigned lat = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin @(negedge clk); lat++; end
    check(lat == hi - lo + 1, $sformatf("latency %0d expected %0d", lat, hi - lo + 1));
    got = sel_state;
  endtask

  initial begin
    int unsigned got, lo, hi, best;
    real bc, c;
    for (int k = 0; k < NUM_STATES; k++) begin
      real v, f;
      f = 1.3 + 0.1 * k;
      v = 0.70 + 0.30 * k / 9.0;
      power[k] = 16'($rtoi(f * v * v * 10000.0));
    end
    start = 0; sens = '0; i0 = '0; objective = OBJ_ED2P; perf_loss_q8 = 8'd13;
    min_state = 0; max_state = 9;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // memory bound: S = 0 -> lowest allowed state
    sens = 0; i0 = 1000; min_state = 2; max_state = 7;
    for (int o = 0; o < 3; o++) begin
      objective = objective_t'(o);
      decide(got, 2, 7);
      check(got == 2, $sformatf("memory-bound obj %0d chose %0d", o, got));
    end
    // compute bound under ED2P: I ~ S*f, P/I^3 falls with f -> highest
    sens = 500; i0 = 0; objective = OBJ_ED2P; min_state = 0; max_state = 9;
    decide(got, 0, 9);
    check(got == 9, $sformatf("compute-bound ED2P chose %0d", got));
    // range clamping: max beyond the table, min above max
    max_state = 15; min_state = 0;
    decide(got, 0, 9);
    check(got == 9, "max_state clamped to 9");
    min_state = 8; max_state = 5;
    decide(got, 5, 5);
    check(got == 5, "min above max clamps to max");

    for (int n = 0; n < 1500; n++) begin
      objective = objective_t'($urandom_range(0, 2));
      n_obj[objective]++;
      sens = 14'($urandom_range(0, 3000));
      i0   = 22'($urandom_range(0, 60000));
      perf_loss_q8 = 8'($urandom_range(0, 40));
      lo = $urandom_range(0, 9);
      hi = $urandom_range(lo, 9);
      min_state = vf_state_t'(lo); max_state = vf_state_t'(hi);
      decide(got, lo, hi);
      bc = 1.0e301; best = lo;
      for (int k = lo; k <= hi; k++)
        if (feasible(k, hi)) begin
          c = cost(k, objective);
          if (c < bc) begin bc = c; best = k; end
        end
      check(got >= lo && got <= hi, $sformatf("state %0d outside [%0d,%0d]", got, lo, hi));
      check(feasible(got, hi), $sformatf("state %0d breaks the loss limit", got));
      c = cost(got, objective);
      check(c <= bc * (1.0 + 1e-12),
            $sformatf("obj %0d S %0d i0 %0d range [%0d,%0d]: chose %0d, best %0d",
                      objective, sens, i0, lo, hi, got, best));
    end
    check(n_obj[0] > 0 && n_obj[1] > 0 && n_obj[2] > 0, "all objectives exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
