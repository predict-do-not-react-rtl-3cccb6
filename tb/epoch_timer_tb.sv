// epoch_timer_tb: checks the fixed-time epoch lengths and the lookup lead.
//
// After reset the first epoch must last 1700 cycles (1 us at 1.7 GHz). The
// bench then picks a random next state at every boundary and checks that
// the following epoch lasts (13 + state) * 100 cycles (1 us at that
// frequency), that lookup_start comes exactly LOOKUP_LEAD cycles before
// epoch_end, once per epoch, and that epoch_count advances by one.
module epoch_timer_tb;
  import pcstall_pkg::*;

  localparam int unsigned LEAD = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  vf_state_t next_state;
  logic lookup_start, epoch_end;
  logic [31:0] epoch_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  epoch_timer #(.EPOCH_NS(1000), .LOOKUP_LEAD(LEAD)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned len, lk_at, expect_len, lookups;
    vf_state_t cur;
    next_state = vf_state_t'(4);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    expect_len = 1700;
    for (int e = 0; e < 14; e++) begin
      // reset is released at a negedge, inside the first epoch's first cycle
      len = (e == 0) ? 1 : 0; lk_at = 0; lookups = 0;
      // count cycles up to and including epoch_end
      forever begin
        @(negedge clk);
        len++;
        if (lookup_start) begin lk_at = len; lookups++; end
        if (epoch_end) break;
      end
      check(len == expect_len, $sformatf("epoch %0d length %0d, expected %0d", e, len, expect_len));
      check(lookups == 1, $sformatf("epoch %0d had %0d lookup pulses", e, lookups));
      check(len - lk_at == LEAD, $sformatf("epoch %0d lookup %0d cycles before end", e, len - lk_at));
      check(epoch_count == 32'(e), "epoch_count before boundary");
      cur = vf_state_t'($urandom_range(0, NUM_STATES - 1));
      next_state = cur;
      expect_len = (13 + int'(cur)) * 100;
      @(posedge clk);
      #1 check(epoch_count == 32'(e + 1), "epoch_count after boundary");
      next_state = vf_state_t'($urandom_range(0, NUM_STATES - 1));  // ignored mid-epoch
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
