// wf_perf_counters_tb: random stall/commit activity over several epochs of
// random length; a reference count kept in the bench must equal the
// snapshot of every wavefront after each boundary. A small counter width
// instance also checks that the counters saturate instead of wrapping.
module wf_perf_counters_tb;
  localparam int unsigned NW = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NW-1:0] wf_stall, wf_commit;
  logic epoch_end;
  logic [NW-1:0][31:0] stall_snap;
  logic [NW-1:0][15:0] instr_snap;
  // narrow instance for saturation
  logic [3:0] s_stall, s_commit;
  logic [3:0][3:0] s_stall_snap, s_instr_snap;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  wf_perf_counters #(.NUM_WF(NW)) dut (.*);
  wf_perf_counters #(.NUM_WF(4), .STALL_W(4), .INSTR_W(4)) dut_sat (
    .clk, .rst_n, .wf_stall(s_stall), .wf_commit(s_commit), .epoch_end,
    .stall_snap(s_stall_snap), .instr_snap(s_instr_snap));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned ref_s [NW], ref_i [NW];
    int unsigned len, pstall, pcommit;
    wf_stall = '0; wf_commit = '0; epoch_end = 1'b0;
    s_stall = '0; s_commit = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 6; e++) begin
      for (int i = 0; i < NW; i++) begin ref_s[i] = 0; ref_i[i] = 0; end
      len = $urandom_range(50, 400);
      pstall = $urandom_range(0, 100);
      pcommit = $urandom_range(0, 100);
      for (int c = 0; c < len; c++) begin
        for (int i = 0; i < NW; i++) begin
          wf_stall[i]  = ($urandom_range(0, 99) < pstall);
          wf_commit[i] = !wf_stall[i] && ($urandom_range(0, 99) < pcommit);
          ref_s[i] += wf_stall[i];
          ref_i[i] += wf_commit[i];
        end
        s_stall  = '1;  // always stalling: saturates at 15
        s_commit = 4'b0101;
        epoch_end = (c == len - 1);
        @(negedge clk);
      end
      epoch_end = 1'b0;
      for (int i = 0; i < NW; i++) begin
        check(stall_snap[i] == 32'(ref_s[i]),
              $sformatf("epoch %0d wf %0d stall %0d expected %0d", e, i, stall_snap[i], ref_s[i]));
        check(instr_snap[i] == 16'(ref_i[i]),
              $sformatf("epoch %0d wf %0d instr %0d expected %0d", e, i, instr_snap[i], ref_i[i]));
      end
      for (int i = 0; i < 4; i++) begin
        check(s_stall_snap[i] == 4'hF, "narrow stall counter saturates");
        check(s_instr_snap[i] == ((i % 2 == 0) ? 4'hF : 4'h0), "narrow commit counter saturates");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
