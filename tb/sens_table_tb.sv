// sens_table_tb: random reads and writes against a reference array with
// valid flags. Checks that a never-written entry reads as a miss, that a
// written entry reads back its last value one cycle after the read, and
// that a read and a write of the same entry in one cycle return the old
// value and hit status.
module sens_table_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rd_en, rd_hit, wr_en;
  logic [6:0] rd_idx, wr_idx;
  logic [7:0] rd_data, wr_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sens_table dut (.*);

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
    logic [7:0] ref_mem [128];
    bit         ref_val [128];
    bit         exp_pend, exp_hit;
    logic [7:0] exp_data;
    int         misses = 0, hits = 0, same = 0;
    for (int i = 0; i < 128; i++) ref_val[i] = 0;
    rd_en = 0; wr_en = 0; rd_idx = '0; wr_idx = '0; wr_data = '0;
    exp_pend = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      rd_en   = $urandom_range(0, 1);
      rd_idx  = 7'($urandom_range(0, 127));
      wr_en   = ($urandom_range(0, 3) == 0);
      wr_idx  = ($urandom_range(0, 3) == 0) ? rd_idx : 7'($urandom_range(0, 127));
      wr_data = 8'($urandom);
      // expectation from the state before this cycle's write
      exp_pend = rd_en;
      if (rd_en) begin
        exp_hit  = ref_val[rd_idx];
        exp_data = ref_mem[rd_idx];
        if (exp_hit) hits++; else misses++;
        if (wr_en && wr_idx == rd_idx) same++;
      end
      @(posedge clk);
      #1;
      if (exp_pend) begin
        check(rd_hit == exp_hit, $sformatf("cycle %0d hit %0d expected %0d", n, rd_hit, exp_hit));
        if (exp_hit) check(rd_data == exp_data, $sformatf("cycle %0d data %0h expected %0h", n, rd_data, exp_data));
      end
      if (wr_en) begin ref_mem[wr_idx] = wr_data; ref_val[wr_idx] = 1; end
      @(negedge clk);
    end
    check(hits > 100 && misses > 10 && same > 10, "all cases exercised");
    $display("hits=%0d misses=%0d same-entry=%0d", hits, misses, same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
