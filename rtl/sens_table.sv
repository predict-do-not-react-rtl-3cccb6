// sens_table: the PC-indexed sensitivity table of PCSTALL.
//
// ENTRIES words of SENS_W bits (paper: 128 entries, 128 bytes), each holding
// the estimated sensitivity of an epoch that started at a PC mapping to that
// entry. One synchronous read port serves the lookup, one write port the
// update; the two are used in different windows of the epoch. A read and a
// write of the same entry in one cycle return the old value.
//
// Each entry also has a valid bit, cleared by reset and set by the first
// write, so that a lookup can tell a hit from an entry never written (the
// paper reports the table's hit ratio but does not say how a miss is
// detected; the valid bits are this design's choice and are not counted in
// the paper's 128-byte budget). The data words themselves have no reset,
// like a RAM macro.
//
// Timing: rd_data/rd_hit are valid the cycle after rd_en.
module sens_table #(
  parameter int unsigned ENTRIES = 128,  // paper: 128 entries
  parameter int unsigned SENS_W  = 8,    // paper: 1 byte per entry
  parameter int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_en,
  input  logic [IDX_W-1:0]  rd_idx,
  output logic [SENS_W-1:0] rd_data,
  output logic              rd_hit,
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_idx,
  input  logic [SENS_W-1:0] wr_data
);

  logic [SENS_W-1:0]  mem [ENTRIES];
  logic [ENTRIES-1:0] valid;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_data;
    if (rd_en) rd_data <= mem[rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      rd_hit <= 1'b0;
    end else begin
      if (wr_en) valid[wr_idx] <= 1'b1;
      if (rd_en) rd_hit <= valid[rd_idx];
    end
  end

endmodule
