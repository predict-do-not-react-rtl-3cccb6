// epoch_timer: fixed-time DVFS epochs for one V/f domain.
//
// The paper manages fine-grain DVFS with epochs of fixed duration (1 us in
// its main configuration) rather than a fixed number of instructions. The
// timer runs on the domain clock, whose frequency changes with the V/f
// state, so at every boundary it reloads a down-counter with the number of
// cycles one epoch lasts at the state that the next epoch will run at
// (pcstall_pkg::epoch_cycles): 1300 cycles at 1.3 GHz .. 2200 at 2.2 GHz.
//
// Interface and timing:
//   next_state    state of the coming epoch, sampled on the cycle epoch_end is 1
//   lookup_start  1-cycle pulse LOOKUP_LEAD cycles before epoch_end; the
//                 predictor starts its table lookup here (the paper looks the
//                 table up "at a fixed cycle before the start of a time epoch";
//                 the value of LOOKUP_LEAD is this design's choice)
//   epoch_end     1-cycle pulse on the last cycle of every epoch; the next
//                 epoch starts on the following cycle
//   epoch_count   number of completed epochs
// After reset the first epoch runs at RESET_STATE. The transition time of the
// regulator (4 ns in the paper) is not modelled here.
module epoch_timer
  import pcstall_pkg::*;
#(
  parameter int unsigned EPOCH_NS    = 1000,  // paper: 1 us main epoch
  parameter int unsigned LOOKUP_LEAD = 64,    // assumed
  parameter vf_state_t   RESET_STATE = vf_state_t'(4)  // assumed: 1.7 GHz
) (
  input  logic        clk,
  input  logic        rst_n,
  input  vf_state_t   next_state,
  output logic        lookup_start,
  output logic        epoch_end,
  output logic [31:0] epoch_count
);

  localparam state_table_t CYCLES = epoch_cycles_table(EPOCH_NS);

  logic [31:0] cnt;

  // The shortest epoch must leave room for the lookup window.
  initial begin
    assert (epoch_cycles(vf_state_t'(0), EPOCH_NS) > LOOKUP_LEAD + 1)
      else $error("epoch_timer: epoch shorter than lookup lead");
  end

  assign epoch_end    = (cnt == 32'd0);
  assign lookup_start = (cnt == 32'(LOOKUP_LEAD));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt         <= epoch_cycles(RESET_STATE, EPOCH_NS) - 32'd1;
      epoch_count <= '0;
    end else if (epoch_end) begin
      cnt         <= CYCLES[next_state] - 32'd1;
      epoch_count <= epoch_count + 32'd1;
    end else begin
      cnt         <= cnt - 32'd1;
    end
  end

endmodule
