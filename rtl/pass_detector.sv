// pass_detector: decides when a partial sum is complete.
//
// Lanes hold different numbers of kneaded weights, so they reach their pass
// marks (the end of the addable A/W pairs of one output) at different times.
// The detector keeps one "reached" flag per lane, set when the lane consumes
// its pass-marked entry. When every flag is set it raises the pass control
// bits for one cycle; in that cycle the flags clear (a lane may already set
// its flag again in that same cycle). A lane whose flag is set and not being
// cleared is held (hold[i]) so that it does not run into the next output.
//
// Timing: lane_pass is sampled at the rising edge; pass_ctrl and hold are
// combinational from the flags, so pass_ctrl rises the cycle after the last
// lane consumed its pass mark.
//
// Follows the paper: pass marks in, pass control bits out, all lanes must
// reach their marks. Own choices: per-lane flag registers, hold output,
// one identical control bit per segment.
module pass_detector
  import tetris_pkg::*;
#(
  parameter int unsigned NL = NLANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NL-1:0]     lane_pass,
  output logic [NL-1:0]     hold,
  output logic [WBITS-1:0]  pass_ctrl
);

  logic [NL-1:0] reached_q;
  logic          all_reached;

  assign all_reached = &reached_q;
  assign pass_ctrl   = {WBITS{all_reached}};
  assign hold        = all_reached ? '0 : reached_q;

  always_ff @(posedge clk) begin
    if (!rst_n) reached_q <= '0;
    else        reached_q <= (all_reached ? '0 : reached_q) | lane_pass;
  end

  // A held lane must not deliver another pass mark.
  a_no_pass_while_held: assert property (
    @(posedge clk) disable iff (!rst_n) (lane_pass & hold) == '0);

endmodule
