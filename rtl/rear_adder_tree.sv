// rear_adder_tree: the single shift-and-add of a SAC unit.
//
// Segment register S_b holds the sum of every activation whose weight had an
// essential bit at position b, so the partial sum is sum_b S_b * 2^b. The tree
// adds the lower eight segments (S_b << b, b = 0..7) and the upper eight
// (S_{8+j} << j) separately; only its last level depends on the mode:
//   fp16: psum = lower + (upper << 8)
//   int8: psum = lower + upper   (the two halves are two 8-bit kneaded weights
//                                 of the same activation window)
//
// Timing: seg[] is sampled when pass is high; psum and psum_valid are
// registered, valid one cycle after pass. Synchronous active-low reset.
//
// Follows the paper: shifting only here, once per output; last level selects
// the mode. Own choices: one pipeline register at the output.
module rear_adder_tree
  import tetris_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        pass,
  input  mode_e                       mode,
  input  logic [WBITS-1:0][SEG_W-1:0] seg,
  output logic [PSUM_W-1:0]           psum,
  output logic                        psum_valid
);

  localparam int unsigned HALF = WBITS / 2;

  logic signed [PSUM_W-1:0] lower, upper, total;

  always_comb begin
    lower = '0;
    upper = '0;
    for (int j = 0; j < HALF; j++) begin
      lower += PSUM_W'($signed(seg[j]))        <<< j;
      upper += PSUM_W'($signed(seg[HALF + j])) <<< j;
    end
    total = (mode == MODE_INT8) ? lower + upper : lower + (upper <<< HALF);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      psum       <= '0;
      psum_valid <= 1'b0;
    end else begin
      psum_valid <= pass;
      if (pass) psum <= total;
    end
  end

endmodule
