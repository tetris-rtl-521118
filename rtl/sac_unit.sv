// sac_unit: one split-and-accumulate (SAC) unit.
//
// NL splitters (the splitter array) each take one kneaded weight and its
// lane's KS-activation window per cycle and produce WBITS segment values.
// The fully connected fabric routes output b of every splitter to segment
// adder b, so segment adder b accumulates, over all lanes and cycles, every
// activation whose weight had an essential bit at position b - without any
// multiplication or shifting. The pass detector watches the lanes' pass
// marks; when all have arrived it raises the pass control bits, the segment
// registers hand their values to the rear adder tree, which performs the one
// shift-and-add that yields the partial sum.
//
// Timing: a kneaded weight issued in cycle t is in the segment registers at
// the end of t. pass_ctrl rises the cycle after the last lane consumed its
// pass mark; psum_valid follows pass_ctrl by one cycle. The throughput is one
// kneaded weight per lane per cycle, in both modes; in int8 mode each
// kneaded weight carries two 8-bit kneaded weights.
//
// mode must stay constant while an output is being accumulated.
//
// Follows the paper: 16 splitters, fully connected fabric, 16 segment adders
// each fed by all splitters and its own register, pass detector, one rear
// adder tree whose last level distinguishes fp16 from int8. Not built: the
// mode for other weight lengths (e.g. 4-bit) in which upper segment adders
// sit idle; sign-extended shorter weights still give correct results in
// fp16 mode.
module sac_unit
  import tetris_pkg::*;
#(
  parameter int unsigned NL = NLANES,
  parameter int unsigned KS = KS_DFLT,
  localparam int unsigned PB = (KS > 1) ? $clog2(KS) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  mode_e                            mode,
  input  logic [NL-1:0]                    lane_valid,
  input  logic [NL-1:0][WBITS-1:0]         lane_w,
  input  logic [NL-1:0][WBITS-1:0][PB-1:0] lane_p,
  input  logic [NL-1:0][KS-1:0][ABITS-1:0] lane_act,
  input  logic [NL-1:0]                    lane_pass,
  output logic [NL-1:0]                    hold,
  output logic [WBITS-1:0]                 pass_ctrl,
  output logic [PSUM_W-1:0]                psum,
  output logic                             psum_valid
);

  // splitter array outputs, indexed [lane][segment]
  logic [NL-1:0][WBITS-1:0][SPLIT_W-1:0] split_out;
  // fully connected fabric: the same values indexed [segment][lane]
  logic [WBITS-1:0][NL-1:0][SPLIT_W-1:0] fabric;
  logic [WBITS-1:0][SEG_W-1:0]           seg_to_tree;

  for (genvar l = 0; l < NL; l++) begin : g_split
    splitter #(.KS(KS)) u_splitter (
      .valid(lane_valid[l]),
      .mode (mode),
      .w    (lane_w[l]),
      .p    (lane_p[l]),
      .act  (lane_act[l]),
      .seg  (split_out[l])
    );
  end

  always_comb begin
    for (int b = 0; b < WBITS; b++)
      for (int l = 0; l < NL; l++)
        fabric[b][l] = split_out[l][b];
  end

  for (genvar b = 0; b < WBITS; b++) begin : g_seg
    segment_adder #(.NIN(NL)) u_seg (
      .clk, .rst_n,
      .in     (fabric[b]),
      .pass   (pass_ctrl[b]),
      .seg_out(seg_to_tree[b])
    );
  end

  pass_detector #(.NL(NL)) u_pass (
    .clk, .rst_n,
    .lane_pass(lane_pass),
    .hold     (hold),
    .pass_ctrl(pass_ctrl)
  );

  rear_adder_tree u_tree (
    .clk, .rst_n,
    .pass      (pass_ctrl[0]),
    .mode      (mode),
    .seg       (seg_to_tree),
    .psum      (psum),
    .psum_valid(psum_valid)
  );

endmodule
