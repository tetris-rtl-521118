// tetris_pe: one processing element of the Tetris accelerator.
//
// Chain: throttle buffer (per-lane activation windows and kneaded weights
// with pass marks) -> SAC unit (splitter array, fully connected fabric,
// segment adders, pass detector, rear adder tree) -> output activation
// function (ReLU). Each output needs, per lane, the kneaded weights of that
// lane's share of the filter, the last one carrying the pass mark; the PE
// then produces max(0, sum_i A_i * W_i) over all lanes.
//
// Timing: one kneaded weight per lane per cycle; an output whose longest
// lane has K kneaded weights occupies K cycles of the SAC unit (outputs
// overlap back to back); out_valid comes 3 cycles after the last of those K
// issue cycles (pass detection, adder tree register, ReLU register).
module tetris_pe
  import tetris_pkg::*;
#(
  parameter int unsigned NL      = NLANES,
  parameter int unsigned KS      = KS_DFLT,
  parameter int unsigned A_DEPTH = 2,
  parameter int unsigned W_DEPTH = 24,
  localparam int unsigned PB = (KS > 1) ? $clog2(KS) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  mode_e                            mode,
  input  logic [NL-1:0]                    a_push_valid,
  output logic [NL-1:0]                    a_push_ready,
  input  logic [NL-1:0][KS-1:0][ABITS-1:0] a_push_data,
  input  logic [NL-1:0]                    w_push_valid,
  output logic [NL-1:0]                    w_push_ready,
  input  logic [NL-1:0][WBITS-1:0]         w_push_w,
  input  logic [NL-1:0][WBITS-1:0][PB-1:0] w_push_p,
  input  logic [NL-1:0]                    w_push_win_last,
  input  logic [NL-1:0]                    w_push_pass,
  output logic                             out_valid,
  output logic [PSUM_W-1:0]                out_act
);

  logic [NL-1:0]                    hold, lane_valid, lane_pass;
  logic [NL-1:0][WBITS-1:0]         lane_w;
  logic [NL-1:0][WBITS-1:0][PB-1:0] lane_p;
  logic [NL-1:0][KS-1:0][ABITS-1:0] lane_act;
  logic [WBITS-1:0]                 pass_ctrl;
  logic [PSUM_W-1:0]                psum;
  logic                             psum_valid;

  throttle_buffer #(.NL(NL), .KS(KS), .A_DEPTH(A_DEPTH), .W_DEPTH(W_DEPTH)) u_tb (
    .clk, .rst_n,
    .a_push_valid, .a_push_ready, .a_push_data,
    .w_push_valid, .w_push_ready, .w_push_w, .w_push_p,
    .w_push_win_last, .w_push_pass,
    .hold, .lane_valid, .lane_w, .lane_p, .lane_act, .lane_pass
  );

  sac_unit #(.NL(NL), .KS(KS)) u_sac (
    .clk, .rst_n, .mode,
    .lane_valid, .lane_w, .lane_p, .lane_act, .lane_pass,
    .hold, .pass_ctrl, .psum, .psum_valid
  );

  relu #(.W(PSUM_W)) u_f (
    .clk, .rst_n,
    .in_valid (psum_valid),
    .in       (psum),
    .out_valid(out_valid),
    .out      (out_act)
  );

endmodule
