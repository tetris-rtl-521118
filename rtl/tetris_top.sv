// tetris_top: the Tetris accelerator, an array of NPE identical PEs.
//
// Every PE has its own throttle buffer, SAC unit and output activation
// function and works on its own output feature-map values; PEs share only
// clock, reset and the fp16/int8 mode. The eDRAM that feeds the throttle
// buffers and receives the output activations is outside this module: its
// side of every PE's throttle buffer (per-lane activation-window and
// kneaded-weight push ports with valid/ready) and every PE's output are
// brought out as ports, indexed [pe][lane].
//
// Follows the paper: 16 PEs, 16 lanes per PE, fp16 weights, KS = 16,
// a global precision mode.
module tetris_top
  import tetris_pkg::*;
#(
  parameter int unsigned NP      = NPE,
  parameter int unsigned NL      = NLANES,
  parameter int unsigned KS      = KS_DFLT,
  parameter int unsigned A_DEPTH = 2,
  parameter int unsigned W_DEPTH = 24,
  localparam int unsigned PB = (KS > 1) ? $clog2(KS) : 1
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  mode_e                                     mode,
  input  logic [NP-1:0][NL-1:0]                     a_push_valid,
  output logic [NP-1:0][NL-1:0]                     a_push_ready,
  input  logic [NP-1:0][NL-1:0][KS-1:0][ABITS-1:0]  a_push_data,
  input  logic [NP-1:0][NL-1:0]                     w_push_valid,
  output logic [NP-1:0][NL-1:0]                     w_push_ready,
  input  logic [NP-1:0][NL-1:0][WBITS-1:0]          w_push_w,
  input  logic [NP-1:0][NL-1:0][WBITS-1:0][PB-1:0]  w_push_p,
  input  logic [NP-1:0][NL-1:0]                     w_push_win_last,
  input  logic [NP-1:0][NL-1:0]                     w_push_pass,
  output logic [NP-1:0]                             out_valid,
  output logic [NP-1:0][PSUM_W-1:0]                 out_act
);

  for (genvar e = 0; e < NP; e++) begin : g_pe
    tetris_pe #(.NL(NL), .KS(KS), .A_DEPTH(A_DEPTH), .W_DEPTH(W_DEPTH)) u_pe (
      .clk, .rst_n, .mode,
      .a_push_valid   (a_push_valid[e]),
      .a_push_ready   (a_push_ready[e]),
      .a_push_data    (a_push_data[e]),
      .w_push_valid   (w_push_valid[e]),
      .w_push_ready   (w_push_ready[e]),
      .w_push_w       (w_push_w[e]),
      .w_push_p       (w_push_p[e]),
      .w_push_win_last(w_push_win_last[e]),
      .w_push_pass    (w_push_pass[e]),
      .out_valid      (out_valid[e]),
      .out_act        (out_act[e])
    );
  end

endmodule
