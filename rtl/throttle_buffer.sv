// throttle_buffer: the per-PE staging buffer between eDRAM and the splitters.
//
// It has NL lanes, one per splitter. Each lane holds two queues:
//   * an activation queue of A_DEPTH windows, each window being the KS
//     activations that one group of KS kneaded weights refers to; the whole
//     head window is visible, so the splitter's decoder can pick any of them;
//   * a kneaded-weight queue of W_DEPTH entries <w', p, win_last, pass>.
// A lane issues one kneaded weight per cycle (lane_valid) when both queues
// have a head entry and the pass detector is not holding it. Issuing pops the
// weight entry; if the entry has win_last set the head window is popped too.
// The pass flag is the lane's pass mark: it is forwarded on lane_pass when
// that entry issues, and the pass detector then holds the lane until every
// lane has reached its own mark. New entries keep arriving behind the mark.
//
// Interface: per-lane valid/ready push ports on the eDRAM side (a_push_*,
// w_push_*); per-lane issue outputs on the splitter side. Timing: issue is
// combinational from the queue heads and hold; pops happen at the rising
// edge. Synchronous active-low reset empties all queues.
//
// Follows the paper: per-lane activation and <w',p> queues, pass marks
// moving with the data, fetch-on-demand of the referenced activation.
// Own choices: the queue depths (A_DEPTH = 2 windows, W_DEPTH = 24 entries,
// i.e. 16 lanes x (64 + 240) bytes = 4.75 KB of the 5 KB the paper gives),
// one-window-per-push activation port, win_last flag, valid/ready handshake.
module throttle_buffer
  import tetris_pkg::*;
#(
  parameter int unsigned NL      = NLANES,
  parameter int unsigned KS      = KS_DFLT,
  parameter int unsigned A_DEPTH = 2,
  parameter int unsigned W_DEPTH = 24,
  localparam int unsigned PB = (KS > 1) ? $clog2(KS) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // eDRAM side: activation windows
  input  logic [NL-1:0]                        a_push_valid,
  output logic [NL-1:0]                        a_push_ready,
  input  logic [NL-1:0][KS-1:0][ABITS-1:0]     a_push_data,
  // eDRAM side: kneaded weights
  input  logic [NL-1:0]                        w_push_valid,
  output logic [NL-1:0]                        w_push_ready,
  input  logic [NL-1:0][WBITS-1:0]             w_push_w,
  input  logic [NL-1:0][WBITS-1:0][PB-1:0]     w_push_p,
  input  logic [NL-1:0]                        w_push_win_last,
  input  logic [NL-1:0]                        w_push_pass,
  // pass detector
  input  logic [NL-1:0]                        hold,
  // splitter side
  output logic [NL-1:0]                        lane_valid,
  output logic [NL-1:0][WBITS-1:0]             lane_w,
  output logic [NL-1:0][WBITS-1:0][PB-1:0]     lane_p,
  output logic [NL-1:0][KS-1:0][ABITS-1:0]     lane_act,
  output logic [NL-1:0]                        lane_pass
);

  typedef struct packed {
    logic                       pass;
    logic                       win_last;
    logic [WBITS-1:0][PB-1:0]   p;
    logic [WBITS-1:0]           w;
  } kw_entry_t;

  localparam int unsigned AWID = KS * ABITS;
  localparam int unsigned WWID = $bits(kw_entry_t);

  for (genvar l = 0; l < NL; l++) begin : g_lane
    kw_entry_t                     w_head, w_in;
    logic                          a_full, a_empty, w_full, w_empty;
    logic                          issue;

    assign w_in = '{pass: w_push_pass[l], win_last: w_push_win_last[l],
                    p: w_push_p[l], w: w_push_w[l]};

    assign issue = !w_empty && !a_empty && !hold[l];

    sync_fifo #(.WIDTH(AWID), .DEPTH(A_DEPTH)) u_aq (
      .clk, .rst_n,
      .push (a_push_valid[l]),
      .din  (a_push_data[l]),
      .full (a_full),
      .pop  (issue && w_head.win_last),
      .dout (lane_act[l]),
      .empty(a_empty),
      .count()
    );

    sync_fifo #(.WIDTH(WWID), .DEPTH(W_DEPTH)) u_wq (
      .clk, .rst_n,
      .push (w_push_valid[l]),
      .din  (w_in),
      .full (w_full),
      .pop  (issue),
      .dout (w_head),
      .empty(w_empty),
      .count()
    );

    assign a_push_ready[l] = !a_full;
    assign w_push_ready[l] = !w_full;
    assign lane_valid[l]   = issue;
    assign lane_w[l]       = w_head.w;
    assign lane_p[l]       = w_head.p;
    assign lane_pass[l]    = issue && w_head.pass;
  end

endmodule
