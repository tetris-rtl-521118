// segment_adder: one segment adder with its segment register S_b and the
// pass-control multiplexer.
//
// Every cycle the adder sums the NIN splitter outputs routed to this segment
// (one per lane, all with the same bit weight 2^b) and the value fed back
// from the register. When pass is high the multiplexer sends S_b to the rear
// adder tree instead of back to the adder, so the feedback term is 0 and the
// register starts the next partial sum in the same cycle: no bubble between
// outputs.
//
// Timing: in[] is accumulated into S_b at the rising clock edge. seg_out
// shows S_b while pass is high and 0 otherwise. Synchronous active-low reset
// clears S_b.
//
// Follows the paper: multi-operand adder over all splitters plus the local
// register, register S_b, pass-controlled mux. Own choices: SEG_W-bit
// register, no saturation (SEG_W is sized for the largest layers, see the
// README), reset behaviour.
module segment_adder
  import tetris_pkg::*;
#(
  parameter int unsigned NIN = NLANES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NIN-1:0][SPLIT_W-1:0] in,
  input  logic                        pass,
  output logic [SEG_W-1:0]            seg_out
);

  logic signed [SEG_W-1:0] s_q, sum;

  always_comb begin
    sum = pass ? '0 : s_q;
    for (int i = 0; i < NIN; i++) sum += SEG_W'($signed(in[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) s_q <= '0;
    else        s_q <= sum;
  end

  assign seg_out = pass ? s_q : '0;

endmodule
