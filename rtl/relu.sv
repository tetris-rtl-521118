// relu: the output activation function f of a PE, max(0, x).
//
// Takes the signed partial sum of a finished output and passes it on, with
// negative values replaced by zero. Registered: out/out_valid follow in/
// in_valid by one cycle. Synchronous active-low reset.
//
// Follows the paper: ReLU is its activation function. Own choices: the full
// partial-sum width is kept (the paper does not say how outputs are
// re-quantised before being written back), one register stage. Because the
// result is never negative, the top bit of out is always 0.
module relu
  import tetris_pkg::*;
#(
  parameter int unsigned W = PSUM_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in,
  output logic         out_valid,
  output logic [W-1:0] out
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= in[W-1] ? '0 : in;
    end
  end

endmodule
