// splitter: splits one kneaded weight into WBITS segment contributions.
//
// For every weight bit b the splitter has a comparator, a decoder and a 2:1
// multiplexer. The decoder uses the bit's pointer p[b] to pick one activation
// out of the KS-wide activation window act[0..KS-1]; the comparator tests w[b]
// against zero, and the multiplexer forwards either that activation or 0 to
// output seg[b], which goes through the fully connected fabric to segment
// adder b. The sign bit of a two's-complement weight carries weight -2^b, so
// the activation it selects is negated ("Neg"): bit 15 in fp16 mode, and in
// int8 mode both bit 7 (sign of the lower 8-bit kneaded weight) and bit 15
// (sign of the upper one).
//
// Purely combinational. valid = 0 forces every output to zero (idle lane).
// A pointer >= KS (possible only when KS is not a power of two) selects 0.
//
// Follows the paper: comparator/decoder/mux per bit, Neg on the MSB, int8
// split into two halves with a mode-controlled Neg on bit 7. Own choices:
// signed 16-bit activations, outputs one bit wider so that -(-2^15) fits.
module splitter
  import tetris_pkg::*;
#(
  parameter int unsigned KS = KS_DFLT,
  localparam int unsigned PB = (KS > 1) ? $clog2(KS) : 1
) (
  input  logic                          valid,
  input  mode_e                         mode,
  input  logic [WBITS-1:0]              w,
  input  logic [WBITS-1:0][PB-1:0]      p,
  input  logic [KS-1:0][ABITS-1:0]      act,
  output logic [WBITS-1:0][SPLIT_W-1:0] seg
);

  always_comb begin
    for (int b = 0; b < WBITS; b++) begin
      logic signed [SPLIT_W-1:0] a;
      logic                      neg;
      // decoder
      if (int'(p[b]) < int'(KS)) a = SPLIT_W'($signed(act[p[b]]));
      else                       a = '0;
      neg = (b == WBITS - 1) || (b == WBITS / 2 - 1 && mode == MODE_INT8);
      // comparator + multiplexer (+ Neg)
      if (!valid || w[b] == 1'b0) seg[b] = '0;
      else if (neg)               seg[b] = -a;
      else                        seg[b] = a;
    end
  end

endmodule
