// tb_splitter: random test of the splitter against a bit-by-bit reference.
// Each vector draws a kneaded weight, pointers, an activation window, the
// mode and valid; expected outputs are computed here from the definition
// (bit set -> activation picked by the pointer, negated for a sign bit).
module tb_splitter;
  import tetris_pkg::*;

  localparam int unsigned KS = 16;
  localparam int unsigned PB = 4;

  logic                          valid;
  mode_e                         mode;
  logic [WBITS-1:0]              w;
  logic [WBITS-1:0][PB-1:0]      p;
  logic [KS-1:0][ABITS-1:0]      act;
  logic [WBITS-1:0][SPLIT_W-1:0] seg;

  int checks = 0, failures = 0;
  int negs = 0, zeros = 0;

  splitter #(.KS(KS)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      valid = ($urandom_range(9) != 0);
      mode  = mode_e'($urandom_range(1));
      w     = 16'($urandom);
      for (int b = 0; b < WBITS; b++) p[b] = PB'($urandom);
      for (int i = 0; i < KS; i++) act[i] = 16'($urandom);
      if (n < 4) begin  // corner: most negative activation on the sign bits
        valid = 1; w = 16'h8080; p = '0; act[0] = 16'h8000;
        mode = mode_e'(n[0]);
      end
      #1;
      for (int b = 0; b < WBITS; b++) begin
        int exp_v, got;
        bit is_sign;
        is_sign = (b == 15) || (b == 7 && mode == MODE_INT8);
        if (!valid || !w[b]) exp_v = 0;
        else begin
          exp_v = int'($signed(act[p[b]]));
          if (is_sign) begin exp_v = -exp_v; negs++; end
        end
        if (valid && !w[b]) zeros++;
        got = int'($signed(seg[b]));
        checks++;
        if (got !== exp_v) begin
          failures++;
          if (failures < 10)
            $display("mismatch n=%0d b=%0d mode=%0d exp=%0d got=%0d", n, b, mode, exp_v, got);
        end
      end
    end
    if (negs == 0 || zeros == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
