// tb_rear_adder_tree: random segment values in both modes; the expected
// partial sum is sum_b S_b * 2^b (fp16) or the sum of the two 8-bit halves
// (int8), computed here in 64-bit integers. Also checks the one-cycle latency.
module tb_rear_adder_tree;
  import tetris_pkg::*;

  logic                        clk = 0, rst_n;
  logic                        pass;
  mode_e                       mode;
  logic [WBITS-1:0][SEG_W-1:0] seg;
  logic [PSUM_W-1:0]           psum;
  logic                        psum_valid;

  int checks = 0, failures = 0;

  rear_adder_tree dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; pass = 0; seg = '0; mode = MODE_FP16;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 2000; n++) begin
      longint exp_v;
      @(negedge clk);
      pass = 1;
      mode = mode_e'(n % 2);
      exp_v = 0;
      for (int b = 0; b < WBITS; b++) begin
        int v;
        v = (n < 2) ? -2147483647 : int'($urandom) >>> $urandom_range(31);
        seg[b] = SEG_W'(v);
        if (mode == MODE_INT8) exp_v += longint'(v) <<< (b % 8);
        else                   exp_v += longint'(v) <<< b;
      end
      @(negedge clk);
      checks++;
      if (!psum_valid || longint'($signed(psum)) != exp_v) begin
        failures++;
        if (failures < 10) $display("n=%0d mode=%0d exp %0d got %0d v=%0d", n, mode, exp_v, $signed(psum), psum_valid);
      end
      pass = 0;
      @(negedge clk);
      checks++;
      if (psum_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
