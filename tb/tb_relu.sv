// tb_relu: random signed inputs; output must be max(0, x) one cycle later
// and valid must follow in_valid by one cycle.
module tb_relu;
  import tetris_pkg::*;

  localparam int unsigned W = PSUM_W;

  logic         clk = 0, rst_n;
  logic         in_valid, out_valid;
  logic [W-1:0] in, out;

  int checks = 0, failures = 0, clipped = 0;

  relu #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint x;
    rst_n = 0; in_valid = 0; in = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      x = longint'({$urandom, $urandom}) >>> 16;
      in = W'(x);
      in_valid = ($urandom_range(3) != 0);
      @(negedge clk);
      checks++;
      if (out_valid !== in_valid) failures++;
      if (in_valid) begin
        checks++;
        if (x < 0) clipped++;
        if (longint'($signed(out)) != ((x < 0) ? 0 : x)) begin
          failures++;
          if (failures < 10) $display("x=%0d got %0d", x, $signed(out));
        end
      end
      in_valid = 0;
    end
    if (clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
