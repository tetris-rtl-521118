// tb_segment_adder: random accumulation with random pass pulses. A model
// register follows the definition: on pass the old sum is handed out and
// the new inputs start the next sum; otherwise inputs are added to it.
module tb_segment_adder;
  import tetris_pkg::*;

  localparam int unsigned NIN = 16;

  logic                        clk = 0, rst_n;
  logic [NIN-1:0][SPLIT_W-1:0] in;
  logic                        pass;
  logic [SEG_W-1:0]            seg_out;

  int checks = 0, failures = 0, passes = 0;
  longint model;

  segment_adder #(.NIN(NIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint exp_v, string what);
    checks++;
    if (longint'($signed(seg_out)) != exp_v) begin
      failures++;
      if (failures < 10) $display("%s: exp %0d got %0d", what, exp_v, $signed(seg_out));
    end
  endtask

  initial begin
    rst_n = 0; pass = 0; in = '0; model = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      longint s;
      @(negedge clk);
      pass = ($urandom_range(15) == 0);
      s = 0;
      for (int i = 0; i < NIN; i++) begin
        int v;
        v = ($urandom_range(3) == 0) ? 0 : int'($signed(17'($urandom)));
        if (v > 32768 || v < -32768) v = 0;
        in[i] = SPLIT_W'(v);
        s += v;
      end
      #1;
      if (pass) begin check(model, "pass value"); passes++; model = s; end
      else begin check(0, "idle value"); model += s; end
    end
    @(negedge clk); pass = 1; in = '0; #1; check(model, "final");
    if (passes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
