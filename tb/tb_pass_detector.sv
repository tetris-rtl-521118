// tb_pass_detector: lanes deliver pass marks at random times (never while
// held). Checks, every cycle, that pass_ctrl rises exactly the cycle after
// the last lane delivered its mark and that hold marks exactly the lanes
// that have delivered and are waiting.
module tb_pass_detector;
  import tetris_pkg::*;

  localparam int unsigned NL = 16;

  logic              clk = 0, rst_n;
  logic [NL-1:0]     lane_pass;
  logic [NL-1:0]     hold;
  logic [WBITS-1:0]  pass_ctrl;

  int checks = 0, failures = 0, passes = 0;
  logic [NL-1:0] reached;

  pass_detector #(.NL(NL)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; lane_pass = '0; reached = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 5000; n++) begin
      logic all;
      @(negedge clk);
      all = &reached;
      checks++;
      if (pass_ctrl !== {WBITS{all}}) begin
        failures++;
        if (failures < 10) $display("n=%0d pass_ctrl %h reached %h", n, pass_ctrl, reached);
      end
      checks++;
      if (hold !== (all ? '0 : reached)) begin
        failures++;
        if (failures < 10) $display("n=%0d hold %h reached %h", n, hold, reached);
      end
      if (all) passes++;
      for (int l = 0; l < NL; l++)
        lane_pass[l] = !(reached[l] && !all) && ($urandom_range(3) == 0);
      reached = (all ? '0 : reached) | lane_pass;
    end
    if (passes < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
