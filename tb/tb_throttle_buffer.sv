// tb_throttle_buffer: random pushes of activation windows and kneaded-weight
// entries into every lane, random hold from the pass-detector side. A model
// of each lane's two queues predicts, every cycle, whether the lane issues,
// what it shows the splitter (weight, pointers, head window, pass mark),
// when the window is released (win_last) and the push-side ready signals.
module tb_throttle_buffer;
  import tetris_pkg::*;

  localparam int unsigned NL = 4, KS = 4, PB = 2, A_DEPTH = 2, W_DEPTH = 5;

  logic                             clk = 0, rst_n;
  logic [NL-1:0]                    a_push_valid, a_push_ready;
  logic [NL-1:0][KS-1:0][ABITS-1:0] a_push_data;
  logic [NL-1:0]                    w_push_valid, w_push_ready;
  logic [NL-1:0][WBITS-1:0]         w_push_w;
  logic [NL-1:0][WBITS-1:0][PB-1:0] w_push_p;
  logic [NL-1:0]                    w_push_win_last, w_push_pass;
  logic [NL-1:0]                    hold;
  logic [NL-1:0]                    lane_valid, lane_pass;
  logic [NL-1:0][WBITS-1:0]         lane_w;
  logic [NL-1:0][WBITS-1:0][PB-1:0] lane_p;
  logic [NL-1:0][KS-1:0][ABITS-1:0] lane_act;

  typedef logic [WBITS+WBITS*PB+1:0] went_t;   // {pass, win_last, p, w}
  logic [KS*ABITS-1:0] aq[NL][$];
  went_t               wq[NL][$];

  int checks = 0, failures = 0, issues = 0, full_seen = 0, holds = 0, win_pops = 0;

  throttle_buffer #(.NL(NL), .KS(KS), .A_DEPTH(A_DEPTH), .W_DEPTH(W_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what, int l);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%t lane %0d: %s", $time, l, what);
    end
  endtask

  initial begin
    rst_n = 0; a_push_valid = '0; w_push_valid = '0; hold = '0;
    a_push_data = '0; w_push_w = '0; w_push_p = '0; w_push_win_last = '0; w_push_pass = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        hold[l]         = ($urandom_range(3) == 0);
        a_push_valid[l] = ($urandom_range(2) == 0);
        w_push_valid[l] = ($urandom_range(1) == 0);
        a_push_data[l]  = {$urandom, $urandom};
        {w_push_pass[l], w_push_win_last[l], w_push_p[l], w_push_w[l]} = went_t'({$urandom, $urandom});
      end
      #1;
      for (int l = 0; l < NL; l++) begin
        bit exp_valid;
        exp_valid = wq[l].size() > 0 && aq[l].size() > 0 && !hold[l];
        chk(lane_valid[l] == exp_valid, "issue", l);
        chk(a_push_ready[l] == (aq[l].size() < A_DEPTH), "a ready", l);
        chk(w_push_ready[l] == (wq[l].size() < W_DEPTH), "w ready", l);
        if (!a_push_ready[l] || !w_push_ready[l]) full_seen++;
        if (hold[l] && wq[l].size() > 0 && aq[l].size() > 0) holds++;
        if (exp_valid) begin
          went_t e;
          e = wq[l].pop_front();
          chk({lane_p[l], lane_w[l]} == e[WBITS+WBITS*PB-1:0], "weight/pointers", l);
          chk(lane_pass[l] == e[WBITS+WBITS*PB+1], "pass mark", l);
          chk(lane_act[l] == aq[l][0], "window", l);
          issues++;
          if (e[WBITS+WBITS*PB]) begin void'(aq[l].pop_front()); win_pops++; end
        end else
          chk(lane_pass[l] == 1'b0, "pass without issue", l);
      end
      for (int l = 0; l < NL; l++) begin
        if (a_push_valid[l] && a_push_ready[l]) aq[l].push_back(a_push_data[l]);
        if (w_push_valid[l] && w_push_ready[l])
          wq[l].push_back({w_push_pass[l], w_push_win_last[l], w_push_p[l], w_push_w[l]});
      end
    end
    if (issues == 0 || full_seen == 0 || holds == 0 || win_pops == 0) failures++;
    $display("issues=%0d full=%0d holds=%0d window pops=%0d", issues, full_seen, holds, win_pops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
