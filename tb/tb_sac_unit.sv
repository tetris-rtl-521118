// tb_sac_unit: drives the SAC unit's lane inputs directly from kneaded
// weights (lanes issue whenever they have data and are not held), in fp16
// and int8 mode. Checks every partial sum against sum A*W computed from the
// original weights, and checks the rate: with all lanes supplied, an output
// takes exactly as many cycles as its longest lane has kneaded weights.
// The first phase starts with the six-weight kneading example of the
// paper's figure (three kneaded weights, so three cycles).
module tb_sac_unit;
  import tetris_pkg::*;

  localparam int unsigned NL = 16, KS = 16, PB = 4;

  logic                             clk = 0, rst_n;
  mode_e                            mode;
  logic [NL-1:0]                    lane_valid, lane_pass, hold;
  logic [NL-1:0][WBITS-1:0]         lane_w;
  logic [NL-1:0][WBITS-1:0][PB-1:0] lane_p;
  logic [NL-1:0][KS-1:0][ABITS-1:0] lane_act;
  logic [WBITS-1:0]                 pass_ctrl;
  logic [PSUM_W-1:0]                psum;
  logic                             psum_valid;

  int checks = 0, failures = 0, outs = 0, held_cycles = 0;
  longint cyc = 0, last_out = -1;

  tetris_tb_pkg::tetris_stim st;

  sac_unit #(.NL(NL), .KS(KS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One phase: nout outputs in one mode. The SAC unit outputs the raw
  // partial sum (before ReLU).
  task automatic run_phase(bit int8, int nout, bit fig3 = 0);
    st = new(NL, KS);
    mode = int8 ? MODE_INT8 : MODE_FP16;
    if (fig3) begin
      // The printed kneading example: six 8-bit weights w1..w6 become three
      // kneaded weights, i.e. three cycles instead of six.
      logic [15:0] w6[];
      tetris_tb_pkg::kw_t kq[$];
      int n;
      w6 = new[6];
      w6 = '{16'b10001010, 16'b11100101, 16'b00101011, 16'b11010000, 16'b00000000, 16'b00010101};
      n = tetris_tb_pkg::knead(w6, 0, 6, kq);
      checks++;
      if (n != 3 || kq[0].w != 16'hff || kq[1].w != 16'hff || kq[2].w != 16'h81 ||
          kq[0].p[7] != 0 || kq[1].p[7] != 1 || kq[2].p[7] != 3 ||
          kq[0].p[0] != 1 || kq[1].p[0] != 2 || kq[2].p[0] != 5) begin
        failures++;
        $display("kneading model does not reproduce the printed example");
      end
      st.add_output(int8, 2);
      st.add_output_lane0(int8, w6);
    end
    for (int k = 0; k < nout; k++) st.add_output(int8, 3);
    last_out = -1;
    while (!st.empty() || st.raw_q.size() > 0) begin
      @(negedge clk);
      if (psum_valid) begin
        longint e;
        int len;
        checks++;
        e = st.raw_q.pop_front();
        len = st.len_q.pop_front();
        if (longint'($signed(psum)) != e) begin
          failures++;
          if (failures < 10) $display("out %0d: exp %0d got %0d", outs, e, $signed(psum));
        end
        if (last_out >= 0) begin
          checks++;
          if (cyc - last_out != len) begin
            failures++;
            if (failures < 10) $display("out %0d: %0d cycles, expected %0d", outs, cyc - last_out, len);
          end
        end
        last_out = cyc;
        outs++;
      end
      if (|hold) held_cycles++;
      for (int l = 0; l < NL; l++) begin
        lane_valid[l] = (st.wq[l].size() > 0) && !hold[l];
        if (lane_valid[l]) begin
          tetris_tb_pkg::kw_t e;
          e = st.wq[l].pop_front();
          lane_w[l] = e.w;
          for (int b = 0; b < WBITS; b++) lane_p[l][b] = PB'(e.p[b]);
          for (int i = 0; i < KS; i++) lane_act[l][i] = st.aq[l][0][i];
          lane_pass[l] = e.pass;
          if (e.win_last) void'(st.aq[l].pop_front());
        end else begin
          lane_w[l] = 16'($urandom);
          lane_p[l] = '1;
          lane_pass[l] = 1'b0;
        end
      end
    end
    @(negedge clk);
    lane_valid = '0; lane_pass = '0;
    repeat (4) @(negedge clk);
    outs = 0;
  endtask

  initial begin
    rst_n = 0; lane_valid = '0; lane_pass = '0; lane_w = '0; lane_p = '0; lane_act = '0;
    mode = MODE_FP16;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int ph = 0; ph < 4; ph++) begin
      bit int8;
      int8 = ph[0];
      run_phase(int8, 40, ph == 0);
    end
    if (held_cycles == 0) failures++;
    $display("held cycles=%0d", held_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
