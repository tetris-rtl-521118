// tb_workload_layers: convolution layers of the networks the accelerator is
// evaluated on (AlexNet, GoogLeNet, VGG-16/19, NiN), run on the full
// 16-PE accelerator in fp16 and int8 mode.
//
// A layer enters only through its reduction length n = kernel height x
// width x input channels (values from the public network definitions):
// each output is a dot product of n activations and n weights, cut into
// KS-wide windows dealt round-robin to the 16 lanes. Every PE computes
// NOUT outputs (different output channels) of the layer. Weights are random
// with the bit statistics of trained fp16 weights; there are no trained
// weights here, so cycle counts are indicative only. Checks every output
// against max(0, sum A*W) and the cycle count of each output against its
// longest lane; prints cycles per output next to the n/16 cycles a
// one-pair-per-lane-per-cycle MAC array would need.
module tb_workload_layers;
  import tetris_pkg::*;

  localparam int unsigned NP = NPE, NL = NLANES, KS = KS_DFLT;
  localparam int unsigned PB = $clog2(KS);
  localparam int          NOUT = 2;    // outputs per PE per layer

  logic                                     clk = 0, rst_n;
  mode_e                                    mode;
  logic [NP-1:0][NL-1:0]                    a_push_valid, a_push_ready;
  logic [NP-1:0][NL-1:0][KS-1:0][ABITS-1:0] a_push_data;
  logic [NP-1:0][NL-1:0]                    w_push_valid, w_push_ready;
  logic [NP-1:0][NL-1:0][WBITS-1:0]         w_push_w;
  logic [NP-1:0][NL-1:0][WBITS-1:0][PB-1:0] w_push_p;
  logic [NP-1:0][NL-1:0]                    w_push_win_last, w_push_pass;
  logic [NP-1:0]                            out_valid;
  logic [NP-1:0][PSUM_W-1:0]                out_act;

  tetris_top dut (.*);

  int checks = 0, failures = 0;
  int n_pass = 0, n_held = 0, n_full = 0, n_starved = 0, n_fp16 = 0, n_int8 = 0, n_switch = 0;
  int n_zero_win = 0, n_neg = 0, n_slack = 0, n_clip = 0, n_rate = 0;
  longint cyc = 0;
  longint last_out[NP];
  tetris_tb_pkg::tetris_stim st[NP];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("%t: %s", $time, what);
    end
  endtask

  task automatic run_layer(string name, int n, bit int8);
    bit     busy, throttle;
    longint t0;
    int     sum_len;
    throttle = 0;
    sum_len = 0;
    t0 = cyc;
    if (mode != (int8 ? MODE_INT8 : MODE_FP16)) n_switch++;
    mode = int8 ? MODE_INT8 : MODE_FP16;
    for (int e = 0; e < NP; e++) begin
      st[e] = new(NL, KS);
      for (int k = 0; k < NOUT; k++) st[e].add_output_len(int8, n);
      if (e == 0) foreach (st[e].len_q[k]) sum_len += st[e].len_q[k];
      last_out[e] = -1;
    end
    busy = 1;
    while (busy) begin
      @(negedge clk);
      busy = 0;
      // outputs
      for (int e = 0; e < NP; e++) begin
        if (out_valid[e]) begin
          longint exp_v;
          int     len;
          exp_v = st[e].exp_q.pop_front();
          len   = st[e].len_q.pop_front();
          chk(longint'($signed(out_act[e])) == exp_v,
              $sformatf("pe %0d: out %0d expected %0d", e, $signed(out_act[e]), exp_v));
          n_pass++;
          if (int8) n_int8++; else n_fp16++;
          if (!throttle && last_out[e] >= 0) begin
            chk(cyc - last_out[e] == len,
                $sformatf("pe %0d: %0d cycles between outputs, expected %0d", e, cyc - last_out[e], len));
            n_rate++;
          end
          last_out[e] = cyc;
        end
        if (st[e].exp_q.size() > 0) busy = 1;
      end
      // observe PE 0
      if (|dut.g_pe[0].u_pe.hold) n_held++;
      if (st[0].exp_q.size() > 0 && dut.g_pe[0].u_pe.hold == '0 && dut.g_pe[0].u_pe.lane_valid != '1)
        n_starved++;
      // inputs
      for (int e = 0; e < NP; e++)
        for (int l = 0; l < NL; l++) begin
          a_push_valid[e][l] = st[e].aq[l].size() > 0 && !(throttle && $urandom_range(2) == 0);
          w_push_valid[e][l] = st[e].wq[l].size() > 0 && !(throttle && $urandom_range(2) == 0);
          if (a_push_valid[e][l])
            for (int i = 0; i < KS; i++) a_push_data[e][l][i] = st[e].aq[l][0][i];
          if (w_push_valid[e][l]) begin
            tetris_tb_pkg::kw_t k;
            k = st[e].wq[l][0];
            w_push_w[e][l]        = k.w;
            w_push_win_last[e][l] = k.win_last;
            w_push_pass[e][l]     = k.pass;
            for (int b = 0; b < WBITS; b++) w_push_p[e][l][b] = PB'(k.p[b]);
          end
          if ((a_push_valid[e][l] && !a_push_ready[e][l]) ||
              (w_push_valid[e][l] && !w_push_ready[e][l])) n_full++;
          if (a_push_valid[e][l] && a_push_ready[e][l]) void'(st[e].aq[l].pop_front());
          if (w_push_valid[e][l] && w_push_ready[e][l]) void'(st[e].wq[l].pop_front());
        end
    end
    for (int e = 0; e < NP; e++) begin
      n_zero_win += st[e].n_zero_win;
      n_neg      += st[e].n_neg_bits;
      n_slack    += st[e].n_slack_bits;
      n_clip     += st[e].n_clipped;
      chk(st[e].empty(), "stimulus left over");
    end
    a_push_valid = '0;
    w_push_valid = '0;
    $display("%-22s %s n=%5d: %6.1f cycles/output (MAC array: %0d), %0d cycles for %0d outputs",
             name, int8 ? "int8" : "fp16", n, real'(sum_len) / NOUT, (n + NL - 1) / NL, cyc - t0, NP * NOUT);
    repeat (5) @(negedge clk);
    chk(out_valid == '0, "spurious output");
  endtask

  initial begin
    rst_n = 0; mode = MODE_FP16;
    a_push_valid = '0; w_push_valid = '0; a_push_data = '0;
    w_push_w = '0; w_push_p = '0; w_push_win_last = '0; w_push_pass = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      run_layer("AlexNet conv1 11x11x3", 363, m[0]);
      run_layer("AlexNet conv3 3x3x256", 2304, m[0]);
      run_layer("GoogLeNet 3a 1x1x192", 192, m[0]);
      run_layer("GoogLeNet 3a 5x5x16", 400, m[0]);
      run_layer("VGG conv1_2 3x3x64", 576, m[0]);
      run_layer("VGG conv5 3x3x512", 4608, m[0]);
      run_layer("NiN cccp 1x1x96", 96, m[0]);
      run_layer("NiN conv4 3x3x384", 3456, m[0]);
    end
    if (n_pass != 2 * 8 * NP * NOUT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
