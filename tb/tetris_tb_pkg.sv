// tetris_tb_pkg: reference models shared by the Tetris testbenches.
//
// knead(): the offline weight-kneading step. For one window of KS original
// weights it looks at every bit column b separately and lists, in weight
// order, the weights whose bit b is 1. The k-th kneaded weight takes bit b
// = 1 with pointer p_b = index of the k-th such weight; columns with fewer
// ones leave bit b = 0 (its pointer is then a random don't-care). The number
// of kneaded weights is the longest column (at least one, so that a window
// of all-zero weights still releases its activations). In int8 mode the
// weights are 8 bits wide; kneaded weights 2e and 2e+1 are packed into the
// lower and upper half of entry e.
//
// tetris_stim: per-PE stimulus and expected results (see below).
//
// dot(): the plain sum of products the hardware must reproduce.
package tetris_tb_pkg;

  localparam int MAXKS = 32;

  typedef struct {
    logic [15:0] w;
    int          p[16];
    bit          win_last;
    bit          pass;
  } kw_t;

  function automatic int knead(input logic [15:0] wts[], input bit int8, input int ks,
                               ref kw_t q[$]);
    int col[16][$];
    int nbits, nk, ne;
    nbits = int8 ? 8 : 16;
    nk = 0;
    for (int b = 0; b < nbits; b++) begin
      for (int i = 0; i < ks; i++)
        if (wts[i][b]) col[b].push_back(i);
      if (col[b].size() > nk) nk = col[b].size();
    end
    ne = int8 ? (nk + 1) / 2 : nk;
    if (ne == 0) ne = 1;
    for (int e = 0; e < ne; e++) begin
      kw_t k;
      k.w = '0;
      for (int b = 0; b < 16; b++) k.p[b] = int'($urandom_range(ks - 1));
      for (int b = 0; b < nbits; b++) begin
        int k0, k1;
        k0 = int8 ? 2 * e : e;
        k1 = 2 * e + 1;
        if (k0 < col[b].size()) begin
          k.w[b] = 1'b1;
          k.p[b] = col[b][k0];
        end
        if (int8 && k1 < col[b].size()) begin
          k.w[8 + b] = 1'b1;
          k.p[8 + b] = col[b][k1];
        end
      end
      k.win_last = (e == ne - 1);
      k.pass     = 1'b0;
      q.push_back(k);
    end
    return ne;
  endfunction

  function automatic longint dot(input logic [15:0] acts[], input logic [15:0] wts[],
                                 input bit int8, input int ks);
    longint s;
    s = 0;
    for (int i = 0; i < ks; i++) begin
      longint a, w;
      a = longint'($signed(acts[i]));
      w = int8 ? longint'($signed(wts[i][7:0])) : longint'($signed(wts[i]));
      s += a * w;
    end
    return s;
  endfunction

  // Random weight with the bit statistics the paper reports for fp16 weights:
  // about half of the bits set at most positions, bits 3..5 almost never
  // set, and a few all-zero weights.
  function automatic logic [15:0] rand_weight(input bit int8);
    logic [15:0] w;
    if ($urandom_range(99) < 3) return '0;
    w = 16'($urandom);
    if (!int8 && $urandom_range(99) < 98) w[5:3] = '0;
    if (int8) w[15:8] = '0;
    return w;
  endfunction

  // tetris_stim: stimulus generator for one PE's worth of outputs.
  //
  // add_output() builds one output value: every lane gets a random number of
  // KS-weight windows (so lanes end at different times), each window random
  // activations and random weights (occasionally an all-zero window), the
  // weights are kneaded with knead(), the last entry of each
  // lane carries the pass mark, and the expected output max(0, sum A*W) is
  // queued (and the raw sum before ReLU) together with the longest lane's entry count (the cycles the SAC
  // unit needs for this output). Counters record the mechanisms exercised.
  class tetris_stim;
    typedef logic [15:0] win_t[MAXKS];

    int nl, ks;
    kw_t wq[][$];
    win_t               aq[][$];
    longint             exp_q[$];
    longint             raw_q[$];
    int                 len_q[$];
    bit                 mode_q[$];

    int n_zero_win = 0, n_neg_bits = 0, n_slack_bits = 0, n_clipped = 0, n_uneven = 0;
    int n_entries = 0, n_weights = 0;

    function new(int nl, int ks);
      this.nl = nl;
      this.ks = ks;
      wq = new[nl];
      aq = new[nl];
    endfunction

    function void add_output(bit int8, int max_win);
      longint sum;
      int     maxlen, minlen;
      sum = 0;
      maxlen = 0;
      minlen = 1 << 30;
      for (int l = 0; l < nl; l++) begin
        int nwin, len;
        nwin = $urandom_range(max_win, 1);
        len = 0;
        for (int w = 0; w < nwin; w++) begin
          logic [15:0] acts[], wts[];
          win_t        win;
          bit          zw;
          kw_t tmp[$];
          acts = new[ks];
          wts  = new[ks];
          zw = ($urandom_range(19) == 0);
          if (zw) n_zero_win++;
          for (int i = 0; i < ks; i++) begin
            acts[i] = 16'($urandom);
            wts[i]  = zw ? 16'h0 : rand_weight(int8);
            win[i]  = acts[i];
          end
          for (int i = ks; i < MAXKS; i++) win[i] = 16'($urandom);
          sum += dot(acts, wts, int8, ks);
          len += knead(wts, int8, ks, tmp);
          n_weights += ks;
          foreach (tmp[k]) begin
            if (tmp[k].w[15] || (int8 && tmp[k].w[7])) n_neg_bits++;
            if (tmp[k].w != 16'hffff) n_slack_bits++;
            wq[l].push_back(tmp[k]);
          end
          aq[l].push_back(win);
        end
        wq[l][$].pass = 1'b1;
        n_entries += len;
        if (len > maxlen) maxlen = len;
        if (len < minlen) minlen = len;
      end
      if (minlen != maxlen) n_uneven++;
      if (sum < 0) n_clipped++;
      raw_q.push_back(sum);
      exp_q.push_back(sum < 0 ? 0 : sum);
      len_q.push_back(maxlen);
      mode_q.push_back(int8);
    endfunction

    // One output of a layer whose reduction length is n (kernel height x
    // width x input channels): the n weights are cut into windows of KS,
    // dealt to the lanes round-robin; the last window is padded with zero
    // weights. Returns nothing; queues as add_output().
    function void add_output_len(bit int8, int n);
      longint sum;
      int     nwin, maxlen, minlen;
      int     len[];
      sum = 0;
      len = new[nl];
      nwin = (n + ks - 1) / ks;
      for (int w = 0; w < nwin; w++) begin
        logic [15:0] acts[], wts[];
        win_t        win;
        int          l;
        kw_t         tmp[$];
        l = w % nl;
        acts = new[ks];
        wts  = new[ks];
        for (int i = 0; i < ks; i++) begin
          acts[i] = 16'($urandom);
          wts[i]  = (w * ks + i < n) ? rand_weight(int8) : 16'h0;
          win[i]  = acts[i];
        end
        for (int i = ks; i < MAXKS; i++) win[i] = 16'($urandom);
        sum += dot(acts, wts, int8, ks);
        len[l] += knead(wts, int8, ks, tmp);
        n_weights += ks;
        foreach (tmp[k]) wq[l].push_back(tmp[k]);
        aq[l].push_back(win);
      end
      // a lane without any window of this output still needs a pass mark:
      // give it one all-zero window
      for (int l = 0; l < nl; l++) begin
        if (len[l] == 0) begin
          logic [15:0] wts[];
          win_t        win;
          kw_t         tmp[$];
          wts = new[ks];
          foreach (wts[i]) wts[i] = 16'h0;
          for (int i = 0; i < MAXKS; i++) win[i] = 16'($urandom);
          len[l] += knead(wts, int8, ks, tmp);
          foreach (tmp[k]) wq[l].push_back(tmp[k]);
          aq[l].push_back(win);
        end
        wq[l][$].pass = 1'b1;
        n_entries += len[l];
      end
      maxlen = 0;
      minlen = 1 << 30;
      foreach (len[l]) begin
        if (len[l] > maxlen) maxlen = len[l];
        if (len[l] < minlen) minlen = len[l];
      end
      if (minlen != maxlen) n_uneven++;
      if (sum < 0) n_clipped++;
      raw_q.push_back(sum);
      exp_q.push_back(sum < 0 ? 0 : sum);
      len_q.push_back(maxlen);
      mode_q.push_back(int8);
    endfunction

    // One output in which lane 0 gets the given weights (padded with zero
    // weights to KS) and every other lane one all-zero window.
    function void add_output_lane0(bit int8, logic [15:0] w0[]);
      longint sum;
      int     len0;
      sum = 0;
      len0 = 0;
      for (int l = 0; l < nl; l++) begin
        logic [15:0] acts[], wts[];
        win_t        win;
        kw_t         tmp[$];
        int          n;
        acts = new[ks];
        wts  = new[ks];
        for (int i = 0; i < ks; i++) begin
          acts[i] = 16'($urandom);
          wts[i]  = (l == 0 && i < w0.size()) ? w0[i] : 16'h0;
          win[i]  = acts[i];
        end
        for (int i = ks; i < MAXKS; i++) win[i] = 16'($urandom);
        sum += dot(acts, wts, int8, ks);
        n = knead(wts, int8, ks, tmp);
        if (l == 0) len0 = n;
        foreach (tmp[k]) wq[l].push_back(tmp[k]);
        wq[l][$].pass = 1'b1;
        aq[l].push_back(win);
        n_entries += n;
      end
      raw_q.push_back(sum);
      exp_q.push_back(sum < 0 ? 0 : sum);
      len_q.push_back(len0 > 1 ? len0 : 1);
      mode_q.push_back(int8);
    endfunction

    function bit empty();
      foreach (wq[l]) if (wq[l].size() > 0 || aq[l].size() > 0) return 0;
      return 1;
    endfunction
  endclass

endpackage
