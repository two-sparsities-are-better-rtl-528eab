// tb_cs_top: end-to-end test of cs_top at its default sizes.
//
// Loads the three weight memories with complementary layouts (the same
// formulas as the block testbenches), sends frames of 25 pooled locations x 4
// conv locations x 9 dense 7x7x3 patches, and compares the 300 output blocks of the global
// k-WTA and its threshold with a reference model of the whole chain written
// here: stem sums, requantisation, top-8 selection, 3x3 accumulation,
// requantisation, 2x2 max pooling, top-8, linear sums over the non-zero
// winners, requantisation and the histogram threshold. The linear sums are
// also compared before requantisation. The patches of pooled location 3
// are all zero, so that location's winners are zero. Two frames are run:
// one with the default K = 225, one with a K chosen so that the threshold
// bin holds several values. The cycles from start to the first output,
// less the threshold search (which depends on the data), must be the same
// in both frames.
//
// It also counts how often each mechanism of the design happened and fails
// if one never did: serial burst loads into the first k-WTA, parallel loads
// into the second, arbiter slot assignments above 0 (several sub-products
// for one kernel in a cycle), zero winners skipped by the linear layer, ties
// at the global threshold letting more than K through, completed 3x3
// accumulations and pooled vectors.
module tb_cs_top;
  import cs_pkg::*;
  localparam int LOCS = 25, C = 64, KWIN = 8, TAPS = 9, POS = 49, CB = 3, SETS = 8;
  localparam int LIN_IN = 1600, LIN_OUT = 1500, NLIN = 75, GP = 5, GK = 225;
  localparam int SH_STEM = 7, SH_CONV = 8, SH_LIN = 6;
  localparam int POOL = 4;
  localparam int NPATCH = LOCS * POOL * TAPS;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, patch_valid, patch_ready;
  act_t [POS*CB-1:0] patch;
  logic sd_wr_en, cv_wr_en, li_wr_en;
  logic [8:0] sd_wr_addr;
  logic [33:0] sd_wr_data;
  logic [9:0] cv_wr_addr;
  logic [55:0] cv_wr_data;
  logic [10:0] li_wr_addr;
  logic [NLIN*19-1:0] li_wr_data;
  logic [10:0] k_sel;
  logic out_valid, done, slot_overflow;
  logic [8:0] out_addr;
  act_t [GP-1:0] out_val;
  act_t thresh;

  cs_top dut (.*);

  int checks = 0, failures = 0;

  // ---- weights ------------------------------------------------------------
  int sd_k [SETS*POS];
  int sd_w [SETS*POS][CB];
  int cv_k [TAPS*C][4];
  int cv_w [TAPS*C][4];
  int li_w [LIN_IN][NLIN];

  function automatic int li_kid(int r, int j);
    return 20 * j + (7 * r + j) % 20;
  endfunction

  function automatic int pval(int n, int i);
    if (n / (POOL * TAPS) == 3) return 0;
    return ((n * 2654435 + i * 40503 + (n ^ i) * 977) >> 3) & 255;
  endfunction

  function automatic int rq(longint x, int sh);
    longint y;
    if (x < 0) return 0;
    y = x >>> sh;
    return (y > 255) ? 255 : int'(y);
  endfunction

  // top-KWIN of a 64-vector, largest first, ties to the lower channel
  task automatic topk(input int v [C], output int wv [KWIN], output int wi [KWIN]);
    bit taken [C];
    foreach (taken[c]) taken[c] = 0;
    for (int n = 0; n < KWIN; n++) begin
      int b;
      b = -1;
      for (int c = 0; c < C; c++)
        if (!taken[c] && (b < 0 || v[c] > v[b])) b = c;
      taken[b] = 1;
      wv[n] = v[b];
      wi[n] = b;
    end
  endtask

  // ---- reference model ----------------------------------------------------
  int exp_blk [LIN_OUT];
  int exp_thr;
  int rqv [LIN_OUT];
  int hist [256];

  longint lin [LIN_OUT];
  task automatic reference();
    foreach (lin[o]) lin[o] = 0;
    for (int loc = 0; loc < LOCS; loc++) begin
      int pq [C];
      int w2v [KWIN], w2i [KWIN];
      for (int sb = 0; sb < POOL; sb++) begin
      longint cs [C];
      foreach (cs[f]) cs[f] = 0;
      for (int tap = 0; tap < TAPS; tap++) begin
        longint ss [C];
        int sq [C];
        int wv [KWIN], wi [KWIN];
        int n;
        n = (loc * POOL + sb) * TAPS + tap;
        foreach (ss[f]) ss[f] = 0;
        for (int e = 0; e < SETS * POS; e++)
          if (sd_k[e] >= 0)
            for (int c = 0; c < CB; c++) ss[sd_k[e]] += longint'(pval(n, (e % POS) * CB + c)) * sd_w[e][c];
        for (int f = 0; f < C; f++) sq[f] = rq(ss[f], SH_STEM);
        topk(sq, wv, wi);
        for (int p = 0; p < KWIN; p++)
          for (int j = 0; j < 4; j++)
            cs[cv_k[tap*C + wi[p]][j]] += longint'(wv[p]) * cv_w[tap*C + wi[p]][j];
      end
      // requantise, then 2x2 max pooling
      for (int f = 0; f < C; f++)
        if (sb == 0 || rq(cs[f], SH_CONV) > pq[f]) pq[f] = rq(cs[f], SH_CONV);
      end
      topk(pq, w2v, w2i);
      for (int p = 0; p < KWIN; p++)
        if (w2v[p] != 0) begin
          int r;
          r = loc * C + w2i[p];
          for (int j = 0; j < NLIN; j++) lin[li_kid(r, j)] += longint'(w2v[p]) * li_w[r][j];
        end
    end
    foreach (hist[i]) hist[i] = 0;
    for (int o = 0; o < LIN_OUT; o++) begin
      rqv[o] = rq(lin[o], SH_LIN);
      hist[rqv[o]]++;
    end
  endtask

  // expected threshold and outputs for a k-WTA count of k
  task automatic expect_for(int k);
    int acc_n;
    exp_thr = 0; acc_n = 0;
    for (int i = 255; i >= 0; i--) begin
      acc_n += hist[i];
      if (acc_n >= k) begin exp_thr = i; break; end
    end
    for (int o = 0; o < LIN_OUT; o++) exp_blk[o] = (rqv[o] >= exp_thr) ? rqv[o] : 0;
  endtask

  // a count k that ends inside a bin holding several values, so the
  // threshold lets more than k through
  function automatic int tie_k();
    int acc_n;
    acc_n = 0;
    for (int i = 255; i >= 0; i--) begin
      if (acc_n >= 1 && hist[i] >= 2) return acc_n + 1;
      acc_n += hist[i];
    end
    return 1;
  endfunction

  // ---- mechanism counters -------------------------------------------------
  int m_burst = 0, m_parallel = 0, m_slot = 0, m_skip = 0, m_conv = 0, m_pool = 0, m_tie = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_kwta1.in_valid) m_burst++;
    if (dut.u_kwta2.in_vec_valid) m_parallel++;
    if (dut.u_conv.out_valid) m_conv++;
    if (dut.u_pool.out_valid) m_pool++;
    if (dut.state == dut.T_LIN && dut.w_val[dut.widx[2:0]] == '0) m_skip++;
    for (int j = 0; j < 32; j++)
      if (dut.u_conv.p_valid[j] && dut.u_conv.p_slot[j] != '0) begin
        m_slot++;
        break;
      end
  end

  // one frame: start, 225 patches, then the 300 output blocks
  task automatic frame(input int ksel, input int k, output int lat, output int np);
    int nout, npass, t0;
    t0 = $time;
    expect_for(k);
    k_sel = 11'(ksel);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int n = 0; n < NPATCH; n++) begin
      while (!patch_ready) @(negedge clk);
      for (int i = 0; i < POS * CB; i++) patch[i] = act_t'(pval(n, i));
      patch_valid = 1;
      @(negedge clk);
      patch_valid = 0;
    end
    nout = 0; npass = 0;
    while (dut.state != dut.T_FILL) @(negedge clk);
    for (int o = 0; o < LIN_OUT; o++) begin
      checks++;
      if (longint'(dut.lin_acc[o]) != lin[o]) begin
        failures++;
        if (failures < 10) $display("linear sum %0d got %0d exp %0d", o, dut.lin_acc[o], lin[o]);
      end
    end
    while (!done) begin
      if (out_valid) begin
        if (nout == 0) lat = ($time - t0) / 10 - (255 - int'(thresh));
        checks++;
        if (int'(out_addr) != nout) failures++;
        for (int l = 0; l < GP; l++) begin
          checks++;
          if (int'(out_val[l]) != exp_blk[nout * GP + l]) begin
            failures++;
            if (failures < 10) $display("block %0d lane %0d got %0d exp %0d", nout, l, out_val[l], exp_blk[nout * GP + l]);
          end
          if (out_val[l] >= thresh && out_val[l] != 0) npass++;
        end
        nout++;
      end
      @(negedge clk);
    end
    checks += 3;
    if (nout != LIN_OUT / GP) failures++;
    if (int'(thresh) != exp_thr) begin failures++; $display("thresh %0d exp %0d", thresh, exp_thr); end
    if (slot_overflow) failures++;
    $display("frame with k=%0d took %0d cycles; threshold %0d, %0d non-zero winners", k, ($time - t0) / 10, thresh, npass);
    np = npass;
  endtask

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat0, lat1, np, kt;
    rst_n = 0; start = 0; patch_valid = 0; patch = '0;
    sd_wr_en = 0; cv_wr_en = 0; li_wr_en = 0; sd_wr_addr = '0; sd_wr_data = '0;
    cv_wr_addr = '0; cv_wr_data = '0; li_wr_addr = '0; li_wr_data = '0; k_sel = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // stem weights
    foreach (sd_k[e]) sd_k[e] = -1;
    for (int e = 0; e < SETS * POS; e++) begin
      int s, q, i;
      s = e / POS; q = e % POS;
      i = 0;
      while ((10 * i + 3 * s) % POS != q) i++;
      sd_wr_data = '0;
      if (i < 45 && 9 * s + i / 5 < C) begin
        sd_k[e] = 9 * s + i / 5;
        sd_wr_data[33] = 1'b1;
        sd_wr_data[32:30] = 3'(i % 5);
        sd_wr_data[29:24] = 6'(sd_k[e]);
        for (int c = 0; c < CB; c++) begin
          sd_w[e][c] = $urandom_range(160) - 40;
          sd_wr_data[c*8 +: 8] = 8'(sd_w[e][c]);
        end
      end
      sd_wr_en = 1; sd_wr_addr = 9'(e);
      @(negedge clk);
    end
    sd_wr_en = 0;
    // 3x3 weights
    for (int r = 0; r < TAPS * C; r++) begin
      for (int j = 0; j < 4; j++) begin
        cv_k[r][j] = ((r % C) / 4 + 3 * (r / C)) % 16 + 16 * j;
        cv_w[r][j] = $urandom_range(200) - 80;
        cv_wr_data[j*14 +: 14] = {6'(cv_k[r][j]), 8'(cv_w[r][j])};
      end
      cv_wr_en = 1; cv_wr_addr = 10'(r);
      @(negedge clk);
    end
    cv_wr_en = 0;
    // linear weights
    for (int r = 0; r < LIN_IN; r++) begin
      for (int j = 0; j < NLIN; j++) begin
        li_w[r][j] = $urandom_range(24) - 10;
        li_wr_data[j*19 +: 19] = {11'(li_kid(r, j)), 8'(li_w[r][j])};
      end
      li_wr_en = 1; li_wr_addr = 11'(r);
      @(negedge clk);
    end
    li_wr_en = 0;
    reference();

    frame(0, GK, lat0, np);
    kt = tie_k();
    frame(kt, kt, lat1, np);
    checks += 2;
    if (lat0 != lat1) begin failures++; $display("latency differs: %0d vs %0d", lat0, lat1); end
    if (np > kt) m_tie++;
    else $display("no tie beyond K at the threshold");
    $display("mechanisms: serial bursts %0d, parallel loads %0d, arbiter slots>0 cycles %0d, zero winners skipped %0d, 3x3 results %0d, pooled vectors %0d, frames with a tie beyond K %0d",
             m_burst, m_parallel, m_slot, m_skip, m_conv, m_pool, m_tie);
    checks += 7;
    if (m_burst != 2 * NPATCH * 8) failures++;
    if (m_parallel != 2 * LOCS) failures++;
    if (m_slot == 0) failures++;
    if (m_skip == 0) failures++;
    if (m_conv != 2 * LOCS * POOL) failures++;
    if (m_pool != 2 * LOCS) failures++;
    if (m_tie == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
