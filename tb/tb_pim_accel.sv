// tb_pim_accel: end-to-end test of the accelerator top (PIM core and
// ReRAM attention head) at a reduced size.
//
// Loads random weights, runs prefill calibration on NPRE tokens, finalises
// the level-0 quantisation parameters, appends the same tokens to the
// compressed KV cache and then decodes NDEC new tokens. A procedural model
// of the layer (layernorm, projections, pruning, HQE quantisation, record
// restoration, softmax table, value sums, FFN) predicts every decode output,
// the status counters and the record moved out through the HBM port.
// Each mechanism of the design must be seen at least once: pruning, kept
// elements, HQE level opening, level saturation, the fresh-key path of the
// key selector, cached keys restored by the dequantiser, lane gating in the
// CE arrays, and an HBM-side record read and write.
//
// The ReRAM attention head (SN = MAXT rows, SD = D, SDK = HD) is tested in
// parallel: every result row is compared with a reference built from the
// decomposed products, and the pipeline overlap, the shared dual-access X
// crossbar and the absence of crossbar writes during inference are checked.
module tb_pim_accel;
  import pim_pkg::*;
  import pim_ref_pkg::*;

  localparam int D      = 32;
  localparam int NH     = 2;
  localparam int HD     = 16;
  localparam int FFN    = 64;
  localparam int QB     = 2;
  localparam int LEVELS = 2;
  localparam int MAXT   = 8;
  localparam int NPRE   = 3;
  localparam int NDEC   = 3;
  localparam int THR    = 20;
  localparam int WMAX   = 128;  // weights drawn from [-WMAX, WMAX-1]
  localparam int REC_W  = D * (QB + 2);
  localparam int GBD    = 2 * MAXT;
  localparam int SWMAX  = 128;  // ReRAM head weights from [-SWMAX, SWMAX-1]

  // ---------------------------------------------------------- ReRAM head
  localparam int SN = MAXT, SD = D, SDK = HD;
  localparam int SPW = (SD > SN) ? SD : SN;
  logic                    sda_prog_valid, sda_prog_ready, sda_x_valid, sda_x_ready, sda_res_valid;
  logic [1:0]              sda_prog_sel;
  logic [$clog2(SD)-1:0]   sda_prog_col;
  logic signed [7:0]       sda_prog_data [SPW];
  logic signed [7:0]       sda_x_row [SD];
  logic [$clog2(SN)-1:0]   sda_res_idx;
  logic signed [7:0]       sda_res_row [SDK];
  logic [31:0]             sda_overlap_cycles, sda_x_stalls, sda_prog_columns;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   wl_we;
  logic [2:0]             wl_sel;
  logic [$clog2(FFN)-1:0] wl_row;
  logic [FFN*8-1:0]       wl_data;
  logic                   cmd_valid, cmd_ready, done, y_valid;
  logic [1:0]             cmd;
  logic signed [7:0]      x_in [D];
  logic signed [7:0]      y_out [D];
  logic                   hbm_we, hbm_re;
  logic [$clog2(GBD)-1:0] hbm_addr;
  logic [REC_W-1:0]       hbm_wdata, hbm_rdata;
  logic [TOK_W-1:0]       n_tokens;
  logic [31:0]            kept_cnt, pruned_cnt, levels_opened, sat_events, kv_nz_bits;
  logic [31:0]            fresh_key_uses, ce_active_lanes;

  pim_accel #(.D(D), .NH(NH), .HD(HD), .FFN(FFN), .QB(QB), .LEVELS(LEVELS), .MAXT(MAXT)) dut (
    .clk, .rst_n, .wl_we, .wl_sel, .wl_row, .wl_data, .prune_thr(8'(THR)),
    .cmd_valid, .cmd, .cmd_ready, .x_in, .done, .y_valid, .y_out,
    .hbm_we, .hbm_re, .hbm_addr, .hbm_wdata, .hbm_rdata,
    .n_tokens, .kept_cnt, .pruned_cnt, .levels_opened, .sat_events, .kv_nz_bits,
    .fresh_key_uses, .ce_active_lanes,
    .sda_prog_valid, .sda_prog_sel, .sda_prog_col, .sda_prog_data, .sda_prog_ready,
    .sda_x_valid, .sda_x_row, .sda_x_ready, .sda_res_valid, .sda_res_idx, .sda_res_row,
    .sda_overlap_cycles, .sda_x_stalls, .sda_prog_columns);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------- ReRAM head test
  // Runs concurrently with the core test: programs W_Q, W_K^T, X and W_V,
  // streams all SN token rows and compares each attention row with the
  // decomposed-product reference; the core test waits for it before ending.
  int sx [SN][SD];
  int swq [SD][SDK];
  int swk [SD][SDK];
  int swv [SD][SDK];
  int sref [SN][SDK];
  int s_nres = 0, s_cyc = 0, s_t0 = 0, s_tfirst = 0, s_tend = 0, s_inter = 0;
  bit sda_finished = 0;

  task automatic sda_prog(input int sel, input int col, input int vals [], input int n);
    @(negedge clk);
    while (!sda_prog_ready) @(negedge clk);
    sda_prog_valid = 1; sda_prog_sel = 2'(sel); sda_prog_col = $clog2(SD)'(col);
    for (int r = 0; r < SPW; r++) sda_prog_data[r] = (r < n) ? 8'(vals[r]) : 8'sd0;
    @(negedge clk);
    sda_prog_valid = 0;
  endtask

  function automatic void sda_model();
    for (int i = 0; i < SN; i++) begin
      int q [SDK], r [SD], p [SD], s [SN];
      longint o [SN], e [SN], mx, es, a;
      for (int c = 0; c < SDK; c++) begin
        a = 0; for (int j = 0; j < SD; j++) a += sx[i][j] * swq[j][c];
        q[c] = sat8i(a >>> 8);
      end
      for (int j = 0; j < SD; j++) begin
        a = 0; for (int c = 0; c < SDK; c++) a += q[c] * swk[j][c];
        r[j] = sat8i(a >>> 8);
      end
      for (int t = 0; t < SN; t++) begin
        o[t] = 0; for (int j = 0; j < SD; j++) o[t] += r[j] * sx[t][j];
        if (t == 0 || o[t] > mx) mx = o[t];
      end
      es = 0;
      for (int t = 0; t < SN; t++) begin e[t] = sm_e(o[t], mx); es += e[t]; end
      for (int t = 0; t < SN; t++) s[t] = int'((e[t] * 256 + es / 2) / es);
      for (int j = 0; j < SD; j++) begin
        a = 0; for (int t = 0; t < SN; t++) a += s[t] * sx[t][j];
        p[j] = sat8i(a >>> 8);
      end
      for (int c = 0; c < SDK; c++) begin
        a = 0; for (int j = 0; j < SD; j++) a += p[j] * swv[j][c];
        sref[i][c] = sat8i(a >>> 8);
      end
    end
  endfunction

  always @(posedge clk) begin
    s_cyc++;
    if (rst_n && dut.u_sda.go3 && (dut.u_sda.sm_busy || dut.u_sda.fs)) s_inter++;
    if (rst_n && sda_res_valid) begin
      if (s_nres == 0) s_tfirst = s_cyc;
      s_tend = s_cyc;
      s_nres++;
      for (int c = 0; c < SDK; c++)
        check(sda_res_row[c] == 8'(sref[sda_res_idx][c]),
              $sformatf("ReRAM head row %0d col %0d = %0d, expected %0d", sda_res_idx, c, sda_res_row[c], sref[sda_res_idx][c]));
      check(sda_res_idx == $clog2(SN)'(s_nres - 1), "ReRAM head row order");
    end
  end

  initial begin
    int col [];
    sda_prog_valid = 0; sda_prog_sel = 0; sda_prog_col = 0; sda_x_valid = 0;
    for (int r = 0; r < SPW; r++) sda_prog_data[r] = 0;
    for (int j = 0; j < SD; j++) sda_x_row[j] = 0;
    for (int i = 0; i < SN; i++) for (int j = 0; j < SD; j++) sx[i][j] = $urandom_range(255) - 128;
    for (int j = 0; j < SD; j++) for (int c = 0; c < SDK; c++) begin
      swq[j][c] = $urandom_range(2 * SWMAX - 1) - SWMAX;
      swk[j][c] = $urandom_range(2 * SWMAX - 1) - SWMAX;
      swv[j][c] = $urandom_range(2 * SWMAX - 1) - SWMAX;
    end
    sda_model();
    wait (rst_n);
    col = new[SPW];
    for (int c = 0; c < SDK; c++) begin for (int j = 0; j < SD; j++) col[j] = swq[j][c]; sda_prog(0, c, col, SD); end
    for (int j = 0; j < SD; j++) begin for (int c = 0; c < SDK; c++) col[c] = swk[j][c]; sda_prog(1, j, col, SDK); end
    for (int j = 0; j < SD; j++) begin for (int i = 0; i < SN; i++) col[i] = sx[i][j]; sda_prog(2, j, col, SN); end
    for (int c = 0; c < SDK; c++) begin for (int j = 0; j < SD; j++) col[j] = swv[j][c]; sda_prog(3, c, col, SD); end
    @(negedge clk);
    while (!sda_prog_ready) @(negedge clk);
    s_t0 = s_cyc;
    for (int i = 0; i < SN; i++) begin
      for (int j = 0; j < SD; j++) sda_x_row[j] = 8'(sx[i][j]);
      sda_x_valid = 1;
      while (!sda_x_ready) @(negedge clk);
      @(negedge clk);
      sda_x_valid = 0;
    end
    while (s_nres < SN) @(negedge clk);
    sda_finished = 1;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ model state
  int wq [D][D];
  int wk [D][D];
  int wv [D][D];
  int wo [D][D];
  int w1 [D][FFN];
  int w2 [FFN][D];
  int rlo [2*D];
  int rhi [2*D];
  int lvl [2*D];
  bit seen [2*D];
  int kc [MAXT][D];
  int vc [MAXT][D];
  int ntok = 0;
  longint m_kept = 0, m_pruned = 0, m_levels = 0, m_sat = 0, m_bits = 0, m_fresh = 0;
  longint m_lanes = 0, all_lanes = 0;
  int rec0_index [D];

  function automatic void ln_ref(input int x [], output int y []);
    longint s, q, v, r;
    int n;
    n = x.size();
    y = new[n];
    s = 0; q = 0;
    foreach (x[j]) begin s += x[j]; q += x[j] * x[j]; end
    v = n * q - s * s;
    r = isqrt_fast(v);
    foreach (x[j]) y[j] = (r == 0) ? 0 : sat8i(rdiv_ref((longint'(n) * x[j] - s) * 32, r));
  endfunction

  // Runs one token through the model; returns y for decode.
  task automatic model_token(input int c, input int x [D], output int y [D]);
    int xa [], xn [], qv [D], kv [D], vv [D], restored [2*D];
    int att [D], ov [], on2 [], f1 [FFN];
    longint acc;
    int nk, nz;
    xa = new[D];
    foreach (x[j]) xa[j] = x[j];
    ln_ref(xa, xn);
    for (int cc = 0; cc < D; cc++) begin
      longint aq = 0, ak = 0, av = 0;
      for (int r = 0; r < D; r++) begin
        aq += xn[r] * wq[r][cc]; ak += xn[r] * wk[r][cc]; av += xn[r] * wv[r][cc];
      end
      qv[cc] = sat8i(aq >>> 8); kv[cc] = sat8i(ak >>> 8); vv[cc] = sat8i(av >>> 8);
    end
    nk = 0; nz = 0;
    for (int ch = 0; ch < 2 * D; ch++) begin
      int val, s, z, qq;
      bit keep, outside;
      val  = (ch < D) ? kv[ch] : vv[ch - D];
      keep = (val != 0) && ((val < 0 ? -val : val) >= THR);
      if (keep) m_kept++; else m_pruned++;
      restored[ch] = 0;
      if (c == CMD_CALIB) begin
        if (keep) begin
          if (!seen[ch] || val < rlo[ch]) rlo[ch] = val;
          if (!seen[ch] || val > rhi[ch]) rhi[ch] = val;
          seen[ch] = 1;
        end
      end else if (keep) begin
        outside = (val < rlo[ch]) || (val > rhi[ch]);
        if (c == CMD_DECODE && outside && lvl[ch] < LEVELS - 1) begin
          if (val < rlo[ch]) rlo[ch] = val;
          if (val > rhi[ch]) rhi[ch] = val;
          lvl[ch]++;
          m_levels++;
        end else if (c == CMD_DECODE && outside) begin
          m_sat++;
        end
        s  = q_scale(rlo[ch], rhi[ch], QB);
        z  = q_zero(rlo[ch], s, QB);
        qq = q_val(val, s, z, QB);
        restored[ch] = sat8i(longint'(s) * (qq - z));
        nk++;
        if (qq != 0) nz++;
      end
      if (ch == D - 1 || ch == 2 * D - 1) begin
        if (c != CMD_CALIB) m_bits += D + nk + QB * nz;
        nk = 0; nz = 0;
      end
      if (c == CMD_APPEND && ntok == 0 && ch < D) rec0_index[ch] = keep;
    end
    if (c == CMD_CALIB) return;
    for (int j = 0; j < D; j++) begin
      kc[ntok][j] = restored[j];
      vc[ntok][j] = restored[D + j];
    end
    ntok++;
    if (c == CMD_APPEND) return;
    // attention
    for (int j = 0; j < D; j++) att[j] = 0;
    for (int h = 0; h < NH; h++) begin
      longint sc [MAXT];
      longint e [MAXT];
      longint mx, es;
      int p [MAXT];
      for (int t = 0; t < ntok; t++) begin
        sc[t] = 0;
        for (int i = 0; i < HD; i++) begin
          int kk;
          kk = (t == ntok - 1) ? kv[h*HD + i] : kc[t][h*HD + i];
          sc[t] += qv[h*HD + i] * kk;
          if (qv[h*HD + i] != 0 && kk != 0) m_lanes++;
        end
        all_lanes += HD;
        if (t == 0 || sc[t] > mx) mx = sc[t];
      end
      es = 0;
      for (int t = 0; t < ntok; t++) begin e[t] = sm_e(sc[t], mx); es += e[t]; end
      for (int t = 0; t < ntok; t++) p[t] = int'((e[t] * 256 + es / 2) / es);
      for (int i = 0; i < HD; i++) begin
        acc = 0;
        for (int t = 0; t < ntok; t++) begin
          acc += p[t] * vc[t][h*HD + i];
          if (p[t] != 0 && vc[t][h*HD + i] != 0) m_lanes++;
        end
        att[h*HD + i] = sat8i(acc >>> 8);
      end
      all_lanes += ntok * HD;
    end
    m_fresh++;
    ov = new[D];
    for (int cc = 0; cc < D; cc++) begin
      acc = 0;
      for (int r = 0; r < D; r++) acc += att[r] * wo[r][cc];
      ov[cc] = sat8i(acc >>> 8);
    end
    ln_ref(ov, on2);
    for (int cc = 0; cc < FFN; cc++) begin
      acc = 0;
      for (int r = 0; r < D; r++) acc += on2[r] * w1[r][cc];
      f1[cc] = sat8i(acc >>> 8);
      if (f1[cc] < 0) f1[cc] = 0;
    end
    for (int cc = 0; cc < D; cc++) begin
      acc = 0;
      for (int r = 0; r < FFN; r++) acc += f1[r] * w2[r][cc];
      y[cc] = sat8i(acc >>> 8);
    end
  endtask

  task automatic load_row(input int sel, input int row, input int vals [], input int n);
    @(negedge clk);
    wl_we = 1; wl_sel = 3'(sel); wl_row = $clog2(FFN)'(row); wl_data = '0;
    for (int c = 0; c < n; c++) wl_data[c*8 +: 8] = 8'(vals[c]);
    @(negedge clk);
    wl_we = 0;
  endtask

  task automatic run_cmd(input int c, input int x [D], output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = 2'(c);
    for (int j = 0; j < D; j++) x_in[j] = 8'(x[j]);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  int xtok [NPRE][D];
  int xd [D], yref [D], dummy [D], cyc;
  int row [];
  logic [REC_W-1:0] rec_saved;

  initial begin
    wl_we = 0; wl_sel = 0; wl_row = 0; wl_data = 0;
    cmd_valid = 0; cmd = 0; hbm_we = 0; hbm_re = 0; hbm_addr = 0; hbm_wdata = 0;
    for (int j = 0; j < D; j++) x_in[j] = 0;
    for (int ch = 0; ch < 2 * D; ch++) begin rlo[ch] = 0; rhi[ch] = 0; lvl[ch] = 0; seen[ch] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    for (int r = 0; r < D; r++) begin
      row = new[D];
      foreach (row[c]) begin wq[r][c] = $urandom_range(2 * WMAX - 1) - WMAX; row[c] = wq[r][c]; end
      load_row(0, r, row, D);
      foreach (row[c]) begin wk[r][c] = $urandom_range(2 * WMAX - 1) - WMAX; row[c] = wk[r][c]; end
      load_row(1, r, row, D);
      foreach (row[c]) begin wv[r][c] = $urandom_range(2 * WMAX - 1) - WMAX; row[c] = wv[r][c]; end
      load_row(2, r, row, D);
      foreach (row[c]) begin wo[r][c] = $urandom_range(2 * WMAX - 1) - WMAX; row[c] = wo[r][c]; end
      load_row(3, r, row, D);
      row = new[FFN];
      foreach (row[c]) begin w1[r][c] = $urandom_range(2 * WMAX - 1) - WMAX; row[c] = w1[r][c]; end
      load_row(4, r, row, FFN);
    end
    for (int r = 0; r < FFN; r++) begin
      row = new[D];
      foreach (row[c]) begin w2[r][c] = $urandom_range(2 * WMAX - 1) - WMAX; row[c] = w2[r][c]; end
      load_row(5, r, row, D);
    end
    // prefill: calibrate, finalise, append
    for (int n = 0; n < NPRE; n++) begin
      for (int j = 0; j < D; j++) xtok[n][j] = $urandom_range(255) - 128;
      model_token(CMD_CALIB, xtok[n], dummy);
      run_cmd(CMD_CALIB, xtok[n], cyc);
    end
    for (int ch = 0; ch < 2 * D; ch++) if (!seen[ch]) begin rlo[ch] = 0; rhi[ch] = 0; seen[ch] = 1; end
    run_cmd(CMD_FINALIZE, xd, cyc);
    check(cyc >= 2 * D, $sformatf("finalize walks all %0d channels (%0d cycles)", 2 * D, cyc));
    for (int n = 0; n < NPRE; n++) begin
      model_token(CMD_APPEND, xtok[n], dummy);
      run_cmd(CMD_APPEND, xtok[n], cyc);
    end
    check(n_tokens == NPRE, "tokens appended");
    // HBM side: read record 0 (K of token 0) and check its index mask
    @(negedge clk); hbm_re = 1; hbm_addr = 0;
    @(negedge clk); hbm_re = 0;
    for (int j = 0; j < D; j++)
      check(hbm_rdata[j] == 1'(rec0_index[j]), $sformatf("HBM read: index bit %0d", j));
    // move record 1 out and back in through the HBM port (round trip)
    @(negedge clk); hbm_re = 1; hbm_addr = 1;
    @(negedge clk); hbm_re = 0; rec_saved = hbm_rdata;
    hbm_we = 1; hbm_wdata = '0;
    @(negedge clk); hbm_wdata = rec_saved;
    @(negedge clk); hbm_we = 0;
    // decode
    for (int n = 0; n < NDEC; n++) begin
      for (int j = 0; j < D; j++) xd[j] = $urandom_range(255) - 128;
      model_token(CMD_DECODE, xd, yref);
      run_cmd(CMD_DECODE, xd, cyc);
      $display("decode %0d: %0d cycles, %0d tokens", n, cyc, n_tokens);
      for (int j = 0; j < D; j++)
        check(y_out[j] == 8'(yref[j]), $sformatf("decode %0d y[%0d] = %0d, expected %0d", n, j, y_out[j], yref[j]));
    end
    check(kept_cnt == 32'(m_kept),      $sformatf("kept %0d vs %0d", kept_cnt, m_kept));
    check(pruned_cnt == 32'(m_pruned),  $sformatf("pruned %0d vs %0d", pruned_cnt, m_pruned));
    check(levels_opened == 32'(m_levels), $sformatf("levels %0d vs %0d", levels_opened, m_levels));
    check(sat_events == 32'(m_sat),     $sformatf("saturations %0d vs %0d", sat_events, m_sat));
    check(kv_nz_bits == 32'(m_bits),    $sformatf("compressed bits %0d vs %0d", kv_nz_bits, m_bits));
    check(fresh_key_uses == 32'(m_fresh), "fresh key uses");
    check(ce_active_lanes == 32'(m_lanes), $sformatf("active lanes %0d vs %0d", ce_active_lanes, m_lanes));
    // every mechanism must have happened
    $display("mechanisms: pruned=%0d kept=%0d levels=%0d saturations=%0d fresh_keys=%0d cached_keys=%0d gated_lanes=%0d hbm_moves=2",
             m_pruned, m_kept, m_levels, m_sat, m_fresh, (NPRE + 1) * NDEC, all_lanes - m_lanes);
    check(m_pruned > 0, "pruning happened");
    check(m_kept > 0, "elements kept");
    check(m_levels > 0, "HQE level opened");
    check(m_sat > 0, "HQE level limit reached");
    check(m_fresh > 0, "fresh key used");
    check(all_lanes > m_lanes, "CE lanes gated");
    // ReRAM head mechanisms
    wait (sda_finished);
    $display("ReRAM head: first row after %0d cycles, %0d rows after %0d, overlap %0d, X interleaved %0d, X stalls %0d, columns written %0d",
             s_tfirst - s_t0, SN, s_tend - s_t0, sda_overlap_cycles, s_inter, sda_x_stalls, sda_prog_columns);
    check(s_nres == SN, "ReRAM head produced every row");
    check(sda_overlap_cycles > 0, "ReRAM head: crossbars computed in parallel (sub-matrix pipeline)");
    check(s_tend - s_t0 < SN * (s_tfirst - s_t0), "ReRAM head: pipelining shortened the run");
    check(s_inter > 0, "ReRAM head: X crossbar shared by R*X^T and S*X of different rows");
    check(sda_prog_columns == 32'(2 * SDK + 2 * SD), "ReRAM head: no crossbar write after initialisation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
