// raman_workload_tb: layer shapes of the two evaluated networks, end to end.
//
// The testbench runs, through the whole accelerator at its default sizes,
// the layers the implementation supports with the sizes they have in the
// two keyword-spotting and visual-wake-word networks:
//   L0  DS-CNN point-wise layer, 28 x 30 pixels, 64 -> 64 channels, in
//       place, 8b, ReLU, weights pruned to 8 of 16 per tile row, run-time
//       pruning threshold 10 on activations that are about half zero,
//   L1  DS-CNN global average pooling, 4 x 4 x 64 (a 1/16 scale),
//   L2  MobileNetV1 last point-wise layer, 6 x 6 pixels, 256 -> 256
//       channels (four output groups, dense weights, the full 1024-entry
//       weight cache), in place,
//   L3  MobileNetV1 global average pooling, 6 x 6 x 256, with the 1/36
//       scale approximated as 227 / 2^13,
//   L4  DS-CNN classifier, fully connected 64 -> 12 on L1's output,
//   L5  MobileNetV1 classifier, fully connected 256 -> 2 on L3's output,
//       written over its own input,
//   END.
// The same reference model as the small end-to-end test gives every output
// byte and the event counters, including the exact compute-cycle count; the
// run time of each layer is printed next to its compute cycles.
module raman_workload_tb;
  import raman_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int PAW = 14, AAW = 14, IAW = 6;

  logic                rst_n = 0, start = 0, busy, done;
  logic                host_im_we = 0;
  logic [IAW-1:0]      host_im_addr = '0;
  logic [INSTR_W-1:0]  host_im_wdata = '0;
  logic                host_p_en = 0, host_p_we = 0;
  logic [PAW-1:0]      host_p_addr = '0;
  logic [PARAM_W-1:0]  host_p_wdata = '0, host_p_rdata;
  logic                host_a_we = 0, host_a_re = 0;
  logic [AAW-1:0]      host_a_waddr = '0, host_a_raddr = '0;
  logic [ACT_W-1:0]    host_a_wdata = '0, host_a_rdata;
  stats_t              stats;

  raman_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ model
  logic [7:0]  amem [16384][4];     // activation memory, byte view
  logic [191:0] pmem [$];           // parameter words in program order
  int exp_mac = 0, exp_skip = 0, exp_prune = 0, exp_gate = 0, exp_proc = 0;
  int exp_loads = 0, exp_reuse = 0, exp_oa = 0;

  function automatic int mulref(input logic [7:0] a, input logic [7:0] b, input int bits);
    int s = 0;
    for (int k = 0; k < 8 / bits; k++) begin
      int ua = 0, sb = 0;
      for (int i = 0; i < bits; i++) begin
        ua += int'(a[k*bits + i]) << i;
        sb += int'(b[k*bits + i]) << i;
      end
      if (b[k*bits + bits - 1]) sb -= (1 << bits);
      s += ua * sb;
    end
    return s;
  endfunction

  function automatic logic [7:0] qref(input longint x, input int alpha, input int beta, input bit sgn);
    longint p, q;
    int sh;
    sh = beta > 34 ? 34 : beta;
    p = x * alpha;
    if (sh > 0) p += longint'(1) << (sh - 1);
    q = p >>> sh;
    if (sgn) return (q > 127) ? 8'h7F : (q < -128) ? 8'h80 : 8'(q);
    else     return (q > 255) ? 8'hFF : (q < 0) ? 8'h00 : 8'(q);
  endfunction

  function automatic logic [7:0] rd_act(input int base, input int p, input int c, input int ch);
    int w;
    w = base * 128 + p * (c / 4) + ch / 4;
    return amem[w][ch % 4];
  endfunction

  // Point-wise layer: builds the parameter words and updates the model memory.
  task automatic pw_layer(input int m, input int n, input int fh, input int fw,
                          input int nnz_q, input int bits, input bit relu, input int theta,
                          input int ia_base, input int oa_base, output instr_t ins);
    int hw, groups, wpm, tiles;
    logic [7:0] ia [][];
    int wv [][];        // weight value per [m][o]
    logic [7:0] res [][];
    hw = fh * fw; groups = (n + 63) / 64; wpm = nnz_q + 1; tiles = (hw + 2) / 3;
    ins = '0;
    ins.opcode = 3'(OP_PW); ins.m_ch = 9'(m); ins.n_ch = 9'(n); ins.fh = 7'(fh); ins.fw = 7'(fw);
    ins.ia_tiles = 10'(tiles); ins.w_tiles = 3'(groups); ins.nnz_q = 2'(nnz_q);
    ins.prec = (bits == 8) ? 2'(PREC_8) : (bits == 4) ? 2'(PREC_4) : 2'(PREC_2);
    ins.theta = 8'(theta); ins.relu_en = relu; ins.ia_base = 7'(ia_base); ins.oa_base = 7'(oa_base);
    ia = new[tiles * 3];
    for (int p = 0; p < tiles * 3; p++) begin
      ia[p] = new[m];
      for (int ch = 0; ch < m; ch++) ia[p][ch] = (p < hw) ? rd_act(ia_base, p, m, ch) : 8'd0;
    end
    // run-time activation pruning and the per-triple channel counts
    for (int t = 0; t < tiles; t++) begin
      int nz_ch = 0;
      for (int ch = 0; ch < m; ch++) begin
        int nz = 0;
        for (int r = 0; r < 3; r++) nz += int'(ia[3*t + r][ch] != 0);
        if (theta != 0 && nz == 1)
          for (int r = 0; r < 3; r++)
            if (ia[3*t + r][ch] != 0 && ia[3*t + r][ch] < 8'(theta)) begin
              ia[3*t + r][ch] = 0; exp_prune++;
            end
        nz = 0;
        for (int r = 0; r < 3; r++) nz += int'(ia[3*t + r][ch] != 0);
        if (nz == 0) exp_skip++;
        else begin
          nz_ch++;
          exp_gate += groups * wpm * (3 - nz);
        end
      end
      exp_mac  += groups * nz_ch * wpm;
      exp_proc += groups * nz_ch;
    end
    if (groups == 1) begin exp_loads += 1; exp_reuse += tiles - 1; end
    else exp_loads += groups * tiles;
    // parameters and weights, one output group after the other
    wv = new[m];
    for (int ch = 0; ch < m; ch++) begin
      wv[ch] = new[groups * 64];
      foreach (wv[ch][o]) wv[ch][o] = 0;
    end
    res = new[hw];
    foreach (res[p]) res[p] = new[groups * 64];
    for (int g = 0; g < groups; g++) begin
      ppm_param_t prm [16];
      for (int e = 0; e < 16; e++) begin
        for (int l = 0; l < 4; l++) begin
          prm[e].bias[l]  = 24'($signed($urandom_range(400) - 200));
          prm[e].alpha[l] = 8'($urandom_range(255, 1));
          prm[e].beta[l]  = 8'($urandom_range(12, 6));
        end
        pmem.push_back(192'(prm[e]));
      end
      // balanced-pruned weight tiles: per channel and tile, 4*wpm non-zeros
      for (int ch = 0; ch < m; ch++) begin
        logic [191:0] words [4];
        for (int k = 0; k < 4; k++) words[k] = '0;
        for (int c = 0; c < 4; c++) begin
          int perm [16];
          for (int i = 0; i < 16; i++) perm[i] = i;
          perm.shuffle();
          for (int k = 0; k < wpm; k++)
            for (int l = 0; l < 4; l++) begin
              wpair_t pr;
              pr.idx = 4'(perm[4*k + l]);
              pr.val = 8'($urandom_range(255, 1));
              words[k][48*c + 12*l +: 12] = pr;
              wv[ch][64*g + 16*c + perm[4*k + l]] = int'(pr.val);
            end
        end
        for (int k = 0; k < wpm; k++) pmem.push_back(words[k]);
      end
      // reference outputs of this group
      for (int p = 0; p < hw; p++)
        for (int o = 64 * g; o < 64 * g + 64 && o < n; o++) begin
          int acc = 0;
          longint x;
          int e, l;
          for (int ch = 0; ch < m; ch++) acc += mulref(ia[p][ch], 8'(wv[ch][o]), bits);
          e = (o % 64) / 4; l = o % 4;
          x = longint'($signed(24'(24'(acc) + prm[e].bias[l])));
          if (relu && x < 0) x = 0;
          res[p][o] = qref(x, int'(prm[e].alpha[l]), int'(prm[e].beta[l]), !relu);
        end
    end
    for (int p = 0; p < hw; p++)
      for (int o = 0; o < n; o++) amem[oa_base * 128 + p * (n / 4) + o / 4][o % 4] = res[p][o];
    exp_oa += hw * n / 4;
  endtask

  // Fully-connected layer: activations at pixel 0 of ia_base, weights in
  // groups of 24 outputs, four runs of six outputs each. Results are
  // buffered so that the layer may write over its own input vector.
  task automatic fc_layer(input int m, input int n, input int bits, input bit relu,
                          input int ia_base, input int oa_base, output instr_t ins);
    int groups;
    logic [7:0] outb [int][4];
    groups = (n + 23) / 24;
    ins = '0;
    ins.opcode = 3'(OP_FC); ins.m_ch = 9'(m); ins.n_ch = 9'(n); ins.fh = 7'd1; ins.fw = 7'd1;
    ins.w_tiles = 3'(groups); ins.relu_en = relu;
    ins.prec = (bits == 8) ? 2'(PREC_8) : (bits == 4) ? 2'(PREC_4) : 2'(PREC_2);
    ins.ia_base = 7'(ia_base); ins.oa_base = 7'(oa_base);
    for (int g = 0; g < groups; g++) begin
      ppm_param_t prm [6];
      logic [7:0] w [][];
      w = new[m];
      foreach (w[ch]) begin
        w[ch] = new[24];
        foreach (w[ch][o]) w[ch][o] = (24 * g + o < n) ? 8'($urandom) : 8'd0;
      end
      for (int e = 0; e < 6; e++) begin
        for (int l = 0; l < 4; l++) begin
          prm[e].bias[l]  = 24'($signed($urandom_range(2000) - 1000));
          prm[e].alpha[l] = 8'($urandom_range(255, 1));
          prm[e].beta[l]  = 8'($urandom_range(19, 16));
        end
        pmem.push_back(192'(prm[e]));
      end
      for (int f = 0; f < 4; f++)
        for (int i = 0; i < m / 4; i++) begin
          logic [191:0] word;
          word = '0;
          for (int c = 0; c < 4; c++)
            for (int k = 0; k < 6; k++) word[48*c + 8*k +: 8] = w[4*i + c][6*f + k];
          pmem.push_back(word);
        end
      for (int e = 0; e < 6; e++) begin
        if (24 * g + 4 * e >= n) continue;
        for (int l = 0; l < 4; l++) begin
          int acc = 0;
          longint x;
          for (int ch = 0; ch < m; ch++) acc += mulref(rd_act(ia_base, 0, m, ch), w[ch][4*e + l], bits);
          x = longint'($signed(24'(24'(acc) + prm[e].bias[l])));
          if (relu && x < 0) x = 0;
          outb[oa_base * 128 + 6 * g + e][l] = qref(x, int'(prm[e].alpha[l]), int'(prm[e].beta[l]), !relu);
        end
        exp_oa++;
      end
    end
    foreach (outb[a]) for (int l = 0; l < 4; l++) amem[a][l] = outb[a][l];
  endtask

  task automatic pool_layer(input int c, input int fh, input int fw, input bit is_max,
                            input int alpha, input int beta,
                            input int ia_base, input int oa_base, output instr_t ins);
    int hw, groups;
    hw = fh * fw; groups = (c + 63) / 64;
    ins = '0;
    ins.opcode = 3'(OP_POOL); ins.m_ch = 9'(c); ins.n_ch = 9'(c); ins.fh = 7'(fh); ins.fw = 7'(fw);
    ins.w_tiles = 3'(groups); ins.pool_max = is_max; ins.relu_en = 1'b1;
    ins.ia_base = 7'(ia_base); ins.oa_base = 7'(oa_base);
    for (int g = 0; g < groups; g++) begin
      ppm_param_t prm [16];
      for (int e = 0; e < 16; e++) begin
        for (int l = 0; l < 4; l++) begin
          prm[e].bias[l]  = '0;
          prm[e].alpha[l] = 8'(alpha);
          prm[e].beta[l]  = 8'(beta);
        end
        pmem.push_back(192'(prm[e]));
      end
      for (int ch = 64 * g; ch < 64 * g + 64 && ch < c; ch++) begin
        int acc = 0;
        for (int p = 0; p < hw; p++) begin
          int v = int'(rd_act(ia_base, p, c, ch));
          if (is_max) acc = (v > acc) ? v : acc; else acc += v;
        end
        amem[oa_base * 128 + ch / 4][ch % 4] =
          qref(longint'(acc), alpha, beta, 1'b0);
      end
    end
    exp_oa += (c + 3) / 4;
  endtask

  // ------------------------------------------------------------------ host
  task automatic host_write_act(input int w, input logic [31:0] d);
    @(negedge clk);
    host_a_we = 1; host_a_waddr = AAW'(w); host_a_wdata = d;
    @(negedge clk);
    host_a_we = 0;
  endtask

  task automatic fill_sparse(input int base, input int nw, input int zero_pct);
    for (int w = base; w < base + nw; w++)
      for (int b = 0; b < 4; b++) begin
        int r;
        r = $urandom_range(99);
        amem[w][b] = (r < zero_pct) ? 8'd0 : (r < zero_pct + 10) ? 8'($urandom_range(15, 1))
                                               : 8'($urandom_range(255, 16));
      end
  endtask

  task automatic host_load(input int base, input int nw);
    for (int w = base; w < base + nw; w++)
      host_write_act(w, {amem[w][3], amem[w][2], amem[w][1], amem[w][0]});
  endtask

  task automatic host_compare(input string name, input int base, input int nw);
    for (int w = base; w < base + nw; w++) begin
      @(negedge clk);
      host_a_re = 1; host_a_raddr = AAW'(w);
      @(negedge clk);
      host_a_re = 0;
      check(host_a_rdata == {amem[w][3], amem[w][2], amem[w][1], amem[w][0]},
            $sformatf("%s word %0d: %h expected %h", name, w - base, host_a_rdata,
                      {amem[w][3], amem[w][2], amem[w][1], amem[w][0]}));
    end
  endtask

  // cycle at which each supported layer ends, from the layer counters
  int layer_start [$];
  logic [31:0] last_layers = '0;
  int cyc = 0;
  always @(posedge clk) if (busy) begin
    cyc++;
    // the counters are cleared by start, so only a step of one is a layer end
    if (stats.layers_pw + stats.layers_pool + stats.layers_fc == last_layers + 1)
      layer_start.push_back(cyc);
    last_layers <= stats.layers_pw + stats.layers_pool + stats.layers_fc;
  end

  // activation regions (units of 128 words): 105 + 2 + 18 + 1 + 1 of 128
  localparam int DS_IN = 0, DS_POOL_IN = 105, MB_IN = 107, DS_OUT = 125, MB_OUT = 126, FC_OUT = 127;

  initial begin
    instr_t prog [7];
    int mac0, macs [4];
    for (int w = 0; w < 16384; w++) for (int b = 0; b < 4; b++) amem[w][b] = 8'd0;
    fill_sparse(DS_IN * 128, 28 * 30 * 64 / 4, 45);
    fill_sparse(DS_POOL_IN * 128, 16 * 64 / 4, 40);
    fill_sparse(MB_IN * 128, 36 * 256 / 4, 55);
    repeat (2) @(negedge clk);
    rst_n = 1;
    host_load(DS_IN * 128, 28 * 30 * 64 / 4);
    host_load(DS_POOL_IN * 128, 16 * 64 / 4);
    host_load(MB_IN * 128, 36 * 256 / 4);
    mac0 = exp_mac;
    pw_layer(64, 64, 28, 30, 1, 8, 1'b1, 10, DS_IN, DS_IN, prog[0]);
    macs[0] = exp_mac - mac0;
    pool_layer(64, 4, 4, 1'b0, 1, 4, DS_POOL_IN, DS_OUT, prog[1]);
    mac0 = exp_mac;
    pw_layer(256, 256, 6, 6, 3, 8, 1'b1, 0, MB_IN, MB_IN, prog[2]);
    macs[2] = exp_mac - mac0;
    pool_layer(256, 6, 6, 1'b0, 227, 13, MB_IN, MB_OUT, prog[3]);
    fc_layer(64, 12, 8, 1'b0, DS_OUT, FC_OUT, prog[4]);
    fc_layer(256, 2, 8, 1'b0, MB_OUT, MB_OUT, prog[5]);
    prog[6] = '0; prog[6].opcode = 3'(OP_END);
    for (int i = 0; i < 7; i++) begin
      @(negedge clk);
      host_im_we = 1; host_im_addr = IAW'(i); host_im_wdata = prog[i];
    end
    @(negedge clk); host_im_we = 0;
    foreach (pmem[i]) begin
      @(negedge clk);
      host_p_en = 1; host_p_we = 1; host_p_addr = PAW'(i); host_p_wdata = pmem[i];
    end
    @(negedge clk); host_p_en = 0; host_p_we = 0;
    $display("%0d parameter words", pmem.size());
    start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    $display("program finished in %0d cycles", cyc);
    foreach (layer_start[i])
      $display("layer %0d ended at cycle %0d", i, layer_start[i]);
    $display("DS-CNN PW: %0d compute cycles for %0d dense ones; MobileNet PW: %0d compute cycles",
             macs[0], 280 * 64 * 2, macs[2]);
    check(!busy, "idle after done");
    host_compare("DS-CNN PW", DS_IN * 128, 28 * 30 * 64 / 4);
    host_compare("MobileNet PW", MB_IN * 128, 36 * 256 / 4);
    host_compare("DS-CNN pooled", DS_OUT * 128, 16);
    host_compare("MobileNet pooled and classified", MB_OUT * 128, 64);
    host_compare("DS-CNN classified", FC_OUT * 128, 3);
    check(stats.layers_pw == 2, $sformatf("PW layers %0d", stats.layers_pw));
    check(stats.layers_pool == 2, $sformatf("pool layers %0d", stats.layers_pool));
    check(stats.layers_fc == 2, $sformatf("FC layers %0d", stats.layers_fc));
    check(stats.mac_cycles == 32'(exp_mac),
          $sformatf("compute cycles %0d expected %0d", stats.mac_cycles, exp_mac));
    check(stats.ch_processed == 32'(exp_proc),
          $sformatf("channels processed %0d expected %0d", stats.ch_processed, exp_proc));
    check(stats.ch_skipped == 32'(exp_skip),
          $sformatf("channels skipped %0d expected %0d", stats.ch_skipped, exp_skip));
    check(stats.rap_pruned == 32'(exp_prune),
          $sformatf("pruned %0d expected %0d", stats.rap_pruned, exp_prune));
    check(stats.row_gated == 32'(exp_gate),
          $sformatf("gated row cycles %0d expected %0d", stats.row_gated, exp_gate));
    check(stats.w_loads == 32'(exp_loads) && stats.w_reuses == 32'(exp_reuse),
          $sformatf("weight loads %0d/%0d reuses %0d/%0d", stats.w_loads, exp_loads,
                    stats.w_reuses, exp_reuse));
    check(stats.oa_words == 32'(exp_oa), $sformatf("OA words %0d expected %0d", stats.oa_words, exp_oa));
    $display("mechanisms: skipped=%0d pruned=%0d gated=%0d reused=%0d loads=%0d",
             stats.ch_skipped, stats.rap_pruned, stats.row_gated, stats.w_reuses, stats.w_loads);
    check(stats.ch_skipped > 0, "zero skipping never happened");
    check(stats.rap_pruned > 0, "run-time activation pruning never happened");
    check(stats.row_gated > 0, "data gating never happened");
    check(stats.w_reuses > 0, "weight reuse never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
