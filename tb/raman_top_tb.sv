// raman_top_tb: end-to-end test of the accelerator at its default sizes.
//
// The testbench plays the host: it writes a small network into the
// instruction, parameter and activation memories, pulses start, waits for
// done and reads the results back. The network is
//   L0  point-wise 32 -> 16 channels, 2 x 4 pixels, 8b, ReLU, run-time
//       pruning on, output written over its own input (memory overlay);
//       one 64-channel weight group, so the weights are loaded once and
//       reused for all three pixel triples,
//   L1  a depth-wise instruction, which this implementation skips,
//   L2  point-wise 16 -> 80 channels (two output groups, 8 non-zero
//       weights per tile row), 4b packed precision, no ReLU (signed
//       output), written to a separate region,
//   L3  global average pooling of L2's output (80 channels, 8 pixels),
//   L4  global max pooling of L0's output,
//   L5  fully connected 80 -> 12 on L3's pooled vector (a classifier, as at
//       the end of the keyword-spotting network), no ReLU,
//   END.
// Activations are sparse so that whole channel columns are zero (zero
// skipping), single small non-zeros get pruned (RAP) and rows get gated.
// A reference model in the testbench computes every output byte from the
// inputs and the weights; all written words are compared. It also checks
// the event counters against counts worked out by the model, including the
// number of compute cycles, which the design fixes at (non-zero input
// channels) x (weight words per channel) per pixel triple and output group,
// and fails if any mechanism never happened.
module raman_top_tb;
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
    repeat (200000) @(posedge clk);
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
  // groups of 24 outputs, four runs of six outputs each.
  task automatic fc_layer(input int m, input int n, input int bits, input bit relu,
                          input int ia_base, input int oa_base, output instr_t ins);
    int groups;
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
          amem[oa_base * 128 + 6 * g + e][l] = qref(x, int'(prm[e].alpha[l]), int'(prm[e].beta[l]), !relu);
        end
        exp_oa++;
      end
    end
  endtask

  task automatic pool_layer(input int c, input int fh, input int fw, input bit is_max,
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
          prm[e].alpha[l] = is_max ? 8'd1 : 8'd1;
          prm[e].beta[l]  = is_max ? 8'd0 : 8'($clog2(hw));   // hw is a power of two here
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
          qref(longint'(acc), 1, is_max ? 0 : $clog2(hw), 1'b0);
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

  initial begin
    instr_t prog [7];
    int in_words, cyc, first_oa;
    bit pooled_max = 0, pooled_avg = 0;
    for (int w = 0; w < 16384; w++) for (int b = 0; b < 4; b++) amem[w][b] = 8'd0;
    // sparse input of L0: 8 pixels x 32 channels at base 0
    in_words = 8 * 32 / 4;
    for (int w = 0; w < in_words; w++)
      for (int b = 0; b < 4; b++) begin
        int r;
        r = $urandom_range(99);
        amem[w][b] = (r < 55) ? 8'd0 : (r < 70) ? 8'($urandom_range(15, 1)) : 8'($urandom_range(255, 16));
      end
    // host loads the input before the model overwrites it
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < in_words; w++)
      host_write_act(w, {amem[w][3], amem[w][2], amem[w][1], amem[w][0]});
    pw_layer(32, 16, 2, 4, 0, 8, 1'b1, 12, 0, 0, prog[0]);
    prog[1] = '0; prog[1].opcode = 3'(OP_DW); prog[1].m_ch = 9'd16;
    pw_layer(16, 80, 2, 4, 1, 4, 1'b0, 0, 0, 20, prog[2]);
    pool_layer(80, 2, 4, 1'b0, 20, 40, prog[3]);
    pool_layer(16, 2, 4, 1'b1, 0, 41, prog[4]);
    fc_layer(80, 12, 8, 1'b0, 40, 42, prog[5]);
    prog[6] = '0; prog[6].opcode = 3'(OP_END);
    for (int i = 0; i < 7; i++) begin
      if (prog[i].opcode == 3'(OP_POOL)) begin
        if (prog[i].pool_max) pooled_max = 1; else pooled_avg = 1;
      end
      @(negedge clk);
      host_im_we = 1; host_im_addr = IAW'(i); host_im_wdata = prog[i];
    end
    @(negedge clk); host_im_we = 0;
    foreach (pmem[i]) begin
      @(negedge clk);
      host_p_en = 1; host_p_we = 1; host_p_addr = PAW'(i); host_p_wdata = pmem[i];
    end
    @(negedge clk); host_p_en = 0; host_p_we = 0;
    // run
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("program finished in %0d cycles", cyc);
    check(!busy, "idle after done");
    // read back every region the program wrote
    for (int reg_i = 0; reg_i < 5; reg_i++) begin
      int base, nw;
      case (reg_i)
        0: begin base = 0;        nw = 8 * 16 / 4; end
        1: begin base = 20 * 128; nw = 8 * 80 / 4; end
        2: begin base = 40 * 128; nw = 80 / 4; end
        4: begin base = 42 * 128; nw = 12 / 4; end
        default: begin base = 41 * 128; nw = 16 / 4; end
      endcase
      for (int w = base; w < base + nw; w++) begin
        @(negedge clk);
        host_a_re = 1; host_a_raddr = AAW'(w);
        @(negedge clk);
        host_a_re = 0;
        check(host_a_rdata == {amem[w][3], amem[w][2], amem[w][1], amem[w][0]},
              $sformatf("region %0d word %0d: %h expected %h", reg_i, w - base, host_a_rdata,
                        {amem[w][3], amem[w][2], amem[w][1], amem[w][0]}));
      end
    end
    // counters
    check(stats.layers_pw == 2, $sformatf("PW layers %0d", stats.layers_pw));
    check(stats.layers_pool == 2, $sformatf("pool layers %0d", stats.layers_pool));
    check(stats.layers_unsupported == 1, "skipped instruction count");
    check(stats.layers_fc == 1, $sformatf("FC layers %0d", stats.layers_fc));
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
    // every mechanism must have happened at least once
    $display("mechanisms: skipped=%0d pruned=%0d gated=%0d reused=%0d loads=%0d unsupported=%0d",
             stats.ch_skipped, stats.rap_pruned, stats.row_gated, stats.w_reuses,
             stats.w_loads, stats.layers_unsupported);
    check(stats.ch_skipped > 0, "zero skipping never happened");
    check(stats.rap_pruned > 0, "run-time activation pruning never happened");
    check(stats.row_gated > 0, "data gating never happened");
    check(stats.w_reuses > 0, "weight reuse never happened");
    check(stats.layers_pool > 0 && pooled_max && pooled_avg, "both pooling kinds");
    check(prog[0].ia_base == prog[0].oa_base, "memory overlay used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
