// top_controller_tb: self-checking test of the top-level controller alone.
//
// The controller is surrounded by small behavioural stand-ins: an
// instruction memory, a parameter memory whose word at address a is a
// pattern of a, an activation memory with a pattern per address, an ASE
// that answers start with done after 12 or 60 cycles (shorter and longer
// than the weight load that runs beside it) and reports a chosen
// list of non-zero channels with their bitmaps, and a PE array whose
// partial-sum output is a pattern of the selected row, column and group.
// The program is a point-wise layer (two pixel triples, one weight group,
// two weight words per channel), a second point-wise layer with two
// output groups, a depth-wise instruction (skipped), an average pooling
// layer, a fully-connected layer with two groups of 24 outputs and END. Monitors check the instruction fetch order, every
// parameter and weight transfer, weight reuse, the cache read addresses and
// gating of every compute cycle, the number of compute cycles, every PPM
// input with its write-back address, the pooling reads and the counters,
// that the weight load overlaps the ASE load, that the PPM parameter
// prefetch overlaps compute, that the next triple's ASE load starts during
// the drain and that the array never starts before the ASE has finished. For the FC layer: the activation
// words cached, every weight address read past the cache, the RF group of
// each run and the packing of two row reads into one PPM word.
module top_controller_tb;
  import raman_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int PAW = 14, AAW = 14, CAW = 10, MW = 9;

  logic rst_n = 0, start = 0, busy, done;
  logic im_re; logic [5:0] im_addr; logic [79:0] im_rdata = '0;
  logic p_en; logic [PAW-1:0] p_addr; logic [191:0] p_rdata = '0;
  logic a_re; logic [AAW-1:0] a_raddr; logic [31:0] a_rdata = '0;
  logic ase_start, ase_skip_en, ase_rap_en, ase_done = 0;
  logic [MW-1:0] ase_m, ase_nnz = '0, ase_buf_raddr;
  logic [2:0][AAW-1:0] ase_row_base;
  logic [2:0] ase_row_valid, ase_buf_bm;
  logic [7:0] ase_theta, ase_buf_idx;
  logic ase_ev_pruned = 0, ase_ev_skipped = 0;
  logic [26:0] c_rd_en; logic [26:0][CAW-1:0] c_rd_addr;
  logic cw_w_en; logic [CAW-1:0] cw_w_addr; logic [191:0] cw_w_data;
  logic cf_w_en; logic [CAW-1:0] cf_w_addr; logic [31:0] cf_w_data;
  logic arr_en, arr_clear; prec_e arr_prec; logic [2:0] arr_gate_row;
  noc_mode_e arr_noc_mode; pe_mode_e arr_pe_mode; logic [1:0] arr_fc_grp;
  logic [1:0] arr_out_row, arr_out_col, arr_rd_grp;
  logic [3:0][23:0] arr_psum;
  logic ppm_prm_we, ppm_relu_en, ppm_signed_out, ppm_in_valid;
  logic [3:0] ppm_prm_waddr, ppm_in_entry;
  ppm_param_t ppm_prm_wdata; ppm_op_e ppm_in_op;
  logic [3:0][23:0] ppm_in_psum; logic [AAW-1:0] ppm_in_tag;
  stats_t stats;

  top_controller #(.IM_AW(6), .PAW(PAW), .AAW(AAW), .CAW(CAW), .MAX_M(256)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // -------------------------------------------------------- stand-ins
  logic [79:0] imem [64];
  function automatic logic [191:0] ppat(input int a);
    return {6{32'(a) * 32'h9E37_79B9 + 32'h1234}};
  endfunction
  always_ff @(posedge clk) begin
    if (im_re) im_rdata <= imem[im_addr];
    if (p_en) p_rdata <= ppat(int'(p_addr));
    if (a_re) a_rdata <= {8'(a_raddr + 3), 8'(a_raddr + 2), 8'(a_raddr + 1), 8'(a_raddr)};
  end
  // ASE: done 12 or 60 cycles after start (alternately: shorter and longer
  // than the weight load it runs beside); channel list j -> 3j+1,
  // bitmap pattern
  int ase_cnt = -1, ase_runs = 0, n_wait_ase = 0, n_pf_comp = 0, n_ase_drain = 0;
  localparam int NNZ = 5;
  always_ff @(posedge clk) begin
    ase_done <= 1'b0;
    if (ase_start) begin ase_cnt <= (ase_runs % 2 != 0) ? 60 : 12; ase_runs <= ase_runs + 1; end
    else if (ase_cnt > 0) ase_cnt <= ase_cnt - 1;
    else if (ase_cnt == 0) begin ase_done <= 1'b1; ase_nnz <= MW'(NNZ); ase_cnt <= -1; end
  end
  assign ase_buf_idx = 8'(3 * ase_buf_raddr + 1);
  assign ase_buf_bm  = (ase_buf_raddr % 3 == 0) ? 3'b101 : (ase_buf_raddr % 3 == 1) ? 3'b111 : 3'b010;
  always_comb
    for (int l = 0; l < 4; l++) arr_psum[l] = 24'({arr_out_row, arr_out_col, arr_rd_grp, 2'(l)});

  // -------------------------------------------------------- monitors
  int fetches [$];
  int prm_words [$], w_words [$];
  int n_fc_en = 0, n_cf = 0, fc_paddr [$];
  int n_ase_start = 0, n_arr_en = 0, n_clear = 0, n_ppm_normal = 0, n_pool_acc = 0, n_pool_out = 0;
  int comp_j [$], comp_k [$];
  int tags [$];
  logic [26:0][CAW-1:0] last_rd_addr;
  logic [2:0] last_bm;
  bit last_rd_v = 0;
  always @(posedge clk) if (rst_n) begin
    if (im_re) fetches.push_back(int'(im_addr));
    if (ppm_prm_we) begin
      prm_words.push_back(int'(ppm_prm_waddr));
    end
    if (cw_w_en) w_words.push_back(int'(cw_w_addr));
    if (ase_start) n_ase_start++;
    if (arr_clear) n_clear++;
    check(!((arr_clear || arr_en) && ase_cnt >= 0), "array started before the ASE finished");
    if ((ppm_prm_we || cw_w_en) && ase_cnt >= 0) n_wait_ase++;   // weight load beside the ASE
    if (ppm_prm_we && arr_en) n_pf_comp++;   // PPM prefetch beside the array
    if (ase_start && ppm_in_valid) n_ase_drain++;   // next IA load beside the drain
    // gating and enable follow the cache read by one cycle
    if (arr_en && arr_pe_mode == PE_PW) begin
      n_arr_en++;
      check(last_rd_v, "array enable without a cache read the cycle before");
      check(arr_gate_row == ~last_bm, "gated rows are the zero bits of the bitmap");
    end
    if (arr_en && arr_pe_mode == PE_LANE) begin
      check(last_rd_v && arr_noc_mode == NOC_FC, "FC array enable follows a cache read, NoC in FC mode");
      check(int'(arr_fc_grp) == (n_fc_en / 2) % 4, "FC run uses its own RF group");
      n_fc_en++;
    end
    // FC: weights read past the cache together with activations from banks 0..3
    if (p_en && c_rd_en[0] && arr_noc_mode == NOC_FC) begin
      fc_paddr.push_back(int'(p_addr));
      check(c_rd_en[3:0] == 4'hF && c_rd_addr[0] == c_rd_addr[3], "FC reads banks 0..3 together");
      check(int'(c_rd_addr[0]) == (fc_paddr.size() - 1) % 2, "FC activation address");
    end
    if (cf_w_en) begin
      n_cf++;
      check(cf_w_data == {8'(50*128 + int'(cf_w_addr) + 3), 8'(50*128 + int'(cf_w_addr) + 2),
                          8'(50*128 + int'(cf_w_addr) + 1), 8'(50*128 + int'(cf_w_addr))},
            "FC activation word written to the cache");
    end
    last_rd_v <= c_rd_en[3];
    last_bm   <= ase_buf_bm;
    if (c_rd_en[3]) begin
      comp_j.push_back(int'(ase_buf_raddr));
      comp_k.push_back(int'(c_rd_addr[3]));
    end
    if (ppm_in_valid) begin
      if (ppm_in_op == PPM_NORMAL) begin
        n_ppm_normal++;
        tags.push_back(int'(ppm_in_tag));
        if (arr_pe_mode == PE_PW) check(ppm_in_psum == arr_psum, "PPM input is the selected PE output");
        else begin   // two row reads (group q/3, row q%3) make one word
          int q;
          q = 2 * int'(ppm_in_entry) + 1;
          check(ppm_in_psum[2] == 24'({2'(q % 3), 2'd0, 2'(q / 3), 2'd0}) &&
                ppm_in_psum[3] == 24'({2'(q % 3), 2'd0, 2'(q / 3), 2'd1}) &&
                ppm_in_psum[0] == 24'({2'((q - 1) % 3), 2'd0, 2'((q - 1) / 3), 2'd0}) &&
                ppm_in_psum[1] == 24'({2'((q - 1) % 3), 2'd0, 2'((q - 1) / 3), 2'd1}),
                $sformatf("FC PPM word %0d packs two row reads", ppm_in_entry));
        end
      end else if (ppm_in_op == PPM_POOL_OUT) begin
        n_pool_out++;
        tags.push_back(int'(ppm_in_tag));
      end else n_pool_acc++;
    end
  end
  // parameter data check (PPM words are the low 160 bits of the word read)
  int prm_addr_exp [$];
  always @(posedge clk) if (rst_n && ppm_prm_we && prm_addr_exp.size() > 0) begin
    int a;
    a = prm_addr_exp.pop_front();
    check(192'(ppm_prm_wdata) == {32'd0, ppat(a)[159:0]}, $sformatf("PPM word from address %0d: %h vs %h", a, ppm_prm_wdata, ppat(a)));
  end
  int w_addr_exp [$];
  always @(posedge clk) if (rst_n && cw_w_en && w_addr_exp.size() > 0) begin
    int a;
    a = w_addr_exp.pop_front();
    check(cw_w_data == ppat(a), $sformatf("weight word from address %0d", a));
  end

  function automatic instr_t mk(input opcode_e op, input int m, input int n, input int fh,
                                input int fw, input int wt, input int it, input int nq,
                                input int ib, input int ob);
    instr_t i;
    i = '0;
    i.opcode = 3'(op); i.m_ch = 9'(m); i.n_ch = 9'(n); i.fh = 7'(fh); i.fw = 7'(fw);
    i.w_tiles = 3'(wt); i.ia_tiles = 10'(it); i.nnz_q = 2'(nq);
    i.ia_base = 7'(ib); i.oa_base = 7'(ob); i.relu_en = 1'b1; i.theta = 8'd7;
    return i;
  endfunction

  initial begin
    int cyc, pa, exp_tags [$], exp_arr;
    for (int i = 0; i < 64; i++) imem[i] = '0;
    // L0: PW 16 -> 16, 5 pixels (2 triples), 1 group, WPM 2
    imem[0] = mk(OP_PW, 16, 16, 1, 5, 1, 2, 1, 0, 10);
    // L1: PW 16 -> 80, 3 pixels (1 triple), 2 groups, WPM 1
    imem[1] = mk(OP_PW, 16, 80, 1, 3, 2, 1, 0, 0, 20);
    imem[2] = mk(OP_DW, 16, 16, 1, 3, 1, 1, 0, 0, 0);
    // L3: average pool, 8 channels, 2 pixels
    imem[3] = mk(OP_POOL, 8, 8, 1, 2, 1, 0, 0, 30, 40);
    // L4: fully connected 8 -> 30 (two groups of 24 outputs)
    imem[4] = mk(OP_FC, 8, 30, 1, 1, 2, 0, 0, 50, 60);
    imem[5] = mk(OP_END, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    // expected parameter traffic, in program order
    pa = 0;
    for (int e = 0; e < 16; e++) prm_addr_exp.push_back(pa + e);          // L0 group 0
    for (int w = 0; w < 32; w++) w_addr_exp.push_back(pa + 16 + w);       // once: reused
    for (int e = 0; e < 16; e++) prm_addr_exp.push_back(pa + e);          // triple 1
    pa = 48;
    for (int g = 0; g < 2; g++) begin
      for (int e = 0; e < 16; e++) prm_addr_exp.push_back(pa + e);
      for (int w = 0; w < 16; w++) w_addr_exp.push_back(pa + 16 + w);
      pa += 32;
    end
    for (int e = 0; e < 16; e++) prm_addr_exp.push_back(pa + e);          // pool
    pa += 16;
    for (int g = 0; g < 2; g++)                                           // FC
      for (int e = 0; e < 6; e++) prm_addr_exp.push_back(pa + 14 * g + e);
    // expected write-back addresses
    for (int t = 0; t < 2; t++)
      for (int c = 0; c < 48; c++)
        if (3 * t + c / 16 < 5 && (c % 16) < 4) exp_tags.push_back(10 * 128 + (3 * t + c / 16) * 4 + c % 16);
    for (int g = 0; g < 2; g++)
      for (int c = 0; c < 48; c++)
        if (64 * g + 4 * (c % 16) < 80) exp_tags.push_back(20 * 128 + (c / 16) * 20 + 16 * g + c % 16);
    for (int e = 0; e < 2; e++) exp_tags.push_back(40 * 128 + e);
    for (int e = 0; e < 6; e++) exp_tags.push_back(60 * 128 + e);
    for (int e = 0; e < 2; e++) exp_tags.push_back(60 * 128 + 6 + e);
    exp_arr = 2 * NNZ * 2 + 2 * NNZ * 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    check(!busy, "idle after done");
    check(fetches.size() == 6, $sformatf("%0d instruction fetches", fetches.size()));
    foreach (fetches[i]) check(fetches[i] == i, "fetch order");
    check(prm_addr_exp.size() == 0, "all PPM parameter words transferred");
    check(w_addr_exp.size() == 0, "all weight words transferred");
    check(prm_words.size() == 92, $sformatf("%0d PPM words", prm_words.size()));
    check(w_words.size() == 64, $sformatf("%0d weight words", w_words.size()));
    check(n_ase_start == 3, $sformatf("%0d ASE starts", n_ase_start));
    check(n_wait_ase > 0, "weight load never overlapped the ASE load");
    check(n_pf_comp > 0, "PPM parameter prefetch never overlapped the array");
    check(n_ase_drain > 0, "next IA load never overlapped the drain");
    check(n_clear == 6, $sformatf("%0d RF clears", n_clear));
    check(n_arr_en == exp_arr, $sformatf("compute cycles %0d expected %0d", n_arr_en, exp_arr));
    check(stats.mac_cycles == 32'(exp_arr), "mac cycle counter");
    // cache read sequence of the first group: channel j, word k -> (3j+1)*2 + k
    for (int i = 0; i < 2 * NNZ; i++)
      check(comp_j[i] == i / 2 && comp_k[i] == (3 * (i / 2) + 1) * 2 + i % 2,
            $sformatf("cache read %0d: entry %0d address %0d", i, comp_j[i], comp_k[i]));
    check(n_ppm_normal + n_pool_out == exp_tags.size(),
          $sformatf("PPM outputs %0d expected %0d", n_ppm_normal + n_pool_out, exp_tags.size()));
    foreach (exp_tags[i])
      if (i < tags.size()) check(tags[i] == exp_tags[i], $sformatf("write-back %0d: %0d expected %0d", i, tags[i], exp_tags[i]));
    check(n_pool_acc == 2 * 2, $sformatf("pool accumulations %0d", n_pool_acc));
    check(stats.layers_pw == 2 && stats.layers_pool == 1 && stats.layers_unsupported == 1 &&
          stats.layers_fc == 1, "layer counters");
    // FC: activation vector loaded once, weights group g run f word i at 134 + 14g + 2f + i
    check(n_cf == 2, $sformatf("%0d FC activation words cached", n_cf));
    check(n_fc_en == 16, $sformatf("%0d FC compute cycles", n_fc_en));
    check(fc_paddr.size() == 16, "FC weight reads");
    foreach (fc_paddr[i])
      check(fc_paddr[i] == 134 + 14 * (i / 8) + i % 8, $sformatf("FC weight read %0d at %0d", i, fc_paddr[i]));
    check(stats.w_loads == 3 && stats.w_reuses == 1, "weight load / reuse counters");
    check(stats.ch_processed == 4 * NNZ, "channels processed counter");
    $display("program took %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
