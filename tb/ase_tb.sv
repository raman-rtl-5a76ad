// ase_tb: self-checking test of the activation sparsity engine.
//
// A behavioural activation memory (one-cycle read latency, like the global
// memory) holds three pixels of M channels with random sparsity. For each
// run the testbench computes, from the stored bytes alone, the column
// bitmaps, the run-time pruning decisions, the list of non-zero channels
// and the packed contents each cache bank must receive. It checks the
// engine's index and bitmap buffers, nnz, the captured cache writes, the
// pruning and skip event counts, and that done arrives M + 4 cycles after
// start. Runs mix skip (compressed) and dense modes, pruning on and off,
// invalid rows and several channel counts.
module ase_tb;
  localparam int MAX_M = 256, AAW = 14, CAW = 10, MW = 9;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 rst_n = 0, start = 0, skip_en = 0, rap_en = 0;
  logic [MW-1:0]        m_ch = '0, buf_raddr = '0, nnz;
  logic [2:0][AAW-1:0]  row_base = '0;
  logic [2:0]           row_valid = '0;
  logic [7:0]           theta = '0, buf_idx;
  logic                 act_re;
  logic [AAW-1:0]       act_raddr;
  logic [31:0]          act_rdata = '0;
  logic [2:0]           cw_en, buf_bm;
  logic [2:0][CAW-1:0]  cw_addr;
  logic [2:0][7:0]      cw_data;
  logic                 busy, done, ev_pruned, ev_skipped;

  ase #(.MAX_M(MAX_M), .AAW(AAW), .CAW(CAW)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] amem [1024];
  logic [7:0]  cache [3][1024];
  int n_pruned, n_skipped;

  always_ff @(posedge clk) if (act_re) act_rdata <= amem[act_raddr[9:0]];
  always_ff @(posedge clk)
    for (int r = 0; r < 3; r++) if (cw_en[r]) cache[r][cw_addr[r]] <= cw_data[r];
  always_ff @(posedge clk) begin
    if (ev_pruned)  n_pruned++;
    if (ev_skipped) n_skipped++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tot_pruned = 0, tot_skipped = 0;

  task automatic run(input int m, input bit skip, input bit rap, input int density);
    logic [7:0] a [3][MAX_M];
    logic [2:0] eb, ebm;
    int exp_idx [$];
    logic [2:0] exp_bm [$];
    logic [7:0] exp_cache [3][$];
    int nz, ep, es, cyc;
    // pixels live at word bases 0, 100, 200 (+ a random offset)
    for (int r = 0; r < 3; r++) begin
      row_base[r] = AAW'(r * 300 + $urandom_range(30));
      row_valid[r] = ($urandom_range(7) != 0);
      for (int w = 0; w < m / 4; w++) begin
        logic [31:0] word;
        for (int k = 0; k < 4; k++)
          word[8*k +: 8] = ($urandom_range(99) < density) ? 8'($urandom_range(255, 1)) : 8'd0;
        amem[row_base[r] + w] = word;
      end
      for (int c = 0; c < m; c++)
        a[r][c] = row_valid[r] ? amem[row_base[r] + c / 4][8*(c%4) +: 8] : 8'd0;
    end
    theta = 8'($urandom_range(120));
    ep = 0; es = 0;
    for (int c = 0; c < m; c++) begin
      nz = 0;
      for (int r = 0; r < 3; r++) begin eb[r] = a[r][c] != 0; nz += int'(eb[r]); end
      ebm = eb;
      if (skip && rap && nz == 1)
        for (int r = 0; r < 3; r++) if (eb[r] && a[r][c] < theta) begin ebm[r] = 0; ep++; end
      if (skip) begin
        if (ebm != 0) begin
          exp_idx.push_back(c); exp_bm.push_back(ebm);
          for (int r = 0; r < 3; r++) if (ebm[r]) exp_cache[r].push_back(a[r][c]);
        end else es++;
      end else begin
        exp_idx.push_back(c); exp_bm.push_back(eb);
        for (int r = 0; r < 3; r++) exp_cache[r].push_back(a[r][c]);
      end
    end
    // run
    n_pruned = 0; n_skipped = 0;
    m_ch = MW'(m); skip_en = skip; rap_en = rap;
    @(negedge clk);
    start = 1;
    @(posedge clk);
    cyc = 0;
    @(negedge clk);
    start = 0;
    while (!done) begin @(posedge clk); cyc++; @(negedge clk); end
    check(cyc == m + 4, $sformatf("ASE latency %0d, expected M+4 = %0d", cyc, m + 4));
    check(nnz == MW'(exp_idx.size()), $sformatf("nnz %0d expected %0d", nnz, exp_idx.size()));
    for (int j = 0; j < exp_idx.size(); j++) begin
      buf_raddr = MW'(j);
      #1;
      check(buf_idx == 8'(exp_idx[j]) && buf_bm == exp_bm[j],
            $sformatf("buffer entry %0d: idx %0d bm %b, expected %0d %b", j, buf_idx, buf_bm,
                      exp_idx[j], exp_bm[j]));
    end
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < exp_cache[r].size(); k++)
        check(cache[r][k] == exp_cache[r][k], $sformatf("cache bank %0d word %0d", r, k));
    check(n_pruned == ep, $sformatf("pruned events %0d expected %0d", n_pruned, ep));
    check(n_skipped == es, $sformatf("skip events %0d expected %0d", n_skipped, es));
    tot_pruned += ep; tot_skipped += es;
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) amem[i] = '0;
    for (int r = 0; r < 3; r++) for (int i = 0; i < 1024; i++) cache[r][i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(8, 1, 0, 50);
    run(16, 1, 1, 30);
    run(256, 1, 1, 20);
    run(64, 0, 0, 40);
    for (int i = 0; i < 30; i++)
      run(4 * $urandom_range(64, 1), $urandom_range(1) != 0, $urandom_range(1) != 0,
          $urandom_range(90, 5));
    check(tot_pruned > 0, "pruning happened");
    check(tot_skipped > 0, "skipping happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
