// pe_array_tb: self-checking test of the 3x4 PE array with its NoC.
//
// Point-wise test: three pixels (one per PE row) of M input channels are
// multiplied with a balanced-sparse 64-column weight tile (4 columns of 16
// output channels, 4 non-zero weights per column per input channel). Each
// cycle one input channel enters; rows whose activation is zero are gated.
// All 3 x 64 sums are read back and compared with a reference computed in
// the testbench. Fully-connected test: four input activations per cycle
// (one per column) against six output neurons (two per row), summed over
// the columns by the row router. Runs at 8, 4 and 2 bit precision.
module pe_array_tb;
  import raman_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 0, en = 0, acc_clear = 0;
  noc_mode_e noc_mode = NOC_PW;
  pe_mode_e pe_mode = PE_PW;
  prec_e prec = PREC_8;
  logic [2:0][7:0] ia_row = '0;
  logic [2:0] gate_row = '0;
  wpair_t [3:0][3:0] w_col = '0;
  logic [3:0][7:0] ia_col = '0;
  logic [3:0][5:0][7:0] w_fc = '0;
  logic [1:0] fc_grp = '0, out_row = '0, out_col = '0, rd_grp = '0;
  logic [3:0][23:0] out_psum;

  pe_array dut (.*);

  int checks = 0, failures = 0, n_gated = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int mulref(input logic [7:0] a, input logic [7:0] b, input prec_e p);
    int s = 0, bits;
    bits = (p == PREC_8) ? 8 : (p == PREC_4) ? 4 : 2;
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

  task automatic clear();
    @(negedge clk); acc_clear = 1; en = 0;
    @(negedge clk); acc_clear = 0;
  endtask

  task automatic pw_test(input int m, input prec_e p);
    int ref_o [3][64];
    for (int r = 0; r < 3; r++) for (int o = 0; o < 64; o++) ref_o[r][o] = 0;
    noc_mode = NOC_PW; pe_mode = PE_PW; prec = p;
    clear();
    for (int ch = 0; ch < m; ch++) begin
      @(negedge clk);
      en = 1;
      for (int r = 0; r < 3; r++) begin
        ia_row[r] = ($urandom_range(2) == 0) ? 8'd0 : 8'($urandom);
        gate_row[r] = (ia_row[r] == 0);
        if (gate_row[r]) n_gated++;
      end
      for (int c = 0; c < 4; c++)
        for (int l = 0; l < 4; l++) begin
          w_col[c][l] = '{idx: 4'(4 * l + $urandom_range(3)), val: 8'($urandom)};
          for (int r = 0; r < 3; r++)
            ref_o[r][16*c + w_col[c][l].idx] += mulref(ia_row[r], w_col[c][l].val, p);
        end
    end
    @(negedge clk); en = 0;
    repeat (3) @(negedge clk);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 4; c++)
        for (int g = 0; g < 4; g++) begin
          out_row = 2'(r); out_col = 2'(c); rd_grp = 2'(g);
          #1;
          for (int l = 0; l < 4; l++)
            check(out_psum[l] == 24'(ref_o[r][16*c + 4*g + l]),
                  $sformatf("PW pixel %0d channel %0d: %0d expected %0d", r, 16*c + 4*g + l,
                            $signed(out_psum[l]), ref_o[r][16*c + 4*g + l]));
        end
  endtask

  task automatic fc_test(input int m, input prec_e p);
    int ref_o [4][6];
    for (int g = 0; g < 4; g++) for (int o = 0; o < 6; o++) ref_o[g][o] = 0;
    noc_mode = NOC_FC; pe_mode = PE_LANE; prec = p;
    clear();
    for (int i = 0; i < m; i++) begin
      @(negedge clk);
      en = 1;
      fc_grp = 2'($urandom);
      for (int c = 0; c < 4; c++) begin
        ia_col[c] = ($urandom_range(3) == 0) ? 8'd0 : 8'($urandom);
        for (int k = 0; k < 6; k++) begin
          w_fc[c][k] = 8'($urandom);
          ref_o[fc_grp][k] += mulref(ia_col[c], w_fc[c][k], p);
        end
      end
    end
    @(negedge clk); en = 0;
    repeat (3) @(negedge clk);
    for (int g = 0; g < 4; g++)
      for (int r = 0; r < 3; r++) begin
        out_row = 2'(r); rd_grp = 2'(g);
        #1;
        for (int l = 0; l < 2; l++)
          check(out_psum[l] == 24'(ref_o[g][2*r + l]), $sformatf("FC group %0d neuron %0d", g, 2*r + l));
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    pw_test(40, PREC_8);
    pw_test(64, PREC_4);
    pw_test(17, PREC_2);
    fc_test(50, PREC_8);
    fc_test(20, PREC_4);
    check(n_gated > 0, "row gating exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
