// raman_noc_tb: self-checking test of the network-on-chip routers.
//
// The routers are combinational. For random inputs in both modes the test
// compares every PE input and the router output with the routing rules
// written out independently: point-wise mode sends activation row r to all
// PEs of row r (lanes gated when the row's activation is zero) and weight
// tile c to all PEs of column c, and returns the partial sums of one chosen
// PE; fully-connected mode sends activation c down column c, gives PE (r,c)
// the weights 2r and 2r+1 of column c on lanes 0 and 1 (gated when the
// activation is zero), and returns the sum of a row's PEs lane by lane.
module raman_noc_tb;
  import raman_pkg::*;
  noc_mode_e mode = NOC_PW;
  logic en = 0;
  logic [2:0][7:0] ia_row = '0;
  logic [2:0] gate_row = '0;
  wpair_t [3:0][3:0] w_col = '0;
  logic [3:0][7:0] ia_col = '0;
  logic [3:0][5:0][7:0] w_fc = '0;
  logic [2:0][3:0] pe_en;
  logic [2:0][3:0][7:0] pe_ia_b;
  logic [2:0][3:0][3:0][7:0] pe_ia_l;
  wpair_t [2:0][3:0][3:0] pe_w;
  logic [2:0][3:0][3:0] pe_wv, pe_gate;
  logic [2:0][3:0][3:0][23:0] pe_rd = '0;
  logic [1:0] out_row = '0, out_col = '0;
  logic [3:0][23:0] out_psum;

  raman_noc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] s;
    for (int it = 0; it < 3000; it++) begin
      mode = noc_mode_e'(it % 2);
      en = $urandom_range(1) != 0;
      for (int r = 0; r < 3; r++) begin
        ia_row[r] = ($urandom_range(2) == 0) ? 8'd0 : 8'($urandom);
        gate_row[r] = (ia_row[r] == 0);
      end
      for (int c = 0; c < 4; c++) begin
        ia_col[c] = ($urandom_range(2) == 0) ? 8'd0 : 8'($urandom);
        for (int k = 0; k < 6; k++) w_fc[c][k] = 8'($urandom);
        for (int l = 0; l < 4; l++) w_col[c][l] = wpair_t'(12'($urandom));
      end
      for (int r = 0; r < 3; r++) for (int c = 0; c < 4; c++) for (int l = 0; l < 4; l++)
        pe_rd[r][c][l] = 24'($urandom);
      out_row = 2'($urandom_range(2)); out_col = 2'($urandom_range(3));
      #1;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 4; c++) begin
          check(pe_en[r][c] == en, "enable broadcast");
          for (int l = 0; l < 4; l++)
            if (mode == NOC_PW) begin
              check(pe_ia_b[r][c] == ia_row[r] && pe_ia_l[r][c][l] == ia_row[r],
                    $sformatf("PW activation to PE %0d,%0d", r, c));
              check(pe_w[r][c][l] == w_col[c][l] && pe_wv[r][c][l],
                    $sformatf("PW weight to PE %0d,%0d lane %0d", r, c, l));
              check(pe_gate[r][c][l] == (ia_row[r] == 0), "PW gating");
            end else begin
              check(pe_ia_l[r][c][l] == ia_col[c], $sformatf("FC activation to PE %0d,%0d", r, c));
              check(pe_wv[r][c][l] == (l < 2), "FC lane use");
              if (l < 2) check(pe_w[r][c][l].val == w_fc[c][2*r + l],
                               $sformatf("FC weight to PE %0d,%0d lane %0d", r, c, l));
              check(pe_gate[r][c][l] == (ia_col[c] == 0), "FC gating");
            end
        end
      for (int l = 0; l < 4; l++) begin
        if (mode == NOC_PW) s = pe_rd[out_row][out_col][l];
        else begin
          s = 0;
          for (int c = 0; c < 4; c++) s += pe_rd[out_row][c][l];
        end
        check(out_psum[l] == s, $sformatf("output lane %0d mode %0d", l, mode));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
