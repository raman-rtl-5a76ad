// raman_pe_tb: self-checking test of one processing element.
//
// Drives random multiply-accumulate operations into the PE in both
// addressing modes (point-wise: broadcast activation, RF address from the
// weight index; lane mode: per-lane activations, RF address {grp, lane}),
// at 8, 4 and 2 bit precision, with random data gating, invalid weights,
// reg-file clears and chained partial-sum inputs. A reference reg-file in
// the testbench is updated three cycles after each operation, which is the
// PE's pipeline depth (input, multiply, accumulate registers), and both
// read ports are compared every cycle. A separate directed check measures
// that latency.
module raman_pe_tb;
  import raman_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 0, en = 0, chain_en = 0, acc_clear = 0;
  pe_mode_e mode = PE_PW;
  prec_e prec = PREC_8;
  logic [7:0] ia_b = '0;
  logic [3:0][7:0] ia_l = '0;
  wpair_t [3:0] w = '0;
  logic [3:0] w_valid = '0, gate = '0;
  logic [1:0] grp = '0, rd_grp = '0, rd_grp_b = '0;
  logic [3:0][23:0] psum_in = '0, rd_data, rd_data_b;

  raman_pe #(.PE_TYPE(1)) dut (.*);

  int checks = 0, failures = 0, n_gated = 0;
  logic [23:0] rf_ref [16];

  function automatic logic signed [23:0] mulref(input logic [7:0] a, input logic [7:0] b,
                                                input prec_e p);
    int s = 0, bits, n;
    bits = (p == PREC_8) ? 8 : (p == PREC_4) ? 4 : 2;
    n = 8 / bits;
    for (int k = 0; k < n; k++) begin
      int ua, sb;
      ua = 0; sb = 0;
      for (int i = 0; i < bits; i++) begin
        ua += int'(a[k*bits + i]) << i;
        sb += int'(b[k*bits + i]) << i;
      end
      if (b[k*bits + bits - 1]) sb -= (1 << bits);
      s += ua * sb;
    end
    return 24'(s);
  endfunction

  // pending reference updates: an operation presented before edge k
  // reaches the reg-file at edge k + 2 (visible after the third edge)
  typedef struct { bit clr; bit v [4]; int addr [4]; logic [23:0] add [4]; } upd_t;
  upd_t pipe [2];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step();
    upd_t u;
    u.clr = acc_clear;
    for (int l = 0; l < 4; l++) begin
      u.v[l] = en && w_valid[l] && !gate[l];
      u.addr[l] = (mode == PE_PW) ? int'(w[l].idx) : int'({grp, 2'(l)});
      u.add[l] = mulref((mode == PE_PW) ? ia_b : ia_l[l], w[l].val, prec)
                 + (chain_en ? psum_in[l] : 24'd0);
      if (en && w_valid[l] && gate[l]) n_gated++;
    end
    @(posedge clk);
    // the clear acts at this edge; the update issued two edges ago lands now
    if (acc_clear) for (int i = 0; i < 16; i++) rf_ref[i] = '0;
    else
      for (int l = 0; l < 4; l++)
        if (pipe[1].v[l]) rf_ref[pipe[1].addr[l]] += pipe[1].add[l];
    pipe[1] = pipe[0]; pipe[0] = u;
    #1;
    for (int l = 0; l < 4; l++) begin
      check(rd_data[l] == rf_ref[{rd_grp, 2'(l)}], $sformatf("rd_data lane %0d", l));
      check(rd_data_b[l] == rf_ref[{rd_grp_b, 2'(l)}], $sformatf("rd_data_b lane %0d", l));
    end
  endtask

  initial begin
    int lat;
    for (int i = 0; i < 16; i++) rf_ref[i] = '0;
    for (int i = 0; i < 2; i++) begin
      pipe[i].clr = 0;
      for (int l = 0; l < 4; l++) begin pipe[i].v[l] = 0; pipe[i].addr[l] = 0; pipe[i].add[l] = 0; end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // directed latency check: 5 x 7 into entry 0, visible after 3 edges
    mode = PE_PW; prec = PREC_8; ia_b = 8'd5; w_valid = 4'b0001; w[0] = '{idx: 4'd0, val: 8'd7};
    en = 1;
    @(posedge clk); #1; en = 0;
    lat = 1;
    while (rd_data[0] != 24'd35 && lat < 10) begin @(posedge clk); #1; lat++; end
    check(lat == 3, $sformatf("PE latency %0d cycles, expected 3", lat));
    rf_ref[0] = 24'd35;
    @(negedge clk);
    // random operation
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      if (i % 500 == 0) begin mode = pe_mode_e'($urandom_range(1)); prec = prec_e'($urandom_range(2)); end
      en = $urandom_range(3) != 0;
      acc_clear = $urandom_range(199) == 0;
      chain_en = $urandom_range(3) == 0;
      ia_b = ($urandom_range(3) == 0) ? 8'd0 : 8'($urandom);
      grp = 2'($urandom);
      rd_grp = 2'($urandom); rd_grp_b = 2'($urandom);
      for (int l = 0; l < 4; l++) begin
        ia_l[l] = 8'($urandom);
        w[l] = '{idx: 4'($urandom), val: 8'($urandom)};
        w_valid[l] = $urandom_range(7) != 0;
        gate[l] = $urandom_range(4) == 0;
        psum_in[l] = 24'($urandom);
      end
      // point-wise tiles never hold the same index twice in one word
      if (mode == PE_PW)
        for (int l = 0; l < 4; l++) w[l].idx = 4'(4 * l + $urandom_range(3));
      step();
    end
    check(n_gated > 0, "data gating exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
