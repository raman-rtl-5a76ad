// glb_mem_tb: self-checking test of the global memory.
//
// Writes random words to random addresses of the 192b parameter bank and
// the 32b activation bank, keeps its own copy in associative arrays, then
// reads the addresses back and compares. It also checks the one-cycle read
// latency, that the activation bank can read one address and write another
// in the same cycle (read returns the old contents), and that a parameter
// write does not disturb the read register.
module glb_mem_tb;
  localparam int PDEPTH = 16384, ADEPTH = 16384;
  localparam int PAW = $clog2(PDEPTH), AAW = $clog2(ADEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic            p_en = 0, p_we = 0;
  logic [PAW-1:0]  p_addr = '0;
  logic [191:0]    p_wdata = '0, p_rdata;
  logic            a_re = 0, a_we = 0;
  logic [AAW-1:0]  a_raddr = '0, a_waddr = '0;
  logic [31:0]     a_wdata = '0, a_rdata;

  int checks = 0, failures = 0;

  glb_mem #(.PDEPTH(PDEPTH), .ADEPTH(ADEPTH)) dut (.*);

  logic [191:0] pref [int];
  logic [31:0]  aref [int];
  int           paddrs [$], aaddrs [$];

  function automatic logic [191:0] rand192();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    logic [31:0] old;
    @(negedge clk);
    // fill
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(PDEPTH - 1);
      if (!pref.exists(a)) paddrs.push_back(a);
      pref[a] = rand192();
      p_en = 1; p_we = 1; p_addr = PAW'(a); p_wdata = pref[a];
      a = $urandom_range(ADEPTH - 1);
      if (!aref.exists(a)) aaddrs.push_back(a);
      aref[a] = $urandom;
      a_we = 1; a_waddr = AAW'(a); a_wdata = aref[a];
      @(negedge clk);
    end
    p_en = 0; p_we = 0; a_we = 0;
    // read back, data valid one cycle after the enable
    foreach (paddrs[i]) begin
      p_en = 1; p_addr = PAW'(paddrs[i]);
      @(negedge clk);
      p_en = 0;
      check(p_rdata == pref[paddrs[i]], $sformatf("param addr %0d", paddrs[i]));
    end
    foreach (aaddrs[i]) begin
      a_re = 1; a_raddr = AAW'(aaddrs[i]);
      @(negedge clk);
      a_re = 0;
      check(a_rdata == aref[aaddrs[i]], $sformatf("act addr %0d", aaddrs[i]));
    end
    // read and write the same activation word in one cycle: old data returned
    a = aaddrs[0];
    old = aref[a];
    a_re = 1; a_raddr = AAW'(a); a_we = 1; a_waddr = AAW'(a); a_wdata = ~old;
    @(negedge clk);
    a_re = 0; a_we = 0;
    check(a_rdata == old, "read-during-write returns old word");
    a_re = 1;
    @(negedge clk);
    a_re = 0;
    check(a_rdata == ~old, "written word visible next read");
    // read register holds while not enabled; a write does not change it
    p_en = 1; p_addr = PAW'(paddrs[0]);
    @(negedge clk);
    p_we = 1; p_addr = PAW'(paddrs[1]); p_wdata = ~pref[paddrs[1]];
    @(negedge clk);
    p_en = 0; p_we = 0;
    @(negedge clk);
    check(p_rdata == pref[paddrs[0]], "param read register held across write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
