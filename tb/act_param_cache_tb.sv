// act_param_cache_tb: self-checking test of the 27-bank cache.
//
// Every cycle each bank gets an independent random write and an independent
// random read (dual port). A reference copy of all banks is kept in the
// testbench; each read is compared one cycle later against the contents
// before that cycle's write. The test also checks that banks are
// independent: a write to one bank never shows in another.
module act_param_cache_tb;
  localparam int NB = 27, DEPTH = 1024, AW = 10;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NB-1:0]          wr_en = '0, rd_en = '0;
  logic [NB-1:0][AW-1:0]  wr_addr = '0, rd_addr = '0;
  logic [NB-1:0][7:0]     wr_data = '0, rd_data;
  logic [7:0]             ref_mem [NB][DEPTH];
  logic [NB-1:0][7:0]     expect_q;
  logic [NB-1:0]          expect_v;
  int checks = 0, failures = 0;

  act_param_cache #(.NBANKS(NB), .DEPTH(DEPTH), .W(8)) dut (.*);

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // known contents first: bank b, address a holds (b*37 + a) mod 256
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      for (int b = 0; b < NB; b++) begin
        ref_mem[b][a] = 8'(b * 37 + a);
        wr_en[b] = 1; wr_addr[b] = AW'(a); wr_data[b] = ref_mem[b][a];
      end
      @(negedge clk);
    end
    wr_en = '0;
    expect_v = '0;
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      for (int b = 0; b < NB; b++) begin
        rd_en[b]   = ($urandom_range(3) != 0);
        rd_addr[b] = AW'($urandom_range(DEPTH - 1));
        wr_en[b]   = ($urandom_range(1) != 0);
        wr_addr[b] = AW'($urandom_range(DEPTH - 1));
        wr_data[b] = 8'($urandom);
      end
      @(posedge clk);
      for (int b = 0; b < NB; b++) begin
        if (rd_en[b]) begin expect_q[b] = ref_mem[b][rd_addr[b]]; expect_v[b] = 1; end
        if (wr_en[b]) ref_mem[b][wr_addr[b]] = wr_data[b];
      end
      #1;
      for (int b = 0; b < NB; b++)
        if (expect_v[b]) begin
          checks++;
          if (rd_data[b] != expect_q[b]) begin
            failures++;
            if (failures < 10)
              $display("FAIL: bank %0d read %h expected %h", b, rd_data[b], expect_q[b]);
          end
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
