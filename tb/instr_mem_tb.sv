// instr_mem_tb: self-checking test of the instruction memory.
//
// Fills all 64 words of the 80b memory with random instructions, reads
// them back in a random order and checks the data and its one-cycle read
// latency (the output register changes only on a read enable).
module instr_mem_tb;
  localparam int DEPTH = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          wr_en = 0, rd_en = 0;
  logic [5:0]    wr_addr = '0, rd_addr = '0;
  logic [79:0]   wr_data = '0, rd_data;
  logic [79:0]   ref_mem [DEPTH];
  int checks = 0, failures = 0;

  instr_mem #(.DEPTH(DEPTH), .W(80)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      ref_mem[i] = {16'($urandom), $urandom, $urandom};
      wr_en = 1; wr_addr = 6'(i); wr_data = ref_mem[i];
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(DEPTH - 1);
      rd_en = 1; rd_addr = 6'(a);
      @(posedge clk); #1;
      check(rd_data == ref_mem[a], $sformatf("word %0d after one cycle", a));
      rd_en = 0; rd_addr = ~rd_addr;
      @(posedge clk); #1;
      check(rd_data == ref_mem[a], "output held without read enable");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
