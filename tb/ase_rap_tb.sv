// ase_rap_tb: self-checking test of the non-zero detector and run-time
// activation pruning.
//
// Runs all shapes of a 3-activation column (each entry zero, below theta or
// not) plus random columns, and compares the raw bitmap, the pruned bitmap,
// OR_BIT and the pruned flag with a reference written from the rule: a
// column with exactly one non-zero activation has it removed when it is
// smaller than theta; columns with two or three non-zeros are kept.
module ase_rap_tb;
  logic [2:0][7:0] a = '0;
  logic [7:0]      theta = '0;
  logic            rap_en = 0;
  logic [2:0]      b, bm;
  logic            or_bit, pruned;
  int checks = 0, failures = 0;
  int n_pruned = 0;

  ase_rap #(.N(3), .W(8)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one();
    logic [2:0] eb, ebm;
    int nz;
    bit ep;
    nz = 0;
    for (int k = 0; k < 3; k++) begin
      eb[k] = (a[k] != 0);
      nz += int'(eb[k]);
    end
    ebm = eb;
    ep = 0;
    if (rap_en && nz == 1)
      for (int k = 0; k < 3; k++)
        if (eb[k] && a[k] < theta) begin ebm[k] = 0; ep = 1; end
    #1;
    checks++;
    if (b !== eb || bm !== ebm || or_bit !== (|ebm) || pruned !== ep) begin
      failures++;
      if (failures < 10)
        $display("FAIL: a=%h theta=%0d en=%0d -> b=%b bm=%b or=%b p=%b", a, theta,
                 rap_en, b, bm, or_bit, pruned);
    end
    if (ep) n_pruned++;
  endtask

  initial begin
    // exhaustive over a small value set
    for (int en = 0; en < 2; en++)
      for (int x0 = 0; x0 < 4; x0++)
        for (int x1 = 0; x1 < 4; x1++)
          for (int x2 = 0; x2 < 4; x2++) begin
            rap_en = en[0];
            theta = 8'd10;
            a[0] = x0 == 0 ? 8'd0 : x0 == 1 ? 8'd3 : x0 == 2 ? 8'd10 : 8'd200;
            a[1] = x1 == 0 ? 8'd0 : x1 == 1 ? 8'd9 : x1 == 2 ? 8'd11 : 8'd1;
            a[2] = x2 == 0 ? 8'd0 : x2 == 1 ? 8'd5 : x2 == 2 ? 8'd255 : 8'd10;
            run_one();
          end
    // random, with many zeros
    for (int i = 0; i < 5000; i++) begin
      rap_en = $urandom_range(1) != 0;
      theta  = 8'($urandom);
      for (int k = 0; k < 3; k++)
        a[k] = ($urandom_range(2) == 0) ? 8'($urandom) : 8'd0;
      run_one();
    end
    checks++;
    if (n_pruned == 0) begin failures++; $display("FAIL: pruning never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
