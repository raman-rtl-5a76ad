// ppm_tb: self-checking test of the post-processing module.
//
// Fills the 16-word parameter buffer with random bias, alpha and beta, then
// streams random partial sums (with random residuals, ReLU on or off,
// signed or unsigned output) through the NORMAL path and compares each
// output word with a reference of bias add, residual add, ReLU, dyadic
// quantization floor((alpha*x + 2^(beta-1)) / 2^beta) and clamping. Each
// result must appear exactly three cycles after its input, in order, with
// its tag. A pooling pass then accumulates a set of inputs into buffer
// entries (average: running sum; max: running maximum) and reads them out
// with POOL_OUT, again compared with the reference.
module ppm_tb;
  import raman_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 0, prm_we = 0, relu_en = 0, signed_out = 0, res_en = 0, in_valid = 0;
  logic [3:0] prm_waddr = '0, in_entry = '0;
  ppm_param_t prm_wdata = '0;
  ppm_op_e in_op = PPM_NORMAL;
  logic [3:0][23:0] in_psum = '0;
  logic [3:0][7:0] in_res = '0;
  logic [13:0] in_tag = '0, out_tag;
  logic out_valid;
  logic [31:0] out_word;

  ppm #(.BUF_DEPTH(16), .TAG_W(14)) dut (.*);

  int checks = 0, failures = 0;
  ppm_param_t bufref [16];
  typedef struct { logic [31:0] word; logic [13:0] tag; int due; } exp_t;
  exp_t expq [$];
  int cycle = 0;

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

  function automatic longint sx24(input logic [23:0] v);
    return longint'($signed(v));
  endfunction

  // output monitor: in order, exact cycle, exact data
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (out_valid) begin
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        exp_t e;
        e = expq.pop_front();
        check(out_word == e.word && out_tag == e.tag,
              $sformatf("output %h tag %0d expected %h tag %0d", out_word, out_tag, e.word, e.tag));
        check(cycle == e.due, $sformatf("output at cycle %0d expected %0d", cycle, e.due));
      end
    end
  end

  task automatic send(input ppm_op_e op, input int entry, input bit calc_out);
    @(negedge clk);
    in_valid = 1; in_op = op; in_entry = 4'(entry); in_tag = 14'($urandom);
    for (int l = 0; l < 4; l++) begin
      in_psum[l] = 24'($signed(($urandom_range(200000) - 100000)));
      in_res[l] = 8'($urandom);
    end
    if (calc_out) begin
      exp_t e;
      for (int l = 0; l < 4; l++) begin
        longint x;
        x = (op == PPM_POOL_OUT) ? sx24(bufref[entry].bias[l])
                                 : sx24(24'(in_psum[l] + bufref[entry].bias[l]));
        if (res_en && op == PPM_NORMAL) x += in_res[l];
        if (relu_en && x < 0) x = 0;
        e.word[8*l +: 8] = qref(x, int'(bufref[entry].alpha[l]), int'(bufref[entry].beta[l]), signed_out);
      end
      e.tag = in_tag;
      e.due = cycle + 3;
      expq.push_back(e);
    end else
      for (int l = 0; l < 4; l++)
        if (op == PPM_AVG_ACC)
          bufref[entry].bias[l] = bufref[entry].bias[l] + in_psum[l];
        else if ($signed(in_psum[l]) > $signed(bufref[entry].bias[l]))
          bufref[entry].bias[l] = in_psum[l];
  endtask

  task automatic load_params(input bit small_bias);
    for (int e = 0; e < 16; e++) begin
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        bufref[e].bias[l]  = small_bias ? 24'(0) : 24'($signed($urandom_range(20000) - 10000));
        bufref[e].alpha[l] = 8'($urandom);
        bufref[e].beta[l]  = 8'($urandom_range(20, 0));
      end
      if (e == 3) bufref[e].beta[0] = 8'd200;   // shift beyond the clamp point
      prm_we = 1; prm_waddr = 4'(e); prm_wdata = bufref[e];
    end
    @(negedge clk); prm_we = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    load_params(0);
    for (int cfg = 0; cfg < 8; cfg++) begin
      relu_en = cfg[0]; signed_out = cfg[1]; res_en = cfg[2];
      for (int i = 0; i < 200; i++) begin
        send(PPM_NORMAL, $urandom_range(15), 1);
        if ($urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk); in_valid = 0;
      repeat (5) @(negedge clk);
    end
    // pooling: average into entries 0..7, maximum into 8..15
    load_params(1);
    relu_en = 1; signed_out = 0; res_en = 0;
    for (int k = 0; k < 8; k++)
      for (int e = 0; e < 8; e++) send(PPM_AVG_ACC, e, 0);
    for (int e = 8; e < 16; e++)
      for (int l = 0; l < 4; l++) bufref[e].bias[l] = 24'hFE0000;   // large negative start
    @(negedge clk); in_valid = 0;
    for (int e = 8; e < 16; e++) begin
      @(negedge clk);
      prm_we = 1; prm_waddr = 4'(e); prm_wdata = bufref[e];
    end
    @(negedge clk); prm_we = 0;
    for (int k = 0; k < 8; k++)
      for (int e = 8; e < 16; e++) send(PPM_MAX_ACC, e, 0);
    for (int e = 0; e < 16; e++) send(PPM_POOL_OUT, e, 1);
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    check(expq.size() == 0, "all expected outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
