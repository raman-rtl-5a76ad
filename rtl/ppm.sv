// ppm: post-processing module.
//
// Four lanes (4-way SIMD) turn 24b partial sums into 8b output activations:
//   (a) bias addition; the same adder accumulates for average pooling, and
//       a comparator keeps the running maximum for max pooling,
//   (b) residual addition (optional, an 8b activation per lane),
//   ReLU by the sign bit,
//   (c) quantization Q(x) = floor((alpha*x + 2^(beta-1)) / 2^beta) with 8b
//       dyadic scale alpha and 8b shift beta, then clamping to 0..255
//       (unsigned) or -128..127 (signed).
// The parameter buffer holds BUF_DEPTH words of 160b, each word the bias
// (24b), alpha and beta of four consecutive output channels. It is filled
// (prefetched) through prm_we while the PE array is still computing. For
// pooling the bias fields of the buffer are the accumulators: PPM_AVG_ACC
// adds the input, PPM_MAX_ACC keeps the larger value, and PPM_POOL_OUT
// quantizes the accumulated value (for an average, alpha/2^beta = 1/HW).
//
// Interface: in_valid with in_op, in_entry (buffer word), in_psum, in_res
// and an address tag. NORMAL and POOL_OUT produce out_valid/out_word (four
// 8b results, lane 0 in bits 7:0) and out_tag three cycles later; the two
// accumulate operations update the buffer at the end of the input cycle and
// produce no output. One input per cycle.
//
// The stage order, the 160b word, dyadic rounding, clamping and the reuse
// of the bias adder and buffer for pooling are the published design; the
// exact buffer field order, the residual input format and the pipeline
// registers are this implementation's.
module ppm
  import raman_pkg::*;
#(
  parameter int BUF_DEPTH = 16,
  parameter int TAG_W     = 14,
  localparam int BAW      = $clog2(BUF_DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // parameter buffer fill
  input  logic                        prm_we,
  input  logic [BAW-1:0]              prm_waddr,
  input  ppm_param_t                  prm_wdata,
  // configuration
  input  logic                        relu_en,
  input  logic                        signed_out,
  input  logic                        res_en,
  // data in
  input  logic                        in_valid,
  input  ppm_op_e                     in_op,
  input  logic [BAW-1:0]              in_entry,
  input  logic [SIMD-1:0][PSUM_W-1:0] in_psum,
  input  logic [SIMD-1:0][7:0]        in_res,
  input  logic [TAG_W-1:0]            in_tag,
  // data out
  output logic                        out_valid,
  output logic [31:0]                 out_word,
  output logic [TAG_W-1:0]            out_tag
);

  ppm_param_t buffer [BUF_DEPTH];

  // stage A registers
  logic                         a_v;
  logic [SIMD-1:0][PSUM_W-1:0]  a_x;
  logic [SIMD-1:0][7:0]         a_res, a_alpha, a_beta;
  logic [TAG_W-1:0]             a_tag;
  // stage B registers
  logic                         b_v;
  logic [SIMD-1:0][PSUM_W:0]    b_x;   // one extra bit for the residual sum
  logic [SIMD-1:0][7:0]         b_alpha, b_beta;
  logic [TAG_W-1:0]             b_tag;

  ppm_param_t cur;
  assign cur = buffer[in_entry];

  // buffer: prefetch writes and pooling accumulation
  always_ff @(posedge clk) begin
    if (prm_we) buffer[prm_waddr] <= prm_wdata;
    else if (in_valid && in_op == PPM_AVG_ACC) begin
      for (int l = 0; l < SIMD; l++)
        buffer[in_entry].bias[l] <= cur.bias[l] + in_psum[l];
    end else if (in_valid && in_op == PPM_MAX_ACC) begin
      for (int l = 0; l < SIMD; l++)
        if ($signed(in_psum[l]) > $signed(cur.bias[l]))
          buffer[in_entry].bias[l] <= in_psum[l];
    end
  end

  function automatic logic [7:0] quant(input logic signed [PSUM_W:0] x,
                                       input logic [7:0] alpha,
                                       input logic [7:0] beta,
                                       input logic sgn);
    logic signed [PSUM_W+10:0] p;
    logic signed [PSUM_W+10:0] q;
    logic [5:0] sh;
    sh = (beta > 8'd34) ? 6'd34 : beta[5:0];
    p  = x * $signed({1'b0, alpha});
    if (sh != 0) p = p + (PSUM_W+11)'(64'sd1 <<< (sh - 1));
    q  = p >>> sh;
    if (sgn) begin
      if (q > 127)       return 8'h7F;
      else if (q < -128) return 8'h80;
      else               return q[7:0];
    end else begin
      if (q > 255)       return 8'hFF;
      else if (q < 0)    return 8'h00;
      else               return q[7:0];
    end
  endfunction

  // residual addition, sign-extended to PSUM_W+1 bits
  logic [SIMD-1:0][PSUM_W:0] res_sum;
  always_comb
    for (int l = 0; l < SIMD; l++)
      res_sum[l] = {a_x[l][PSUM_W-1], a_x[l]} + {17'd0, a_res[l]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_v <= 1'b0; b_v <= 1'b0; out_valid <= 1'b0;
      a_x <= '0; a_res <= '0; a_alpha <= '0; a_beta <= '0; a_tag <= '0;
      b_x <= '0; b_alpha <= '0; b_beta <= '0; b_tag <= '0;
      out_word <= '0; out_tag <= '0;
    end else begin
      // (a) bias addition, or read-out of a pooling accumulator
      a_v <= in_valid && (in_op == PPM_NORMAL || in_op == PPM_POOL_OUT);
      for (int l = 0; l < SIMD; l++) begin
        a_x[l]     <= (in_op == PPM_POOL_OUT) ? cur.bias[l] : in_psum[l] + cur.bias[l];
        a_res[l]   <= (res_en && in_op == PPM_NORMAL) ? in_res[l] : 8'h00;
        a_alpha[l] <= cur.alpha[l];
        a_beta[l]  <= cur.beta[l];
      end
      a_tag <= in_tag;
      // (b) residual addition and ReLU (sign-bit test)
      b_v <= a_v;
      for (int l = 0; l < SIMD; l++)
        b_x[l] <= (relu_en && res_sum[l][PSUM_W]) ? '0 : res_sum[l];
      b_alpha <= a_alpha;
      b_beta  <= a_beta;
      b_tag   <= a_tag;
      // (c) quantization and clamping
      out_valid <= b_v;
      for (int l = 0; l < SIMD; l++)
        out_word[8*l +: 8] <= quant($signed(b_x[l]), b_alpha[l], b_beta[l], signed_out);
      out_tag <= b_tag;
    end
  end
endmodule
