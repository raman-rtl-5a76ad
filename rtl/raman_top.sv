// raman_top: the RAMAN sparse tinyML inference accelerator.
//
// Blocks and connections follow the published top-level diagram: the
// instruction memory feeds the top-level controller; activations travel
// from the global memory through the activation sparsity engine (ASE) into
// the activation & parameter cache; the cache feeds the 3 x 4 PE array
// through the column and row routers of the NoC; the row routers return
// partial sums to the post-processing module (PPM), which writes 8b
// results back into the global memory (over the input activations of the
// same layer). Parameters go from the global memory to the cache (weights)
// and to the PPM parameter buffer directly.
//
// Host interface: while busy is low the host owns the memories through the
// host_* ports (load the program, parameters and input activations, read
// back results). A start pulse runs the program until its OP_END
// instruction; done pulses at the end. All memory ports are synchronous,
// read data one cycle after the read enable.
//
// Layer support in this implementation: point-wise convolution (with
// activation zero skipping, run-time activation pruning, balanced-pruned
// weights, data gating and 8/4/2b precision), fully-connected layers (the
// activation vector cached once in banks 0..3, the weights streamed from
// the parameter memory past the cache, as the published design does for
// data without reuse) and global average/max pooling. Instructions for
// CONV and DW are skipped and counted in stats.layers_unsupported.
module raman_top
  import raman_pkg::*;
#(
  parameter int PDEPTH   = 16384,  // parameter memory words (192b)
  parameter int ADEPTH   = 16384,  // activation memory words (32b)
  parameter int CDEPTH   = 1024,   // cache bank depth (8b)
  parameter int IDEPTH   = 64,     // instruction memory words (80b)
  parameter int MAX_M    = 256,    // largest input-channel count
  localparam int PAW     = $clog2(PDEPTH),
  localparam int AAW     = $clog2(ADEPTH),
  localparam int CAW     = $clog2(CDEPTH),
  localparam int IAW     = $clog2(IDEPTH),
  localparam int MW      = $clog2(MAX_M + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // host: instruction memory
  input  logic                 host_im_we,
  input  logic [IAW-1:0]       host_im_addr,
  input  logic [INSTR_W-1:0]   host_im_wdata,
  // host: parameter memory
  input  logic                 host_p_en,
  input  logic                 host_p_we,
  input  logic [PAW-1:0]       host_p_addr,
  input  logic [PARAM_W-1:0]   host_p_wdata,
  output logic [PARAM_W-1:0]   host_p_rdata,
  // host: activation memory
  input  logic                 host_a_we,
  input  logic [AAW-1:0]       host_a_waddr,
  input  logic [ACT_W-1:0]     host_a_wdata,
  input  logic                 host_a_re,
  input  logic [AAW-1:0]       host_a_raddr,
  output logic [ACT_W-1:0]     host_a_rdata,
  // event counters
  output stats_t               stats
);

  // ------------------------------------------------------------ signals
  logic                 im_re;
  logic [IAW-1:0]       im_addr;
  logic [INSTR_W-1:0]   im_rdata;
  logic                 ctl_p_en;
  logic [PAW-1:0]       ctl_p_addr;
  logic [PARAM_W-1:0]   p_rdata;
  logic                 ctl_a_re;
  logic [AAW-1:0]       ctl_a_raddr;
  logic [ACT_W-1:0]     a_rdata;
  logic                 ase_start, ase_skip_en, ase_rap_en, ase_done, ase_busy;
  logic [MW-1:0]        ase_m, ase_nnz, ase_buf_raddr;
  logic [ROWS-1:0][AAW-1:0] ase_row_base;
  logic [ROWS-1:0]      ase_row_valid, ase_buf_bm;
  logic [7:0]           ase_theta, ase_buf_idx;
  logic                 ase_act_re, ase_ev_pruned, ase_ev_skipped;
  logic [AAW-1:0]       ase_act_raddr;
  logic [ROWS-1:0]      ase_cw_en;
  logic [ROWS-1:0][CAW-1:0] ase_cw_addr;
  logic [ROWS-1:0][7:0] ase_cw_data;
  logic [CACHE_BANKS-1:0]          c_rd_en, c_wr_en;
  logic [CACHE_BANKS-1:0][CAW-1:0] c_rd_addr, c_wr_addr;
  logic [CACHE_BANKS-1:0][7:0]     c_rd_data, c_wr_data;
  logic                 cw_w_en;
  logic [CAW-1:0]       cw_w_addr;
  logic [PARAM_W-1:0]   cw_w_data;
  logic                 cf_w_en;
  logic [CAW-1:0]       cf_w_addr;
  logic [ACT_W-1:0]     cf_w_data;
  noc_mode_e            arr_noc_mode;
  pe_mode_e             arr_pe_mode;
  logic [1:0]           arr_fc_grp;
  logic [COLS-1:0][DATA_W-1:0]      ia_col;
  logic [COLS-1:0][5:0][DATA_W-1:0] w_fc;
  logic                 arr_en, arr_clear;
  prec_e                arr_prec;
  logic [ROWS-1:0]      arr_gate_row;
  logic [1:0]           arr_out_row, arr_out_col, arr_rd_grp;
  logic [SIMD-1:0][PSUM_W-1:0] arr_psum;
  logic [ROWS-1:0][DATA_W-1:0] ia_row;
  wpair_t [COLS-1:0][SIMD-1:0] w_col;
  logic [PARAM_W-1:0]   w_word;
  logic                 ppm_prm_we, ppm_relu_en, ppm_signed_out, ppm_in_valid;
  logic [3:0]           ppm_prm_waddr, ppm_in_entry;
  ppm_param_t           ppm_prm_wdata;
  ppm_op_e              ppm_in_op;
  logic [SIMD-1:0][PSUM_W-1:0] ppm_in_psum;
  logic [AAW-1:0]       ppm_in_tag, ppm_out_tag;
  logic                 ppm_out_valid;
  logic [31:0]          ppm_out_word;

  // ------------------------------------------------------------ memories
  instr_mem #(.DEPTH(IDEPTH), .W(INSTR_W)) u_imem (
    .clk(clk),
    .wr_en(host_im_we && !busy), .wr_addr(host_im_addr), .wr_data(host_im_wdata),
    .rd_en(im_re), .rd_addr(im_addr), .rd_data(im_rdata)
  );

  glb_mem #(.PDEPTH(PDEPTH), .ADEPTH(ADEPTH), .PW(PARAM_W), .AW(ACT_W)) u_glb (
    .clk(clk),
    .p_en   (busy ? ctl_p_en : host_p_en),
    .p_we   (busy ? 1'b0 : host_p_we),
    .p_addr (busy ? ctl_p_addr : host_p_addr),
    .p_wdata(host_p_wdata),
    .p_rdata(p_rdata),
    .a_re   (busy ? (ase_act_re || ctl_a_re) : host_a_re),
    .a_raddr(busy ? (ase_act_re ? ase_act_raddr : ctl_a_raddr) : host_a_raddr),
    .a_rdata(a_rdata),
    .a_we   (busy ? ppm_out_valid : host_a_we),
    .a_waddr(busy ? ppm_out_tag : host_a_waddr),
    .a_wdata(busy ? ppm_out_word : host_a_wdata)
  );
  assign host_p_rdata = p_rdata;
  assign host_a_rdata = a_rdata;

  // cache: banks 0..2 written by the ASE, banks 3..26 by weight loads; in
  // FC layers banks 0..3 take the activation vector, one word per address
  always_comb begin
    for (int b = 0; b < CACHE_BANKS; b++) begin
      if (cf_w_en && b < COLS) begin
        c_wr_en[b]   = 1'b1;
        c_wr_addr[b] = cf_w_addr;
        c_wr_data[b] = cf_w_data[8*b +: 8];
      end else if (b < ROWS) begin
        c_wr_en[b]   = ase_cw_en[b];
        c_wr_addr[b] = ase_cw_addr[b];
        c_wr_data[b] = ase_cw_data[b];
      end else begin
        c_wr_en[b]   = cw_w_en;
        c_wr_addr[b] = cw_w_addr;
        c_wr_data[b] = cw_w_data[8*(b-ROWS) +: 8];
      end
    end
  end

  act_param_cache #(.NBANKS(CACHE_BANKS), .DEPTH(CDEPTH), .W(8)) u_cache (
    .clk(clk),
    .wr_en(c_wr_en), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .rd_en(c_rd_en), .rd_addr(c_rd_addr), .rd_data(c_rd_data)
  );

  // ------------------------------------------------------------ compute
  ase #(.MAX_M(MAX_M), .AAW(AAW), .CAW(CAW)) u_ase (
    .clk(clk), .rst_n(rst_n), .start(ase_start), .m_ch(ase_m),
    .row_base(ase_row_base), .row_valid(ase_row_valid),
    .skip_en(ase_skip_en), .rap_en(ase_rap_en), .theta(ase_theta),
    .act_re(ase_act_re), .act_raddr(ase_act_raddr), .act_rdata(a_rdata),
    .cw_en(ase_cw_en), .cw_addr(ase_cw_addr), .cw_data(ase_cw_data),
    .buf_raddr(ase_buf_raddr), .buf_idx(ase_buf_idx), .buf_bm(ase_buf_bm),
    .nnz(ase_nnz), .busy(ase_busy), .done(ase_done),
    .ev_pruned(ase_ev_pruned), .ev_skipped(ase_ev_skipped)
  );

  // cache read data to the array: IA banks per row, one 192b weight word
  always_comb begin
    for (int r = 0; r < ROWS; r++) ia_row[r] = c_rd_data[r];
    for (int b = ROWS; b < CACHE_BANKS; b++) w_word[8*(b-ROWS) +: 8] = c_rd_data[b];
    for (int c = 0; c < COLS; c++)
      for (int l = 0; l < SIMD; l++)
        w_col[c][l] = wpair_t'(w_word[48*c + 12*l +: 12]);
    // FC: activation c from cache bank c, six weights of column c straight
    // from the parameter memory word (bits 48c + 8k)
    for (int c = 0; c < COLS; c++) begin
      ia_col[c] = c_rd_data[c];
      for (int k = 0; k < 6; k++) w_fc[c][k] = p_rdata[48*c + 8*k +: 8];
    end
  end

  pe_array u_array (
    .clk(clk), .rst_n(rst_n),
    .noc_mode(arr_noc_mode), .pe_mode(arr_pe_mode), .prec(arr_prec), .en(arr_en),
    .ia_row(ia_row), .gate_row(arr_gate_row), .w_col(w_col),
    .ia_col(ia_col), .w_fc(w_fc), .fc_grp(arr_fc_grp),
    .acc_clear(arr_clear),
    .out_row(arr_out_row), .out_col(arr_out_col), .rd_grp(arr_rd_grp),
    .out_psum(arr_psum)
  );

  ppm #(.BUF_DEPTH(16), .TAG_W(AAW)) u_ppm (
    .clk(clk), .rst_n(rst_n),
    .prm_we(ppm_prm_we), .prm_waddr(ppm_prm_waddr), .prm_wdata(ppm_prm_wdata),
    .relu_en(ppm_relu_en), .signed_out(ppm_signed_out), .res_en(1'b0),
    .in_valid(ppm_in_valid), .in_op(ppm_in_op), .in_entry(ppm_in_entry),
    .in_psum(ppm_in_psum), .in_res('0), .in_tag(ppm_in_tag),
    .out_valid(ppm_out_valid), .out_word(ppm_out_word), .out_tag(ppm_out_tag)
  );

  // ------------------------------------------------------------ control
  top_controller #(.IM_AW(IAW), .PAW(PAW), .AAW(AAW), .CAW(CAW), .MAX_M(MAX_M)) u_ctl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .im_re(im_re), .im_addr(im_addr), .im_rdata(im_rdata),
    .p_en(ctl_p_en), .p_addr(ctl_p_addr), .p_rdata(p_rdata),
    .a_re(ctl_a_re), .a_raddr(ctl_a_raddr), .a_rdata(a_rdata),
    .ase_start(ase_start), .ase_m(ase_m), .ase_row_base(ase_row_base),
    .ase_row_valid(ase_row_valid), .ase_skip_en(ase_skip_en),
    .ase_rap_en(ase_rap_en), .ase_theta(ase_theta), .ase_done(ase_done),
    .ase_nnz(ase_nnz), .ase_buf_raddr(ase_buf_raddr), .ase_buf_idx(ase_buf_idx),
    .ase_buf_bm(ase_buf_bm), .ase_ev_pruned(ase_ev_pruned),
    .ase_ev_skipped(ase_ev_skipped),
    .c_rd_en(c_rd_en), .c_rd_addr(c_rd_addr),
    .cw_w_en(cw_w_en), .cw_w_addr(cw_w_addr), .cw_w_data(cw_w_data),
    .cf_w_en(cf_w_en), .cf_w_addr(cf_w_addr), .cf_w_data(cf_w_data),
    .arr_en(arr_en), .arr_noc_mode(arr_noc_mode), .arr_pe_mode(arr_pe_mode),
    .arr_fc_grp(arr_fc_grp), .arr_prec(arr_prec), .arr_gate_row(arr_gate_row),
    .arr_clear(arr_clear), .arr_out_row(arr_out_row), .arr_out_col(arr_out_col),
    .arr_rd_grp(arr_rd_grp), .arr_psum(arr_psum),
    .ppm_prm_we(ppm_prm_we), .ppm_prm_waddr(ppm_prm_waddr),
    .ppm_prm_wdata(ppm_prm_wdata), .ppm_relu_en(ppm_relu_en),
    .ppm_signed_out(ppm_signed_out), .ppm_in_valid(ppm_in_valid),
    .ppm_in_op(ppm_in_op), .ppm_in_entry(ppm_in_entry),
    .ppm_in_psum(ppm_in_psum), .ppm_in_tag(ppm_in_tag),
    .stats(stats)
  );

endmodule
