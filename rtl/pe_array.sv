// pe_array: the 3 x 4 array of processing elements with its NoC.
//
// Twelve raman_pe instances in three rows and four columns, fed and read
// through raman_noc. The first three columns are type-1 PEs; the last
// column holds one type-2 PE (row 0) and two type-3 PEs (rows 1 and 2), as
// in the published floor plan. All PEs run in lockstep from one set of
// control signals (mode, precision, RF clear, RF read group).
//
// Interface: the operand inputs of raman_noc, plus pe_mode/prec/fc_grp for
// the PEs, acc_clear, and the read selection (out_row, out_col, rd_grp)
// that puts four 24b partial sums on out_psum (combinational).
// Timing: the PE latency, an operand accepted in cycle t is accumulated
// after the edge ending cycle t+2.
module pe_array
  import raman_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  noc_mode_e                          noc_mode,
  input  pe_mode_e                           pe_mode,
  input  prec_e                              prec,
  input  logic                               en,
  input  logic [ROWS-1:0][DATA_W-1:0]        ia_row,
  input  logic [ROWS-1:0]                    gate_row,
  input  wpair_t [COLS-1:0][SIMD-1:0]        w_col,
  input  logic [COLS-1:0][DATA_W-1:0]        ia_col,
  input  logic [COLS-1:0][5:0][DATA_W-1:0]   w_fc,
  input  logic [1:0]                         fc_grp,
  input  logic                               acc_clear,
  input  logic [1:0]                         out_row,
  input  logic [1:0]                         out_col,
  input  logic [1:0]                         rd_grp,
  output logic [SIMD-1:0][PSUM_W-1:0]        out_psum
);
  logic [ROWS-1:0][COLS-1:0]                   pe_en;
  logic [ROWS-1:0][COLS-1:0][DATA_W-1:0]       pe_ia_b;
  logic [ROWS-1:0][COLS-1:0][SIMD-1:0][DATA_W-1:0] pe_ia_l;
  wpair_t [ROWS-1:0][COLS-1:0][SIMD-1:0]       pe_w;
  logic [ROWS-1:0][COLS-1:0][SIMD-1:0]         pe_wv, pe_gate;
  logic [ROWS-1:0][COLS-1:0][SIMD-1:0][PSUM_W-1:0] pe_rd;

  raman_noc u_noc (
    .mode(noc_mode), .en(en),
    .ia_row(ia_row), .gate_row(gate_row), .w_col(w_col),
    .ia_col(ia_col), .w_fc(w_fc),
    .pe_en(pe_en), .pe_ia_b(pe_ia_b), .pe_ia_l(pe_ia_l), .pe_w(pe_w),
    .pe_wv(pe_wv), .pe_gate(pe_gate),
    .pe_rd(pe_rd), .out_row(out_row), .out_col(out_col), .out_psum(out_psum)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int TYPE = (c < COLS - 1) ? 1 : ((r == 0) ? 2 : 3);
      raman_pe #(.PE_TYPE(TYPE)) u_pe (
        .clk(clk), .rst_n(rst_n),
        .en(pe_en[r][c]), .mode(pe_mode), .prec(prec),
        .ia_b(pe_ia_b[r][c]), .ia_l(pe_ia_l[r][c]),
        .w(pe_w[r][c]), .w_valid(pe_wv[r][c]), .gate(pe_gate[r][c]),
        .grp(fc_grp), .chain_en(1'b0), .psum_in('0),
        .acc_clear(acc_clear),
        .rd_grp(rd_grp), .rd_data(pe_rd[r][c]),
        .rd_grp_b(2'd0), .rd_data_b()
      );
    end
  end
endmodule
