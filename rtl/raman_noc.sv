// raman_noc: network-on-chip of row and column routers around the PE array.
//
// Delivery (cache -> PEs). A column router hands one data block to each of
// the four PE columns; a row router splits what reaches its row and gives
// every PE its operands. Two patterns are built:
//  * NOC_PW (point-wise): the activation of PE row r (ia_row[r], with its
//    bitmap-derived gate gate_row[r]) is broadcast to the four PEs of the
//    row; the four value/index pairs of weight tile c (w_col[c]) are
//    broadcast to the three PEs of column c. IA is reused along a row, W
//    along a column.
//  * NOC_FC (fully connected): activation ia_col[c] is broadcast down
//    column c; the six weights of column c (w_fc[c][0..5]) are multicast two
//    per PE, PE row r taking weights 2r and 2r+1 on lanes 0 and 1 (lanes 2
//    and 3 idle).
// Return (PEs -> post-processing). The row routers carry a PE's RF read
// port to the post-processing module: in NOC_PW the PE at (out_row,
// out_col); in NOC_FC the four PEs of row out_row are summed lane by lane,
// the core-level reduction across the columns.
//
// Combinational. The two patterns, the broadcast/multicast shapes and the
// return path through the row routers follow the published dataflow
// drawings; the signal grouping and the adder placement for the FC
// reduction are this implementation's. The depth-wise systolic pattern is
// not built.
module raman_noc
  import raman_pkg::*;
(
  input  noc_mode_e                                   mode,
  input  logic                                        en,
  // from the cache / controller
  input  logic [ROWS-1:0][DATA_W-1:0]                 ia_row,
  input  logic [ROWS-1:0]                             gate_row,
  input  wpair_t [COLS-1:0][SIMD-1:0]                 w_col,
  input  logic [COLS-1:0][DATA_W-1:0]                 ia_col,
  input  logic [COLS-1:0][5:0][DATA_W-1:0]            w_fc,
  // to the PEs
  output logic [ROWS-1:0][COLS-1:0]                   pe_en,
  output logic [ROWS-1:0][COLS-1:0][DATA_W-1:0]       pe_ia_b,
  output logic [ROWS-1:0][COLS-1:0][SIMD-1:0][DATA_W-1:0] pe_ia_l,
  output wpair_t [ROWS-1:0][COLS-1:0][SIMD-1:0]       pe_w,
  output logic [ROWS-1:0][COLS-1:0][SIMD-1:0]         pe_wv,
  output logic [ROWS-1:0][COLS-1:0][SIMD-1:0]         pe_gate,
  // return path
  input  logic [ROWS-1:0][COLS-1:0][SIMD-1:0][PSUM_W-1:0] pe_rd,
  input  logic [1:0]                                  out_row,
  input  logic [1:0]                                  out_col,
  output logic [SIMD-1:0][PSUM_W-1:0]                 out_psum
);

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        pe_en[r][c]   = en;
        pe_ia_b[r][c] = ia_row[r];
        for (int l = 0; l < SIMD; l++) begin
          if (mode == NOC_PW) begin
            pe_ia_l[r][c][l] = ia_row[r];
            pe_w[r][c][l]    = w_col[c][l];
            pe_wv[r][c][l]   = 1'b1;
            pe_gate[r][c][l] = gate_row[r];
          end else begin
            pe_ia_l[r][c][l] = ia_col[c];
            pe_w[r][c][l]    = '{idx: '0, val: (l < 2) ? w_fc[c][2*r + (l % 2)] : '0};
            pe_wv[r][c][l]   = (l < 2);
            pe_gate[r][c][l] = (ia_col[c] == '0);
          end
        end
      end
  end

  always_comb begin
    out_psum = '0;
    if (mode == NOC_PW) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (out_row == 2'(r) && out_col == 2'(c)) out_psum = pe_rd[r][c];
    end else begin
      for (int r = 0; r < ROWS; r++)
        if (out_row == 2'(r))
          for (int c = 0; c < COLS; c++)
            for (int l = 0; l < SIMD; l++)
              out_psum[l] = out_psum[l] + pe_rd[r][c][l];
    end
  end
endmodule
