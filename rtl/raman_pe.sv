// raman_pe: processing element.
//
// Four MAC lanes (SIMD) share a 16 x 24b reg-file (RF) that holds partial
// sums. Each lane multiplies an 8b activation by an 8b weight and adds the
// product to one RF entry; the four lanes write four different entries in
// the same cycle (four RF write ports).
//
//  * PE_PW (point-wise, Gustavson-style): one activation ia_b is broadcast
//    to the four lanes; lane l takes the weight pair w[l] = {idx, val} of a
//    compressed weight-tile row and accumulates into RF[idx]. With balanced
//    pruning the four pairs of one row always carry different indices.
//  * PE_LANE (lane-parallel, used for fully connected layers): lane l
//    multiplies ia_l[l] by w[l].val into RF[{grp, l}]; with chain_en the
//    partial sum psum_in[l] from the neighbouring PE is added as well.
//
// Data gating: the input registers (the gated registers of the datapath)
// only load when their lane is valid and not gated; a gated lane (zero
// activation, from the ASE bitmap) holds its registers, so the multiplier
// and adder inputs do not toggle, and adds nothing.
//
// Variable precision: in PREC_4 each 8b operand carries two 4b sub-words
// and the lane adds both products (PO1 + PO2); in PREC_2 four 2b products.
// Activations are unsigned, weights two's-complement, at every precision.
//
// Timing: inputs are registered (stage 1), the products are registered
// (stage 2), and the RF is updated at the end of stage 3, so a value
// presented in cycle t is in the RF after the edge ending cycle t+2. An RF
// read (rd_grp selects entries 4*grp..4*grp+3) is combinational.
// acc_clear zeroes the whole RF in one cycle. PE_TYPE 1 has a second read
// port (eight RF outputs); types 2 and 3 (last column) have one.
//
// From the published design: 4 MACs, 8b operands, 24b partial sums, the
// 16-deep RF with four write ports, four (type 1: eight) outputs, data gating
// and the 8/4/2b sub-word modes. The three-stage pipeline, the exact
// sub-word packing and the reduced behaviour of types 2 and 3 (their
// detailed drawings were not available) are this implementation's.
module raman_pe
  import raman_pkg::*;
#(
  parameter int PE_TYPE = 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,         // inputs valid this cycle
  input  pe_mode_e                     mode,
  input  prec_e                        prec,
  input  logic [DATA_W-1:0]            ia_b,       // broadcast activation
  input  logic [SIMD-1:0][DATA_W-1:0]  ia_l,       // per-lane activations
  input  wpair_t [SIMD-1:0]            w,
  input  logic [SIMD-1:0]              w_valid,
  input  logic [SIMD-1:0]              gate,       // 1: lane data-gated
  input  logic [1:0]                   grp,        // PE_LANE RF row group
  input  logic                         chain_en,
  input  logic [SIMD-1:0][PSUM_W-1:0]  psum_in,
  input  logic                         acc_clear,
  input  logic [1:0]                   rd_grp,
  output logic [SIMD-1:0][PSUM_W-1:0]  rd_data,
  input  logic [1:0]                   rd_grp_b,
  output logic [SIMD-1:0][PSUM_W-1:0]  rd_data_b
);

  logic [PSUM_W-1:0] rf [RF_DEPTH];

  // stage 1: data-gated input registers
  logic [SIMD-1:0][DATA_W-1:0] ia_q, w_q;
  logic [SIMD-1:0][RF_AW-1:0]  a_q;
  logic [SIMD-1:0]             v1;
  logic [SIMD-1:0][PSUM_W-1:0] ps_q;
  logic                        ch_q;
  prec_e                       prec_q;
  // stage 2: products
  logic [SIMD-1:0][PSUM_W-1:0] prod_q, ps2_q;
  logic [SIMD-1:0][RF_AW-1:0]  a2_q;
  logic [SIMD-1:0]             v2;
  logic                        ch2_q;

  function automatic logic signed [PSUM_W-1:0] mul(
      input logic [7:0] a, input logic [7:0] b, input prec_e p);
    logic signed [PSUM_W-1:0] s;
    s = '0;
    unique case (p)
      PREC_4: for (int k = 0; k < 2; k++)
                s = s + $signed({1'b0, a[4*k +: 4]}) * $signed(b[4*k +: 4]);
      PREC_2: for (int k = 0; k < 4; k++)
                s = s + $signed({1'b0, a[2*k +: 2]}) * $signed(b[2*k +: 2]);
      default: s = $signed({1'b0, a}) * $signed(b);
    endcase
    return s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ia_q <= '0; w_q <= '0; a_q <= '0; v1 <= '0; ps_q <= '0; ch_q <= 1'b0;
      prec_q <= PREC_8;
      prod_q <= '0; ps2_q <= '0; a2_q <= '0; v2 <= '0; ch2_q <= 1'b0;
    end else begin
      for (int l = 0; l < SIMD; l++) begin
        v1[l] <= en && w_valid[l] && !gate[l];
        if (en && w_valid[l] && !gate[l]) begin
          ia_q[l] <= (mode == PE_PW) ? ia_b : ia_l[l];
          w_q[l]  <= w[l].val;
          a_q[l]  <= (mode == PE_PW) ? w[l].idx : RF_AW'({grp, 2'(l)});
          ps_q[l] <= psum_in[l];
        end
      end
      if (en) begin
        ch_q   <= chain_en;
        prec_q <= prec;
      end
      for (int l = 0; l < SIMD; l++) begin
        v2[l] <= v1[l];
        if (v1[l]) begin
          prod_q[l] <= mul(ia_q[l], w_q[l], prec_q);
          ps2_q[l]  <= ps_q[l];
          a2_q[l]   <= a_q[l];
        end
      end
      ch2_q <= ch_q;
    end
  end

  // stage 3: reg-file accumulate, four write ports
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RF_DEPTH; i++) rf[i] <= '0;
    end else if (acc_clear) begin
      for (int i = 0; i < RF_DEPTH; i++) rf[i] <= '0;
    end else begin
      for (int l = 0; l < SIMD; l++)
        if (v2[l])
          rf[a2_q[l]] <= rf[a2_q[l]] + prod_q[l] + (ch2_q ? ps2_q[l] : '0);
    end
  end

  always_comb begin
    for (int l = 0; l < SIMD; l++) begin
      rd_data[l]   = rf[{rd_grp, 2'(l)}];
      rd_data_b[l] = (PE_TYPE == 1) ? rf[{rd_grp_b, 2'(l)}] : '0;
    end
  end

endmodule
