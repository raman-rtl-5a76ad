// act_param_cache: the banked activation and parameter cache.
//
// NBANKS = 27 independent 8b dual-port banks (cache_bank). Every bank has its
// own read address, write address and write data, so a layer controller can
// give any subset of banks to activations and the rest to parameters. For a
// point-wise layer this design uses banks 0..2 for the compressed input
// activations of the three PE rows and banks 3..26 together as one 192b
// weight word (16 value/index pairs, 4 per PE column); other layer types
// would use other splits (the published split is 12 activation banks for DW,
// 4 for FC and 3 for CONV).
//
// Timing: read data of every bank is registered, one cycle after rd_en.
// The bank count and width follow the published design; the depth (1024)
// is this implementation's: a 256-input-channel point-wise layer with no
// pruning needs 256 rows x 4 words of 192b = 1024 words of weights, and an
// activation bank then holds a whole 256-channel pixel.
module act_param_cache #(
  parameter int NBANKS = 27,
  parameter int DEPTH  = 1024,
  parameter int W      = 8,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic [NBANKS-1:0]        wr_en,
  input  logic [NBANKS-1:0][AW-1:0] wr_addr,
  input  logic [NBANKS-1:0][W-1:0]  wr_data,
  input  logic [NBANKS-1:0]        rd_en,
  input  logic [NBANKS-1:0][AW-1:0] rd_addr,
  output logic [NBANKS-1:0][W-1:0]  rd_data
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    cache_bank #(.DEPTH(DEPTH), .W(W)) u_bank (
      .clk    (clk),
      .wr_en  (wr_en[b]),
      .wr_addr(wr_addr[b]),
      .wr_data(wr_data[b]),
      .rd_en  (rd_en[b]),
      .rd_addr(rd_addr[b]),
      .rd_data(rd_data[b])
    );
  end
endmodule
