// cache_bank: one 8b wide bank of the activation and parameter cache.
//
// A simple dual-port synchronous memory: one write port (Addr_w, Data_in)
// and one read port (Addr_r, Data_out) that can be used in the same cycle.
// Read data is registered and appears the cycle after rd_en. A read of the
// address being written in the same cycle returns the old contents. The 8b
// width is the published one; the depth is a parameter.
module cache_bank #(
  parameter int DEPTH = 1024,
  parameter int W     = 8,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
