// instr_mem: instruction memory.
//
// Holds the program, one 80b layer instruction per word, written by the
// host before a run and read by the top-level controller's fetch stage.
// Synchronous single-port-read, single-port-write memory: read data appears
// the cycle after rd_en. The 80b width is the published one; the depth (64
// instructions, enough for the 29-layer MobileNet program) is this
// implementation's.
module instr_mem #(
  parameter int DEPTH = 64,
  parameter int W     = 80,
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
