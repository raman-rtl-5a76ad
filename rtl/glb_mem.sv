// glb_mem: on-chip global memory (GLB-MEM) of the accelerator.
//
// Two banks. The parameter bank holds the weights and post-processing
// parameters of every layer; it is PARAM_W = 192 bits wide and has a single
// synchronous read/write port (Data_in_pmem, Addr, Data_out_pmem). The
// activation bank holds the activations of the layer being run; it is 32 bits
// wide and has two address ports, Addr_R for reading and Addr_W for writing,
// so the next input tile can be loaded while the last output tile is stored.
// Input and output activations share this one space (the output of a layer
// is written over its own input), which is what halves the peak activation
// memory.
//
// Timing: both banks are synchronous. Read data appears on the cycle after
// the read enable; a write is done at the clock edge. On the parameter port a
// write takes precedence (no read data that cycle). A read and a write of
// the same activation address in one cycle return the old word.
//
// Widths and port structure follow the published block diagram; depths are
// this implementation's: 16384 x 32b (64 KB) of activations holds the largest
// activation footprint of the evaluated models (54.72 KB) and 16384 x 192b
// (384 KB) of parameters holds the largest parameter footprint (324.3 KB).
module glb_mem #(
  parameter int PDEPTH = 16384,
  parameter int ADEPTH = 16384,
  parameter int PW     = 192,
  parameter int AW     = 32,
  localparam int PAW   = $clog2(PDEPTH),
  localparam int AAW   = $clog2(ADEPTH)
) (
  input  logic            clk,
  // parameter bank, single port
  input  logic            p_en,
  input  logic            p_we,
  input  logic [PAW-1:0]  p_addr,
  input  logic [PW-1:0]   p_wdata,
  output logic [PW-1:0]   p_rdata,
  // activation bank, separate read and write addresses
  input  logic            a_re,
  input  logic [AAW-1:0]  a_raddr,
  output logic [AW-1:0]   a_rdata,
  input  logic            a_we,
  input  logic [AAW-1:0]  a_waddr,
  input  logic [AW-1:0]   a_wdata
);

  logic [PW-1:0] pmem [PDEPTH];
  logic [AW-1:0] amem [ADEPTH];

  always_ff @(posedge clk) begin
    if (p_en) begin
      if (p_we) pmem[p_addr] <= p_wdata;
      else      p_rdata      <= pmem[p_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (a_re) a_rdata <= amem[a_raddr];
    if (a_we) amem[a_waddr] <= a_wdata;
  end

endmodule
