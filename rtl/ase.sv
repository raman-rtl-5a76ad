// ase: activation sparsity engine.
//
// The ASE moves one block of input activations (IAs) - the same M channels
// of three pixels, one pixel per PE row - from the activation memory into
// the cache, and on the way records where the zeros are.
//
//  * Shift register bank: six 32b shift registers, two sets of three (one
//    per PE row). While one set shifts its four 8b channels out one per
//    cycle, the other set is loaded in parallel from the 32b activation
//    memory; the sets swap every four cycles (ping-pong), so after the first
//    word one channel column leaves the bank every cycle.
//  * Ping-pong enable logic: a 2b phase counter and a 2:4 decoder pick the
//    shift register of the loading set that takes the word read this cycle;
//    the counter's wrap swaps the sets.
//  * Non-zero detector and RAP (ase_rap): bitmap b, pruned bitmap B, OR_BIT.
//  * Bitmap and non-zero channel index buffers: with skip_en (point-wise
//    layers, zero skipping) only channels whose OR_BIT is 1 are recorded,
//    entry j holding the channel number and its 3b bitmap B, and only the
//    activations with B[r] = 1 are written, packed, into cache bank r. With
//    skip_en low (layers that only gate) every channel is recorded with its
//    raw bitmap b and all activations are written densely at address m.
//
// Interface: pulse start with m_ch (a multiple of 4), the three row base
// word addresses and row_valid (an invalid row reads as zeros). The engine
// reads M/4 words per row through act_re/act_raddr (data expected one cycle
// later on act_rdata), writes the three activation banks through cw_*, and
// pulses done when the buffers are complete; nnz then holds the number of
// recorded channels, readable at any time through buf_raddr (combinational).
// Timing: 4 + M cycles from start to done.
//
// The five sub-blocks and their roles are the published ones. The 3-row
// split of the six registers, the per-phase decoder use, the unsigned
// threshold and the buffer layout (one index buffer, one bitmap buffer, in
// place of the published buffers 2 and 3 for the index and 1 for the bitmap)
// are this implementation's choices.
module ase #(
  parameter int MAX_M = 256,      // channels per pixel the buffers hold
  parameter int AAW   = 14,       // activation memory word address width
  parameter int CAW   = 10,       // cache bank address width
  localparam int ROWS = 3,
  localparam int MW   = $clog2(MAX_M + 1),
  localparam int IW   = $clog2(MAX_M)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [MW-1:0]             m_ch,
  input  logic [ROWS-1:0][AAW-1:0]  row_base,
  input  logic [ROWS-1:0]           row_valid,
  input  logic                      skip_en,
  input  logic                      rap_en,
  input  logic [7:0]                theta,
  // activation memory read port
  output logic                      act_re,
  output logic [AAW-1:0]            act_raddr,
  input  logic [31:0]               act_rdata,
  // cache activation bank write ports (bank r = PE row r)
  output logic [ROWS-1:0]           cw_en,
  output logic [ROWS-1:0][CAW-1:0]  cw_addr,
  output logic [ROWS-1:0][7:0]      cw_data,
  // buffers
  input  logic [MW-1:0]             buf_raddr,
  output logic [7:0]                buf_idx,
  output logic [ROWS-1:0]           buf_bm,
  output logic [MW-1:0]             nnz,
  // status
  output logic                      busy,
  output logic                      done,
  output logic                      ev_pruned,   // one activation pruned this cycle
  output logic                      ev_skipped   // one channel skipped this cycle
);

  logic [1:0][ROWS-1:0][31:0] sr;        // [set][row]
  logic                       sel;       // set being shifted out
  logic                       shifting;  // set sel holds a loaded word
  logic [1:0]                 phase;     // ping-pong counter
  logic [3:0]                 pp_en;     // 2:4 decoder of the counter
  logic [MW-3:0]              ld_word, sh_word, wpr;
  logic                       rd_v;
  logic [1:0]                 rd_row;
  logic [ROWS-1:0][CAW-1:0]   ptr;
  logic [ROWS-1:0][7:0]       col;
  logic [ROWS-1:0]            b, bm;
  logic                       or_bit, pruned_c;
  logic [MW-1:0]              chan;
  logic [7:0]                 idx_buf [MAX_M];
  logic [ROWS-1:0]            bm_buf  [MAX_M];
  logic                       loading;

  assign wpr     = m_ch[MW-1:2];
  assign pp_en   = 4'b0001 << phase;
  assign loading = busy && (ld_word < wpr);
  assign chan    = {sh_word, phase};

  // read request: decoder outputs 0..2 select the row being loaded
  always_comb begin
    act_re    = 1'b0;
    act_raddr = '0;
    for (int r = 0; r < ROWS; r++)
      if (loading && pp_en[r]) begin
        act_re    = 1'b1;
        act_raddr = row_base[r] + AAW'(ld_word);
      end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_col
    assign col[r] = sr[sel][r][7:0];
  end

  ase_rap #(.N(ROWS), .W(8)) u_rap (
    .a(col), .theta(theta), .rap_en(rap_en),
    .b(b), .bm(bm), .or_bit(or_bit), .pruned(pruned_c)
  );

  logic out_v;
  assign out_v      = busy && shifting;
  assign ev_pruned  = out_v && skip_en && pruned_c;
  assign ev_skipped = out_v && skip_en && !or_bit;

  always_comb begin
    cw_en   = '0;
    cw_addr = '0;
    cw_data = col;
    for (int r = 0; r < ROWS; r++) begin
      if (out_v) begin
        if (skip_en) begin
          cw_en[r]   = bm[r];
          cw_addr[r] = ptr[r];
        end else begin
          cw_en[r]   = 1'b1;
          cw_addr[r] = CAW'(chan);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      sel      <= 1'b0;
      shifting <= 1'b0;
      phase    <= '0;
      ld_word  <= '0;
      sh_word  <= '0;
      rd_v     <= 1'b0;
      rd_row   <= '0;
      nnz      <= '0;
      ptr      <= '0;
      sr       <= '0;
    end else begin
      done <= 1'b0;
      rd_v <= act_re;
      rd_row <= phase;
      if (start && !busy) begin
        busy     <= 1'b1;
        sel      <= 1'b0;
        shifting <= 1'b0;
        phase    <= '0;
        ld_word  <= '0;
        sh_word  <= '0;
        nnz      <= '0;
        ptr      <= '0;
      end else if (busy) begin
        // input mode: the word read last cycle enters the loading set
        if (rd_v)
          sr[~sel][rd_row] <= row_valid[rd_row] ? act_rdata : 32'h0;
        // output mode: shift the active set by one channel
        if (shifting) begin
          for (int r = 0; r < ROWS; r++)
            sr[sel][r] <= {8'h00, sr[sel][r][31:8]};
          if (skip_en) begin
            if (or_bit) nnz <= nnz + 1'b1;
            for (int r = 0; r < ROWS; r++)
              if (bm[r]) ptr[r] <= ptr[r] + 1'b1;
          end else begin
            nnz <= chan + 1'b1;
          end
        end
        phase <= phase + 1'b1;
        if (phase == 2'd3) begin
          sel      <= ~sel;
          shifting <= loading;
          if (shifting) sh_word <= sh_word + 1'b1;
          if (loading)  ld_word <= ld_word + 1'b1;
          if (!loading) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // buffers (no reset: only entries below nnz are ever read)
  always_ff @(posedge clk) begin
    if (out_v) begin
      if (skip_en) begin
        if (or_bit) begin
          idx_buf[IW'(nnz)] <= 8'(chan);
          bm_buf[IW'(nnz)]  <= bm;
        end
      end else begin
        idx_buf[IW'(chan)] <= 8'(chan);
        bm_buf[IW'(chan)]  <= b;
      end
    end
  end

  assign buf_idx = idx_buf[IW'(buf_raddr)];
  assign buf_bm  = bm_buf[IW'(buf_raddr)];

endmodule
