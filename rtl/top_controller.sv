// top_controller: top-level controller of the accelerator.
//
// A master controller fetches one 80b instruction at a time from the
// instruction memory, decodes it and hands control to the slave controller
// of its opcode; when the slave finishes, the master fetches the next
// instruction, until OP_END. The twelve PEs have no controllers of their
// own: this block drives them all in lockstep, together with the memories,
// the ASE, the NoC and the post-processing module (PPM).
//
// Slave controllers built here:
//  * OP_PW, point-wise convolution. For each group of three pixels (an IA
//    tile per PE row): the ASE copies the 3 x M input block into cache
//    banks 0..2 in compressed form and records the non-zero channels. Then,
//    for each group of 64 output channels (four weight tiles of n = 16, one
//    per PE column): load the weight tiles into cache banks 3..26 (skipped
//    when the layer has one group and the tiles are already cached: weight
//    reuse across all pixels), clear the RFs, stream the recorded channels - for channel m and word k the
//    weight word m*WPM + k and, per row, the next compressed IA; rows whose
//    bitmap bit is 0 are data-gated - and finally drain the 192 partial sums
//    four at a time through the row routers into the PPM, whose results are
//    written over the activation memory. The 16 PPM parameter words of the
//    group are prefetched while the array computes; the drain waits for
//    them.
//  * OP_POOL, global average or max pooling, done entirely in the PPM
//    (the PE array stays idle): per 64-channel group, prefetch 16 parameter
//    words (accumulator start value, and alpha/2^beta = 1/HW for average),
//    accumulate every pixel, then quantize and write back.
//  * OP_FC, fully connected, following the published FC dataflow: the
//    activation vector is split into four tiles (here channel 4i+c goes to
//    column c, so one 32b activation word feeds the four columns), loaded
//    once into cache banks 0..3 and reused for every output; each cycle one
//    192b parameter word read past the cache carries six weights per
//    column, two per PE. A run of M/4 cycles yields six outputs, summed over
//    the columns by the NoC; four runs use the four RF groups before one
//    drain, so a group of 24 outputs needs 6 PPM words and M weight words.
// OP_CONV and OP_DW are decoded but have no slave controller in this
// implementation: they are counted in stats.layers_unsupported and skipped.
//
// Memory layout (this implementation's): activations pixel-major, pixel p
// channel ch at byte p*C + ch from base 128*ia_base / 128*oa_base words.
// Parameters are consumed in program order from address 0: a PW layer takes,
// per output group, 16 PPM words (160b in the low bits) and then M*WPM
// weight words (WPM = nnz_q+1; word k of channel m holds pairs 4k..4k+3 of
// each of the four tiles, tile c in bits 48c..48c+47); a POOL layer takes 16
// words per group; an FC layer, per group of 24 outputs, 6 PPM words and
// then four runs of M/4 words (run f, word i: weight of output 24g+6f+k and
// input 4i+c in bits 48c+8k..48c+8k+7).
//
// Timing: per pixel triple the ASE load runs concurrently with the weight
// load (separate activation and parameter memories, as in the published
// pipeline); compute waits for both. The 16 PPM parameter words of a PW
// group are read during compute (17 cycles from the RF clear), as the
// published PPM does; the drain waits for them. The next triple's ASE load
// starts with the last drain of the current triple. Compute of a tile is
// not overlapped with the activation and weight loads of the next tile,
// unlike the published pipeline (that needs double-buffered cache banks).
// PW compute issues one weight word per cycle, so a group takes nnz*WPM
// cycles of MACs, where nnz is the number of input channels left after
// zero skipping.
module top_controller
  import raman_pkg::*;
#(
  parameter int IM_AW = 6,
  parameter int PAW   = 14,
  parameter int AAW   = 14,
  parameter int CAW   = 10,
  parameter int MAX_M = 256,
  localparam int MW   = $clog2(MAX_M + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // instruction memory
  output logic                          im_re,
  output logic [IM_AW-1:0]              im_addr,
  input  logic [INSTR_W-1:0]            im_rdata,
  // parameter memory (read only here)
  output logic                          p_en,
  output logic [PAW-1:0]                p_addr,
  input  logic [PARAM_W-1:0]            p_rdata,
  // activation memory read (pooling)
  output logic                          a_re,
  output logic [AAW-1:0]                a_raddr,
  input  logic [ACT_W-1:0]              a_rdata,
  // ASE
  output logic                          ase_start,
  output logic [MW-1:0]                 ase_m,
  output logic [ROWS-1:0][AAW-1:0]      ase_row_base,
  output logic [ROWS-1:0]               ase_row_valid,
  output logic                          ase_skip_en,
  output logic                          ase_rap_en,
  output logic [7:0]                    ase_theta,
  input  logic                          ase_done,
  input  logic [MW-1:0]                 ase_nnz,
  output logic [MW-1:0]                 ase_buf_raddr,
  input  logic [7:0]                    ase_buf_idx,
  input  logic [ROWS-1:0]               ase_buf_bm,
  input  logic                          ase_ev_pruned,
  input  logic                          ase_ev_skipped,
  // cache: read ports of all banks, write ports of the weight banks
  output logic [CACHE_BANKS-1:0]           c_rd_en,
  output logic [CACHE_BANKS-1:0][CAW-1:0]  c_rd_addr,
  output logic                             cw_w_en,
  output logic [CAW-1:0]                   cw_w_addr,
  output logic [PARAM_W-1:0]               cw_w_data,
  // cache: write ports of banks 0..3 for the FC activation vector
  output logic                             cf_w_en,
  output logic [CAW-1:0]                   cf_w_addr,
  output logic [ACT_W-1:0]                 cf_w_data,
  // PE array
  output logic                          arr_en,
  output noc_mode_e                     arr_noc_mode,
  output pe_mode_e                      arr_pe_mode,
  output logic [1:0]                    arr_fc_grp,
  output prec_e                         arr_prec,
  output logic [ROWS-1:0]               arr_gate_row,
  output logic                          arr_clear,
  output logic [1:0]                    arr_out_row,
  output logic [1:0]                    arr_out_col,
  output logic [1:0]                    arr_rd_grp,
  input  logic [SIMD-1:0][PSUM_W-1:0]   arr_psum,
  // PPM
  output logic                          ppm_prm_we,
  output logic [3:0]                    ppm_prm_waddr,
  output ppm_param_t                    ppm_prm_wdata,
  output logic                          ppm_relu_en,
  output logic                          ppm_signed_out,
  output logic                          ppm_in_valid,
  output ppm_op_e                       ppm_in_op,
  output logic [3:0]                    ppm_in_entry,
  output logic [SIMD-1:0][PSUM_W-1:0]   ppm_in_psum,
  output logic [AAW-1:0]                ppm_in_tag,
  // statistics
  output stats_t                        stats
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_DECODE,
    S_FC_LD, S_FC_PRM, S_FC_COMP, S_FC_WAIT, S_FC_DRAIN, S_FC_FLUSH,
    S_PW_ASE, S_PW_PRM, S_PW_WLD, S_PW_CLR, S_PW_COMP,
    S_PW_WAIT, S_PW_DRAIN, S_PW_FLUSH,
    S_PL_PRM, S_PL_ACC, S_PL_OUT, S_PL_FLUSH,
    S_NEXT, S_DONE
  } state_e;

  state_e             st;
  instr_t             ins;
  logic [IM_AW-1:0]   pc;
  logic [PAW-1:0]     pptr;       // start of this layer's parameters
  logic [PAW-1:0]     gbase;      // start of this output group's parameters
  logic [9:0]         t;          // pixel-triple (IA tile) index
  logic [2:0]         g;          // output group index
  logic [12:0]        cnt;        // generic counter
  logic [MW-1:0]      j;          // recorded channel index
  logic [1:0]         k;          // weight word within a channel row
  logic [ROWS-1:0][CAW-1:0] ptr;  // compressed IA read pointers
  logic [13:0]        hw;
  logic [2:0]         wpm;
  logic [10:0]        wwords;     // M * WPM
  logic [6:0]         mw4, nw4;   // words per pixel (M/4, N/4)
  logic [3:0]         epg;        // last pool entry of this group
  logic [13:0]        pix;
  logic               wcached;    // weight tiles of group 0 already in cache
  logic               ase_pend;   // ASE started and not yet done
  logic [9:0]         at;         // PW: pixel triple the ASE is loading
  logic               pf_act;     // PW: PPM parameter prefetch running
  logic [4:0]         pf_cnt;     // PW: next PPM parameter word to read
  logic               pf_v;       // PW: prefetched word arriving
  logic [3:0]         pf_idx;     // PW: its PPM buffer entry
  logic [1:0]         fr;         // FC: run (RF group) within an output group
  logic [1:0]         fdr_r;      // FC drain: PE row being read
  logic [1:0]         fdr_g;      // FC drain: RF group being read
  logic [1:0][PSUM_W-1:0] fhold;  // FC drain: first two outputs of a PPM word
  logic               fld_v;      // FC: activation word arriving for the cache
  logic [PAW-1:0]     fgw;        // FC: parameter words per output group
  // read pipeline (one cycle memory latency)
  logic               prd_v, wrd_v, ard_v;
  logic [12:0]        rd_cnt;
  logic [3:0]         ard_e;

  assign hw     = 14'(ins.fh) * 14'(ins.fw);
  assign wpm    = 3'(ins.nnz_q) + 3'd1;
  assign wwords = 11'(ins.m_ch) * 11'(wpm);
  assign mw4    = ins.m_ch[8:2];
  assign nw4    = ins.n_ch[8:2];
  assign fgw    = PAW'(6) + PAW'(ins.m_ch);

  // FC mode of the array; the activation vector goes into cache banks 0..3
  // as it arrives from the activation memory (one word per address).
  assign arr_noc_mode = (ins.opcode == 3'(OP_FC)) ? NOC_FC : NOC_PW;
  assign arr_pe_mode  = (ins.opcode == 3'(OP_FC)) ? PE_LANE : PE_PW;
  assign cf_w_en      = fld_v;
  assign cf_w_addr    = CAW'(rd_cnt);
  assign cf_w_data    = a_rdata;

  assign busy          = (st != S_IDLE);
  assign ase_m         = MW'(ins.m_ch);
  assign ase_skip_en   = 1'b1;
  assign ase_rap_en    = (ins.theta != 8'd0);
  assign ase_theta     = ins.theta;
  assign arr_prec      = prec_e'(ins.prec);
  assign ppm_relu_en   = ins.relu_en;
  assign ppm_signed_out= !ins.relu_en;
  assign ase_buf_raddr = j;

  for (genvar r = 0; r < ROWS; r++) begin : g_rows
    logic [13:0] p;
    assign p = 14'(at) * 14'd3 + 14'(r);
    assign ase_row_base[r]  = AAW'({ins.ia_base, 7'd0}) + AAW'(p * 14'(mw4));
    assign ase_row_valid[r] = (p < hw);
  end

  // ---------------------------------------------------------- combinational
  logic [PAW-1:0] wbase;
  assign wbase = gbase + PAW'(16);

  always_comb begin
    im_re = 1'b0; im_addr = pc;
    p_en = 1'b0; p_addr = '0;
    a_re = 1'b0; a_raddr = '0;
    c_rd_en = '0; c_rd_addr = '0;
    arr_out_row = '0; arr_out_col = '0; arr_rd_grp = '0;
    unique case (st)
      S_FETCH: im_re = 1'b1;
      S_PL_PRM: if (cnt < 13'd16) begin
        p_en = 1'b1; p_addr = gbase + PAW'(cnt);
      end
      S_FC_PRM: if (cnt < 13'd6) begin
        p_en = 1'b1; p_addr = gbase + PAW'(cnt);
      end
      S_FC_LD: if (cnt < 13'(mw4)) begin
        a_re = 1'b1;
        a_raddr = AAW'({ins.ia_base, 7'd0}) + AAW'(cnt);
      end
      // weights straight from the parameter memory (no reuse, no caching),
      // activations from cache banks 0..3, one per PE column
      S_FC_COMP: begin
        p_en = 1'b1;
        p_addr = gbase + PAW'(6) + PAW'(fr) * PAW'(mw4) + PAW'(cnt);
        for (int b = 0; b < COLS; b++) begin
          c_rd_en[b] = 1'b1;
          c_rd_addr[b] = CAW'(cnt);
        end
      end
      S_FC_DRAIN: begin
        arr_rd_grp  = fdr_g;
        arr_out_row = fdr_r;
      end
      S_PW_WLD: if (cnt < 13'(wwords)) begin
        p_en = 1'b1; p_addr = wbase + PAW'(cnt);
      end
      S_PW_COMP: if (j < ase_nnz) begin
        for (int b = 0; b < CACHE_BANKS; b++) begin
          c_rd_en[b] = 1'b1;
          c_rd_addr[b] = (b < ROWS) ? ptr[b]
                       : CAW'(11'(ase_buf_idx) * 11'(wpm) + 11'(k));
        end
      end
      S_PL_ACC: begin
        a_re = 1'b1;
        a_raddr = AAW'({ins.ia_base, 7'd0}) + AAW'(pix * 14'(mw4))
                + AAW'({g, 4'd0}) + AAW'(cnt[3:0]);
      end
      S_PW_DRAIN: begin
        arr_rd_grp  = cnt[1:0];
        arr_out_col = cnt[3:2];
        arr_out_row = cnt[5:4];
      end
      default: ;
    endcase
    // PW: the PPM parameters of the current group are read while the array
    // computes (the parameter port is otherwise idle in CLR/COMP/WAIT)
    if (pf_act && !pf_cnt[4]) begin
      p_en = 1'b1; p_addr = gbase + PAW'(pf_cnt);
    end
  end

  // pixel and first output channel of the partial sums being drained
  logic [13:0] dr_p;
  logic [9:0]  dr_och;
  assign dr_p   = 14'(t) * 14'd3 + 14'(cnt[5:4]);
  assign dr_och = {1'b0, g, 6'd0} + {4'd0, cnt[3:2], cnt[1:0], 2'd0};

  // PPM inputs: parameter prefetch, drain of the PE array, pooling
  always_comb begin
    ppm_in_valid = 1'b0;
    ppm_in_op    = PPM_NORMAL;
    ppm_in_entry = '0;
    ppm_in_psum  = arr_psum;
    ppm_in_tag   = '0;
    if (st == S_PW_DRAIN) begin
      ppm_in_valid = (dr_p < hw) && (dr_och < 10'(ins.n_ch));
      ppm_in_entry = cnt[3:0];
      ppm_in_tag   = AAW'({ins.oa_base, 7'd0}) + AAW'(dr_p * 14'(nw4))
                   + AAW'({g, 4'd0}) + AAW'(cnt[3:0]);
    end else if (st == S_FC_DRAIN) begin
      // two outputs per PE row; a PPM word is two consecutive row reads
      ppm_in_valid = cnt[0] && (10'(g) * 10'd24 + 10'(cnt[3:1]) * 10'd4 < 10'(ins.n_ch));
      ppm_in_entry = 4'(cnt[3:1]);
      ppm_in_psum  = {arr_psum[1], arr_psum[0], fhold[1], fhold[0]};
      ppm_in_tag   = AAW'({ins.oa_base, 7'd0}) + AAW'(g) * AAW'(6) + AAW'(cnt[3:1]);
    end else if (ard_v) begin
      ppm_in_valid = 1'b1;
      ppm_in_op    = ins.pool_max ? PPM_MAX_ACC : PPM_AVG_ACC;
      ppm_in_entry = ard_e;
      for (int l = 0; l < SIMD; l++) ppm_in_psum[l] = PSUM_W'(a_rdata[8*l +: 8]);
    end else if (st == S_PL_OUT) begin
      ppm_in_valid = cnt <= 13'(epg);
      ppm_in_op    = PPM_POOL_OUT;
      ppm_in_entry = cnt[3:0];
      ppm_in_tag   = AAW'({ins.oa_base, 7'd0}) + AAW'({g, 4'd0}) + AAW'(cnt[3:0]);
    end
  end

  // parameter and weight writes, one cycle after the read
  assign ppm_prm_we    = prd_v || pf_v;
  assign ppm_prm_waddr = pf_v ? pf_idx : rd_cnt[3:0];
  assign ppm_prm_wdata = ppm_param_t'(p_rdata[PPM_PARAM_W-1:0]);
  assign cw_w_en       = wrd_v;
  assign cw_w_addr     = CAW'(rd_cnt);
  assign cw_w_data     = p_rdata;

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; pc <= '0; pptr <= '0; gbase <= '0;
      t <= '0; g <= '0; cnt <= '0; j <= '0; k <= '0; ptr <= '0;
      epg <= '0; pix <= '0; wcached <= 1'b0; ase_pend <= 1'b0; at <= '0;
      pf_act <= 1'b0; pf_cnt <= '0; pf_v <= 1'b0; pf_idx <= '0;
      fr <= '0; fdr_r <= '0; fdr_g <= '0; fhold <= '0; fld_v <= 1'b0; arr_fc_grp <= '0;
      prd_v <= 1'b0; wrd_v <= 1'b0; ard_v <= 1'b0; rd_cnt <= '0; ard_e <= '0;
      done <= 1'b0; ase_start <= 1'b0;
      arr_en <= 1'b0; arr_gate_row <= '0; arr_clear <= 1'b0;
      stats <= '0;
    end else begin
      done      <= 1'b0;
      ase_start <= 1'b0;
      arr_en    <= 1'b0;
      arr_clear <= 1'b0;
      prd_v     <= (st == S_PL_PRM && cnt < 13'd16)
                || (st == S_FC_PRM && cnt < 13'd6);
      fld_v     <= (st == S_FC_LD) && cnt < 13'(mw4);
      arr_fc_grp <= fr;
      wrd_v     <= (st == S_PW_WLD) && cnt < 13'(wwords);
      ard_v     <= (st == S_PL_ACC);
      ard_e     <= cnt[3:0];
      rd_cnt    <= cnt;
      pf_v      <= pf_act && !pf_cnt[4];
      pf_idx    <= pf_cnt[3:0];
      if (pf_act) begin
        if (pf_cnt[4]) pf_act <= 1'b0;
        else           pf_cnt <= pf_cnt + 1'b1;
      end
      if (ase_done)       ase_pend <= 1'b0;
      if (ase_ev_pruned)  stats.rap_pruned <= stats.rap_pruned + 1;
      if (ase_ev_skipped) stats.ch_skipped <= stats.ch_skipped + 1;
      if (ppm_in_valid && (ppm_in_op == PPM_NORMAL || ppm_in_op == PPM_POOL_OUT))
        stats.oa_words <= stats.oa_words + 1;

      unique case (st)
        S_IDLE: if (start) begin
          pc <= '0; pptr <= '0; st <= S_FETCH;
        end
        S_FETCH: st <= S_DECODE;
        S_DECODE: begin
          ins <= instr_t'(im_rdata);
          t <= '0; g <= '0; cnt <= '0; gbase <= pptr; wcached <= 1'b0;
          unique case (opcode_e'(im_rdata[2:0]))
            OP_END:  st <= S_DONE;
            OP_PW:   st <= S_PW_ASE;
            OP_POOL: st <= S_PL_PRM;
            OP_FC:   st <= S_FC_LD;
            default: begin
              stats.layers_unsupported <= stats.layers_unsupported + 1;
              st <= S_NEXT;
            end
          endcase
        end

        // ---------------------------------------------------- point-wise
        // The ASE fills cache banks 0..2 from the activation memory while
        // the weights come from the parameter memory into banks 3..26: the
        // two loads run concurrently. From the second triple on, the ASE is
        // started during the last drain of the previous triple.
        S_PW_ASE: begin
          ase_start <= 1'b1;
          ase_pend  <= 1'b1;
          at <= t;
          g <= '0; gbase <= pptr; cnt <= '0;
          st <= S_PW_PRM;
        end
        S_PW_PRM: begin   // start of an output group: load or reuse weights
          cnt <= '0;
          if (ins.w_tiles == 3'd1 && wcached) begin
            stats.w_reuses <= stats.w_reuses + 1;
            st <= S_PW_CLR;
          end else begin
            stats.w_loads <= stats.w_loads + 1;
            st <= S_PW_WLD;
          end
        end
        S_PW_WLD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'(wwords)) begin
            wcached <= 1'b1;
            st <= S_PW_CLR;
          end
        end
        S_PW_CLR: if (!ase_pend || ase_done) begin   // wait for the IA tile
          arr_clear <= 1'b1;
          pf_act <= 1'b1; pf_cnt <= '0;
          j <= '0; k <= '0; ptr <= '0;
          st <= S_PW_COMP;
        end
        S_PW_COMP: begin
          if (j < ase_nnz) begin
            arr_en       <= 1'b1;
            arr_gate_row <= ~ase_buf_bm;
            stats.mac_cycles <= stats.mac_cycles + 1;
            stats.row_gated  <= stats.row_gated + 32'(!ase_buf_bm[0])
                              + 32'(!ase_buf_bm[1]) + 32'(!ase_buf_bm[2]);
            if (k == 2'(wpm - 3'd1)) begin
              k <= '0;
              j <= j + 1'b1;
              stats.ch_processed <= stats.ch_processed + 1;
              for (int r = 0; r < ROWS; r++)
                if (ase_buf_bm[r]) ptr[r] <= ptr[r] + 1'b1;
            end else begin
              k <= k + 1'b1;
            end
          end else begin
            cnt <= '0;
            st <= S_PW_WAIT;
          end
        end
        S_PW_WAIT: begin   // cache read + PE pipeline, PPM prefetch finished
          if (cnt < 13'd3) cnt <= cnt + 1'b1;
          if (cnt == 13'd3 && !pf_act && !pf_v) begin
            cnt <= '0;
            st <= S_PW_DRAIN;
          end
        end
        S_PW_DRAIN: begin
          cnt <= cnt + 1'b1;
          // the next triple's IA load runs beside the last drain: the drain
          // uses neither cache banks 0..2 nor the ASE buffer nor the
          // activation read port
          if (cnt == 13'd0 && g + 3'd1 >= ins.w_tiles
              && t + 10'd1 < ins.ia_tiles) begin
            ase_start <= 1'b1;
            ase_pend  <= 1'b1;
            at <= t + 1'b1;
          end
          if (cnt == 13'd47) begin
            cnt <= '0;
            st <= S_PW_FLUSH;
          end
        end
        S_PW_FLUSH: begin  // PPM pipeline
          cnt <= cnt + 1'b1;
          if (cnt == 13'd3) begin
            cnt <= '0;
            if (g + 3'd1 < ins.w_tiles) begin
              g <= g + 1'b1;
              gbase <= gbase + PAW'(16) + PAW'(wwords);
              st <= S_PW_PRM;
            end else if (t + 10'd1 < ins.ia_tiles) begin
              t <= t + 1'b1;
              g <= '0; gbase <= pptr;
              st <= S_PW_PRM;
            end else begin
              pptr <= pptr + PAW'(ins.w_tiles) * (PAW'(16) + PAW'(wwords));
              stats.layers_pw <= stats.layers_pw + 1;
              st <= S_NEXT;
            end
          end
        end

        // --------------------------------------------------- fully connected
        // Load the activation vector once; then per group of 24 outputs:
        // 6 PPM words, RF clear, four runs of M/4 cycles (run fr computes
        // outputs 6fr..6fr+5 into RF group fr: PE row r lanes 0/1 hold
        // outputs 2r, 2r+1, summed over the four columns by the NoC), and a
        // drain of 12 row reads into 6 PPM words.
        S_FC_LD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'(mw4)) begin
            cnt <= '0; g <= '0; gbase <= pptr;
            st <= S_FC_PRM;
          end
        end
        S_FC_PRM: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'd6) begin
            cnt <= '0; fr <= '0;
            arr_clear <= 1'b1;
            st <= S_FC_COMP;
          end
        end
        S_FC_COMP: begin
          arr_en <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt == 13'(mw4) - 13'd1) begin
            cnt <= '0;
            fr <= fr + 1'b1;
            if (fr == 2'd3) st <= S_FC_WAIT;
          end
        end
        S_FC_WAIT: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'd3) begin
            cnt <= '0; fdr_r <= '0; fdr_g <= '0;
            st <= S_FC_DRAIN;
          end
        end
        S_FC_DRAIN: begin
          cnt <= cnt + 1'b1;
          fhold <= {arr_psum[1], arr_psum[0]};
          if (fdr_r == 2'd2) begin
            fdr_r <= '0;
            fdr_g <= fdr_g + 1'b1;
          end else fdr_r <= fdr_r + 1'b1;
          if (cnt == 13'd11) begin
            cnt <= '0;
            st <= S_FC_FLUSH;
          end
        end
        S_FC_FLUSH: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'd3) begin
            cnt <= '0;
            if (g + 3'd1 < ins.w_tiles) begin
              g <= g + 1'b1;
              gbase <= gbase + fgw;
              st <= S_FC_PRM;
            end else begin
              pptr <= pptr + PAW'(ins.w_tiles) * fgw;
              stats.layers_fc <= stats.layers_fc + 1;
              st <= S_NEXT;
            end
          end
        end

        // -------------------------------------------------------- pooling
        S_PL_PRM: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'd16) begin
            cnt <= '0; pix <= '0;
            epg <= (mw4 - 7'({g, 4'd0}) >= 7'd16) ? 4'd15 : 4'(mw4 - 7'({g, 4'd0}) - 7'd1);
            st <= S_PL_ACC;
          end
        end
        S_PL_ACC: begin
          cnt <= cnt + 1'b1;
          if (cnt[3:0] == epg) begin
            cnt <= '0;
            pix <= pix + 1'b1;
            if (pix + 14'd1 == hw) st <= S_PL_OUT;
          end
        end
        S_PL_OUT: if (!ard_v) begin   // after the last accumulation
          cnt <= cnt + 1'b1;
          if (cnt == 13'd15) begin
            cnt <= '0;
            st <= S_PL_FLUSH;
          end
        end
        S_PL_FLUSH: begin
          cnt <= cnt + 1'b1;
          if (cnt == 13'd3) begin
            cnt <= '0;
            if (g + 3'd1 < ins.w_tiles) begin
              g <= g + 1'b1;
              gbase <= gbase + PAW'(16);
              st <= S_PL_PRM;
            end else begin
              pptr <= pptr + PAW'({ins.w_tiles, 4'd0});
              stats.layers_pool <= stats.layers_pool + 1;
              st <= S_NEXT;
            end
          end
        end

        S_NEXT: begin
          pc <= pc + 1'b1;
          st <= S_FETCH;
        end
        S_DONE: begin
          done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
