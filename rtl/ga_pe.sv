// ga_pe: one Processing Element of the overlay.
//
// Contents (paper's PE figure): Instruction Queue, Instruction Decoder and
// Control Signal Generator with the Microcode Table, the Edge / Feature /
// Weight loaders and writers, Feature Buffer (3 copies), Weight Buffer
// (2 copies), Edge Buffer (2 copies), the Index Shuffle Network (ISN), the
// Data Shuffle Network (DSN), the ACK with its RAW units, the Activation Unit
// and the mutexes (in the decoder).
//
// Data paths:
//  * Edge-centric: decoder -> ISN (packets carry a linear Feature Buffer row
//    and the edge) -> per-bank fetch stage (reads the row through the bank's
//    R0 port; holds while the DSN is not ready) -> DSN (to the UR pipeline of
//    the destination) -> ACK -> results through R1/W0 of the Feature Buffer
//    (SpDMM, vector add) or into the Edge Buffer (SDDMM).
//  * GEMM: the decoder reads one row on all P banks (R0) and one Weight
//    Buffer row per cycle; word gm_word of bank r feeds ACK row r; the
//    result tile is written on W0 of all banks.
//  * Activation: the Activation Unit uses R0/W0 of one bank per cycle.
//  * Loaders/writers: one DDR word (P x 32 bits) per transfer: one Feature
//    Buffer linear row (sram base + n), one Weight Buffer row (sram base + n)
//    or EPW = P*32/128 edges (each edge in a 128-bit slot, low 96 bits used;
//    edges sram base + n*EPW ...). Weight Buffer contents cannot be written
//    back to DDR (the paper's weights are only read); a weight store sends
//    zeros.
// The PE is idle from reset and after the TB_END of its tiling block; it is
// busy from the first instruction the Scheduler pushes (the paper's 1-bit
// idle status). Counters: mutex stall cycles, mode switches, RAW hazard
// cycles (per pipeline), ISN congestion (blocked injections), instructions.
// The paper's PE has P = 16, a Feature Buffer of 16384 x 16 words per copy,
// a Weight Buffer of 16384 x 16 words over its two copies and an Edge Buffer
// of 65536 edges per copy. The defaults here are smaller (P = 8, 64 rows per
// Feature Buffer bank, 256 rows or edges per bank of the others) so that the
// PE can be synthesised and simulated in reasonable time; the paper's sizes
// are set through the parameters. The port sharing between units is this
// design's choice. PReLU slope: the parameter ALPHA (the paper does not give it).
module ga_pe
  import ga_pkg::*;
#(
  parameter int    P        = 8,
  parameter int    FB_DEPTH = 64,
  parameter int    WB_DEPTH = 256,
  parameter int    EB_DEPTH = 256,
  parameter int    IQ_DEPTH = 64,
  parameter word_t ALPHA    = 32'sh0000_4000,
  localparam int   MW = P * DW,
  localparam int   NB = P / 2,
  localparam int   LP = $clog2(P),
  localparam int   EPW = MW / 128,
  localparam int   IW = 155,
  localparam int   WD = 137 + P * DW
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the Scheduler
  input  logic          iq_push,
  output logic          iq_ready,
  input  logic [127:0]  iq_din,
  output logic          idle,
  // memory ports of the loaders/writers: 0 feature, 1 weight, 2 edge
  output logic          mreq_valid [3],
  input  logic          mreq_ready [3],
  output logic          mreq_we    [3],
  output logic [31:0]   mreq_addr  [3],
  output logic [MW-1:0] mreq_wdata [3],
  input  logic          mresp_valid[3],
  input  logic [MW-1:0] mresp_data,
  // counters
  output logic [31:0]   n_mutex_stall,
  output logic [31:0]   n_mode_switch,
  output logic [31:0]   n_raw,
  output logic [31:0]   n_congest,
  output logic [31:0]   n_issued,
  output logic [31:0]   n_tb
);
  // ---------------- instruction queue and decoder -----------------
  logic         iq_valid, iq_pop, tb_end;
  logic [127:0] iq_head;
  logic [$clog2(IQ_DEPTH):0] iq_count;

  ga_instr_queue #(.DEPTH(IQ_DEPTH), .W(128)) u_iq (
    .clk, .rst_n, .push(iq_push), .push_ready(iq_ready), .din(iq_din),
    .head_valid(iq_valid), .head(iq_head), .pop(iq_pop), .count(iq_count));

  logic          dma_start [3], dma_busy [3], dma_done [3];
  logic          dma_store;
  logic [31:0]   dma_dram;
  logic [23:0]   dma_len;
  logic [1:0]    dma_cp [3];
  logic [15:0]   dma_sbase [3];
  ack_mode_e     mode;
  red_e          red_op;
  post_e         post, gm_post;
  logic          accum;
  logic [15:0]   out_base;
  logic [1:0]    out_cp, gm_fcp;
  logic          gm_valid, gm_clr, gm_rd, gm_re, gm_we, wb_re, wb_rcp;
  logic [LP-1:0] gm_word;
  logic [15:0]   gm_frow, wb_raddr, gm_wrow;
  logic          eb_re, eb_cp;
  logic [15:0]   eb_raddr;
  edge_t         eb_rdata [NB];
  logic [P-1:0]  isn_valid, isn_ready;
  logic [IW-1:0] isn_pkt [P];
  logic [NB-1:0] ack_done, raw_hazard;
  logic          act_start, act_busy, act_done;
  act_fn_e       act_fn;
  word_t         act_div, init_val;
  logic [15:0]   act_base, init_row;
  logic [23:0]   act_nrows;
  logic [1:0]    act_cp;
  logic          init_we;
  logic [NMUTEX-1:0] mutex;

  ga_decoder #(.P(P)) u_dec (
    .clk, .rst_n, .iq_valid, .iq_head, .iq_pop,
    .dma_start, .dma_store, .dma_dram, .dma_len, .dma_busy, .dma_done, .dma_cp, .dma_sbase,
    .mode, .red_op, .post, .accum, .out_base, .out_cp,
    .gm_valid, .gm_clr, .gm_rd, .gm_post, .gm_word, .gm_re, .gm_fcp, .gm_frow,
    .wb_re, .wb_rcp, .wb_raddr, .gm_we, .gm_wrow,
    .eb_re, .eb_cp, .eb_raddr, .eb_rdata, .isn_valid, .isn_ready, .isn_pkt, .ack_done,
    .act_start, .act_fn, .act_div, .act_base, .act_nrows, .act_cp, .act_busy, .act_done,
    .init_we, .init_row, .init_val,
    .tb_end, .mutex, .n_mutex_stall, .n_mode_switch, .n_issued);

  // ---------------- loaders / writers -----------------
  logic          buf_we [3], buf_re [3];
  logic [23:0]   buf_widx [3], buf_ridx [3];
  logic [MW-1:0] buf_wdata [3], buf_rdata [3];
  for (genvar t = 0; t < 3; t++) begin : g_dma
    ga_dma #(.MW(MW)) u_dma (
      .clk, .rst_n, .start(dma_start[t]), .store(dma_store), .dram_base(dma_dram),
      .len(dma_len), .busy(dma_busy[t]), .done(dma_done[t]),
      .req_valid(mreq_valid[t]), .req_ready(mreq_ready[t]), .req_we(mreq_we[t]),
      .req_addr(mreq_addr[t]), .req_wdata(mreq_wdata[t]),
      .resp_valid(mresp_valid[t]), .resp_data(mresp_data),
      .buf_we(buf_we[t]), .buf_widx(buf_widx[t]), .buf_wdata(buf_wdata[t]),
      .buf_re(buf_re[t]), .buf_ridx(buf_ridx[t]), .buf_rdata(buf_rdata[t]));
  end

  // ---------------- buffers -----------------
  logic        re0 [P], re1 [P], we0 [P];
  logic [1:0]  rcp0 [P], rcp1 [P], wcp0 [P];
  logic [15:0] raddr0 [P], raddr1 [P], waddr0 [P];
  word_t       rdata0 [P][P], rdata1 [P][P], wdata0 [P][P];
  logic        fdma_re, fdma_we;
  logic [15:0] fdma_row;
  word_t       fdma_wdata [P], fdma_rdata [P];

  ga_feature_buffer #(.P(P), .DEPTH(FB_DEPTH), .NCOPY(3)) u_fb (
    .clk, .re0, .rcp0, .raddr0, .rdata0, .re1, .rcp1, .raddr1, .rdata1,
    .we0, .wcp0, .waddr0, .wdata0,
    .dma_re(fdma_re), .dma_we(fdma_we), .dma_cp(dma_cp[0]), .dma_row(fdma_row),
    .dma_wdata(fdma_wdata), .dma_rdata(fdma_rdata));

  word_t wb_rdata [P], wb_wdata [P];
  ga_weight_buffer #(.P(P), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .re(wb_re), .rcp(wb_rcp), .raddr(wb_raddr), .rdata(wb_rdata),
    .we(buf_we[1]), .wcp(dma_cp[1][0]), .waddr(dma_sbase[1] + buf_widx[1][15:0]),
    .wdata(wb_wdata));

  logic        eb_we [NB];
  logic [15:0] eb_waddr [NB];
  edge_t       eb_wdata [NB];
  logic [23:0] edma_e;
  edge_t       edma_wdata [EPW], edma_rdata [EPW];
  ga_edge_buffer #(.P(P), .DEPTH(EB_DEPTH), .EPW(EPW)) u_eb (
    .clk, .re(eb_re), .rcp(eb_cp), .raddr(eb_raddr), .rdata(eb_rdata),
    .we(eb_we), .wcp(eb_cp), .waddr(eb_waddr), .wdata(eb_wdata),
    .dma_re(buf_re[2]), .dma_we(buf_we[2]), .dma_cp(dma_cp[2][0]), .dma_e(edma_e),
    .dma_wdata(edma_wdata), .dma_rdata(edma_rdata));

  always_comb begin
    fdma_re  = buf_re[0];
    fdma_we  = buf_we[0];
    fdma_row = dma_sbase[0] + (buf_we[0] ? buf_widx[0][15:0] : buf_ridx[0][15:0]);
    for (int k = 0; k < P; k++) begin
      fdma_wdata[k] = buf_wdata[0][k*DW +: DW];
      buf_rdata[0][k*DW +: DW] = fdma_rdata[k];
      wb_wdata[k] = buf_wdata[1][k*DW +: DW];
    end
    buf_rdata[1] = '0;
    edma_e = 24'(dma_sbase[2]) + (buf_we[2] ? buf_widx[2] : buf_ridx[2]) * 24'(EPW);
    buf_rdata[2] = '0;
    for (int s = 0; s < EPW; s++) begin
      edma_wdata[s] = buf_wdata[2][s*128 +: 96];
      buf_rdata[2][s*128 +: 96] = edma_rdata[s];
    end
  end

  // ---------------- ISN, fetch stage, DSN -----------------
  logic [P-1:0]  isn_ovalid, isn_oready;
  logic [IW-1:0] isn_opkt [P];
  logic [15:0]   isn_orow [P];
  ga_isn #(.P(P), .W(IW), .AW(16)) u_isn (
    .clk, .rst_n, .in_valid(isn_valid), .in_ready(isn_ready), .in_pkt(isn_pkt),
    .out_valid(isn_ovalid), .out_ready(isn_oready), .out_pkt(isn_opkt),
    .out_bank_row(isn_orow));

  logic          act_rd_en, act_wr_en;
  logic [LP-1:0] act_rd_bank, act_wr_bank;
  logic [15:0]   act_rd_row, act_wr_row;
  word_t         act_wr_data [P];
  logic [1:0]    act_ucp;
  ga_act_unit #(.P(P)) u_act (
    .clk, .rst_n, .start(act_start), .copy(act_cp), .base(act_base), .nrows(act_nrows),
    .fn(act_fn), .divisor(act_div), .busy(act_busy), .done(act_done),
    .rd_en(act_rd_en), .rd_bank(act_rd_bank), .rd_row(act_rd_row), .rdata(rdata0),
    .wr_en(act_wr_en), .wr_bank(act_wr_bank), .wr_row(act_wr_row), .wr_data(act_wr_data),
    .cp(act_ucp));

  logic [P-1:0]  f_v, dsn_ready, dsn_ovalid, dsn_oready;
  logic [IW-1:0] f_pkt [P];
  logic [WD-1:0] dsn_pkt [P], dsn_opkt [P];
  logic          fetch_ok;

  always_comb begin
    fetch_ok = !act_busy && !gm_re;
    for (int b = 0; b < P; b++) begin
      isn_oready[b] = fetch_ok && (!f_v[b] || dsn_ready[b]);
      dsn_pkt[b] = '0;
      dsn_pkt[b][136:0] = f_pkt[b][IW-1:18];
      for (int k = 0; k < P; k++) dsn_pkt[b][137 + k*DW +: DW] = rdata0[b][k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_v <= '0;
      for (int b = 0; b < P; b++) f_pkt[b] <= '0;
    end else begin
      for (int b = 0; b < P; b++) begin
        if (isn_ovalid[b] && isn_oready[b]) begin
          f_v[b] <= 1'b1; f_pkt[b] <= isn_opkt[b];
        end else if (dsn_ready[b]) f_v[b] <= 1'b0;
      end
    end
  end

  ga_dsn #(.P(P), .W(WD), .DST_LSB(0), .SLOT_LSB(16), .HALF_BIT(24)) u_dsn (
    .clk, .rst_n, .mode, .in_valid(f_v), .in_ready(dsn_ready), .in_pkt(dsn_pkt),
    .out_valid(dsn_ovalid), .out_ready(dsn_oready), .out_pkt(dsn_opkt));

  // ---------------- ACK -----------------
  word_t       gm_feat [P], gm_out [P][P];
  logic        a_fb_re [NB], a_fb_re_hi [NB], a_fb_we [NB], a_fb_we_hi [NB];
  logic [15:0] a_fb_raddr [NB], a_fb_waddr [NB];
  word_t       a_fb_rdata [NB][P], a_fb_wdata [NB][P];
  logic        hi_q [NB];

  always_comb for (int r = 0; r < P; r++) gm_feat[r] = rdata0[r][gm_word];

  ga_ack #(.P(P)) u_ack (
    .clk, .rst_n, .mode, .red_op, .post, .alpha(ALPHA), .accum, .out_base,
    .gm_valid, .gm_feat, .gm_wgt(wb_rdata), .gm_clr, .gm_rd, .gm_post, .gm_out,
    .in_valid(dsn_ovalid), .in_ready(dsn_oready), .in_pkt(dsn_opkt),
    .fb_re(a_fb_re), .fb_re_hi(a_fb_re_hi), .fb_raddr(a_fb_raddr), .fb_rdata(a_fb_rdata),
    .fb_we(a_fb_we), .fb_we_hi(a_fb_we_hi), .fb_waddr(a_fb_waddr), .fb_wdata(a_fb_wdata),
    .eb_we, .eb_waddr, .eb_wdata, .done(ack_done), .raw_hazard);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int u = 0; u < NB; u++) hi_q[u] <= 1'b0;
    else for (int u = 0; u < NB; u++) if (a_fb_re[u]) hi_q[u] <= a_fb_re_hi[u];
  end

  // ---------------- Feature Buffer port multiplexing -----------------
  always_comb begin
    for (int b = 0; b < P; b++) begin
      // R0: activation, GEMM feed or the fetch stage
      if (act_busy) begin
        re0[b] = act_rd_en && act_rd_bank == LP'(b); rcp0[b] = act_ucp; raddr0[b] = act_rd_row;
      end else if (gm_re) begin
        re0[b] = 1'b1; rcp0[b] = gm_fcp; raddr0[b] = gm_frow;
      end else begin
        re0[b] = isn_ovalid[b] && isn_oready[b];
        rcp0[b] = isn_opkt[b][17:16]; raddr0[b] = isn_orow[b];
      end
      // R1: Reduce Unit reads of the output copy
      re1[b]   = a_fb_re[b/2] && a_fb_re_hi[b/2] == 1'(b % 2);
      rcp1[b]  = out_cp;
      raddr1[b] = a_fb_raddr[b/2];
      // W0: activation, GEMM drain, init or UR pipelines
      if (act_busy) begin
        we0[b] = act_wr_en && act_wr_bank == LP'(b); wcp0[b] = act_ucp;
        waddr0[b] = act_wr_row; wdata0[b] = act_wr_data;
      end else if (gm_we) begin
        we0[b] = 1'b1; wcp0[b] = out_cp; waddr0[b] = gm_wrow; wdata0[b] = gm_out[b];
      end else if (init_we) begin
        we0[b] = 1'b1; wcp0[b] = out_cp; waddr0[b] = init_row;
        for (int k = 0; k < P; k++) wdata0[b][k] = init_val;
      end else begin
        we0[b] = a_fb_we[b/2] && a_fb_we_hi[b/2] == 1'(b % 2);
        wcp0[b] = out_cp; waddr0[b] = a_fb_waddr[b/2]; wdata0[b] = a_fb_wdata[b/2];
      end
    end
    for (int u = 0; u < NB; u++) a_fb_rdata[u] = rdata1[2*u + int'(hi_q[u])];
  end

  // ---------------- status and counters -----------------
  logic tb_active;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tb_active <= 1'b0; n_raw <= '0; n_congest <= '0; n_tb <= '0;
    end else begin
      if (iq_push && iq_ready) tb_active <= 1'b1;
      else if (tb_end) begin tb_active <= 1'b0; n_tb <= n_tb + 1; end
      n_raw     <= n_raw + 32'($countones(raw_hazard));
      n_congest <= n_congest + 32'($countones(isn_valid & ~isn_ready));
    end
  end
  always_comb idle = !tb_active;

  a_mutex_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  iq_count <= ($clog2(IQ_DEPTH)+1)'(IQ_DEPTH));
endmodule
