// ga_decoder: Instruction Decoder and Control Signal Generator of a PE.
//
// Issue: in order, one instruction per cycle at most, from the head of the
// Instruction Queue. The Microcode Table (ga_ucode_rom) tells which sequencer
// runs the instruction.
//  * Memory Read (DDR -> buffer copy m): waits while mutex[m] is held (a
//    mutex stall, counted) or the loader of that buffer type is busy. If the
//    instruction's mutex mask is non-zero it takes mutex[m]. While the load
//    runs, loading[m] is set and no computation that uses copy m issues.
//  * Memory Write (buffer -> DDR): waits for the writer, for the end of the
//    running computation and for loads into that copy.
//  * Computation (GEMM, SpDMM, SDDMM, vector add, activation, init): one at a
//    time; waits until the previous one has finished and its operand copies
//    are not being loaded. If it needs another ACK mode than the current one
//    the decoder spends one cycle switching (counted). When it finishes it
//    releases the mutexes named in its mask, so loads of the next data into
//    those copies can go ahead: loads overlap computation.
//  * TB_END waits until the PE is idle, then pulses tb_end (the Scheduler
//    sees the PE as idle again).
// Sequencers (the loops of the paper's microcode):
//  * GEMM: for each S_B tile i and weight tile j: clear the accumulators,
//    feed len columns (one Feature Buffer row on all P banks and one Weight
//    Buffer row per cycle), wait 2P-1 cycles for the systolic array to empty
//    and write the P x P result to the P banks in one cycle:
//    1 + len + 2P-1 + 1 cycles per tile (tiles do not overlap).
//  * Edge-centric (SpDMM, SDDMM, vector add): reads one Edge Buffer row
//    (P/2 edges, one per bank) per cycle and injects one packet per edge (two
//    for SDDMM and vector add: src and dst vertex) into the ISN. SpDMM is
//    fully pipelined (P/2 edges per cycle); SDDMM and vector add wait until
//    a batch has finished before sending the next one, because the two
//    vectors of an edge are paired by edge slot in the pipeline.
//  * Activation: starts the Activation Unit. Init: writes a constant to P
//    rows per cycle.
// Field layout: see ga_pkg. The paper gives the instruction kinds, the
// mutex scheme, the one-cycle mode switch and the loops; the field
// positions, the batch barrier for SDDMM / vector add and the tile
// schedule are this design's choices.
module ga_decoder
  import ga_pkg::*;
#(
  parameter int P = 16,
  localparam int LP = $clog2(P),
  localparam int NB = P / 2,
  localparam int IW = 155
) (
  input  logic          clk,
  input  logic          rst_n,
  // Instruction Queue
  input  logic          iq_valid,
  input  logic [127:0]  iq_head,
  output logic          iq_pop,
  // loaders / writers: 0 feature, 1 weight, 2 edge
  output logic          dma_start [3],
  output logic          dma_store,
  output logic [31:0]   dma_dram,
  output logic [23:0]   dma_len,
  input  logic          dma_busy  [3],
  input  logic          dma_done  [3],
  output logic [1:0]    dma_cp    [3],
  output logic [15:0]   dma_sbase [3],
  // ACK configuration
  output ack_mode_e     mode,
  output red_e          red_op,
  output post_e         post,
  output logic          accum,
  output logic [15:0]   out_base,
  output logic [1:0]    out_cp,
  // GEMM
  output logic          gm_valid,
  output logic          gm_clr,
  output logic          gm_rd,
  output post_e         gm_post,
  output logic [LP-1:0] gm_word,
  output logic          gm_re,
  output logic [1:0]    gm_fcp,
  output logic [15:0]   gm_frow,
  output logic          wb_re,
  output logic          wb_rcp,
  output logic [15:0]   wb_raddr,
  output logic          gm_we,
  output logic [15:0]   gm_wrow,
  // edge-centric
  output logic          eb_re,
  output logic          eb_cp,
  output logic [15:0]   eb_raddr,
  input  edge_t         eb_rdata [NB],
  output logic [P-1:0]  isn_valid,
  input  logic [P-1:0]  isn_ready,
  output logic [IW-1:0] isn_pkt [P],
  input  logic [NB-1:0] ack_done,
  // activation unit
  output logic          act_start,
  output act_fn_e       act_fn,
  output word_t         act_div,
  output logic [15:0]   act_base,
  output logic [23:0]   act_nrows,
  output logic [1:0]    act_cp,
  input  logic          act_busy,
  input  logic          act_done,
  // init
  output logic          init_we,
  output logic [15:0]   init_row,
  output word_t         init_val,
  // status
  output logic          tb_end,
  output logic [NMUTEX-1:0] mutex,
  output logic [31:0]   n_mutex_stall,
  output logic [31:0]   n_mode_switch,
  output logic [31:0]   n_issued
);
  // ---------------- decode of the head -----------------
  ucode_t       uc;
  opcode_e      hop;
  logic [47:0]  hinfo;
  logic [7:0]   hida, hidb, hmask;
  logic [1:0]   htype;
  int unsigned  hm;
  logic [NMUTEX-1:0] uses;

  ga_ucode_rom u_rom (.op(hop), .uc);

  always_comb begin
    hop   = i_op(iq_head);
    hinfo = i_info(iq_head);
    hida  = i_ida(iq_head);
    hidb  = i_idb(iq_head);
    hmask = i_mask(iq_head);
    htype = (hida[7:6] == 2'd3) ? 2'd2 : hida[7:6];
    hm    = mutex_idx(hida);
    // buffer copies a computation reads or writes
    uses = '0;
    unique case (hop)
      OP_GEMM: begin
        uses[mutex_idx(hida)] = 1'b1;
        uses[mutex_idx({2'd1, 4'd0, hidb[1:0]})] = 1'b1;
        uses[{1'b0, hinfo[39:38]}] = 1'b1;
      end
      OP_SPDMM, OP_SDDMM, OP_VADD: begin
        uses[mutex_idx({2'd2, 4'd0, hida[1:0]})] = 1'b1;
        uses[{1'b0, hidb[1:0]}] = 1'b1;
        uses[{1'b0, hinfo[39:38]}] = 1'b1;
        if (hop == OP_VADD) uses[{1'b0, hinfo[37:36]}] = 1'b1;
      end
      OP_ACT, OP_INIT: uses[{1'b0, hida[1:0]}] = 1'b1;
      default: ;
    endcase
  end

  // ---------------- state -----------------
  logic [NMUTEX-1:0] loading;
  logic [NMUTEX-1:0] cmask;
  logic [1:0]        ld_m  [3];     // mutex index of the running load, per type
  logic [2:0]        ld_mi [3];
  logic              dbusy [3];     // loader/writer started and not yet done
  seq_e              cseq;          // running computation
  logic              cbusy;

  // GEMM
  typedef enum logic [1:0] { G_CLR, G_FEED, G_WAIT, G_DRAIN } gst_e;
  gst_e        gst;
  logic [11:0] g_sb, g_len, g_gb, gi, gj, gk;
  logic [15:0] g_fb, g_wb;
  logic [7:0]  gw;
  logic        g_fv;
  logic [LP-1:0] g_fw;
  logic        g_wcp;

  // edge loop
  logic [23:0] e_num, e_next, e_done, e_rd, e_out;
  logic [15:0] e_base, e_sbase, e_dbase;
  logic [1:0]  e_scp, e_dcp;
  logic        e_pair, e_rdv;
  logic [P-1:0] inj_v;
  logic        inj_free, e_issue, e_load;
  logic [23:0] nvalid, ndone;

  // init loop
  logic [23:0] i_cnt, i_n;

  // ---------------- issue -----------------
  logic can_issue, mstall, do_switch;
  logic [2:0] m3;
  always_comb begin
    m3        = 3'(hm);
    mstall    = 1'b0;
    can_issue = 1'b0;
    do_switch = 1'b0;
    if (iq_valid) begin
      unique case (uc.seq)
        SEQ_DMA: begin
          if (!uc.store) begin
            mstall    = mutex[m3];
            can_issue = !mutex[m3] && !dbusy[htype] && !loading[m3];
          end else begin
            can_issue = !dbusy[htype] && !cbusy && !loading[m3];
          end
        end
        SEQ_GEMM, SEQ_EDGE, SEQ_ACT, SEQ_INIT: begin
          if (!cbusy && (uses & loading) == '0) begin
            if (uc.mode != MODE_IDLE && uc.mode != mode) do_switch = 1'b1;
            else can_issue = 1'b1;
          end
        end
        SEQ_END: can_issue = !cbusy && !act_busy && loading == '0 &&
                             !dbusy[0] && !dbusy[1] && !dbusy[2] &&
                             !dma_busy[0] && !dma_busy[1] && !dma_busy[2];
        default: can_issue = 1'b1;        // NOP, CSI, HALT: dropped
      endcase
    end
    iq_pop = can_issue;
  end

  // ---------------- GEMM datapath outputs -----------------
  always_comb begin
    gm_re    = cbusy && cseq == SEQ_GEMM && gst == G_FEED;
    gm_frow  = 16'(g_fb >> LP) + 16'(16'(gk >> LP) * 16'(g_sb)) + 16'(gi);
    wb_re    = gm_re;
    wb_raddr = g_wb + 16'(16'(gj) * 16'(g_len)) + 16'(gk);
    wb_rcp   = g_wcp;
    gm_clr   = cbusy && cseq == SEQ_GEMM && gst == G_CLR;
    gm_rd    = cbusy && cseq == SEQ_GEMM && gst == G_DRAIN;
    gm_we    = gm_rd;
    gm_wrow  = 16'(out_base >> LP) + 16'(16'(gj) * 16'(g_sb)) + 16'(gi);
    gm_valid = g_fv;
    gm_word  = g_fw;
  end

  // ---------------- edge loop -----------------
  function automatic logic [IW-1:0] mkpkt(logic [15:0] lrow, logic [1:0] cp,
      logic [15:0] dst, logic [7:0] slot, logic half, logic [15:0] erow, edge_t e);
    return {e, erow, half, slot, dst, cp, lrow};
  endfunction

  logic [15:0] e_row;
  always_comb begin
    inj_free = 1'b1;
    for (int q = 0; q < P; q++) if (inj_v[q] && !isn_ready[q]) inj_free = 1'b0;
    e_load  = e_rdv && inj_free;
    e_issue = cbusy && cseq == SEQ_EDGE && e_next < e_num && (!e_rdv || e_load)
              && (!e_pair || (e_out == 0 && !e_rdv));
    e_row   = 16'((e_base + 16'(e_next)) >> $clog2(NB));
    eb_re   = e_issue;
    eb_raddr = e_row;
    nvalid = '0;
    for (int s = 0; s < NB; s++) if (e_rd + 24'(s) < e_num) nvalid = nvalid + 1'b1;
    ndone = '0;
    for (int s = 0; s < NB; s++) if (ack_done[s]) ndone = ndone + 1'b1;
    isn_valid = inj_v;
  end

  // ---------------- init outputs -----------------
  always_comb begin
    init_we  = cbusy && cseq == SEQ_INIT && i_cnt < i_n;
    init_row = 16'(act_base >> LP) + i_cnt[15:0];
  end

  logic [15:0] e_rrow;
  always_ff @(posedge clk or negedge rst_n) begin : p_seq
    logic              rel;
    logic [NMUTEX-1:0] lock;
    if (!rst_n) begin
      mode <= MODE_IDLE; red_op <= RED_SUM; post <= POST_NONE; accum <= 1'b0;
      out_base <= '0; out_cp <= '0; mutex <= '0; loading <= '0; cmask <= '0;
      cseq <= SEQ_NONE; cbusy <= 1'b0; tb_end <= 1'b0; dma_store <= 1'b0;
      dma_dram <= '0; dma_len <= '0;
      for (int t = 0; t < 3; t++) begin
        dma_start[t] <= 1'b0; dma_cp[t] <= '0; dma_sbase[t] <= '0;
        ld_m[t] <= '0; ld_mi[t] <= '0; dbusy[t] <= 1'b0;
      end
      n_mutex_stall <= '0; n_mode_switch <= '0; n_issued <= '0;
      gst <= G_CLR; g_sb <= '0; g_len <= '0; g_gb <= '0; gi <= '0; gj <= '0;
      gk <= '0; g_fb <= '0; g_wb <= '0; gw <= '0; g_fv <= 1'b0; g_fw <= '0;
      g_wcp <= 1'b0; gm_post <= POST_NONE; gm_fcp <= '0;
      e_num <= '0; e_next <= '0; e_done <= '0; e_rd <= '0; e_out <= '0;
      e_base <= '0; e_sbase <= '0; e_dbase <= '0; e_scp <= '0; e_dcp <= '0;
      e_pair <= 1'b0; e_rdv <= 1'b0; inj_v <= '0; eb_cp <= 1'b0; e_rrow <= '0;
      for (int q = 0; q < P; q++) isn_pkt[q] <= '0;
      act_start <= 1'b0; act_fn <= ACT_EXP; act_div <= '0; act_base <= '0;
      act_nrows <= '0; act_cp <= '0; init_val <= '0; i_cnt <= '0; i_n <= '0;
    end else begin
      rel = 1'b0;
      lock = '0;
      tb_end    <= 1'b0;
      act_start <= 1'b0;
      for (int t = 0; t < 3; t++) dma_start[t] <= 1'b0;
      if (mstall) n_mutex_stall <= n_mutex_stall + 1;
      if (do_switch) begin
        mode <= uc.mode;
        n_mode_switch <= n_mode_switch + 1;
      end
      // loads finishing
      for (int t = 0; t < 3; t++) if (dma_done[t]) dbusy[t] <= 1'b0;
      for (int t = 0; t < 3; t++)
        if (dma_done[t] && ld_m[t] == 2'd1) begin
          loading[ld_mi[t]] <= 1'b0;
          ld_m[t] <= 2'd0;
        end

      // ---------- issue ----------
      if (can_issue) begin
        n_issued <= n_issued + 1;
        unique case (uc.seq)
          SEQ_DMA: begin
            dma_start[htype] <= 1'b1;
            dbusy[htype]     <= 1'b1;
            dma_store        <= uc.store;
            dma_dram         <= i_dram(iq_head);
            dma_len          <= hinfo[23:0];
            dma_cp[htype]    <= hida[1:0];
            dma_sbase[htype] <= i_basea(iq_head);
            if (!uc.store) begin
              loading[m3]  <= 1'b1;
              ld_m[htype]  <= 2'd1;
              ld_mi[htype] <= m3;
              if (hmask != '0) lock[m3] = 1'b1;
            end
          end
          SEQ_GEMM: begin
            cbusy <= 1'b1; cseq <= SEQ_GEMM; cmask <= hmask[NMUTEX-1:0];
            gst <= G_CLR; gi <= '0; gj <= '0; gk <= '0; gw <= '0;
            g_sb <= hinfo[35:24]; g_len <= hinfo[23:12]; g_gb <= hinfo[11:0];
            g_fb <= i_basea(iq_head); g_wb <= iq_head[31:16];
            gm_fcp <= hida[1:0]; g_wcp <= hidb[0];
            out_cp <= hinfo[39:38]; gm_post <= post_e'(hinfo[37:36]);
            out_base <= i_obase(iq_head);
          end
          SEQ_EDGE: begin
            cbusy <= 1'b1; cseq <= SEQ_EDGE; cmask <= hmask[NMUTEX-1:0];
            e_num <= i_baseb(iq_head); e_next <= '0; e_done <= '0; e_out <= '0;
            e_base <= i_basea(iq_head); eb_cp <= hida[0];
            e_sbase <= hinfo[31:16]; e_scp <= hidb[1:0];
            e_dcp <= hinfo[39:38]; e_pair <= uc.pair;
            e_dbase <= (hop == OP_VADD) ? hinfo[15:0] : i_obase(iq_head);
            out_base <= i_obase(iq_head);
            out_cp <= (hop == OP_VADD) ? hinfo[37:36] : hinfo[39:38];
            red_op <= red_e'(hinfo[37:36]);
            accum  <= (hop == OP_SDDMM) && hinfo[37];
            post   <= (hop == OP_SDDMM) ? post_e'(hinfo[36:35]) : POST_NONE;
          end
          SEQ_ACT: begin
            cbusy <= 1'b1; cseq <= SEQ_ACT; cmask <= hmask[NMUTEX-1:0];
            act_start <= 1'b1; act_fn <= act_fn_e'(hinfo[39:36]);
            act_div <= i_dram(iq_head); act_base <= i_basea(iq_head);
            act_nrows <= hinfo[23:0]; act_cp <= hida[1:0];
          end
          SEQ_INIT: begin
            cbusy <= 1'b1; cseq <= SEQ_INIT; cmask <= hmask[NMUTEX-1:0];
            act_base <= i_basea(iq_head); act_cp <= hida[1:0]; out_cp <= hida[1:0];
            init_val <= i_dram(iq_head); i_cnt <= '0;
            i_n <= hinfo[23:0] >> LP;
          end
          SEQ_END: tb_end <= 1'b1;
          default: ;
        endcase
      end

      // ---------- GEMM sequencer ----------
      g_fv <= gm_re;
      g_fw <= gk[LP-1:0];
      if (cbusy && cseq == SEQ_GEMM) begin
        unique case (gst)
          G_CLR:  gst <= (g_len == 0) ? G_WAIT : G_FEED;
          G_FEED: if (gk == g_len - 1) begin gk <= '0; gst <= G_WAIT; gw <= '0; end
                  else gk <= gk + 1'b1;
          G_WAIT: if (gw == 8'(2*P - 2)) gst <= G_DRAIN; else gw <= gw + 1'b1;
          G_DRAIN: begin
            gst <= G_CLR; gw <= '0;
            if (gj == g_gb - 1) begin
              gj <= '0;
              if (gi == g_sb - 1) begin
                cbusy <= 1'b0; rel = 1'b1;
              end else gi <= gi + 1'b1;
            end else gj <= gj + 1'b1;
          end
          default: gst <= G_CLR;
        endcase
      end

      // ---------- edge sequencer ----------
      if (cbusy && cseq == SEQ_EDGE) begin
        for (int q = 0; q < P; q++) if (isn_ready[q]) inj_v[q] <= 1'b0;
        if (e_issue) begin
          e_rd   <= e_next;
          e_rrow <= e_row;
          e_next <= e_next + 24'(NB);
          e_rdv  <= 1'b1;
        end else if (e_load) e_rdv <= 1'b0;
        if (e_load) begin
          for (int s = 0; s < NB; s++) begin
            if (e_rd + 24'(s) < e_num) begin
              inj_v[2*s] <= 1'b1;
              isn_pkt[2*s] <= mkpkt(e_sbase + eb_rdata[s].src[15:0], e_scp,
                                    eb_rdata[s].dst[15:0], 8'(s), 1'b0, e_rrow, eb_rdata[s]);
              if (e_pair) begin
                inj_v[2*s+1] <= 1'b1;
                isn_pkt[2*s+1] <= mkpkt(e_dbase + eb_rdata[s].dst[15:0], e_dcp,
                                        eb_rdata[s].dst[15:0], 8'(s), 1'b1, e_rrow, eb_rdata[s]);
              end
            end
          end
        end
        e_out  <= e_out + (e_load ? nvalid : 24'd0) - ndone;
        e_done <= e_done + ndone;
        if (e_done + ndone == e_num && !e_rdv && !e_issue) begin
          cbusy <= 1'b0; rel = 1'b1; inj_v <= '0;
        end
      end

      // ---------- activation / init ----------
      if (cbusy && cseq == SEQ_ACT && act_done) begin
        cbusy <= 1'b0; rel = 1'b1;
      end
      if (cbusy && cseq == SEQ_INIT) begin
        if (i_cnt < i_n) i_cnt <= i_cnt + 1'b1;
        else begin cbusy <= 1'b0; rel = 1'b1; end
      end
      mutex <= (mutex | lock) & ~(rel ? cmask : '0);
    end
  end

  a_one_mode: assert property (@(posedge clk) disable iff (!rst_n)
      (cbusy && cseq == SEQ_EDGE) |-> mode inside {MODE_SPDMM, MODE_SDDMM, MODE_VADD});
endmodule
