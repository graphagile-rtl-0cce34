// ga_ur_pipeline: one UR pipeline of the ACK (Update Unit, RAW Unit, Reduce
// Unit), owning 2*P of the ACK's ALUs: the Update Unit's P ALUs and the
// Reduce Unit's P ALUs. Pipeline u sits on ACK rows 2u and 2u+1.
//
// Packets arrive from DSN ports 2u and 2u+1 (round-robin between them).
// Packet layout (DSN payload): [15:0] dst, [23:16] slot, [24] half,
// [40:25] edge row in its Edge Buffer bank, [136:41] edge (src,dst,weight),
// [137 +: P*32] feature vector.
//
// SpDMM (scatter-gather, paper Algorithm 5): the Update Unit multiplies the
// source feature vector by the edge weight (P multipliers) -> register ->
// RAW Unit -> read the destination row of the output Feature Buffer copy ->
// the Reduce Unit combines old and new element-wise (sum, max or min) and
// writes the row back in the next cycle. The RAW Unit holds back an update
// whose destination is the row being written in that cycle.
// SDDMM: the two vectors of edge slot u meet here (src: half 0, dst: half 1).
// The Update Unit multiplies them element-wise, the Reduce Unit's ALUs form
// an adder tree (P-1 adders) and its last ALU is the root that adds the
// previous edge weight when accumulating over feature fibers and applies
// the optional ReLU/PReLU. The new weight is written to Edge Buffer bank u.
// Vector add: the two vectors of one edge (src row of copy A, dst row of
// copy B) are added by the Update Unit; the Reduce Unit is bypassed and the
// sum goes to row out_base+dst of the output copy.
// GEMM: all 2P ALUs are driven by the ACK's systolic wiring (gm_* ports).
//
// The paper gives the unit sizes, the modes and the RAW unit; the pairing
// store for SDDMM/vector-add (one entry per edge slot) and the packet
// layout are this design's choices. One packet accepted per cycle.
// Lint tools report a combinational loop through the ALU output array y:
// in SDDMM mode tree node m reads y of nodes 2m and 2m+1 only, so there is
// no real loop; the report comes from y being a single array.
module ga_ur_pipeline
  import ga_pkg::*;
#(
  parameter int P = 8,
  parameter int U = 0,
  localparam int LP = $clog2(P),
  localparam int WD = 137 + P*DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ack_mode_e     mode,
  input  red_e          red_op,
  input  post_e         post,
  input  word_t         alpha,
  input  logic          accum,
  input  logic [15:0]   out_base,
  // from the DSN
  input  logic [1:0]    in_valid,
  output logic [1:0]    in_ready,
  input  logic [WD-1:0] in_pkt [2],
  // Feature Buffer: read and write of banks 2U (hi=0) and 2U+1 (hi=1)
  output logic          fb_re,
  output logic          fb_re_hi,
  output logic [15:0]   fb_raddr,
  input  word_t         fb_rdata [P],
  output logic          fb_we,
  output logic          fb_we_hi,
  output logic [15:0]   fb_waddr,
  output word_t         fb_wdata [P],
  // Edge Buffer bank U write (SDDMM results)
  output logic          eb_we,
  output logic [15:0]   eb_waddr,
  output edge_t         eb_wdata,
  output logic          done,        // one edge finished
  output logic          raw_hazard,
  // GEMM mode: operands and controls of the 2P ALUs from the ACK
  input  word_t         gm_a [2*P],
  input  word_t         gm_b [2*P],
  input  logic          gm_acc_en [2*P],
  input  logic          gm_clr,
  input  logic          gm_rd,
  input  post_e         gm_post,
  output word_t         gm_y [2*P]
);
  // ---------------- packet fields -----------------
  function automatic logic [15:0] f_dst (logic [WD-1:0] p); return p[15:0];  endfunction
  function automatic logic [7:0]  f_slot(logic [WD-1:0] p); return p[23:16]; endfunction
  function automatic logic        f_half(logic [WD-1:0] p); return p[24];    endfunction
  function automatic logic [15:0] f_erow(logic [WD-1:0] p); return p[40:25]; endfunction
  function automatic edge_t       f_edge(logic [WD-1:0] p); return p[136:41]; endfunction
  function automatic word_t f_feat(logic [WD-1:0] p, int k); return p[137 + k*DW +: DW]; endfunction

  // ---------------- input arbitration -----------------
  logic          rr, sel, acc_any;
  logic [WD-1:0] pk;
  logic          can_take;
  always_comb begin
    sel     = in_valid[1] && (!in_valid[0] || rr);
    pk      = in_pkt[sel];
    acc_any = (in_valid != 2'b00) && can_take;
    in_ready[0] = can_take && !sel;
    in_ready[1] = can_take && sel;
  end

  // ---------------- ALUs -----------------
  alu_op_e op   [2*P];
  post_e   pst  [2*P];
  word_t   a    [2*P];
  word_t   b    [2*P];
  logic    aen  [2*P];
  word_t   y    [2*P];
  word_t   accv [2*P];
  for (genvar n = 0; n < 2*P; n++) begin : g_alu
    ga_alu u_alu (.clk, .rst_n, .op(op[n]), .post(pst[n]), .a(a[n]), .b(b[n]),
                  .alpha, .acc_clr(gm_clr), .acc_en(aen[n]), .y(y[n]), .acc(accv[n]));
  end
  always_comb gm_y = y;

  // ---------------- SpDMM registers -----------------
  localparam int RW = 16 + P*DW;              // RAW payload {u_vec, key}
  logic          s1_v;
  logic [RW-1:0] s1_d;
  logic          raw_in_ready, raw_out_v;
  logic [RW-1:0] raw_out_d;
  logic          s2_v;
  logic [15:0]   s2_key;
  word_t         s2_u [P];

  // ---------------- SDDMM / VADD pairing -----------------
  localparam int NS = P / 2;
  logic          pv   [NS];
  logic [WD-1:0] pd   [NS];
  logic          pair_fire;
  logic [LP-2:0] pslot;
  logic          wb_hi;
  edge_t         e_pk, e_src;
  logic [WD-1:0] p_src, p_dst;
  logic          wb_v, wb_edge;
  logic [15:0]   wb_row;
  word_t         wb_vec [P];
  edge_t         wb_e;

  always_comb begin
    pslot     = pk[16 +: LP-1];
    pair_fire = acc_any && (mode == MODE_SDDMM || mode == MODE_VADD)
                && pv[pslot];
    p_src = f_half(pk) ? pd[pslot] : pk;
    p_dst = f_half(pk) ? pk : pd[pslot];
    e_pk  = f_edge(pk);
    e_src = f_edge(p_src);
  end

  // ALU operand selection per mode
  always_comb begin
    for (int n = 0; n < 2*P; n++) begin
      op[n] = ALU_PASS; pst[n] = POST_NONE; a[n] = '0; b[n] = '0; aen[n] = 1'b0;
    end
    unique case (mode)
      MODE_GEMM: for (int n = 0; n < 2*P; n++) begin
        op[n] = gm_rd ? ALU_RDACC : ALU_MAC; pst[n] = gm_rd ? gm_post : POST_NONE;
        a[n] = gm_a[n]; b[n] = gm_b[n]; aen[n] = gm_acc_en[n];
      end
      MODE_SPDMM: for (int k = 0; k < P; k++) begin
        op[k] = ALU_MUL; a[k] = f_feat(pk, k); b[k] = e_pk.weight;
        op[P+k] = (red_op == RED_MAX) ? ALU_MAX : (red_op == RED_MIN) ? ALU_MIN : ALU_ADD;
        a[P+k] = fb_rdata[k]; b[P+k] = s2_u[k];
      end
      MODE_SDDMM: begin
        for (int k = 0; k < P; k++) begin
          op[k] = ALU_MUL; a[k] = f_feat(p_src, k); b[k] = f_feat(p_dst, k);
        end
        // adder tree in heap order: node m (1..P-1) is reduce ALU P+m-1,
        // leaves m = P..2P-1 are the Update Unit products
        for (int m = 1; m < P; m++) begin
          op[P+m-1] = ALU_ADD;
          a[P+m-1]  = (2*m   >= P) ? y[2*m - P]   : y[P + 2*m - 1];
          b[P+m-1]  = (2*m+1 >= P) ? y[2*m+1 - P] : y[P + 2*m];
        end
        op[2*P-1] = ALU_ADD; pst[2*P-1] = post;        // root accumulator
        a[2*P-1]  = accum ? e_src.weight : '0;
        b[2*P-1]  = y[P];
      end
      MODE_VADD: for (int k = 0; k < P; k++) begin
        op[k] = ALU_ADD; a[k] = f_feat(p_src, k); b[k] = f_feat(p_dst, k);
      end
      default: ;
    endcase
  end

  // ---------------- control -----------------
  always_comb begin
    unique case (mode)
      MODE_SPDMM: can_take = !s1_v || raw_in_ready;
      MODE_SDDMM, MODE_VADD: can_take = 1'b1;
      default:    can_take = 1'b0;
    endcase
  end

  ga_raw_unit #(.W(RW), .KW(16), .DEPTH(4)) u_raw (
    .clk, .rst_n, .in_valid(s1_v), .in_ready(raw_in_ready), .in_data(s1_d),
    .busy_valid(s2_v), .busy_key(s2_key), .out_valid(raw_out_v), .out_data(raw_out_d),
    .hazard(raw_hazard)
  );

  logic [15:0] in_key;
  always_comb in_key = out_base + f_dst(pk);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= 1'b0; s1_v <= 1'b0; s2_v <= 1'b0; wb_v <= 1'b0;
      for (int s = 0; s < NS; s++) pv[s] <= 1'b0;
    end else begin
      if (acc_any && in_valid == 2'b11) rr <= !sel;
      // SpDMM stage 1 (Update Unit output)
      if (mode == MODE_SPDMM && acc_any) begin
        s1_v <= 1'b1;
        for (int k = 0; k < P; k++) s1_d[16 + k*DW +: DW] <= y[k];
        s1_d[15:0] <= in_key;
      end else if (raw_in_ready) begin
        s1_v <= 1'b0;
      end
      // stage 2: Reduce Unit read/modify/write
      s2_v <= raw_out_v;
      if (raw_out_v) begin
        s2_key <= raw_out_d[15:0];
        for (int k = 0; k < P; k++) s2_u[k] <= raw_out_d[16 + k*DW +: DW];
      end
      // SDDMM / VADD pairing and write-back stage
      wb_v <= pair_fire;
      if (acc_any && (mode == MODE_SDDMM || mode == MODE_VADD)) begin
        if (pair_fire) pv[pslot] <= 1'b0;
        else begin
          pv[pslot] <= 1'b1;
          pd[pslot] <= pk;
        end
      end
      if (pair_fire) begin
        wb_edge <= (mode == MODE_SDDMM);
        wb_row  <= (mode == MODE_SDDMM) ? f_erow(p_src) : 16'((out_base + f_dst(p_src)) >> LP);
        wb_e    <= '{src: e_src.src, dst: e_src.dst, weight: y[2*P-1]};
        for (int k = 0; k < P; k++) wb_vec[k] <= y[k];
        wb_hi   <= 1'(out_base + f_dst(p_src));
      end
    end
  end

  always_comb begin
    fb_re    = raw_out_v;
    fb_re_hi = raw_out_d[0];
    fb_raddr = 16'(raw_out_d[15:0] >> LP);
    eb_we    = wb_v && wb_edge;
    eb_waddr = wb_row;
    eb_wdata = wb_e;
    if (mode == MODE_SPDMM) begin
      fb_we    = s2_v;
      fb_we_hi = s2_key[0];
      fb_waddr = 16'(s2_key >> LP);
      for (int k = 0; k < P; k++) fb_wdata[k] = y[P+k];
    end else begin
      fb_we    = wb_v && !wb_edge;
      fb_we_hi = wb_hi;
      fb_waddr = wb_row;
      fb_wdata = wb_vec;
    end
    done = (mode == MODE_SPDMM) ? s2_v : wb_v;
  end
endmodule
