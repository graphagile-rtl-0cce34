// tb_ga_top: end-to-end test of the whole accelerator at its default
// parameters (2 PEs, P = 8, reduced buffer depths) with a behavioural DDR.
//
// The testbench acts as host and compiler: it writes random features,
// weights and graph partitions into DDR, assembles a two-layer binary and
// starts the accelerator.
//  Layer 1 (NT1 tiling blocks, one graph partition of 2P vertices each):
//    Z = ReLU(H x W) by two GEMM instructions (one per half of the
//    partition; the second feature load must wait for the first GEMM to
//    release its Feature Buffer copy: a mutex stall), then
//    Y = sum over edges (w_e * Z[src]) into an initialised copy (SpDMM with
//    runs of edges to one destination: RAW hazards), stored to DDR.
//  Layer 2 (NT2 tiling blocks, each reading two layer-1 outputs from DDR,
//    which needs the layer barrier): S = Y_a + Y_b (vector add over
//    self-edges), edge scores <S[src], S[dst]> (SDDMM, written back to DDR
//    from the Edge Buffer) and S / 2 (Activation Unit division), stored.
// Every output word is compared with a reference computed here with the
// same Q16.16 arithmetic. The mechanism counters are checked as well: mutex
// stalls, RAW hazards, ISN congestion, mode switches (GEMM -> SpDMM ->
// vector add -> SDDMM), use of several PEs (dynamic load balancing) and the
// two layer barriers. A watchdog ends the run with a failure.
module tb_ga_top;
  import ga_pkg::*;

  localparam int P    = 8;
  localparam int NPE  = 2;
  localparam int MW   = P * 32;
  localparam int V    = 2 * P;          // vertices per partition
  localparam int NT1  = 4;             // layer-1 tiling blocks
  localparam int NT2  = NT1 / 2;
  localparam int E1   = 44;             // SpDMM edges per partition
  localparam int E2   = 20;             // SDDMM edges per layer-2 block
  localparam int EPW  = MW / 128;
  // DDR word addresses
  localparam int A_H   = 4096;          // features, one vertex per word
  localparam int A_W   = 2048;          // weights, one row per word
  localparam int A_E1  = 8192;          // layer-1 edges, 16 words per block
  localparam int A_ID  = 2560;          // self-edges for the vector add
  localparam int A_E2  = 12288;         // layer-2 edges, 8 words per block
  localparam int A_Y   = 16384;         // layer-1 outputs
  localparam int A_S   = 20480;         // layer-2 outputs
  localparam int A_ES  = 24576;         // SDDMM scores

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = !clk;

  int checks = 0;
  int failures = 0;

  logic          start, done;
  logic [31:0]   prog_base;
  logic          ddr_valid, ddr_ready, ddr_we, ddr_rvalid;
  logic [31:0]   ddr_addr;
  logic [MW-1:0] ddr_wdata, ddr_rdata;
  logic          pe_idle [NPE];
  logic [31:0]   n_assign [NPE], n_mutex_stall [NPE], n_mode_switch [NPE];
  logic [31:0]   n_raw [NPE], n_congest [NPE], n_issued [NPE], n_tb [NPE];
  logic [31:0]   n_barrier, n_wait_pe, n_barrier_cycles;

  ga_top dut (
    .clk, .rst_n, .start, .prog_base, .done,
    .ddr_valid, .ddr_ready, .ddr_we, .ddr_addr, .ddr_wdata, .ddr_rvalid, .ddr_rdata,
    .pe_idle, .n_assign, .n_mutex_stall, .n_mode_switch, .n_raw, .n_congest,
    .n_issued, .n_tb, .n_barrier, .n_wait_pe, .n_barrier_cycles);

  ga_ddr_model #(.MW(MW), .LAT(20), .READY_PCT(90)) ddr (
    .clk, .rst_n, .valid(ddr_valid), .ready(ddr_ready), .we(ddr_we), .addr(ddr_addr),
    .wdata(ddr_wdata), .rvalid(ddr_rvalid), .rdata(ddr_rdata));

  // ---------------- reference data -----------------
  word_t H [NT1*V][P];
  word_t W [P][P];
  int    e1s [NT1][E1], e1d [NT1][E1];
  word_t e1w [NT1][E1];
  int    e2s [NT2][E2], e2d [NT2][E2];
  word_t Z [V][P], Y [NT1][V][P], S [NT2][V][P];

  function automatic word_t rnd(int range);
    return word_t'(int'($urandom_range(2 * range)) - range);
  endfunction

  // ---------------- instruction assembly -----------------
  logic [127:0] prog [$];

  function automatic logic [127:0] ins(opcode_e op, logic [47:0] info, logic [7:0] ida,
      logic [7:0] idb, logic [15:0] ba, logic [23:0] bb, logic [15:0] ob);
    return {op, info, ida, idb, ba, bb, ob};
  endfunction
  function automatic logic [127:0] mem(opcode_e op, logic [7:0] id, logic [15:0] sbase,
      logic [31:0] dram, logic [23:0] len, logic lock);
    return {op, (lock ? 8'h01 : 8'h00), 16'h0, len, id, 8'h00, sbase, dram, 8'h00};
  endfunction
  localparam logic [7:0] FB0 = 8'h00, FB1 = 8'h01, FB2 = 8'h02;
  localparam logic [7:0] WB0 = 8'h40, EB0 = 8'h80, EB1 = 8'h81;

  task automatic build();
    prog.push_back(ins(OP_CSI, {24'(NT1), 24'h0}, 0, 0, 0, 0, 0));
    for (int t = 0; t < NT1; t++) begin
      prog.push_back(mem(OP_MEM_RD, FB0, 16'(0), 32'(A_H + t*V), 24'(P), 1'b1));
      prog.push_back(mem(OP_MEM_RD, WB0, 16'(0), 32'(A_W), 24'(P), 1'b1));
      prog.push_back(mem(OP_MEM_RD, EB0, 16'(0), 32'(A_E1 + t*32), 24'((E1 + EPW - 1) / EPW), 1'b1));
      // GEMM half 0: FB0 x WB0 -> FB1[0..P-1], ReLU, releases FB0
      prog.push_back(ins(OP_GEMM, {8'h01, 2'd1, 2'(POST_RELU), 12'd1, 12'(P), 12'd1},
                         FB0, WB0, 16'd0, 24'd0, 16'd0));
      prog.push_back(mem(OP_MEM_RD, FB0, 16'(0), 32'(A_H + t*V + P), 24'(P), 1'b1));
      // GEMM half 1 -> FB1[P..2P-1], releases FB0 and WB0
      prog.push_back(ins(OP_GEMM, {8'h09, 2'd1, 2'(POST_RELU), 12'd1, 12'(P), 12'd1},
                         FB0, WB0, 16'd0, 24'd0, 16'(P)));
      prog.push_back(ins(OP_INIT, {8'h00, 16'h0, 24'(V)}, FB2, 8'h0, 16'd0, 24'd0, 16'd0));
      // SpDMM: EB0 edges, src rows FB1 -> FB2 (sum), releases EB0
      prog.push_back(ins(OP_SPDMM, {8'h20, 2'd2, 2'(RED_SUM), 4'h0, 16'd0, 16'd0},
                         EB0, FB1, 16'd0, 24'(E1), 16'd0));
      prog.push_back(mem(OP_MEM_WR, FB2, 16'(0), 32'(A_Y + t*V), 24'(V), 1'b0));
      prog.push_back(ins(OP_TB_END, '0, 0, 0, 0, 0, 0));
    end
    prog.push_back(ins(OP_CSI, {24'(NT2), 24'h0}, 0, 0, 0, 0, 0));
    for (int u = 0; u < NT2; u++) begin
      prog.push_back(mem(OP_MEM_RD, FB0, 16'(0), 32'(A_Y + (2*u)*V), 24'(V), 1'b1));
      prog.push_back(mem(OP_MEM_RD, FB1, 16'(0), 32'(A_Y + (2*u+1)*V), 24'(V), 1'b1));
      prog.push_back(mem(OP_MEM_RD, EB0, 16'(0), 32'(A_ID), 24'(V / EPW), 1'b1));
      prog.push_back(mem(OP_MEM_RD, EB1, 16'(0), 32'(A_E2 + u*16), 24'(E2 / EPW), 1'b1));
      // vector add: A = FB0, B = FB1 -> FB2, releases FB0, FB1, EB0
      prog.push_back(ins(OP_VADD, {8'h23, 2'd1, 2'd2, 4'h0, 16'd0, 16'd0},
                         EB0, FB0, 16'd0, 24'(V), 16'd0));
      // SDDMM: scores <FB2[src], FB2[dst]> into EB1, releases EB1
      prog.push_back(ins(OP_SDDMM, {8'h40, 2'd2, 1'b0, 2'(POST_NONE), 3'h0, 16'd0, 16'd0},
                         EB1, FB2, 16'd0, 24'(E2), 16'd0));
      prog.push_back(mem(OP_MEM_WR, EB1, 16'(0), 32'(A_ES + u*16), 24'(E2 / EPW), 1'b0));
      prog.push_back(ins(OP_ACT, {8'h00, 4'(ACT_DIV), 12'h0, 24'(V)}, FB2, 8'h0,
                         16'd0, 24'h000200, 16'h0000));  // divisor 2.0 at [39:8]
      prog.push_back(mem(OP_MEM_WR, FB2, 16'(0), 32'(A_S + u*V), 24'(V), 1'b0));
      prog.push_back(ins(OP_TB_END, '0, 0, 0, 0, 0, 0));
    end
    prog.push_back(ins(OP_HALT, '0, 0, 0, 0, 0, 0));
  endtask

  // ---------------- data generation -----------------
  task automatic gen();
    logic [MW-1:0] w;
    for (int v = 0; v < NT1*V; v++) begin
      for (int k = 0; k < P; k++) begin H[v][k] = rnd(65536); w[k*32 +: 32] = H[v][k]; end
      ddr.put(A_H + v, w);
    end
    for (int k = 0; k < P; k++) begin
      for (int c = 0; c < P; c++) begin W[k][c] = rnd(32768); w[c*32 +: 32] = W[k][c]; end
      ddr.put(A_W + k, w);
    end
    for (int t = 0; t < NT1; t++) begin
      for (int e = 0; e < E1; e++) begin
        // runs of four edges share a destination; sources collide on banks
        e1d[t][e] = (e < 16) ? (e / 4) * 5 % V : int'($urandom_range(V - 1));
        e1s[t][e] = int'($urandom_range(V - 1));
        e1w[t][e] = rnd(65536);
      end
      for (int q = 0; q < (E1 + EPW - 1) / EPW; q++) begin
        w = '0;
        for (int s = 0; s < EPW; s++)
          if (q*EPW + s < E1)
            w[s*128 +: 96] = {32'(e1s[t][q*EPW+s]), 32'(e1d[t][q*EPW+s]), e1w[t][q*EPW+s]};
        ddr.put(A_E1 + t*32 + q, w);
      end
    end
    for (int q = 0; q < V / EPW; q++) begin
      w = '0;
      for (int s = 0; s < EPW; s++) w[s*128 +: 96] = {32'(q*EPW+s), 32'(q*EPW+s), 32'h0};
      ddr.put(A_ID + q, w);
    end
    for (int u = 0; u < NT2; u++) begin
      for (int e = 0; e < E2; e++) begin
        e2s[u][e] = int'($urandom_range(V - 1));
        e2d[u][e] = int'($urandom_range(V - 1));
      end
      for (int q = 0; q < E2 / EPW; q++) begin
        w = '0;
        for (int s = 0; s < EPW; s++)
          w[s*128 +: 96] = {32'(e2s[u][q*EPW+s]), 32'(e2d[u][q*EPW+s]), 32'h0};
        ddr.put(A_E2 + u*16 + q, w);
      end
    end
    for (int i = 0; i < prog.size(); i += EPW) begin
      w = '0;
      for (int s = 0; s < EPW; s++) if (i + s < prog.size()) w[s*128 +: 128] = prog[i+s];
      ddr.put(i / EPW, w);
    end
  endtask

  // ---------------- reference model -----------------
  task automatic reference();
    for (int t = 0; t < NT1; t++) begin
      for (int v = 0; v < V; v++)
        for (int c = 0; c < P; c++) begin
          word_t acc = 0;
          for (int k = 0; k < P; k++) acc += fxmul(H[t*V+v][k], W[k][c]);
          Z[v][c] = (acc < 0) ? 0 : acc;
        end
      for (int v = 0; v < V; v++) for (int c = 0; c < P; c++) Y[t][v][c] = 0;
      for (int e = 0; e < E1; e++)
        for (int c = 0; c < P; c++)
          Y[t][e1d[t][e]][c] += fxmul(Z[e1s[t][e]][c], e1w[t][e]);
    end
    for (int u = 0; u < NT2; u++)
      for (int v = 0; v < V; v++)
        for (int c = 0; c < P; c++) S[u][v][c] = Y[2*u][v][c] + Y[2*u+1][v][c];
  endtask

  function automatic word_t div2(word_t x);
    longint q = (longint'(x) <<< 16) / longint'(32'sh20000);
    return word_t'(q);
  endfunction

  task automatic check_results();
    logic [MW-1:0] w;
    int bad;
    for (int t = 0; t < NT1; t++)
      for (int v = 0; v < V; v++) begin
        w = ddr.get(A_Y + t*V + v);
        bad = 0;
        for (int c = 0; c < P; c++) if (word_t'(w[c*32 +: 32]) != Y[t][v][c]) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 10) $display("layer-1 block %0d vertex %0d: %0d words wrong (got %h exp %h)",
                                      t, v, bad, w[31:0], Y[t][v][0]);
        end
      end
    for (int u = 0; u < NT2; u++) begin
      for (int v = 0; v < V; v++) begin
        w = ddr.get(A_S + u*V + v);
        bad = 0;
        for (int c = 0; c < P; c++) if (word_t'(w[c*32 +: 32]) != div2(S[u][v][c])) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          if (failures < 10) $display("layer-2 block %0d vertex %0d: %0d words wrong (got %h exp %h)",
                                      u, v, bad, w[31:0], div2(S[u][v][0]));
        end
      end
      for (int e = 0; e < E2; e++) begin
        word_t sc = 0;
        edge_t ed;
        for (int c = 0; c < P; c++) sc += fxmul(S[u][e2s[u][e]][c], S[u][e2d[u][e]][c]);
        w  = ddr.get(A_E2 + 0);
        w  = ddr.get(A_ES + u*16 + e / EPW);
        ed = w[(e % EPW)*128 +: 96];
        checks++;
        if (ed.weight != sc || ed.src != 32'(e2s[u][e]) || ed.dst != 32'(e2d[u][e])) begin
          failures++;
          if (failures < 10) $display("SDDMM block %0d edge %0d: got %h exp %h", u, e, ed.weight, sc);
        end
      end
    end
  endtask

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- run -----------------
  longint t0, t1;
  initial begin
    int used, tot_assign, tot_stall, tot_raw, tot_cong, tot_sw, tot_tb;
    start = 1'b0; prog_base = '0;
    build();
    gen();
    reference();
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    start <= 1'b1;
    t0 = $time;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    t1 = $time;
    @(posedge clk);
    check_results();
    used = 0; tot_assign = 0; tot_stall = 0; tot_raw = 0; tot_cong = 0; tot_sw = 0; tot_tb = 0;
    for (int p = 0; p < NPE; p++) begin
      if (n_assign[p] != 0) used++;
      tot_assign += int'(n_assign[p]); tot_stall += int'(n_mutex_stall[p]);
      tot_raw += int'(n_raw[p]); tot_cong += int'(n_congest[p]);
      tot_sw += int'(n_mode_switch[p]); tot_tb += int'(n_tb[p]);
    end
    $display("cycles=%0d blocks=%0d PEs used=%0d mutex stalls=%0d RAW=%0d congestion=%0d mode switches=%0d barriers=%0d (barrier cycles %0d, waits for a PE %0d)",
             (t1 - t0) / 2, tot_assign, used, tot_stall, tot_raw, tot_cong, tot_sw,
             n_barrier, n_barrier_cycles, n_wait_pe);
    expect_true(tot_assign == NT1 + NT2, "every tiling block assigned once");
    expect_true(tot_tb == NT1 + NT2, "every tiling block finished");
    expect_true(used == NPE, "dynamic load balancing used every PE");
    expect_true(tot_stall > 0, "mutex stalls occurred");
    expect_true(tot_raw > 0, "RAW hazards detected");
    expect_true(tot_cong > 0, "ISN congestion occurred");
    expect_true(tot_sw >= 2 * used, "mode switches counted");
    expect_true(n_barrier == 2, "two layer barriers");
    expect_true(n_barrier_cycles > 0, "barrier waited for PEs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog: accelerator did not finish (scheduler state %0d, pc %0d)",
             dut.u_sched.st, dut.u_sched.pc);
    for (int p = 0; p < NPE; p++)
      $display("  PE %0d: idle %0d issued %0d blocks %0d", p, pe_idle[p], n_issued[p], n_tb[p]);
    $display("  PE 0 decoder: busy %0d seq %0d loading %b mutex %b mode %0d head op %0d dma busy %0d%0d%0d",
             dut.g_pe[0].u_pe.u_dec.cbusy, dut.g_pe[0].u_pe.u_dec.cseq, dut.g_pe[0].u_pe.u_dec.loading,
             dut.g_pe[0].u_pe.u_dec.mutex, dut.g_pe[0].u_pe.u_dec.mode, dut.g_pe[0].u_pe.u_dec.hop,
             dut.g_pe[0].u_pe.u_dec.dma_busy[0], dut.g_pe[0].u_pe.u_dec.dma_busy[1],
             dut.g_pe[0].u_pe.u_dec.dma_busy[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
