// ga_feature_buffer: the PE's Feature Buffer.
//
// NCOPY independent copies (triple buffering, as in the paper) of P banks
// each; a bank row holds P words, i.e. the part of one vertex's feature
// vector that lies in one fiber. A linear row L of a copy lives in bank
// (L mod P), row L / P, so vertex i is stored in bank i mod P as the paper
// specifies. Per copy the full-size buffer is N_F1 x N_F2 = 16384 x 16 words
// (DEPTH = 16384 / P rows per bank), 3 MB over the three copies.
//
// Ports (all reads synchronous, data one cycle later; a port's data holds
// until its next read):
//   R0[b], R1[b] : compute reads of bank b from a chosen copy
//   W0[b]        : compute write of bank b into a chosen copy
//   DMA          : one linear row read or write (loader / writer)
// Each bank of each copy has one read and one write port; the PE's control
// never points two ports at the same bank of the same copy in one cycle (the
// mutexes keep loads and compute on different copies). When it happens
// anyway R0 wins over R1 over DMA, and W0 over DMA. The port set and the
// priority are this design's choices.
module ga_feature_buffer
  import ga_pkg::*;
#(
  parameter int P     = 16,
  parameter int DEPTH = 64,
  parameter int NCOPY = 3,
  localparam int LP = $clog2(P)
) (
  input  logic        clk,
  input  logic        re0   [P],
  input  logic [1:0]  rcp0  [P],
  input  logic [15:0] raddr0[P],
  output word_t       rdata0[P][P],
  input  logic        re1   [P],
  input  logic [1:0]  rcp1  [P],
  input  logic [15:0] raddr1[P],
  output word_t       rdata1[P][P],
  input  logic        we0   [P],
  input  logic [1:0]  wcp0  [P],
  input  logic [15:0] waddr0[P],
  input  word_t       wdata0[P][P],
  input  logic        dma_re,
  input  logic        dma_we,
  input  logic [1:0]  dma_cp,
  input  logic [15:0] dma_row,
  input  word_t       dma_wdata[P],
  output word_t       dma_rdata[P]
);
  logic [P*DW-1:0] q   [NCOPY][P];
  logic [1:0]  cp0_q [P];
  logic [1:0]  cp1_q [P];
  logic [1:0]  dcp_q;
  logic [LP-1:0] dbank_q;
  logic [LP-1:0] dbank;
  logic [15:0]   drow;

  always_comb begin
    dbank = dma_row[LP-1:0];
    drow  = dma_row >> LP;
  end

  for (genvar c = 0; c < NCOPY; c++) begin : g_c
    for (genvar b = 0; b < P; b++) begin : g_b
      logic        r_en, w_en;
      logic [15:0] r_a, w_a;
      logic [P*DW-1:0] w_d;
      logic [P*DW-1:0] mem [DEPTH];
      always_comb begin
        r_en = 1'b1;
        if (re0[b] && rcp0[b] == c)      r_a = raddr0[b];
        else if (re1[b] && rcp1[b] == c) r_a = raddr1[b];
        else if (dma_re && dma_cp == c && dbank == b) r_a = drow;
        else begin r_a = '0; r_en = 1'b0; end
        w_en = 1'b1;
        if (we0[b] && wcp0[b] == c) begin
          w_a = waddr0[b];
          for (int k = 0; k < P; k++) w_d[k*DW +: DW] = wdata0[b][k];
        end else if (dma_we && dma_cp == c && dbank == b) begin
          w_a = drow;
          for (int k = 0; k < P; k++) w_d[k*DW +: DW] = dma_wdata[k];
        end else begin
          w_a = '0; w_d = '0; w_en = 1'b0;
        end
      end
      always_ff @(posedge clk) begin
        if (r_en) q[c][b] <= mem[r_a[$clog2(DEPTH)-1:0]];
        if (w_en) mem[w_a[$clog2(DEPTH)-1:0]] <= w_d;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < P; b++) begin
      if (re0[b]) cp0_q[b] <= rcp0[b];
      if (re1[b]) cp1_q[b] <= rcp1[b];
    end
    if (dma_re) begin
      dcp_q   <= dma_cp;
      dbank_q <= dbank;
    end
  end

  always_comb
    for (int b = 0; b < P; b++)
      for (int k = 0; k < P; k++) begin
        rdata0[b][k] = q[cp0_q[b]][b][k*DW +: DW];
        rdata1[b][k] = q[cp1_q[b]][b][k*DW +: DW];
        dma_rdata[k] = q[dcp_q][dbank_q][k*DW +: DW];
      end
endmodule
