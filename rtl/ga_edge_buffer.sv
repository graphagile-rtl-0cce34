// ga_edge_buffer: the PE's Edge Buffer of COO edges (src, dst, weight).
//
// Two copies (double buffering, as in the paper) of NB = P/2 banks. Linear
// edge e of a copy lives in bank e mod NB, row e / NB, so one row read gives
// the P/2 consecutive edges that the SpDMM/SDDMM microcode consumes per
// cycle. The full size is N_E = 65536 edges per copy (DEPTH = 65536/NB).
// Ports (reads synchronous, data one cycle later and held until the next
// read): a compute read of one row of every bank, a per-bank write (SDDMM
// writes the computed edge weight back), and a DMA port that moves EPW edges
// (one DDR word) at linear edge index dma_e (a multiple of EPW) per cycle.
// The bank organisation and ports are this design's choices; the paper
// gives the sizes and the 96-bit edge.
module ga_edge_buffer
  import ga_pkg::*;
#(
  parameter int P     = 16,
  parameter int DEPTH = 256,
  parameter int EPW   = 4,
  localparam int NB = P / 2,
  localparam int LB = $clog2(NB)
) (
  input  logic        clk,
  input  logic        re,
  input  logic        rcp,
  input  logic [15:0] raddr,
  output edge_t       rdata [NB],
  input  logic        we    [NB],
  input  logic        wcp,
  input  logic [15:0] waddr [NB],
  input  edge_t       wdata [NB],
  input  logic        dma_re,
  input  logic        dma_we,
  input  logic        dma_cp,
  input  logic [23:0] dma_e,
  input  edge_t       dma_wdata [EPW],
  output edge_t       dma_rdata [EPW]
);
  edge_t q   [2][NB];
  logic  rcp_q, dcp_q;
  logic [LB-1:0] dbank_q;

  for (genvar c = 0; c < 2; c++) begin : g_c
    for (genvar b = 0; b < NB; b++) begin : g_b
      logic        r_en, w_en;
      logic [23:0] r_a, w_a;
      edge_t       w_d;
      logic [23:0] de, dd;
      edge_t       mem [DEPTH];
      always_comb begin
        // DMA edge that falls in this bank, if any
        de   = dma_e + 24'((b - int'(dma_e[LB-1:0]) + NB) % NB);
        dd   = de - dma_e;
        r_en = 1'b1;
        if (re && rcp == c) r_a = 24'(raddr);
        else if (dma_re && dma_cp == c && dd < 24'(EPW)) r_a = de >> LB;
        else begin r_a = '0; r_en = 1'b0; end
        w_en = 1'b1;
        if (we[b] && wcp == c) begin
          w_a = 24'(waddr[b]); w_d = wdata[b];
        end else if (dma_we && dma_cp == c && dd < 24'(EPW)) begin
          w_a = de >> LB;      w_d = dma_wdata[dd[$clog2(EPW)-1:0]];
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
    if (re) rcp_q <= rcp;
    if (dma_re) begin
      dcp_q   <= dma_cp;
      dbank_q <= dma_e[LB-1:0];
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) rdata[b] = q[rcp_q][b];
    for (int k = 0; k < EPW; k++) dma_rdata[k] = q[dcp_q][LB'(dbank_q + LB'(k))];
  end
endmodule
