// ga_mem_ctrl: Memory Controller between the requesters on the chip (the
// Scheduler's instruction fetch and every PE loader/writer) and the DDR port.
//
// Round-robin arbitration grants one request per cycle when the DDR port is
// ready. For a read, the requester number is queued in a tag FIFO; DDR read
// responses come back in order and go to the requester at the head of that
// FIFO. Reads are held back while the tag FIFO is full. The word is one DDR
// word (P x 32 bits). The paper only names this block; its design here is
// this design's choice.
module ga_mem_ctrl #(
  parameter int NREQ = 25,
  parameter int MW   = 512,
  parameter int TAGS = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid [NREQ],
  output logic          req_ready [NREQ],
  input  logic          req_we    [NREQ],
  input  logic [31:0]   req_addr  [NREQ],
  input  logic [MW-1:0] req_wdata [NREQ],
  output logic          resp_valid[NREQ],
  output logic [MW-1:0] resp_data,
  output logic          ddr_valid,
  input  logic          ddr_ready,
  output logic          ddr_we,
  output logic [31:0]   ddr_addr,
  output logic [MW-1:0] ddr_wdata,
  input  logic          ddr_rvalid,
  input  logic [MW-1:0] ddr_rdata
);
  localparam int IW = (NREQ > 1) ? $clog2(NREQ) : 1;
  localparam int TW = $clog2(TAGS);
  logic [IW-1:0] last, gnt;
  logic          any;
  logic [IW-1:0] tag [TAGS];
  logic [TW-1:0] trp, twp;
  logic [TW:0]   tcnt;
  logic          tfull, push, pop;
  int            idx;

  always_comb begin
    any = 1'b0; gnt = '0; idx = 0;
    for (int k = 1; k <= NREQ; k++) begin
      idx = (int'(last) + k) % NREQ;
      if (!any && req_valid[idx]) begin any = 1'b1; gnt = IW'(idx); end
    end
    tfull     = tcnt == (TW+1)'(TAGS);
    ddr_valid = any && !(tfull && !req_we[gnt]);
    ddr_we    = req_we[gnt];
    ddr_addr  = req_addr[gnt];
    ddr_wdata = req_wdata[gnt];
    for (int r = 0; r < NREQ; r++) begin
      req_ready[r]  = ddr_valid && ddr_ready && gnt == IW'(r);
      resp_valid[r] = ddr_rvalid && tcnt != 0 && tag[trp] == IW'(r);
    end
    resp_data = ddr_rdata;
    push = ddr_valid && ddr_ready && !ddr_we;
    pop  = ddr_rvalid && tcnt != 0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= '0; trp <= '0; twp <= '0; tcnt <= '0;
    end else begin
      if (ddr_valid && ddr_ready) last <= gnt;
      if (push) begin tag[twp] <= gnt; twp <= twp + 1'b1; end
      if (pop) trp <= trp + 1'b1;
      tcnt <= tcnt + (TW+1)'(push) - (TW+1)'(pop);
    end
  end
endmodule
