// ga_butterfly: N-port buffered butterfly network (N a power of 2).
//
// log2(N) stages of N/2 two-by-two switches (ga_bfly_switch), wired as in the
// paper's routing-network figure. Stage s pairs lines i and i ^ (N >> (s+1))
// and sends a packet to the line whose bit (log2N-1-s) equals that bit of the
// packet's destination, so after the last stage a packet sits on line dest.
// Packets carry their destination alongside the payload. The switch buffers
// absorb congestion; a full path back-pressures its input through in_ready.
// Latency with no congestion: 2 cycles per stage.
module ga_butterfly #(
  parameter int N = 16,
  parameter int W = 32,
  localparam int S = $clog2(N)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  logic [S-1:0] in_dest [N],
  input  logic [W-1:0] in_data [N],
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output logic [W-1:0] out_data [N]
);
  // line signals between stages; payload includes the destination
  wire [N-1:0]   lv [S+1];
  wire [N-1:0]   lr [S+1];
  wire [W+S-1:0] ld [S+1][N];

  assign lv[0]     = in_valid;
  assign in_ready  = lr[0];
  assign out_valid = lv[S];
  assign lr[S]     = out_ready;
  for (genvar i = 0; i < N; i++) begin : g_io
    assign ld[0][i]    = {in_dest[i], in_data[i]};
    assign out_data[i] = ld[S][i][W-1:0];
  end

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int D = N >> (s + 1);
    for (genvar k = 0; k < N / 2; k++) begin : g_sw
      // k-th pair of stage s: lower line lo has bit (S-1-s) clear
      localparam int LO = (k / D) * 2 * D + (k % D);
      localparam int HI = LO + D;
      logic [1:0]     iv, ir, isel, ov, orr;
      logic [W+S-1:0] idt [2];
      logic [W+S-1:0] odt [2];
      always_comb begin
        iv      = {lv[s][HI], lv[s][LO]};
        idt[0]  = ld[s][LO];
        idt[1]  = ld[s][HI];
        isel[0] = ld[s][LO][W + S - 1 - s];
        isel[1] = ld[s][HI][W + S - 1 - s];
        orr     = {lr[s+1][HI], lr[s+1][LO]};
      end
      assign lr[s][LO]   = ir[0];
      assign lr[s][HI]   = ir[1];
      assign lv[s+1][LO] = ov[0];
      assign lv[s+1][HI] = ov[1];
      assign ld[s+1][LO] = odt[0];
      assign ld[s+1][HI] = odt[1];
      ga_bfly_switch #(.W(W + S)) u_sw (
        .clk, .rst_n,
        .in_valid(iv), .in_ready(ir), .in_sel(isel), .in_data(idt),
        .out_valid(ov), .out_ready(orr), .out_data(odt)
      );
    end
  end
endmodule
