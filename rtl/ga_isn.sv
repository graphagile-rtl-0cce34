// ga_isn: Index Shuffle Network.
//
// Routes each index packet from one of the P input ports (fed by the Edge
// Buffer) to the Feature Buffer bank that holds the vertex: vertex i lives in
// bank (i mod P), so the destination is the low log2(P) bits of the linear
// feature row carried in the packet (bits [AW-1:0] of the payload). The
// network is the buffered butterfly (ga_butterfly); the output packet carries
// the row inside the bank (row >> log2 P) separately for the bank address.
// Port width and butterfly structure follow the paper; packing the row into
// the low payload bits is this design's choice.
module ga_isn #(
  parameter int P  = 16,
  parameter int W  = 160,               // whole packet, row in [AW-1:0]
  parameter int AW = 16,
  localparam int LP = $clog2(P)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [P-1:0]  in_valid,
  output logic [P-1:0]  in_ready,
  input  logic [W-1:0]  in_pkt [P],
  output logic [P-1:0]  out_valid,
  input  logic [P-1:0]  out_ready,
  output logic [W-1:0]  out_pkt  [P],
  output logic [AW-1:0] out_bank_row [P]
);
  logic [LP-1:0] dest [P];
  always_comb
    for (int i = 0; i < P; i++) begin
      dest[i]         = in_pkt[i][LP-1:0];
      out_bank_row[i] = AW'(out_pkt[i][AW-1:0] >> LP);
    end

  ga_butterfly #(.N(P), .W(W)) u_net (
    .clk, .rst_n, .in_valid, .in_ready, .in_dest(dest), .in_data(in_pkt),
    .out_valid, .out_ready, .out_data(out_pkt)
  );
endmodule
