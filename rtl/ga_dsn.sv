// ga_dsn: Data Shuffle Network.
//
// Routes fetched feature vectors, with the edge that asked for them, from the
// P Feature Buffer banks to the ACK. UR pipeline u listens on output ports 2u
// and 2u+1. The destination port depends on the mode:
//   SpDMM : dst mod P       -> pipeline floor((dst mod P)/2), which owns the
//                              Feature Buffer banks of the destination vertex
//   SDDMM : 2*slot + half   -> both vectors of edge slot i meet in pipeline i
//   VADD  : dst mod P       -> the pipeline that owns the output row
// The SpDMM and SDDMM rules are the paper's; the vector-add rule is this
// design's choice. The packet fields used here (dst, slot, half) sit at the
// offsets given by the parameters. Network: buffered butterfly.
module ga_dsn
  import ga_pkg::*;
#(
  parameter int P       = 16,
  parameter int W       = 640,
  parameter int DST_LSB = 0,        // dst vertex index bits
  parameter int SLOT_LSB = 32,      // slot number bits (log2(P/2) wide)
  parameter int HALF_BIT = 40,
  localparam int LP = $clog2(P)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  ack_mode_e    mode,
  input  logic [P-1:0] in_valid,
  output logic [P-1:0] in_ready,
  input  logic [W-1:0] in_pkt [P],
  output logic [P-1:0] out_valid,
  input  logic [P-1:0] out_ready,
  output logic [W-1:0] out_pkt [P]
);
  logic [LP-1:0] dest [P];
  always_comb
    for (int i = 0; i < P; i++) begin
      if (mode == MODE_SDDMM)
        dest[i] = LP'({in_pkt[i][SLOT_LSB +: LP-1], in_pkt[i][HALF_BIT]});
      else
        dest[i] = in_pkt[i][DST_LSB +: LP];
    end

  ga_butterfly #(.N(P), .W(W)) u_net (
    .clk, .rst_n, .in_valid, .in_ready, .in_dest(dest), .in_data(in_pkt),
    .out_valid, .out_ready, .out_data(out_pkt)
  );
endmodule
