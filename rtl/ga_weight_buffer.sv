// ga_weight_buffer: the PE's Weight Buffer.
//
// N_W x P words (16384 x 16 at full size, 1 MB), as the paper gives it, split
// into two copies of N_W/2 rows for double buffering (the split is this
// design's choice). Row r of a copy holds P consecutive columns of one row of
// a weight tile, so one read feeds the P columns of the systolic array in a
// cycle; in the paper's terms the Weight Buffer has P banks, one per word.
// Ports: one synchronous read (data next cycle, held until the next read)
// and one write, used by the Weight Loader.
module ga_weight_buffer
  import ga_pkg::*;
#(
  parameter int P     = 16,
  parameter int DEPTH = 256
) (
  input  logic        clk,
  input  logic        re,
  input  logic        rcp,
  input  logic [15:0] raddr,
  output word_t       rdata [P],
  input  logic        we,
  input  logic        wcp,
  input  logic [15:0] waddr,
  input  word_t       wdata [P]
);
  localparam int AW = $clog2(DEPTH);
  logic [P*DW-1:0] mem [2*DEPTH];
  logic [P*DW-1:0] q;
  logic [P*DW-1:0] wd;

  always_comb
    for (int k = 0; k < P; k++) wd[k*DW +: DW] = wdata[k];

  always_ff @(posedge clk) begin
    if (re) q <= mem[{rcp, raddr[AW-1:0]}];
    if (we) mem[{wcp, waddr[AW-1:0]}] <= wd;
  end

  always_comb
    for (int k = 0; k < P; k++) rdata[k] = q[k*DW +: DW];
endmodule
