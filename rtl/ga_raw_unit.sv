// ga_raw_unit: read-after-write hazard unit in front of a Reduce Unit.
//
// As in the paper's RAW Unit figure: a RAW detector compares the destination
// of a candidate update with the destination the Reduce Unit is writing
// (busy_valid/busy_key), a small Reorder Buffer (FIFO) keeps updates that
// would read a stale value, and a mux sends either the FIFO head or the new
// input to the Reduce Unit. The head of the FIFO goes first when it is free
// of a hazard; otherwise a hazard-free input bypasses the FIFO; anything that
// cannot go is queued. Reductions are commutative, so reordering is safe.
// in_ready is low only while the FIFO is full. out has no back-pressure: the
// Reduce Unit takes one update per cycle. FIFO depth is this design's choice.
module ga_raw_unit #(
  parameter int W     = 64,          // payload, key in [KW-1:0]
  parameter int KW    = 16,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  input  logic         busy_valid,
  input  logic [KW-1:0] busy_key,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  output logic         hazard        // an input was queued because of RAW
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] q [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   cnt;
  logic head_ok, in_ok, pop, push;

  always_comb begin
    head_ok   = (cnt != 0) && !(busy_valid && q[rd][KW-1:0] == busy_key);
    in_ok     = in_valid && !(busy_valid && in_data[KW-1:0] == busy_key);
    in_ready  = (cnt != (AW+1)'(DEPTH));
    pop       = head_ok;
    out_valid = head_ok || (in_ok && in_ready);
    out_data  = head_ok ? q[rd] : in_data;
    push      = in_valid && in_ready && (head_ok || !in_ok);
    hazard    = in_valid && in_ready && !in_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
    end else begin
      if (push) begin
        q[wr] <= in_data;
        wr    <= wr + 1'b1;
      end
      if (pop) rd <= rd + 1'b1;
      cnt <= cnt + (push ? 1 : 0) - (pop ? 1 : 0);
    end
  end
endmodule
