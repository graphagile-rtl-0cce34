// ga_instr_queue: the PE's Instruction Queue, a FIFO of 128-bit high-level
// instructions written by the Scheduler and read by the decoder.
// First-word-fall-through FIFO: head is valid while not empty; a push when
// full is refused (push_ready low); push and pop may happen in the same
// cycle. The depth (64) is this design's choice; the paper gives none.
module ga_instr_queue #(
  parameter int DEPTH = 64,
  parameter int W     = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  output logic         push_ready,
  input  logic [W-1:0] din,
  output logic         head_valid,
  output logic [W-1:0] head,
  input  logic         pop,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic do_push, do_pop;

  always_comb begin
    push_ready = count != (AW+1)'(DEPTH);
    head_valid = count != '0;
    head       = mem[rp];
    do_push    = push && push_ready;
    do_pop     = pop && head_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) begin mem[wp] <= din; wp <= wp + 1'b1; end
      if (do_pop) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (AW+1)'(DEPTH));
endmodule
