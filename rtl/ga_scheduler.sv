// ga_scheduler: the Scheduler of the overlay (dynamic load balancing).
//
// Reads the instruction binary from DDR (four 128-bit instructions per
// 512-bit DDR word, the first in the low bits) starting at word prog_base.
// The binary is a sequence of Layer Blocks, each opened by a CSI that gives
// num_of_tiling_block, followed by that many Tiling Blocks; every Tiling
// Block ends with TB_END. HALT ends the program.
// For each Tiling Block the Scheduler takes the lowest-numbered idle PE
// (1-bit idle status of every PE) and streams the block's instructions into
// that PE's Instruction Queue, waiting when the queue is full. When all
// Tiling Blocks of a Layer Block have been sent it waits until every PE is
// idle (the layer barrier: the next layer needs the whole output of this
// one), then reads the next CSI. done is raised after HALT once all PEs are
// idle. The fetch uses one outstanding DDR read; a word's four instructions
// are handled one per cycle.
// The paper gives the CSI, the idle-status assignment and the per-layer
// wait; the fetch scheme and instruction packing are this design's choices.
// Counters: tiling blocks given to each PE, layer barriers, cycles spent
// waiting for an idle PE and cycles spent at barriers.
module ga_scheduler
  import ga_pkg::*;
#(
  parameter int NPE = 8,
  parameter int MW  = 512,
  localparam int IPW = MW / 128,
  localparam int PW  = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   prog_base,
  output logic          done,
  output logic          busy,
  // instruction fetch
  output logic          req_valid,
  input  logic          req_ready,
  output logic [31:0]   req_addr,
  input  logic          resp_valid,
  input  logic [MW-1:0] resp_data,
  // PEs
  output logic          pe_push  [NPE],
  input  logic          pe_ready [NPE],
  output logic [127:0]  pe_din,
  input  logic          pe_idle  [NPE],
  // counters
  output logic [31:0]   n_assign [NPE],
  output logic [31:0]   n_barrier,
  output logic [31:0]   n_wait_pe,
  output logic [31:0]   n_barrier_cycles
);
  typedef enum logic [2:0] { S_IDLE, S_REQ, S_RESP, S_EXEC, S_BARRIER, S_HALT } st_e;
  st_e           st;
  logic [31:0]   pc;                 // instruction index
  logic [MW-1:0] word;
  logic [23:0]   tb_left;
  logic          have_pe;
  logic [PW-1:0] cur;
  logic [127:0]  ins;
  logic          all_idle, any_idle;
  logic [PW-1:0] pick;

  always_comb begin
    ins      = word[int'(pc % IPW) * 128 +: 128];
    all_idle = 1'b1; any_idle = 1'b0; pick = '0;
    for (int p = NPE - 1; p >= 0; p--) begin
      if (!pe_idle[p]) all_idle = 1'b0;
      if (pe_idle[p]) begin any_idle = 1'b1; pick = PW'(p); end
    end
    req_valid = st == S_REQ;
    req_addr  = prog_base + pc / IPW;
    pe_din    = ins;
    for (int p = 0; p < NPE; p++)
      pe_push[p] = st == S_EXEC && have_pe && cur == PW'(p) &&
                   i_op(ins) != OP_CSI && i_op(ins) != OP_HALT;
    busy = st != S_IDLE;
  end

  logic pushed;
  always_comb pushed = pe_push[cur] && pe_ready[cur];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pc <= '0; word <= '0; tb_left <= '0; have_pe <= 1'b0;
      cur <= '0; done <= 1'b0; n_barrier <= '0; n_wait_pe <= '0; n_barrier_cycles <= '0;
      for (int p = 0; p < NPE; p++) n_assign[p] <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin st <= S_REQ; pc <= '0; done <= 1'b0; have_pe <= 1'b0; end
        S_REQ:  if (req_ready) st <= S_RESP;
        S_RESP: if (resp_valid) begin word <= resp_data; st <= S_EXEC; end
        S_EXEC: begin
          if (i_op(ins) == OP_CSI) begin
            tb_left <= i_ntb(ins);
            pc <= pc + 1;
            st <= (i_ntb(ins) == 0) ? S_BARRIER : ((pc % IPW == IPW - 1) ? S_REQ : S_EXEC);
          end else if (i_op(ins) == OP_HALT) begin
            st <= S_HALT;
          end else if (!have_pe) begin
            if (any_idle) begin
              have_pe <= 1'b1; cur <= pick;
              n_assign[pick] <= n_assign[pick] + 1;
            end else n_wait_pe <= n_wait_pe + 1;
          end else if (pushed) begin
            pc <= pc + 1;
            if (i_op(ins) == OP_TB_END) begin
              have_pe <= 1'b0;
              tb_left <= tb_left - 1'b1;
              if (tb_left == 1) st <= S_BARRIER;
              else if (pc % IPW == IPW - 1) st <= S_REQ;
            end else if (pc % IPW == IPW - 1) st <= S_REQ;
          end
        end
        S_BARRIER: begin
          n_barrier_cycles <= n_barrier_cycles + 1;
          // the PE that got the last block turns busy one cycle after the push
          if (all_idle && !pe_push[cur]) begin
            n_barrier <= n_barrier + 1;
            st <= (pc % IPW == 0) ? S_REQ : S_EXEC;
          end
        end
        S_HALT: if (all_idle) begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
