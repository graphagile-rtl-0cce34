// ga_act_unit: the PE's Activation Unit, P Activation Elements side by side.
//
// Runs one post-processing instruction (exp, sigmoid or element-wise
// division) over nrows linear rows of a Feature Buffer copy starting at
// linear row base, in place. Each cycle it reads one row (P words: bank
// L mod P, bank row L / P, through the buffer's R0 port of that bank); one
// cycle later the P elements compute and the row is written back through
// the W0 port of the same bank. One row per cycle, done pulses one cycle
// after the last write (busy for nrows + 2 cycles). The paper gives the 16
// elements; the row-per-cycle schedule and the in-place update are this
// design's choices.
module ga_act_unit
  import ga_pkg::*;
#(
  parameter int P = 16,
  localparam int LP = $clog2(P)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1:0]    copy,
  input  logic [15:0]   base,
  input  logic [23:0]   nrows,
  input  act_fn_e       fn,
  input  word_t         divisor,
  output logic          busy,
  output logic          done,
  // Feature Buffer
  output logic          rd_en,
  output logic [LP-1:0] rd_bank,
  output logic [15:0]   rd_row,
  input  word_t         rdata [P][P],
  output logic          wr_en,
  output logic [LP-1:0] wr_bank,
  output logic [15:0]   wr_row,
  output word_t         wr_data [P],
  output logic [1:0]    cp
);
  logic [23:0] n, cnt;
  logic [15:0] b;
  act_fn_e     f;
  word_t       dv;
  logic        s1_v;
  logic [15:0] s1_l;
  logic [15:0] lrow;

  always_comb begin
    lrow    = b + cnt[15:0];
    rd_en   = busy && cnt < n;
    rd_bank = lrow[LP-1:0];
    rd_row  = lrow >> LP;
    wr_en   = s1_v;
    wr_bank = s1_l[LP-1:0];
    wr_row  = s1_l >> LP;
  end

  for (genvar k = 0; k < P; k++) begin : g_ae
    ga_act_elem u_ae (.fn(f), .x(rdata[wr_bank][k]), .d(dv), .y(wr_data[k]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; n <= '0; cnt <= '0; b <= '0; f <= ACT_EXP;
      dv <= '0; s1_v <= 1'b0; s1_l <= '0; cp <= '0;
    end else begin
      done <= 1'b0;
      s1_v <= rd_en;
      s1_l <= lrow;
      if (!busy && start) begin
        busy <= 1'b1; n <= nrows; cnt <= '0; b <= base; f <= fn; dv <= divisor; cp <= copy;
      end else if (busy) begin
        if (rd_en) cnt <= cnt + 1'b1;
        if (!rd_en && !s1_v) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
