// ga_ack: Adaptive Computation Kernel, a P x P array of ALUs whose wiring
// depends on the execution mode.
//
// The array is split into P/2 UR pipelines (ga_ur_pipeline); pipeline u owns
// rows 2u and 2u+1: its Update Unit is columns 0..P/2-1 and its Reduce Unit
// columns P/2..P-1 of those two rows, as in the paper's ACK figure.
//
// GEMM mode: the same P*P ALUs form an output-stationary systolic array.
// Each cycle with gm_valid the ACK takes one column of the feature tile
// (gm_feat[r] = H[row r][k]) and one row of the weight tile
// (gm_wgt[c] = W[k][col c]). Row r is delayed r cycles and column c is
// delayed c cycles at the array edge; operands then move one ALU right
// (features) or down (weights) per cycle and every ALU multiply-accumulates.
// The last product lands 2P-2 cycles after the last input. gm_clr zeroes the
// accumulators; with gm_rd high the ALUs show their sums (after the optional
// ReLU/PReLU in gm_post) on gm_out[r][c] = H_out[r][c].
// SpDMM / SDDMM / vector-add: packets from the DSN go to the pipelines;
// DSN port q feeds pipeline q/2. Feature and Edge Buffer ports of every
// pipeline are brought out for the PE to connect.
// Mode switching costs one cycle; the PE's decoder inserts that cycle.
module ga_ack
  import ga_pkg::*;
#(
  parameter int P = 8,
  localparam int NU = P / 2,
  localparam int WD = 137 + P*DW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ack_mode_e     mode,
  input  red_e          red_op,
  input  post_e         post,
  input  word_t         alpha,
  input  logic          accum,
  input  logic [15:0]   out_base,
  // GEMM stream
  input  logic          gm_valid,
  input  word_t         gm_feat [P],
  input  word_t         gm_wgt  [P],
  input  logic          gm_clr,
  input  logic          gm_rd,
  input  post_e         gm_post,
  output word_t         gm_out  [P][P],
  // DSN side
  input  logic [P-1:0]  in_valid,
  output logic [P-1:0]  in_ready,
  input  logic [WD-1:0] in_pkt [P],
  // per-pipeline buffer ports
  output logic          fb_re    [NU],
  output logic          fb_re_hi [NU],
  output logic [15:0]   fb_raddr [NU],
  input  word_t         fb_rdata [NU][P],
  output logic          fb_we    [NU],
  output logic          fb_we_hi [NU],
  output logic [15:0]   fb_waddr [NU],
  output word_t         fb_wdata [NU][P],
  output logic          eb_we    [NU],
  output logic [15:0]   eb_waddr [NU],
  output edge_t         eb_wdata [NU],
  output logic [NU-1:0] done,
  output logic [NU-1:0] raw_hazard
);
  // systolic operand registers and edge skew chains
  word_t ar [P][P];
  word_t br [P][P];
  logic  vr [P][P];
  word_t a_sk [P][P];      // a_sk[r][d]: feature of row r delayed d+1 cycles
  word_t b_sk [P][P];
  logic  v_sk [P][P];
  word_t sa [P][P];        // operand seen by ALU (r,c)
  word_t sb [P][P];
  logic  sv [P][P];

  always_comb
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        if (c == 0) begin
          sa[r][c] = (r == 0) ? gm_feat[0] : a_sk[r][r-1];
          sv[r][c] = (r == 0) ? gm_valid   : v_sk[r][r-1];
        end else begin
          sa[r][c] = ar[r][c-1];
          sv[r][c] = vr[r][c-1];
        end
        if (r == 0) sb[r][c] = (c == 0) ? gm_wgt[0] : b_sk[c][c-1];
        else        sb[r][c] = br[r-1][c];
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++) begin
          vr[r][c] <= 1'b0; v_sk[r][c] <= 1'b0;
        end
    end else begin
      for (int r = 0; r < P; r++) begin
        for (int d = 0; d < P; d++) begin
          a_sk[r][d] <= (d == 0) ? gm_feat[r] : a_sk[r][d-1];
          b_sk[r][d] <= (d == 0) ? gm_wgt[r]  : b_sk[r][d-1];
          v_sk[r][d] <= (d == 0) ? gm_valid   : v_sk[r][d-1];
        end
        for (int c = 0; c < P; c++) begin
          ar[r][c] <= sa[r][c];
          br[r][c] <= sb[r][c];
          vr[r][c] <= sv[r][c] && mode == MODE_GEMM;
        end
      end
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_ur
    word_t gma [2*P];
    word_t gmb [2*P];
    logic  gme [2*P];
    word_t gmy [2*P];
    // ALU n of pipeline u sits at row 2u + (n mod P)/(P/2),
    // column (n mod P) mod (P/2) + (n >= P ? P/2 : 0)
    for (genvar n = 0; n < 2*P; n++) begin : g_map
      localparam int R = 2*u + (n % P) / (P/2);
      localparam int C = (n % P) % (P/2) + ((n >= P) ? P/2 : 0);
      assign gma[n] = sa[R][C];
      assign gmb[n] = sb[R][C];
      assign gme[n] = sv[R][C];
      assign gm_out[R][C] = gmy[n];
    end
    ga_ur_pipeline #(.P(P), .U(u)) u_pipe (
      .clk, .rst_n, .mode, .red_op, .post, .alpha, .accum, .out_base,
      .in_valid(in_valid[2*u +: 2]), .in_ready(in_ready[2*u +: 2]),
      .in_pkt(in_pkt[2*u +: 2]),
      .fb_re(fb_re[u]), .fb_re_hi(fb_re_hi[u]), .fb_raddr(fb_raddr[u]),
      .fb_rdata(fb_rdata[u]),
      .fb_we(fb_we[u]), .fb_we_hi(fb_we_hi[u]), .fb_waddr(fb_waddr[u]),
      .fb_wdata(fb_wdata[u]),
      .eb_we(eb_we[u]), .eb_waddr(eb_waddr[u]), .eb_wdata(eb_wdata[u]),
      .done(done[u]), .raw_hazard(raw_hazard[u]),
      .gm_a(gma), .gm_b(gmb), .gm_acc_en(gme), .gm_clr, .gm_rd, .gm_post,
      .gm_y(gmy)
    );
  end
endmodule
