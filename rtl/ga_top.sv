// ga_top: the GNN overlay accelerator: Scheduler, NPE Processing Elements
// and the Memory Controller in front of one DDR port.
//
// The host writes the instruction binary and the graph data into DDR, sets
// prog_base (DDR word address of the binary) and pulses start; done rises
// when the Scheduler has reached HALT and every PE is idle. The DDR port is
// a plain request/response port: one request per cycle (valid/ready), read
// data returned in request order with ddr_rvalid. Word width P x 32 bits.
// Memory controller requesters: 0 = Scheduler, 1 + 3p + t = loader/writer t
// (0 feature, 1 weight, 2 edge) of PE p.
// The paper's implementation has 8 PEs (two per SLR of an Alveo U250) with
// p_sys = 16 at 300 MHz and four DDR channels; this model has one DDR port
// (the four channels, the FPGA shell and the host are outside the RTL).
// Counters of each PE and of the Scheduler are brought out for monitoring.
module ga_top
  import ga_pkg::*;
#(
  parameter int NPE      = 2,
  parameter int P        = 8,
  parameter int FB_DEPTH = 64,
  parameter int WB_DEPTH = 256,
  parameter int EB_DEPTH = 256,
  parameter int IQ_DEPTH = 64,
  localparam int MW   = P * DW,
  localparam int NREQ = 1 + 3 * NPE
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [31:0]   prog_base,
  output logic          done,
  // DDR port
  output logic          ddr_valid,
  input  logic          ddr_ready,
  output logic          ddr_we,
  output logic [31:0]   ddr_addr,
  output logic [MW-1:0] ddr_wdata,
  input  logic          ddr_rvalid,
  input  logic [MW-1:0] ddr_rdata,
  // monitoring
  output logic          pe_idle       [NPE],
  output logic [31:0]   n_assign      [NPE],
  output logic [31:0]   n_mutex_stall [NPE],
  output logic [31:0]   n_mode_switch [NPE],
  output logic [31:0]   n_raw         [NPE],
  output logic [31:0]   n_congest     [NPE],
  output logic [31:0]   n_issued      [NPE],
  output logic [31:0]   n_tb          [NPE],
  output logic [31:0]   n_barrier,
  output logic [31:0]   n_wait_pe,
  output logic [31:0]   n_barrier_cycles
);
  logic          req_valid [NREQ], req_ready [NREQ], req_we [NREQ], resp_valid [NREQ];
  logic [31:0]   req_addr  [NREQ];
  logic [MW-1:0] req_wdata [NREQ];
  logic [MW-1:0] resp_data;

  logic          pe_push [NPE], pe_ready [NPE];
  logic [127:0]  pe_din;
  logic          s_busy;

  ga_scheduler #(.NPE(NPE), .MW(MW)) u_sched (
    .clk, .rst_n, .start, .prog_base, .done, .busy(s_busy),
    .req_valid(req_valid[0]), .req_ready(req_ready[0]), .req_addr(req_addr[0]),
    .resp_valid(resp_valid[0]), .resp_data,
    .pe_push, .pe_ready, .pe_din, .pe_idle,
    .n_assign, .n_barrier, .n_wait_pe, .n_barrier_cycles);

  always_comb begin
    req_we[0]    = 1'b0;
    req_wdata[0] = '0;
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic          mv [3], mr [3], mw [3], rv [3];
    logic [31:0]   ma [3];
    logic [MW-1:0] md [3];
    ga_pe #(.P(P), .FB_DEPTH(FB_DEPTH), .WB_DEPTH(WB_DEPTH), .EB_DEPTH(EB_DEPTH),
            .IQ_DEPTH(IQ_DEPTH)) u_pe (
      .clk, .rst_n, .iq_push(pe_push[p]), .iq_ready(pe_ready[p]), .iq_din(pe_din),
      .idle(pe_idle[p]),
      .mreq_valid(mv), .mreq_ready(mr), .mreq_we(mw), .mreq_addr(ma), .mreq_wdata(md),
      .mresp_valid(rv), .mresp_data(resp_data),
      .n_mutex_stall(n_mutex_stall[p]), .n_mode_switch(n_mode_switch[p]),
      .n_raw(n_raw[p]), .n_congest(n_congest[p]), .n_issued(n_issued[p]), .n_tb(n_tb[p]));
    for (genvar t = 0; t < 3; t++) begin : g_port
      assign req_valid[1 + 3*p + t] = mv[t];
      assign req_we   [1 + 3*p + t] = mw[t];
      assign req_addr [1 + 3*p + t] = ma[t];
      assign req_wdata[1 + 3*p + t] = md[t];
      assign mr[t] = req_ready[1 + 3*p + t];
      assign rv[t] = resp_valid[1 + 3*p + t];
    end
  end

  ga_mem_ctrl #(.NREQ(NREQ), .MW(MW), .TAGS(64)) u_mc (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
    .resp_valid, .resp_data,
    .ddr_valid, .ddr_ready, .ddr_we, .ddr_addr, .ddr_wdata, .ddr_rvalid, .ddr_rdata);
endmodule
