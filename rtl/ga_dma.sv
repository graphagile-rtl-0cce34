// ga_dma: data loader and writer of one PE buffer (the Edge, Feature and
// Weight Loaders of the paper's PE figure are three instances).
//
// Executes one Memory Read/Write instruction: moves len DDR words between DDR
// word address dram_base and the buffer. A load issues read requests back to
// back (as many as the memory controller accepts) and writes each returning
// word to the buffer as word index n = 0..len-1 (the PE turns n into a buffer
// row). A store reads buffer word n (one-cycle read latency), sends it as a
// DDR write and waits for acceptance. done pulses when the last response has
// arrived or the last write was accepted; busy is high from the cycle after
// start until then. Memory port: valid/ready request, in-order read
// responses. The paper only says that each buffer has a loader and writer;
// the rest is this design's choice.
module ga_dma #(
  parameter int MW = 512
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          store,
  input  logic [31:0]   dram_base,
  input  logic [23:0]   len,
  output logic          busy,
  output logic          done,
  output logic          req_valid,
  input  logic          req_ready,
  output logic          req_we,
  output logic [31:0]   req_addr,
  output logic [MW-1:0] req_wdata,
  input  logic          resp_valid,
  input  logic [MW-1:0] resp_data,
  output logic          buf_we,
  output logic [23:0]   buf_widx,
  output logic [MW-1:0] buf_wdata,
  output logic          buf_re,
  output logic [23:0]   buf_ridx,
  input  logic [MW-1:0] buf_rdata
);
  typedef enum logic [1:0] { D_IDLE, D_LOAD, D_SRD, D_SWR } st_e;
  st_e st;
  logic [23:0] ni, nr, n;
  logic [31:0] base;

  always_comb begin
    busy      = st != D_IDLE;
    req_we    = (st == D_SWR);
    req_valid = (st == D_LOAD && ni < n) || st == D_SWR;
    req_addr  = base + 32'((st == D_LOAD) ? ni : nr);
    req_wdata = buf_rdata;
    buf_we    = (st == D_LOAD) && resp_valid;
    buf_widx  = nr;
    buf_wdata = resp_data;
    buf_re    = (st == D_SRD);
    buf_ridx  = nr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; done <= 1'b0; ni <= '0; nr <= '0; n <= '0; base <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (start) begin
          ni <= '0; nr <= '0; n <= len; base <= dram_base;
          if (len == 0) done <= 1'b1;
          else st <= store ? D_SRD : D_LOAD;
        end
        D_LOAD: begin
          if (req_valid && req_ready) ni <= ni + 1'b1;
          if (resp_valid) begin
            nr <= nr + 1'b1;
            if (nr + 1'b1 == n) begin st <= D_IDLE; done <= 1'b1; end
          end
        end
        D_SRD: st <= D_SWR;
        D_SWR: if (req_ready) begin
          nr <= nr + 1'b1;
          if (nr + 1'b1 == n) begin st <= D_IDLE; done <= 1'b1; end
          else st <= D_SRD;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
