// ga_ddr_model: behavioural model of the FPGA's local DDR memory for the
// testbenches (not synthesisable; the real memory is outside the design).
//
// Word-addressed memory of MW-bit words held in an associative array (unset
// words read as zero). One request per cycle on a valid/ready port; ready is
// high READY_PCT percent of the cycles (pseudo-random). Writes take effect
// at once; reads return in request order exactly LAT cycles after the
// request was accepted. Testbenches fill and inspect the memory through the
// put() and get() functions.
module ga_ddr_model #(
  parameter int MW        = 512,
  parameter int LAT       = 20,
  parameter int READY_PCT = 100
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          valid,
  output logic          ready,
  input  logic          we,
  input  logic [31:0]   addr,
  input  logic [MW-1:0] wdata,
  output logic          rvalid,
  output logic [MW-1:0] rdata
);
  logic [MW-1:0] mem [int unsigned];
  logic [MW-1:0] q_data [$];
  longint        q_time [$];
  longint        cyc;
  int unsigned   n_reads, n_writes;

  function automatic void put(int unsigned a, logic [MW-1:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [MW-1:0] get(int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready <= 1'b0; rvalid <= 1'b0; rdata <= '0; cyc <= 0; n_reads <= 0; n_writes <= 0;
      q_data.delete(); q_time.delete();
    end else begin
      cyc   <= cyc + 1;
      ready <= ($urandom_range(99) < READY_PCT);
      if (valid && ready) begin
        if (we) begin
          mem[addr] = wdata;
          n_writes <= n_writes + 1;
        end else begin
          q_data.push_back(get(addr));
          q_time.push_back(cyc + LAT);
          n_reads <= n_reads + 1;
        end
      end
      rvalid <= 1'b0;
      if (q_time.size() > 0 && q_time[0] <= cyc) begin
        rvalid <= 1'b1;
        rdata  <= q_data.pop_front();
        void'(q_time.pop_front());
      end
    end
  end
endmodule
