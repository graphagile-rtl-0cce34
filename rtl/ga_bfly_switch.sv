// ga_bfly_switch: 2x2 buffered switch of the butterfly routing network.
//
// As drawn in the paper's switch figure, each input goes through a demux into
// one of two buffers (one per output), each output has a mux over the two
// buffers that target it and then an output buffer. Every buffer here holds
// one packet; the mux alternates between its two buffers when both are
// full (round robin). A packet's output is given by the input's sel bit.
// Handshake: valid/ready on every port; a buffer accepts a packet when it is
// empty or is being emptied in the same cycle.
module ga_bfly_switch #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [1:0]   in_valid,
  output logic [1:0]   in_ready,
  input  logic [1:0]   in_sel,
  input  logic [W-1:0] in_data [2],
  output logic [1:0]   out_valid,
  input  logic [1:0]   out_ready,
  output logic [W-1:0] out_data [2]
);
  logic         bv [2][2];        // bv[in][out]
  logic [W-1:0] bd [2][2];
  logic [W-1:0] od [2];
  logic [1:0]   ov;
  logic [1:0]   rr;               // round-robin pointer per output
  logic [1:0]   take_o;           // output buffer loads this cycle
  logic         from1 [2];        // output o takes from input 1's buffer
  logic         drain [2][2];

  always_comb begin
    for (int o = 0; o < 2; o++) begin
      take_o[o] = (!ov[o] || out_ready[o]) && (bv[0][o] || bv[1][o]);
      from1[o]  = bv[1][o] && (!bv[0][o] || rr[o]);
      for (int i = 0; i < 2; i++)
        drain[i][o] = take_o[o] && (from1[o] == (i == 1));
    end
    for (int i = 0; i < 2; i++)
      in_ready[i] = !bv[i][in_sel[i]] || drain[i][in_sel[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) for (int o = 0; o < 2; o++) bv[i][o] <= 1'b0;
      ov <= '0;
      rr <= '0;
    end else begin
      for (int o = 0; o < 2; o++) begin
        if (take_o[o]) begin
          ov[o] <= 1'b1;
          od[o] <= bd[from1[o] ? 1 : 0][o];
          if (bv[0][o] && bv[1][o]) rr[o] <= !from1[o];
        end else if (out_ready[o]) begin
          ov[o] <= 1'b0;
        end
      end
      for (int i = 0; i < 2; i++)
        for (int o = 0; o < 2; o++) begin
          if (in_valid[i] && in_ready[i] && in_sel[i] == o[0]) begin
            bv[i][o] <= 1'b1;
            bd[i][o] <= in_data[i];
          end else if (drain[i][o]) begin
            bv[i][o] <= 1'b0;
          end
        end
    end
  end

  always_comb begin
    out_valid = ov;
    out_data  = od;
  end
endmodule
