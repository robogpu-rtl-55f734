// op_interconnect: crossbar between the OP units of RoboCore.
//
// Every packet names its destination port. Sources are the entry port (the
// ray collector, which starts intersection programs) and the output buffers
// of the OP units that forward packets; destinations are the input buffers of
// all OP units, including PUSH and RETURN. Each destination has a round-robin
// arbiter over the sources that request it and one output register, so a
// packet crosses the interconnect in one cycle and each destination receives
// at most one packet per cycle, while different destinations receive in
// parallel. A source is granted only when the destination register is empty
// or is being emptied in the same cycle. The round-robin policy and the
// single-cycle latency are this design's choices.
module op_interconnect
  import robocore_pkg::*;
#(
  parameter int NS = NSRC,
  parameter int ND = NDST
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NS-1:0] src_valid,
  output logic [NS-1:0] src_ready,
  input  pkt_t          src_pkt [NS],
  output logic [ND-1:0] dst_valid,
  input  logic [ND-1:0] dst_ready,
  output pkt_t          dst_pkt [ND]
);
  localparam int SW = (NS > 1) ? $clog2(NS) : 1;

  logic [SW-1:0] ptr   [ND];
  logic [SW-1:0] gnt   [ND];
  logic [ND-1:0] gnt_v;
  logic [ND-1:0] load;
  logic [31:0] si;   // source index under test in the search loop

  always_comb begin
    si = 0;
    for (int d = 0; d < ND; d++) begin
      gnt[d]   = '0;
      gnt_v[d] = 1'b0;
      // first requester at or after ptr[d]
      for (int k = 0; k < NS; k++) begin
        si = 32'((int'(ptr[d]) + k) % NS);
        if (!gnt_v[d] && src_valid[si] && int'(src_pkt[si].dest) == d) begin
          gnt_v[d] = 1'b1;
          gnt[d]   = SW'(si);
        end
      end
      load[d] = gnt_v[d] && (!dst_valid[d] || dst_ready[d]);
    end
    src_ready = '0;
    for (int d = 0; d < ND; d++)
      if (load[d]) src_ready[gnt[d]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst_valid <= '0;
      for (int d = 0; d < ND; d++) ptr[d] <= '0;
    end else begin
      for (int d = 0; d < ND; d++) begin
        if (load[d]) begin
          dst_valid[d] <= 1'b1;
          ptr[d]       <= (int'(gnt[d]) == NS - 1) ? '0 : gnt[d] + 1'b1;
        end else if (dst_ready[d]) begin
          dst_valid[d] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk)
    for (int d = 0; d < ND; d++) if (load[d]) dst_pkt[d] <= src_pkt[gnt[d]];

  // Every valid packet must name an existing port.
  for (genvar s = 0; s < NS; s++) begin : g_chk
    a_dest_range: assert property (@(posedge clk) disable iff (!rst_n)
      src_valid[s] |-> int'(src_pkt[s].dest) < ND);
  end

endmodule
