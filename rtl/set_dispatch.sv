// set_dispatch: hands each new intersection packet to one of NSETS sets of
// OP units, and limits how many tests each set holds.
//
// The sets are tried round-robin, starting after the set that took the last
// packet; a set is eligible when it holds fewer than MAX_INFLIGHT tests. The
// packet is offered to the chosen set and passes when that set's entry port
// is ready (the entry port's ready depends on its valid, so the choice cannot
// wait for ready). The count of a set goes up when it takes a packet
// and down by its leave count (packets delivered to its PUSH or RETURN unit).
// The per-set limit keeps the packets inside one set below what its
// bounded buffers can hold: an intersection program loops between the
// collision unit and CMP, and a loop whose buffers fill completely stops.
//
// Interface: in_valid/in_ready/in_pkt from the ray collector (valid/ready);
// out_valid/out_ready/out_pkt, one entry port per set. The choice is
// combinational: a packet passes in the cycle it is offered. out_pkt is the
// input packet wired to every set (only out_valid differs), so those outputs
// are plain copies of in_pkt. Spreading work
// over several sets follows the multiple sets of intersection units of the
// RoboCore configuration; the round-robin order and the per-set limit are
// this design's choices.
module set_dispatch
  import robocore_pkg::*;
#(
  parameter int NSETS        = 4,
  parameter int MAX_INFLIGHT = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  pkt_t                  in_pkt,
  output logic [NSETS-1:0]      out_valid,
  input  logic [NSETS-1:0]      out_ready,
  output pkt_t                  out_pkt [NSETS],
  input  logic [NSETS-1:0][1:0] leave
);
  localparam int IW = $clog2(MAX_INFLIGHT + 1);
  localparam int SW = (NSETS > 1) ? $clog2(NSETS) : 1;

  logic [IW-1:0]    cnt [NSETS];
  logic [SW-1:0]    last;
  logic [NSETS-1:0] elig;
  logic             sel_v;
  logic [SW-1:0]    sel;
  logic [31:0]      si;   // set index under test in the search loop

  always_comb begin
    for (int s = 0; s < NSETS; s++)
      elig[s] = (cnt[s] < IW'(MAX_INFLIGHT));
    sel_v = 1'b0;
    sel   = '0;
    si    = 0;
    for (int k = 1; k <= NSETS; k++) begin
      si = 32'((int'(last) + k) % NSETS);
      if (!sel_v && elig[si]) begin
        sel_v = 1'b1;
        sel   = SW'(si);
      end
    end
  end

  assign in_ready = sel_v && out_ready[sel];
  for (genvar s = 0; s < NSETS; s++) begin : g_out
    assign out_valid[s] = in_valid && sel_v && (int'(sel) == s);
    assign out_pkt[s]   = in_pkt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= SW'(NSETS - 1);
      for (int s = 0; s < NSETS; s++) cnt[s] <= '0;
    end else begin
      if (in_valid && in_ready) last <= sel;
      for (int s = 0; s < NSETS; s++)
        cnt[s] <= cnt[s] + IW'(out_valid[s] && out_ready[s]) - IW'(leave[s]);
    end
  end

endmodule
