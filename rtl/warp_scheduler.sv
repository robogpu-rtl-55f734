// warp_scheduler: picks, each cycle, the thread whose next tree node is fetched.
//
// Input is the set of threads that are ready to fetch (traversal stack not
// empty, no node fetch or child test outstanding, query not finished). When
// enabled (the memory access queue has room) the scheduler grants one thread:
// warps are served round-robin starting after the warp granted last, and
// inside a warp the lowest-numbered ready lane wins. The grant is
// combinational; the round-robin pointer moves on a grant. Selecting one warp
// per cycle follows the RoboCore/RTA description; the round-robin order and
// one node fetch per cycle are this design's choices.
module warp_scheduler
  import robocore_pkg::*;
#(
  parameter int WARPS = NWARPS,
  parameter int LANES = NLANES
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         enable,
  input  logic [WARPS-1:0][LANES-1:0]  ready,
  output logic                         gnt_valid,
  output logic [WARP_W-1:0]            gnt_warp,
  output logic [LANE_W-1:0]            gnt_lane
);
  logic [WARP_W-1:0] last;
  logic [31:0] w;   // warp index under test in the search loop

  always_comb begin
    w = 0;
    gnt_valid = 1'b0;
    gnt_warp  = '0;
    gnt_lane  = '0;
    for (int k = 1; k <= WARPS; k++) begin
      w = 32'((int'(last) + k) % WARPS);
      if (!gnt_valid && enable && (ready[w] != '0)) begin
        gnt_valid = 1'b1;
        gnt_warp  = WARP_W'(w);
        for (int l = LANES - 1; l >= 0; l--)
          if (ready[w][l]) gnt_lane = LANE_W'(l);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         last <= WARP_W'(WARPS - 1);
    else if (gnt_valid) last <= gnt_warp;
  end

endmodule
