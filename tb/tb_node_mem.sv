// tb_node_mem: behavioural model of the L1 data path seen by RoboCore's node
// fetch port (not a design block: the cache hierarchy belongs to the GPU).
// Requests are accepted unless the model randomly refuses (back-pressure),
// wait LAT_MIN..LAT_MAX cycles and return, possibly out of order, the node
// word from robocore_tb_pkg::node_mem. At most OUTS requests are in flight.
module tb_node_mem
  import robocore_pkg::*;
#(
  parameter int LAT_MIN = 20,
  parameter int LAT_MAX = 40,
  parameter int OUTS    = 16,
  parameter int STALL_PCT = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic [ADDR_W-1:0]        req_addr,
  input  logic [WARP_W+LANE_W-1:0] req_tag,
  output logic                     rsp_valid,
  input  logic                     rsp_ready,
  output logic [WARP_W+LANE_W-1:0] rsp_tag,
  output logic [NODE_W-1:0]        rsp_data
);
  int          due  [OUTS];
  logic        used [OUTS];
  logic [ADDR_W-1:0] addr [OUTS];
  logic [WARP_W+LANE_W-1:0] tag [OUTS];
  int          now;
  int          nused, pick, freei;
  logic        stall;

  always_comb begin
    nused = 0; pick = -1; freei = -1;
    for (int i = 0; i < OUTS; i++) begin
      if (used[i]) nused++;
      if (used[i] && due[i] <= now && pick < 0) pick = i;
      if (!used[i] && freei < 0) freei = i;
    end
    req_ready = (freei >= 0) && !stall;
    rsp_valid = (pick >= 0);
    rsp_tag   = (pick >= 0) ? tag[pick] : '0;
    rsp_data  = (pick >= 0) ? robocore_tb_pkg::node_mem[addr[pick][15:0]] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; stall <= 1'b0;
      for (int i = 0; i < OUTS; i++) used[i] <= 1'b0;
    end else begin
      now   <= now + 1;
      stall <= ($urandom_range(0, 99) < STALL_PCT);
      if (rsp_valid && rsp_ready) used[pick] <= 1'b0;
      if (req_valid && req_ready) begin
        used[freei] <= 1'b1;
        due[freei]  <= now + $urandom_range(LAT_MIN, LAT_MAX);
        addr[freei] <= req_addr;
        tag[freei]  <= req_tag;
      end
    end
  end
endmodule
