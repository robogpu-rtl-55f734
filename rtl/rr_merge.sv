// rr_merge: merges N valid/ready streams of type T into one, round-robin.
//
// Each cycle the first valid input after the one granted last wins and is
// passed straight through to the output (no register, so no added latency);
// its ready follows out_ready. Used to share the warp buffer's single push
// port and single return port among the sets of OP units. The merge itself
// is this design's choice; the number of ports of the warp buffer is not
// given by the source design.
module rr_merge #(
  parameter type T = logic,
  parameter int  N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  T             in_data [N],
  output logic         out_valid,
  input  logic         out_ready,
  output T             out_data
);
  localparam int SW = (N > 1) ? $clog2(N) : 1;
  logic [SW-1:0] last, sel;
  logic [31:0]   si;   // input index under test in the search loop

  always_comb begin
    out_valid = 1'b0;
    sel       = '0;
    si        = 0;
    for (int k = 1; k <= N; k++) begin
      si = 32'((int'(last) + k) % N);
      if (!out_valid && in_valid[si]) begin
        out_valid = 1'b1;
        sel       = SW'(si);
      end
    end
  end

  assign out_data = in_data[sel];
  for (genvar i = 0; i < N; i++) begin : g_rdy
    assign in_ready[i] = out_valid && out_ready && (int'(sel) == i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       last <= SW'(N - 1);
    else if (out_valid && out_ready)  last <= sel;
  end

endmodule
