// tb_op_interconnect: drives all 9 sources of the interconnect with random
// packets to random destinations (10 ports) under random destination
// back-pressure. Sources follow valid/ready: a packet is held until taken.
// Checks: every packet reaches the port named in its dest field exactly once;
// packets from one source to one destination keep their order; a packet
// taken at a clock edge is visible at its port right after that edge (one
// register stage); with every source aiming at one always-ready port, each
// source is served at least once in every 9 consecutive grants (round-robin).
module tb_op_interconnect;
  import robocore_pkg::*;

  localparam int NS = NSRC, ND = NDST;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [NS-1:0] src_valid, src_ready;
  pkt_t          src_pkt [NS];
  logic [ND-1:0] dst_valid, dst_ready;
  pkt_t          dst_pkt [ND];
  int checks = 0, failures = 0;

  op_interconnect dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected packets per (source, destination); node_addr carries {src, seq}
  int          seq [NS];
  logic [31:0] exp_q [NS][ND][$];
  int          sent = 0, recv = 0;
  int          vpct = 60, rpct = 60;
  bit          one_dest = 0;
  int          last_src [$];

  // new packet for source s
  function automatic pkt_t mk(int s);
    pkt_t p;
    p = '0;
    p.node_addr = {8'(s), 24'(seq[s])};
    p.dest = one_dest ? 4'd3 : 4'($urandom % ND);
    p.pc = 6'($urandom);
    p.d[0] = $urandom;
    seq[s]++;
    return p;
  endfunction

  logic [ND-1:0] took_prev;
  always @(posedge clk) if (rst_n) begin
    // deliveries
    for (int d = 0; d < ND; d++)
      if (dst_valid[d] && dst_ready[d]) begin
        int s;
        s = int'(dst_pkt[d].node_addr[31:24]);
        chk(int'(dst_pkt[d].dest) == d, "packet at wrong port");
        chk(s < NS && exp_q[s][d].size() != 0 && exp_q[s][d][0] == dst_pkt[d].node_addr,
            $sformatf("order/duplicate src %0d dst %0d", s, d));
        if (s < NS && exp_q[s][d].size() != 0) void'(exp_q[s][d].pop_front());
        recv++;
        if (one_dest) last_src.push_back(s);
      end
    // acceptances
    for (int s = 0; s < NS; s++)
      if (src_valid[s] && src_ready[s]) begin
        exp_q[s][src_pkt[s].dest].push_back(src_pkt[s].node_addr);
        sent++;
      end
  end

  // one-stage check: whatever a source handed over must be at its port now
  pkt_t handed [ND];
  logic [ND-1:0] handed_v;
  always @(posedge clk) begin
    handed_v = '0;
    for (int s = 0; s < NS; s++)
      if (rst_n && src_valid[s] && src_ready[s]) begin
        handed_v[src_pkt[s].dest] = 1'b1;
        handed[src_pkt[s].dest] = src_pkt[s];
      end
    #1;
    for (int d = 0; d < ND; d++)
      if (handed_v[d]) chk(dst_valid[d] && dst_pkt[d] == handed[d], "one-cycle transfer");
  end

  task automatic drive(int cycles);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++)
        if (!src_valid[s] || src_ready_q[s]) begin
          src_valid[s] = ($urandom % 100) < vpct;
          if (src_valid[s]) src_pkt[s] = mk(s);
        end
      for (int d = 0; d < ND; d++) dst_ready[d] = ($urandom % 100) < rpct;
    end
  endtask

  // ready as seen at the last edge (so a held packet is not replaced)
  logic [NS-1:0] src_ready_q;
  always @(posedge clk) src_ready_q <= src_ready;

  initial begin
    src_valid = '0; dst_ready = '0;
    for (int s = 0; s < NS; s++) begin src_pkt[s] = '0; seq[s] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    drive(4000);
    vpct = 100; rpct = 100; drive(1000);
    vpct = 90;  rpct = 20;  drive(2000);
    // round-robin: everyone to port 3, always ready
    vpct = 100; rpct = 100; one_dest = 1;
    drive(10);
    last_src.delete();
    drive(400);
    one_dest = 0;
    vpct = 0; drive(60);
    chk(sent == recv, $sformatf("sent %0d received %0d", sent, recv));
    begin
      int starved;
      starved = 0;
      for (int i = 0; i + NS <= last_src.size(); i++) begin
        bit [NS-1:0] seen;
        seen = '0;
        for (int j = 0; j < NS; j++) seen[last_src[i + j]] = 1'b1;
        if (seen != '1) starved++;
      end
      chk(last_src.size() > 300, "port 3 kept busy");
      chk(starved == 0, $sformatf("%0d windows of 9 grants missed a source", starved));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
