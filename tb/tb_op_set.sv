// tb_op_set: runs the collision intersection program on one set of OP units.
// The program (robocore_tb_pkg::make_collision_program) is written through
// the configuration bus; then random (OBB, cube) pairs enter as packets, as
// the ray collector would send them, under random back-pressure on the push
// and return outputs. Each packet must end exactly once: a leaf cube as a
// RETURN whose hit flag equals the separating-axis reference, an internal
// cube as a PUSH of its address and box if it overlaps the OBB, otherwise as
// a RETURN without hit. At most 16 tests are in the set at once, the limit
// the dispatcher in front of each set enforces. Also checks the leave count (one per finished test),
// that interconnect stalls occur, that no destination-table miss is flagged
// and that the set is idle at the end.
module tb_op_set;
  import robocore_pkg::*;
  import robocore_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic in_valid, in_ready, push_valid, push_ready, ret_valid, ret_ready, ret_hit;
  pkt_t in_pkt;
  logic [WARP_W-1:0] push_warp, ret_warp;
  logic [LANE_W-1:0] push_lane, ret_lane;
  stk_t push_ent;
  logic [1:0] leave;
  logic stall, busy, err;
  int checks = 0, failures = 0;
  // packets in the set at once, as the set dispatcher limits them
  localparam int MAXI = 16;

  op_set dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: sent %0d finished %0d in_ready %0d busy %0d err %0d", sent, done, in_ready, busy, err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected outcome per packet id (id = {warp, lane}, one packet per id in flight)
  typedef struct { bit valid; bit push; bit hit; stk_t ent; } exp_t;
  exp_t exp_m [128];
  int sent = 0, done = 0, left = 0, stalls = 0, n_push = 0, n_hit = 0, n_miss = 0;

  always @(posedge clk) if (rst_n) begin
    left += int'(leave);
    if (stall) stalls++;
    if (push_valid && push_ready) begin
      int id;
      id = int'({push_warp, push_lane});
      chk(exp_m[id].valid && exp_m[id].push, $sformatf("unexpected push id %0d", id));
      chk(push_ent == exp_m[id].ent, "pushed entry");
      exp_m[id].valid = 0; done++; n_push++;
    end
    if (ret_valid && ret_ready) begin
      int id;
      id = int'({ret_warp, ret_lane});
      chk(exp_m[id].valid && !exp_m[id].push, $sformatf("unexpected return id %0d", id));
      chk(ret_hit == exp_m[id].hit, $sformatf("hit flag id %0d", id));
      exp_m[id].valid = 0; done++;
      if (ret_hit) n_hit++; else n_miss++;
    end
  end

  always @(negedge clk) begin
    push_ready = ($urandom % 100) < 70;
    ret_ready  = ($urandom % 100) < 70;
  end

  logic acc_q;
  always @(posedge clk) acc_q <= in_valid && in_ready;

  initial begin
    cfg_t q [$];
    cfg = '0; in_valid = 1'b0; in_pkt = '0;
    for (int i = 0; i < 128; i++) exp_m[i].valid = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    make_collision_program(q);
    foreach (q[i]) begin
      @(negedge clk) cfg = q[i];
    end
    @(negedge clk) cfg = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (in_valid && !acc_q) continue;
      in_valid = 1'b0;
      if (($urandom % 100) < 70) begin
        int id;
        id = $urandom % 128;
        if (!exp_m[id].valid && sent - done < MAXI) begin
          obb_t o;
          real cx, cy, cz, h;
          bit lf, ov;
          o  = rand_obb(6.0, 0.25, 3.0);
          h  = 0.5 * (1 << ($urandom % 3));
          cx = quant((urand01() * 2.0 - 1.0) * 8.0, 3);
          cy = quant((urand01() * 2.0 - 1.0) * 8.0, 3);
          cz = quant((urand01() * 2.0 - 1.0) * 8.0, 3);
          lf = 1'($urandom);
          ov = sat_overlap(o, cx, cy, cz, h);
          in_pkt = '0;
          {in_pkt.warp, in_pkt.lane} = 7'(id);
          in_pkt.leaf = lf; in_pkt.node_addr = $urandom;
          in_pkt.pc = 6'd0; in_pkt.dest = P_ADDSUB;
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_OC), o.c);
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_OE), o.e);
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_OU0), o.u0);
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_OU1), o.u1);
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_OU2), o.u2);
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_AC), {fx(cz), fx(cy), fx(cx)});
          in_pkt.d = putv(in_pkt.d, WIDX_W'(W_AH), {fx(h), fx(h), fx(h)});
          exp_m[id].valid = 1;
          exp_m[id].push  = !lf && ov;
          exp_m[id].hit   = lf && ov;
          exp_m[id].ent.addr = in_pkt.node_addr;
          exp_m[id].ent.center = {fx(cz), fx(cy), fx(cx)};
          exp_m[id].ent.half = fx(h);
          in_valid = 1'b1;
          sent++;
        end
      end
    end
    @(negedge clk);
    while (in_valid && !acc_q) @(negedge clk);
    in_valid = 1'b0;
    repeat (500) @(negedge clk);
    chk(done == sent && left == sent, $sformatf("sent %0d finished %0d left %0d", sent, done, left));
    chk(n_push > 0 && n_hit > 0 && n_miss > 0, $sformatf("push %0d hit %0d miss %0d", n_push, n_hit, n_miss));
    chk(stalls > 0, "interconnect stalls occurred");
    chk(!err, "no destination-table miss");
    chk(!busy, "set idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
