// tb_warp_buffer: runs the warp buffer against a reference model of every
// thread (stack contents, fetch pending, child tests in flight, hit, overflow).
// The tb plays the rest of the core: it launches warps (random active lanes,
// random root entries, the next launch starting as soon as a slot is free),
// pops a random ready thread each cycle, answers a pop with a child count
// after a random delay, and completes each child as a PUSH of a random entry
// or a RETURN (rarely with the hit flag) after a random delay. The stack
// depth is cut to 6 so that overflows occur.
// Checks, every cycle: the ready mask equals the model's; a pop returns the
// model's top of stack; a result carries the tag of a launched warp whose
// threads have all finished in the model, with the model's per-lane hit and
// overflow masks; every launched warp produces exactly one result; a thread
// that hit or overflowed is never ready again.
module tb_warp_buffer;
  import robocore_pkg::*;

  localparam int WARPS = NWARPS, LANES = NLANES, SD = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic launch_valid, launch_ready, launch_first, launch_last, launch_active;
  logic [LANE_W-1:0] launch_lane;
  obb_t launch_obb;
  stk_t launch_root;
  logic [7:0] launch_tag;
  logic [WARPS-1:0][LANES-1:0] ready;
  logic pop_valid, dec_valid, push_valid, ret_valid, ret_hit, res_valid;
  logic [WARP_W-1:0] pop_warp, dec_warp, push_warp, ret_warp, rd_warp;
  logic [LANE_W-1:0] pop_lane, dec_lane, push_lane, ret_lane, rd_lane;
  stk_t pop_ent, push_ent;
  logic [3:0] dec_count;
  obb_t rd_obb;
  logic [7:0] res_tag;
  logic [LANES-1:0] res_hit, res_ovf;
  logic [WARPS-1:0] slot_busy;
  int checks = 0, failures = 0;
  longint cyc = 0;

  warp_buffer #(.STACK_DEPTH(SD)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------------------------------------------------------- model
  stk_t m_stk  [WARPS][LANES][$];
  bit   m_act  [WARPS][LANES];
  bit   m_pend [WARPS][LANES];
  int   m_out  [WARPS][LANES];
  bit   m_hit  [WARPS][LANES];
  bit   m_ovf  [WARPS][LANES];
  obb_t m_obb  [WARPS][LANES];
  bit   m_busy [WARPS];
  int   m_tag  [WARPS];
  int   launched = 0, results = 0, n_ovf = 0, n_hit = 0, n_pop = 0;

  function automatic bit m_ready(int w, int l);
    return m_busy[w] && m_act[w][l] && !m_hit[w][l] && !m_ovf[w][l] && !m_pend[w][l]
           && m_out[w][l] == 0 && m_stk[w][l].size() != 0;
  endfunction
  function automatic bit m_fin(int w, int l);
    return !m_act[w][l] || ((m_hit[w][l] || m_ovf[w][l] || m_stk[w][l].size() == 0)
                            && !m_pend[w][l] && m_out[w][l] == 0);
  endfunction

  // scheduled back-end events
  typedef struct { longint due; int w; int l; int kind; int n; stk_t e; bit h; } ev_t;
  ev_t evq [$];   // kind 0 = decode, 1 = push, 2 = return

  int cur_slot = -1;

  always @(posedge clk) if (rst_n) begin
    // compare state visible before this edge
    for (int w = 0; w < WARPS; w++)
      for (int l = 0; l < LANES; l++)
        chk(ready[w][l] == m_ready(w, l), $sformatf("ready %0d/%0d", w, l));
    if (res_valid) begin
      int w;
      w = -1;
      for (int k = 0; k < WARPS; k++) if (m_busy[k] && m_tag[k] == int'(res_tag)) w = k;
      chk(w >= 0, "result tag of a live warp");
      if (w >= 0) begin
        for (int l = 0; l < LANES; l++) begin
          chk(m_fin(w, l), "result before all threads finished");
          chk(res_hit[l] == (m_act[w][l] && (m_hit[w][l] || m_ovf[w][l])), "hit mask");
          chk(res_ovf[l] == (m_act[w][l] && m_ovf[w][l]), "overflow mask");
        end
        m_busy[w] = 0;
        results++;
      end
    end
    if (pop_valid) begin
      int w, l;
      w = pop_warp; l = pop_lane;
      chk(m_ready(w, l), $sformatf("pop of a thread that is not ready %0d/%0d rdy=%b busy=%0d act=%0d pend=%0d out=%0d sz=%0d", w, l, ready[w][l], m_busy[w], m_act[w][l], m_pend[w][l], m_out[w][l], m_stk[w][l].size()));
      if (m_stk[w][l].size() != 0) begin
        chk(pop_ent == m_stk[w][l][$], "pop entry");
        void'(m_stk[w][l].pop_back());
      end
      m_pend[w][l] = 1;
      n_pop++;
      begin
        ev_t e;
        e.due = cyc + 1 + $urandom % 8; e.w = w; e.l = l; e.kind = 0;
        e.n = ($urandom % 3 == 0) ? 0 : 1 + $urandom % 4;
        evq.push_back(e);
      end
    end
    if (dec_valid) begin
      m_pend[dec_warp][dec_lane] = 0;
      m_out[dec_warp][dec_lane] += int'(dec_count);
      for (int k = 0; k < int'(dec_count); k++) begin
        ev_t e;
        e.due = cyc + 2 + $urandom % 20; e.w = dec_warp; e.l = dec_lane;
        e.kind = ($urandom % 100 < 60) ? 1 : 2;
        e.h = ($urandom % 100) < 4;
        e.e.addr = $urandom; e.e.half = $urandom; e.e.center = {$urandom, $urandom, $urandom};
        evq.push_back(e);
      end
    end
    if (push_valid) begin
      m_out[push_warp][push_lane]--;
      if (m_stk[push_warp][push_lane].size() == SD) begin
        if (!m_ovf[push_warp][push_lane]) n_ovf++;
        m_ovf[push_warp][push_lane] = 1;
      end else m_stk[push_warp][push_lane].push_back(push_ent);
    end
    if (ret_valid) begin
      m_out[ret_warp][ret_lane]--;
      if (ret_hit) begin
        if (!m_hit[ret_warp][ret_lane]) n_hit++;
        m_hit[ret_warp][ret_lane] = 1;
      end
    end
    if (launch_valid && launch_ready) begin
      int w;
      if (launch_first) begin
        w = -1;
        for (int k = WARPS - 1; k >= 0; k--) if (!m_busy[k]) w = k;
        chk(w >= 0, "launch with no free slot");
        cur_slot = w;
        m_busy[w] = 1; m_tag[w] = launch_tag;
        for (int l = 0; l < LANES; l++) m_act[w][l] = 0;
        launched++;
      end
      w = cur_slot;
      m_act[w][launch_lane] = launch_active;
      m_stk[w][launch_lane].delete();
      if (launch_active) m_stk[w][launch_lane].push_back(launch_root);
      m_pend[w][launch_lane] = 0; m_out[w][launch_lane] = 0;
      m_hit[w][launch_lane] = 0; m_ovf[w][launch_lane] = 0;
      m_obb[w][launch_lane] = launch_obb;
    end
  end

  // OBB read port
  always @(negedge clk) if (rst_n && cur_slot >= 0) begin
    rd_warp = 2'($urandom); rd_lane = 5'($urandom);
    #1;
    if (m_busy[rd_warp] && m_act[rd_warp][rd_lane])
      chk(rd_obb == m_obb[rd_warp][rd_lane], "obb read");
  end

  // back-end driver: one pop, one decode, one push, one return per cycle
  always @(negedge clk) begin
    pop_valid = 0; dec_valid = 0; push_valid = 0; ret_valid = 0;
    if (rst_n) begin
      int cand_w [$], cand_l [$];
      bit took_dec, took_push, took_ret;
      cand_w.delete(); cand_l.delete();
      for (int w = 0; w < WARPS; w++)
        for (int l = 0; l < LANES; l++)
          if (ready[w][l]) begin cand_w.push_back(w); cand_l.push_back(l); end
      if (cand_w.size() != 0 && ($urandom % 100) < 80) begin
        int i;
        i = $urandom % cand_w.size();
        pop_valid = 1; pop_warp = 2'(cand_w[i]); pop_lane = 5'(cand_l[i]);
      end
      took_dec = 0; took_push = 0; took_ret = 0;
      for (int i = 0; i < evq.size(); i++)
        if (evq[i].due <= cyc) begin
          if (evq[i].kind == 0 && !took_dec) begin
            took_dec = 1; dec_valid = 1; dec_warp = 2'(evq[i].w); dec_lane = 5'(evq[i].l);
            dec_count = 4'(evq[i].n); evq.delete(i); i--;
          end else if (evq[i].kind == 1 && !took_push) begin
            took_push = 1; push_valid = 1; push_warp = 2'(evq[i].w); push_lane = 5'(evq[i].l);
            push_ent = evq[i].e; evq.delete(i); i--;
          end else if (evq[i].kind == 2 && !took_ret) begin
            took_ret = 1; ret_valid = 1; ret_warp = 2'(evq[i].w); ret_lane = 5'(evq[i].l);
            ret_hit = evq[i].h; evq.delete(i); i--;
          end
        end
    end
  end

  task automatic launch_warp(int tagv);
    int nl;
    nl = ($urandom % 4 == 0) ? 1 + $urandom % LANES : LANES;
    for (int l = 0; l < nl; l++) begin
      @(negedge clk);
      launch_valid = 1; launch_first = (l == 0); launch_last = (l == nl - 1);
      launch_lane = 5'(l); launch_active = ($urandom % 100) < 85; launch_tag = 8'(tagv);
      launch_root.addr = $urandom; launch_root.half = $urandom;
      launch_root.center = {$urandom, $urandom, $urandom};
      for (int a = 0; a < 3; a++) begin
        launch_obb.c[a] = $urandom; launch_obb.e[a] = $urandom; launch_obb.u0[a] = $urandom;
        launch_obb.u1[a] = $urandom; launch_obb.u2[a] = $urandom;
      end
      #1;
      while (!launch_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk) launch_valid = 0;
  endtask

  initial begin
    launch_valid = 0; launch_first = 0; launch_last = 0; launch_lane = '0; launch_active = 0;
    launch_obb = '0; launch_root = '0; launch_tag = '0;
    pop_warp = '0; pop_lane = '0; dec_warp = '0; dec_lane = '0; dec_count = '0;
    push_warp = '0; push_lane = '0; push_ent = '0; ret_warp = '0; ret_lane = '0; ret_hit = 0;
    rd_warp = '0; rd_lane = '0;
    for (int w = 0; w < WARPS; w++) m_busy[w] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) launch_warp(t);
    // wait for all results
    for (int c = 0; c < 20000 && results < launched; c++) @(negedge clk);
    chk(results == launched, $sformatf("launched %0d results %0d", launched, results));
    chk(n_ovf > 0 && n_hit > 0, $sformatf("overflows %0d hits %0d pops %0d", n_ovf, n_hit, n_pop));
    chk(slot_busy == '0, "all slots free at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
