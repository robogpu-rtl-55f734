// tb_op_unit: exercises op_unit in every compute kind (ADDSUB, CROSS,
// MINMAX, DOT, MUL, CMP, Box-Normal, Edge x Edge). For each kind it loads a
// config register and destination-table entries, sends packets with random
// operands on binary grids, and checks the result words (against real
// arithmetic), the untouched words, the next PC and port stamped from the
// table (both CMP outcomes), and the latency from input to output (LAT + 2
// cycles: one in the input buffer, LAT in the compute pipeline, one in the output buffer). A back-pressure phase fills the Box-Normal unit
// with its output blocked, checks that it stops accepting, then drains it and
// checks that nothing was lost or reordered.
module tb_op_unit;
  import robocore_pkg::*;
  import robocore_tb_pkg::*;

  localparam int NK = 8;
  localparam opkind_e           KINDS [NK] = '{OPK_ADDSUB, OPK_CROSS, OPK_MINMAX, OPK_DOT,
                                               OPK_MUL, OPK_CMP, OPK_BOXN, OPK_EDGE};
  localparam logic [PORT_W-1:0] PORTS [NK] = '{P_ADDSUB, P_CROSS, P_MINMAX, P_DOT,
                                               P_MUL, P_CMP, P_BOXN, P_EDGE};
  localparam int                LATS  [NK] = '{1, 1, 1, 1, 1, 1, 4, 4};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic [NK-1:0] in_valid, in_ready, out_valid, out_ready, busy, err;
  pkt_t in_pkt [NK];
  pkt_t out_pkt [NK];
  int checks = 0, failures = 0;

  for (genvar k = 0; k < NK; k++) begin : g_u
    op_unit #(.KIND(KINDS[k]), .UNIT(PORTS[k]), .LAT(LATS[k])) dut (
      .clk, .rst_n, .cfg, .in_valid(in_valid[k]), .in_ready(in_ready[k]), .in_pkt(in_pkt[k]),
      .out_valid(out_valid[k]), .out_ready(out_ready[k]), .out_pkt(out_pkt[k]),
      .busy(busy[k]), .err(err[k]));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wcfg(cfg_t c);
    @(negedge clk); cfg = c;
    @(negedge clk); cfg = '0;
  endtask

  function automatic real rnd(real span);
    return quant((urand01() * 2.0 - 1.0) * span, 6);
  endfunction

  // send one packet to unit k and wait for it; returns the output and latency
  task automatic run(int k, pkt_t p, output pkt_t o, output int lat);
    @(negedge clk);
    in_pkt[k] = p; in_valid[k] = 1'b1; out_ready[k] = 1'b1;
    #1;
    while (!in_ready[k]) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid[k] = 1'b0;
    lat = 1;
    while (!out_valid[k]) begin @(negedge clk); lat++; end
    o = out_pkt[k];
    @(negedge clk);
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    pkt_t p, o;
    int   lat;
    cfg = '0; in_valid = '0; out_ready = '0;
    for (int k = 0; k < NK; k++) in_pkt[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // config: every unit runs its uop at pc 5; CMP has two outcomes
    wcfg(cw_ucfg(P_ADDSUB, 5, 1, 0, 3, 24, 0));   // sub: d24..26 = d0..2 - d3..5
    wcfg(cw_ucfg(P_CROSS,  5, 0, 0, 3, 24, 0));
    wcfg(cw_ucfg(P_MINMAX, 5, 2, 0, 3, 24, 0));   // abs
    wcfg(cw_ucfg(P_DOT,    5, 0, 0, 3, 24, 0));
    wcfg(cw_ucfg(P_MUL,    5, 0, 0, 3, 24, 0));
    wcfg(cw_ucfg(P_CMP,    5, 1, 0, 3, 0, 0));    // vec3 any(A > B)
    wcfg(cw_ucfg(P_BOXN,   5, 0, 0, 0, 24, 4));   // OBB axis 1
    wcfg(cw_ucfg(P_EDGE,   5, 0, 0, 0, 24, 7));   // x2 x u1
    for (int k = 0; k < NK; k++)
      for (int lf = 0; lf < 2; lf++) begin
        wcfg(cw_dest(port_e'(PORTS[k]), lf[0], 5, 1'b0, 10 + k + 20 * lf, port_e'(k)));
        wcfg(cw_dest(port_e'(PORTS[k]), lf[0], 5, 1'b1, 40 + lf, P_RETURN));
      end

    for (int n = 0; n < 60; n++) begin
      real a [3], b [3];
      for (int k = 0; k < NK; k++) begin
        bit lf;
        p = '0;
        lf = 1'($urandom);
        p.leaf = lf; p.pc = 6'd5; p.warp = 2'($urandom); p.lane = 5'($urandom);
        p.node_addr = $urandom;
        for (int w = 0; w < NW; w++) p.d[w] = fx(rnd(8.0));
        if (KINDS[k] == OPK_BOXN || KINDS[k] == OPK_EDGE) begin
          obb_t ob;
          ob = rand_obb(8.0, 0.25, 3.0);
          p.d = putv(p.d, WIDX_W'(W_OE), ob.e);
          p.d = putv(p.d, WIDX_W'(W_OU0), ob.u0);
          p.d = putv(p.d, WIDX_W'(W_OU1), ob.u1);
          p.d = putv(p.d, WIDX_W'(W_OU2), ob.u2);
          for (int c = 0; c < 3; c++) p.d[W_AH + c] = fx(quant(0.5 + urand01() * 3.0, 2));
        end
        for (int c = 0; c < 3; c++) begin a[c] = rl(p.d[c]); b[c] = rl(p.d[3 + c]); end
        run(k, p, o, lat);
        chk(lat == LATS[k] + 2, $sformatf("kind %0d latency %0d", k, lat));
        chk(o.warp == p.warp && o.lane == p.lane && o.node_addr == p.node_addr && o.leaf == p.leaf,
            $sformatf("kind %0d header", k));
        case (KINDS[k])
          OPK_ADDSUB: for (int c = 0; c < 3; c++) chk(o.d[24 + c] == fx(a[c] - b[c]), "addsub");
          OPK_CROSS: begin
            chk(o.d[24] == fx(a[1] * b[2] - a[2] * b[1]), "cross x");
            chk(o.d[25] == fx(a[2] * b[0] - a[0] * b[2]), "cross y");
            chk(o.d[26] == fx(a[0] * b[1] - a[1] * b[0]), "cross z");
          end
          OPK_MINMAX: for (int c = 0; c < 3; c++) chk(o.d[24 + c] == fx(rabs(a[c])), "abs");
          OPK_DOT:    chk(o.d[24] == fx(a[0] * b[0] + a[1] * b[1] + a[2] * b[2]), "dot");
          OPK_MUL:    chk(o.d[24] == fx(a[0] * b[0]), "mul");
          OPK_BOXN: begin
            real t [3], u [3], ed, er;
            for (int c = 0; c < 3; c++) begin t[c] = rl(p.d[W_T + c]); u[c] = rl(p.d[W_OU1 + c]); end
            ed = rabs(t[0] * u[0] + t[1] * u[1] + t[2] * u[2]);
            er = rl(p.d[W_OE + 1]);
            for (int c = 0; c < 3; c++) er += rl(p.d[W_AH + c]) * rabs(u[c]);
            chk(o.d[24] == fx(ed) && o.d[25] == fx(er), "box-normal axis 4");
          end
          OPK_EDGE: begin
            // L = z x u1 = (-u1y, u1x, 0)
            real t [3], l [3], ed, er;
            for (int c = 0; c < 3; c++) t[c] = rl(p.d[W_T + c]);
            l[0] = -rl(p.d[W_OU1 + 1]); l[1] = rl(p.d[W_OU1]); l[2] = 0.0;
            ed = rabs(t[0] * l[0] + t[1] * l[1]);
            er = rl(p.d[W_AH]) * rabs(l[0]) + rl(p.d[W_AH + 1]) * rabs(l[1]);
            for (int m = 0; m < 3; m++)
              er += rl(p.d[W_OE + m]) * rabs(rl(p.d[W_OU0 + 3 * m]) * l[0] + rl(p.d[W_OU0 + 3 * m + 1]) * l[1]);
            chk(o.d[24] == fx(ed) && o.d[25] == fx(er), "edge x edge axis 7");
          end
          default: ;
        endcase
        if (KINDS[k] == OPK_CMP) begin
          bit c;
          c = (a[0] > b[0]) || (a[1] > b[1]) || (a[2] > b[2]);
          chk(o.d == p.d, "cmp leaves data");
          chk(c ? (o.pc == 6'(40 + lf) && o.dest == P_RETURN)
                : (o.pc == 6'(10 + k + 20 * lf) && o.dest == 4'(k)), "cmp branch");
        end else begin
          chk(o.pc == 6'(10 + k + 20 * lf) && o.dest == 4'(k), $sformatf("kind %0d next pc/port", k));
          for (int w = 0; w < 24; w++) chk(o.d[w] == p.d[w], "operand words untouched");
        end
      end
    end
    chk(err == '0, "no table miss");

    // back-pressure on the Box-Normal unit (index 6)
    begin
      pkt_t sent [$];
      int   acc, got;
      acc = 0;
      out_ready[6] = 1'b0;
      for (int n = 0; n < 12; n++) begin
        @(negedge clk);
        p = '0; p.pc = 6'd5; p.node_addr = 32'(n);
        in_pkt[6] = p; in_valid[6] = 1'b1;
        #1;
        if (in_ready[6]) begin sent.push_back(p); acc++; end
      end
      @(negedge clk);
      in_valid[6] = 1'b0;
      chk(acc == 8, $sformatf("accepted %0d with output blocked (expected 8)", acc));
      out_ready[6] = 1'b1;
      got = 0;
      for (int c = 0; c < 60; c++) begin
        #1;
        if (out_valid[6]) begin
          chk(got < sent.size() && out_pkt[6].node_addr == sent[got].node_addr, $sformatf("drain order got %0d addr %0d n %0d", got, out_pkt[6].node_addr, sent.size()));
          got++;
        end
        @(negedge clk);
      end
      chk(got == acc, "all drained");
      // a packet with no table entry raises err
      p = '0; p.pc = 6'd9;
      run(0, p, o, lat);
      chk(err[0] == 1'b1, "table miss flagged");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
