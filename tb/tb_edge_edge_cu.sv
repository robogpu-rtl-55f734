// tb_edge_edge_cu: checks the nine cross-product axis projections
// (L = x_i x u_j, axis = 3i + j) on an axis-aligned OBB worked by hand, and
// against real-arithmetic projections on random boxes whose numbers lie on
// binary grids (so Q16.16 results are exact).
module tb_edge_edge_cu;
  import robocore_pkg::*;
  import robocore_tb_pkg::*;
  pdata_t d;
  logic [3:0] axis;
  word_t pdist, rad;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  edge_edge_cu dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int ax, real ed, real er);
    axis = 4'(ax);
    #1;
    checks++;
    if (pdist != fx(ed) || rad != fx(er)) begin
      failures++;
      $display("axis %0d: dist %f rad %f expected %f %f", ax, rl(pdist), rl(rad), ed, er);
    end
  endtask

  initial begin
    real t [3], e [3], h [3], u [3][3];
    obb_t o;
    // hand case: u0 = x, u1 = y, u2 = z; T = (3, -1, 0.5), e = (1, 2, 0.5), h = 1
    d = '0;
    d = putv(d, WIDX_W'(W_T),   {fx(0.5), fx(-1.0), fx(3.0)});
    d = putv(d, WIDX_W'(W_OE),  {fx(0.5), fx(2.0), fx(1.0)});
    d = putv(d, WIDX_W'(W_OU0), {fx(0.0), fx(0.0), fx(1.0)});
    d = putv(d, WIDX_W'(W_OU1), {fx(0.0), fx(1.0), fx(0.0)});
    d = putv(d, WIDX_W'(W_OU2), {fx(1.0), fx(0.0), fx(0.0)});
    d = putv(d, WIDX_W'(W_AH),  {fx(1.0), fx(1.0), fx(1.0)});
    check(0, 0.0, 0.0);   // x x x = 0
    check(1, 0.5, 1.5);   // x x y = z: |Tz|, h*1 + e2*1
    check(6, 1.0, 3.0);   // z x x = y: |Ty|, h*1 + e1*1
    check(5, 3.0, 2.0);   // y x z = x: |Tx|, h*1 + e0*1
    for (int n = 0; n < 400; n++) begin
      o = rand_obb(8.0, 0.25, 3.0);
      d = '0;
      for (int k = 0; k < 3; k++) begin
        t[k] = quant((urand01() * 2.0 - 1.0) * 8.0, 6);
        h[k] = quant(0.25 + urand01() * 4.0, 2);
        e[k] = rl(o.e[k]);
        u[0][k] = rl(o.u0[k]); u[1][k] = rl(o.u1[k]); u[2][k] = rl(o.u2[k]);
        d[W_T + k] = fx(t[k]);
        d[W_AH + k] = fx(h[k]);
      end
      d = putv(d, WIDX_W'(W_OE), o.e);
      d = putv(d, WIDX_W'(W_OU0), o.u0);
      d = putv(d, WIDX_W'(W_OU1), o.u1);
      d = putv(d, WIDX_W'(W_OU2), o.u2);
      for (int ax = 0; ax < 9; ax++) begin
        real l [3], ed, er;
        int i, j;
        i = ax / 3; j = ax % 3;
        l[0] = (i == 1) ? u[j][2] : (i == 2) ? -u[j][1] : 0.0;
        l[1] = (i == 0) ? -u[j][2] : (i == 2) ? u[j][0] : 0.0;
        l[2] = (i == 0) ? u[j][1] : (i == 1) ? -u[j][0] : 0.0;
        ed = rabs(t[0] * l[0] + t[1] * l[1] + t[2] * l[2]);
        er = h[0] * rabs(l[0]) + h[1] * rabs(l[1]) + h[2] * rabs(l[2]);
        for (int m = 0; m < 3; m++) er += e[m] * rabs(u[m][0] * l[0] + u[m][1] * l[1] + u[m][2] * l[2]);
        check(ax, ed, er);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
