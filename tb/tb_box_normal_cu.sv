// tb_box_normal_cu: checks the six face-normal axis projections against
// real-arithmetic formulas, on a hand-worked case and on random boxes whose
// numbers lie on binary grids (so Q16.16 results are exact).
module tb_box_normal_cu;
  import robocore_pkg::*;
  import robocore_tb_pkg::*;
  pdata_t d;
  logic [2:0] axis;
  word_t pdist, rad;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  box_normal_cu dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int ax, real ed, real er);
    axis = 3'(ax);
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
    // hand case: unit-aligned OBB, T = (3, -1, 0.5), e = (1, 2, 0.5), h = 1
    d = '0;
    d = putv(d, WIDX_W'(W_T),   {fx(0.5), fx(-1.0), fx(3.0)});
    d = putv(d, WIDX_W'(W_OE),  {fx(0.5), fx(2.0), fx(1.0)});
    d = putv(d, WIDX_W'(W_OU0), {fx(0.0), fx(0.0), fx(1.0)});
    d = putv(d, WIDX_W'(W_OU1), {fx(0.0), fx(1.0), fx(0.0)});
    d = putv(d, WIDX_W'(W_OU2), {fx(1.0), fx(0.0), fx(0.0)});
    d = putv(d, WIDX_W'(W_AH),  {fx(1.0), fx(1.0), fx(1.0)});
    check(0, 3.0, 2.0);
    check(1, 1.0, 3.0);
    check(2, 0.5, 1.5);
    check(3, 3.0, 2.0);
    check(5, 0.5, 1.5);
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
      for (int ax = 0; ax < 6; ax++) begin
        real ed, er;
        if (ax < 3) begin
          ed = rabs(t[ax]);
          er = h[ax] + e[0] * rabs(u[0][ax]) + e[1] * rabs(u[1][ax]) + e[2] * rabs(u[2][ax]);
        end else begin
          int j;
          j = ax - 3;
          ed = rabs(t[0] * u[j][0] + t[1] * u[j][1] + t[2] * u[j][2]);
          er = e[j] + h[0] * rabs(u[j][0]) + h[1] * rabs(u[j][1]) + h[2] * rabs(u[j][2]);
        end
        check(ax, ed, er);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
