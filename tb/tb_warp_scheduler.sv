// tb_warp_scheduler: drives random ready masks (sparse, dense and empty) and
// a random enable, and compares the grant every cycle with a reference
// model: no grant when disabled or nothing is ready; otherwise the first warp
// with a ready lane searching round-robin from the warp after the one granted
// last, and the lowest ready lane in that warp. The grant is combinational,
// so it is checked in the same cycle as the inputs. Also checks that every
// warp is granted when all are always ready (no starvation).
module tb_warp_scheduler;
  import robocore_pkg::*;

  localparam int WARPS = NWARPS, LANES = NLANES;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic enable, gnt_valid;
  logic [WARPS-1:0][LANES-1:0] ready;
  logic [WARP_W-1:0] gnt_warp;
  logic [LANE_W-1:0] gnt_lane;
  int checks = 0, failures = 0;
  int model_last = WARPS - 1;
  int wcount [WARPS];

  warp_scheduler dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic step(int mode);
    bit ev; int ew, el;
    @(negedge clk);
    enable = ($urandom % 100) < 85;
    for (int w = 0; w < WARPS; w++)
      for (int l = 0; l < LANES; l++)
        case (mode)
          0: ready[w][l] = ($urandom % 100) < 3;
          1: ready[w][l] = ($urandom % 100) < 50;
          2: ready[w][l] = 1'b0;
          default: ready[w][l] = 1'b1;
        endcase
    #1;
    ev = 0; ew = 0; el = 0;
    if (enable)
      for (int k = 1; k <= WARPS && !ev; k++) begin
        int w;
        w = (model_last + k) % WARPS;
        if (ready[w] != '0) begin
          ev = 1; ew = w;
          for (int l = LANES - 1; l >= 0; l--) if (ready[w][l]) el = l;
        end
      end
    chk(gnt_valid == ev, "grant valid");
    if (ev) begin
      chk(int'(gnt_warp) == ew && int'(gnt_lane) == el,
          $sformatf("grant %0d/%0d expected %0d/%0d", gnt_warp, gnt_lane, ew, el));
      model_last = ew;
      wcount[ew]++;
    end
  endtask

  initial begin
    enable = 1'b0; ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) step(0);
    for (int n = 0; n < 3000; n++) step(1);
    for (int n = 0; n < 200; n++)  step(2);
    for (int w = 0; w < WARPS; w++) wcount[w] = 0;
    for (int n = 0; n < 400; n++)  step(3);
    for (int w = 0; w < WARPS; w++)
      chk(wcount[w] > 60, $sformatf("warp %0d granted %0d times", w, wcount[w]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
