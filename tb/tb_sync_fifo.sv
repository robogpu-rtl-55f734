// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// data, out_valid, in_ready (refuses when full) and the occupancy count.
module tb_sync_fifo;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [15:0] model [$];

  sync_fifo #(.T(logic [15:0]), .DEPTH(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (out_valid != (model.size() > 0) || in_ready != (model.size() < 4) || int'(count) != model.size()) begin
        failures++;
        $display("flags: valid=%0b ready=%0b count=%0d model=%0d", out_valid, in_ready, count, model.size());
      end
      if (out_valid && model.size() > 0) begin
        checks++;
        if (out_data != model[0]) begin failures++; $display("data %h expected %h", out_data, model[0]); end
      end
      in_valid  = ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 40));
      out_ready = ($urandom_range(0, 99) < ((i / 500) % 2 ? 40 : 70));
      in_data   = 16'($urandom);
      #1;
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
