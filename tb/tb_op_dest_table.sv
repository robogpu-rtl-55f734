// tb_op_dest_table: loads the example rows of the destination table figure
// (internal node: PC 3, CMP 0 -> next PC 4, port 1; leaf: PC 6, CMP 0 -> next
// PC 7, port 4), their CMP = 1 twins, then random entries, and checks every
// lookup key against a shadow copy; unwritten entries must read invalid.
module tb_op_dest_table;
  import robocore_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic cfg_we, lk_leaf, lk_cmp;
  logic [DT_IDX_W-1:0] cfg_idx;
  dest_ent_t cfg_ent, ent;
  logic [PC_W-1:0] lk_pc;
  dest_ent_t shadow [256];
  int checks = 0, failures = 0;

  op_dest_table dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int idx, dest_ent_t e);
    @(negedge clk);
    cfg_we = 1; cfg_idx = DT_IDX_W'(idx); cfg_ent = e;
    shadow[idx] = e;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic lookall();
    for (int k = 0; k < 256; k++) begin
      {lk_leaf, lk_pc, lk_cmp} = 8'(k);
      #1;
      checks++;
      if (ent.valid != shadow[k].valid || (shadow[k].valid && ent != shadow[k])) begin
        failures++;
        $display("key %0d: got %p expected %p", k, ent, shadow[k]);
      end
    end
  endtask

  initial begin
    cfg_we = 0; cfg_idx = '0; cfg_ent = '0; lk_leaf = 0; lk_pc = '0; lk_cmp = 0;
    for (int k = 0; k < 256; k++) shadow[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    lookall();
    wr({1'b0, 6'd3, 1'b0}, '{valid: 1'b1, next_pc: 6'd4, dest: 4'd1});
    wr({1'b1, 6'd6, 1'b0}, '{valid: 1'b1, next_pc: 6'd7, dest: 4'd4});
    wr({1'b0, 6'd3, 1'b1}, '{valid: 1'b1, next_pc: 6'd40, dest: P_RETURN});
    wr({1'b1, 6'd6, 1'b1}, '{valid: 1'b1, next_pc: 6'd40, dest: P_RETURN});
    // figure rows, checked explicitly
    @(negedge clk);
    lk_leaf = 0; lk_pc = 3; lk_cmp = 0; #1;
    checks++; if (!(ent.valid && ent.next_pc == 4 && ent.dest == 1)) begin failures++; $display("internal row"); end
    lk_leaf = 1; lk_pc = 6; lk_cmp = 0; #1;
    checks++; if (!(ent.valid && ent.next_pc == 7 && ent.dest == 4)) begin failures++; $display("leaf row"); end
    lk_leaf = 0; lk_pc = 3; lk_cmp = 1; #1;
    checks++; if (!(ent.valid && ent.next_pc == 40 && ent.dest == P_RETURN)) begin failures++; $display("cmp row"); end
    for (int i = 0; i < 100; i++)
      wr($urandom_range(0, 255), '{valid: 1'($urandom), next_pc: 6'($urandom), dest: 4'($urandom)});
    lookall();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
