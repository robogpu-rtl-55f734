// op_dest_table: operation destination table of one OP unit.
//
// When an OP unit finishes a uop it must know where the packet goes next: the
// PC of the next uop and the interconnect port of the OP unit that executes
// it. The table is written before a kernel is launched and looked up for
// every packet. The lookup key is {node type, uop PC, compare result}: the
// node type lets internal and leaf nodes run different programs; the compare
// result (used only by the CMP unit, zero elsewhere) gives every CMP uop two
// entries, one per outcome, which is what makes conditional branches and
// conditional returns possible. Following the RoboCore description, each entry
// stores the next PC and destination port; this design stores it direct-mapped
// (2^(PC_W+2) entries of {valid, next_pc, dest}, 11 bits) instead of an
// associative table with the key stored, a choice of its own.
//
// Interface: cfg_we/cfg_idx/cfg_ent write one entry. Lookup is combinational:
// lk_leaf/lk_pc/lk_cmp in, ent out (ent.valid = 0 for an unwritten entry).
// Reset clears all valid bits.
module op_dest_table
  import robocore_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,
  input  logic [DT_IDX_W-1:0] cfg_idx,
  input  dest_ent_t           cfg_ent,
  input  logic                lk_leaf,
  input  logic [PC_W-1:0]     lk_pc,
  input  logic                lk_cmp,
  output dest_ent_t           ent
);
  localparam int N = 1 << DT_IDX_W;

  dest_ent_t tbl [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) tbl[i] <= '0;
    end else if (cfg_we) begin
      tbl[cfg_idx] <= cfg_ent;
    end
  end

  assign ent = tbl[{lk_leaf, lk_pc, lk_cmp}];

endmodule
