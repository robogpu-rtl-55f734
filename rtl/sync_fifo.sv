// sync_fifo: synchronous first-in first-out buffer with valid/ready on both
// sides. Used for the OP units' input and output buffers and for the memory
// access queue and memory response FIFO of the traversal front end.
//
// Storage is a circular array of DEPTH entries of type T with read and write
// pointers and an occupancy count. A push is accepted when the FIFO is not
// full (in_ready); the head entry is offered on out_data whenever out_valid is
// high and leaves on a cycle with out_ready. Push and pop may happen in the
// same cycle, but a full FIFO refuses a push even when it is popped in that
// cycle. No bypass: an entry is visible at the output
// the cycle after it was written. `count` reports the occupancy.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  T                           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output T                           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CNTW = $clog2(DEPTH+1);

  T                mem [DEPTH];
  logic [AW-1:0]   wp, rp;
  logic            do_push, do_pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CNTW'(do_push) - CNTW'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= in_data;

  // A push is never dropped silently: the producer must hold data while refused.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) int'(count) <= DEPTH);

endmodule
