// fdipx_ras: return address stack of the branch prediction unit.
//
// A circular stack of DEPTH word addresses. A predicted call pushes its
// fall-through address; a predicted return pops, and `top` is the predicted
// return target before the pop. On overflow the oldest entry is overwritten;
// underflow wraps around. Push and pop take effect at the clock edge; if both
// are asserted the top entry is replaced. The paper names the return address
// stack as part of the branch prediction unit; its depth and the circular
// organisation are this design's choice.
module fdipx_ras
  import fdipx_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  pc_t  push_addr,
  input  logic pop,
  output pc_t  top
);
  localparam int PTR_W = $clog2(DEPTH);

  pc_t              stack_q [DEPTH];
  logic [PTR_W-1:0] tos_q;   // index of the top entry

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction
  function automatic logic [PTR_W-1:0] dec(logic [PTR_W-1:0] p);
    return (p == '0) ? PTR_W'(DEPTH - 1) : p - 1'b1;
  endfunction

  assign top = stack_q[tos_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tos_q <= '0;
      for (int i = 0; i < DEPTH; i++) stack_q[i] <= '0;
    end else if (push && pop) begin
      stack_q[tos_q] <= push_addr;
    end else if (push) begin
      stack_q[inc(tos_q)] <= push_addr;
      tos_q <= inc(tos_q);
    end else if (pop) begin
      tos_q <= dec(tos_q);
    end
  end
endmodule
