// fdipx_llc_model: behavioural model of the next cache level (not part of
// the design). Accepts one line request per cycle (ready is low on roughly
// one cycle in STALL_PCT percent) and returns each line LAT cycles later on
// the fill port, one fill per cycle, in request order. Line contents come
// from fdipx_tb_pkg::line_of.
`timescale 1ns/1ps
module fdipx_llc_model
  import fdipx_pkg::*;
#(
  parameter int LAT       = 20,
  parameter int STALL_PCT = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  input  blk_t                 req_blk,
  input  logic                 req_prefetch,
  output logic                 req_ready,
  output logic                 fill_valid,
  output blk_t                 fill_blk,
  output logic [LINE_BITS-1:0] fill_data
);
  typedef struct { blk_t blk; longint due; } pend_t;
  pend_t  q [$];
  longint cyc = 0;
  int     n_demand = 0, n_prefetch = 0;

  initial begin req_ready = 1'b1; fill_valid = 1'b0; fill_blk = '0; fill_data = '0; end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && req_valid && req_ready) begin
      pend_t p; p.blk = req_blk; p.due = cyc + LAT;
      q.push_back(p);
      if (req_prefetch) n_prefetch++; else n_demand++;
    end
    if (q.size() > 0 && q[0].due <= cyc) begin
      fill_valid <= 1'b1;
      fill_blk   <= q[0].blk;
      fill_data  <= fdipx_tb_pkg::line_of(q[0].blk);
      void'(q.pop_front());
    end else begin
      fill_valid <= 1'b0;
    end
    req_ready <= ($urandom % 100) >= STALL_PCT;
  end
endmodule
