// Workload testbench: the partitioned BTB at each of the six storage budgets
// of the FDIP-X evaluation (11.5, 22.75, 45, 89, 176 and 348 KB), built by
// doubling the set counts from the defaults (6-way partitions, 7-way 46-bit
// partition). For every budget, sampled sets (first, second, last) of every
// partition are filled to their associativity with branches whose offsets
// belong to that partition. All of them must then hit with the exact target
// from the right partition: a full set holds WAYS branches per partition.
// One further branch per set must then evict exactly one of them.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_btb_budgets;
  import fdipx_pkg::*;
  int checks = 0, failures = 0, done = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NB = 6;
  localparam int SETS_OF [NB] = '{128, 256, 512, 1024, 2048, 4096};
  localparam int BIG_OF  [NB] = '{16, 32, 64, 128, 256, 512};
  localparam longint OFF_OF [4] = '{5, 1000, 100000, 64'sd1 <<< 30};

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar g = 0; g < NB; g++) begin : g_budget
    localparam int SETS = SETS_OF[g], BIG = BIG_OF[g];
    localparam int IDX = $clog2(SETS), BIDX = $clog2(BIG);
    pc_t lookup_pc, hit_target;
    logic hit; br_type_e hit_type; logic [1:0] hit_part;
    br_update_t upd;

    fdipx_btb #(.SETS(SETS), .BIG_SETS(BIG)) dut (
      .clk, .rst_n, .lookup_pc, .hit, .hit_type, .hit_target, .hit_part, .upd);

    function automatic pc_t pc_of(int part, int set, int j);
      int ix; ix = (part == 3) ? BIDX : IDX;
      return pc_t'((64'(1 + j + 16 * part) << ix) | 64'(set));
    endfunction

    initial begin
      int sets_s [3];
      int n_hit;
      upd = '0; lookup_pc = '0;
      @(posedge rst_n);
      for (int p = 0; p < 4; p++) begin
        int ns, ways;
        ns = (p == 3) ? BIG : SETS; ways = (p == 3) ? 7 : 6;
        sets_s = '{0, 1, ns - 1};
        foreach (sets_s[si]) begin
          for (int j = 0; j < ways; j++) begin
            @(negedge clk);
            upd.valid = 1; upd.btype = BR_JUMP; upd.taken = 1;
            upd.pc = pc_of(p, sets_s[si], j); upd.target = upd.pc + pc_t'(OFF_OF[p]);
          end
          @(negedge clk); upd.valid = 0;
          for (int j = 0; j < ways; j++) begin
            lookup_pc = pc_of(p, sets_s[si], j); #1;
            `CHECK(hit && hit_part == 2'(p) && hit_target == lookup_pc + pc_t'(OFF_OF[p]),
                   $sformatf("budget %0d partition %0d set %0d way %0d held", g, p, sets_s[si], j))
          end
          // one more branch in the same set evicts exactly one
          @(negedge clk);
          upd.valid = 1; upd.pc = pc_of(p, sets_s[si], ways); upd.target = upd.pc + pc_t'(OFF_OF[p]);
          @(negedge clk); upd.valid = 0;
          n_hit = 0;
          for (int j = 0; j <= ways; j++) begin
            lookup_pc = pc_of(p, sets_s[si], j); #1;
            n_hit += hit;
          end
          `CHECK_EQ(n_hit, ways, $sformatf("budget %0d partition %0d set %0d capacity", g, p, sets_s[si]))
        end
      end
      done++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (done == NB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
