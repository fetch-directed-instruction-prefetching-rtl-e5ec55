// fdipx_core_model: behavioural model of the core back end (not part of the
// design). It executes the program of fdipx_tb_pkg along its true path:
// every fetch bundle is compared, instruction by instruction, with the
// expected next address. Matching instructions retire; their words are
// checked against the program image; branches are resolved and sent back on
// `upd`, one per cycle, in order. At the first address off the true path the
// rest of the stream is discarded and, once the pending updates are out, a
// one-cycle redirect to the correct address is raised.
`timescale 1ns/1ps
module fdipx_core_model
  import fdipx_pkg::*;
#(
  parameter int FETCH_WIDTH = 4,
  parameter int READY_PCT   = 90
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               out_valid,
  output logic               out_ready,
  input  pc_t                out_pc,
  input  logic [CNT_W-1:0]   out_count,
  input  logic [INSTR_W-1:0] out_instr [FETCH_WIDTH],
  output logic               redirect_valid,
  output pc_t                redirect_pc,
  output br_update_t         upd
);
  import fdipx_tb_pkg::*;

  pc_t        exp_pc = MAIN;
  bit         pending = 0;
  br_update_t uq [$];
  int         main_iter = 0, f1_iter = 0;
  br_type_e   last_type;
  bit         last_taken = 0;
  pc_t        ret_stack [$];

  // statistics read by the testbench
  longint retired = 0, bundles = 0, redirects = 0, bad_words = 0, ras_ok = 0;
  longint taken_ok = 0;

  initial begin out_ready = 1'b1; redirect_valid = 1'b0; redirect_pc = '0; upd = '0; end

  always @(posedge clk) begin
    if (!rst_n) begin
      exp_pc = MAIN; pending = 0; uq.delete();
    end else begin
      if (out_valid && out_ready && !redirect_valid && !pending) begin
        bundles++;
        for (int k = 0; k < int'(out_count); k++) begin
          pc_t p; br_type_e t; pc_t tgt; logic tk;
          p = out_pc + pc_t'(k);
          if (p != exp_pc) begin
            pending = 1;
            last_taken = 0;
            break;
          end
          // the instruction after a taken branch arrived without a redirect:
          // the front end predicted that branch correctly
          if (last_taken && last_type == BR_RET) ras_ok++;
          if (last_taken) taken_ok++;
          if (out_instr[k] !== word_of(p)) begin
            bad_words++;
            $display("BAD WORD at %h: %h", p, out_instr[k]);
          end
          retired++;
          last_taken = 0;
          if (is_branch(p, t, tgt)) begin
            br_update_t u;
            case (p)
              MAIN + 46'h18: begin tk = (main_iter % 8) != 7; main_iter++; end
              F1 + 46'h08:   begin tk = (f1_iter % 4) != 3;   f1_iter++;   end
              default:       tk = 1'b1;
            endcase
            if (t == BR_CALL) ret_stack.push_back(p + 1'b1);
            if (t == BR_RET)  tgt = ret_stack.pop_back();
            u.valid = 1; u.pc = p; u.btype = t; u.taken = tk; u.target = tgt;
            uq.push_back(u);
            exp_pc = tk ? tgt : p + 1'b1;
            last_type = t; last_taken = tk;
          end else begin
            exp_pc = p + 1'b1;
          end
        end
      end
      // drive the next cycle's outputs
      upd <= (uq.size() > 0) ? uq.pop_front() : '0;
      if (pending && uq.size() == 0 && !redirect_valid) begin
        redirect_valid <= 1'b1;
        redirect_pc    <= exp_pc;
        redirects++;
        pending = 0;
      end else begin
        redirect_valid <= 1'b0;
      end
      out_ready <= ($urandom % 100) < READY_PCT;
    end
  end

endmodule
