// tb_ctrl_unit: branch conditions and targets, jump, halt, and the stall
// conditions of WAIT/DMA/LBFILL against the busy flags.
module tb_ctrl_unit;
  import convaix_pkg::*;
  int checks = 0, failures = 0;
  logic valid, dma_busy, lb_busy, redirect, stall, halt;
  s0_dec_t s0; pc_t pc, target; logic [15:0] ra_val;

  ctrl_unit dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic er, es, eh; pc_t et;
      s0 = '0;
      s0.op  = s0_op_e'($urandom_range(0, 20));
      s0.imm = 16'($urandom);
      valid = ($urandom_range(0, 7) != 0);
      pc = pc_t'($urandom);
      ra_val = ($urandom_range(0, 1) == 0) ? 16'd0 : 16'($urandom);
      dma_busy = 1'($urandom); lb_busy = 1'($urandom);
      er = 0; es = 0; eh = 0; et = pc_t'(int'(pc) + int'(s0.imm));
      if (valid) case (s0.op)
        S0_BNZ: er = (ra_val != 0);
        S0_BEZ: er = (ra_val == 0);
        S0_J:   er = 1;
        S0_HALT: begin eh = 1; et = pc_t'(int'(pc) + 1); end
        S0_WAIT: es = (s0.imm[0] && dma_busy) || (s0.imm[1] && lb_busy);
        S0_DMA:  es = dma_busy;
        S0_LBFILL: es = lb_busy;
        default: ;
      endcase
      #1;
      checks++;
      if (redirect !== er || stall !== es || halt !== eh || ((er || eh) && target !== et)) begin
        failures++; $display("op %0d", s0.op);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
