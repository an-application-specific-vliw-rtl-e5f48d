// ctrl_unit: the controller of slot 0 (E1). It resolves branches and jumps,
// halts the core, and stalls the front of the pipeline while a background
// unit is busy.
//
//   BNZ/BEZ  taken if R[ra] != 0 / == 0; target = pc + imm (bundles)
//   J        always taken
//   HALT     stops fetching; older bundles drain
//   WAIT     stall while the DMA (imm[0]) and/or the line-buffer fill
//            (imm[1]) is busy
//   DMA / LBFILL stall while the respective engine is still busy
// A stall holds IF, ID and E1 and sends a bubble into E2. Only the purpose
// ("control instructions" in slot 0) is from the paper; the operations and
// their timing are this design's. Combinational.
module ctrl_unit
  import convaix_pkg::*;
(
  input  logic        valid,
  input  s0_dec_t     s0,
  input  pc_t         pc,
  input  logic [15:0] ra_val,
  input  logic        dma_busy,
  input  logic        lb_busy,
  output logic        redirect,
  output pc_t         target,
  output logic        stall,
  output logic        halt
);
  always_comb begin
    redirect = 1'b0;
    halt     = 1'b0;
    stall    = 1'b0;
    target   = pc + PCW'(s0.imm);
    if (valid) begin
      unique case (s0.op)
        S0_BNZ:    redirect = (ra_val != 16'd0);
        S0_BEZ:    redirect = (ra_val == 16'd0);
        S0_J:      redirect = 1'b1;
        S0_HALT:   begin halt = 1'b1; target = pc + 1'b1; end
        S0_WAIT:   stall = (s0.imm[0] && dma_busy) || (s0.imm[1] && lb_busy);
        S0_DMA:    stall = dma_busy;
        S0_LBFILL: stall = lb_busy;
        default: ;
      endcase
    end
  end
endmodule
