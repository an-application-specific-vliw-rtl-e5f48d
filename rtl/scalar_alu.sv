// scalar_alu: the slot-0 scalar ALU for address arithmetic and loop
// counters.
//
// 16-bit operations work on a[15:0], b[15:0] and give y[15:0] (y[31:16]
// zero). ADD32/SUB32 work on 32-bit register pairs (a, b = {R[r+1], R[r]})
// and give a 32-bit result, for external-memory addresses. Purely
// combinational; the core registers the result into E2. The 16- and 32-bit
// datapaths follow the paper; the operation list is this design's.
module scalar_alu
  import convaix_pkg::*;
(
  input  alu_func_e   func,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  output logic        wide     // result has a meaningful upper half
);
  logic [15:0] a16, b16;
  assign a16 = a[15:0];
  assign b16 = b[15:0];

  always_comb begin
    y    = '0;
    wide = 1'b0;
    unique case (func)
      F_ADD:   y[15:0] = a16 + b16;
      F_SUB:   y[15:0] = a16 - b16;
      F_AND:   y[15:0] = a16 & b16;
      F_OR:    y[15:0] = a16 | b16;
      F_XOR:   y[15:0] = a16 ^ b16;
      F_SHL:   y[15:0] = a16 << b16[3:0];
      F_SRA:   y[15:0] = 16'($signed(a16) >>> b16[3:0]);
      F_SRL:   y[15:0] = a16 >> b16[3:0];
      F_MUL:   y[15:0] = 16'(a16 * b16);
      F_SLT:   y[15:0] = {15'd0, $signed(a16) < $signed(b16)};
      F_ADD32: begin y = a + b; wide = 1'b1; end
      F_SUB32: begin y = a - b; wide = 1'b1; end
      default: y = '0;
    endcase
  end
endmodule
