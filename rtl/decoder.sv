// decoder: instruction decode (ID stage). Splits a 128-bit VLIW bundle into
// the slot-0 operation (bits 31:0) and the three vector-slot operations
// (bits 63:32, 95:64, 127:96) and extracts their fields. Unknown opcodes
// decode as NOP; unit operations (RELU, MAX, PMAX) are honoured in slot 1
// only, as the paper puts the max-pooling/activation unit in slot 1.
// The encoding is this design's own (see convaix_pkg). Combinational.
module decoder
  import convaix_pkg::*;
#(
  parameter int unsigned NVALU = 3
) (
  input  logic [32*(NVALU+1)-1:0] bundle,
  output s0_dec_t                 s0,
  output v_dec_t [NVALU-1:0]      v
);
  logic [31:0] w0;
  assign w0 = bundle[31:0];

  always_comb begin
    s0.rd   = w0[25:21];
    s0.ra   = w0[20:16];
    s0.rb   = w0[15:11];
    s0.imm  = w0[15:0];
    s0.func = alu_func_e'(w0[3:0]);
    if (w0[31:26] <= 6'(S0_VPERM)) s0.op = s0_op_e'(w0[31:26]);
    else                           s0.op = S0_NOP;

    for (int k = 0; k < NVALU; k++) begin
      logic [31:0] w;
      w = bundle[32*(k+1) +: 32];
      v[k].perm = w[26];
      v[k].d    = w[25:22];
      v[k].b    = w[21:18];
      v[k].vb   = w[17:14];
      v[k].ia   = w[13:12];
      unique case (w[31:27])
        5'(V_MAC), 5'(V_MUL), 5'(V_OUT), 5'(V_CLR): v[k].op = v_op_e'(w[31:27]);
        5'(V_RELU), 5'(V_MAX), 5'(V_PMAX):
          v[k].op = (k == 0) ? v_op_e'(w[31:27]) : V_NOP;
        default: v[k].op = V_NOP;
      endcase
    end
  end
endmodule
