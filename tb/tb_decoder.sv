// tb_decoder: builds bundles from random fields and checks the decoded
// slot-0 and vector-slot fields, NOP for unknown opcodes and the slot-1-only
// rule for the max-pooling/activation operations.
module tb_decoder;
  import convaix_pkg::*;
  int checks = 0, failures = 0;
  logic [127:0] bundle; s0_dec_t s0; v_dec_t [2:0] v;
  logic [5:0] o0; logic [4:0] vo [3];

  decoder dut (.*);

  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      bundle = {$urandom, $urandom, $urandom, $urandom};
      o0 = 6'($urandom_range(0, 25));
      bundle[31:26] = o0;
      for (int k = 0; k < 3; k++) begin
        vo[k] = 5'($urandom_range(0, 12));
        bundle[32*(k+1)+27 +: 5] = vo[k];
      end
      #1;
      chk(s0.op == ((o0 <= 20) ? s0_op_e'(o0) : S0_NOP), "s0 op");
      chk(s0.rd == bundle[25:21] && s0.ra == bundle[20:16] && s0.rb == bundle[15:11], "s0 regs");
      chk(s0.imm == bundle[15:0] && s0.func == alu_func_e'(bundle[3:0]), "s0 imm");
      for (int k = 0; k < 3; k++) begin
        v_op_e eo;
        if (vo[k] inside {[1:4]}) eo = v_op_e'(vo[k]);
        else if (vo[k] inside {[8:10]} && k == 0) eo = v_op_e'(vo[k]);
        else eo = V_NOP;
        chk(v[k].op == eo, $sformatf("v%0d op %0d", k, vo[k]));
        chk(v[k].perm == bundle[32*(k+1)+26] && v[k].d == bundle[32*(k+1)+22 +: 4] &&
            v[k].b == bundle[32*(k+1)+18 +: 4] && v[k].vb == bundle[32*(k+1)+14 +: 4] &&
            v[k].ia == bundle[32*(k+1)+12 +: 2], "v fields");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
