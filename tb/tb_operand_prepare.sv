// tb_operand_prepare: broadcast and random permutation patterns, including
// per-slice splats.
module tb_operand_prepare;
  import convaix_pkg::*;
  int checks = 0, failures = 0;
  logic perm_en; logic [3:0][15:0][3:0] pattern; vec_t vin; vec_t [3:0] vout;

  operand_prepare dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      perm_en = 1'(n % 2);
      for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l++)
        pattern[s][l] = (n % 4 == 1) ? 4'(s + 3) : 4'($urandom);
      for (int l = 0; l < 16; l++) vin[l] = 16'($urandom);
      #1;
      for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l++) begin
        checks++;
        if (vout[s][l] !== (perm_en ? vin[pattern[s][l]] : vin[l])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
