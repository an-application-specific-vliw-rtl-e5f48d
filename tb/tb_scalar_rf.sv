// tb_scalar_rf: random writes on both ports against a reference array,
// including port-1-wins on a clash and reset to zero.
module tb_scalar_rf;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we0, we1; logic [4:0] wa0, wa1; logic [15:0] wd0, wd1;
  logic [31:0][15:0] regs;
  logic [15:0] ref_r [32];

  scalar_rf dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we0 = 0; we1 = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin checks++; if (regs[i] !== 16'h0) failures++; ref_r[i] = 0; end
    for (int n = 0; n < 1000; n++) begin
      we0 = 1'($urandom); we1 = 1'($urandom);
      wa0 = 5'($urandom); wa1 = (n % 7 == 0) ? wa0 : 5'($urandom);
      wd0 = 16'($urandom); wd1 = 16'($urandom);
      @(negedge clk);
      if (we0) ref_r[wa0] = wd0;
      if (we1) ref_r[wa1] = wd1;
      for (int i = 0; i < 32; i++) begin checks++; if (regs[i] !== ref_r[i]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
