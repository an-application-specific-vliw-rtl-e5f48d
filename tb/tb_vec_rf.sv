// tb_vec_rf: the VR configuration (16 x 256 bit) with 15 write ports; random
// writes, highest port wins on a clash; checked against a reference array.
module tb_vec_rf;
  localparam int NW = 15;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NW-1:0] we; logic [NW-1:0][3:0] waddr; logic [NW-1:0][255:0] wdata;
  logic [15:0][255:0] regs;
  logic [255:0] ref_r [16];

  vec_rf #(.NREGS(16), .W(256), .NW(NW)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = '0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) ref_r[i] = '0;
    for (int n = 0; n < 500; n++) begin
      for (int p = 0; p < NW; p++) begin
        we[p] = ($urandom_range(0, 3) == 0); waddr[p] = 4'($urandom);
        wdata[p] = {8{$urandom}};
      end
      @(negedge clk);
      for (int p = 0; p < NW; p++) if (we[p]) ref_r[waddr[p]] = wdata[p];
      for (int i = 0; i < 16; i++) begin checks++; if (regs[i] !== ref_r[i]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
