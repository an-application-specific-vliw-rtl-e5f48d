// tb_prog_mem: loads bundles through the host port and reads them back with
// one cycle latency; checks that the output holds when rd_en is low.
module tb_prog_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en, wr_en;
  logic [9:0] rd_addr, wr_addr;
  logic [127:0] rd_data, wr_data;
  logic [127:0] ref_m [1024];

  prog_mem dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'(i);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      ref_m[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      rd_en = 1; rd_addr = 10'($urandom);
      @(negedge clk);
      rd_en = 0;
      checks++; if (rd_data !== ref_m[rd_addr]) begin failures++; $display("mismatch @%0d", rd_addr); end
      rd_addr = rd_addr + 10'd1;
      @(negedge clk);
      checks++; if (rd_data !== ref_m[rd_addr - 10'd1]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
