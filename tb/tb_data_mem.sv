// tb_data_mem: writes every bank through port A with distinct rows and reads
// them back through port B, checking that the 16 banks are independent.
module tb_data_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] a_en, a_we, b_en, b_we;
  logic [15:0][11:0] a_row, b_row;
  logic [15:0][15:0] a_wdata, b_wdata, a_rdata, b_rdata;

  data_mem dut (.*);

  function automatic logic [15:0] pat(int g, int r);
    return 16'((g * 7919 + r * 104729) ^ (r << 4));
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0;
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      a_en = '1; a_we = '1;
      for (int g = 0; g < 16; g++) begin a_row[g] = 12'((r * 37 + g) % 4096); a_wdata[g] = pat(g, r); end
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int r = 0; r < 64; r++) begin
      b_en = '1; b_we = 0;
      for (int g = 0; g < 16; g++) b_row[g] = 12'((r * 37 + g) % 4096);
      @(negedge clk);
      for (int g = 0; g < 16; g++) begin
        checks++;
        if (b_rdata[g] !== pat(g, r)) begin failures++; $display("bank %0d row %0d", g, r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
