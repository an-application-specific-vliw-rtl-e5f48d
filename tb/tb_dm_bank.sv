// tb_dm_bank: random reads and writes on both ports of one DM bank against
// a reference array; checks one-cycle read latency and port-B-wins on a
// same-address double write.
module tb_dm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_en, a_we, b_en, b_we;
  logic [11:0] a_addr, b_addr;
  logic [15:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [15:0] ref_m [4096];

  dm_bank dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0;
    // fill
    for (int i = 0; i < 4096; i += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 12'(i);   a_wdata = 16'($urandom);
      b_en = 1; b_we = 1; b_addr = 12'(i+1); b_wdata = 16'($urandom);
      ref_m[i] = a_wdata; ref_m[i+1] = b_wdata;
    end
    // same address from both ports: B wins
    @(negedge clk); a_addr = 12'd7; b_addr = 12'd7; a_wdata = 16'h1111; b_wdata = 16'h2222;
    ref_m[7] = 16'h2222;
    // random reads
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      a_we = 0; b_we = 0;
      a_addr = (n == 0) ? 12'd7 : 12'($urandom); b_addr = 12'($urandom);
      @(negedge clk);
      a_en = 0; b_en = 0;
      checks++; if (a_rdata !== ref_m[a_addr]) begin failures++; $display("A mismatch @%0d", a_addr); end
      checks++; if (b_rdata !== ref_m[b_addr]) begin failures++; $display("B mismatch @%0d", b_addr); end
      // data must hold while the port is idle
      @(negedge clk);
      checks++; if (a_rdata !== ref_m[a_addr]) failures++;
      a_en = 1; b_en = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
