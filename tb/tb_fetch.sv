// tb_fetch: sequential fetch after start, hold on stall, redirect squashing
// the ID bundle, and halt; the PM is modelled here as "bundle = address".
module tb_fetch;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, stall, redirect, halt, pm_rd_en, id_valid, running;
  pc_t target, pm_rd_addr, id_pc;

  fetch dut (.*);

  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s (t=%0t)", m, $time); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; stall = 0; redirect = 0; halt = 0; target = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!running && !pm_rd_en, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    chk(running && pm_rd_en && pm_rd_addr == 0 && !id_valid, "first fetch");
    for (int i = 1; i < 6; i++) begin
      @(negedge clk);
      chk(pm_rd_addr == pc_t'(i) && id_valid && id_pc == pc_t'(i - 1), "sequential");
    end
    // stall: everything holds
    stall = 1; #1; chk(!pm_rd_en, "no read in stall");
    repeat (3) begin @(negedge clk); chk(pm_rd_addr == 5 && id_valid && id_pc == 4, "stall holds"); end
    stall = 0;
    @(negedge clk); chk(pm_rd_addr == 6 && id_pc == 5, "after stall");
    // redirect to 100: next ID bundle is squashed
    redirect = 1; target = 10'd100; #1; chk(!pm_rd_en, "no read on redirect");
    @(negedge clk); redirect = 0;
    chk(pm_rd_addr == 100 && !id_valid, "redirect squash");
    @(negedge clk); chk(pm_rd_addr == 101 && id_valid && id_pc == 100, "after redirect");
    // halt
    halt = 1; target = 10'd102; @(negedge clk); halt = 0;
    chk(!running && !id_valid, "halted");
    repeat (3) begin @(negedge clk); chk(!pm_rd_en && !id_valid, "stays halted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
