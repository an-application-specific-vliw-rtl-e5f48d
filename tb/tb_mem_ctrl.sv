// tb_mem_ctrl: memory controller with the 16 DM banks. Checks unaligned
// vector writes/reads on both ports, lane masks, scalar accesses, and the
// port priorities (load/store > line buffer > DMA) with read-data routing.
module tb_mem_ctrl;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mreq_t lsu_a, lsu_b, lb, dma;
  logic lb_gnt, dma_gnt, lb_rvalid, dma_rvalid;
  vec_t rd_a, rd_b, lb_rdata, dma_rdata;
  logic [15:0] a_en, a_we, b_en, b_we;
  logic [15:0][11:0] a_row, b_row;
  logic [15:0][15:0] a_wdata, b_wdata, a_rdata, b_rdata;
  word_t ref_m [int];

  mem_ctrl dut (.*);
  data_mem u_dm (.*);

  function automatic word_t refw(int a);
    return ref_m.exists(a) ? ref_m[a] : 16'h0;
  endfunction

  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    lsu_a = '0; lsu_b = '0; lb = '0; dma = '0;
    // zero a window so reads are defined
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 1024; a += 16) begin
      @(negedge clk);
      lsu_a = '0; lsu_a.req = 1; lsu_a.we = 1; lsu_a.addr = 16'(a); lsu_a.lanes = '1;
      for (int l = 0; l < 16; l++) begin lsu_a.wdata[l] = 16'(a + l + 3); ref_m[a+l] = 16'(a + l + 3); end
    end
    // random unaligned vector writes on A, scalar/masked writes on B
    for (int n = 0; n < 200; n++) begin
      int aa, ab;
      @(negedge clk);
      aa = $urandom_range(0, 1000); ab = $urandom_range(0, 1000);
      lsu_a = '0; lsu_a.req = 1; lsu_a.we = 1; lsu_a.addr = 16'(aa); lsu_a.lanes = '1;
      for (int l = 0; l < 16; l++) lsu_a.wdata[l] = 16'($urandom);
      lsu_b = '0; lsu_b.req = 1; lsu_b.we = 1; lsu_b.addr = 16'(ab); lsu_b.lanes = 16'($urandom) | 16'h0100;
      for (int l = 0; l < 16; l++) lsu_b.wdata[l] = 16'($urandom);
      for (int l = 0; l < 16; l++) ref_m[aa+l] = lsu_a.wdata[l];
      for (int l = 0; l < 16; l++) if (lsu_b.lanes[l]) ref_m[ab+l] = lsu_b.wdata[l];
      // overlapping words: B wins in the bank
    end
    // reads on both ports
    for (int n = 0; n < 200; n++) begin
      int aa, ab;
      @(negedge clk);
      aa = $urandom_range(0, 1000); ab = $urandom_range(0, 1000);
      lsu_a = '0; lsu_a.req = 1; lsu_a.addr = 16'(aa); lsu_a.lanes = '1;
      lsu_b = '0; lsu_b.req = 1; lsu_b.addr = 16'(ab); lsu_b.lanes = '1;
      @(negedge clk);
      lsu_a = '0; lsu_b = '0;
      for (int l = 0; l < 16; l++) begin
        chk(rd_a[l] == refw(aa + l), $sformatf("rd_a addr %0d lane %0d", aa, l));
        chk(rd_b[l] == refw(ab + l), $sformatf("rd_b addr %0d lane %0d", ab, l));
      end
    end
    // arbitration: LSU on A and B -> line buffer and DMA wait
    @(negedge clk);
    lsu_a = '0; lsu_a.req = 1; lsu_a.addr = 16'd0; lsu_a.lanes = '1;
    lsu_b = '0; lsu_b.req = 1; lsu_b.addr = 16'd32; lsu_b.lanes = '1;
    lb = '0;  lb.req = 1;  lb.addr = 16'd64;  lb.lanes = '1;
    dma = '0; dma.req = 1; dma.addr = 16'd80; dma.lanes = 16'h00FF;
    #1; chk(!lb_gnt && !dma_gnt, "all blocked");
    // only A busy: line buffer on B, DMA waits
    lsu_b = '0; #1; chk(lb_gnt && !dma_gnt, "lb on B");
    @(negedge clk);
    chk(lb_rvalid && !dma_rvalid, "lb rvalid");
    for (int l = 0; l < 16; l++) chk(lb_rdata[l] == refw(64 + l), "lb data");
    // A free: DMA on A, line buffer on B in the same cycle
    lsu_a = '0; #1; chk(lb_gnt && dma_gnt, "both granted");
    @(negedge clk);
    chk(lb_rvalid && dma_rvalid, "both rvalid");
    for (int l = 0; l < 8; l++) chk(dma_rdata[l] == refw(80 + l), "dma data on A");
    // only A busy and no line buffer: DMA on B
    lsu_a.req = 1; lsu_a.lanes = '1; lb = '0; #1; chk(dma_gnt, "dma on B");
    @(negedge clk);
    for (int l = 0; l < 8; l++) chk(dma_rdata[l] == refw(80 + l), "dma data on B");
    lsu_a = '0; dma = '0;
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
