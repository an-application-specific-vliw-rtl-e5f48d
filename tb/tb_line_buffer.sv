// tb_line_buffer: line buffer with memory controller and DM. Fills rows from
// DM while the load/store unit competes for port B, then checks strided
// reads (stride 1..4, wrap-around) against the DM contents; also checks
// that reads work during a fill (old data) and the busy flag.
module tb_line_buffer;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic fill_start, fill_busy;
  logic [15:0] fill_dm_addr, fill_count;
  logic [8:0]  fill_lb_addr, rd_base;
  logic [2:0]  rd_stride;
  vec_t rd_data;
  mreq_t mem, lsu_a, lsu_b, dmq;
  logic mem_gnt, mem_rvalid, dma_gnt, dma_rvalid;
  vec_t mem_rdata, rd_a, rd_b, dma_rdata;
  logic [15:0] a_en, a_we, b_en, b_we;
  logic [15:0][11:0] a_row, b_row;
  logic [15:0][15:0] a_wdata, b_wdata, a_rdata, b_rdata;
  word_t lbref [512];
  int cyc;

  line_buffer dut (.*);
  mem_ctrl u_mc (.clk, .rst_n, .lsu_a, .lsu_b, .lb(mem), .dma(dmq), .lb_gnt(mem_gnt), .dma_gnt,
                 .rd_a, .rd_b, .lb_rvalid(mem_rvalid), .lb_rdata(mem_rdata), .dma_rvalid, .dma_rdata,
                 .a_en, .a_we, .a_row, .a_wdata, .a_rdata, .b_en, .b_we, .b_row, .b_wdata, .b_rdata);
  data_mem u_dm (.*);

  function automatic word_t dmv(int a); return 16'(a * 3 + 5); endfunction

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    fill_start = 0; lsu_a = '0; lsu_b = '0; dmq = '0; rd_base = 0; rd_stride = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 2048; a += 16) begin
      lsu_a = '0; lsu_a.req = 1; lsu_a.we = 1; lsu_a.addr = 16'(a); lsu_a.lanes = '1;
      for (int l = 0; l < 16; l++) lsu_a.wdata[l] = dmv(a + l);
      @(negedge clk);
    end
    lsu_a = '0;
    // fill 32 vectors (512 words) from DM 100 into LB 0
    fill_start = 1; fill_dm_addr = 16'd100; fill_lb_addr = 9'd0; fill_count = 16'd32;
    @(negedge clk); fill_start = 0;
    for (int i = 0; i < 512; i++) lbref[i] = dmv(100 + i);
    cyc = 0;
    // block port B every other cycle for a while
    while (fill_busy) begin
      lsu_b = '0;
      if (cyc < 20 && cyc % 2 == 0) begin lsu_b.req = 1; lsu_b.addr = 16'd0; lsu_b.lanes = '1; end
      cyc++;
      @(negedge clk);
    end
    lsu_b = '0;
    checks++; if (cyc < 32 + 10) begin failures++; $display("fill did not wait (%0d cycles)", cyc); end
    // second fill over LB 256..: 4 vectors from DM 1500, wraps nothing
    fill_start = 1; fill_dm_addr = 16'd1500; fill_lb_addr = 9'd500; fill_count = 16'd2;
    @(negedge clk); fill_start = 0;
    for (int i = 0; i < 32; i++) lbref[(500 + i) % 512] = dmv(1500 + i);
    checks++; if (!fill_busy) failures++;
    while (fill_busy) @(negedge clk);
    // strided reads
    for (int n = 0; n < 400; n++) begin
      rd_base = 9'($urandom); rd_stride = 3'($urandom_range(1, 4));
      #1;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (rd_data[l] !== lbref[(int'(rd_base) + l * int'(rd_stride)) % 512]) begin
          failures++; $display("base %0d stride %0d lane %0d", rd_base, rd_stride, l);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
