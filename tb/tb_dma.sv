// tb_dma: DMA between the external-memory model and the DM (through the
// memory controller). Moves a block in, checks DM contents, moves it out to
// another external address and checks it there; meanwhile port A is kept
// busy part of the time so the DMA must wait for grants.
module tb_dma;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, dir, busy;
  logic [31:0] ext_addr_i; logic [15:0] dm_addr_i, beats_i;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr; logic [127:0] ext_wdata, ext_rdata;
  mreq_t dm, lsu_a, lsu_b, lb;
  logic dm_gnt, dm_rvalid, lb_gnt, lb_rvalid;
  vec_t dm_rdata, rd_a, rd_b, lb_rdata;
  logic [15:0] a_en, a_we, b_en, b_we;
  logic [15:0][11:0] a_row, b_row;
  logic [15:0][15:0] a_wdata, b_wdata, a_rdata, b_rdata;
  int waits = 0;

  dma dut (.*);
  ext_mem_model #(.DEPTH(1024)) u_ext (.*);
  mem_ctrl u_mc (.clk, .rst_n, .lsu_a, .lsu_b, .lb, .dma(dm), .lb_gnt, .dma_gnt(dm_gnt),
                 .rd_a, .rd_b, .lb_rvalid, .lb_rdata, .dma_rvalid(dm_rvalid), .dma_rdata(dm_rdata),
                 .a_en, .a_we, .a_row, .a_wdata, .a_rdata, .b_en, .b_we, .b_row, .b_wdata, .b_rdata);
  data_mem u_dm (.*);

  always @(posedge clk) if (dm.req && !dm_gnt) waits++;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; dir = 0; lsu_a = '0; lsu_b = '0; lb = '0;
    for (int i = 0; i < 64; i++)
      for (int w = 0; w < 8; w++) u_ext.mem[i][16*w +: 16] = 16'(i * 8 + w + 100);
    repeat (2) @(negedge clk); rst_n = 1;
    // ext 0..255 words (32 beats) -> DM 37 (unaligned)
    @(negedge clk); start = 1; dir = 0; ext_addr_i = 0; dm_addr_i = 16'd37; beats_i = 16'd32;
    @(negedge clk); start = 0;
    checks++; if (!busy) failures++;
    // load/store traffic on both ports for a while: DMA must wait
    repeat (40) begin
      lsu_a = '0; lsu_a.req = 1; lsu_a.addr = 16'd2000; lsu_a.lanes = '1;
      lsu_b = '0; lsu_b.req = 1; lsu_b.addr = 16'd3000; lsu_b.lanes = '1;
      @(negedge clk);
    end
    lsu_a = '0; lsu_b = '0;
    while (busy) @(negedge clk);
    checks++; if (waits == 0) begin failures++; $display("DMA never waited"); end
    // read DM back through port A
    for (int a = 37; a < 37 + 256; a += 16) begin
      lsu_a = '0; lsu_a.req = 1; lsu_a.addr = 16'(a); lsu_a.lanes = '1;
      @(negedge clk);
      lsu_a = '0;
      for (int l = 0; l < 16; l++) begin
        checks++;
        if (rd_a[l] !== 16'(a - 37 + l + 100)) begin failures++; $display("DM %0d = %h", a+l, rd_a[l]); end
      end
    end
    // DM 37.. -> ext 4096 (beat 512)
    @(negedge clk); start = 1; dir = 1; ext_addr_i = 32'd4096; dm_addr_i = 16'd37; beats_i = 16'd32;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < 32; i++)
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (u_ext.mem[512 + i][16*w +: 16] !== 16'(i * 8 + w + 100)) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
