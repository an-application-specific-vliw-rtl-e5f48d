// mem_ctrl: memory controller between the requesters of the core and the
// two ports of the 16-bank data memory.
//
// Requesters are the slot-0 load/store unit (one request per DM port), the
// line-buffer fill engine and the DMA. Every request names a word address and
// up to 16 consecutive words (a lane mask); the controller rotates lanes onto
// banks (word w is in bank w mod 16), so vectors need not be aligned.
// Port A serves the load/store unit first, then the DMA. Port B serves the
// load/store unit first, then the line buffer, then the DMA. A requester
// that is not granted keeps its request up and retries. Read data comes
// back, rotated into lane order, on the cycle after the grant, with a valid
// flag for the line buffer and the DMA. The priority order is this design's
// choice; the paper only says the DMA and the line buffer share the
// interface with the load/store unit and run concurrently with it.
module mem_ctrl
  import convaix_pkg::*;
#(
  parameter int unsigned BANKS      = 16,
  parameter int unsigned BANK_WORDS = 4096,
  localparam int unsigned RB = $clog2(BANK_WORDS)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  mreq_t lsu_a,
  input  mreq_t lsu_b,
  input  mreq_t lb,
  input  mreq_t dma,
  output logic  lb_gnt,
  output logic  dma_gnt,
  output vec_t  rd_a,        // port A read data (load/store unit)
  output vec_t  rd_b,        // port B read data (load/store unit)
  output logic  lb_rvalid,
  output vec_t  lb_rdata,
  output logic  dma_rvalid,
  output vec_t  dma_rdata,
  // bank side
  output logic [BANKS-1:0]         a_en, a_we, b_en, b_we,
  output logic [BANKS-1:0][RB-1:0] a_row, b_row,
  output logic [BANKS-1:0][DW-1:0] a_wdata, b_wdata,
  input  logic [BANKS-1:0][DW-1:0] a_rdata, b_rdata
);
  mreq_t pa, pb;
  logic  dma_on_a, dma_on_b;

  always_comb begin
    dma_on_a = dma.req && !lsu_a.req;
    dma_on_b = dma.req && lsu_a.req && !lsu_b.req && !lb.req;
    lb_gnt   = lb.req && !lsu_b.req;
    dma_gnt  = dma_on_a || dma_on_b;
    pa = lsu_a.req ? lsu_a : (dma_on_a ? dma : '0);
    pb = lsu_b.req ? lsu_b : (lb_gnt ? lb : (dma_on_b ? dma : '0));
  end

  // lane -> bank mapping for one port
  function automatic void map_port(input mreq_t p,
                                   output logic [BANKS-1:0] en, output logic [BANKS-1:0] we,
                                   output logic [BANKS-1:0][RB-1:0] row,
                                   output logic [BANKS-1:0][DW-1:0] wd);
    logic [3:0]  lane;
    logic [15:0] wa;
    for (int g = 0; g < BANKS; g++) begin
      lane   = 4'(g - int'(p.addr[3:0]));
      wa     = p.addr + 16'(lane);
      en[g]  = p.req && p.lanes[lane];
      we[g]  = p.req && p.we && p.lanes[lane];
      row[g] = wa[4 +: RB];
      wd[g]  = p.wdata[lane];
    end
  endfunction

  always_comb begin
    map_port(pa, a_en, a_we, a_row, a_wdata);
    map_port(pb, b_en, b_we, b_row, b_wdata);
  end

  // remember rotation and owner of each port for the returning data
  logic [3:0] rot_a, rot_b;
  logic       lb_rd_q, dma_rd_a_q, dma_rd_b_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rot_a <= '0; rot_b <= '0;
      lb_rd_q <= 1'b0; dma_rd_a_q <= 1'b0; dma_rd_b_q <= 1'b0;
    end else begin
      if (pa.req && !pa.we) rot_a <= pa.addr[3:0];
      if (pb.req && !pb.we) rot_b <= pb.addr[3:0];
      lb_rd_q    <= lb_gnt && !lb.we;
      dma_rd_a_q <= dma_on_a && !dma.we;
      dma_rd_b_q <= dma_on_b && !dma.we;
    end
  end

  always_comb begin
    for (int i = 0; i < VLEN; i++) begin
      rd_a[i] = a_rdata[4'(int'(rot_a) + i)];
      rd_b[i] = b_rdata[4'(int'(rot_b) + i)];
    end
    lb_rvalid  = lb_rd_q;
    lb_rdata   = rd_b;
    dma_rvalid = dma_rd_a_q || dma_rd_b_q;
    dma_rdata  = dma_rd_b_q ? rd_b : rd_a;
  end

  // every request must move at least one word
  always_ff @(posedge clk)
    if (rst_n) assert (!(pa.req && pa.lanes == '0) && !(pb.req && pb.lanes == '0))
      else $error("mem_ctrl: request without lanes");
endmodule
