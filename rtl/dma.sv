// dma: the simple DMA engine inside the memory interface. It moves a block
// of 128-bit beats (8 words of 16 bit) between external memory and the data
// memory while the core keeps computing.
//
// Command (one cycle of start): direction (0: external -> DM, 1: DM ->
// external), external word address (beat aligned), DM word address (any
// alignment) and number of beats. busy stays high until the last beat is
// done. One beat is in flight at a time:
//   to DM:   ext request until ext_gnt, wait ext_rvalid, write 8 words to DM
//            through the memory controller (retry until dm_gnt);
//   to ext:  read 8 words from DM (retry until dm_gnt), take dm_rvalid,
//            write the beat to external memory (hold until ext_gnt).
// The paper calls the engine simple and gives the 8 x 16 bit port; the
// handshake and the one-beat-at-a-time schedule are this design's choices.
module dma
  import convaix_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // command
  input  logic         start,
  input  logic         dir,
  input  logic [31:0]  ext_addr_i,
  input  logic [15:0]  dm_addr_i,
  input  logic [15:0]  beats_i,
  output logic         busy,
  // external memory port
  output logic         ext_req,
  output logic         ext_we,
  output logic [31:0]  ext_addr,
  output logic [127:0] ext_wdata,
  input  logic         ext_gnt,
  input  logic         ext_rvalid,
  input  logic [127:0] ext_rdata,
  // memory controller port
  output mreq_t        dm,
  input  logic         dm_gnt,
  input  logic         dm_rvalid,
  input  vec_t         dm_rdata
);
  typedef enum logic [2:0] {IDLE, X_REQ, X_WAIT, D_WR, D_RD, D_WAIT, X_WR} st_e;
  st_e         st;
  logic [31:0] ea;
  logic [15:0] da, left;
  logic [127:0] buf_q;

  assign busy = (st != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; ea <= '0; da <= '0; left <= '0; buf_q <= '0;
    end else begin
      unique case (st)
        IDLE: if (start && beats_i != 0) begin
          ea <= ext_addr_i; da <= dm_addr_i; left <= beats_i;
          st <= dir ? D_RD : X_REQ;
        end
        X_REQ:  if (ext_gnt) st <= X_WAIT;
        X_WAIT: if (ext_rvalid) begin buf_q <= ext_rdata; st <= D_WR; end
        D_WR:   if (dm_gnt) begin
          ea <= ea + 32'd8; da <= da + 16'd8; left <= left - 16'd1;
          st <= (left == 16'd1) ? IDLE : X_REQ;
        end
        D_RD:   if (dm_gnt) st <= D_WAIT;
        D_WAIT: if (dm_rvalid) begin buf_q <= dm_rdata[7:0]; st <= X_WR; end
        X_WR:   if (ext_gnt) begin
          ea <= ea + 32'd8; da <= da + 16'd8; left <= left - 16'd1;
          st <= (left == 16'd1) ? IDLE : D_RD;
        end
        default: st <= IDLE;
      endcase
    end
  end

  always_comb begin
    ext_req   = (st == X_REQ) || (st == X_WR);
    ext_we    = (st == X_WR);
    ext_addr  = ea;
    ext_wdata = buf_q;
    dm        = '0;
    dm.req    = (st == D_WR) || (st == D_RD);
    dm.we     = (st == D_WR);
    dm.addr   = da;
    dm.lanes  = 16'h00FF;
    dm.wdata[7:0] = buf_q;
  end
endmodule
