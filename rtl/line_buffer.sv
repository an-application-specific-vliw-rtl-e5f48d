// line_buffer: application-specific buffer that caches IFMap rows for the
// vector ALUs.
//
// Storage is LB_WORDS words of 16 bit, addressed circularly. A fill engine
// copies `count` vectors (16 words each) from consecutive DM addresses into
// consecutive line-buffer addresses in the background: it asks the memory
// controller for one vector per cycle and writes each returning vector one
// cycle after its grant. fill_busy is high from the start command until the
// last vector is written. Meanwhile the read port returns, combinationally,
// 16 words starting at rd_base with a stride of 1..MAX_STRIDE words (larger
// values are clipped to MAX_STRIDE), which
// is how strided convolutions get their inputs without extra moves.
// The paper describes the purpose (row cache, own memory access,
// simultaneous fill and strided reads); capacity, stride range and the fill
// command are this design's choices.
module line_buffer
  import convaix_pkg::*;
#(
  parameter int unsigned LB_WORDS   = 512,
  parameter int unsigned MAX_STRIDE = 4,
  localparam int unsigned LBA = $clog2(LB_WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // fill command
  input  logic            fill_start,
  input  logic [15:0]     fill_dm_addr,
  input  logic [LBA-1:0]  fill_lb_addr,
  input  logic [15:0]     fill_count,
  output logic            fill_busy,
  // memory controller
  output mreq_t           mem,
  input  logic            mem_gnt,
  input  logic            mem_rvalid,
  input  vec_t            mem_rdata,
  // strided read
  input  logic [LBA-1:0]  rd_base,
  input  logic [2:0]      rd_stride,   // 1..MAX_STRIDE
  output vec_t            rd_data
);
  word_t          buf_q [LB_WORDS];
  logic [15:0]    dm_a, to_issue, to_return;
  logic [LBA-1:0] lb_a, wr_a;

  assign fill_busy = (to_return != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dm_a <= '0; lb_a <= '0; wr_a <= '0; to_issue <= '0; to_return <= '0;
    end else begin
      if (fill_start && !fill_busy) begin
        dm_a <= fill_dm_addr; lb_a <= fill_lb_addr; wr_a <= fill_lb_addr;
        to_issue <= fill_count; to_return <= fill_count;
      end else begin
        if (mem.req && mem_gnt) begin
          dm_a <= dm_a + 16'd16; lb_a <= lb_a + LBA'(16); to_issue <= to_issue - 16'd1;
        end
        if (mem_rvalid) begin
          wr_a <= wr_a + LBA'(16); to_return <= to_return - 16'd1;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (mem_rvalid)
      for (int i = 0; i < VLEN; i++) buf_q[LBA'(wr_a + LBA'(i))] <= mem_rdata[i];

  always_comb begin
    mem       = '0;
    mem.req   = (to_issue != 0);
    mem.addr  = dm_a;
    mem.lanes = '1;
  end

  // strides above MAX_STRIDE are clipped to it
  logic [2:0] eff_stride;
  assign eff_stride = (int'(rd_stride) > int'(MAX_STRIDE)) ? 3'(MAX_STRIDE) : rd_stride;

  always_comb
    for (int i = 0; i < VLEN; i++)
      rd_data[i] = buf_q[LBA'(rd_base + LBA'(i * int'(eff_stride)))];

  always_ff @(posedge clk)
    if (rst_n) assert (!mem_rvalid || to_return != 0)
      else $error("line_buffer: read data without an open fill");
endmodule
