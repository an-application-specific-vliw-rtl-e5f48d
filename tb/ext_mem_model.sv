// ext_mem_model: behavioural model of the external (off-chip) memory seen
// through the 128-bit DMA port. Not synthesizable design content.
//
// DEPTH beats of 8 x 16 bit; addresses count 16-bit words, beat = addr/8.
// A request is granted on the cycle it is raised unless the model is in a
// random back-off cycle (GNT_GAPS); a read returns ext_rvalid/ext_rdata
// LAT cycles after its grant. Writes take effect at the grant.
module ext_mem_model #(
  parameter int unsigned DEPTH    = 4096,
  parameter int unsigned LAT      = 3,
  parameter bit          GNT_GAPS = 1'b1
) (
  input  logic         clk,
  input  logic         ext_req,
  input  logic         ext_we,
  input  logic [31:0]  ext_addr,
  input  logic [127:0] ext_wdata,
  output logic         ext_gnt,
  output logic         ext_rvalid,
  output logic [127:0] ext_rdata
);
  logic [127:0] mem [DEPTH];
  logic [LAT-1:0]        vpipe = '0;
  logic [LAT-1:0][127:0] dpipe = '0;
  logic gap = 1'b0;

  assign ext_gnt    = ext_req && !gap;
  assign ext_rvalid = vpipe[LAT-1];
  assign ext_rdata  = dpipe[LAT-1];

  always_ff @(posedge clk) begin
    gap   <= GNT_GAPS ? ($urandom_range(0, 3) == 0) : 1'b0;
    vpipe <= {vpipe[LAT-2:0], ext_gnt && !ext_we};
    dpipe <= {dpipe[LAT-2:0], mem[(ext_addr / 8) % DEPTH]};
    if (ext_gnt && ext_we) mem[(ext_addr / 8) % DEPTH] <= ext_wdata;
  end
endmodule
