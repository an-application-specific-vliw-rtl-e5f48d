// prog_mem: the 16 KByte program memory (PM), 1024 VLIW bundles of 128 bit.
//
// Instruction fetch reads one bundle per cycle; the bundle appears on the
// cycle after rd_en and holds while rd_en is low (used when the pipeline
// stalls). A separate write port lets a host load the program before start.
// The paper gives only the size; the 128-bit bundle (4 slots x 32 bit) and
// the host port are this design's choices.
module prog_mem #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned BW    = 128,
  localparam int unsigned AB   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AB-1:0] rd_addr,
  output logic [BW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AB-1:0] wr_addr,
  input  logic [BW-1:0] wr_data
);
  logic [BW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
