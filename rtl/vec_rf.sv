// vec_rf: a vector register file with NW write ports, used twice in the
// core: as VR (16 x 256 bit, four sub-regions VR0..VR3 of 4 entries) and as
// VRl (12 x 512 bit accumulators, three sub-regions VRl0..VRl2).
//
// All entries are visible on `regs`; each reader selects its entry outside.
// In the core the vector ALUs address only their sub-regions (slice s of a
// vector ALU reads VR sub-region s; vector ALU k owns VRl sub-region k),
// while slot 0 reaches every entry, as in the paper. Writes take effect at
// the clock edge; when several ports write one entry in a cycle the highest
// port index wins. Reset clears the file.
module vec_rf #(
  parameter int unsigned NREGS = 16,
  parameter int unsigned W     = 256,
  parameter int unsigned NW    = 4,
  localparam int unsigned RA   = $clog2(NREGS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NW-1:0]             we,
  input  logic [NW-1:0][RA-1:0]     waddr,
  input  logic [NW-1:0][W-1:0]      wdata,
  output logic [NREGS-1:0][W-1:0]   regs
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) regs <= '0;
    else
      for (int p = 0; p < NW; p++)
        if (we[p] && int'(waddr[p]) < int'(NREGS)) regs[waddr[p]] <= wdata[p];
  end
endmodule
