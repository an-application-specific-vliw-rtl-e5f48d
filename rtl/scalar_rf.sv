// scalar_rf: the scalar register file R, 32 registers of 16 bit, shared by
// all slots.
//
// Two write ports: port 0 for ordinary results, port 1 for the upper half
// of a 32-bit result (register pair rd+1:rd); port 1 wins on a clash. All
// registers are visible on `regs`, so readers pick operands with their own
// multiplexers. Writes take effect at the clock edge; reset clears all
// registers. Size follows the paper; the port arrangement is this design's.
module scalar_rf
  import convaix_pkg::*;
#(
  parameter int unsigned NREGS = 32,
  parameter int unsigned W     = 16,
  localparam int unsigned RA   = $clog2(NREGS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we0,
  input  logic [RA-1:0]             wa0,
  input  logic [W-1:0]              wd0,
  input  logic                      we1,
  input  logic [RA-1:0]             wa1,
  input  logic [W-1:0]              wd1,
  output logic [NREGS-1:0][W-1:0]   regs
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) regs <= '0;
    else begin
      if (we0) regs[wa0] <= wd0;
      if (we1) regs[wa1] <= wd1;
    end
  end
endmodule
