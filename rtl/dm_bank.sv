// dm_bank: one 8 KByte bank of the data memory, 4096 words of 16 bit with
// two independent synchronous ports (A and B).
//
// Each port reads or writes one word per cycle; read data appears on the
// cycle after the request and holds until the next read on that port. A
// write to the same word from both ports in one cycle keeps port B's data.
// The paper uses dual-ported foundry SRAM macros; here the bank is an array
// with the same port behaviour. The 16-bit width is this design's choice so
// that 16 banks together deliver one 256-bit vector per port.
module dm_bank #(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned DW    = 16,
  localparam int unsigned ABITS = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [ABITS-1:0] a_addr,
  input  logic [DW-1:0]    a_wdata,
  output logic [DW-1:0]    a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [ABITS-1:0] b_addr,
  input  logic [DW-1:0]    b_wdata,
  output logic [DW-1:0]    b_rdata
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end
endmodule
