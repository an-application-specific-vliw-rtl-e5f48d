// data_mem: the 128 KByte on-chip data memory (DM), 16 dual-ported banks of
// 8 KByte.
//
// Words are interleaved over the banks: word address w lives in bank
// w mod 16, row w / 16. Any 16 consecutive words therefore sit in 16
// different banks and one 256-bit vector can be read or written per port and
// cycle, two vectors per cycle with both ports, as the paper requires. This
// module only holds the banks; the memory controller forms the per-bank
// requests. Read data appears one cycle after the request.
module data_mem
  import convaix_pkg::*;
#(
  parameter int unsigned BANKS      = 16,
  parameter int unsigned BANK_WORDS = 4096,
  localparam int unsigned RB = $clog2(BANK_WORDS)
) (
  input  logic                       clk,
  input  logic [BANKS-1:0]           a_en,
  input  logic [BANKS-1:0]           a_we,
  input  logic [BANKS-1:0][RB-1:0]   a_row,
  input  logic [BANKS-1:0][DW-1:0]   a_wdata,
  output logic [BANKS-1:0][DW-1:0]   a_rdata,
  input  logic [BANKS-1:0]           b_en,
  input  logic [BANKS-1:0]           b_we,
  input  logic [BANKS-1:0][RB-1:0]   b_row,
  input  logic [BANKS-1:0][DW-1:0]   b_wdata,
  output logic [BANKS-1:0][DW-1:0]   b_rdata
);
  for (genvar g = 0; g < BANKS; g++) begin : gen_DM
    dm_bank #(.WORDS(BANK_WORDS), .DW(DW)) inst_DM (
      .clk,
      .a_en(a_en[g]), .a_we(a_we[g]), .a_addr(a_row[g]), .a_wdata(a_wdata[g]), .a_rdata(a_rdata[g]),
      .b_en(b_en[g]), .b_we(b_we[g]), .b_addr(b_row[g]), .b_wdata(b_wdata[g]), .b_rdata(b_rdata[g])
    );
  end
endmodule
