// fetch: the instruction fetch stage (IF) with the program counter.
//
// Each cycle it reads the bundle at pc from the program memory; the bundle
// is in ID one cycle later (id_valid, id_pc). A taken branch resolved in E1
// (redirect) loads the target and squashes the two younger bundles (the one
// being fetched and the one in ID). stall holds pc and the ID bundle.
// halt stops fetching for good until start. After reset fetch waits for
// start and begins at address 0. Branch resolution in E1 with squashing is
// this design's choice.
module fetch
  import convaix_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  stall,
  input  logic  redirect,
  input  pc_t   target,
  input  logic  halt,
  output logic  pm_rd_en,
  output pc_t   pm_rd_addr,
  output logic  id_valid,
  output pc_t   id_pc,
  output logic  running
);
  pc_t pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; running <= 1'b0; id_valid <= 1'b0; id_pc <= '0;
    end else if (start) begin
      pc <= '0; running <= 1'b1; id_valid <= 1'b0;
    end else if (halt || redirect) begin
      running  <= running && !halt;
      pc       <= target;
      id_valid <= 1'b0;
    end else if (!stall) begin
      id_valid <= running;
      id_pc    <= pc;
      if (running) pc <= pc + 1'b1;
    end
  end

  assign pm_rd_en   = running && !stall && !redirect && !halt;
  assign pm_rd_addr = pc;
endmodule
