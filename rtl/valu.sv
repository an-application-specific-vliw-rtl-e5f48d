// valu: the vector ALU of one issue slot (slots 1-3): an operand-prepare
// stage feeding 4 SIMD vector slices of 16 lanes, 64 MACs per cycle.
//
// An operation enters in E3 with its operands already read by the core:
// a[s], the per-slice operand from VR sub-region s, and b, one vector that
// operand_prepare broadcasts or permutes to all slices. Slice s accumulates
// into acc[s], entry s of this ALU's own VRl sub-region, which the core reads
// in E5 and writes from acc_we/acc_wdata at the end of E6. V_OUT narrows each
// accumulator and returns it on vr_wdata[s], for VR entry 4*s + d.
// Latency: E3 in, results written at the end of E6 (4 cycles). Slice count
// and width follow the paper; the operand routing is this design's.
module valu
  import convaix_pkg::*;
#(
  parameter int unsigned NSLICE = 4
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  v_dec_t                           in_op,
  input  vcfg_t                            cfg,
  input  logic [NSLICE-1:0][VLEN-1:0][3:0] pattern,
  input  vec_t [NSLICE-1:0]                a,
  input  vec_t                             b,
  input  accv_t [NSLICE-1:0]               acc_in,
  output logic [NSLICE-1:0]                acc_we,
  output accv_t [NSLICE-1:0]               acc_wdata,
  output logic [NSLICE-1:0]                vr_we,
  output logic [1:0]                       vr_d,
  output vec_t [NSLICE-1:0]                vr_wdata,
  output logic                             bypass
);
  vec_t [NSLICE-1:0] bp;
  logic              is_vec;
  logic [NSLICE-1:0] byp;
  logic [NSLICE-1:0][1:0] od;

  assign is_vec = in_valid && (in_op.op == V_MAC || in_op.op == V_MUL ||
                               in_op.op == V_OUT || in_op.op == V_CLR);

  operand_prepare #(.NSLICE(NSLICE)) u_prep (
    .perm_en(in_op.perm), .pattern(pattern), .vin(b), .vout(bp)
  );

  for (genvar s = 0; s < NSLICE; s++) begin : gen_slice
    vec_slice u_slice (
      .clk, .rst_n,
      .in_valid(is_vec), .in_op(in_op.op), .in_d(in_op.d[1:0]), .in_cfg(cfg),
      .in_a(a[s]), .in_b(bp[s]),
      .acc_in(acc_in[s]),
      .acc_we(acc_we[s]), .acc_wdata(acc_wdata[s]),
      .out_we(vr_we[s]), .out_d(od[s]), .out_wdata(vr_wdata[s]),
      .bypass(byp[s])
    );
  end

  assign vr_d   = od[0];
  assign bypass = |byp;
endmodule
