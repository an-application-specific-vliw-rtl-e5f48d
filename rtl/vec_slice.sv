// vec_slice: one SIMD vector slice of a vector ALU: 16 lanes of 16-bit
// fixed-point multiply-accumulate with 32-bit accumulators.
//
// Pipeline (one operation may enter per cycle, nothing stalls):
//   E4  operands arrive registered; precision gating zeroes the low 16-pg
//       bits of both operands (pg = 0 or 16: full width); 16 products.
//   E5  the accumulator (a VRl entry, read by the core in E5) is combined:
//       MAC acc+p, MUL p, CLR 0, or OUT narrows the accumulator to 16 bit
//       (add 2^(frac-1) if rounding, arithmetic shift right by frac,
//       saturate if enabled). If the operation one stage ahead (in E6)
//       writes the same accumulator, its result is used instead of the
//       stale register value (bypass).
//   E6  results leave registered: acc_we/acc_wdata to VRl, out_we/out_wdata
//       to VR; the register files take them at the end of E6.
// Lane counts, widths, precision gating, rounding scheme and fractional
// shift as run-time settings follow the paper; the stage split, the two
// rounding schemes and the wrap-around accumulation are this design's.
module vec_slice
  import convaix_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,     // operation entering E4 next edge
  input  v_op_e       in_op,
  input  logic [1:0]  in_d,
  input  vcfg_t       in_cfg,
  input  vec_t        in_a,
  input  vec_t        in_b,
  input  accv_t       acc_in,       // VRl entry, read in E5
  output logic        acc_we,
  output accv_t       acc_wdata,
  output logic        out_we,
  output logic [1:0]  out_d,
  output vec_t        out_wdata,
  output logic        bypass        // E5 took the accumulator from E6
);
  // ---------------- E4 ----------------
  logic   v4;  v_op_e op4;  logic [1:0] d4;  vcfg_t cfg4;  vec_t a4, b4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v4 <= 1'b0; op4 <= V_NOP; d4 <= '0; cfg4 <= '0; a4 <= '0; b4 <= '0;
    end else begin
      v4 <= in_valid; op4 <= in_op; d4 <= in_d; cfg4 <= in_cfg; a4 <= in_a; b4 <= in_b;
    end
  end

  word_t gmask;
  always_comb begin
    if (cfg4.pg == 5'd0 || cfg4.pg >= 5'd16) gmask = '1;
    else gmask = ~((16'd1 << (5'd16 - cfg4.pg)) - 16'd1);
  end

  accv_t prod4;
  logic signed [DW-1:0] ga, gb;
  always_comb
    for (int l = 0; l < VLEN; l++) begin
      ga = $signed(a4[l] & gmask);
      gb = $signed(b4[l] & gmask);
      prod4[l] = AW'(AW'(ga) * AW'(gb));
    end

  // ---------------- E5 ----------------
  logic   v5;  v_op_e op5;  logic [1:0] d5;  vcfg_t cfg5;  accv_t prod5;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v5 <= 1'b0; op5 <= V_NOP; d5 <= '0; cfg5 <= '0; prod5 <= '0;
    end else begin
      v5 <= v4; op5 <= op4; d5 <= d4; cfg5 <= cfg4; prod5 <= prod4;
    end
  end

  function automatic word_t narrow(logic [31:0] x, vcfg_t c);
    logic signed [32:0] t;
    t = $signed({x[31], x});
    if (c.rnd && c.frac != 0) t = t + (33'sd1 <<< (c.frac - 5'd1));
    t = t >>> c.frac;
    if (c.sat) begin
      if (t > 33'sd32767)       return 16'h7FFF;
      else if (t < -33'sd32768) return 16'h8000;
    end
    return t[15:0];
  endfunction

  logic  v6, we6_acc, we6_out;
  accv_t acc6;
  vec_t  out6;
  logic [1:0] d6;

  accv_t acc_eff, acc_new;
  vec_t  out_new;
  assign bypass  = v5 && (op5 != V_NOP) && v6 && we6_acc;
  assign acc_eff = (v6 && we6_acc) ? acc6 : acc_in;

  always_comb begin
    acc_new = acc_eff;
    out_new = '0;
    for (int l = 0; l < VLEN; l++) begin
      unique case (op5)
        V_MAC:   acc_new[l] = acc_eff[l] + prod5[l];
        V_MUL:   acc_new[l] = prod5[l];
        V_CLR:   acc_new[l] = '0;
        default: acc_new[l] = acc_eff[l];
      endcase
      out_new[l] = narrow(acc_eff[l], cfg5);
    end
  end

  // ---------------- E6 ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v6 <= 1'b0; we6_acc <= 1'b0; we6_out <= 1'b0; acc6 <= '0; out6 <= '0; d6 <= '0;
    end else begin
      v6      <= v5;
      we6_acc <= v5 && (op5 == V_MAC || op5 == V_MUL || op5 == V_CLR);
      we6_out <= v5 && (op5 == V_OUT);
      acc6    <= acc_new;
      out6    <= out_new;
      d6      <= d5;
    end
  end

  assign acc_we    = v6 && we6_acc;
  assign acc_wdata = acc6;
  assign out_we    = v6 && we6_out;
  assign out_wdata = out6;
  assign out_d     = d6;
endmodule
