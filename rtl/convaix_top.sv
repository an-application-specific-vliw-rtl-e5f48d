// convaix_top: the ConvAix core, a 4-slot VLIW processor with a vector
// instruction set for CNN layers.
//
// Pipeline: IF, ID, E1..E6 (8 stages). A 128-bit bundle holds one slot-0
// operation (control, scalar ALU, load/store, line buffer, DMA, vector-ALU
// configuration) and three vector operations (slots 1..3). Slot 0 reads R in
// E1 (with forwarding from E2), computes or accesses memory in E1 and writes
// back at the end of E2. Slot 1 may instead use the max-pooling/activation
// unit, which also reads in E1 and writes VR at the end of E2. Vector-ALU
// operations read VR in E3 (operand prepare), multiply in E4, accumulate or
// narrow in E5 and write VRl/VR at the end of E6, 3 x 4 x 16 = 192 MACs per
// cycle. The pipeline is exposed: apart from WAIT and a busy DMA/line-buffer
// command, nothing interlocks, and code must leave enough distance between
// a write and a dependent read (see the timing table in the documentation).
// Branches resolve in E1 and squash the two younger bundles.
// Slot 0 has one VR write port per sub-region: VLD2 uses two, and a VLD or
// line-buffer read with rd[4] set writes its vector into entry rd[1:0] of
// all four sub-regions, so one input row reaches operand A of every slice.
//
// Interfaces: host program load into PM (pm_we/pm_waddr/pm_wdata) and
// start; halted goes high once a HALT has drained the pipeline; the
// external memory port is 128 bit wide (8 x 16 bit) with request/grant and
// in-order read-valid. The block structure, sizes and stage count follow the
// paper; the instruction set, the stage assignment inside slot 0 and all
// handshakes are this design's.
module convaix_top
  import convaix_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pm_we,
  input  pc_t                 pm_waddr,
  input  logic [BUNDLE_W-1:0] pm_wdata,
  input  logic                start,
  output logic                halted,
  output logic                ext_req,
  output logic                ext_we,
  output logic [31:0]         ext_addr,
  output logic [127:0]        ext_wdata,
  input  logic                ext_gnt,
  input  logic                ext_rvalid,
  input  logic [127:0]        ext_rdata
);
  localparam int unsigned VR_NW  = NSLICE + 1 + NVALU * NSLICE;   // slot0 (one per sub-region), slot1 unit, vALUs
  localparam int unsigned VR_MA  = NSLICE;                         // port of the slot-1 unit
  localparam int unsigned VR_VA  = NSLICE + 1;                     // first vALU port
  localparam int unsigned VRL_NW = 1 + NVALU * NSLICE;   // slot0, vALUs
  localparam int unsigned LBA    = $clog2(LB_WORDS);

  // ------------------------------------------------------------------ IF/ID
  logic stall, redirect, halt_e1, running;
  pc_t  target;
  logic pm_rd_en;  pc_t pm_rd_addr;
  logic id_valid;  pc_t id_pc;
  logic [BUNDLE_W-1:0] id_bundle;

  fetch u_fetch (
    .clk, .rst_n, .start, .stall, .redirect, .target, .halt(halt_e1),
    .pm_rd_en, .pm_rd_addr, .id_valid, .id_pc, .running
  );

  prog_mem #(.DEPTH(PM_DEPTH), .BW(BUNDLE_W)) u_pm (
    .clk, .rd_en(pm_rd_en), .rd_addr(pm_rd_addr), .rd_data(id_bundle),
    .wr_en(pm_we), .wr_addr(pm_waddr), .wr_data(pm_wdata)
  );

  s0_dec_t id_s0;
  v_dec_t [NVALU-1:0] id_v;
  decoder #(.NVALU(NVALU)) u_dec (.bundle(id_bundle), .s0(id_s0), .v(id_v));

  // ------------------------------------------------------------------ E1
  logic e1_valid;  pc_t e1_pc;  s0_dec_t e1_s0;  v_dec_t [NVALU-1:0] e1_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e1_valid <= 1'b0; e1_pc <= '0; e1_s0 <= '0; e1_v <= '0;
    end else if (!stall) begin
      e1_valid <= id_valid && !redirect && !halt_e1 && !start;
      e1_pc    <= id_pc;
      e1_s0    <= id_s0;
      e1_v     <= id_v;
    end
  end

  // scalar register file and E2 -> E1 forwarding
  logic [NR-1:0][DW-1:0] R;
  logic  e2_valid;  s0_dec_t e2_s0;  logic [31:0] e2_alu;  logic e2_wide;
  logic  rf_we0, rf_we1;  logic [4:0] rf_wa0, rf_wa1;  word_t rf_wd0, rf_wd1;

  function automatic word_t rdreg(logic [4:0] r);
    if (rf_we1 && rf_wa1 == r) return rf_wd1;
    if (rf_we0 && rf_wa0 == r) return rf_wd0;
    return R[r];
  endfunction

  word_t ra_v, rb_v, rd_v, ra1_v, rb1_v, rd1_v;
  always_comb begin
    ra_v  = rdreg(e1_s0.ra);
    rb_v  = rdreg(e1_s0.rb);
    rd_v  = rdreg(e1_s0.rd);
    ra1_v = rdreg(e1_s0.ra + 5'd1);
    rb1_v = rdreg(e1_s0.rb + 5'd1);
    rd1_v = rdreg(e1_s0.rd + 5'd1);
  end

  // vector register files
  logic [NVR-1:0][VLEN*DW-1:0]  VR;
  logic [NVRL-1:0][VLEN*AW-1:0] VRL;
  logic [VR_NW-1:0]             vr_we;
  logic [VR_NW-1:0][3:0]        vr_wa;
  logic [VR_NW-1:0][VLEN*DW-1:0] vr_wd;
  logic [VRL_NW-1:0]            vrl_we;
  logic [VRL_NW-1:0][3:0]       vrl_wa;
  logic [VRL_NW-1:0][VLEN*AW-1:0] vrl_wd;

  vec_rf #(.NREGS(NVR),  .W(VLEN*DW), .NW(VR_NW))  u_vr  (.clk, .rst_n, .we(vr_we),  .waddr(vr_wa),  .wdata(vr_wd),  .regs(VR));
  vec_rf #(.NREGS(NVRL), .W(VLEN*AW), .NW(VRL_NW)) u_vrl (.clk, .rst_n, .we(vrl_we), .waddr(vrl_wa), .wdata(vrl_wd), .regs(VRL));

  // controller
  logic dma_busy, lb_busy;
  ctrl_unit u_ctrl (
    .valid(e1_valid), .s0(e1_s0), .pc(e1_pc), .ra_val(ra_v),
    .dma_busy, .lb_busy, .redirect, .target, .stall, .halt(halt_e1)
  );
  logic go1;   // the E1 bundle executes this cycle
  assign go1 = e1_valid && !stall;

  // scalar ALU
  logic [31:0] alu_a, alu_b, alu_y;  logic alu_wide;  alu_func_e alu_f;
  always_comb begin
    alu_f = e1_s0.func;
    alu_a = {ra1_v, ra_v};
    alu_b = {rb1_v, rb_v};
    unique case (e1_s0.op)
      S0_LI:   begin alu_f = F_ADD; alu_a = '0; alu_b = {16'd0, e1_s0.imm}; end
      S0_ADDI: begin alu_f = F_ADD; alu_b = {16'd0, e1_s0.imm}; end
      default: ;
    endcase
  end
  scalar_alu u_alu (.func(alu_f), .a(alu_a), .b(alu_b), .y(alu_y), .wide(alu_wide));

  // vector ALU configuration and permutation pattern: read in E1, written at
  // the end of E2, so they apply to the vector operations of the same bundle
  // (which reach E3 one cycle later) and of all later bundles
  vcfg_t vcfg, e2_vcfg;
  logic [NSLICE-1:0][VLEN-1:0][3:0] vperm, e2_vperm;
  logic e2_vcfg_we, e2_vperm_we;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vcfg <= '0; vperm <= '0; e2_vcfg <= '0; e2_vperm <= '0;
      e2_vcfg_we <= 1'b0; e2_vperm_we <= 1'b0;
    end else begin
      e2_vcfg_we  <= go1 && e1_s0.op == S0_VCFG;
      e2_vperm_we <= go1 && e1_s0.op == S0_VPERM;
      e2_vcfg     <= vcfg_from_word(ra_v);
      e2_vperm    <= VR[e1_s0.rd[3:0]];
      if (e2_vcfg_we)  vcfg  <= e2_vcfg;
      if (e2_vperm_we) vperm <= e2_vperm;
    end
  end

  // load/store unit and memory system
  mreq_t lsu_a, lsu_b, lb_req, dma_req;
  vec_t  rd_a, rd_b, lb_rdata, dma_rdata;
  logic  lb_gnt, dma_gnt, lb_rvalid, dma_rvalid;
  word_t ld_word;  vec_t ld_vec_a, ld_vec_b;  accv_t ld_acc;

  lsu u_lsu (
    .e1_valid(go1), .e1_s0, .ra_val(ra_v), .rb_val(rb_v), .rd_val(rd_v),
    .vst_data(VR[e1_s0.rd[3:0]]),
    .acc_data(VRL[(e1_s0.rd[3:0] < 4'(NVRL)) ? e1_s0.rd[3:0] : 4'd0]),
    .req_a(lsu_a), .req_b(lsu_b),
    .rd_a, .rd_b, .ld_word, .ld_vec_a, .ld_vec_b, .ld_acc
  );

  localparam int unsigned RB = $clog2(BANK_WORDS);
  logic [NBANK-1:0]         a_en, a_we, b_en, b_we;
  logic [NBANK-1:0][RB-1:0] a_row, b_row;
  logic [NBANK-1:0][DW-1:0] a_wdata, b_wdata, a_rdata, b_rdata;

  mem_ctrl #(.BANKS(NBANK), .BANK_WORDS(BANK_WORDS)) u_mc (
    .clk, .rst_n, .lsu_a, .lsu_b, .lb(lb_req), .dma(dma_req),
    .lb_gnt, .dma_gnt, .rd_a, .rd_b, .lb_rvalid, .lb_rdata, .dma_rvalid, .dma_rdata,
    .a_en, .a_we, .a_row, .a_wdata, .a_rdata, .b_en, .b_we, .b_row, .b_wdata, .b_rdata
  );

  data_mem #(.BANKS(NBANK), .BANK_WORDS(BANK_WORDS)) u_dm (
    .clk, .a_en, .a_we, .a_row, .a_wdata, .a_rdata, .b_en, .b_we, .b_row, .b_wdata, .b_rdata
  );

  dma u_dma (
    .clk, .rst_n,
    .start(go1 && e1_s0.op == S0_DMA), .dir(e1_s0.imm[0]),
    .ext_addr_i({rd1_v, rd_v}), .dm_addr_i(ra_v), .beats_i(rb_v), .busy(dma_busy),
    .ext_req, .ext_we, .ext_addr, .ext_wdata, .ext_gnt, .ext_rvalid, .ext_rdata,
    .dm(dma_req), .dm_gnt(dma_gnt), .dm_rvalid(dma_rvalid), .dm_rdata(dma_rdata)
  );

  vec_t lb_rd;
  line_buffer #(.LB_WORDS(LB_WORDS)) u_lb (
    .clk, .rst_n,
    .fill_start(go1 && e1_s0.op == S0_LBFILL), .fill_dm_addr(ra_v),
    .fill_lb_addr(rb_v[LBA-1:0]), .fill_count(rdreg(e1_s0.imm[10:6])), .fill_busy(lb_busy),
    .mem(lb_req), .mem_gnt(lb_gnt), .mem_rvalid(lb_rvalid), .mem_rdata(lb_rdata),
    .rd_base(LBA'(ra_v + {2'b00, e1_s0.imm[13:0]})), .rd_stride({1'b0, e1_s0.imm[15:14]} + 3'd1),
    .rd_data(lb_rd)
  );

  // slot 1 max-pooling / activation unit
  ma_op_e ma_op;  logic ma_en;  vec_t ma_y;
  always_comb begin
    ma_en = 1'b1;
    unique case (e1_v[0].op)
      V_RELU:  ma_op = MA_RELU;
      V_MAX:   ma_op = MA_MAX;
      V_PMAX:  ma_op = MA_PMAX;
      default: begin ma_op = MA_PASS; ma_en = 1'b0; end
    endcase
  end
  maxp_act u_ma (.op(ma_op), .a(VR[e1_v[0].b]), .b(VR[e1_v[0].vb]), .y(ma_y));

  // ------------------------------------------------------------------ E2
  vec_t e2_vec;  logic e2_ma_we;  logic [3:0] e2_ma_vd;  vec_t e2_ma_y;
  v_dec_t [NVALU-1:0] e2_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e2_valid <= 1'b0; e2_s0 <= '0; e2_alu <= '0; e2_wide <= 1'b0; e2_vec <= '0;
      e2_ma_we <= 1'b0; e2_ma_vd <= '0; e2_ma_y <= '0; e2_v <= '0;
    end else begin
      e2_valid <= go1;
      e2_s0    <= e1_s0;
      e2_alu   <= alu_y;
      e2_wide  <= alu_wide && e1_s0.op == S0_ALU;
      e2_vec   <= lb_rd;
      e2_ma_we <= go1 && ma_en;
      e2_ma_vd <= e1_v[0].d;
      e2_ma_y  <= ma_y;
      e2_v     <= e1_v;
    end
  end

  // scalar write-back (end of E2)
  always_comb begin
    rf_we0 = e2_valid && (e2_s0.op inside {S0_LI, S0_ADDI, S0_ALU, S0_LD});
    rf_wa0 = e2_s0.rd;
    rf_wd0 = (e2_s0.op == S0_LD) ? ld_word : e2_alu[15:0];
    rf_we1 = e2_valid && e2_wide;
    rf_wa1 = e2_s0.rd + 5'd1;
    rf_wd1 = e2_alu[31:16];
  end
  scalar_rf #(.NREGS(NR), .W(DW)) u_rf (
    .clk, .rst_n, .we0(rf_we0), .wa0(rf_wa0), .wd0(rf_wd0),
    .we1(rf_we1), .wa1(rf_wa1), .wd1(rf_wd1), .regs(R)
  );

  // ------------------------------------------------------------------ E3
  logic e3_valid;  v_dec_t [NVALU-1:0] e3_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e3_valid <= 1'b0; e3_v <= '0;
    end else begin
      e3_valid <= e2_valid;
      e3_v     <= e2_v;
    end
  end

  // vector ALUs (E3..E6)
  logic [NVALU-1:0][NSLICE-1:0]        va_acc_we, va_vr_we;
  accv_t [NVALU-1:0][NSLICE-1:0]       va_acc_wd;
  vec_t  [NVALU-1:0][NSLICE-1:0]       va_vr_wd;
  logic  [NVALU-1:0][1:0]              va_vr_d;
  logic  [NVALU-1:0]                   va_bypass;

  for (genvar k = 0; k < NVALU; k++) begin : gen_valu
    vec_t  [NSLICE-1:0] a_ops;
    accv_t [NSLICE-1:0] accs;
    for (genvar s = 0; s < NSLICE; s++) begin : gen_ops
      assign a_ops[s] = VR[s*4 + int'(e3_v[k].ia)];           // VR sub-region s
      assign accs[s]  = VRL[k*NSLICE + s];                     // VRl sub-region k
    end
    valu #(.NSLICE(NSLICE)) u_valu (
      .clk, .rst_n, .in_valid(e3_valid), .in_op(e3_v[k]), .cfg(vcfg), .pattern(vperm),
      .a(a_ops), .b(VR[e3_v[k].b]), .acc_in(accs),
      .acc_we(va_acc_we[k]), .acc_wdata(va_acc_wd[k]),
      .vr_we(va_vr_we[k]), .vr_d(va_vr_d[k]), .vr_wdata(va_vr_wd[k]), .bypass(va_bypass[k])
    );
  end

  // ------------------------------------------------------------------ write ports
  always_comb begin
    vr_we = '0; vr_wa = '0; vr_wd = '0;
    vrl_we = '0; vrl_wa = '0; vrl_wd = '0;
    // slot 0 (end of E2)
    if (e2_valid) begin
      unique case (e2_s0.op)
        // rd[4] set: the same vector goes to entry rd[1:0] of all four
        // sub-regions, so one load feeds operand A of every slice
        S0_VLD, S0_LBRD:
          for (int s = 0; s < NSLICE; s++)
            if (s == 0 || e2_s0.rd[4]) begin
              vr_we[s] = 1'b1;
              vr_wa[s] = e2_s0.rd[4] ? 4'(s*4) + {2'b00, e2_s0.rd[1:0]} : e2_s0.rd[3:0];
              vr_wd[s] = (e2_s0.op == S0_VLD) ? ld_vec_a : e2_vec;
            end
        S0_VLD2: begin
          vr_we[0] = 1'b1; vr_wa[0] = e2_s0.rd[3:0];  vr_wd[0] = ld_vec_a;
          vr_we[1] = 1'b1; vr_wa[1] = e2_s0.imm[3:0]; vr_wd[1] = ld_vec_b;
        end
        S0_VLDL: begin vrl_we[0] = 1'b1; vrl_wa[0] = e2_s0.rd[3:0]; vrl_wd[0] = ld_acc; end
        default: ;
      endcase
    end
    // slot 1 unit (end of E2)
    vr_we[VR_MA] = e2_ma_we; vr_wa[VR_MA] = e2_ma_vd; vr_wd[VR_MA] = e2_ma_y;
    // vector ALUs (end of E6)
    for (int k = 0; k < NVALU; k++)
      for (int s = 0; s < NSLICE; s++) begin
        vr_we[VR_VA + k*NSLICE + s]  = va_vr_we[k][s];
        vr_wa[VR_VA + k*NSLICE + s]  = 4'(s*4) + {2'b00, va_vr_d[k]};
        vr_wd[VR_VA + k*NSLICE + s]  = va_vr_wd[k][s];
        vrl_we[1 + k*NSLICE + s] = va_acc_we[k][s];
        vrl_wa[1 + k*NSLICE + s] = 4'(k*NSLICE + s);
        vrl_wd[1 + k*NSLICE + s] = va_acc_wd[k][s];
      end
  end

  // ------------------------------------------------------------------ status
  logic [2:0] vq;   // E4..E6 occupancy
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vq <= '0;
    else        vq <= {vq[1:0], e3_valid};

  assign halted = !running && !id_valid && !e1_valid && !e2_valid && !e3_valid &&
                  (vq == '0) && !dma_busy && !lb_busy;

  // stride of a line-buffer read is 1..4 by construction; addresses must be
  // inside the line buffer for VRl accesses of slot 0
  always_ff @(posedge clk)
    if (go1 && (e1_s0.op == S0_VLDL || e1_s0.op == S0_VSTL))
      assert (e1_s0.rd[3:0] < 4'(NVRL)) else $error("VRl index out of range");
endmodule
