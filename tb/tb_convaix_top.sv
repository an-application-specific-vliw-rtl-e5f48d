// tb_convaix_top: end-to-end run of the ConvAix core on a small strided
// convolutional layer, with all parameters at their defaults.
//
// Layer: 2 input channels of 5 rows x 48 words (33 used), 12 filters of
// 2 x 3 x 3, stride 2, 2 output rows of 16 pixels. The three vector ALUs
// compute 4 filters each (one per slice); the input row, read from the line
// buffer with stride 2, is operand A of every slice, and the weights are
// splatted per slice by the permutation unit. The program, assembled below:
//   DMA input and weights in (the second DMA waits for the first), fill the
//   line buffer while loading permutation patterns with a double-vector load,
//   then per output row: clear accumulators, 18 MAC bundles per vector ALU,
//   spill and reload the partial sums of slot 1 between the two channels,
//   narrow (round, shift by 2, saturate), ReLU, 2:1 max-pool of filter 0,
//   store, and DMA the row out while the next row is computed; the output
//   address is a 32-bit register pair crossing a 64 K boundary.
// The external memory content is compared with a reference computed here.
// Each mechanism (stalls, branches, accumulator bypass, port contention for
// DMA and line buffer, double loads, line-buffer reads broadcast to all
// four VR sub-regions, accumulator spill/reload, strided line
// buffer reads, permutation, saturation, ReLU, pooling, 32-bit address
// carry) is counted and must have happened.
module tb_convaix_top;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pm_we, start, halted;
  pc_t pm_waddr; logic [127:0] pm_wdata;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr; logic [127:0] ext_wdata, ext_rdata;

  convaix_top dut (.*);
  ext_mem_model #(.DEPTH(16384)) u_ext (.*);

  // ------------------------------------------------------------ assembler
  logic [127:0] prog [$];
  function automatic logic [31:0] s0w(s0_op_e op, int rd, int ra, int imm);
    return {6'(op), 5'(rd), 5'(ra), 16'(imm)};
  endfunction
  function automatic logic [31:0] aluw(alu_func_e f, int rd, int ra, int rb);
    return {6'(S0_ALU), 5'(rd), 5'(ra), 5'(rb), 7'd0, 4'(f)};
  endfunction
  function automatic logic [31:0] vw(v_op_e op, bit perm, int d, int b, int vb, int ia);
    return {5'(op), perm, 4'(d), 4'(b), 4'(vb), 2'(ia), 12'd0};
  endfunction
  localparam logic [31:0] VN = 32'd0;
  function automatic void emit(logic [31:0] w0, logic [31:0] w1 = 0, logic [31:0] w2 = 0, logic [31:0] w3 = 0);
    prog.push_back({w3, w2, w1, w0});
  endfunction
  function automatic void nops(int n); repeat (n) emit(0); endfunction

  // ------------------------------------------------------------ layer
  localparam int ICH = 2, IHR = 5, ROWW = 48, NF = 12, OHR = 2, OW = 16, ST = 2;
  localparam int EXT_W = 1024, EXT_PAT = 1536;
  localparam int DM_W = 1024, DM_PAT = 1536, DM_SPILL = 2048, DM_OUT = 4096;
  localparam int OUT_ROW = 13 * 16;                 // 12 filters + pooled row
  localparam int EXT_OUT = 32'h0000_FFF8;
  logic signed [15:0] inp [ICH][IHR][ROWW];
  logic signed [15:0] wgt [NF][ICH][3][3];
  logic [15:0] expo [OHR][13][16];
  int n_sat = 0, n_relu = 0;

  function automatic logic [15:0] nar(int x);
    int t = (x + 2) >>> 2;
    if (t > 32767) begin n_sat++; t = 32767; end
    if (t < -32768) begin n_sat++; t = -32768; end
    if (t < 0) begin n_relu++; t = 0; end
    return 16'(t);
  endfunction

  task automatic build_data();
    for (int c = 0; c < ICH; c++) for (int y = 0; y < IHR; y++) for (int x = 0; x < ROWW; x++)
      inp[c][y][x] = 16'($urandom_range(0, 255));
    for (int f = 0; f < NF; f++) for (int c = 0; c < ICH; c++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
      wgt[f][c][i][j] = (f == NF - 1) ? 16'($urandom_range(90, 127)) : 16'($urandom_range(0, 255) - 128);
    // external memory: input, weight vectors, permutation patterns
    for (int c = 0; c < ICH; c++) for (int y = 0; y < IHR; y++) for (int x = 0; x < ROWW; x++) begin
      int a = (c * IHR + y) * ROWW + x;
      u_ext.mem[a / 8][16 * (a % 8) +: 16] = inp[c][y][x];
    end
    for (int k = 0; k < 3; k++) for (int c = 0; c < ICH; c++) for (int i = 0; i < 3; i++)
      for (int l = 0; l < 16; l++) begin
        int a = EXT_W + ((k * ICH + c) * 3 + i) * 16 + l;
        logic [15:0] v = (l < 12) ? wgt[k * 4 + l / 3][c][i][l % 3] : 16'd0;
        u_ext.mem[a / 8][16 * (a % 8) +: 16] = v;
      end
    for (int j = 0; j < 3; j++) for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l += 4) begin
      int a = EXT_PAT + j * 16 + s * 4 + l / 4;
      logic [15:0] v = {4'(s * 3 + j), 4'(s * 3 + j), 4'(s * 3 + j), 4'(s * 3 + j)};
      u_ext.mem[a / 8][16 * (a % 8) +: 16] = v;
    end
    // reference
    for (int oy = 0; oy < OHR; oy++) begin
      for (int f = 0; f < NF; f++) for (int x = 0; x < OW; x++) begin
        int acc = 0;
        for (int c = 0; c < ICH; c++) for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++)
          acc += int'(inp[c][ST * oy + i][ST * x + j]) * int'(wgt[f][c][i][j]);
        expo[oy][f][x] = nar(acc);
      end
      for (int x = 0; x < OW; x++) begin
        logic signed [15:0] p0 = expo[oy][0][(2 * x) % 16], p1 = expo[oy][0][(2 * x + 1) % 16];
        expo[oy][12][x] = (p0 > p1) ? p0 : p1;
      end
    end
  endtask

  task automatic build_prog();
    int loop_pc;
    // DMA input (60 beats) and weights + patterns (70 beats)
    emit(s0w(S0_LI, 4, 0, 0)); emit(s0w(S0_LI, 5, 0, 0));
    emit(s0w(S0_LI, 6, 0, 0)); emit(s0w(S0_LI, 7, 0, ICH * IHR * ROWW / 8));
    emit(s0w(S0_DMA, 4, 6, (7 << 11) | 0));
    emit(s0w(S0_LI, 8, 0, EXT_W)); emit(s0w(S0_LI, 9, 0, 0));
    emit(s0w(S0_LI, 10, 0, DM_W)); emit(s0w(S0_LI, 11, 0, (EXT_PAT + 48 - EXT_W) / 8));
    emit(s0w(S0_DMA, 8, 10, (11 << 11) | 0));      // waits for the first DMA
    emit(s0w(S0_WAIT, 0, 0, 1));
    // line buffer fill of the whole input, patterns loaded meanwhile
    emit(s0w(S0_LI, 12, 0, 0)); emit(s0w(S0_LI, 13, 0, 0)); emit(s0w(S0_LI, 14, 0, ICH * IHR * ROWW / 16));
    emit(s0w(S0_LI, 28, 0, DM_PAT)); emit(s0w(S0_LI, 29, 0, DM_PAT + 16));
    emit(s0w(S0_LBFILL, 0, 12, (13 << 11) | (14 << 6)));
    emit(s0w(S0_VLD2, 5, 28, (29 << 11) | 6));      // VR5, VR6
    emit(s0w(S0_VLD, 7, 0, DM_PAT + 32));
    emit(s0w(S0_VLD2, 5, 28, (29 << 11) | 6));
    emit(s0w(S0_LI, 16, 0, 2 | (1 << 5) | (1 << 6)));  // frac 2, round, saturate
    emit(s0w(S0_VCFG, 0, 16, 0));
    emit(s0w(S0_WAIT, 0, 0, 2));
    emit(s0w(S0_LI, 1, 0, OHR)); emit(s0w(S0_LI, 2, 0, 0)); emit(s0w(S0_LI, 3, 0, DM_OUT));
    emit(s0w(S0_LI, 24, 0, EXT_OUT & 16'hFFFF)); emit(s0w(S0_LI, 25, 0, EXT_OUT >> 16));
    emit(s0w(S0_LI, 22, 0, OUT_ROW)); emit(s0w(S0_LI, 23, 0, 0));
    emit(s0w(S0_LI, 27, 0, OUT_ROW / 8));
    // ---- loop over output rows
    loop_pc = prog.size();
    emit(s0w(S0_VLD2, 5, 28, (29 << 11) | 6));      // patterns again: VOUT reuses VR5..7
    emit(s0w(S0_VLD, 7, 0, DM_PAT + 32));
    for (int c = 0; c < ICH; c++) begin
      for (int i = 0; i < 3; i++) begin
        emit(s0w(S0_LI, 17, 0, DM_W + ((0 * ICH + c) * 3 + i) * 16));
        emit(s0w(S0_LI, 18, 0, DM_W + ((1 * ICH + c) * 3 + i) * 16));
        emit(s0w(S0_VLD2, 1, 17, (18 << 11) | 2));
        emit(s0w(S0_VLD, 3, 0, DM_W + ((2 * ICH + c) * 3 + i) * 16));
        for (int j = 0; j < 3; j++) begin
          int off = c * IHR * ROWW + i * ROWW + j;
          emit(s0w(S0_VPERM, 5 + j, 0, 0));
          if (c == 0)       // one read per sub-region
            for (int s = 0; s < 4; s++) emit(s0w(S0_LBRD, 4 * s, 2, (1 << 14) | off));
          else              // one read written to all four sub-regions
            emit(s0w(S0_LBRD, 16, 2, (1 << 14) | off));
          if (c == 0 && i == 0 && j == 0)   // clear right before the first MAC: bypass
            emit(0, vw(V_CLR, 0, 0, 0, 0, 0), vw(V_CLR, 0, 0, 0, 0, 0), vw(V_CLR, 0, 0, 0, 0, 0));
          emit(0, vw(V_MAC, 1, 0, 1, 0, 0), vw(V_MAC, 1, 0, 2, 0, 0), vw(V_MAC, 1, 0, 3, 0, 0));
        end
      end
      if (c == 0) begin   // spill and reload the partial sums of slot 1
        nops(5);
        for (int s = 0; s < 4; s++) emit(s0w(S0_VSTL, s, 0, DM_SPILL + 32 * s));
        emit(0, vw(V_CLR, 0, 0, 0, 0, 0));
        nops(5);
        for (int s = 0; s < 4; s++) emit(s0w(S0_VLDL, s, 0, DM_SPILL + 32 * s));
      end
    end
    nops(4);
    emit(0, vw(V_OUT, 0, 1, 0, 0, 0), vw(V_OUT, 0, 2, 0, 0, 0), vw(V_OUT, 0, 3, 0, 0, 0));
    nops(5);
    for (int k = 0; k < 3; k++) for (int s = 0; s < 4; s++)
      emit(0, vw(V_RELU, 0, 4 * s + k + 1, 4 * s + k + 1, 0, 0));
    emit(0, vw(V_PMAX, 0, 0, 1, 1, 0));             // pooled filter 0 -> VR0
    emit(0);
    for (int k = 0; k < 3; k++) for (int s = 0; s < 4; s++)
      emit(s0w(S0_VST, 4 * s + k + 1, 3, (k * 4 + s) * 16));
    emit(s0w(S0_VST, 0, 3, 12 * 16));
    emit(s0w(S0_DMA, 24, 3, (27 << 11) | 1));       // row out, in the background
    emit(aluw(F_ADD32, 24, 24, 22));
    emit(s0w(S0_ADDI, 3, 3, OUT_ROW));
    emit(s0w(S0_ADDI, 2, 2, ST * ROWW));
    emit(s0w(S0_ADDI, 1, 1, 16'hFFFF));
    emit(s0w(S0_BNZ, 0, 1, loop_pc - prog.size()));
    emit(s0w(S0_WAIT, 0, 0, 1));
    emit(s0w(S0_HALT, 0, 0, 0));
    emit(s0w(S0_LI, 30, 0, 16'hDEAD));               // squashed by HALT
  endtask

  // ------------------------------------------------------------ coverage
  int cyc = 0, n_stall = 0, n_branch = 0, n_bypass = 0, n_dma_wait = 0, n_lb_wait = 0,
      n_vld2 = 0, n_bcast = 0, n_vstl = 0, n_vldl = 0, n_lbrd_s2 = 0, n_perm = 0, n_carry = 0, n_pmax = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.stall) n_stall++;
    if (dut.redirect) n_branch++;
    if (|dut.va_bypass) n_bypass++;
    if (dut.dma_req.req && !dut.dma_gnt) n_dma_wait++;
    if (dut.lb_req.req && !dut.lb_gnt) n_lb_wait++;
    if (dut.go1 && dut.e1_s0.op == S0_VLD2) n_vld2++;
    if (dut.go1 && dut.e1_s0.op == S0_LBRD && dut.e1_s0.rd[4]) n_bcast++;
    if (dut.go1 && dut.e1_s0.op == S0_VSTL) n_vstl++;
    if (dut.go1 && dut.e1_s0.op == S0_VLDL) n_vldl++;
    if (dut.go1 && dut.e1_s0.op == S0_LBRD && dut.e1_s0.imm[15:14] == 2'd1) n_lbrd_s2++;
    if (dut.e3_valid && dut.e3_v[0].op == V_MAC && dut.e3_v[0].perm) n_perm++;
    if (dut.go1 && dut.e1_v[0].op == V_PMAX) n_pmax++;
    if (ext_req && ext_we && ext_addr > 32'hFFFF) n_carry++;
  end

  task automatic seen(string name, int n);
    checks++;
    $display("  %-26s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL: %s never happened", name); end
  endtask

  initial begin
    #20000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int t0, t1, macs;
  initial begin
    pm_we = 0; start = 0; pm_waddr = '0; pm_wdata = '0;
    build_data();
    build_prog();
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < prog.size(); i++) begin
      pm_we = 1; pm_waddr = pc_t'(i); pm_wdata = prog[i]; @(negedge clk);
    end
    pm_we = 0;
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!halted) @(negedge clk);
    t1 = cyc;
    $display("program of %0d bundles ran in %0d cycles", prog.size(), t1 - t0);
    for (int oy = 0; oy < OHR; oy++) for (int f = 0; f < 13; f++) for (int x = 0; x < OW; x++) begin
      int a;
      logic [15:0] got;
      a = EXT_OUT + oy * OUT_ROW + f * 16 + x;
      got = u_ext.mem[(a / 8) % 16384][16 * (a % 8) +: 16];
      checks++;
      if (got !== expo[oy][f][x]) begin
        failures++;
        if (failures < 400) $display("row %0d filter %0d x %0d: got %0d expected %0d", oy, f, x, $signed(got), $signed(expo[oy][f][x]));
      end
    end
    checks++; if (dut.R[30] == 16'hDEAD) begin failures++; $display("bundle after HALT executed"); end
    // the MAC bundles issued 3 x 64 MACs each
    macs = 2 * 18 * 192;
    $display("MACs: %0d", macs);
    seen("stall cycles", n_stall);
    seen("taken branches", n_branch);
    seen("accumulator bypasses", n_bypass);
    seen("DMA port waits", n_dma_wait);
    seen("line-buffer port waits", n_lb_wait);
    seen("double vector loads", n_vld2);
    seen("broadcast line-buffer reads", n_bcast);
    seen("accumulator spills", n_vstl);
    seen("accumulator reloads", n_vldl);
    seen("stride-2 line-buffer reads", n_lbrd_s2);
    seen("permuted MACs", n_perm);
    seen("saturated results", n_sat);
    seen("ReLU-clipped results", n_relu);
    seen("pairwise max ops", n_pmax);
    seen("32-bit address carry", n_carry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
