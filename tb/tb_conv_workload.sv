// tb_conv_workload: runs slices of two CNN convolution layers on the full
// ConvAix core at its default sizes and compares every output word.
//
//   1. AlexNet conv1 shape: 3 input channels, 11 x 11 filters, stride 4,
//      12 filters, 2 output rows of 16 pixels (input rows of 80 words).
//   2. VGG-16 shape: 4 input channels, 3 x 3 filters, stride 1, 12 filters,
//      2 output rows of 16 pixels (input rows of 32 words).
//
// Both use one program generator, parameterised by the layer shape. The
// program is loop based. Per output row it walks the ICH x FS filter rows.
// For each filter row it:
//   - starts a line-buffer fill of the next input row into the other half
//     of the line buffer (double buffering);
//   - loads the weight vectors (four taps x four filters per vector for
//     each vector ALU);
//   - for each tap j: selects the splat pattern of j, then in one bundle
//     reads the input row from the line buffer with the layer's stride into
//     operand A of all four slices (broadcast write) and issues the MACs of
//     the three vector ALUs (192 MACs), which already see that row.
// At the end of the row it narrows the accumulators (round, shift, saturate),
// stores the 12 filter rows and sends them out by DMA while the next row
// runs. Input, weights and patterns come in by DMA at the start.
// The testbench checks every output word against a reference convolution.
// It also checks that the number of MAC bundles equals OHR x ICH x FS x FS,
// and prints the cycle count and the fraction of cycles with a MAC issue,
// over the whole run and over the compute phase (first to last MAC).
// The shapes are real layer shapes cut down in channels, filters and width
// so that a run takes seconds; the line buffer, DM and PM are at full size.
module tb_conv_workload;
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
  function automatic logic [31:0] vw(v_op_e op, bit perm, int d, int b);
    return {5'(op), perm, 4'(d), 4'(b), 4'd0, 2'd0, 12'd0};
  endfunction
  function automatic void emit(logic [31:0] w0, logic [31:0] w1 = 0, logic [31:0] w2 = 0, logic [31:0] w3 = 0);
    prog.push_back({w3, w2, w1, w0});
  endfunction
  function automatic void nops(int n); repeat (n) emit(0); endfunction

  // ------------------------------------------------------------ layer
  localparam int MAXC = 4, MAXH = 15, MAXW = 80, MAXF = 11, NF = 12, OHR = 2, OW = 16;
  localparam int DM_IN = 0, DM_W = 8192, DM_PAT = 16384, DM_OUT = 20480;
  localparam int EXT_W = 8192, EXT_PAT = 16384, EXT_OUT = 32768;
  localparam int PAT_REG [4] = '{5, 6, 7, 9};

  int ICH, FS, ST, IH, RW, NG, FRAC, IN_WORDS, W_WORDS;
  logic signed [15:0] inp [MAXC][MAXH][MAXW];
  logic signed [15:0] wgt [NF][MAXC][MAXF][MAXF];
  logic [15:0] expo [OHR][NF][OW];
  int n_sat;

  function automatic void ext_put(int a, logic [15:0] v);
    u_ext.mem[a / 8][16 * (a % 8) +: 16] = v;
  endfunction

  task automatic build_data();
    int t;
    n_sat = 0;
    for (int c = 0; c < ICH; c++) for (int y = 0; y < IH; y++) for (int x = 0; x < RW; x++) begin
      inp[c][y][x] = 16'($urandom_range(0, 255));
      ext_put(DM_IN + (c * IH + y) * RW + x, inp[c][y][x]);
    end
    for (int f = 0; f < NF; f++) for (int c = 0; c < ICH; c++)
      for (int i = 0; i < FS; i++) for (int j = 0; j < FS; j++)
        wgt[f][c][i][j] = 16'($urandom_range(0, 255) - 128);
    // weight vector (c, i, g, k): lane 4s + jj = weight of filter 4k+s, tap 4g+jj
    for (int c = 0; c < ICH; c++) for (int i = 0; i < FS; i++) for (int g = 0; g < NG; g++)
      for (int k = 0; k < 3; k++) for (int s = 0; s < 4; s++) for (int jj = 0; jj < 4; jj++) begin
        int a;
        a = EXT_W + ((c * FS + i) * NG + g) * 48 + k * 16 + s * 4 + jj;
        ext_put(a, (4 * g + jj < FS) ? wgt[4 * k + s][c][i][4 * g + jj] : 16'd0);
      end
    // splat pattern jj: every lane of slice s takes source lane 4s + jj
    for (int jj = 0; jj < 4; jj++) for (int s = 0; s < 4; s++) for (int q = 0; q < 4; q++)
      ext_put(EXT_PAT + jj * 16 + s * 4 + q, {4{4'(4 * s + jj)}});
    // reference
    for (int oy = 0; oy < OHR; oy++) for (int f = 0; f < NF; f++) for (int x = 0; x < OW; x++) begin
      int acc;
      acc = 0;
      for (int c = 0; c < ICH; c++) for (int i = 0; i < FS; i++) for (int j = 0; j < FS; j++)
        acc += int'(inp[c][ST * oy + i][ST * x + j]) * int'(wgt[f][c][i][j]);
      t = (acc + (1 << (FRAC - 1))) >>> FRAC;
      if (t > 32767)  begin t = 32767;  n_sat++; end
      if (t < -32768) begin t = -32768; n_sat++; end
      expo[oy][f][x] = 16'(t);
    end
  endtask

  task automatic build_prog();
    int oy_pc, body_pc;
    prog.delete();
    // input, weights, patterns by DMA (each DMA command waits for the last)
    emit(s0w(S0_LI, 4, 0, 0));            emit(s0w(S0_LI, 5, 0, 0));
    emit(s0w(S0_LI, 6, 0, DM_IN));        emit(s0w(S0_LI, 7, 0, IN_WORDS / 8));
    emit(s0w(S0_DMA, 4, 6, (7 << 11) | 0));
    emit(s0w(S0_LI, 8, 0, EXT_W));        emit(s0w(S0_LI, 9, 0, 0));
    emit(s0w(S0_LI, 10, 0, DM_W));        emit(s0w(S0_LI, 11, 0, W_WORDS / 8));
    emit(s0w(S0_DMA, 8, 10, (11 << 11) | 0));
    emit(s0w(S0_LI, 4, 0, EXT_PAT));      emit(s0w(S0_LI, 6, 0, DM_PAT));
    emit(s0w(S0_LI, 7, 0, 8));
    emit(s0w(S0_DMA, 4, 6, (7 << 11) | 0));
    emit(s0w(S0_WAIT, 0, 0, 1));
    emit(s0w(S0_LI, 16, 0, FRAC | (1 << 5) | (1 << 6)));   // round, saturate
    emit(s0w(S0_VCFG, 0, 16, 0));
    emit(s0w(S0_LI, 19, 0, 256));         // line-buffer half toggle
    emit(s0w(S0_LI, 14, 0, RW / 16));     // vectors per row fill
    emit(s0w(S0_LI, 26, 0, DM_IN));       // first input row of this output row
    emit(s0w(S0_LI, 21, 0, OHR));
    emit(s0w(S0_LI, 3, 0, DM_OUT));
    emit(s0w(S0_LI, 24, 0, EXT_OUT));     emit(s0w(S0_LI, 25, 0, 0));
    emit(s0w(S0_LI, 22, 0, NF * 16));     emit(s0w(S0_LI, 23, 0, 0));
    emit(s0w(S0_LI, 27, 0, NF * 16 / 8));
    emit(s0w(S0_LI, 28, 0, DM_PAT));      emit(s0w(S0_LI, 29, 0, DM_PAT + 16));
    // ---- per output row
    oy_pc = prog.size();
    emit(s0w(S0_VLD2, PAT_REG[0], 28, (29 << 11) | PAT_REG[1]));
    emit(s0w(S0_VLD, PAT_REG[2], 0, DM_PAT + 32));
    emit(s0w(S0_VLD, PAT_REG[3], 0, DM_PAT + 48));
    emit(0, vw(V_CLR, 0, 0, 0), vw(V_CLR, 0, 0, 0), vw(V_CLR, 0, 0, 0));
    emit(s0w(S0_ADDI, 12, 26, 0));        // fill pointer
    emit(s0w(S0_LI, 2, 0, 0));            // line-buffer half being read
    emit(s0w(S0_LI, 13, 0, 0));
    emit(s0w(S0_LBFILL, 0, 12, (13 << 11) | (14 << 6)));
    emit(s0w(S0_ADDI, 12, 12, RW));
    emit(s0w(S0_LI, 20, 0, FS - 1));      // rows left in this channel for the fill pointer
    emit(s0w(S0_LI, 17, 0, DM_W));
    emit(s0w(S0_LI, 1, 0, ICH * FS));
    emit(s0w(S0_WAIT, 0, 0, 2));
    // ---- per filter row
    body_pc = prog.size();
    emit(aluw(F_XOR, 13, 2, 19));
    emit(s0w(S0_LBFILL, 0, 12, (13 << 11) | (14 << 6)));   // next row, other half
    emit(s0w(S0_ADDI, 12, 12, RW));
    emit(s0w(S0_ADDI, 20, 20, -1));
    emit(s0w(S0_BNZ, 0, 20, 3));          // channel not finished: skip the two below
    emit(s0w(S0_ADDI, 12, 12, (IH - FS) * RW));
    emit(s0w(S0_LI, 20, 0, FS));
    for (int g = 0; g < NG; g++) begin
      emit(s0w(S0_ADDI, 18, 17, 16));
      emit(s0w(S0_VLD2, 1, 17, (18 << 11) | 2));
      emit(s0w(S0_VLD, 3, 17, 32));
      emit(s0w(S0_ADDI, 17, 17, 48));
      for (int jj = 0; jj < 4 && 4 * g + jj < FS; jj++) begin
        emit(s0w(S0_VPERM, PAT_REG[jj], 0, 0));
        // input row to operand A of all slices, used by the MACs of the same bundle
        emit(s0w(S0_LBRD, 16, 2, ((ST - 1) << 14) | (4 * g + jj)),
             vw(V_MAC, 1, 0, 1), vw(V_MAC, 1, 0, 2), vw(V_MAC, 1, 0, 3));
      end
    end
    emit(s0w(S0_WAIT, 0, 0, 2));
    emit(aluw(F_XOR, 2, 2, 19));
    emit(s0w(S0_ADDI, 1, 1, -1));
    emit(s0w(S0_BNZ, 0, 1, body_pc - prog.size()));
    // ---- narrow, store, send out
    emit(0, vw(V_OUT, 0, 1, 0), vw(V_OUT, 0, 2, 0), vw(V_OUT, 0, 3, 0));
    nops(5);
    for (int k = 0; k < 3; k++) for (int s = 0; s < 4; s++)
      emit(s0w(S0_VST, 4 * s + k + 1, 3, (k * 4 + s) * 16));
    emit(s0w(S0_DMA, 24, 3, (27 << 11) | 1));
    emit(aluw(F_ADD32, 24, 24, 22));
    emit(s0w(S0_ADDI, 3, 3, NF * 16));
    emit(s0w(S0_ADDI, 26, 26, ST * RW));
    emit(s0w(S0_ADDI, 21, 21, -1));
    emit(s0w(S0_BNZ, 0, 21, oy_pc - prog.size()));
    emit(s0w(S0_WAIT, 0, 0, 1));
    emit(s0w(S0_HALT, 0, 0, 0));
  endtask

  // ------------------------------------------------------------ counters
  int cyc = 0, t_mac0 = 0, t_mac1 = 0, n_mac = 0, n_lbrd = 0, n_lb_wait = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.e3_valid && dut.e3_v[0].op == V_MAC) begin
      if (t_mac0 == 0) t_mac0 = cyc;
      t_mac1 = cyc; n_mac++;
    end
    if (dut.go1 && dut.e1_s0.op == S0_LBRD && int'(dut.e1_s0.imm[15:14]) == ST - 1) n_lbrd++;
    if (dut.lb_req.req && !dut.lb_gnt) n_lb_wait++;
    if (dut.stall) n_stall++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_layer(string name, int ich, int fs, int st, int frac);
    int t0, t1, m0, l0, w0, s0;
    ICH = ich; FS = fs; ST = st; FRAC = frac;
    IH = st * (OHR - 1) + fs;
    RW = ((st * (OW - 1) + fs + 15) / 16) * 16;
    NG = (fs + 3) / 4;
    IN_WORDS = ich * IH * RW;
    W_WORDS = ich * fs * NG * 48;
    build_data();
    build_prog();
    for (int i = 0; i < prog.size(); i++) begin
      pm_we = 1; pm_waddr = pc_t'(i); pm_wdata = prog[i]; @(negedge clk);
    end
    pm_we = 0;
    m0 = n_mac; l0 = n_lbrd; w0 = n_lb_wait; s0 = n_stall; t_mac0 = 0;
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!halted) @(negedge clk);
    t1 = cyc;
    $display("%s: %0d bundles, %0d cycles, %0d MAC bundles (%0d MACs), MAC issue in %0d%% of cycles",
             name, prog.size(), t1 - t0, n_mac - m0, 192 * (n_mac - m0), 100 * (n_mac - m0) / (t1 - t0));
    $display("  from first to last MAC: %0d cycles, MAC issue in %0d%% of them",
             t_mac1 - t_mac0 + 1, 100 * (n_mac - m0) / (t_mac1 - t_mac0 + 1));
    $display("  stride-%0d line-buffer reads %0d, line-buffer port waits %0d, stall cycles %0d, saturated %0d",
             st, n_lbrd - l0, n_lb_wait - w0, n_stall - s0, n_sat);
    checks++;
    if (n_mac - m0 != OHR * ich * fs * fs) begin
      failures++; $display("FAIL: %0d MAC bundles, expected %0d", n_mac - m0, OHR * ich * fs * fs);
    end
    checks++;
    if (n_lbrd - l0 != OHR * ich * fs * fs) begin
      failures++; $display("FAIL: %0d strided reads, expected %0d", n_lbrd - l0, OHR * ich * fs * fs);
    end
    for (int oy = 0; oy < OHR; oy++) for (int f = 0; f < NF; f++) for (int x = 0; x < OW; x++) begin
      int a;
      logic [15:0] got;
      a = EXT_OUT + (oy * NF + f) * 16 + x;
      got = u_ext.mem[a / 8][16 * (a % 8) +: 16];
      checks++;
      if (got !== expo[oy][f][x]) begin
        failures++;
        if (failures < 20) $display("%s row %0d filter %0d x %0d: got %0d expected %0d",
                                    name, oy, f, x, $signed(got), $signed(expo[oy][f][x]));
      end
    end
  endtask

  initial begin
    pm_we = 0; start = 0; pm_waddr = '0; pm_wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_layer("AlexNet conv1 (3 ch, 11x11, stride 4)", 3, 11, 4, 7);
    run_layer("VGG-16 3x3 layer (4 ch, 3x3, stride 1)", 4, 3, 1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
