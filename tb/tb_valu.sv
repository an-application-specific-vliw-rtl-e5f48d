// tb_valu: one vector ALU (4 slices) with its VRl sub-region held here.
// Random MAC/MUL/CLR/OUT with broadcast and random permutations; checks all
// four slices' accumulators and narrowed outputs against a reference and
// the E3 -> E6 latency. Also a short 3x3 filter row done with splat
// permutations, the intended use.
module tb_valu;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid; v_dec_t in_op; vcfg_t cfg; logic [3:0][15:0][3:0] pattern;
  vec_t [3:0] a; vec_t b; accv_t [3:0] acc_in, acc_wdata; logic [3:0] acc_we, vr_we;
  logic [1:0] vr_d; vec_t [3:0] vr_wdata; logic bypass;

  valu dut (.*);

  always_ff @(posedge clk) for (int s = 0; s < 4; s++) if (acc_we[s]) acc_in[s] <= acc_wdata[s];

  typedef struct { bit is_out; accv_t [3:0] acc; vec_t [3:0] outv; int t; logic [1:0] d; } exp_t;
  exp_t q[$];
  logic [31:0] ref_acc [4][16];
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && (acc_we != 0 || vr_we != 0)) begin
    exp_t e;
    checks++;
    if (q.size() == 0) failures++;
    else begin
      e = q.pop_front();
      if (cyc - e.t != 3) begin failures++; $display("latency %0d", cyc - e.t); end
      if (e.is_out) begin
        if (vr_we != 4'hF || vr_wdata !== e.outv || vr_d !== e.d) begin failures++; $display("OUT mismatch t=%0d", e.t); end
      end else if (acc_we != 4'hF || acc_wdata !== e.acc) begin failures++; $display("ACC mismatch t=%0d cyc=%0d we=%b got %h exp %h", e.t, cyc, acc_we, acc_wdata[0][0], e.acc[0][0]); end
    end
  end

  task automatic issue(v_op_e op, bit perm);
    exp_t e;
    in_valid = 1; in_op = '0; in_op.op = op; in_op.perm = perm; in_op.d = 4'($urandom_range(0, 3));
    e.t = cyc; e.is_out = (op == V_OUT); e.d = in_op.d[1:0];
    for (int s = 0; s < 4; s++)
      for (int l = 0; l < 16; l++) begin
        logic [15:0] bv = perm ? b[pattern[s][l]] : b[l];
        logic [31:0] p = 32'(int'($signed(a[s][l])) * int'($signed(bv)));
        case (op)
          V_MAC: ref_acc[s][l] = ref_acc[s][l] + p;
          V_MUL: ref_acc[s][l] = p;
          V_CLR: ref_acc[s][l] = 0;
          default: ;
        endcase
        e.acc[s][l] = ref_acc[s][l];
        e.outv[s][l] = 16'(int'($signed(ref_acc[s][l])) >>> cfg.frac);
      end
    q.push_back(e);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_op = '0; cfg = '0; pattern = '0; a = '0; b = '0; acc_in = '0;
    for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l++) ref_acc[s][l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    cfg.frac = 5'd4;
    for (int n = 0; n < 600; n++) begin
      int r;
      r = $urandom_range(0, 9);
      for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l++) begin
        a[s][l] = 16'($urandom); pattern[s][l] = 4'($urandom);
      end
      for (int l = 0; l < 16; l++) b[l] = 16'($urandom);
      if (r == 9) @(negedge clk);
      else issue((r < 5) ? V_MAC : (r == 5) ? V_MUL : (r == 6) ? V_CLR : V_OUT, 1'($urandom));
    end
    // filter row: out[x] = sum_j w[s][j] * in[x+j], slice s = filter s, weights splatted
    begin
      logic [15:0] inrow [18]; logic [15:0] w [4][3]; int expv;
      cfg.frac = 0;
      for (int i = 0; i < 18; i++) inrow[i] = 16'($urandom_range(0, 200));
      for (int s = 0; s < 4; s++) for (int j = 0; j < 3; j++) w[s][j] = 16'($urandom_range(0, 50) - 25);
      issue(V_CLR, 0);
      for (int j = 0; j < 3; j++) begin
        for (int s = 0; s < 4; s++) begin
          for (int l = 0; l < 16; l++) begin a[s][l] = inrow[l + j]; pattern[s][l] = 4'(s * 3 + j); end
          for (int jj = 0; jj < 3; jj++) b[s * 3 + jj] = w[s][jj];
        end
        issue(V_MAC, 1);
      end
      issue(V_OUT, 0);
      repeat (5) @(negedge clk);
      for (int s = 0; s < 4; s++) for (int l = 0; l < 16; l++) begin
        expv = 0;
        for (int j = 0; j < 3; j++) expv += int'($signed(inrow[l + j])) * int'($signed(w[s][j]));
        checks++; if (acc_in[s][l] !== 32'(expv)) begin failures++; $display("conv s%0d l%0d", s, l); end
      end
    end
    repeat (6) @(negedge clk);
    checks++; if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
