// tb_vec_slice: random MAC/MUL/CLR/OUT sequences (back-to-back, so the
// accumulator bypass is used) with random gating, rounding, saturation and
// shift settings. A reference accumulator is updated in program order; the
// accumulator register the slice reads is held here and written from the
// slice's E6 output, as VRl is in the core. Checks the 3-cycle latency from
// input to E6 output.
module tb_vec_slice;
  import convaix_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, bypasses = 0;

  logic in_valid; v_op_e in_op; logic [1:0] in_d; vcfg_t in_cfg; vec_t in_a, in_b;
  accv_t acc_in, acc_wdata; logic acc_we, out_we, bypass; logic [1:0] out_d; vec_t out_wdata;

  vec_slice dut (.*);

  // VRl entry
  always_ff @(posedge clk) if (acc_we) acc_in <= acc_wdata;

  typedef struct { bit is_out; accv_t acc; vec_t outv; int t; } exp_t;
  exp_t q[$];
  longint ref_acc [16];
  int cyc = 0;
  always @(posedge clk) cyc++;

  function automatic logic [15:0] gate(logic [15:0] x, logic [4:0] pg);
    if (pg == 0 || pg >= 16) return x;
    return x & (16'hFFFF << (16 - pg));
  endfunction

  function automatic logic [15:0] nar(longint x, vcfg_t c);
    longint t = x;
    if (c.rnd && c.frac != 0) t = t + (64'sd1 << (c.frac - 1));
    t = t >>> c.frac;
    if (c.sat && t > 32767) t = 32767;
    if (c.sat && t < -32768) t = -32768;
    return t[15:0];
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (bypass) bypasses++;
    if (acc_we || out_we) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = q.pop_front();
        if (cyc - e.t != 3) begin failures++; $display("latency %0d", cyc - e.t); end
        if (e.is_out) begin
          if (!out_we || acc_we || out_wdata !== e.outv || out_d !== 2'(e.t)) begin failures++; $display("OUT mismatch"); end
        end else if (!acc_we || out_we || acc_wdata !== e.acc) begin failures++; if (failures < 3) $display("ACC mismatch t=%0d got %h exp %h", e.t, acc_wdata[0], e.acc[0]); end
      end
    end
  end

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_op = V_NOP; in_d = 0; in_cfg = '0; in_a = '0; in_b = '0; acc_in = '0;
    for (int l = 0; l < 16; l++) ref_acc[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      exp_t e;
      int r;
      r = $urandom_range(0, 9);
      in_valid = (r != 9);
      in_op = (r < 5) ? V_MAC : (r == 5) ? V_MUL : (r == 6) ? V_CLR : V_OUT;
      in_cfg.frac = 5'($urandom_range(0, 20)); in_cfg.rnd = 1'($urandom); in_cfg.sat = 1'($urandom);
      in_cfg.pg = ($urandom_range(0, 2) == 0) ? 5'($urandom_range(1, 16)) : 5'd0;
      for (int l = 0; l < 16; l++) begin in_a[l] = 16'($urandom); in_b[l] = 16'($urandom); end
      in_d = 2'(cyc);
      if (in_valid) begin
        e.t = cyc; e.is_out = (in_op == V_OUT);
        for (int l = 0; l < 16; l++) begin
          longint p;
          p = longint'($signed(gate(in_a[l], in_cfg.pg))) * longint'($signed(gate(in_b[l], in_cfg.pg)));
          case (in_op)
            V_MAC: ref_acc[l] = longint'($signed(32'(ref_acc[l] + p)));
            V_MUL: ref_acc[l] = longint'($signed(32'(p)));
            V_CLR: ref_acc[l] = 0;
            default: ;
          endcase
          e.acc[l] = 32'(ref_acc[l]);
          e.outv[l] = nar(ref_acc[l], in_cfg);
        end
        q.push_back(e);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++; if (q.size() != 0) failures++;
    checks++; if (bypasses == 0) begin failures++; $display("bypass never used"); end
    $display("bypasses=%0d", bypasses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
