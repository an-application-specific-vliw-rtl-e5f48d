// tb_lsu: request formation for every load/store kind (address, lanes,
// write data, port use) and the E2 formatting of returned data.
module tb_lsu;
  import convaix_pkg::*;
  int checks = 0, failures = 0;
  logic e1_valid; s0_dec_t e1_s0; word_t ra_val, rb_val, rd_val, ld_word;
  vec_t vst_data, rd_a, rd_b, ld_vec_a, ld_vec_b; accv_t acc_data, ld_acc;
  mreq_t req_a, req_b;

  lsu dut (.*);

  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [15:0] ea;
      e1_valid = ($urandom_range(0, 5) != 0);
      e1_s0 = '0; e1_s0.op = s0_op_e'($urandom_range(0, 20)); e1_s0.imm = 16'($urandom);
      ra_val = 16'($urandom); rb_val = 16'($urandom); rd_val = 16'($urandom);
      for (int l = 0; l < 16; l++) begin
        vst_data[l] = 16'($urandom); acc_data[l] = $urandom; rd_a[l] = 16'($urandom); rd_b[l] = 16'($urandom);
      end
      ea = 16'(int'(ra_val) + int'(e1_s0.imm));
      #1;
      if (!e1_valid) chk(!req_a.req && !req_b.req, "no request when invalid");
      else case (e1_s0.op)
        S0_LD:  chk(req_a.req && !req_a.we && req_a.addr == ea && req_a.lanes == 16'h1 && !req_b.req, "LD");
        S0_ST:  chk(req_a.req && req_a.we && req_a.addr == ea && req_a.lanes == 16'h1 && req_a.wdata[0] == rd_val, "ST");
        S0_VLD: chk(req_a.req && !req_a.we && req_a.addr == ea && req_a.lanes == 16'hFFFF && !req_b.req, "VLD");
        S0_VST: chk(req_a.req && req_a.we && req_a.addr == ea && req_a.wdata == vst_data, "VST");
        S0_VLD2: chk(req_a.req && req_b.req && req_a.addr == ra_val && req_b.addr == rb_val && !req_a.we && !req_b.we, "VLD2");
        S0_VLDL: chk(req_a.req && req_b.req && req_a.addr == ea && req_b.addr == 16'(ea + 16), "VLDL");
        S0_VSTL: begin
          chk(req_a.we && req_b.we && req_a.addr == ea && req_b.addr == 16'(ea + 16), "VSTL addr");
          for (int l = 0; l < 16; l++)
            chk(req_a.wdata[l] == acc_data[l][15:0] && req_b.wdata[l] == acc_data[l][31:16], "VSTL data");
        end
        default: chk(!req_a.req && !req_b.req, "no request");
      endcase
      chk(ld_word == rd_a[0] && ld_vec_a == rd_a && ld_vec_b == rd_b, "load data");
      for (int l = 0; l < 16; l++) chk(ld_acc[l] == {rd_b[l], rd_a[l]}, "acc data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
