// tb_scalar_alu: every operation with random operands against reference
// arithmetic written out here.
module tb_scalar_alu;
  import convaix_pkg::*;
  int checks = 0, failures = 0;
  alu_func_e func; logic [31:0] a, b, y; logic wide;
  logic [31:0] e;

  scalar_alu dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      a = $urandom; b = $urandom;
      if (n % 5 == 0) b[15:4] = 0;
      func = alu_func_e'(n % 12);
      case (n % 12)
        0: e = {16'd0, 16'(a[15:0] + b[15:0])};
        1: e = {16'd0, 16'(a[15:0] - b[15:0])};
        2: e = {16'd0, a[15:0] & b[15:0]};
        3: e = {16'd0, a[15:0] | b[15:0]};
        4: e = {16'd0, a[15:0] ^ b[15:0]};
        5: e = {16'd0, 16'(a[15:0] << b[3:0])};
        6: e = {16'd0, 16'(int'($signed(a[15:0])) / (1 << b[3:0]) - ((int'($signed(a[15:0])) < 0 && (int'($signed(a[15:0])) % (1 << b[3:0])) != 0) ? 1 : 0))};
        7: e = {16'd0, a[15:0] >> b[3:0]};
        8: e = {16'd0, 16'(int'(a[15:0]) * int'(b[15:0]))};
        9: e = {31'd0, int'($signed(a[15:0])) < int'($signed(b[15:0]))};
        10: e = a + b;
        default: e = a - b;
      endcase
      #1;
      checks++;
      if (y !== e || wide !== (n % 12 >= 10)) begin
        failures++; $display("func %0d a %h b %h y %h exp %h", n % 12, a, b, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
