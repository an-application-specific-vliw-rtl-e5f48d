// tb_maxp_act: ReLU, element-wise max, pairwise max and pass with random
// signed vectors.
module tb_maxp_act;
  import convaix_pkg::*;
  int checks = 0, failures = 0;
  ma_op_e op; vec_t a, b, y;
  logic signed [15:0] e;

  maxp_act dut (.*);

  function automatic logic signed [15:0] mx(logic signed [15:0] x, logic signed [15:0] z);
    return x > z ? x : z;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 800; n++) begin
      op = ma_op_e'(n % 4);
      for (int l = 0; l < 16; l++) begin a[l] = 16'($urandom); b[l] = 16'($urandom); end
      #1;
      for (int l = 0; l < 16; l++) begin
        case (n % 4)
          0: e = mx(a[l], 0);
          1: e = mx(a[l], b[l]);
          2: e = (l < 8) ? mx(a[2*l], a[2*l+1]) : mx(b[2*l-16], b[2*l-15]);
          default: e = a[l];
        endcase
        checks++; if (y[l] !== e) begin failures++; $display("op %0d lane %0d", n % 4, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
