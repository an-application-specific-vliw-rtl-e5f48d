// maxp_act: the single-vector unit of slot 1 for activation functions and
// max-pooling, working on vectors of 16 signed 16-bit values.
//
//   MA_RELU  y[i] = max(a[i], 0)
//   MA_MAX   y[i] = max(a[i], b[i])            (pooling across rows/windows)
//   MA_PMAX  y[i] = max(v[2i], v[2i+1]), v = {b, a} (2:1 pooling along a row)
//   MA_PASS  y = a
// Combinational; the core reads operands in E1 and writes y to VR at the
// end of E2. The paper names the purpose only; the operation list is this
// design's.
module maxp_act
  import convaix_pkg::*;
(
  input  ma_op_e op,
  input  vec_t   a,
  input  vec_t   b,
  output vec_t   y
);
  function automatic word_t smax(word_t x, word_t z);
    return ($signed(x) > $signed(z)) ? x : z;
  endfunction

  logic [2*VLEN-1:0][DW-1:0] v;
  assign v = {b, a};

  always_comb begin
    for (int i = 0; i < VLEN; i++) begin
      unique case (op)
        MA_RELU: y[i] = smax(a[i], '0);
        MA_MAX:  y[i] = smax(a[i], b[i]);
        MA_PMAX: y[i] = smax(v[2*i], v[2*i+1]);
        default: y[i] = a[i];
      endcase
    end
  end
endmodule
