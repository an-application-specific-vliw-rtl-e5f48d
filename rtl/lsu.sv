// lsu: the (vector) load/store unit of slot 0.
//
// In E1 it forms up to two memory-controller requests, one per DM port:
//   LD/ST    one word at R[ra]+imm (port A)
//   VLD/VST  16 words at R[ra]+imm (port A)
//   VLD2     16 words at R[ra] (port A) and 16 words at R[rb] (port B)
//   VLDL/VSTL a 512-bit accumulator entry: the low 16 bits of the 16 lanes
//            at addr (port A), the high 16 bits at addr+16 (port B)
// The load/store unit always wins the ports, so its requests never wait. In
// E2 it turns the returned data into the scalar word, the two vectors or the
// accumulator entry to be written back at the end of E2. Two vectors per
// cycle follow the paper; the accumulator layout in memory is this design's.
module lsu
  import convaix_pkg::*;
(
  // E1
  input  logic        e1_valid,
  input  s0_dec_t     e1_s0,
  input  word_t       ra_val,
  input  word_t       rb_val,
  input  word_t       rd_val,      // scalar store data
  input  vec_t        vst_data,    // VR store data
  input  accv_t       acc_data,    // VRl store data
  output mreq_t       req_a,
  output mreq_t       req_b,
  // E2
  input  vec_t        rd_a,
  input  vec_t        rd_b,
  output word_t       ld_word,
  output vec_t        ld_vec_a,
  output vec_t        ld_vec_b,
  output accv_t       ld_acc
);
  logic [15:0] addr;
  assign addr = ra_val + e1_s0.imm;

  always_comb begin
    req_a = '0;
    req_b = '0;
    if (e1_valid) begin
      unique case (e1_s0.op)
        S0_LD:  begin req_a.req = 1'b1; req_a.addr = addr; req_a.lanes = 16'h0001; end
        S0_ST:  begin req_a.req = 1'b1; req_a.we = 1'b1; req_a.addr = addr;
                      req_a.lanes = 16'h0001; req_a.wdata[0] = rd_val; end
        S0_VLD: begin req_a.req = 1'b1; req_a.addr = addr; req_a.lanes = '1; end
        S0_VST: begin req_a.req = 1'b1; req_a.we = 1'b1; req_a.addr = addr;
                      req_a.lanes = '1; req_a.wdata = vst_data; end
        S0_VLD2: begin
          req_a.req = 1'b1; req_a.addr = ra_val; req_a.lanes = '1;
          req_b.req = 1'b1; req_b.addr = rb_val; req_b.lanes = '1;
        end
        S0_VLDL: begin
          req_a.req = 1'b1; req_a.addr = addr;         req_a.lanes = '1;
          req_b.req = 1'b1; req_b.addr = addr + 16'd16; req_b.lanes = '1;
        end
        S0_VSTL: begin
          req_a.req = 1'b1; req_a.we = 1'b1; req_a.addr = addr;          req_a.lanes = '1;
          req_b.req = 1'b1; req_b.we = 1'b1; req_b.addr = addr + 16'd16; req_b.lanes = '1;
          for (int l = 0; l < VLEN; l++) begin
            req_a.wdata[l] = acc_data[l][15:0];
            req_b.wdata[l] = acc_data[l][31:16];
          end
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    ld_word  = rd_a[0];
    ld_vec_a = rd_a;
    ld_vec_b = rd_b;
    for (int l = 0; l < VLEN; l++) ld_acc[l] = {rd_b[l], rd_a[l]};
  end
endmodule
