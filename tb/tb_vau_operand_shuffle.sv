// tb_vau_operand_shuffle: random VRF words and scalar operands; every lane's
// three operands are rebuilt from the formulas of operation i = 4*beat + l
// (element dword l, FP32 accumulator 8*(beat%2)+l or BF16 accumulator
// 4*(beat%4)+l of the vd word, scales byte l of the buffer slot).
module tb_vau_operand_shuffle;
  import mx_pkg::*;
  acc_fmt_e  acc_fmt;
  logic      vf;
  logic [1:0] beat;
  vrf_word_t vs1, vs2, vd;
  logic [63:0] rs1;
  logic [7:0]  rs3;
  logic [31:0] sca, scb;
  logic [3:0][63:0] op_a, op_b, op_c;
  int checks = 0, failures = 0;

  vau_operand_shuffle dut (
    .acc_fmt_i(acc_fmt), .vf_i(vf), .beat_i(beat), .vs1_i(vs1), .vs2_i(vs2), .vd_i(vd),
    .rs1_i(rs1), .rs3_i(rs3), .scale_a_i(sca), .scale_b_i(scb),
    .op_a_o(op_a), .op_b_o(op_b), .op_c_o(op_c)
  );

  function automatic vrf_word_t rnd();
    vrf_word_t w;
    for (int i = 0; i < 8; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    logic [31:0] acc;
    logic [7:0]  sa;
    int          idx;
    for (int r = 0; r < 2000; r++) begin
      acc_fmt = acc_fmt_e'($urandom_range(0, 1));
      vf = 1'($urandom);
      beat = 2'($urandom);
      vs1 = rnd(); vs2 = rnd(); vd = rnd();
      rs1 = {$urandom, $urandom}; rs3 = 8'($urandom);
      sca = $urandom; scb = $urandom;
      #1;
      for (int l = 0; l < 4; l++) begin
        if (acc_fmt == ACC_FP32) begin
          idx = 4 * (int'(beat) % 2) + l;
          acc = vd[32 * idx +: 32];
        end else begin
          idx = 4 * int'(beat) + l;
          acc = {16'h0, vd[16 * idx +: 16]};
        end
        sa = vf ? rs3 : sca[8*l +: 8];
        checks++;
        if (op_a[l] !== (vf ? rs1 : vs1[64*l +: 64]) || op_b[l] !== vs2[64*l +: 64]
            || op_c[l] !== {16'h0, scb[8*l +: 8], sa, acc}) begin
          failures++;
          if (failures < 5) $display("lane %0d wrong (fmt %0d vf %0d beat %0d)", l, acc_fmt, vf, beat);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
