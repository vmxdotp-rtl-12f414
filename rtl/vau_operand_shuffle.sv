// vau_operand_shuffle: builds the three 64-bit operands of every FPU lane for
// one vmxdotp beat (N_FPU operations).
//
// Lane l of beat `beat` computes operation i = N_FPU*beat + l:
//   op_a = 64-bit element chunk l of the vs1 word, or the scalar rs1 (.wf/.qf)
//   op_b = 64-bit element chunk l of the vs2 word
//   op_c = {16'b0, scale_b, scale_a, acc}: the accumulator and the two E8M0
//          scales packed into one 64-bit value (the paper packs accumulator
//          and scales into one 64-bit FPU operand; the bit layout is this
//          design's own). scale_a is lane l of the vs3 buffer or rs3,
//          scale_b lane l of the vs4 buffer.
// acc is taken from the vd word: an FP32 accumulator word holds 8 operations
// (two beats, half selected by beat[0]), a BF16 word holds 16 (four beats,
// quarter selected by beat[1:0]); BF16 sits in acc[15:0].
// Timing: combinational.
module vau_operand_shuffle
  import mx_pkg::*;
(
  input  acc_fmt_e                   acc_fmt_i,
  input  logic                       vf_i,
  input  logic [1:0]                 beat_i,
  input  vrf_word_t                  vs1_i,
  input  vrf_word_t                  vs2_i,
  input  vrf_word_t                  vd_i,
  input  logic [63:0]                rs1_i,
  input  logic [7:0]                 rs3_i,
  input  logic [8*N_FPU-1:0]         scale_a_i,
  input  logic [8*N_FPU-1:0]         scale_b_i,
  output logic [N_FPU-1:0][63:0]     op_a_o,
  output logic [N_FPU-1:0][63:0]     op_b_o,
  output logic [N_FPU-1:0][63:0]     op_c_o
);

  always_comb begin
    logic [31:0] acc;
    logic [7:0]  sa, sb;
    for (int unsigned l = 0; l < N_FPU; l++) begin
      op_a_o[l] = vf_i ? rs1_i : vs1_i[64*l +: 64];
      op_b_o[l] = vs2_i[64*l +: 64];
      if (acc_fmt_i == ACC_FP32)
        acc = vd_i[128*beat_i[0] + 32*l +: 32];
      else
        acc = {16'h0, vd_i[64*beat_i + 16*l +: 16]};
      sa = vf_i ? rs3_i : scale_a_i[8*l +: 8];
      sb = scale_b_i[8*l +: 8];
      op_c_o[l] = {16'h0, sb, sa, acc};
    end
  end

endmodule
