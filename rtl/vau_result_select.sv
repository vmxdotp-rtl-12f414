// vau_result_select: places the results of one vmxdotp beat into a VRF word.
//
// With narrowing (FP32 accumulator, .ww/.wf) only 32 bits and with
// quad-narrowing (BF16, .qq/.qf) only 16 bits are written back per operation
// (as in the paper). An FP32 beat fills one half of a 256-bit word (beat[0]),
// a BF16 beat one quarter (beat[1:0]); the byte enable covers exactly the
// results of the lanes in lane_mask_i (operations below vl), the rest of the
// word is left untouched. Timing: combinational.
module vau_result_select
  import mx_pkg::*;
(
  input  acc_fmt_e                   acc_fmt_i,
  input  logic [1:0]                 beat_i,
  input  logic [N_FPU-1:0]           lane_mask_i,
  input  logic [N_FPU-1:0][31:0]     res_i,
  output vrf_word_t                  wdata_o,
  output vrf_be_t                    wbe_o
);

  always_comb begin
    wdata_o = '0;
    wbe_o   = '0;
    for (int unsigned l = 0; l < N_FPU; l++) begin
      if (acc_fmt_i == ACC_FP32) begin
        wdata_o[128*beat_i[0] + 32*l +: 32] = res_i[l];
        if (lane_mask_i[l]) wbe_o[16*beat_i[0] + 4*l +: 4] = 4'hf;
      end else begin
        wdata_o[64*beat_i + 16*l +: 16] = res_i[l][15:0];
        if (lane_mask_i[l]) wbe_o[8*beat_i + 2*l +: 2] = 2'h3;
      end
    end
  end

endmodule
