// scale_buffer: prefetch buffer for the two E8M0 scale operands (vs3, vs4).
//
// A vmxdotp operation needs one 8-bit scale per operand and per FPU lane, far
// less than the 64-bit element operands. The VAU therefore reads a whole VRF
// word of scales at once (256 bits = 32 scales = 8 cycles of 4 lanes) and
// this buffer hands out N_LANES scales per cycle, selected by slot_i, while
// the next word is not needed; this follows the paper. Loading and the
// same-cycle bypass (a word being loaded can be read in the cycle it
// arrives) are this design's own choices.
//
// Interface: ld_a_i / ld_b_i load a word for vs3 / vs4; slot_i (0..SLOTS-1)
// selects the group of N_LANES scales; sc_a_o / sc_b_o return them, lane l
// in bits [8l +: 8]. Timing: one register stage; outputs are combinational
// from the stored word (or the word being loaded).
module scale_buffer #(
  parameter int unsigned WORD_W  = 256,
  parameter int unsigned N_LANES = 4,
  localparam int unsigned SLOTS  = WORD_W / (8 * N_LANES),
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   ld_a_i,
  input  logic [WORD_W-1:0]      ld_a_data_i,
  input  logic                   ld_b_i,
  input  logic [WORD_W-1:0]      ld_b_data_i,
  input  logic [SLOT_W-1:0]      slot_i,
  output logic [8*N_LANES-1:0]   sc_a_o,
  output logic [8*N_LANES-1:0]   sc_b_o
);

  logic [WORD_W-1:0] buf_a_q, buf_b_q;
  logic [WORD_W-1:0] cur_a, cur_b;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      buf_a_q <= '0;
      buf_b_q <= '0;
    end else begin
      if (ld_a_i) buf_a_q <= ld_a_data_i;
      if (ld_b_i) buf_b_q <= ld_b_data_i;
    end
  end

  assign cur_a  = ld_a_i ? ld_a_data_i : buf_a_q;
  assign cur_b  = ld_b_i ? ld_b_data_i : buf_b_q;
  assign sc_a_o = cur_a[slot_i * 8 * N_LANES +: 8 * N_LANES];
  assign sc_b_o = cur_b[slot_i * 8 * N_LANES +: 8 * N_LANES];

endmodule
