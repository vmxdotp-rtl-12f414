// vau: vector arithmetic unit, vmxdotp part.
//
// Executes one vmxdotp instruction (vl independent MX dot-product-accumulate
// operations) as a sequence of beats. Beat b feeds operations 4b..4b+3 to the
// N_FPU = 4 lanes (mxdpa_unit); ceil(vl / 4) beats per instruction.
//
// Per beat the VAU needs from the VRF
//   vs1 word vs1*2+b (not for .wf/.qf, where rs1 is broadcast),
//   vs2 word vs2*2+b,
//   vd  word vd*2+b/2 (FP32) or vd*2+b/4 (BF16), the accumulators,
// and, only on every 8th beat (b % 8 == 0), one word of scales from vs3 (not
// for .wf/.qf, where rs3 is broadcast) and from vs4, word (b/8). The scale
// words go into scale_buffer and serve the next 8 beats: one 256-bit word
// holds 32 scales = 8 beats x 4 lanes. This is how the paper feeds five
// logical operands through the three physical read ports of a bank: the
// scale requests have the highest priority, so when all operands sit in one
// bank the element reads of that beat slip by one cycle every 8 beats; with
// operands in different banks, or for .wf/.qf, no cycle is lost.
//
// Sequencing (this design's own): in every cycle the VAU requests the
// operands of the current beat that it has not been granted yet; a granted
// request is dropped, the data arrives one cycle later and is kept in a
// holding register. Once all operands of a beat are granted the beat is
// issued to the lanes in the next cycle and the VAU moves to the next beat;
// a new instruction is accepted in the cycle the last beat is granted, so
// beats of consecutive instructions follow back to back. The results come
// back LAT = 2 cycles after issue, vau_result_select forms the write (32 or
// 16 bits per operation) and the VAU write port, the highest-priority write
// port of the VRF, stores it at once. Hazards between instructions are the
// controller's (scoreboard) business; done_o with done_mask_o reports the
// last write of an instruction.
//
// Read ports, in VRF priority order: 0 vs3, 1 vs4, 2 vd, 3 vs1, 4 vs2.
module vau
  import mx_pkg::*;
(
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // instruction
  input  logic                       req_valid_i,
  output logic                       req_ready_o,
  input  vau_req_t                   req_i,
  input  logic [NR_VREGS-1:0]        req_vd_mask_i,
  // VRF read ports
  output logic      [4:0]            rd_req_o,
  output vrf_addr_t [4:0]            rd_addr_o,
  input  logic      [4:0]            rd_gnt_i,
  input  logic      [4:0]            rd_valid_i,
  input  vrf_word_t [4:0]            rd_data_i,
  // VRF write port
  output logic                       wr_req_o,
  output vrf_addr_t                  wr_addr_o,
  output vrf_word_t                  wr_data_o,
  output vrf_be_t                    wr_be_o,
  input  logic                       wr_gnt_i,
  // completion and events
  output logic                       done_o,
  output logic [NR_VREGS-1:0]        done_mask_o,
  output logic                       busy_o,
  output logic                       ev_scale_fetch_o,  // scale words requested this beat
  output logic                       ev_beat_stall_o,   // a beat waited for a read port
  output logic                       ev_issue_o         // a beat issued to the lanes
);

  localparam int unsigned P_VS3 = 0, P_VS4 = 1, P_VD = 2, P_VS1 = 3, P_VS2 = 4;
  localparam int unsigned BEAT_W = VL_W;

  typedef struct packed {
    logic                last;
    acc_fmt_e            acc_fmt;
    logic [N_FPU-1:0]    lane_mask;
    logic [1:0]          beat;
    vrf_addr_t           waddr;
    logic [NR_VREGS-1:0] done_mask;
  } tag_t;

  // ---------------------------------------------------------------------
  // Sequencer
  // ---------------------------------------------------------------------
  logic                active_q;
  vau_req_t            cur_q;
  logic [NR_VREGS-1:0] mask_q;
  logic [BEAT_W-1:0]   beat_q, nbeats;
  logic [4:0]          got_q, need, pend;
  logic                beat_done, last_beat;
  logic                stalled_q;

  assign nbeats    = BEAT_W'((32'(cur_q.vl) + N_FPU - 1) / N_FPU);
  assign last_beat = (beat_q == nbeats - 1);

  always_comb begin
    need        = '0;
    need[P_VS2] = 1'b1;
    need[P_VD]  = 1'b1;
    need[P_VS1] = !cur_q.instr.vf;
    if (beat_q[2:0] == 3'd0) begin
      need[P_VS4] = 1'b1;
      need[P_VS3] = !cur_q.instr.vf;
    end
  end

  assign pend      = need & ~got_q;
  assign rd_req_o  = active_q ? pend : '0;
  assign beat_done = active_q && ((pend & ~rd_gnt_i) == '0);

  always_comb begin
    rd_addr_o        = '0;
    rd_addr_o[P_VS1] = vrf_addr_t'(32'(cur_q.instr.vs1) * WORDS_PER_REG + 32'(beat_q));
    rd_addr_o[P_VS2] = vrf_addr_t'(32'(cur_q.instr.vs2) * WORDS_PER_REG + 32'(beat_q));
    rd_addr_o[P_VD]  = vrf_addr_t'(32'(cur_q.instr.vd) * WORDS_PER_REG +
                       ((cur_q.acc_fmt == ACC_FP32) ? 32'(beat_q) / 2 : 32'(beat_q) / 4));
    rd_addr_o[P_VS3] = vrf_addr_t'(32'(cur_q.instr.vs3) * WORDS_PER_REG + 32'(beat_q) / 8);
    rd_addr_o[P_VS4] = vrf_addr_t'(32'(cur_q.instr.vs4) * WORDS_PER_REG + 32'(beat_q) / 8);
  end

  assign req_ready_o = !active_q || (beat_done && last_beat);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      cur_q     <= '0;
      mask_q    <= '0;
      beat_q    <= '0;
      got_q     <= '0;
      stalled_q <= 1'b0;
    end else begin
      if (active_q) begin
        if (beat_done) begin
          got_q     <= '0;
          beat_q    <= beat_q + 1'b1;
          stalled_q <= 1'b0;
          if (last_beat) active_q <= 1'b0;
        end else begin
          got_q     <= got_q | (rd_req_o & rd_gnt_i);
          stalled_q <= 1'b1;
        end
      end
      if (req_valid_i && req_ready_o) begin
        active_q <= 1'b1;
        cur_q    <= req_i;
        mask_q   <= req_vd_mask_i;
        beat_q   <= '0;
        got_q    <= '0;
      end
    end
  end

  assign ev_scale_fetch_o = beat_done && need[P_VS4];
  assign ev_beat_stall_o  = active_q && !beat_done && !stalled_q;

  // ---------------------------------------------------------------------
  // Issue stage: operands arrive one cycle after the last grant
  // ---------------------------------------------------------------------
  logic        iss_valid_q;
  tag_t        iss_tag_q;
  logic        iss_vf_q;
  logic [63:0] iss_rs1_q;
  logic [7:0]  iss_rs3_q;
  mx_fmt_e     iss_fmt_q;
  logic [2:0]  iss_slot_q;
  vrf_word_t   hold_q [5];
  vrf_word_t   opnd   [5];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      iss_valid_q <= 1'b0;
      iss_tag_q   <= '0;
      iss_vf_q    <= 1'b0;
      iss_rs1_q   <= '0;
      iss_rs3_q   <= '0;
      iss_fmt_q   <= FMT_E5M2;
      iss_slot_q  <= '0;
    end else begin
      iss_valid_q <= beat_done;
      if (beat_done) begin
        iss_tag_q.last      <= last_beat;
        iss_tag_q.acc_fmt   <= cur_q.acc_fmt;
        iss_tag_q.beat      <= (cur_q.acc_fmt == ACC_FP32) ? {1'b0, beat_q[0]} : beat_q[1:0];
        iss_tag_q.waddr     <= rd_addr_o[P_VD];
        iss_tag_q.done_mask <= mask_q;
        for (int unsigned l = 0; l < N_FPU; l++)
          iss_tag_q.lane_mask[l] <= (32'(beat_q) * N_FPU + l) < 32'(cur_q.vl);
        iss_vf_q   <= cur_q.instr.vf;
        iss_rs1_q  <= cur_q.instr.rs1;
        iss_rs3_q  <= cur_q.instr.rs3;
        iss_fmt_q  <= cur_q.mx_fmt;
        iss_slot_q <= beat_q[2:0];
      end
    end
  end

  for (genvar p = 0; p < 5; p++) begin : g_hold
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)            hold_q[p] <= '0;
      else if (rd_valid_i[p]) hold_q[p] <= rd_data_i[p];
    end
    assign opnd[p] = rd_valid_i[p] ? rd_data_i[p] : hold_q[p];
  end

  logic [8*N_FPU-1:0] sc_a, sc_b;

  scale_buffer #(
    .WORD_W  (WORD_W),
    .N_LANES (N_FPU)
  ) i_scale_buffer (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .ld_a_i      (rd_valid_i[P_VS3]),
    .ld_a_data_i (rd_data_i[P_VS3]),
    .ld_b_i      (rd_valid_i[P_VS4]),
    .ld_b_data_i (rd_data_i[P_VS4]),
    .slot_i      (iss_slot_q),
    .sc_a_o      (sc_a),
    .sc_b_o      (sc_b)
  );

  logic [N_FPU-1:0][63:0] op_a, op_b, op_c;

  vau_operand_shuffle i_shuffle (
    .acc_fmt_i (iss_tag_q.acc_fmt),
    .vf_i      (iss_vf_q),
    .beat_i    (iss_tag_q.beat),
    .vs1_i     (opnd[P_VS1]),
    .vs2_i     (opnd[P_VS2]),
    .vd_i      (opnd[P_VD]),
    .rs1_i     (iss_rs1_q),
    .rs3_i     (iss_rs3_q),
    .scale_a_i (sc_a),
    .scale_b_i (sc_b),
    .op_a_o    (op_a),
    .op_b_o    (op_b),
    .op_c_o    (op_c)
  );

  assign ev_issue_o = iss_valid_q;

  // ---------------------------------------------------------------------
  // FPU lanes
  // ---------------------------------------------------------------------
  logic [N_FPU-1:0]       out_valid;
  logic [N_FPU-1:0][31:0] res;
  tag_t [N_FPU-1:0]       out_tag;

  for (genvar l = 0; l < N_FPU; l++) begin : g_lane
    mxdpa_unit #(
      .TAG_W ($bits(tag_t))
    ) i_mxdpa (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .in_valid_i  (iss_valid_q),
      .in_tag_i    (iss_tag_q),
      .mx_fmt_i    (iss_fmt_q),
      .acc_fmt_i   (iss_tag_q.acc_fmt),
      .op_a_i      (op_a[l]),
      .op_b_i      (op_b[l]),
      .op_c_i      (op_c[l]),
      .out_valid_o (out_valid[l]),
      .out_tag_o   (out_tag[l]),
      .result_o    (res[l])
    );
  end

  // ---------------------------------------------------------------------
  // Result selection and write-back
  // ---------------------------------------------------------------------
  vau_result_select i_result_select (
    .acc_fmt_i   (out_tag[0].acc_fmt),
    .beat_i      (out_tag[0].beat),
    .lane_mask_i (out_tag[0].lane_mask),
    .res_i       (res),
    .wdata_o     (wr_data_o),
    .wbe_o       (wr_be_o)
  );

  assign wr_req_o    = out_valid[0];
  assign wr_addr_o   = out_tag[0].waddr;
  assign done_o      = out_valid[0] && out_tag[0].last;
  assign done_mask_o = out_tag[0].done_mask;

  // beats issued whose results are not written yet
  logic [3:0] inflight_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) inflight_q <= '0;
    else         inflight_q <= inflight_q + 4'(beat_done) - 4'(wr_req_o);
  end
  assign busy_o = active_q || (inflight_q != '0);

  // The VAU holds the highest write priority, so its writes are never refused.
  assert property (@(posedge clk_i) disable iff (!rst_ni) wr_req_o |-> wr_gnt_i)
    else $error("VAU write not granted");
  // All lanes run in lock step.
  assert property (@(posedge clk_i) disable iff (!rst_ni) out_valid == '0 || &out_valid)
    else $error("FPU lanes out of step");

endmodule
