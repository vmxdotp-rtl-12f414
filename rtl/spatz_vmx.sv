// spatz_vmx: vector processing element datapath with the vmxdotp MX
// dot-product extension (top level).
//
// Wires the controller (CSRs, scoreboard), the vector arithmetic unit (four
// MX dot-product-accumulate FPU lanes, scale prefetch buffer, operand
// shuffling, result selection) and the banked vector register file with its
// bank demultiplexer and priority arbiter, as the paper's block diagram of
// the extended Spatz vector unit shows. The scalar core, the FP register
// file, the vector load-store unit and the slide unit are not part of this
// RTL: instructions arrive decoded with their scalar FP operands, and the
// VRF ports the load-store unit and the slide unit would use are ports of
// this module (VRF read ports 5 and 6, write ports 1 and 2, below the VAU in
// priority).
//
// Interface: csr_* configure vl / SEW / LMUL and the MX element format;
// instr_valid_i / instr_ready_o take decoded vmxdotp instructions; lsu_* and
// sld_* access the VRF (request / grant, read data one cycle after the
// grant). Timing: a beat of four operations per cycle when the read ports
// allow it; results are written four cycles after the beat's last grant
// (one cycle VRF read, two cycles MX-DPA pipeline, write at the next edge).
module spatz_vmx
  import mx_pkg::*;
(
  input  logic                clk_i,
  input  logic                rst_ni,
  // CSR writes
  input  logic                csr_we_i,
  input  csr_addr_e           csr_addr_i,
  input  logic [31:0]         csr_wdata_i,
  output logic [VL_W-1:0]     vl_o,
  // decoded vmxdotp instructions
  input  logic                instr_valid_i,
  output logic                instr_ready_o,
  input  vmx_instr_t          instr_i,
  // VRF port of the (external) vector load-store unit
  input  logic                lsu_rd_req_i,
  input  vrf_addr_t           lsu_rd_addr_i,
  output logic                lsu_rd_gnt_o,
  output logic                lsu_rd_valid_o,
  output vrf_word_t           lsu_rd_data_o,
  input  logic                lsu_wr_req_i,
  input  vrf_addr_t           lsu_wr_addr_i,
  input  vrf_word_t           lsu_wr_data_i,
  input  vrf_be_t             lsu_wr_be_i,
  output logic                lsu_wr_gnt_o,
  // VRF port of the (external) vector slide unit
  input  logic                sld_rd_req_i,
  input  vrf_addr_t           sld_rd_addr_i,
  output logic                sld_rd_gnt_o,
  output logic                sld_rd_valid_o,
  output vrf_word_t           sld_rd_data_o,
  input  logic                sld_wr_req_i,
  input  vrf_addr_t           sld_wr_addr_i,
  input  vrf_word_t           sld_wr_data_i,
  input  vrf_be_t             sld_wr_be_i,
  output logic                sld_wr_gnt_o,
  // status and events
  output logic                busy_o,
  output logic [NR_VREGS-1:0] busy_regs_o,
  output logic                ev_scale_fetch_o,
  output logic                ev_beat_stall_o,
  output logic                ev_issue_o,
  output logic                ev_hazard_o
);

  localparam int unsigned NR_RD = 7;
  localparam int unsigned NR_WR = 3;

  // controller <-> VAU
  logic                vau_valid, vau_ready, vau_done;
  vau_req_t            vau_req;
  logic [NR_VREGS-1:0] vau_vd_mask, vau_done_mask;
  logic                vau_busy;
  acc_fmt_e            acc_fmt_unused;
  mx_fmt_e             mx_fmt_unused;

  // VRF ports
  logic      [NR_RD-1:0] rd_req, rd_gnt, rd_valid;
  vrf_addr_t [NR_RD-1:0] rd_addr;
  vrf_word_t [NR_RD-1:0] rd_data;
  logic      [NR_WR-1:0] wr_req, wr_gnt;
  vrf_addr_t [NR_WR-1:0] wr_addr;
  vrf_word_t [NR_WR-1:0] wr_data;
  vrf_be_t   [NR_WR-1:0] wr_be;

  spatz_ctrl i_ctrl (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .csr_we_i        (csr_we_i),
    .csr_addr_i      (csr_addr_i),
    .csr_wdata_i     (csr_wdata_i),
    .vl_o            (vl_o),
    .acc_fmt_o       (acc_fmt_unused),
    .mx_fmt_o        (mx_fmt_unused),
    .instr_valid_i   (instr_valid_i),
    .instr_ready_o   (instr_ready_o),
    .instr_i         (instr_i),
    .vau_valid_o     (vau_valid),
    .vau_ready_i     (vau_ready),
    .vau_req_o       (vau_req),
    .vau_vd_mask_o   (vau_vd_mask),
    .vau_done_i      (vau_done),
    .vau_done_mask_i (vau_done_mask),
    .busy_regs_o     (busy_regs_o),
    .ev_hazard_o     (ev_hazard_o)
  );

  vau i_vau (
    .clk_i            (clk_i),
    .rst_ni           (rst_ni),
    .req_valid_i      (vau_valid),
    .req_ready_o      (vau_ready),
    .req_i            (vau_req),
    .req_vd_mask_i    (vau_vd_mask),
    .rd_req_o         (rd_req[4:0]),
    .rd_addr_o        (rd_addr[4:0]),
    .rd_gnt_i         (rd_gnt[4:0]),
    .rd_valid_i       (rd_valid[4:0]),
    .rd_data_i        (rd_data[4:0]),
    .wr_req_o         (wr_req[0]),
    .wr_addr_o        (wr_addr[0]),
    .wr_data_o        (wr_data[0]),
    .wr_be_o          (wr_be[0]),
    .wr_gnt_i         (wr_gnt[0]),
    .done_o           (vau_done),
    .done_mask_o      (vau_done_mask),
    .busy_o           (vau_busy),
    .ev_scale_fetch_o (ev_scale_fetch_o),
    .ev_beat_stall_o  (ev_beat_stall_o),
    .ev_issue_o       (ev_issue_o)
  );

  assign rd_req[5]  = lsu_rd_req_i;
  assign rd_addr[5] = lsu_rd_addr_i;
  assign rd_req[6]  = sld_rd_req_i;
  assign rd_addr[6] = sld_rd_addr_i;
  assign lsu_rd_gnt_o   = rd_gnt[5];
  assign lsu_rd_valid_o = rd_valid[5];
  assign lsu_rd_data_o  = rd_data[5];
  assign sld_rd_gnt_o   = rd_gnt[6];
  assign sld_rd_valid_o = rd_valid[6];
  assign sld_rd_data_o  = rd_data[6];

  assign wr_req[1]  = lsu_wr_req_i;
  assign wr_addr[1] = lsu_wr_addr_i;
  assign wr_data[1] = lsu_wr_data_i;
  assign wr_be[1]   = lsu_wr_be_i;
  assign wr_req[2]  = sld_wr_req_i;
  assign wr_addr[2] = sld_wr_addr_i;
  assign wr_data[2] = sld_wr_data_i;
  assign wr_be[2]   = sld_wr_be_i;
  assign lsu_wr_gnt_o = wr_gnt[1];
  assign sld_wr_gnt_o = wr_gnt[2];

  vrf #(
    .NR_RD       (NR_RD),
    .NR_WR       (NR_WR),
    .RD_PER_BANK (3)
  ) i_vrf (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .rd_req_i   (rd_req),
    .rd_addr_i  (rd_addr),
    .rd_gnt_o   (rd_gnt),
    .rd_valid_o (rd_valid),
    .rd_data_o  (rd_data),
    .wr_req_i   (wr_req),
    .wr_addr_i  (wr_addr),
    .wr_data_i  (wr_data),
    .wr_be_i    (wr_be),
    .wr_gnt_o   (wr_gnt)
  );

  assign busy_o = vau_busy || (busy_regs_o != '0);

endmodule
