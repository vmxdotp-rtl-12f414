// spatz_ctrl: controller of the vector unit for vmxdotp: CSRs and scoreboard.
//
// CSRs. vsetvl-style configuration and the MX element-format CSR. The paper
// sets the accumulator precision through SEW (32 -> FP32, 16 -> BF16) and the
// element format (E5M2, E4M3, E2M1) through a CSR; the CSR addresses and the
// field layout are this design's own:
//   CSR_VSETVL: wdata[8:0] = AVL, wdata[9] = 1 for SEW 16 (else SEW 32),
//               wdata[12:10] = log2(LMUL); vl = min(AVL, VLEN*LMUL/SEW).
//   CSR_MXFMT : wdata[1:0] = mx_fmt_e.
//
// Scoreboard. Every register of the accumulator group of an issued
// instruction is marked busy until the VAU reports its last write. An
// instruction is held back while any register it reads or writes is busy
// (read-after-write and write-after-write); otherwise it goes to the VAU as
// soon as the VAU accepts it, so independent instructions (e.g. the rows of
// an unrolled MX-MatMul) overlap. Register group sizes per operand, for vl
// operations and FLEN = 64 (the paper's Table I, narrowing and
// quad-narrowing rows): vd vl*SEW bits, vs1/vs2 vl*64 bits, vs3/vs4 vl*8 bits.
//
// Interface: instr_valid_i / instr_ready_o handshake for decoded
// instructions (with their scalar FP operands); vau_* towards the VAU.
// Timing: an instruction is issued in the cycle it is accepted.
module spatz_ctrl
  import mx_pkg::*;
(
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // CSR writes from the scalar core
  input  logic                 csr_we_i,
  input  csr_addr_e            csr_addr_i,
  input  logic [31:0]          csr_wdata_i,
  output logic [VL_W-1:0]      vl_o,
  output acc_fmt_e             acc_fmt_o,
  output mx_fmt_e              mx_fmt_o,
  // decoded vmxdotp instructions
  input  logic                 instr_valid_i,
  output logic                 instr_ready_o,
  input  vmx_instr_t           instr_i,
  // to the VAU
  output logic                 vau_valid_o,
  input  logic                 vau_ready_i,
  output vau_req_t             vau_req_o,
  output logic [NR_VREGS-1:0]  vau_vd_mask_o,
  input  logic                 vau_done_i,
  input  logic [NR_VREGS-1:0]  vau_done_mask_i,
  // status
  output logic [NR_VREGS-1:0]  busy_regs_o,
  output logic                 ev_hazard_o       // instruction held by the scoreboard
);

  logic [VL_W-1:0]     vl_q;
  acc_fmt_e            acc_q;
  mx_fmt_e             fmt_q;
  logic [NR_VREGS-1:0] busy_q;

  // ---------------------------------------------------------------------
  // CSRs
  // ---------------------------------------------------------------------
  logic [VL_W-1:0] new_vl;

  always_comb begin
    int unsigned vlmax, avl;
    vlmax  = (VLEN << csr_wdata_i[12:10]) / (csr_wdata_i[9] ? 16 : 32);
    avl    = 32'(csr_wdata_i[8:0]);
    new_vl = VL_W'((avl < vlmax) ? avl : vlmax);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q  <= '0;
      acc_q <= ACC_FP32;
      fmt_q <= FMT_E4M3;
    end else if (csr_we_i) begin
      unique case (csr_addr_i)
        CSR_VSETVL: begin
          vl_q  <= new_vl;
          acc_q <= csr_wdata_i[9] ? ACC_BF16 : ACC_FP32;
        end
        CSR_MXFMT: fmt_q <= mx_fmt_e'(csr_wdata_i[1:0]);
        default: ;
      endcase
    end
  end

  assign vl_o      = vl_q;
  assign acc_fmt_o = acc_q;
  assign mx_fmt_o  = fmt_q;

  // ---------------------------------------------------------------------
  // Scoreboard
  // ---------------------------------------------------------------------
  function automatic logic [NR_VREGS-1:0] group(vreg_t base, int unsigned n);
    logic [2*NR_VREGS-1:0] m;
    m = ((2*NR_VREGS)'(1) << n) - 1'b1;
    m = m << base;
    return m[NR_VREGS-1:0] | m[2*NR_VREGS-1:NR_VREGS];   // wrap around
  endfunction

  logic [NR_VREGS-1:0] vd_mask, src_mask;
  logic                hazard;

  always_comb begin
    int unsigned sew;
    sew      = (acc_q == ACC_BF16) ? 16 : 32;
    vd_mask  = group(instr_i.vd, nregs(32'(vl_q) * sew));
    src_mask = vd_mask
             | group(instr_i.vs2, nregs(32'(vl_q) * FLEN))
             | group(instr_i.vs4, nregs(32'(vl_q) * 8));
    if (!instr_i.vf)
      src_mask = src_mask
               | group(instr_i.vs1, nregs(32'(vl_q) * FLEN))
               | group(instr_i.vs3, nregs(32'(vl_q) * 8));
    hazard = |(src_mask & busy_q);
  end

  // with vl = 0 an instruction does nothing and is retired at once
  assign vau_valid_o   = instr_valid_i && !hazard && (vl_q != '0);
  assign instr_ready_o = (vau_ready_i || vl_q == '0) && !hazard;
  assign vau_req_o     = '{instr: instr_i, vl: vl_q, acc_fmt: acc_q, mx_fmt: fmt_q};
  assign vau_vd_mask_o = vd_mask;
  assign ev_hazard_o   = instr_valid_i && hazard;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= '0;
    end else begin
      busy_q <= (busy_q & ~(vau_done_i ? vau_done_mask_i : '0))
              | ((vau_valid_o && vau_ready_i) ? vd_mask : '0);
    end
  end

  assign busy_regs_o = busy_q;

  // Scoreboard rule: a register group is never issued twice while busy.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (vau_valid_o && vau_ready_i) |-> ((vd_mask & busy_q) == '0))
    else $error("scoreboard issued onto a busy register");

endmodule
