// mx_pkg: types and constants shared by the MX dot-product vector datapath.
//
// The vector unit holds 32 vector registers of VLEN = 512 bits in 4 banks and
// feeds 4 FPU lanes of FLEN = 64 bits (these four numbers follow the paper's
// description of the Spatz vector processing element). One VRF word is what
// all FPU lanes consume in one cycle, N_FPU * FLEN = 256 bits, so a vector
// register is two words. The encodings of the element format, the CSR
// addresses and the decoded-instruction record are this design's own choice.
package mx_pkg;

  parameter int unsigned VLEN          = 512;
  parameter int unsigned NR_VREGS      = 32;
  parameter int unsigned N_FPU         = 4;
  parameter int unsigned FLEN          = 64;
  parameter int unsigned NR_BANKS      = 4;
  parameter int unsigned WORD_W        = N_FPU * FLEN;          // 256 bit VRF word
  parameter int unsigned WORDS_PER_REG = VLEN / WORD_W;         // 2
  parameter int unsigned NR_WORDS      = NR_VREGS * WORDS_PER_REG;
  parameter int unsigned WADDR_W       = $clog2(NR_WORDS);      // 6
  parameter int unsigned VREG_W        = $clog2(NR_VREGS);      // 5
  parameter int unsigned VL_W          = 9;                     // holds vl <= 256

  typedef logic [WADDR_W-1:0] vrf_addr_t;
  typedef logic [WORD_W-1:0]  vrf_word_t;
  typedef logic [WORD_W/8-1:0] vrf_be_t;
  typedef logic [VREG_W-1:0]  vreg_t;

  // MX element format, selected by the MX format CSR.
  typedef enum logic [1:0] {
    FMT_E5M2 = 2'd0,
    FMT_E4M3 = 2'd1,
    FMT_E2M1 = 2'd2
  } mx_fmt_e;

  // Accumulator format, selected by SEW: 32 -> FP32 (.ww/.wf), 16 -> BF16 (.qq/.qf).
  typedef enum logic {
    ACC_FP32 = 1'b0,
    ACC_BF16 = 1'b1
  } acc_fmt_e;

  // CSR write addresses of the controller.
  typedef enum logic [1:0] {
    CSR_VSETVL = 2'd0,   // wdata = {lmul_log2[2:0], sew16, avl}: vl = min(avl, VLMAX)
    CSR_MXFMT  = 2'd1    // wdata[1:0] = mx_fmt_e
  } csr_addr_e;

  // Canonical quiet NaNs of the two accumulator formats.
  parameter logic [31:0] FP32_QNAN = 32'h7fc0_0000;
  parameter logic [15:0] BF16_QNAN = 16'h7fc0;

  // A decoded vmxdotp instruction as it arrives from the scalar core; the
  // scalar FP operands (rs1: packed elements, rs3: E8M0 scale) come with it.
  typedef struct packed {
    logic        vf;      // 1: vector-scalar (.wf/.qf), 0: vector-vector (.ww/.qq)
    vreg_t       vd;
    vreg_t       vs1;
    vreg_t       vs2;
    vreg_t       vs3;
    vreg_t       vs4;
    logic [63:0] rs1;
    logic [7:0]  rs3;
  } vmx_instr_t;

  // The instruction as issued to the VAU, with the CSR state attached.
  typedef struct packed {
    vmx_instr_t      instr;
    logic [VL_W-1:0] vl;
    acc_fmt_e        acc_fmt;
    mx_fmt_e         mx_fmt;
  } vau_req_t;

  // Number of registers a group of `bits` bits occupies (at least one).
  function automatic int unsigned nregs(int unsigned bits);
    return (bits + VLEN - 1) / VLEN;
  endfunction

endpackage
