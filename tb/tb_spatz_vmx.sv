// tb_spatz_vmx: end-to-end testbench of the vmxdotp vector unit, run with
// every parameter at its default.
//
// The testbench plays the scalar core (CSR writes, decoded instructions with
// their scalar operands) and the vector load-store unit (it fills and reads
// the VRF through the load-store unit's ports). A software copy of the
// register file executes every instruction with the golden model of
// mx_ref_pkg, and the hardware VRF is compared with it word by word.
//   1. random instructions: all element formats, FP32 and BF16 accumulators,
//      .ww/.qq and .wf/.qf, random vl (partial last beats), random registers,
//      dependent instructions (scoreboard holds), CSR changes between them;
//   2. bank conflicts: a .ww with all five operands in one bank loses one
//      cycle on its scale-fetch beat, the same with scales elsewhere or as
//      .wf loses none;
//   3. throughput: independent .wf instructions issue one beat per cycle;
//   4. MX-MatMul kernels as in the paper's vmxdotp kernel (8 output rows,
//      P_tile = 32 columns, software block size 32, inner dimension 64) for
//      MXFP8 and MXFP4 with FP32 and BF16 accumulation.
// Every mechanism is counted and must occur at least once.
module tb_spatz_vmx;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            csr_we;
  csr_addr_e       csr_addr;
  logic [31:0]     csr_wdata;
  logic [VL_W-1:0] vl;
  logic            instr_valid, instr_ready;
  vmx_instr_t      instr;
  logic            lsu_rd_req, lsu_rd_gnt, lsu_rd_valid;
  vrf_addr_t       lsu_rd_addr;
  vrf_word_t       lsu_rd_data;
  logic            lsu_wr_req, lsu_wr_gnt;
  vrf_addr_t       lsu_wr_addr;
  vrf_word_t       lsu_wr_data;
  vrf_be_t         lsu_wr_be;
  logic            sld_rd_gnt, sld_rd_valid, sld_wr_gnt;
  vrf_word_t       sld_rd_data;
  logic            busy;
  logic [NR_VREGS-1:0] busy_regs;
  logic            ev_scale_fetch, ev_beat_stall, ev_issue, ev_hazard;

  spatz_vmx dut (
    .clk_i(clk), .rst_ni(rst_n),
    .csr_we_i(csr_we), .csr_addr_i(csr_addr), .csr_wdata_i(csr_wdata), .vl_o(vl),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .lsu_rd_req_i(lsu_rd_req), .lsu_rd_addr_i(lsu_rd_addr), .lsu_rd_gnt_o(lsu_rd_gnt),
    .lsu_rd_valid_o(lsu_rd_valid), .lsu_rd_data_o(lsu_rd_data),
    .lsu_wr_req_i(lsu_wr_req), .lsu_wr_addr_i(lsu_wr_addr), .lsu_wr_data_i(lsu_wr_data),
    .lsu_wr_be_i(lsu_wr_be), .lsu_wr_gnt_o(lsu_wr_gnt),
    .sld_rd_req_i(1'b0), .sld_rd_addr_i('0), .sld_rd_gnt_o(sld_rd_gnt),
    .sld_rd_valid_o(sld_rd_valid), .sld_rd_data_o(sld_rd_data),
    .sld_wr_req_i(1'b0), .sld_wr_addr_i('0), .sld_wr_data_i('0), .sld_wr_be_i('0),
    .sld_wr_gnt_o(sld_wr_gnt),
    .busy_o(busy), .busy_regs_o(busy_regs),
    .ev_scale_fetch_o(ev_scale_fetch), .ev_beat_stall_o(ev_beat_stall),
    .ev_issue_o(ev_issue), .ev_hazard_o(ev_hazard)
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_scale_fetch = 0, n_stall = 0, n_issue = 0, n_hazard = 0;
  int n_vf = 0, n_vv = 0, n_bf16 = 0, n_fp32 = 0, n_partial = 0, n_fmt_switch = 0;
  int n_fmt [3] = '{0, 0, 0};
  int last_issue_cycle = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_scale_fetch) n_scale_fetch++;
    if (ev_beat_stall)  n_stall++;
    if (ev_hazard)      n_hazard++;
    if (ev_issue) begin
      n_issue++;
      last_issue_cycle = cycle;
    end
  end

  // ---------------------------------------------------------------------
  // Software copy of the register file and of the CSRs
  // ---------------------------------------------------------------------
  vrf_word_t model [NR_WORDS];
  int  m_vl = 0;
  bit  m_bf16 = 0;
  int  m_fmt = 1;

  function automatic logic [7:0] get_byte(int vreg, int idx);
    int bit_pos = idx * 8;
    return model[vreg * WORDS_PER_REG + bit_pos / WORD_W][bit_pos % WORD_W +: 8];
  endfunction

  function automatic logic [63:0] get_dword(int vreg, int idx);
    int bit_pos = idx * 64;
    return model[vreg * WORDS_PER_REG + bit_pos / WORD_W][bit_pos % WORD_W +: 64];
  endfunction

  function automatic logic [31:0] get_acc(int vreg, int idx, bit bf16);
    int w = bf16 ? 16 : 32;
    int bit_pos = idx * w;
    if (bf16) return {16'h0, model[vreg * WORDS_PER_REG + bit_pos / WORD_W][bit_pos % WORD_W +: 16]};
    return model[vreg * WORDS_PER_REG + bit_pos / WORD_W][bit_pos % WORD_W +: 32];
  endfunction

  function automatic void set_acc(int vreg, int idx, bit bf16, logic [31:0] v);
    int w = bf16 ? 16 : 32;
    int bit_pos = idx * w;
    if (bf16) model[vreg * WORDS_PER_REG + bit_pos / WORD_W][bit_pos % WORD_W +: 16] = v[15:0];
    else      model[vreg * WORDS_PER_REG + bit_pos / WORD_W][bit_pos % WORD_W +: 32] = v;
  endfunction

  // vd[i] += s3[i] * s4[i] * sum_j vs1[k i + j] * vs2[k i + j]
  function automatic void model_exec(vmx_instr_t in);
    logic [63:0] a, b;
    logic [7:0]  sa, sb;
    for (int i = 0; i < m_vl; i++) begin
      a  = in.vf ? in.rs1 : get_dword(int'(in.vs1), i);
      b  = get_dword(int'(in.vs2), i);
      sa = in.vf ? in.rs3 : get_byte(int'(in.vs3), i);
      sb = get_byte(int'(in.vs4), i);
      set_acc(int'(in.vd), i, m_bf16,
              mxdpa(m_fmt, m_bf16, a, b, sa, sb, get_acc(int'(in.vd), i, m_bf16)));
    end
  endfunction

  // ---------------------------------------------------------------------
  // Drivers
  // ---------------------------------------------------------------------
  // All drivers change inputs at the falling edge and look at the
  // combinational handshake outputs there, before the rising edge that
  // completes the handshake.
  task automatic csr_write(csr_addr_e a, logic [31:0] d);
    @(negedge clk);
    csr_we = 1'b1; csr_addr = a; csr_wdata = d;
    @(posedge clk);
    #1 csr_we = 1'b0;
  endtask

  // vsetvl: sew16 selects BF16 accumulation
  task automatic set_vtype(int avl, bit sew16, int lmul_log2);
    int vlmax = (VLEN << lmul_log2) / (sew16 ? 16 : 32);
    csr_write(CSR_VSETVL, {19'h0, 3'(lmul_log2), sew16, 9'(avl)});
    m_vl   = (avl < vlmax) ? avl : vlmax;
    m_bf16 = sew16;
    checks++;
    @(negedge clk);
    if (int'(vl) != m_vl) begin
      failures++;
      $display("vl %0d, expected %0d", vl, m_vl);
    end
  endtask

  task automatic set_fmt(int f);
    if (f != m_fmt) n_fmt_switch++;
    csr_write(CSR_MXFMT, 32'(f));
    m_fmt = f;
  endtask

  int accept_cycle;
  task automatic issue(vmx_instr_t in);
    @(negedge clk);
    instr_valid = 1'b1;
    instr       = in;
    #1;
    while (!instr_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    accept_cycle = cycle;
    #1 instr_valid = 1'b0;
    model_exec(in);
    if (in.vf) n_vf++; else n_vv++;
    if (m_bf16) n_bf16++; else n_fp32++;
    if (m_vl % N_FPU != 0) n_partial++;
    n_fmt[m_fmt]++;
  endtask

  task automatic vrf_write(int wa, vrf_word_t d);
    @(negedge clk);
    lsu_wr_req = 1'b1; lsu_wr_addr = vrf_addr_t'(wa); lsu_wr_data = d; lsu_wr_be = '1;
    #1;
    while (!lsu_wr_gnt) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 lsu_wr_req = 1'b0;
    model[wa] = d;
  endtask

  task automatic vrf_read(int wa, output vrf_word_t d);
    @(negedge clk);
    lsu_rd_req = 1'b1; lsu_rd_addr = vrf_addr_t'(wa);
    #1;
    while (!lsu_rd_gnt) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 lsu_rd_req = 1'b0;
    @(negedge clk);
    if (!lsu_rd_valid) begin
      failures++;
      $display("read data not valid one cycle after the grant");
    end
    d = lsu_rd_data;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  task automatic compare_vrf(string what);
    vrf_word_t d;
    int bad = 0;
    wait_idle();
    for (int wa = 0; wa < NR_WORDS; wa++) begin
      vrf_read(wa, d);
      checks++;
      if (d !== model[wa]) begin
        failures++;
        bad++;
        if (bad < 4) $display("%s: word %0d differs\n  got %h\n  exp %h", what, wa, d, model[wa]);
      end
    end
  endtask

  function automatic vrf_word_t rnd_word();
    vrf_word_t w;
    for (int i = 0; i < WORD_W / 32; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  // accumulator-like word: FP32 values of moderate exponent
  function automatic vrf_word_t rnd_acc_word();
    vrf_word_t w;
    logic [31:0] v;
    for (int i = 0; i < WORD_W / 32; i++) begin
      v = $urandom;
      v[30:23] = 8'($urandom_range(100, 150));
      w[32*i +: 32] = v;
    end
    return w;
  endfunction

  // scale word: E8M0 values around 2^0
  function automatic vrf_word_t rnd_scale_word();
    vrf_word_t w;
    for (int i = 0; i < WORD_W / 8; i++) w[8*i +: 8] = 8'($urandom_range(112, 142));
    return w;
  endfunction

  // ---------------------------------------------------------------------
  // 1. random instructions
  // ---------------------------------------------------------------------
  function automatic bit overlap(int a, int na, int b, int nb);
    return (a < b + nb) && (b < a + na);
  endfunction

  task automatic random_phase(int rounds, int per_round);
    vmx_instr_t in;
    int nd, ne, ns, lmul, avl;
    bit sew16, ok;
    int last_vd;
    for (int r = 0; r < rounds; r++) begin
      wait_idle();
      for (int wa = 0; wa < NR_WORDS; wa++) begin
        case ($urandom_range(0, 2))
          0: vrf_write(wa, rnd_word());
          1: vrf_write(wa, rnd_acc_word());
          default: vrf_write(wa, rnd_scale_word());
        endcase
      end
      last_vd = -1;
      for (int k = 0; k < per_round; k++) begin
        if (k == 0 || $urandom_range(0, 3) == 0) begin
          sew16 = ($urandom_range(0, 1) == 1);
          lmul  = sew16 ? $urandom_range(0, 1) : $urandom_range(0, 2);
          avl   = $urandom_range(1, 70);
          set_vtype(avl, sew16, lmul);
        end
        if ($urandom_range(0, 3) == 0) set_fmt($urandom_range(0, 2));
        nd = nregs(m_vl * (m_bf16 ? 16 : 32));
        ne = nregs(m_vl * 64);
        ns = nregs(m_vl * 8);
        do begin
          in.vf  = ($urandom_range(0, 2) == 0);
          // every third instruction reuses the previous destination
          if (last_vd >= 0 && last_vd + nd <= NR_VREGS && $urandom_range(0, 2) == 0)
            in.vd = vreg_t'(last_vd);
          else
            in.vd = vreg_t'($urandom_range(0, NR_VREGS - nd));
          in.vs1 = vreg_t'($urandom_range(0, NR_VREGS - ne));
          in.vs2 = vreg_t'($urandom_range(0, NR_VREGS - ne));
          in.vs3 = vreg_t'($urandom_range(0, NR_VREGS - ns));
          in.vs4 = vreg_t'($urandom_range(0, NR_VREGS - ns));
          ok = !overlap(in.vd, nd, in.vs2, ne) && !overlap(in.vd, nd, in.vs4, ns)
            && (in.vf || (!overlap(in.vd, nd, in.vs1, ne) && !overlap(in.vd, nd, in.vs3, ns)));
        end while (!ok);
        in.rs1 = {$urandom, $urandom};
        in.rs3 = 8'($urandom_range(112, 142));
        last_vd = in.vd;
        issue(in);
      end
      compare_vrf($sformatf("random round %0d", r));
    end
  endtask

  // ---------------------------------------------------------------------
  // 2. bank conflicts and 3. throughput
  // ---------------------------------------------------------------------
  // cycles from acceptance to the issue of the last beat
  task automatic timed(vmx_instr_t in, output int span);
    issue(in);
    wait_idle();
    span = last_issue_cycle - accept_cycle;
  endtask

  task automatic conflict_phase();
    vmx_instr_t in;
    int s_same, s_diff, s_vf;
    int stalls0;
    set_fmt(1);
    set_vtype(16, 0, 0);             // 16 FP32 operations = 4 beats
    in = '0;
    in.rs1 = 64'h3838_3838_3838_3838;
    in.rs3 = 8'd127;
    // all operands in bank 0 (vreg % 4 == 0)
    in.vd = 5'd0; in.vs1 = 5'd4; in.vs2 = 5'd8; in.vs3 = 5'd12; in.vs4 = 5'd16;
    stalls0 = n_stall;
    timed(in, s_same);
    checks++;
    if (n_stall - stalls0 != 1) begin
      failures++;
      $display("same-bank .ww: %0d stalled beats, expected 1", n_stall - stalls0);
    end
    // scales in other banks
    in.vd = 5'd20; in.vs3 = 5'd13; in.vs4 = 5'd14;
    timed(in, s_diff);
    // vector-scalar, everything in bank 0
    in.vf = 1'b1; in.vd = 5'd24; in.vs4 = 5'd16;
    timed(in, s_vf);
    checks++;
    if (s_same != s_diff + 1 || s_vf != s_diff) begin
      failures++;
      $display("conflict timing: same bank %0d, other banks %0d, .wf %0d cycles", s_same, s_diff, s_vf);
    end
    $display("4-beat instruction: %0d cycles with all operands in one bank, %0d otherwise, %0d as .wf",
             s_same, s_diff, s_vf);
    compare_vrf("bank conflicts");
  endtask

  task automatic throughput_phase();
    vmx_instr_t in;
    int first, issued0, span;
    set_vtype(32, 0, 1);             // 32 FP32 operations = 8 beats, vd 2 registers
    in = '0;
    in.vf = 1'b1;
    in.vs2 = 5'd4;                   // elements v4..v7
    in.vs4 = 5'd8;                   // scales v8
    issued0 = n_issue;
    for (int m = 0; m < 8; m++) begin
      in.vd  = vreg_t'(16 + 2 * m);
      in.rs1 = {$urandom, $urandom};
      in.rs3 = 8'($urandom_range(120, 134));
      issue(in);
      if (m == 0) first = accept_cycle;
    end
    wait_idle();
    span = last_issue_cycle - first;
    checks++;
    // 64 beats; the first issues two cycles after the first acceptance
    if (n_issue - issued0 != 64 || span != 65) begin
      failures++;
      $display("throughput: %0d beats in %0d cycles", n_issue - issued0, span);
    end
    $display("8 independent vmxdotp.wf: 64 beats issued in %0d cycles (%0d%% of the FPU slots)",
             span - 1, 6400 / (span - 1));
    compare_vrf("throughput");
  endtask

  // ---------------------------------------------------------------------
  // 4. MX-MatMul: C[m][p] += sum over hardware blocks (paper's vmxdotp kernel)
  // ---------------------------------------------------------------------
  task automatic matmul(int fmt, bit bf16, int n_inner, int m_rows);
    localparam int P = 32;
    int hw = (fmt == 2) ? 16 : 8;    // hardware block size k
    int ew = (fmt == 2) ? 4 : 8;     // element bits
    logic [7:0]  A  [8][512];
    logic [7:0]  B  [P][512];
    logic [7:0]  As [8][16];
    logic [7:0]  Bs [16][P];
    logic [31:0] C  [8][P];
    logic [63:0] a0, bw;
    vrf_word_t   w, d;
    vmx_instr_t  in;
    int          beats0, c0, c1;

    set_fmt(fmt);
    set_vtype(P, bf16, bf16 ? 0 : 1);   // LMUL 2 for FP32, 1 for BF16: vl = 32
    for (int m = 0; m < m_rows; m++) for (int n = 0; n < n_inner; n++) A[m][n] = 8'($urandom);
    for (int p = 0; p < P; p++) for (int n = 0; n < n_inner; n++) B[p][n] = 8'($urandom);
    for (int m = 0; m < m_rows; m++) for (int b = 0; b < n_inner / 32; b++) As[m][b] = 8'($urandom_range(118, 136));
    for (int b = 0; b < n_inner / 32; b++) for (int p = 0; p < P; p++) Bs[b][p] = 8'($urandom_range(118, 136));
    // avoid NaN elements so that the results stay informative
    for (int m = 0; m < m_rows; m++) for (int n = 0; n < n_inner; n++) if (fmt == 1 && A[m][n][6:0] == 7'h7f) A[m][n] = 8'h00;
    for (int p = 0; p < P; p++) for (int n = 0; n < n_inner; n++) if (fmt == 1 && B[p][n][6:0] == 7'h7f) B[p][n] = 8'h00;
    for (int m = 0; m < m_rows; m++) for (int p = 0; p < P; p++) C[m][p] = 32'h0;

    // accumulators v16 + 2m (FP32) / v16 + m (BF16) cleared
    wait_idle();
    for (int wa = 16 * WORDS_PER_REG; wa < NR_WORDS; wa++) vrf_write(wa, '0);
    beats0 = n_issue;
    c0 = cycle;
    for (int n = 0; n < n_inner; n += hw) begin
      // elements of hardware block: FLEN bits per column
      wait_idle();
      for (int wv = 0; wv < 4 * WORDS_PER_REG; wv++) begin
        for (int q = 0; q < N_FPU; q++) begin
          bw = '0;
          for (int e = 0; e < hw; e++)
            if (ew == 8) bw[8*e +: 8] = B[wv * N_FPU + q][n + e];
            else         bw[4*e +: 4] = B[wv * N_FPU + q][n + e][3:0];
          w[64*q +: 64] = bw;
        end
        vrf_write(4 * WORDS_PER_REG + wv, w);
      end
      if (n % 32 == 0) begin
        for (int p = 0; p < P; p++) w[8*p +: 8] = Bs[n / 32][p];
        vrf_write(8 * WORDS_PER_REG, w);
      end
      for (int m = 0; m < m_rows; m++) begin
        a0 = '0;
        for (int e = 0; e < hw; e++)
          if (ew == 8) a0[8*e +: 8] = A[m][n + e];
          else         a0[4*e +: 4] = A[m][n + e][3:0];
        in = '0;
        in.vf  = 1'b1;
        in.vd  = vreg_t'(bf16 ? 16 + m : 16 + 2 * m);
        in.vs2 = 5'd4;
        in.vs4 = 5'd8;
        in.rs1 = a0;
        in.rs3 = As[m][n / 32];
        issue(in);
        // independent reference of the same sequence of operations
        for (int p = 0; p < P; p++) begin
          bw = '0;
          for (int e = 0; e < hw; e++)
            if (ew == 8) bw[8*e +: 8] = B[p][n + e];
            else         bw[4*e +: 4] = B[p][n + e][3:0];
          C[m][p] = mxdpa(fmt, bf16, a0, bw, As[m][n / 32], Bs[n / 32][p], C[m][p]);
        end
      end
    end
    wait_idle();
    c1 = cycle;
    // compare C
    for (int m = 0; m < m_rows; m++) begin
      for (int p = 0; p < P; p++) begin
        vrf_read(bf16 ? (16 + m) * WORDS_PER_REG + (p * 16) / WORD_W
                      : (16 + 2 * m) * WORDS_PER_REG + (p * 32) / WORD_W, d);
        checks++;
        if ((bf16 ? {16'h0, d[(p * 16) % WORD_W +: 16]} : d[(p * 32) % WORD_W +: 32]) !== C[m][p]) begin
          failures++;
          if (failures < 8) $display("MatMul fmt %0d bf16 %0d: C[%0d][%0d] = %h, expected %h", fmt, bf16, m, p,
                                     bf16 ? {16'h0, d[(p * 16) % WORD_W +: 16]} : d[(p * 32) % WORD_W +: 32], C[m][p]);
        end
      end
    end
    $display("MX-MatMul %0dx%0d, N=%0d, %s elements, %s accumulation: %0d FPU beats in %0d cycles",
             m_rows, P, n_inner, fmt == 2 ? "FP4" : "FP8", bf16 ? "BF16" : "FP32",
             n_issue - beats0, c1 - c0);
    compare_vrf("MX-MatMul");
  endtask

  // ---------------------------------------------------------------------
  initial begin
    csr_we = 1'b0; csr_addr = CSR_VSETVL; csr_wdata = '0;
    instr_valid = 1'b0; instr = '0;
    lsu_rd_req = 1'b0; lsu_rd_addr = '0;
    lsu_wr_req = 1'b0; lsu_wr_addr = '0; lsu_wr_data = '0; lsu_wr_be = '0;
    for (int wa = 0; wa < NR_WORDS; wa++) model[wa] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int wa = 0; wa < NR_WORDS; wa++) vrf_write(wa, '0);

    conflict_phase();
    throughput_phase();
    random_phase(6, 24);
    matmul(1, 0, 64, 8);     // MXFP8 (E4M3), FP32 accumulation
    matmul(0, 1, 64, 8);     // MXFP8 (E5M2), BF16 accumulation
    matmul(2, 0, 64, 8);     // MXFP4, FP32 accumulation
    matmul(2, 1, 64, 8);     // MXFP4, BF16 accumulation

    $display("mechanisms: scale fetches %0d, port stalls %0d, scoreboard holds %0d, beats %0d,",
             n_scale_fetch, n_stall, n_hazard, n_issue);
    $display("  .vv %0d .vf %0d, FP32 %0d BF16 %0d, partial beats %0d, format switches %0d, E5M2/E4M3/E2M1 %0d/%0d/%0d",
             n_vv, n_vf, n_fp32, n_bf16, n_partial, n_fmt_switch, n_fmt[0], n_fmt[1], n_fmt[2]);
    checks++; if (n_scale_fetch == 0) begin failures++; $display("no scale prefetch"); end
    checks++; if (n_stall == 0)       begin failures++; $display("no port stall"); end
    checks++; if (n_hazard == 0)      begin failures++; $display("no scoreboard hold"); end
    checks++; if (n_vf == 0 || n_vv == 0) begin failures++; $display("a variant never ran"); end
    checks++; if (n_fp32 == 0 || n_bf16 == 0) begin failures++; $display("an accumulator format never ran"); end
    checks++; if (n_partial == 0)     begin failures++; $display("no partial beat"); end
    checks++; if (n_fmt_switch == 0)  begin failures++; $display("no format switch"); end
    checks++; if (n_fmt[0] == 0 || n_fmt[1] == 0 || n_fmt[2] == 0) begin failures++; $display("an element format never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
