// tb_spatz_ctrl: the controller's CSRs and scoreboard against a model.
// CSR part: vl = min(AVL, VLEN * LMUL / SEW) for many AVL / SEW / LMUL
// settings, and the accumulator and element formats. Scoreboard part: random
// instructions meet a stand-in VAU that accepts at random and finishes
// instructions in order after random delays; the model tracks which vector
// registers are being written and decides, from the register groups each
// instruction reads and writes (elements vl*64 bits, scales vl*8 bits,
// accumulators vl*SEW bits, rounded up to whole 512-bit registers, wrapping
// past v31), whether it must wait. Checked every cycle: instr_ready_o,
// vau_valid_o, the busy register set and the hazard event.
module tb_spatz_ctrl;
  import mx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                csr_we;
  csr_addr_e           csr_addr;
  logic [31:0]         csr_wdata;
  logic [VL_W-1:0]     vl;
  acc_fmt_e            acc_fmt;
  mx_fmt_e             mx_fmt;
  logic                instr_valid, instr_ready, vau_valid, vau_ready, vau_done, ev_hazard;
  vmx_instr_t          instr;
  vau_req_t            vau_req;
  logic [NR_VREGS-1:0] vd_mask, done_mask, busy_regs;
  int checks = 0, failures = 0;
  int n_hazard = 0, n_issue = 0;

  spatz_ctrl dut (
    .clk_i(clk), .rst_ni(rst_n), .csr_we_i(csr_we), .csr_addr_i(csr_addr),
    .csr_wdata_i(csr_wdata), .vl_o(vl), .acc_fmt_o(acc_fmt), .mx_fmt_o(mx_fmt),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .vau_valid_o(vau_valid), .vau_ready_i(vau_ready), .vau_req_o(vau_req),
    .vau_vd_mask_o(vd_mask), .vau_done_i(vau_done), .vau_done_mask_i(done_mask),
    .busy_regs_o(busy_regs), .ev_hazard_o(ev_hazard)
  );

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("%s", s);
  endtask

  function automatic logic [31:0] regs(int base, int bits);
    logic [31:0] m = '0;
    int n = (bits + VLEN - 1) / VLEN;
    for (int i = 0; i < n; i++) m[(base + i) % 32] = 1'b1;
    return m;
  endfunction

  // stand-in VAU: in-order queue of accepted instructions with finish times
  logic [31:0] q_mask [$];
  int          q_left [$];
  logic [31:0] m_busy;

  initial begin
    int avl, lmul, sew16, exp_vl, sew, mvl;
    logic [31:0] wr, rd;
    bit exp_haz;
    csr_we = 0; csr_addr = CSR_VSETVL; csr_wdata = '0;
    instr_valid = 0; instr = '0; vau_ready = 0; vau_done = 0; done_mask = '0;
    m_busy = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // reset values
    checks++;
    if (vl != 0 || acc_fmt != ACC_FP32 || mx_fmt != FMT_E4M3) fail("reset values");
    // CSRs
    for (int r = 0; r < 300; r++) begin
      avl = $urandom_range(0, 511); lmul = $urandom_range(0, 3); sew16 = $urandom_range(0, 1);
      @(negedge clk);
      csr_we = 1; csr_addr = CSR_VSETVL; csr_wdata = {19'h0, 3'(lmul), 1'(sew16), 9'(avl)};
      @(negedge clk);
      csr_we = 1; csr_addr = CSR_MXFMT; csr_wdata = 32'(r % 3);
      exp_vl = 512 * (1 << lmul) / (sew16 ? 16 : 32);
      if (avl < exp_vl) exp_vl = avl;
      checks++;
      if (int'(vl) != exp_vl || acc_fmt != (sew16 ? ACC_BF16 : ACC_FP32))
        fail($sformatf("avl %0d lmul %0d sew16 %0d: vl %0d, expected %0d", avl, lmul, sew16, vl, exp_vl));
      @(negedge clk) csr_we = 0;
      checks++;
      if (mx_fmt != mx_fmt_e'(r % 3)) fail("mx format CSR");
    end
    // scoreboard
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      csr_we = 0;
      if ($urandom_range(0, 40) == 0) begin   // occasional reconfiguration, vl 0 included
        csr_we = 1; csr_addr = CSR_VSETVL;
        csr_wdata = {19'h0, 3'($urandom_range(0, 2)), 1'($urandom), 9'($urandom_range(0, 40))};
      end
      if (!instr_valid || instr_ready_prev) begin
        instr_valid = ($urandom_range(0, 2) != 0);
        instr.vf  = 1'($urandom);
        instr.vd  = 5'($urandom); instr.vs1 = 5'($urandom); instr.vs2 = 5'($urandom);
        instr.vs3 = 5'($urandom); instr.vs4 = 5'($urandom);
      end
      vau_ready = ($urandom_range(0, 3) != 0);
      vau_done = 0; done_mask = '0;
      if (q_left.size() > 0 && q_left[0] <= 0) begin
        vau_done = 1; done_mask = q_mask[0];
      end
      #1;
      // model
      sew = (vl == 0) ? 32 : ((acc_fmt == ACC_BF16) ? 16 : 32);
      mvl = int'(vl);
      wr = regs(int'(instr.vd), mvl * sew);
      rd = wr | regs(int'(instr.vs2), mvl * 64) | regs(int'(instr.vs4), mvl * 8);
      if (!instr.vf) rd |= regs(int'(instr.vs1), mvl * 64) | regs(int'(instr.vs3), mvl * 8);
      exp_haz = (rd & m_busy) != 0;
      checks++;
      if (busy_regs != m_busy) fail($sformatf("busy %h, expected %h", busy_regs, m_busy));
      checks++;
      if (instr_ready != (!exp_haz && (vau_ready || mvl == 0))
          || vau_valid != (instr_valid && !exp_haz && mvl != 0)
          || ev_hazard != (instr_valid && exp_haz)
          || (vau_valid && vd_mask != wr))
        fail($sformatf("cycle %0d: ready %0d valid %0d hazard %0d (model hazard %0d)",
                       c, instr_ready, vau_valid, ev_hazard, exp_haz));
      if (vau_done) begin
        m_busy &= ~q_mask[0];
        void'(q_mask.pop_front());
        void'(q_left.pop_front());
      end
      foreach (q_left[i]) q_left[i]--;
      if (vau_valid && vau_ready) begin
        m_busy |= wr;
        q_mask.push_back(wr);
        q_left.push_back($urandom_range(1, 12));
        n_issue++;
      end
      n_hazard += int'(ev_hazard);
      instr_ready_prev = instr_ready;
    end
    checks++;
    if (n_hazard == 0 || n_issue == 0) fail("no hazard or no issue seen");
    $display("issued %0d, hazard cycles %0d", n_issue, n_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit instr_ready_prev = 1'b1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
