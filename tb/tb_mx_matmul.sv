// tb_mx_matmul: the MX matrix-multiply workloads of the evaluation, run on
// the whole vector unit at its default size.
//
// C (64 x 64) = A (64 x N) * B (N x 64) with MX block size 32, as the
// paper's vmxdotp kernel computes it: output tiles of M_tile = 8 rows by
// P_tile = 32 columns; for every hardware block of k = 8 (FP8) or 16 (FP4)
// elements of the inner dimension the B elements of the 32 columns (one
// 64-bit word of packed elements per column, four registers) and their
// scales (one register) are loaded, and each of the 8 rows issues one
// vmxdotp.wf / .qf with its packed A elements and A scale as scalar
// operands, accumulating into its own register group (v16 + 2m for FP32,
// v16 + m for BF16). B goes into three rotating buffers (v0-v4, v5-v9,
// v10-v14) so that loading the next block overlaps the computation, as a
// load-store unit working alongside the VAU would; the scales are reloaded
// with every block for simplicity. The testbench acts as the scalar core and as the
// load-store unit (VRF ports of the top); C is read back through the same
// port and compared with the exact reference model applied in the same
// order. Runs: N = 128 for MXFP8 (E4M3) / FP32, MXFP8 (E5M2) / BF16, MXFP4 /
// FP32 and MXFP4 / BF16, and the inner-dimension sweep N = 64, 256, 512 for
// MXFP8 / FP32. Reported per run: FPU beats and cycles; the beats must equal
// 64 * 64 / 4 * N / k, the FPUs must be busy in at least 90 % of the
// inner-loop cycles, and scale prefetches must occur.
module tb_mx_matmul;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  localparam int M = 64, P = 64, NMAX = 512, MT = 8, PT = 32;

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
  int n_fetch = 0, n_issue = 0, n_hazard = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      n_fetch  += int'(ev_scale_fetch);
      n_issue  += int'(ev_issue);
      n_hazard += int'(ev_hazard);
    end
  end

  // drivers: inputs change at the falling edge, handshakes complete at the
  // next rising edge
  task automatic csr_write(csr_addr_e a, logic [31:0] d);
    @(negedge clk);
    csr_we = 1'b1; csr_addr = a; csr_wdata = d;
    @(posedge clk);
    #1 csr_we = 1'b0;
  endtask

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
    #1 instr_valid = 1'b0;
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
    d = lsu_rd_data;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  // operands in memory (the L1 of the real system)
  logic [7:0]  A  [M][NMAX];
  logic [7:0]  B  [P][NMAX];          // column-major: B[p][n]
  logic [7:0]  As [M][NMAX / 32];
  logic [7:0]  Bs [NMAX / 32][P];
  logic [31:0] C  [M][P];

  function automatic logic [63:0] pack(int fmt, int row_or_col, int n, bit is_a);
    logic [63:0] w = '0;
    int hw = (fmt == 2) ? 16 : 8;
    for (int e = 0; e < hw; e++) begin
      logic [7:0] v = is_a ? A[row_or_col][n + e] : B[row_or_col][n + e];
      if (fmt == 2) w[4*e +: 4] = v[3:0];
      else          w[8*e +: 8] = v;
    end
    return w;
  endfunction

  // B elements of hardware block n for the 32 columns of tile pt, and their
  // scales, into buffer b (elements v5b..v5b+3, scales v5b+4)
  task automatic load_block(int fmt, int pt, int n, int b);
    vrf_word_t w;
    for (int wv = 0; wv < 4 * WORDS_PER_REG; wv++) begin
      for (int q = 0; q < N_FPU; q++) w[64*q +: 64] = pack(fmt, pt * PT + wv * N_FPU + q, n, 0);
      vrf_write(5 * b * WORDS_PER_REG + wv, w);
    end
    w = '0;
    for (int p = 0; p < PT; p++) w[8*p +: 8] = Bs[n / 32][pt * PT + p];
    vrf_write((5 * b + 4) * WORDS_PER_REG, w);
  endtask

  task automatic run(int fmt, bit bf16, int n_inner);
    int hw = (fmt == 2) ? 16 : 8;
    int beats0, c0, bad, loop_cyc, lc0;
    vrf_word_t w;
    vmx_instr_t in;
    logic [31:0] got;
    // data: elements random (no E4M3 NaN codes), scales near 2^0
    for (int m = 0; m < M; m++) for (int n = 0; n < n_inner; n++) begin
      A[m][n] = 8'($urandom);
      if (fmt == 1 && A[m][n][6:0] == 7'h7f) A[m][n] = 8'h00;
    end
    for (int p = 0; p < P; p++) for (int n = 0; n < n_inner; n++) begin
      B[p][n] = 8'($urandom);
      if (fmt == 1 && B[p][n][6:0] == 7'h7f) B[p][n] = 8'h00;
    end
    for (int m = 0; m < M; m++) for (int b = 0; b < n_inner / 32; b++) As[m][b] = 8'($urandom_range(118, 136));
    for (int b = 0; b < n_inner / 32; b++) for (int p = 0; p < P; p++) Bs[b][p] = 8'($urandom_range(118, 136));
    // reference, in the kernel's order of accumulation
    for (int m = 0; m < M; m++) for (int p = 0; p < P; p++) begin
      C[m][p] = 32'h0;
      for (int n = 0; n < n_inner; n += hw)
        C[m][p] = mxdpa(fmt, bf16, pack(fmt, m, n, 1), pack(fmt, p, n, 0),
                        As[m][n / 32], Bs[n / 32][p], C[m][p]);
    end
    csr_write(CSR_MXFMT, 32'(fmt));
    // vl = P_tile = 32: LMUL 2 for SEW 32, LMUL 1 for SEW 16
    csr_write(CSR_VSETVL, {19'h0, bf16 ? 3'd0 : 3'd1, bf16, 9'(PT)});
    checks++;
    @(negedge clk);
    if (int'(vl) != PT) begin
      failures++;
      $display("vl %0d", vl);
    end
    beats0 = n_issue;
    c0 = cycle;
    bad = 0;
    loop_cyc = 0;
    for (int mt = 0; mt < M / MT; mt++) begin
      for (int pt = 0; pt < P / PT; pt++) begin
        wait_idle();
        for (int wa = 16 * WORDS_PER_REG; wa < NR_WORDS; wa++) vrf_write(wa, '0);
        load_block(fmt, pt, 0, 0);
        lc0 = cycle;
        for (int n = 0; n < n_inner; n += hw) begin
          // compute block n from buffer (n/hw) % 3 while block n+hw is loaded
          // into the next buffer; that buffer was last read by block n-2*hw,
          // whose instructions have all finished once those of block n-hw
          // were accepted (same accumulators, in-order completion)
          fork
            for (int m = 0; m < MT; m++) begin
              in = '0;
              in.vf  = 1'b1;
              in.vd  = vreg_t'(bf16 ? 16 + m : 16 + 2 * m);
              in.vs2 = vreg_t'(5 * ((n / hw) % 3));
              in.vs4 = vreg_t'(5 * ((n / hw) % 3) + 4);
              in.rs1 = pack(fmt, mt * MT + m, n, 1);
              in.rs3 = As[mt * MT + m][n / 32];
              issue(in);
            end
            if (n + hw < n_inner) load_block(fmt, pt, n + hw, ((n / hw) + 1) % 3);
          join
        end
        // store the tile
        wait_idle();
        loop_cyc += cycle - lc0;
        for (int m = 0; m < MT; m++) begin
          // 32 results: 4 words of 8 FP32 or 2 words of 16 BF16
          for (int h = 0; h < (bf16 ? 2 : 4); h++) begin
            vrf_read((bf16 ? 16 + m : 16 + 2 * m) * WORDS_PER_REG + h, w);
            for (int j = 0; j < (bf16 ? 16 : 8); j++) begin
              int p = h * (bf16 ? 16 : 8) + j;
              got = bf16 ? {16'h0, w[16*j +: 16]} : w[32*j +: 32];
              checks++;
              if (got !== C[mt * MT + m][pt * PT + p]) begin
                failures++;
                bad++;
                if (bad < 5) $display("fmt %0d bf16 %0d N %0d: C[%0d][%0d] = %h, expected %h",
                                      fmt, bf16, n_inner, mt * MT + m, pt * PT + p, got,
                                      C[mt * MT + m][pt * PT + p]);
              end
            end
          end
        end
      end
    end
    checks++;
    if (n_issue - beats0 != M * P / N_FPU * n_inner / hw) begin
      failures++;
      $display("beats %0d, expected %0d", n_issue - beats0, M * P / N_FPU * n_inner / hw);
    end
    $display("MX-MatMul 64x64, N=%0d, %s, %s accumulation: %0d FPU beats in %0d cycles (%0d in the inner loops, FPU use there %0d.%0d %%), %0d wrong",
             n_inner, fmt == 2 ? "MXFP4" : (fmt == 1 ? "MXFP8 E4M3" : "MXFP8 E5M2"),
             bf16 ? "BF16" : "FP32", n_issue - beats0, cycle - c0, loop_cyc,
             1000 * (n_issue - beats0) / loop_cyc / 10, 1000 * (n_issue - beats0) / loop_cyc % 10, bad);
    // rate: in the inner loops the FPUs must be busy at least 90 % of the
    // cycles (the paper reports 97.6 % for the whole MXFP8 kernel)
    checks++;
    if (10 * (n_issue - beats0) < 9 * loop_cyc) begin
      failures++;
      $display("FPU use in the inner loops below 90 %%");
    end
  endtask

  initial begin
    csr_we = 1'b0; csr_addr = CSR_VSETVL; csr_wdata = '0;
    instr_valid = 1'b0; instr = '0;
    lsu_rd_req = 1'b0; lsu_rd_addr = '0;
    lsu_wr_req = 1'b0; lsu_wr_addr = '0; lsu_wr_data = '0; lsu_wr_be = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int wa = 0; wa < NR_WORDS; wa++) vrf_write(wa, '0);
    run(1, 0, 128);
    run(0, 1, 128);
    run(2, 0, 128);
    run(2, 1, 128);
    run(1, 0, 64);
    run(1, 0, 256);
    run(1, 0, 512);
    checks++;
    if (n_fetch == 0) begin
      failures++;
      $display("no scale prefetch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
