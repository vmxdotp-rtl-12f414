// tb_vau: the vector arithmetic unit with a banked register file around it.
// The testbench fills the register file with random elements, scales and
// accumulators through its own write port, sends vmxdotp instructions
// straight to the VAU (one at a time, no controller), and compares the whole
// register file with a model built on the exact reference in mx_ref_pkg.
// It also times each instruction from its acceptance to done_o: with
// operands in different banks, or for the vector-scalar forms, a beat issues
// every cycle (time = beats + 3: read, issue, two pipeline stages); with every operand in one bank the scale
// fetch costs one extra cycle per group of 8 beats, as the paper describes.
module tb_vau;
  import mx_pkg::*;
  import mx_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                req_valid, req_ready, done, busy;
  vau_req_t            req;
  logic [NR_VREGS-1:0] vd_mask, done_mask;
  logic      [5:0] rd_req, rd_gnt, rd_valid;
  vrf_addr_t [5:0] rd_addr;
  vrf_word_t [5:0] rd_data;
  logic      [1:0] wr_req, wr_gnt;
  vrf_addr_t [1:0] wr_addr;
  vrf_word_t [1:0] wr_data;
  vrf_be_t   [1:0] wr_be;
  logic ev_fetch, ev_stall, ev_issue;
  int checks = 0, failures = 0;
  int n_fetch = 0, n_stall = 0, n_issue = 0;

  vau dut (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .req_i(req), .req_vd_mask_i(vd_mask),
    .rd_req_o(rd_req[4:0]), .rd_addr_o(rd_addr[4:0]), .rd_gnt_i(rd_gnt[4:0]),
    .rd_valid_i(rd_valid[4:0]), .rd_data_i(rd_data[4:0]),
    .wr_req_o(wr_req[0]), .wr_addr_o(wr_addr[0]), .wr_data_o(wr_data[0]), .wr_be_o(wr_be[0]),
    .wr_gnt_i(wr_gnt[0]), .done_o(done), .done_mask_o(done_mask), .busy_o(busy),
    .ev_scale_fetch_o(ev_fetch), .ev_beat_stall_o(ev_stall), .ev_issue_o(ev_issue)
  );

  vrf #(.NR_RD(6), .NR_WR(2), .RD_PER_BANK(3)) i_vrf (
    .clk_i(clk), .rst_ni(rst_n), .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_gnt_o(rd_gnt),
    .rd_valid_o(rd_valid), .rd_data_o(rd_data), .wr_req_i(wr_req), .wr_addr_i(wr_addr),
    .wr_data_i(wr_data), .wr_be_i(wr_be), .wr_gnt_o(wr_gnt)
  );

  always @(posedge clk) if (rst_n) begin
    n_fetch += int'(ev_fetch);
    n_stall += int'(ev_stall);
    n_issue += int'(ev_issue);
  end

  vrf_word_t model [NR_WORDS];

  function automatic logic [7:0] get_byte(int vreg, int idx);
    return model[vreg * WORDS_PER_REG + idx / 32][8 * (idx % 32) +: 8];
  endfunction
  function automatic logic [63:0] get_dword(int vreg, int idx);
    return model[vreg * WORDS_PER_REG + idx / 4][64 * (idx % 4) +: 64];
  endfunction

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("%s", s);
  endtask

  function automatic vrf_word_t rnd_word(int kind);
    vrf_word_t w;
    logic [31:0] v;
    for (int i = 0; i < 8; i++) begin
      v = $urandom;
      if (kind == 1) v[30:23] = 8'($urandom_range(100, 150));                    // FP32 accumulators
      if (kind == 2) for (int b = 0; b < 4; b++) v[8*b +: 8] = 8'($urandom_range(112, 142)); // scales
      w[32*i +: 32] = v;
    end
    return w;
  endfunction

  task automatic load(int vreg, int nreg, int kind);
    for (int a = vreg * WORDS_PER_REG; a < (vreg + nreg) * WORDS_PER_REG; a++) begin
      @(negedge clk);
      wr_req[1] = 1'b1; wr_addr[1] = vrf_addr_t'(a); wr_data[1] = rnd_word(kind); wr_be[1] = '1;
      model[a] = wr_data[1];
    end
    @(negedge clk) wr_req[1] = 1'b0;
  endtask

  // runs one instruction, updates the model and returns its duration
  task automatic run(vmx_instr_t in, int vl, bit bf16, mx_fmt_e fmt, output int t);
    logic [31:0] acc, r;
    int pos;
    @(negedge clk);
    req = '{instr: in, vl: VL_W'(vl), acc_fmt: bf16 ? ACC_BF16 : ACC_FP32, mx_fmt: fmt};
    vd_mask = 32'(1) << in.vd;
    req_valid = 1'b1;
    #1 checks++;
    if (!req_ready) fail("idle VAU does not accept");
    @(negedge clk) req_valid = 1'b0;
    t = 1;
    while (!done && t < 200) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (done_mask != vd_mask) fail("wrong done mask");
    @(negedge clk);
    // model
    for (int i = 0; i < vl; i++) begin
      if (bf16) begin
        pos = 16 * i;
        acc = {16'h0, model[int'(in.vd) * 2 + pos / 256][pos % 256 +: 16]};
      end else begin
        pos = 32 * i;
        acc = model[int'(in.vd) * 2 + pos / 256][pos % 256 +: 32];
      end
      r = mxdpa(int'(fmt), bf16, in.vf ? in.rs1 : get_dword(int'(in.vs1), i),
                get_dword(int'(in.vs2), i), in.vf ? in.rs3 : get_byte(int'(in.vs3), i),
                get_byte(int'(in.vs4), i), acc);
      if (bf16) model[int'(in.vd) * 2 + pos / 256][pos % 256 +: 16] = r[15:0];
      else      model[int'(in.vd) * 2 + pos / 256][pos % 256 +: 32] = r;
    end
  endtask

  task automatic compare_all();
    for (int a = 0; a < NR_WORDS; a++) begin
      @(negedge clk);
      rd_req[5] = 1'b1; rd_addr[5] = vrf_addr_t'(a);
      @(negedge clk);
      rd_req[5] = 1'b0;
      checks++;
      if (rd_data[5] !== model[a]) fail($sformatf("word %0d: got %h exp %h", a, rd_data[5], model[a]));
    end
  endtask

  initial begin
    vmx_instr_t in;
    int t, vl, nb;
    bit bf16, same;
    mx_fmt_e fmt;
    req_valid = 0; req = '0; vd_mask = '0;
    rd_req[5] = 0; rd_addr[5] = '0; wr_req[1] = 0; wr_addr[1] = '0; wr_data[1] = '0; wr_be[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // layouts: all in bank 0 (vd v0, vs1 v8, vs2 v16, vs3 v24, vs4 v28) and
    // spread (vd v6, vs1 v13, vs2 v20, vs3 v27, vs4 v29: at most 2 per bank)
    load(0, NR_VREGS, 0);
    load(8, 4, 0); load(16, 4, 0); load(12, 4, 0); load(20, 4, 0);
    load(24, 4, 2); load(28, 2, 2);
    load(0, 2, 1); load(6, 2, 1);
    for (int r = 0; r < 40; r++) begin
      same = (r % 2 == 0);
      bf16 = ($urandom_range(0, 2) == 0);
      fmt  = mx_fmt_e'($urandom_range(0, 2));
      vl   = (r < 4) ? 32 : $urandom_range(1, 32);
      in.vf  = (r % 4 == 3);
      in.rs1 = {$urandom, $urandom};
      in.rs3 = 8'($urandom_range(120, 134));
      if (same) begin
        in.vd = 0; in.vs1 = 8; in.vs2 = 16; in.vs3 = 24; in.vs4 = 28;
      end else begin
        in.vd = 6; in.vs1 = 13; in.vs2 = 20; in.vs3 = 27; in.vs4 = 29;
      end
      if (bf16) load(int'(in.vd), 1, 0);   // BF16 accumulators: any 16-bit patterns
      else      load(int'(in.vd), 2, 1);
      run(in, vl, bf16, fmt, t);
      nb = (vl + 3) / 4;
      checks++;
      if (t != nb + 3 + ((same && !in.vf) ? (nb + 7) / 8 : 0))
        fail($sformatf("instr %0d (vl %0d same-bank %0d vf %0d): %0d cycles", r, vl, same, in.vf, t));
    end
    compare_all();
    checks++;
    if (n_fetch == 0 || n_stall == 0 || n_issue == 0) fail("an event never happened");
    $display("scale fetches %0d, stalled beats %0d, beats %0d", n_fetch, n_stall, n_issue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
