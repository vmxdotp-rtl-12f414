// tb_mxdpa_unit: self-checking testbench of the MX dot-product-accumulate lane.
// Hand-worked cases first (results worked out on paper, e.g. eight products
// 1.0*1.0 plus 1.0 = 9.0 = 32'h41100000), then random operations in all
// three element formats and both accumulator formats, compared with the
// exact golden model in mx_ref_pkg. One operation is fed every cycle and
// every result must appear exactly two cycles after its input.
module tb_mxdpa_unit;
  import mx_pkg::*;
  import mx_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid;
  logic [15:0] in_tag;
  mx_fmt_e     mx_fmt;
  acc_fmt_e    acc_fmt;
  logic [63:0] op_a, op_b, op_c;
  logic        out_valid;
  logic [15:0] out_tag;
  logic [31:0] result;

  int checks = 0, failures = 0;
  int cycle = 0;

  mxdpa_unit #(.TAG_W(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_tag_i(in_tag),
    .mx_fmt_i(mx_fmt), .acc_fmt_i(acc_fmt), .op_a_i(op_a), .op_b_i(op_b),
    .op_c_i(op_c), .out_valid_o(out_valid), .out_tag_o(out_tag), .result_o(result)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // expected results, indexed by tag
  logic [31:0] exp_res [0:4095];
  int          exp_cyc [0:4095];
  int          n_sent = 0, n_recv = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (result !== exp_res[out_tag] || cycle != exp_cyc[out_tag] + 2) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH tag %0d: got %h exp %h (cycle %0d, issued %0d)",
                   out_tag, result, exp_res[out_tag], cycle, exp_cyc[out_tag]);
      end
      n_recv++;
    end
  end

  task automatic send(mx_fmt_e f, acc_fmt_e af, logic [63:0] a, logic [63:0] b,
                      logic [7:0] sa, logic [7:0] sb, logic [31:0] acc,
                      logic [31:0] expect_hand, bit use_hand);
    logic [31:0] e;
    e = mxdpa(int'(f), af == ACC_BF16, a, b, sa, sb, acc);
    if (use_hand) begin
      checks++;
      if (e !== expect_hand) begin
        failures++;
        $display("GOLDEN MODEL disagrees with hand value: %h vs %h", e, expect_hand);
      end
      e = expect_hand;
    end
    in_valid <= 1'b1;
    in_tag   <= 16'(n_sent);
    mx_fmt   <= f;
    acc_fmt  <= af;
    op_a     <= a;
    op_b     <= b;
    op_c     <= {16'h0, sb, sa, acc};
    exp_res[n_sent] = e;
    exp_cyc[n_sent] = cycle + 1;   // edge that captures the input
    n_sent++;
    @(posedge clk);
  endtask

  function automatic logic [7:0] rnd_scale();
    int r = $urandom_range(0, 9);
    if (r == 0) return 8'($urandom_range(0, 40));          // tiny -> subnormal
    if (r == 1) return 8'($urandom_range(215, 254));       // huge -> overflow
    if (r == 2 && $urandom_range(0, 20) == 0) return 8'hff; // NaN scale
    return 8'($urandom_range(117, 137));
  endfunction

  function automatic logic [31:0] rnd_acc(bit bf16);
    logic [31:0] v;
    int r = $urandom_range(0, 9);
    v = $urandom;
    if (r < 6) v[30:23] = 8'($urandom_range(110, 150));
    else if (r == 6) v[30:0] = '0;
    else if (r == 7) v[30:23] = 8'h00;
    if (bf16) v = {16'h0, v[31:16]};
    return v;
  endfunction

  initial begin
    logic [63:0] a, b;
    mx_fmt_e f;
    acc_fmt_e af;
    in_valid = 1'b0; in_tag = '0; mx_fmt = FMT_E4M3; acc_fmt = ACC_FP32;
    op_a = '0; op_b = '0; op_c = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // 8 x (1.0 * 1.0) + 1.0 = 9.0 (E4M3 1.0 = 0x38)
    send(FMT_E4M3, ACC_FP32, {8{8'h38}}, {8{8'h38}}, 8'd127, 8'd127, 32'h3f80_0000, 32'h4110_0000, 1);
    // scales 2^1 * 2^0: 16.0 + 1.0 = 17.0
    send(FMT_E4M3, ACC_FP32, {8{8'h38}}, {8{8'h38}}, 8'd128, 8'd127, 32'h3f80_0000, 32'h4188_0000, 1);
    // E5M2 1.0 = 0x3c; 8 x (1.0 * -1.0) + 8.0 = +0
    send(FMT_E5M2, ACC_FP32, {8{8'h3c}}, {8{8'hbc}}, 8'd127, 8'd127, 32'h4100_0000, 32'h0000_0000, 1);
    // E2M1 1.0 = 0x2; 16 x 1.0 = 16.0, BF16 accumulator 0 -> 16.0 = 16'h4180
    send(FMT_E2M1, ACC_BF16, {16{4'h2}}, {16{4'h2}}, 8'd127, 8'd127, 32'h0, 32'h0000_4180, 1);
    // E2M1 6.0 = 0x7: 16 x 36 = 576 = 0x44100000
    send(FMT_E2M1, ACC_FP32, {16{4'h7}}, {16{4'h7}}, 8'd127, 8'd127, 32'h0, 32'h4410_0000, 1);
    // BF16: 256 + 1 rounds to 256 (8-bit significand, tie to even)
    send(FMT_E4M3, ACC_BF16, {56'h0, 8'h38}, {56'h0, 8'h38}, 8'd127, 8'd127, 32'h0000_4380, 32'h0000_4380, 1);
    // NaN scale gives the canonical NaN
    send(FMT_E4M3, ACC_FP32, {8{8'h38}}, {8{8'h38}}, 8'hff, 8'd127, 32'h0, 32'h7fc0_0000, 1);
    // E5M2 infinity (0x7c) times 1.0 gives +inf
    send(FMT_E5M2, ACC_FP32, {56'h0, 8'h7c}, {56'h0, 8'h3c}, 8'd127, 8'd127, 32'h3f80_0000, 32'h7f80_0000, 1);
    // overflow: 8 x 448*448 scaled by 2^127 -> +inf (E4M3 448 = 0x7e)
    send(FMT_E4M3, ACC_FP32, {8{8'h7e}}, {8{8'h7e}}, 8'd254, 8'd127, 32'h0, 32'h7f80_0000, 1);
    // subnormal: 1.0 * 2^-140 = FP32 subnormal 2^-140 = 0x00000200
    send(FMT_E4M3, ACC_FP32, {56'h0, 8'h38}, {56'h0, 8'h38}, 8'd0, 8'd114, 32'h0, 32'h0000_0200, 1);
    // random operations
    for (int i = 0; i < 3000; i++) begin
      f  = mx_fmt_e'($urandom_range(0, 2));
      af = acc_fmt_e'($urandom_range(0, 1));
      a  = {$urandom, $urandom};
      b  = {$urandom, $urandom};
      if ($urandom_range(0, 3) == 0) b = a ^ 64'h8080_8080_8080_8080;  // cancellation
      send(f, af, a, b, rnd_scale(), rnd_scale(), rnd_acc(af == ACC_BF16), 32'h0, 0);
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_recv != n_sent) begin
      failures++;
      $display("received %0d of %0d results", n_recv, n_sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
