// tb_vau_result_select: random lane results, beats and lane masks; the byte
// enable must cover exactly the bytes of the enabled lanes' results (32 bits
// each for FP32, 16 bits for BF16) and those bytes must hold the results.
module tb_vau_result_select;
  import mx_pkg::*;
  acc_fmt_e   acc_fmt;
  logic [1:0] beat;
  logic [3:0] mask;
  logic [3:0][31:0] res;
  vrf_word_t  wdata;
  vrf_be_t    wbe;
  int checks = 0, failures = 0;

  vau_result_select dut (
    .acc_fmt_i(acc_fmt), .beat_i(beat), .lane_mask_i(mask), .res_i(res),
    .wdata_o(wdata), .wbe_o(wbe)
  );

  initial begin
    vrf_be_t exp_be;
    int pos, w;
    bit ok;
    for (int r = 0; r < 2000; r++) begin
      acc_fmt = acc_fmt_e'($urandom_range(0, 1));
      beat = 2'($urandom);
      mask = 4'($urandom);
      for (int l = 0; l < 4; l++) res[l] = $urandom;
      #1;
      exp_be = '0;
      ok = 1;
      w = (acc_fmt == ACC_FP32) ? 32 : 16;
      for (int l = 0; l < 4; l++) begin
        // operation index within the word
        pos = (acc_fmt == ACC_FP32) ? 4 * (int'(beat) % 2) + l : 4 * int'(beat) + l;
        if (mask[l]) begin
          for (int b = 0; b < w / 8; b++) exp_be[pos * w / 8 + b] = 1'b1;
          if (w == 32 && wdata[32 * pos +: 32] !== res[l]) ok = 0;
          if (w == 16 && wdata[16 * pos +: 16] !== res[l][15:0]) ok = 0;
        end
      end
      checks++;
      if (!ok || wbe !== exp_be) begin
        failures++;
        if (failures < 5) $display("fmt %0d beat %0d mask %b: be %h exp %h", acc_fmt, beat, mask, wbe, exp_be);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
