// tb_scale_buffer: loads random scale words, reads every slot of the stored
// word, checks that a word being loaded is visible in the same cycle and
// that the stored word is kept while nothing is loaded.
module tb_scale_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         ld_a, ld_b;
  logic [255:0] da, db, ref_a, ref_b;
  logic [2:0]   slot;
  logic [31:0]  sa, sb;
  int checks = 0, failures = 0;

  scale_buffer #(.WORD_W(256), .N_LANES(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ld_a_i(ld_a), .ld_a_data_i(da), .ld_b_i(ld_b),
    .ld_b_data_i(db), .slot_i(slot), .sc_a_o(sa), .sc_b_o(sb)
  );

  function automatic logic [255:0] rnd();
    logic [255:0] w;
    for (int i = 0; i < 8; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  task automatic check(logic [255:0] wa, logic [255:0] wb);
    logic [31:0] ea, eb;
    // lane l of slot s is byte 4*s + l of the word
    for (int l = 0; l < 4; l++) begin
      ea[8*l +: 8] = wa[8 * (4 * int'(slot) + l) +: 8];
      eb[8*l +: 8] = wb[8 * (4 * int'(slot) + l) +: 8];
    end
    checks++;
    if (sa !== ea || sb !== eb) begin
      failures++;
      $display("slot %0d: got %h %h, expected %h %h", slot, sa, sb, ea, eb);
    end
  endtask

  initial begin
    ld_a = 0; ld_b = 0; da = '0; db = '0; slot = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 50; r++) begin
      @(negedge clk);
      ld_a = ($urandom_range(0, 1) == 1); ld_b = ($urandom_range(0, 1) == 1);
      da = rnd(); db = rnd(); slot = 3'($urandom);
      #1 check(ld_a ? da : ref_a, ld_b ? db : ref_b);   // bypass in the load cycle
      @(posedge clk);
      if (ld_a) ref_a = da;
      if (ld_b) ref_b = db;
      #1 ld_a = 0; ld_b = 0;
      for (int s = 0; s < 8; s++) begin
        @(negedge clk);
        da = rnd(); db = rnd();   // not loaded: must not matter
        slot = 3'(s);
        #1 check(ref_a, ref_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_a = '0; ref_b = '0;
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
