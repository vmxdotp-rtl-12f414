// tb_vrf: the banked vector register file under random traffic on all seven
// read and three write ports. Every word is first written in full; then each
// cycle random reads and byte-enabled writes are requested. A granted read
// must return, one cycle later, the word as it was before the edge of the
// grant; a granted write must change exactly its enabled bytes. Two checks
// of the port structure: four reads of one bank are never all granted in a
// cycle (3 read ports per bank) while reads of four different banks are.
module tb_vrf;
  import mx_pkg::*;
  localparam int NR_RD = 7, NR_WR = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      [NR_RD-1:0] rd_req, rd_gnt, rd_valid;
  vrf_addr_t [NR_RD-1:0] rd_addr;
  vrf_word_t [NR_RD-1:0] rd_data;
  logic      [NR_WR-1:0] wr_req, wr_gnt;
  vrf_addr_t [NR_WR-1:0] wr_addr;
  vrf_word_t [NR_WR-1:0] wr_data;
  vrf_be_t   [NR_WR-1:0] wr_be;
  int checks = 0, failures = 0;

  vrf #(.NR_RD(NR_RD), .NR_WR(NR_WR), .RD_PER_BANK(3)) dut (
    .clk_i(clk), .rst_ni(rst_n), .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_gnt_o(rd_gnt),
    .rd_valid_o(rd_valid), .rd_data_o(rd_data), .wr_req_i(wr_req), .wr_addr_i(wr_addr),
    .wr_data_i(wr_data), .wr_be_i(wr_be), .wr_gnt_o(wr_gnt)
  );

  vrf_word_t model [NR_WORDS];
  vrf_word_t expect_q [NR_RD];
  logic      [NR_RD-1:0] pending;

  function automatic vrf_word_t rnd();
    vrf_word_t w;
    for (int i = 0; i < 8; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("%s", s);
  endtask

  initial begin
    int nb;
    rd_req = '0; wr_req = '0; rd_addr = '0; wr_addr = '0; wr_data = '0; wr_be = '0;
    pending = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // fill every word through write port 0
    for (int a = 0; a < NR_WORDS; a++) begin
      @(negedge clk);
      wr_req = 3'b001; wr_addr[0] = vrf_addr_t'(a); wr_data[0] = rnd(); wr_be[0] = '1;
      model[a] = wr_data[0];
      #1 checks++;
      if (!wr_gnt[0]) fail("fill write not granted");
    end
    @(negedge clk) wr_req = '0;
    // port structure: 4 reads of bank 0 (vregs 0, 4, 8, 12) -> 3 granted
    for (int p = 0; p < 4; p++) rd_addr[p] = vrf_addr_t'(8 * p);
    rd_req = 7'b0001111;
    #1 checks++;
    if (rd_gnt != 7'b0000111) fail($sformatf("same-bank grant %b", rd_gnt));
    @(negedge clk);
    for (int p = 0; p < 4; p++) rd_addr[p] = vrf_addr_t'(2 * p);
    #1 checks++;
    if (rd_gnt != 7'b0001111) fail($sformatf("four-bank grant %b", rd_gnt));
    @(negedge clk) rd_req = '0;
    @(negedge clk);
    // random traffic
    for (int c = 0; c < 4000; c++) begin
      for (int p = 0; p < NR_RD; p++) begin
        rd_req[p]  = ($urandom_range(0, 2) != 0);
        rd_addr[p] = vrf_addr_t'($urandom_range(0, NR_WORDS - 1));
      end
      for (int p = 0; p < NR_WR; p++) begin
        wr_req[p]  = ($urandom_range(0, 1) == 1);
        wr_addr[p] = vrf_addr_t'($urandom_range(0, NR_WORDS - 1));
        wr_data[p] = rnd();
        wr_be[p]   = {$urandom, $urandom};
      end
      #1;
      // reads see the words before this edge's writes
      for (int p = 0; p < NR_RD; p++) if (rd_gnt[p]) expect_q[p] = model[rd_addr[p]];
      nb = 0;
      for (int p = 0; p < NR_WR; p++) if (wr_gnt[p]) begin
        for (int b = 0; b < WORD_W / 8; b++)
          if (wr_be[p][b]) model[wr_addr[p]][8*b +: 8] = wr_data[p][8*b +: 8];
        nb++;
      end
      pending = rd_gnt;
      @(negedge clk);
      for (int p = 0; p < NR_RD; p++) begin
        checks++;
        if (rd_valid[p] != pending[p]) fail($sformatf("port %0d valid %0d", p, rd_valid[p]));
        else if (pending[p] && rd_data[p] !== expect_q[p]) fail($sformatf("port %0d wrong data", p));
      end
    end
    rd_req = '0; wr_req = '0;
    // final comparison of the whole file through port 6
    for (int a = 0; a < NR_WORDS; a++) begin
      rd_req = 7'b1000000; rd_addr[6] = vrf_addr_t'(a);
      @(negedge clk);
      checks++;
      if (rd_data[6] !== model[a]) fail($sformatf("word %0d differs at the end", a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
