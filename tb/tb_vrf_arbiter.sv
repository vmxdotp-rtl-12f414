// tb_vrf_arbiter: random read and write requests; the grants, bank read
// addresses and write selects are compared with a reference that counts, per
// bank, the requests in port order (bank = vreg % 4, vreg = addr / 2, row =
// (vreg / 4) * 2 + addr % 2; at most 3 reads and 1 write per bank).
module tb_vrf_arbiter;
  localparam int NR_RD = 7, NR_WR = 3;
  logic [NR_RD-1:0]            rd_req, rd_gnt;
  logic [NR_RD-1:0][5:0]       rd_addr;
  logic [NR_RD-1:0][1:0]       rd_bank, rd_port;
  logic [NR_WR-1:0]            wr_req, wr_gnt;
  logic [NR_WR-1:0][5:0]       wr_addr;
  logic [3:0][2:0]             bank_re;
  logic [3:0][2:0][3:0]        bank_raddr;
  logic [3:0]                  bank_we;
  logic [3:0][3:0]             bank_waddr;
  logic [3:0][1:0]             bank_wsel;
  int checks = 0, failures = 0;

  vrf_arbiter #(.NR_RD(NR_RD), .NR_WR(NR_WR), .NR_BANKS(4), .RD_PER_BANK(3),
                .WORDS_PER_REG(2), .ADDR_W(6)) dut (
    .rd_req_i(rd_req), .rd_addr_i(rd_addr), .rd_gnt_o(rd_gnt), .rd_bank_o(rd_bank),
    .rd_port_o(rd_port), .wr_req_i(wr_req), .wr_addr_i(wr_addr), .wr_gnt_o(wr_gnt),
    .bank_re_o(bank_re), .bank_raddr_o(bank_raddr), .bank_we_o(bank_we),
    .bank_waddr_o(bank_waddr), .bank_wsel_o(bank_wsel)
  );

  initial begin
    int cnt [4];
    bit wtaken [4];
    int bk, row;
    for (int r = 0; r < 3000; r++) begin
      for (int p = 0; p < NR_RD; p++) begin
        rd_req[p]  = ($urandom_range(0, 3) != 0);
        // often crowd bank 0 to provoke conflicts
        rd_addr[p] = ($urandom_range(0, 1) == 0) ? 6'({$urandom_range(0, 7), 2'b00, 1'($urandom)}) : 6'($urandom);
      end
      for (int p = 0; p < NR_WR; p++) begin
        wr_req[p]  = ($urandom_range(0, 1) == 1);
        wr_addr[p] = 6'($urandom_range(0, 15));
      end
      #1;
      cnt = '{0, 0, 0, 0};
      wtaken = '{0, 0, 0, 0};
      for (int p = 0; p < NR_RD; p++) begin
        bk  = (int'(rd_addr[p]) / 2) % 4;
        row = (int'(rd_addr[p]) / 8) * 2 + int'(rd_addr[p]) % 2;
        checks++;
        if (rd_req[p] && cnt[bk] < 3) begin
          if (!rd_gnt[p] || rd_bank[p] != 2'(bk) || rd_port[p] != 2'(cnt[bk])
              || !bank_re[bk][cnt[bk]] || bank_raddr[bk][cnt[bk]] != 4'(row)) begin
            failures++;
            $display("read port %0d (bank %0d, slot %0d) wrongly handled", p, bk, cnt[bk]);
          end
          cnt[bk]++;
        end else if (rd_gnt[p]) begin
          failures++;
          $display("read port %0d granted although bank %0d is full or no request", p, bk);
        end
      end
      for (int b = 0; b < 4; b++) begin
        checks++;
        for (int s = cnt[b]; s < 3; s++) if (bank_re[b][s]) begin
          failures++;
          $display("bank %0d port %0d enabled without a grant", b, s);
        end
      end
      for (int p = 0; p < NR_WR; p++) begin
        bk  = (int'(wr_addr[p]) / 2) % 4;
        row = (int'(wr_addr[p]) / 8) * 2 + int'(wr_addr[p]) % 2;
        checks++;
        if (wr_req[p] && !wtaken[bk]) begin
          wtaken[bk] = 1;
          if (!wr_gnt[p] || !bank_we[bk] || bank_waddr[bk] != 4'(row) || bank_wsel[bk] != 2'(p)) begin
            failures++;
            $display("write port %0d wrongly handled", p);
          end
        end else if (wr_gnt[p]) begin
          failures++;
          $display("write port %0d granted against priority", p);
        end
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
