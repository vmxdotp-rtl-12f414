// vrf_arbiter: bank demultiplexer and fixed-priority arbiter of the VRF.
//
// The vector register file has more logical read ports (five for the VAU
// alone with vmxdotp: vd, vs1, vs2, vs3, vs4; plus the load-store and slide
// units) than each bank has physical ones (3 read, 1 write). This block
// decodes each request's word address to a bank and a row and grants, per
// bank, up to RD_PER_BANK read requests and one write request, lower port
// index first. Requests that are not granted must be held by the requester
// and retried; the paper names this block and its priority scheme, the
// address map and the order of the ports are this design's own choices:
//   word address wa = vreg * WORDS_PER_REG + word
//   bank = vreg % NR_BANKS, row = (vreg / NR_BANKS) * WORDS_PER_REG + word
// so the consecutive registers of a register group lie in different banks.
//
// Interface: rd_req_i / rd_addr_i -> rd_gnt_o, and for every granted port
// the bank and physical port it uses (rd_bank_o, rd_port_o) so that the
// register file can route the read data back; bank_re_o / bank_raddr_o drive
// the bank read ports. Writes likewise. Timing: purely combinational.
module vrf_arbiter #(
  parameter int unsigned NR_RD         = 7,
  parameter int unsigned NR_WR         = 3,
  parameter int unsigned NR_BANKS      = 4,
  parameter int unsigned RD_PER_BANK   = 3,
  parameter int unsigned WORDS_PER_REG = 2,
  parameter int unsigned ADDR_W        = 6,
  localparam int unsigned BANK_W       = (NR_BANKS > 1) ? $clog2(NR_BANKS) : 1,
  localparam int unsigned ROW_W        = ADDR_W - BANK_W,
  localparam int unsigned PORT_W       = (RD_PER_BANK > 1) ? $clog2(RD_PER_BANK) : 1,
  localparam int unsigned WR_W         = (NR_WR > 1) ? $clog2(NR_WR) : 1
) (
  input  logic [NR_RD-1:0]                        rd_req_i,
  input  logic [NR_RD-1:0][ADDR_W-1:0]            rd_addr_i,
  output logic [NR_RD-1:0]                        rd_gnt_o,
  output logic [NR_RD-1:0][BANK_W-1:0]            rd_bank_o,
  output logic [NR_RD-1:0][PORT_W-1:0]            rd_port_o,
  input  logic [NR_WR-1:0]                        wr_req_i,
  input  logic [NR_WR-1:0][ADDR_W-1:0]            wr_addr_i,
  output logic [NR_WR-1:0]                        wr_gnt_o,
  output logic [NR_BANKS-1:0][RD_PER_BANK-1:0]             bank_re_o,
  output logic [NR_BANKS-1:0][RD_PER_BANK-1:0][ROW_W-1:0]  bank_raddr_o,
  output logic [NR_BANKS-1:0]                     bank_we_o,
  output logic [NR_BANKS-1:0][ROW_W-1:0]          bank_waddr_o,
  output logic [NR_BANKS-1:0][WR_W-1:0]           bank_wsel_o
);

  function automatic logic [BANK_W-1:0] bank_of(logic [ADDR_W-1:0] wa);
    return BANK_W'((32'(wa) / WORDS_PER_REG) % NR_BANKS);
  endfunction

  function automatic logic [ROW_W-1:0] row_of(logic [ADDR_W-1:0] wa);
    return ROW_W'((32'(wa) / (WORDS_PER_REG * NR_BANKS)) * WORDS_PER_REG + 32'(wa) % WORDS_PER_REG);
  endfunction

  always_comb begin
    int unsigned used;
    rd_gnt_o     = '0;
    rd_bank_o    = '0;
    rd_port_o    = '0;
    bank_re_o    = '0;
    bank_raddr_o = '0;
    for (int unsigned b = 0; b < NR_BANKS; b++) begin
      used = 0;
      for (int unsigned p = 0; p < NR_RD; p++) begin
        if (rd_req_i[p] && bank_of(rd_addr_i[p]) == BANK_W'(b) && used < RD_PER_BANK) begin
          rd_gnt_o[p]               = 1'b1;
          rd_bank_o[p]              = BANK_W'(b);
          rd_port_o[p]              = PORT_W'(used);
          bank_re_o[b][used]        = 1'b1;
          bank_raddr_o[b][used]     = row_of(rd_addr_i[p]);
          used++;
        end
      end
    end
  end

  always_comb begin
    wr_gnt_o     = '0;
    bank_we_o    = '0;
    bank_waddr_o = '0;
    bank_wsel_o  = '0;
    for (int unsigned b = 0; b < NR_BANKS; b++) begin
      for (int unsigned p = 0; p < NR_WR; p++) begin
        if (wr_req_i[p] && bank_of(wr_addr_i[p]) == BANK_W'(b) && !bank_we_o[b]) begin
          wr_gnt_o[p]     = 1'b1;
          bank_we_o[b]    = 1'b1;
          bank_waddr_o[b] = row_of(wr_addr_i[p]);
          bank_wsel_o[b]  = WR_W'(p);
        end
      end
    end
  end

endmodule
