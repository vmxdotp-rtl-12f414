// vrf: vector register file of the vector processing element.
//
// NR_VREGS registers of VLEN bits, stored as WORD_W-bit words in NR_BANKS
// banks of 3 read and 1 write ports each (paper: 512-bit registers, four
// banks, 3R1W). NR_RD logical read ports and NR_WR logical write ports share
// these physical ports through vrf_arbiter (fixed priority, lower index
// first); a requester whose request is not granted keeps it up and retries.
//
// Interface, per logical port: rd_req_i / rd_addr_i (word address
// vreg * WORDS_PER_REG + word) -> rd_gnt_o in the same cycle, then
// rd_valid_o and rd_data_o one cycle later. wr_req_i / wr_addr_i / wr_data_i
// / wr_be_i -> wr_gnt_o; a granted write updates the bank at the clock edge.
// The routing of the read data by a registered (bank, port) select is this
// design's own choice.
module vrf
  import mx_pkg::*;
#(
  parameter int unsigned NR_RD       = 7,
  parameter int unsigned NR_WR       = 3,
  parameter int unsigned RD_PER_BANK = 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic      [NR_RD-1:0]         rd_req_i,
  input  vrf_addr_t [NR_RD-1:0]         rd_addr_i,
  output logic      [NR_RD-1:0]         rd_gnt_o,
  output logic      [NR_RD-1:0]         rd_valid_o,
  output vrf_word_t [NR_RD-1:0]         rd_data_o,
  input  logic      [NR_WR-1:0]         wr_req_i,
  input  vrf_addr_t [NR_WR-1:0]         wr_addr_i,
  input  vrf_word_t [NR_WR-1:0]         wr_data_i,
  input  vrf_be_t   [NR_WR-1:0]         wr_be_i,
  output logic      [NR_WR-1:0]         wr_gnt_o
);

  localparam int unsigned BANK_W = $clog2(NR_BANKS);
  localparam int unsigned ROW_W  = WADDR_W - BANK_W;
  localparam int unsigned ROWS   = 1 << ROW_W;
  localparam int unsigned PORT_W = (RD_PER_BANK > 1) ? $clog2(RD_PER_BANK) : 1;
  localparam int unsigned WR_W   = (NR_WR > 1) ? $clog2(NR_WR) : 1;

  logic [NR_RD-1:0][BANK_W-1:0]                     rd_bank, rd_bank_q;
  logic [NR_RD-1:0][PORT_W-1:0]                     rd_port, rd_port_q;
  logic [NR_BANKS-1:0][RD_PER_BANK-1:0]             bank_re;
  logic [NR_BANKS-1:0][RD_PER_BANK-1:0][ROW_W-1:0]  bank_raddr;
  logic [NR_BANKS-1:0][RD_PER_BANK-1:0][WORD_W-1:0] bank_rdata;
  logic [NR_BANKS-1:0]                              bank_we;
  logic [NR_BANKS-1:0][ROW_W-1:0]                   bank_waddr;
  logic [NR_BANKS-1:0][WR_W-1:0]                    bank_wsel;

  vrf_arbiter #(
    .NR_RD         (NR_RD),
    .NR_WR         (NR_WR),
    .NR_BANKS      (NR_BANKS),
    .RD_PER_BANK   (RD_PER_BANK),
    .WORDS_PER_REG (WORDS_PER_REG),
    .ADDR_W        (WADDR_W)
  ) i_arbiter (
    .rd_req_i     (rd_req_i),
    .rd_addr_i    (rd_addr_i),
    .rd_gnt_o     (rd_gnt_o),
    .rd_bank_o    (rd_bank),
    .rd_port_o    (rd_port),
    .wr_req_i     (wr_req_i),
    .wr_addr_i    (wr_addr_i),
    .wr_gnt_o     (wr_gnt_o),
    .bank_re_o    (bank_re),
    .bank_raddr_o (bank_raddr),
    .bank_we_o    (bank_we),
    .bank_waddr_o (bank_waddr),
    .bank_wsel_o  (bank_wsel)
  );

  for (genvar b = 0; b < NR_BANKS; b++) begin : g_bank
    vrf_bank #(
      .ROWS   (ROWS),
      .WORD_W (WORD_W),
      .NR_RD  (RD_PER_BANK)
    ) i_bank (
      .clk_i   (clk_i),
      .re_i    (bank_re[b]),
      .raddr_i (bank_raddr[b]),
      .rdata_o (bank_rdata[b]),
      .we_i    (bank_we[b]),
      .waddr_i (bank_waddr[b]),
      .wdata_i (wr_data_i[bank_wsel[b]]),
      .wbe_i   (wr_be_i[bank_wsel[b]])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_valid_o <= '0;
      rd_bank_q  <= '0;
      rd_port_q  <= '0;
    end else begin
      rd_valid_o <= rd_gnt_o;
      rd_bank_q  <= rd_bank;
      rd_port_q  <= rd_port;
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < NR_RD; p++)
      rd_data_o[p] = bank_rdata[rd_bank_q[p]][rd_port_q[p]];
  end

endmodule
