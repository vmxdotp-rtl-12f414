// vrf_bank: one bank of the vector register file, NR_RD read ports and one
// write port (3R1W, as the paper gives for each of the four banks).
//
// ROWS words of WORD_W bits, written with a byte enable so that narrowing
// instructions can update part of a word. Reads are registered: the word of a
// read enabled in cycle t appears on rdata_o in cycle t+1; a read of the row
// being written in the same cycle returns the old word. The flip-flop array
// and the registered read are this design's own choices.
module vrf_bank #(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned WORD_W = 256,
  parameter int unsigned NR_RD  = 3,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic                              clk_i,
  input  logic [NR_RD-1:0]                  re_i,
  input  logic [NR_RD-1:0][ROW_W-1:0]       raddr_i,
  output logic [NR_RD-1:0][WORD_W-1:0]      rdata_o,
  input  logic                              we_i,
  input  logic [ROW_W-1:0]                  waddr_i,
  input  logic [WORD_W-1:0]                 wdata_i,
  input  logic [WORD_W/8-1:0]               wbe_i
);

  logic [WORD_W-1:0] mem [ROWS];

  always_ff @(posedge clk_i) begin
    if (we_i) begin
      for (int unsigned i = 0; i < WORD_W / 8; i++)
        if (wbe_i[i]) mem[waddr_i][8*i +: 8] <= wdata_i[8*i +: 8];
    end
  end

  always_ff @(posedge clk_i) begin
    for (int unsigned p = 0; p < NR_RD; p++)
      if (re_i[p]) rdata_o[p] <= mem[raddr_i[p]];
  end

endmodule
