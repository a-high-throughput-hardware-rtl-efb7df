// data_memory: a copy of the input block that the extended match stage reads at
// the candidate's address.
//
// The input buffer writes each released PWS-byte window into it (word-wide write
// port). The read port returns RD_BYTES consecutive bytes starting at any byte
// address, one enabled cycle after the address is given. To read an unaligned
// 32-byte span in one access the memory is split into NB word-interleaved banks
// (word w lives in bank w mod NB, row w / NB); each bank is read once per cycle at
// the row holding the wanted word, the banks' outputs are registered (block RAM
// style) and then rotated and shifted into place combinationally.
//
// The paper shows only a "Data memory" box fed by the input buffer and addressed by
// the match search ("extended match address"); the bank organisation, the
// registered read and the zero latency after the register are this design's.
// The low BB bits of wsel equal the bank number by construction and are unused.
module data_memory
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS    = PWS,
  parameter int unsigned DEPTH    = BUF_BYTES,   // bytes
  parameter int unsigned RD_BYTES = EXT_BYTES
) (
  input  logic                            clk,
  input  logic                            wr_en,
  input  logic [$clog2(DEPTH/P_PWS)-1:0]  wr_addr,     // word address
  input  logic [P_PWS-1:0][7:0]           wr_data,
  input  logic                            rd_en,
  input  logic [$clog2(DEPTH)-1:0]        rd_addr,     // byte address
  output logic [RD_BYTES-1:0][7:0]        rd_data
);
  localparam int unsigned WORDS  = DEPTH / P_PWS;
  localparam int unsigned NEED   = (RD_BYTES + P_PWS - 1) / P_PWS + 1; // words touched
  localparam int unsigned NB     = 1 << $clog2(NEED);
  localparam int unsigned BB     = $clog2(NB);
  localparam int unsigned ROWS   = WORDS / NB;
  localparam int unsigned WAW    = $clog2(WORDS);
  localparam int unsigned RW     = $clog2(ROWS);
  localparam int unsigned OW     = $clog2(P_PWS);

  logic [P_PWS-1:0][7:0] bank_q [NB];
  logic [BB-1:0]         first_bank_q;
  logic [OW-1:0]         off_q;
  logic [WAW-1:0]        w0;
  logic [NB*P_PWS-1:0][7:0] lin;

  assign w0 = rd_addr[$clog2(DEPTH)-1:OW];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [P_PWS-1:0][7:0] mem [ROWS];
    logic [BB-1:0]  gap;   // words from w0 to the first word at or after it in this bank
    logic [WAW-1:0] wsel;
    logic [RW-1:0]  row;
    assign gap = BB'(b) - w0[BB-1:0];
    assign wsel = w0 + WAW'(gap);
    assign row  = wsel[WAW-1:BB];
    always_ff @(posedge clk) begin
      if (wr_en && wr_addr[BB-1:0] == BB'(b)) mem[wr_addr[WAW-1:BB]] <= wr_data;
      if (rd_en) bank_q[b] <= mem[row];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      first_bank_q <= w0[BB-1:0];
      off_q        <= rd_addr[OW-1:0];
    end
  end

  // rotate the banks into address order, then drop the leading offset bytes
  always_comb begin
    for (int j = 0; j < NB; j++)
      lin[j*P_PWS +: P_PWS] = bank_q[BB'(first_bank_q + BB'(j))];
    for (int k = 0; k < RD_BYTES; k++)
      rd_data[k] = lin[32'(off_q) + k];
  end

  if (RW < 1) begin : g_chk
    $error("data_memory: DEPTH too small for the bank count");
  end
endmodule
