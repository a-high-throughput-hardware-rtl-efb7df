// extended_match: finds the full length of the window's match in a single step.
//
// The match search stage has already confirmed 4 equal bytes at lane sel. Here the
// lane's next 32 bytes (from the word shift stage, via the Sel multiplexer) are
// compared byte by byte with the 32 bytes the data memory returned from
// candidate + 4 (Match Compare), and the number of leading equal bytes is counted
// (Match Length Find). The match length is 4 plus that count, so at most
// MAX_MATCH = 36, and is further capped so that the match ends at least 5 bytes
// before the end of the block (LZ4 rule: the last 5 bytes are literals).
//
// No later read depends on the result, so the stage has no feedback. Output is
// registered when en is high (one cycle). The match descriptor (start, offset) is
// carried through the same register so that it lines up with the length.
//
// The Sel multiplexer, 32-byte compare, length find and 36-byte limit follow the
// paper; the end-of-block cap is this design's addition for LZ4 conformance.
module extended_match
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS       = PWS,
  parameter int unsigned P_MAX_MATCH = MAX_MATCH
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   en,
  input  logic [LEN_W-1:0]                       block_len,
  input  logic                                   in_match,
  input  logic [$clog2(P_PWS)-1:0]               sel,
  input  logic [LEN_W-1:0]                       in_mpos,
  input  logic [PTR_W-1:0]                       in_offset,
  input  logic [P_PWS-1:0][P_MAX_MATCH-5:0][7:0] cur_ext,
  input  logic [P_MAX_MATCH-5:0][7:0]            cand_ext,
  output logic                                   o_match,
  output logic [LEN_W-1:0]                       o_mpos,
  output logic [PTR_W-1:0]                       o_offset,
  output logic [$clog2(P_MAX_MATCH+1)-1:0]       o_len,
  output logic                                   o_capped   // limit of MAX_MATCH reached
);
  localparam int unsigned EXT = P_MAX_MATCH - 4;
  localparam int unsigned LW  = $clog2(P_MAX_MATCH+1);

  logic [EXT-1:0][7:0] cur;
  logic [EXT-1:0]      eq;
  logic [LW-1:0]       run;
  logic [LW-1:0]       len;
  logic [LEN_W-1:0]    room;    // bytes allowed before the last 5

  always_comb begin
    cur = cur_ext[sel];                         // Sel multiplexer
    for (int k = 0; k < EXT; k++)
      eq[k] = (cur[k] == cand_ext[k]);          // Match Compare
    run = LW'(EXT);                             // Match Length Find
    for (int k = EXT-1; k >= 0; k--)
      if (!eq[k]) run = LW'(k);
    len  = LW'(MIN_MATCH) + run;
    room = block_len - in_mpos - LEN_W'(LAST_LITERALS);
    if (LEN_W'(len) > room) len = LW'(room);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_match  <= 1'b0;
      o_mpos   <= '0;
      o_offset <= '0;
      o_len    <= '0;
      o_capped <= 1'b0;
    end else if (en) begin
      o_match  <= in_match;
      o_mpos   <= in_mpos;
      o_offset <= in_offset;
      o_len    <= len;
      o_capped <= in_match && (len == LW'(P_MAX_MATCH));
    end
  end
endmodule
