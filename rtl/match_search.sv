// match_search: validates the PWS hash table candidates of a window and picks one.
//
// Match Compare: lane i (the string at byte P+i) has a match when the hash table
// returned a valid record for it (cand_hit), the stored 4 bytes equal the lane's
// own 4 bytes, and the position may start an LZ4 match, i.e. P+i+12 <= block_len
// (the LZ4 block format forbids a match starting in the last 12 bytes).
// Match Select: the lowest lane with a match wins (the earliest start gives the
// longest possible match); all other lanes of the window are ignored, which is
// the kernel's single-match-per-window rule.
//
// Outputs are registered when en is high (one cycle): the window's validity, the
// match flag, the selected lane (the "Sel" of the extended match stage), the match
// start position, the candidate pointer, the offset (start - candidate), the
// extended match read address (candidate + 4) and multi, which tells that more
// than one lane matched and all but the first were dropped.
//
// Earliest-candidate selection and the single match per window follow the paper.
// The end-of-block eligibility test is this design's addition for LZ4 conformance.
module match_search
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS = PWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic [LEN_W-1:0]              block_len,
  input  logic                          in_valid,
  input  logic [LEN_W-1:0]              in_pos,
  input  logic [P_PWS-1:0][31:0]        cur_str,
  input  logic [P_PWS-1:0]              cand_hit,
  input  ht_entry_t [P_PWS-1:0]         cand,
  output logic                          o_valid,
  output logic                          o_match,
  output logic [$clog2(P_PWS)-1:0]      o_sel,
  output logic [LEN_W-1:0]              o_mpos,
  output logic [PTR_W-1:0]              o_cand,
  output logic [PTR_W-1:0]              o_offset,
  output logic [PTR_W-1:0]              o_ext_addr,
  output logic                          o_multi
);
  localparam int unsigned SW = $clog2(P_PWS);

  logic [P_PWS-1:0] hit;
  logic             any;
  logic [SW-1:0]    sel;

  // Match Compare
  always_comb begin
    for (int i = 0; i < P_PWS; i++)
      hit[i] = in_valid && cand_hit[i] && (cand[i].str == cur_str[i])
               && ((in_pos + LEN_W'(i) + LEN_W'(MF_LIMIT)) <= block_len);
  end

  // Match Select: priority to the lowest lane
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int i = P_PWS-1; i >= 0; i--)
      if (hit[i]) begin
        any = 1'b1;
        sel = SW'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid    <= 1'b0;
      o_match    <= 1'b0;
      o_sel      <= '0;
      o_mpos     <= '0;
      o_cand     <= '0;
      o_offset   <= '0;
      o_ext_addr <= '0;
      o_multi    <= 1'b0;
    end else if (en) begin
      o_valid    <= in_valid;
      o_match    <= any;
      o_sel      <= sel;
      o_mpos     <= in_pos + LEN_W'(sel);
      o_cand     <= cand[sel].ptr;
      o_offset   <= PTR_W'(in_pos + LEN_W'(sel) - LEN_W'(cand[sel].ptr));
      o_ext_addr <= cand[sel].ptr + PTR_W'(MIN_MATCH);
      o_multi    <= any && ((hit & (hit - 1'b1)) != '0);
    end
  end
endmodule
