// lz4_compressor: single-kernel parallel LZ4 block compressor, PWS = 8 bytes per
// clock.
//
// The kernel compresses one block of up to 64 KB into the LZ4 block format. Its
// stages form a feed-forward pipeline that takes one PWS-byte window per cycle:
//
//   input_buffer -> word_shift -> hash_calc (2) -> hash_table (1)
//     -> match_search (1) -> data_memory read (1) -> extended_match (1)
//     -> sequence_encoding -> output_buffer
//
// (numbers are register stages). Every byte position of a window is hashed and
// looked up in the 256-entry hash table, and all PWS positions are written back
// in the same cycle. Of the positions whose candidate holds the same 4 bytes, the
// first one is taken (one match per window); its length is found by one 32-byte
// compare against the data memory, so no match is longer than 36 bytes and no
// read address depends on an earlier compare. Side information (window position,
// bytes, strings) travels beside the stages in pipe_delay registers.
//
// The only backward signal is adv, the pipeline enable: it drops when the
// sequence queues cannot take another window (a run of short sequences can need
// more than one cycle per window in the encoder), and every stage holds.
//
// Host interface: with busy low, write the block into the input buffer
// (in_wr_*), then pulse start with block_len (1..65536). done pulses when the
// compressed block is complete; out_len is its size in bytes and overflow tells
// that it did not fit the 64 KB output buffer. Read it with out_rd_addr/out_rd_data
// (registered, one cycle). ev carries per-cycle event flags for counters.
// Two submodule outputs are left open on purpose: the input buffer's busy (the
// top keeps its own) and the match search's raw candidate pointer (only the
// offset and the data memory address are needed). Assertions use disable iff on
// the asynchronous reset, which lint reports as SYNCASYNCNET.
//
// Structure, sizes and the two rules (single match per window, 36-byte match
// limit) follow the paper; the host interface, the stall, the LZ4 end-of-block
// rules and the handling of overlapping matches are this design's choices.
module lz4_compressor
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS       = PWS,
  parameter int unsigned P_ENTRIES   = HT_ENTRIES,
  parameter int unsigned P_MAX_MATCH = MAX_MATCH,
  parameter int unsigned P_BUF       = BUF_BYTES
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_wr_en,
  input  logic [$clog2(P_BUF/P_PWS)-1:0]  in_wr_addr,
  input  logic [P_PWS-1:0][7:0]           in_wr_data,
  input  logic                            start,
  input  logic [LEN_W-1:0]                block_len,
  output logic                            busy,
  output logic                            done,
  output logic [LEN_W:0]                  out_len,
  output logic                            overflow,
  input  logic [$clog2(P_BUF/P_PWS)-1:0]  out_rd_addr,
  output logic [P_PWS-1:0][7:0]           out_rd_data,
  output lz4_events_t                     ev
);
  localparam int unsigned EXT = P_MAX_MATCH - 4;
  localparam int unsigned HB  = $clog2(P_ENTRIES);
  localparam int unsigned SW  = $clog2(P_PWS);
  localparam int unsigned MW  = $clog2(P_MAX_MATCH+1);
  localparam int unsigned CW  = $clog2(P_PWS+1);

  logic             adv, go;
  logic [LEN_W-1:0] len_q;

  assign go = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  len_q <= '0;
    else if (go) len_q <= block_len;
  end

  // ---------------------------------------------------------------- input buffer
  logic                  ib_valid, ib_real;
  logic [LEN_W-1:0]      ib_pos;
  logic [P_PWS-1:0][7:0] ib_data;

  input_buffer #(.P_PWS(P_PWS), .DEPTH(P_BUF)) u_ib (
    .clk, .rst_n, .wr_en(in_wr_en), .wr_addr(in_wr_addr), .wr_data(in_wr_data),
    .start(go), .block_len, .adv, .busy(),
    .win_valid(ib_valid), .win_real(ib_real), .win_pos(ib_pos), .win_data(ib_data)
  );

  // ------------------------------------------------------------------ word shift
  logic                               ws_valid;
  logic [LEN_W-1:0]                   ws_pos;
  logic [P_PWS-1:0][7:0]              ws_bytes;
  logic [P_PWS-1:0][31:0]             ws_str4;
  logic [P_PWS-1:0][EXT-1:0][7:0]     ws_ext;

  word_shift #(.P_PWS(P_PWS), .P_MAX_MATCH(P_MAX_MATCH)) u_ws (
    .clk, .rst_n, .adv, .in_valid(ib_valid), .in_real(ib_real), .in_pos(ib_pos),
    .in_data(ib_data), .out_valid(ws_valid), .out_pos(ws_pos), .out_bytes(ws_bytes),
    .str4(ws_str4), .ext(ws_ext)
  );

  // -------------------------------------------------------------- hash calculation
  logic [P_PWS-1:0][HB-1:0] hc_hash;

  hash_calc #(.P_PWS(P_PWS), .P_HASH_BITS(HB)) u_hc (
    .clk, .rst_n, .adv, .str4(ws_str4), .hash(hc_hash)
  );

  // side band aligned with the hash (2 stages)
  logic                   s2_valid;
  logic [LEN_W-1:0]       s2_pos;
  logic [P_PWS-1:0][31:0] s2_str4;
  pipe_delay #(.W(1 + LEN_W + 32*P_PWS), .DEPTH(2)) u_d2 (
    .clk, .rst_n, .en(adv), .d({ws_valid, ws_pos, ws_str4}), .q({s2_valid, s2_pos, s2_str4})
  );

  // ------------------------------------------------------------------ hash table
  ht_entry_t [P_PWS-1:0] ht_wdata, ht_rdata;
  logic [P_PWS-1:0]      ht_hit;

  always_comb
    for (int i = 0; i < P_PWS; i++) begin
      ht_wdata[i].ptr = PTR_W'(s2_pos + LEN_W'(i));
      ht_wdata[i].str = s2_str4[i];
    end

  hash_table #(.P_PWS(P_PWS), .P_ENTRIES(P_ENTRIES)) u_ht (
    .clk, .rst_n, .clear(go), .en(adv),
    .rd_addr(hc_hash), .wr_en({P_PWS{s2_valid}}), .wr_addr(hc_hash), .wr_data(ht_wdata),
    .rd_data(ht_rdata), .rd_hit(ht_hit)
  );

  logic                   s3_valid;
  logic [LEN_W-1:0]       s3_pos;
  logic [P_PWS-1:0][31:0] s3_str4;
  pipe_delay #(.W(1 + LEN_W + 32*P_PWS), .DEPTH(1)) u_d3 (
    .clk, .rst_n, .en(adv), .d({s2_valid, s2_pos, s2_str4}), .q({s3_valid, s3_pos, s3_str4})
  );

  // ---------------------------------------------------------------- match search
  logic              ms_valid, ms_match, ms_multi;
  logic [SW-1:0]     ms_sel;
  logic [LEN_W-1:0]  ms_mpos;
  logic [PTR_W-1:0]  ms_offset, ms_ext_addr;

  match_search #(.P_PWS(P_PWS)) u_ms (
    .clk, .rst_n, .en(adv), .block_len(len_q),
    .in_valid(s3_valid), .in_pos(s3_pos), .cur_str(s3_str4),
    .cand_hit(ht_hit), .cand(ht_rdata),
    .o_valid(ms_valid), .o_match(ms_match), .o_sel(ms_sel), .o_mpos(ms_mpos),
    .o_cand(), .o_offset(ms_offset), .o_ext_addr(ms_ext_addr), .o_multi(ms_multi)
  );

  // ----------------------------------------------------------------- data memory
  logic [EXT-1:0][7:0] dm_rdata;

  data_memory #(.P_PWS(P_PWS), .DEPTH(P_BUF), .RD_BYTES(EXT)) u_dm (
    .clk,
    .wr_en(adv && ib_valid && ib_real), .wr_addr(ib_pos[LEN_W-2:$clog2(P_PWS)]),
    .wr_data(ib_data),
    .rd_en(adv), .rd_addr(ms_ext_addr[$clog2(P_BUF)-1:0]), .rd_data(dm_rdata)
  );

  // match descriptor aligned with the data memory output
  logic              m4_match;
  logic [SW-1:0]     m4_sel;
  logic [LEN_W-1:0]  m4_mpos;
  logic [PTR_W-1:0]  m4_offset;
  pipe_delay #(.W(1 + SW + LEN_W + PTR_W), .DEPTH(1)) u_d4 (
    .clk, .rst_n, .en(adv), .d({ms_valid && ms_match, ms_sel, ms_mpos, ms_offset}),
    .q({m4_match, m4_sel, m4_mpos, m4_offset})
  );

  // current strings of every lane, aligned with the data memory output
  logic [P_PWS-1:0][EXT-1:0][7:0] ext5;
  pipe_delay #(.W(P_PWS*EXT*8), .DEPTH(5)) u_d5 (
    .clk, .rst_n, .en(adv), .d(ws_ext), .q(ext5)
  );

  // -------------------------------------------------------------- extended match
  logic              em_match, em_capped;
  logic [LEN_W-1:0]  em_mpos;
  logic [PTR_W-1:0]  em_offset;
  logic [MW-1:0]     em_len;

  extended_match #(.P_PWS(P_PWS), .P_MAX_MATCH(P_MAX_MATCH)) u_em (
    .clk, .rst_n, .en(adv), .block_len(len_q),
    .in_match(m4_match), .sel(m4_sel), .in_mpos(m4_mpos), .in_offset(m4_offset),
    .cur_ext(ext5), .cand_ext(dm_rdata),
    .o_match(em_match), .o_mpos(em_mpos), .o_offset(em_offset), .o_len(em_len),
    .o_capped(em_capped)
  );

  // window (position and literals) aligned with the extended match result
  logic                  s6_valid;
  logic [LEN_W-1:0]      s6_pos;
  logic [P_PWS-1:0][7:0] s6_bytes;
  pipe_delay #(.W(1 + LEN_W + 8*P_PWS), .DEPTH(6)) u_d6 (
    .clk, .rst_n, .en(adv), .d({ws_valid, ws_pos, ws_bytes}), .q({s6_valid, s6_pos, s6_bytes})
  );

  // ----------------------------------------------------------- sequence encoding
  logic                  se_out_valid, se_done;
  logic [CW-1:0]         se_out_cnt;
  logic [P_PWS-1:0][7:0] se_out_bytes;
  logic                  ev_seq, ev_trim, ev_drop;

  sequence_encoding #(.P_PWS(P_PWS), .P_MAX_MATCH(P_MAX_MATCH)) u_se (
    .clk, .rst_n, .start(go), .block_len(len_q), .en(adv), .ready(adv),
    .win_valid(s6_valid), .win_pos(s6_pos), .win_bytes(s6_bytes),
    .m_valid(em_match), .m_pos(em_mpos), .m_offset(em_offset), .m_len(em_len),
    .out_valid(se_out_valid), .out_cnt(se_out_cnt), .out_bytes(se_out_bytes),
    .done(se_done), .ev_seq, .ev_trim, .ev_drop
  );

  // --------------------------------------------------------------- output buffer
  logic flush, flushed;

  output_buffer #(.P_PWS(P_PWS), .DEPTH(P_BUF)) u_ob (
    .clk, .rst_n, .start(go),
    .in_valid(se_out_valid), .in_cnt(se_out_cnt), .in_bytes(se_out_bytes),
    .flush, .flushed, .byte_count(out_len), .overflow,
    .rd_addr(out_rd_addr), .rd_data(out_rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      flush <= 1'b0;
      done  <= 1'b0;
    end else begin
      flush <= se_done;
      done  <= 1'b0;
      if (go) busy <= 1'b1;
      else if (flushed && busy) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_comb begin
    ev        = '0;
    ev.stall  = busy && !adv;
    ev.multi  = adv && ms_valid && ms_multi;
    ev.capped = adv && em_capped;
    ev.seq    = adv && ev_seq;
    ev.trim   = adv && ev_trim;
    ev.drop   = adv && ev_drop;
  end
endmodule
