// sequence_encoding: turns the per-window match results into LZ4 sequences.
//
// Input, one window per cycle with en high: the window's start P and PWS bytes,
// and at most one match (start, offset, length) from the extended match stage.
// The front end decides which bytes of the window are literals and which are
// covered by a match, keeping two registers across windows:
//   next_free - first byte not yet covered by an emitted match. A match that starts
//               inside the previous match (possible because a match can reach 35
//               bytes past its window) is trimmed: its start moves to next_free and
//               its length shrinks by the same amount, the offset is unchanged. If
//               fewer than 4 bytes remain, or the new start is within 12 bytes of
//               the block end, the match is dropped.
//   lit_acc   - literals since the last sequence.
// A byte is a literal when it lies inside the block, at or after next_free, and
// outside the accepted match. Bytes after a match that ends inside the window are
// literals of the next sequence (the rest of the window is not searched again).
// For an accepted match the front end pushes the literal count into the literal
// length queue and the offset and length into the match length/offset queue; the
// literal bytes go to the literals queue (up to PWS per cycle). At the window
// that holds the block's last byte it pushes the final, literals-only entry.
//
// Back end: seq_encoder drains the three queues and writes the LZ4 byte stream on
// out_*, up to PWS bytes per cycle, and pulses done after the last sequence.
//
// ready is high when the queues can take a whole window; the kernel uses it as its
// pipeline enable, so a burst of short sequences stalls the front of the kernel
// instead of overflowing a queue. The paper describes the three queues and the
// encoder but not the window-to-queue logic, the trimming rule or a stall: those
// are this design's choices.
module sequence_encoding
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS       = PWS,
  parameter int unsigned P_MAX_MATCH = MAX_MATCH,
  parameter int unsigned LIT_DEPTH   = BUF_BYTES,
  parameter int unsigned SEQ_DEPTH   = 16
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,      // new block: clear state
  input  logic [LEN_W-1:0]                 block_len,
  input  logic                             en,
  output logic                             ready,
  // window and its match
  input  logic                             win_valid,
  input  logic [LEN_W-1:0]                 win_pos,
  input  logic [P_PWS-1:0][7:0]            win_bytes,
  input  logic                             m_valid,
  input  logic [LEN_W-1:0]                 m_pos,
  input  logic [PTR_W-1:0]                 m_offset,
  input  logic [$clog2(P_MAX_MATCH+1)-1:0] m_len,
  // compressed stream
  output logic                             out_valid,
  output logic [$clog2(P_PWS+1)-1:0]       out_cnt,
  output logic [P_PWS-1:0][7:0]            out_bytes,
  output logic                             done,
  // events, for statistics
  output logic                             ev_seq,     // match accepted
  output logic                             ev_trim,    // match trimmed
  output logic                             ev_drop     // match dropped
);
  localparam int unsigned CW = $clog2(P_PWS+1);
  localparam int unsigned MW = $clog2(P_MAX_MATCH+1);
  localparam int unsigned LC = $clog2(LIT_DEPTH+1);

  logic [LEN_W-1:0] next_free, lit_acc;

  // queue signals
  logic                 ll_push, ll_pop, ll_empty, ll_full, ll_last_q;
  logic [LEN_W:0]       ll_din;
  logic [LEN_W-1:0]     ll_len_q;
  logic                 ml_push, ml_pop, ml_empty, ml_full;
  logic [PTR_W+MW-1:0]  ml_din, ml_dout;
  logic [CW-1:0]        lit_push_cnt, lit_pop_cnt;
  logic [P_PWS-1:0][7:0] lit_push_data, lit_head;
  logic [LC-1:0]        lit_count, lit_free;

  // front-end decisions for the current window
  logic             acc;
  logic [LEN_W-1:0] s, e;          // accepted match [s, e)
  logic [LEN_W-1:0] d;
  logic [P_PWS-1:0] is_lit;
  logic [CW-1:0]    n_pre, n_post;
  logic             last_win;

  always_comb begin
    acc     = 1'b0;
    ev_trim = 1'b0;
    ev_drop = 1'b0;
    s       = m_pos;
    e       = m_pos + LEN_W'(m_len);
    d       = next_free - m_pos;
    if (win_valid && m_valid) begin
      if (m_pos >= next_free) begin
        acc = 1'b1;
      end else if (LEN_W'(m_len) >= d + LEN_W'(MIN_MATCH)
                   && next_free + LEN_W'(MF_LIMIT) <= block_len) begin
        acc     = 1'b1;
        ev_trim = 1'b1;
        s       = next_free;
      end else begin
        ev_drop = 1'b1;
      end
    end
    n_pre         = '0;
    n_post        = '0;
    lit_push_cnt  = '0;
    lit_push_data = '0;
    for (int b = 0; b < P_PWS; b++) begin
      logic [LEN_W-1:0] q;
      q = win_pos + LEN_W'(b);
      is_lit[b] = (q < block_len) && (q >= next_free) && !(acc && q >= s && q < e);
      if (is_lit[b]) begin
        lit_push_data[lit_push_cnt] = win_bytes[b];
        lit_push_cnt = lit_push_cnt + 1'b1;
        if (acc && q < s) n_pre  = n_pre + 1'b1;
        else              n_post = n_post + 1'b1;
      end
    end
    if (!(win_valid && en)) lit_push_cnt = '0;
    last_win = win_valid && (win_pos + LEN_W'(P_PWS) >= block_len);
    ev_seq   = acc;
  end

  assign ready   = (lit_free >= LC'(P_PWS)) && !ll_full && !ml_full;
  assign ll_push = en && ((acc) || last_win);
  assign ml_push = en && acc;
  assign ll_din  = acc ? {1'b0, lit_acc + LEN_W'(n_pre)}
                       : {1'b1, lit_acc + LEN_W'(n_post)};
  assign ml_din  = {m_offset, MW'(e - s)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_free <= '0;
      lit_acc   <= '0;
    end else if (start) begin
      next_free <= '0;
      lit_acc   <= '0;
    end else if (en && win_valid) begin
      if (acc) begin
        next_free <= e;
        lit_acc   <= LEN_W'(n_post);
      end else begin
        lit_acc   <= lit_acc + LEN_W'(n_post);
      end
    end
  end

  lit_fifo #(.P_PWS(P_PWS), .DEPTH(LIT_DEPTH)) u_lit (
    .clk, .rst_n, .clear(start),
    .push_cnt(lit_push_cnt), .push_data(lit_push_data),
    .pop_cnt(lit_pop_cnt), .head(lit_head), .count(lit_count), .free(lit_free)
  );

  sync_fifo #(.W(LEN_W+1), .DEPTH(SEQ_DEPTH)) u_ll (
    .clk, .rst_n, .clear(start),
    .push(ll_push), .din(ll_din), .pop(ll_pop), .dout({ll_last_q, ll_len_q}),
    .empty(ll_empty), .full(ll_full)
  );

  sync_fifo #(.W(PTR_W+MW), .DEPTH(SEQ_DEPTH)) u_ml (
    .clk, .rst_n, .clear(start),
    .push(ml_push), .din(ml_din), .pop(ml_pop), .dout(ml_dout),
    .empty(ml_empty), .full(ml_full)
  );

  seq_encoder #(.P_PWS(P_PWS), .P_MAX_MATCH(P_MAX_MATCH), .LIT_DEPTH(LIT_DEPTH)) u_enc (
    .clk, .rst_n, .clear(start),
    .ll_empty, .ll_last(ll_last_q), .ll_len(ll_len_q), .ll_pop,
    .ml_empty, .ml_offset(ml_dout[PTR_W+MW-1:MW]), .ml_len(ml_dout[MW-1:0]), .ml_pop,
    .lit_head, .lit_count, .lit_pop(lit_pop_cnt),
    .out_valid, .out_cnt, .out_bytes, .done
  );

  // a match can never be accepted in the block's last window (it would break the
  // end-of-block rules), so at most one literal-length entry is pushed per cycle
  a_one_push: assert property (@(posedge clk) disable iff (!rst_n) !(en && acc && last_win));
endmodule
