// seq_encoder: writes LZ4 sequences from the three queues of the sequence
// encoding block, up to PWS output bytes per cycle.
//
// A sequence (LZ4 block format) is: a token byte whose high nibble is the literal
// count (15 = "more follows") and low nibble the match length minus 4 (15 = "more
// follows"); extra literal-length bytes (255, 255, ..., remainder) when the count
// is 15 or more; the literals; the 16-bit little-endian offset; one extra
// match-length byte when the match length minus 4 is 15 or more (with a 36-byte
// limit one byte always suffices). The block's last sequence has literals only.
//
// The encoder walks a small state machine per sequence, one group per cycle:
//   HDR   token plus up to PWS-1 literal-length bytes
//   LLEXT remaining literal-length bytes, PWS per cycle (long literal runs only)
//   LIT   up to PWS literals popped from the literals queue
//   MATCH offset and the match-length byte; pops the two length queues
// so a sequence costs 2 cycles plus one per PWS literals. done pulses when the
// block's last sequence has been written out.
//
// The queue structure and the sequence format follow the paper (its Fig. 1 and
// the three FIFOs of its Fig. 5). The state machine and its output width are this
// design's choices.
module seq_encoder
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS       = PWS,
  parameter int unsigned P_MAX_MATCH = MAX_MATCH,
  parameter int unsigned LIT_DEPTH   = BUF_BYTES
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                clear,
  // literal length queue head: {last, literal count}
  input  logic                                ll_empty,
  input  logic                                ll_last,
  input  logic [LEN_W-1:0]                    ll_len,
  output logic                                ll_pop,
  // match length / offset queue head
  input  logic                                ml_empty,
  input  logic [PTR_W-1:0]                    ml_offset,
  input  logic [$clog2(P_MAX_MATCH+1)-1:0]    ml_len,
  output logic                                ml_pop,
  // literals queue
  input  logic [P_PWS-1:0][7:0]               lit_head,
  input  logic [$clog2(LIT_DEPTH+1)-1:0]      lit_count,
  output logic [$clog2(P_PWS+1)-1:0]          lit_pop,
  // compressed byte stream
  output logic                                out_valid,
  output logic [$clog2(P_PWS+1)-1:0]          out_cnt,
  output logic [P_PWS-1:0][7:0]               out_bytes,
  output logic                                done
);
  localparam int unsigned CW = $clog2(P_PWS+1);
  localparam int unsigned MW = $clog2(P_MAX_MATCH+1);
  localparam int unsigned EW = LEN_W - 7;   // enough for count/255 + 1

  typedef enum logic [1:0] {S_HDR, S_LLEXT, S_LIT, S_MATCH} state_t;

  state_t           st, st_n;
  logic [LEN_W-1:0] lit_left, lit_left_n;
  logic [EW-1:0]    ext_left, ext_left_n;
  logic [7:0]       ext_tail, ext_tail_n;
  logic [MW-1:0]    mlm4;

  assign mlm4 = ml_len - MW'(MIN_MATCH);

  always_comb begin
    logic [LEN_W-1:0] rem;
    logic [EW-1:0]    e;
    int unsigned      n;
    st_n       = st;
    lit_left_n = lit_left;
    ext_left_n = ext_left;
    ext_tail_n = ext_tail;
    ll_pop     = 1'b0;
    ml_pop     = 1'b0;
    lit_pop    = '0;
    out_valid  = 1'b0;
    out_cnt    = '0;
    out_bytes  = '0;
    done       = 1'b0;
    rem        = '0;
    e          = '0;
    n          = 0;
    unique case (st)
      S_HDR: begin
        if (!ll_empty && (ll_last || !ml_empty)) begin
          out_valid = 1'b1;
          out_bytes[0][7:4] = (ll_len >= 15) ? 4'd15 : ll_len[3:0];
          out_bytes[0][3:0] = ll_last ? 4'd0 : ((mlm4 >= 15) ? 4'd15 : mlm4[3:0]);
          rem = ll_len - LEN_W'(15);
          e   = (ll_len >= 15) ? EW'(32'(rem) / 32'd255 + 32'd1) : '0;
          ext_tail_n = 8'(32'(rem) % 32'd255);
          n = (int'(e) < P_PWS - 1) ? int'(e) : P_PWS - 1;
          for (int k = 0; k < P_PWS - 1; k++)
            if (k < n) out_bytes[k+1] = (int'(e) - k == 1) ? ext_tail_n : 8'hFF;
          out_cnt    = CW'(n + 1);
          ext_left_n = e - EW'(n);
          lit_left_n = ll_len;
          if (ext_left_n != 0)  st_n = S_LLEXT;
          else if (ll_len != 0) st_n = S_LIT;
          else if (ll_last) begin
            ll_pop = 1'b1;
            done   = 1'b1;
          end else st_n = S_MATCH;
        end
      end
      S_LLEXT: begin
        n = (int'(ext_left) < P_PWS) ? int'(ext_left) : P_PWS;
        out_valid = 1'b1;
        for (int k = 0; k < P_PWS; k++)
          if (k < n) out_bytes[k] = (int'(ext_left) - k == 1) ? ext_tail : 8'hFF;
        out_cnt    = CW'(n);
        ext_left_n = ext_left - EW'(n);
        if (ext_left_n == 0) st_n = S_LIT;
      end
      S_LIT: begin
        n = P_PWS;
        if (lit_left < LEN_W'(n)) n = int'(lit_left);
        if (int'(lit_count) < n)  n = int'(lit_count);
        if (n > 0) begin
          out_valid = 1'b1;
          out_cnt   = CW'(n);
          lit_pop   = CW'(n);
          for (int k = 0; k < P_PWS; k++)
            if (k < n) out_bytes[k] = lit_head[k];
        end
        lit_left_n = lit_left - LEN_W'(n);
        if (lit_left_n == 0) begin
          if (ll_last) begin
            ll_pop = 1'b1;
            done   = 1'b1;
            st_n   = S_HDR;
          end else st_n = S_MATCH;
        end
      end
      S_MATCH: begin
        out_valid    = 1'b1;
        out_bytes[0] = ml_offset[7:0];
        out_bytes[1] = ml_offset[15:8];
        out_bytes[2] = 8'(mlm4 - MW'(15));
        out_cnt      = (mlm4 >= 15) ? CW'(3) : CW'(2);
        ll_pop       = 1'b1;
        ml_pop       = 1'b1;
        st_n         = S_HDR;
      end
      default: st_n = S_HDR;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_HDR;
      lit_left <= '0;
      ext_left <= '0;
      ext_tail <= '0;
    end else if (clear) begin
      st       <= S_HDR;
      lit_left <= '0;
      ext_left <= '0;
      ext_tail <= '0;
    end else begin
      st       <= st_n;
      lit_left <= lit_left_n;
      ext_left <= ext_left_n;
      ext_tail <= ext_tail_n;
    end
  end

  if (P_MAX_MATCH - MIN_MATCH - 15 >= 255) begin : g_chk
    $error("seq_encoder: one extra match-length byte must suffice");
  end
endmodule
