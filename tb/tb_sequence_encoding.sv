// tb_sequence_encoding: feeds the sequence encoding block a stream of 8-byte
// windows, each with at most one match found here by a simple model (earliest
// position of the window whose 4 bytes occurred at an earlier window, length up
// to 36 and at least 5 bytes before the end). The pipeline enable follows ready,
// with random extra gaps. The LZ4 stream that comes out is decoded here and
// must reproduce the source exactly (also for 40 random mixed blocks of 1..1500
// bytes); the trimming of overlapping matches, the
// dropping of too-short remainders and a literal run long enough to need
// literal-length bytes over several cycles must all occur.
module tb_sequence_encoding;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, en, ready, win_valid, m_valid, out_valid, done, ev_seq, ev_trim, ev_drop;
  logic [LEN_W-1:0] block_len, win_pos, m_pos;
  logic [PWS-1:0][7:0] win_bytes, out_bytes;
  logic [PTR_W-1:0] m_offset;
  logic [5:0] m_len;
  logic [3:0] out_cnt;

  sequence_encoding dut (.clk, .rst_n, .start, .block_len, .en, .ready, .win_valid, .win_pos,
                         .win_bytes, .m_valid, .m_pos, .m_offset, .m_len, .out_valid, .out_cnt,
                         .out_bytes, .done, .ev_seq, .ev_trim, .ev_drop);

  int checks = 0, failures = 0, n_trim = 0, n_drop = 0, n_seq = 0, n_llext = 0;
  byte unsigned src [];
  byte unsigned outq [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid) for (int k = 0; k < int'(out_cnt); k++) outq.push_back(out_bytes[k]);
    if (en && ev_trim) n_trim++;
    if (en && ev_drop) n_drop++;
    if (en && ev_seq)  n_seq++;
  end

  function automatic int key4(int p);
    return int'(src[p]) | (int'(src[p+1]) << 8) | (int'(src[p+2]) << 16) | (int'(src[p+3]) << 24);
  endfunction

  task automatic run(input string name, input int n);
    int last [int];
    int nw = (n + 7) / 8;
    outq.delete();
    @(negedge clk);
    start = 1; block_len = LEN_W'(n);
    @(negedge clk);
    start = 0;
    for (int w = 0; w < nw; w++) begin
      int P = w * 8;
      int mp = -1, moff = 0, mlen = 0;
      for (int i = 0; i < 8 && mp < 0; i++) begin
        int p = P + i;
        if (p + 12 <= n && last.exists(key4(p))) begin
          int c = last[key4(p)];
          int L = 4;
          while (L < MAX_MATCH && p + L < n && src[c + L] == src[p + L]) L++;
          if (L > n - 5 - p) L = n - 5 - p;
          mp = p; moff = p - c; mlen = L;
        end
      end
      for (int i = 0; i < 8; i++) if (P + i + 3 < n) last[key4(P + i)] = P + i;
      // offer the window until the block takes it
      win_valid = 1;
      win_pos   = LEN_W'(P);
      for (int b = 0; b < 8; b++) win_bytes[b] = (P + b < n) ? src[P + b] : 8'h00;
      m_valid  = (mp >= 0);
      m_pos    = LEN_W'(mp < 0 ? 0 : mp);
      m_offset = PTR_W'(moff);
      m_len    = 6'(mlen);
      do begin
        en = ready && ($urandom_range(4) != 0);
        @(negedge clk);
      end while (!en);
      en = 0;
      win_valid = 0;
    end
    while (!done) @(negedge clk);
    @(negedge clk);
    decode(name, n);
  endtask

  task automatic decode(input string name, input int n);
    byte unsigned dec [$];
    int ip = 0, bad = 0;
    bit ok = 1;
    while (ip < outq.size() && ok) begin
      int tok = outq[ip++];
      int ll  = tok >> 4;
      int ml, off;
      if (ll == 15) begin
        int b, nb = 0;
        do begin b = outq[ip++]; ll += b; nb++; end while (b == 255);
        if (nb > 7) n_llext++;
      end
      for (int k = 0; k < ll; k++) dec.push_back(outq[ip++]);
      if (ip >= outq.size()) break;
      off = outq[ip] | (int'(outq[ip+1]) << 8);
      ip += 2;
      ml = (tok & 15) + 4;
      if ((tok & 15) == 15) ml += outq[ip++];
      if (off == 0 || off > dec.size() || ml > MAX_MATCH) ok = 0;
      else for (int k = 0; k < ml; k++) dec.push_back(dec[dec.size() - off]);
    end
    check(ok, {name, ": well-formed"});
    check(dec.size() == n, {name, ": decoded length"});
    for (int i = 0; i < n && i < dec.size(); i++) if (dec[i] != src[i]) bad++;
    check(bad == 0, {name, ": decoded bytes equal the source"});
  endtask

  initial begin
    void'($urandom(29));
    start = 0; en = 0; block_len = '0; win_valid = 0; win_pos = '0; win_bytes = '0;
    m_valid = 0; m_pos = '0; m_offset = '0; m_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // text-like: a few words repeated
    src = new[4000];
    begin
      automatic string alpha = "abcdefgh ijkl";
      for (int i = 0; i < 4000; i++) src[i] = 8'(alpha[(i * 7 + i / 13) % 13]);
    end
    for (int i = 0; i < 4000; i += 37) src[i] = 8'($urandom);
    run("words", 4000);
    // one repeated byte: long matches overlapping every window
    src = new[700];
    foreach (src[i]) src[i] = 8'h55;
    run("runs", 700);
    // random: one literal run of 3000 bytes
    src = new[3000];
    foreach (src[i]) src[i] = 8'($urandom);
    run("literals", 3000);
    // short blocks
    src = new[12];
    foreach (src[i]) src[i] = 8'h55;
    run("short", 12);
    // mixed blocks: random length, small random alphabets with random bytes mixed in
    for (int t = 0; t < 40; t++) begin
      automatic int n  = $urandom_range(1, 1500);
      automatic int ab = $urandom_range(1, 6);
      src = new[n];
      foreach (src[i]) src[i] = ($urandom_range(9) == 0) ? 8'($urandom) : 8'($urandom_range(0, ab));
      run($sformatf("mixed%0d", t), n);
    end
    $display("events: seq=%0d trim=%0d drop=%0d llext=%0d", n_seq, n_trim, n_drop, n_llext);
    check(n_seq > 0 && n_trim > 0 && n_drop > 0 && n_llext > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
