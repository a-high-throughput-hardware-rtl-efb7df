// tb_lz4_compressor: end-to-end test of the LZ4 compression kernel at its default
// size (PWS = 8, 256-entry hash table, 36-byte match limit, 64 KB buffers).
//
// Each test writes a generated block into the input buffer, starts the kernel,
// waits for done, reads the compressed block back and decodes it with an LZ4
// block decoder written in the testbench. The decoded bytes must equal the input,
// every match must obey the LZ4 block rules (match of 4 or more, at most 36 with
// this kernel, offset inside the data, last match starting 12 or more bytes and
// ending 5 or more bytes before the end), and the compressed length must agree
// with out_len. Blocks:
//   text      words drawn from a small vocabulary (ordinary compressible data)
//   runs      one repeated byte (long matches: the 36-byte limit and trimming)
//   stall     4 repeated + 4 random bytes per window (a sequence every window:
//             the encoder falls behind and the pipeline stalls)
//   random    incompressible 4 KB: the kernel must take exactly one window per
//             cycle (the paper's rate of PWS bytes per clock) and never stall
//   full      64 KB of text, the largest block
//   overflow  64 KB random: the output exceeds the 64 KB output buffer
// The kernel's event outputs are counted and each mechanism (stall, several lanes
// matching in one window, 36-byte cap, trimming, dropping, long literal runs,
// output overflow) must happen at least once.
module tb_lz4_compressor;
  import lz4_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   in_wr_en;
  logic [12:0]            in_wr_addr;
  logic [PWS-1:0][7:0]    in_wr_data;
  logic                   start;
  logic [LEN_W-1:0]       block_len;
  logic                   busy, done, overflow;
  logic [LEN_W:0]         out_len;
  logic [12:0]            out_rd_addr;
  logic [PWS-1:0][7:0]    out_rd_data;
  lz4_events_t            ev;

  lz4_compressor dut (
    .clk, .rst_n, .in_wr_en, .in_wr_addr, .in_wr_data, .start, .block_len,
    .busy, .done, .out_len, .overflow, .out_rd_addr, .out_rd_data, .ev
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_multi = 0, n_capped = 0, n_seq = 0, n_trim = 0, n_drop = 0;
  int n_llext = 0, n_overflow = 0, n_max_match = 0;
  longint cycles = 0;

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (ev.stall)  n_stall++;
    if (ev.multi)  n_multi++;
    if (ev.capped) n_capped++;
    if (ev.seq)    n_seq++;
    if (ev.trim)   n_trim++;
    if (ev.drop)   n_drop++;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  byte unsigned src [];
  byte unsigned cmp [];

  // ---------------------------------------------------------------- generators
  function automatic void gen_text(int n);
    string words [16] = '{"the ", "compression ", "of ", "data ", "window ", "match ",
                          "hash ", "table ", "and ", "literal ", "length ", "offset ",
                          "a ", "parallel ", "byte ", "stream "};
    int k = 0;
    src = new[n];
    while (k < n) begin
      string w = words[$urandom_range(15)];
      for (int c = 0; c < w.len() && k < n; c++) src[k++] = w[c];
    end
  endfunction

  function automatic void gen_random(int n);
    src = new[n];
    foreach (src[i]) src[i] = 8'($urandom);
  endfunction

  function automatic void gen_runs(int n);
    src = new[n];
    foreach (src[i]) src[i] = 8'h61;
  endfunction

  function automatic void gen_stall(int n);
    src = new[n];
    foreach (src[i]) src[i] = ((i % 8) < 4) ? 8'(8'h41 + (i % 8)) : 8'($urandom);
  endfunction

  // ---------------------------------------------------------------- run a block
  task automatic run_block(input string name, input int n, input bit expect_overflow,
                           input bit check_rate);
    int     words = (n + PWS - 1) / PWS;
    longint t0, t1, t_in;
    int     stalls0;
    int     olen;
    // load
    for (int w = 0; w < words; w++) begin
      @(negedge clk);
      in_wr_en   = 1'b1;
      in_wr_addr = 13'(w);
      for (int b = 0; b < PWS; b++)
        in_wr_data[b] = (w*PWS + b < n) ? src[w*PWS + b] : 8'h00;
    end
    @(negedge clk);
    in_wr_en  = 1'b0;
    start     = 1'b1;
    block_len = LEN_W'(n);
    t0        = cycles;
    stalls0   = n_stall;
    t_in      = 0;
    fork
      begin
        @(posedge dut.u_ib.busy);
        @(negedge dut.u_ib.busy);
        t_in = cycles;
      end
    join_none
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    t1 = cycles;
    olen = int'(out_len);
    $display("%s: %0d -> %0d bytes, %0d cycles, ratio %0.3f", name, n, olen, t1 - t0,
             real'(n) / real'(olen));
    check(overflow == expect_overflow, {name, ": overflow flag"});
    if (overflow) n_overflow++;
    if (check_rate) begin
      // the input side takes one PWS-byte window per clock: the block's windows
      // plus the 5 drain windows, and nothing more
      check(t_in - t0 <= longint'(words + 5 + 2), {name, ": one window per cycle"});
      $display("%s: input taken in %0d cycles for %0d windows", name, t_in - t0, words);
      check(n_stall == stalls0, {name, ": no stall on literal-only data"});
    end
    if (!expect_overflow) begin
      cmp = new[olen];
      for (int w = 0; w < (olen + PWS - 1) / PWS; w++) begin
        out_rd_addr = 13'(w);
        @(negedge clk);
        for (int b = 0; b < PWS; b++)
          if (w*PWS + b < olen) cmp[w*PWS + b] = out_rd_data[b];
      end
      decode_and_check(name, n);
    end
  endtask

  // ---------------------------------------------------------------- LZ4 decoder
  task automatic decode_and_check(input string name, input int n);
    byte unsigned dec [$];
    int  ip = 0;
    bit  ok = 1;
    int  last_match_end = 0, last_match_start = -1;
    while (ip < cmp.size() && ok) begin
      int tok = cmp[ip++];
      int ll  = tok >> 4;
      int ml;
      int off;
      if (ll == 15) begin
        int b;
        int nb = 0;
        do begin b = cmp[ip++]; ll += b; nb++; end while (b == 255 && ip < cmp.size());
        if (nb > 7) n_llext++;
      end
      for (int k = 0; k < ll; k++) dec.push_back(cmp[ip++]);
      if (ip >= cmp.size()) break;       // last sequence: literals only
      off = cmp[ip] | (int'(cmp[ip+1]) << 8);
      ip += 2;
      ml = (tok & 15) + 4;
      if ((tok & 15) == 15) begin
        int b;
        do begin b = cmp[ip++]; ml += b; end while (b == 255);
      end
      if (off == 0 || off > dec.size() || ml > MAX_MATCH) begin
        ok = 0;
        $display("%s: bad match off=%0d len=%0d at %0d", name, off, ml, dec.size());
      end else begin
        last_match_start = dec.size();
        for (int k = 0; k < ml; k++) dec.push_back(dec[dec.size() - off]);
        last_match_end = dec.size();
        if (ml == MAX_MATCH) n_max_match++;
      end
    end
    check(ok, {name, ": well-formed sequences"});
    check(ip == cmp.size(), {name, ": stream length matches out_len"});
    check(dec.size() == n, {name, ": decoded length"});
    begin
      int bad = 0;
      for (int i = 0; i < n && i < dec.size(); i++)
        if (dec[i] != src[i]) begin
          if (bad == 0) $display("%s: first difference at byte %0d", name, i);
          bad++;
        end
      check(bad == 0, {name, ": decoded bytes equal the input"});
    end
    if (last_match_start >= 0) begin
      check(last_match_start + MF_LIMIT <= n, {name, ": last match starts 12+ bytes before end"});
      check(last_match_end + LAST_LITERALS <= n, {name, ": last 5 bytes are literals"});
    end
  endtask

  initial begin
    void'($urandom(7));
    in_wr_en = 0; in_wr_addr = '0; in_wr_data = '0; start = 0; block_len = '0;
    out_rd_addr = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    gen_text(3000);     run_block("text",  3000, 0, 0);
    check(real'(3000) / real'(out_len) > 1.5, "text: compresses");
    gen_runs(1000);     run_block("runs",  1000, 0, 0);
    gen_stall(2048);    run_block("stall", 2048, 0, 0);
    gen_random(4096);   run_block("random", 4096, 0, 1);
    gen_text(13);       run_block("tiny", 13, 0, 0);
    gen_text(65536);    run_block("full", 65536, 0, 0);
    gen_random(65536);  run_block("overflow", 65536, 1, 0);

    $display("events: stall=%0d multi=%0d capped=%0d seq=%0d trim=%0d drop=%0d llext=%0d overflow=%0d maxlen=%0d",
             n_stall, n_multi, n_capped, n_seq, n_trim, n_drop, n_llext, n_overflow, n_max_match);
    check(n_stall    > 0, "pipeline stall happened");
    check(n_multi    > 0, "several matching lanes in one window happened");
    check(n_capped   > 0, "36-byte match limit reached");
    check(n_max_match > 0, "a 36-byte match was encoded");
    check(n_seq      > 0, "matches encoded");
    check(n_trim     > 0, "overlapping match trimmed");
    check(n_drop     > 0, "overlapping match dropped");
    check(n_llext    > 0, "long literal run (literal-length bytes over several cycles)");
    check(n_overflow > 0, "output buffer overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
