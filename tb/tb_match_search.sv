// tb_match_search: gives the match search stage windows whose 8 candidates are
// random, with some lanes made to match, and checks the registered result one
// cycle later against a reference written here: the lowest lane whose candidate
// is valid and holds the same 4 bytes, and whose position is 12 or more bytes
// before the block end; its start, candidate, offset, candidate + 4 and the
// several-lanes flag.
module tb_match_search;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_valid, o_valid, o_match, o_multi;
  logic [LEN_W-1:0] block_len, in_pos, o_mpos;
  logic [PWS-1:0][31:0] cur_str;
  logic [PWS-1:0] cand_hit;
  ht_entry_t [PWS-1:0] cand;
  logic [2:0] o_sel;
  logic [PTR_W-1:0] o_cand, o_offset, o_ext_addr;

  match_search dut (.clk, .rst_n, .en, .block_len, .in_valid, .in_pos, .cur_str, .cand_hit,
                    .cand, .o_valid, .o_match, .o_sel, .o_mpos, .o_cand, .o_offset,
                    .o_ext_addr, .o_multi);

  int checks = 0, failures = 0, n_match = 0, n_multi = 0, n_end = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(13));
    en = 0; in_valid = 0; block_len = '0; in_pos = '0; cur_str = '0; cand_hit = '0; cand = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      automatic int exp_lane = -1, nm = 0;
      @(negedge clk);
      en        = 1;
      in_valid  = ($urandom_range(9) != 0);
      block_len = LEN_W'($urandom_range(1000, 2000));
      in_pos    = LEN_W'(8 * $urandom_range(1, 250));
      for (int i = 0; i < PWS; i++) begin
        cur_str[i]  = $urandom;
        cand_hit[i] = ($urandom_range(3) != 0);
        cand[i].ptr = 16'($urandom_range(0, int'(in_pos) + i - 1));
        cand[i].str = ($urandom_range(4) == 0) ? cur_str[i] : cur_str[i] ^ (32'h1 << $urandom_range(31));
      end
      for (int i = 0; i < PWS; i++)
        if (cand_hit[i] && cand[i].str == cur_str[i] && int'(in_pos) + i + 12 <= int'(block_len)) begin
          if (exp_lane < 0) exp_lane = i;
          nm++;
        end else if (cand_hit[i] && cand[i].str == cur_str[i]) n_end++;
      if (!in_valid) begin exp_lane = -1; nm = 0; end
      @(posedge clk);
      #1;
      check(o_valid == in_valid, "valid");
      check(o_match == (exp_lane >= 0), "match flag");
      check(o_multi == (nm > 1), "several-lanes flag");
      if (exp_lane >= 0) begin
        n_match++;
        if (nm > 1) n_multi++;
        check(int'(o_sel) == exp_lane, "selected lane is the earliest");
        check(int'(o_mpos) == int'(in_pos) + exp_lane, "match start");
        check(o_cand == cand[exp_lane].ptr, "candidate pointer");
        check(int'(o_offset) == int'(in_pos) + exp_lane - int'(cand[exp_lane].ptr), "offset");
        check(o_ext_addr == cand[exp_lane].ptr + 16'd4, "extended match address");
      end
    end
    check(n_match > 100 && n_multi > 10 && n_end > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
