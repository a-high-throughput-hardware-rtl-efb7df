// tb_extended_match: builds, for a random selected lane, a candidate whose first
// r bytes equal the lane's 32 extended bytes (r = 0..32) and checks the
// registered length one cycle later: 4 + r, limited so that the match ends 5
// bytes before the block end; the 36-byte flag; and that the other lanes'
// data do not matter.
module tb_extended_match;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en, in_match, o_match, o_capped;
  logic [LEN_W-1:0] block_len, in_mpos, o_mpos;
  logic [2:0] sel;
  logic [PTR_W-1:0] in_offset, o_offset;
  logic [PWS-1:0][EXT_BYTES-1:0][7:0] cur_ext;
  logic [EXT_BYTES-1:0][7:0] cand_ext;
  logic [5:0] o_len;

  extended_match dut (.clk, .rst_n, .en, .block_len, .in_match, .sel, .in_mpos, .in_offset,
                      .cur_ext, .cand_ext, .o_match, .o_mpos, .o_offset, .o_len, .o_capped);

  int checks = 0, failures = 0, n_cap = 0, n_end = 0;

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
    void'($urandom(19));
    en = 0; in_match = 0; block_len = '0; in_mpos = '0; sel = '0; in_offset = '0;
    cur_ext = '0; cand_ext = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      automatic int r = (t % 5 == 0) ? 32 : $urandom_range(0, 32);
      automatic int exp;
      @(negedge clk);
      en        = 1;
      in_match  = ($urandom_range(7) != 0);
      sel       = 3'($urandom);
      block_len = LEN_W'($urandom_range(100, 65536));
      in_mpos   = LEN_W'($urandom_range(0, int'(block_len) - 12));
      if (t % 3 == 0) in_mpos = block_len - LEN_W'($urandom_range(12, 40));
      in_offset = 16'($urandom_range(1, 65535));
      for (int i = 0; i < PWS; i++)
        for (int k = 0; k < EXT_BYTES; k++) cur_ext[i][k] = 8'($urandom);
      cand_ext = cur_ext[sel];
      if (r < 32) cand_ext[r] = ~cand_ext[r];
      // disturb another lane at the first byte: must not matter
      cur_ext[3'(sel + 1)][0] = ~cand_ext[0];
      exp = 4 + r;
      if (exp > int'(block_len) - int'(in_mpos) - 5) begin
        exp = int'(block_len) - int'(in_mpos) - 5;
        n_end++;
      end
      @(posedge clk);
      #1;
      check(o_match == in_match, "match flag");
      check(o_mpos == in_mpos && o_offset == in_offset, "descriptor carried");
      if (in_match) begin
        check(int'(o_len) == exp, $sformatf("length %0d, expected %0d", o_len, exp));
        check(o_capped == (exp == 36), "36-byte flag");
        if (exp == 36) n_cap++;
      end
    end
    check(n_cap > 100 && n_end > 100, "coverage of the limit and the block end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
