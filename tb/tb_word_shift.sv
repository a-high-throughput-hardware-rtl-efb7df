// tb_word_shift: streams a random byte sequence into the word shift stage as
// 8-byte windows (with random enable gaps) and checks, for every real window the
// stage presents, its position, its 8 bytes, the 8 four-byte strings
// (little-endian) and the 8 extended strings of 32 bytes against the source.
module tb_word_shift;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adv, in_valid, in_real, out_valid;
  logic [LEN_W-1:0] in_pos, out_pos;
  logic [PWS-1:0][7:0] in_data, out_bytes;
  logic [PWS-1:0][31:0] str4;
  logic [PWS-1:0][EXT_BYTES-1:0][7:0] ext;

  word_shift dut (.clk, .rst_n, .adv, .in_valid, .in_real, .in_pos, .in_data,
                  .out_valid, .out_pos, .out_bytes, .str4, .ext);

  int checks = 0, failures = 0;
  localparam int NW = 40;          // real windows
  byte unsigned src [(NW+5)*8];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int seen = 0;
  always @(posedge clk) if (rst_n && out_valid && adv) begin
    automatic int p = int'(out_pos);
    check(p == seen*8, "window order");
    for (int i = 0; i < 8; i++) begin
      check(out_bytes[i] == src[p+i], "window byte");
      check(str4[i] == {src[p+i+3], src[p+i+2], src[p+i+1], src[p+i]}, "4-byte string");
      for (int k = 0; k < EXT_BYTES; k++)
        if (ext[i][k] != src[p+i+4+k]) check(0, "extended string");
      checks++;
    end
    seen++;
  end

  initial begin
    void'($urandom(5));
    foreach (src[i]) src[i] = 8'($urandom);
    adv = 0; in_valid = 0; in_real = 0; in_pos = '0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < NW + 5; ) begin
      @(negedge clk);
      adv      = ($urandom_range(4) != 0);
      in_valid = 1;
      in_real  = (w < NW);
      in_pos   = LEN_W'(w*8);
      for (int b = 0; b < 8; b++) in_data[b] = src[w*8+b];
      if (adv) w++;
    end
    @(negedge clk);
    adv = 1; in_valid = 0;
    repeat (8) @(negedge clk);
    check(seen == NW, "every real window presented once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
