// tb_output_buffer: sends random chunks of 0..8 bytes into the output buffer,
// flushes, reads the memory back word by word and compares it with the bytes
// sent; checks the byte count. A second block sends more than 64 KB and checks
// that overflow is raised and the first 64 KB are intact.
module tb_output_buffer;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, in_valid, flush, flushed, overflow;
  logic [3:0] in_cnt;
  logic [PWS-1:0][7:0] in_bytes, rd_data;
  logic [LEN_W:0] byte_count;
  logic [12:0] rd_addr;

  output_buffer dut (.clk, .rst_n, .start, .in_valid, .in_cnt, .in_bytes, .flush, .flushed,
                     .byte_count, .overflow, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  byte unsigned sent [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int total, input bit expect_ovf);
    int bad = 0;
    sent.delete();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (sent.size() < total) begin
      @(negedge clk);
      in_valid = ($urandom_range(5) != 0);
      in_cnt   = 4'($urandom_range(0, 8));
      if (sent.size() + int'(in_cnt) > total) in_cnt = 4'(total - sent.size());
      for (int b = 0; b < PWS; b++) in_bytes[b] = 8'($urandom);
      if (in_valid) for (int b = 0; b < int'(in_cnt); b++) sent.push_back(in_bytes[b]);
    end
    @(negedge clk);
    in_valid = 0;
    flush    = 1;
    @(negedge clk);
    flush = 0;
    check(flushed, "flushed follows flush");
    check(int'(byte_count) == total, "byte count");
    check(overflow == expect_ovf, "overflow flag");
    for (int w = 0; w < (total + 7) / 8 && w < BUF_BYTES / 8; w++) begin
      rd_addr = 13'(w);
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        if (w*8 + b < total && rd_data[b] != sent[w*8 + b]) bad++;
        if (w*8 + b >= total && rd_data[b] != 8'h00) bad++;   // zero padded
      end
    end
    check(bad == 0, "memory contents");
  endtask

  initial begin
    void'($urandom(23));
    start = 0; in_valid = 0; in_cnt = '0; in_bytes = '0; flush = 0; rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1003, 0);
    run(64, 0);
    run(BUF_BYTES + 21, 1);
    run(17, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
