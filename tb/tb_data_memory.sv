// tb_data_memory: fills the 64 KB data memory a word at a time with random bytes,
// then reads 32-byte spans at random byte addresses (every alignment) and checks
// each span, one cycle after its address, against the written bytes.
module tb_data_memory;
  import lz4_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [12:0] wr_addr;
  logic [PWS-1:0][7:0] wr_data;
  logic [15:0] rd_addr;
  logic [EXT_BYTES-1:0][7:0] rd_data;

  data_memory dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  int checks = 0, failures = 0;
  byte unsigned ref_mem [BUF_BYTES];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    void'($urandom(17));
    wr_en = 0; rd_en = 0; wr_addr = '0; wr_data = '0; rd_addr = '0;
    foreach (ref_mem[i]) ref_mem[i] = 8'($urandom);
    for (int w = 0; w < BUF_BYTES / PWS; w++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 13'(w);
      for (int b = 0; b < PWS; b++) wr_data[b] = ref_mem[w*PWS + b];
    end
    @(negedge clk);
    wr_en = 0;
    for (int t = 0; t < 4000; t++) begin
      automatic int a = (t < 64) ? t : $urandom_range(0, BUF_BYTES - EXT_BYTES);
      automatic int bad = 0;
      @(negedge clk);
      rd_en = 1; rd_addr = 16'(a);
      @(posedge clk);
      #1;
      rd_en = 0;
      for (int k = 0; k < EXT_BYTES; k++) if (rd_data[k] != ref_mem[a + k]) bad++;
      checks++;
      if (bad) begin
        failures++;
        $display("FAIL: address %0d, %0d bytes wrong", a, bad);
      end
      // rd_en low: the output holds
      @(negedge clk);
      rd_addr = 16'($urandom);
      @(posedge clk);
      #1;
      checks++;
      for (int k = 0; k < EXT_BYTES; k++) if (rd_data[k] != ref_mem[a + k]) bad++;
      if (bad) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
