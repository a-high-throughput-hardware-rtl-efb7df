// tb_input_buffer: loads a block into the input buffer, starts it and collects the
// released windows under a random pipeline enable. Checks each window's bytes
// (zero beyond the block length), position, the real flag, the 5 drain windows,
// that the buffer releases one window per enabled cycle and that it holds its
// outputs while adv is low.
module tb_input_buffer;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, start, adv, busy, win_valid, win_real;
  logic [12:0] wr_addr;
  logic [PWS-1:0][7:0] wr_data, win_data;
  logic [LEN_W-1:0] block_len, win_pos;

  input_buffer dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data, .start, .block_len, .adv,
                    .busy, .win_valid, .win_real, .win_pos, .win_data);

  int checks = 0, failures = 0;
  byte unsigned src [];

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

  task automatic run(input int n);
    int words = (n + 7) / 8;
    int got = 0, reals = 0, cyc = 0, adv_cycles = 0;
    logic [PWS-1:0][7:0] prev;
    logic prev_valid;
    src = new[n];
    foreach (src[i]) src[i] = 8'($urandom);
    for (int w = 0; w < words + 2; w++) begin  // also write past the end
      @(negedge clk);
      wr_en = 1; wr_addr = 13'(w);
      for (int b = 0; b < 8; b++) wr_data[b] = (w*8+b < n) ? src[w*8+b] : 8'hAA;
    end
    @(negedge clk);
    wr_en = 0; start = 1; block_len = LEN_W'(n); adv = 0;
    @(negedge clk);
    start = 0;
    check(busy, "busy after start");
    while (busy || win_valid) begin
      prev = win_data; prev_valid = win_valid;
      adv = ($urandom_range(3) != 0);
      @(posedge clk);
      #1;
      if (!adv) check(win_data == prev && win_valid == prev_valid, "holds while adv low");
      else if (win_valid) begin
        got++;
        check(win_pos == LEN_W'((got-1)*8), "window position");
        check(win_real == (got <= words), "real flag");
        for (int b = 0; b < 8; b++) begin
          int q = (got-1)*8 + b;
          check(win_data[b] == ((q < n) ? src[q] : 8'h00), "window byte");
        end
        if (win_real) reals++;
      end
      @(negedge clk);
      if (adv) adv_cycles++;
      cyc++;
      if (!busy && !win_valid) break;
      if (!busy && win_valid) begin
        adv = 1; @(posedge clk); #1; check(!win_valid, "bubble after the end"); @(negedge clk); break;
      end
    end
    check(reals == words, "number of real windows");
    check(got == words + 5, "real plus 5 drain windows");
    check(adv_cycles == got, "one window per enabled cycle");
  endtask

  initial begin
    void'($urandom(3));
    wr_en = 0; start = 0; adv = 0; block_len = '0; wr_addr = '0; wr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(100);
    run(8);
    run(1);
    run(2051);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
