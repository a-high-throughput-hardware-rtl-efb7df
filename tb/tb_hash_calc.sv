// tb_hash_calc: feeds random 4-byte strings to the 8 hash lanes with a random
// enable and checks each hash, two enabled cycles later, against
// (x * 2654435761 mod 2^32) >> 24 computed here in 64-bit arithmetic.
module tb_hash_calc;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic adv;
  logic [PWS-1:0][31:0] str4;
  logic [PWS-1:0][7:0]  hash;

  hash_calc dut (.clk, .rst_n, .adv, .str4, .hash);

  int checks = 0, failures = 0;
  logic [PWS-1:0][31:0] hist [$];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] fib(logic [31:0] x);
    longint unsigned p = longint'(x) * 64'd2654435761;
    return p[31:24];
  endfunction

  initial begin
    void'($urandom(9));
    adv = 0; str4 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      adv = ($urandom_range(3) != 0);
      for (int i = 0; i < PWS; i++) str4[i] = (t % 7 == 0) ? 32'h64636261 : $urandom;
      if (adv) hist.push_back(str4);
      @(posedge clk);
      #1;
      if (adv && hist.size() >= 2) begin
        // after the second enabled edge the hash of the strings given at the first shows
        automatic logic [PWS-1:0][31:0] old = hist[hist.size()-2];
        for (int i = 0; i < PWS; i++) begin
          checks++;
          if (hash[i] != fib(old[i])) begin
            failures++;
            $display("FAIL lane %0d: %h -> %h, expected %h", i, old[i], hash[i], fib(old[i]));
          end
        end
      end
    end
    // a known value: "abcd" little-endian
    checks++;
    if (fib(32'h64636261) != 8'(((64'h64636261 * 64'd2654435761) & 64'hFFFFFFFF) >> 24)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
