// tb_hash_table: drives the 8-read, 8-write hash table with random addresses
// (drawn from a small range so that lanes often collide) and a random enable,
// and compares every read with a plain array model kept here: a read returns the
// entry as it was before the same cycle's writes, an entry written by several
// lanes at once holds the highest lane's record, and after clear every entry
// reads as not valid until it is written again.
module tb_hash_table;
  import lz4_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clear, en;
  logic [PWS-1:0][7:0] rd_addr, wr_addr;
  logic [PWS-1:0]      wr_en, rd_hit;
  ht_entry_t [PWS-1:0] wr_data, rd_data;

  hash_table dut (.clk, .rst_n, .clear, .en, .rd_addr, .wr_en, .wr_addr, .wr_data,
                  .rd_data, .rd_hit);

  int checks = 0, failures = 0, n_conflict = 0, n_hit = 0, n_miss = 0;
  ht_entry_t model   [256];
  bit        m_valid [256];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ht_entry_t exp_d [PWS];
    bit        exp_v [PWS];
    void'($urandom(11));
    clear = 0; en = 0; rd_addr = '0; wr_addr = '0; wr_en = '0; wr_data = '0;
    foreach (m_valid[i]) m_valid[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    for (int t = 0; t < 3000; t++) begin
      automatic bit cl = (t % 1000 == 999);
      @(negedge clk);
      en    = ($urandom_range(4) != 0);
      clear = cl;
      for (int i = 0; i < PWS; i++) begin
        rd_addr[i]     = 8'($urandom_range(t < 1500 ? 15 : 255));
        wr_addr[i]     = 8'($urandom_range(t < 1500 ? 15 : 255));
        wr_en[i]       = ($urandom_range(3) != 0);
        wr_data[i].ptr = 16'($urandom);
        wr_data[i].str = $urandom;
      end
      for (int i = 0; i < PWS; i++) begin
        exp_d[i] = model[rd_addr[i]];
        exp_v[i] = m_valid[rd_addr[i]];
      end
      @(posedge clk);
      #1;
      if (cl) begin
        foreach (m_valid[i]) m_valid[i] = 0;
      end else if (en) begin
        for (int i = 0; i < PWS; i++) begin
          checks++;
          if (rd_hit[i] != exp_v[i] || (exp_v[i] && rd_data[i] != exp_d[i])) begin
            failures++;
            $display("FAIL t=%0d lane %0d addr %0d: hit %0d/%0d data %h/%h", t, i,
                     rd_addr[i], rd_hit[i], exp_v[i], rd_data[i], exp_d[i]);
          end
          if (exp_v[i]) n_hit++; else n_miss++;
        end
        for (int i = 0; i < PWS; i++)
          if (wr_en[i]) begin
            for (int j = i + 1; j < PWS; j++) if (wr_en[j] && wr_addr[j] == wr_addr[i]) n_conflict++;
            model[wr_addr[i]]   = wr_data[i];   // later lanes overwrite earlier ones
            m_valid[wr_addr[i]] = 1;
          end
      end
    end
    checks++;
    if (n_conflict == 0 || n_hit == 0 || n_miss == 0) begin
      failures++;
      $display("FAIL: coverage conflict=%0d hit=%0d miss=%0d", n_conflict, n_hit, n_miss);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
