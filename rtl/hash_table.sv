// hash_table: the kernel's shared dictionary, a 256-entry table with PWS write
// ports and PWS read ports built as a live value table (LVT) memory.
//
// Each entry holds a 16-bit input buffer pointer and the 4 bytes found there. Write
// port k owns bank Mk, a one-write, PWS-read memory (ram_1wnr); every bank is read
// at all PWS read addresses. The LVT records, per entry, which bank wrote it last
// and a validity flag; a read returns the bank the LVT names, and a read of an
// entry never written since the last clear returns rd_hit = 0.
//
// Timing: reads and writes are issued in the same enabled cycle (en = adv), reads
// return one enabled cycle later and see the table as it was before that cycle's
// writes (read first, then replace, as LZ4 does per position). When several
// ports write the same entry in one cycle, the highest-numbered port, i.e. the
// latest byte position, wins. clear resets every validity flag in one cycle, so
// no table walk is needed between blocks.
//
// From the paper: 256 entries, pointer plus 4-byte string, PWS simultaneous
// updates, the LVT with validity flags, the PWS 1W8R banks and the output
// multiplexers. Port-conflict priority and clear timing are this design's choices.
module hash_table
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS     = PWS,
  parameter int unsigned P_ENTRIES = HT_ENTRIES
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   clear,
  input  logic                                   en,
  input  logic [P_PWS-1:0][$clog2(P_ENTRIES)-1:0] rd_addr,
  input  logic [P_PWS-1:0]                        wr_en,
  input  logic [P_PWS-1:0][$clog2(P_ENTRIES)-1:0] wr_addr,
  input  ht_entry_t [P_PWS-1:0]                   wr_data,
  output ht_entry_t [P_PWS-1:0]                   rd_data,
  output logic [P_PWS-1:0]                        rd_hit
);
  localparam int unsigned BW = (P_PWS > 1) ? $clog2(P_PWS) : 1;

  // live value table: last writer bank and valid flag per entry
  logic [BW-1:0]        lvt_bank  [P_ENTRIES];
  logic [P_ENTRIES-1:0] lvt_valid;
  logic [P_PWS-1:0][BW-1:0] sel_q;
  logic [P_PWS-1:0]         hit_q;

  // bank outputs: bank_rd[k][r] is bank k read at rd_addr[r]
  ht_entry_t [P_PWS-1:0] bank_rd [P_PWS];

  for (genvar k = 0; k < P_PWS; k++) begin : g_bank
    ram_1wnr #(.W($bits(ht_entry_t)), .DEPTH(P_ENTRIES), .NR(P_PWS)) u_bank (
      .clk   (clk),
      .en    (en),
      .we    (wr_en[k]),
      .waddr (wr_addr[k]),
      .wdata (wr_data[k]),
      .raddr (rd_addr),
      .rdata (bank_rd[k])
    );
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int k = 0; k < P_PWS; k++)
        if (wr_en[k]) lvt_bank[wr_addr[k]] <= BW'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvt_valid <= '0;
      sel_q     <= '0;
      hit_q     <= '0;
    end else if (clear) begin
      lvt_valid <= '0;
      hit_q     <= '0;
    end else if (en) begin
      for (int r = 0; r < P_PWS; r++) begin
        sel_q[r] <= lvt_bank[rd_addr[r]];
        hit_q[r] <= lvt_valid[rd_addr[r]];
      end
      for (int k = 0; k < P_PWS; k++)
        if (wr_en[k]) lvt_valid[wr_addr[k]] <= 1'b1;
    end
  end

  always_comb begin
    for (int r = 0; r < P_PWS; r++) begin
      rd_data[r] = bank_rd[sel_q[r]][r];
      rd_hit[r]  = hit_q[r];
    end
  end
endmodule
