// lit_fifo: byte queue that takes and gives up to PWS bytes per cycle (the
// "Literals FIFO" of the sequence encoding block).
//
// push_cnt bytes of push_data (lowest bytes first) are appended; pop_cnt bytes are
// removed from the head. head[k] is the k-th oldest byte, valid for k < count.
// free tells how many bytes can still be taken. Push and pop may happen in the
// same cycle.
//
// A sequence's literals can only be written out after its token, which holds the
// literal count, so every literal of a run waits here until the run ends. A block
// with no match at all is one run, hence DEPTH defaults to a whole block. The
// storage is split into PWS byte-wide banks, byte address a in bank a mod PWS, so
// any PWS consecutive bytes touch each bank once: one write and one read port per
// bank. The head is read combinationally from the banks. The low BB bits of the
// per-bank addresses wa/ra select the bank and are deliberately not used as row
// index (lint reports them unused).
module lit_fifo #(
  parameter int unsigned P_PWS = 8,
  parameter int unsigned DEPTH = 65536
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic [$clog2(P_PWS+1)-1:0]   push_cnt,
  input  logic [P_PWS-1:0][7:0]        push_data,
  input  logic [$clog2(P_PWS+1)-1:0]   pop_cnt,
  output logic [P_PWS-1:0][7:0]        head,
  output logic [$clog2(DEPTH+1)-1:0]   count,
  output logic [$clog2(DEPTH+1)-1:0]   free
);
  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned CW   = $clog2(DEPTH+1);
  localparam int unsigned BB   = $clog2(P_PWS);
  localparam int unsigned ROWS = DEPTH / P_PWS;

  logic [AW:0] wp, rp;

  assign count = CW'(wp - rp);
  assign free  = CW'(DEPTH) - count;

  logic [7:0] bank_out [P_PWS];

  for (genvar b = 0; b < P_PWS; b++) begin : g_bank
    logic [7:0]    mem [ROWS];
    logic [BB-1:0] wk, rk;      // which pushed / head byte lands in this bank
    logic [AW-1:0] wa, ra;
    assign wk = BB'(b) - wp[BB-1:0];
    assign rk = BB'(b) - rp[BB-1:0];
    assign wa = wp[AW-1:0] + AW'(wk);
    assign ra = rp[AW-1:0] + AW'(rk);
    always_ff @(posedge clk)
      if ({1'b0, wk} < (BB+1)'(push_cnt)) mem[wa[AW-1:BB]] <= push_data[wk];
    assign bank_out[b] = mem[ra[AW-1:BB]];
  end

  always_comb
    for (int k = 0; k < P_PWS; k++) head[k] = bank_out[BB'(rp[BB-1:0] + BB'(k))];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (clear) begin
      wp <= '0;
      rp <= '0;
    end else begin
      wp <= wp + (AW+1)'(push_cnt);
      rp <= rp + (AW+1)'(pop_cnt);
    end
  end

  a_push_room: assert property (@(posedge clk) disable iff (!rst_n) CW'(push_cnt) <= free);
  a_pop_avail: assert property (@(posedge clk) disable iff (!rst_n) CW'(pop_cnt) <= count);
endmodule
