// output_buffer: collects the compressed byte stream into a 64 KB block store.
//
// The sequence encoder delivers 0..PWS bytes per cycle (in_cnt, lowest bytes
// first). A packer keeps the bytes that do not yet fill a PWS-byte word in a
// staging register and writes one full word per cycle to the memory, so a
// continuous input of PWS bytes per cycle is absorbed without stalling. flush
// (one cycle, with no input that cycle) writes the last partial word, zero padded,
// and flushed pulses one cycle later. byte_count is the compressed size so far.
// If the compressed block would exceed the buffer, overflow is set and the words
// beyond the end are discarded; byte_count still counts them. start clears the
// count, the staging register and the overflow flag.
//
// The host reads the result a word at a time: rd_data is registered, one cycle
// after rd_addr.
//
// The buffer size (equal to the input buffer) is the paper's choice; the packing,
// the flush handshake and the overflow behaviour are this design's.
module output_buffer
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS = PWS,
  parameter int unsigned DEPTH = BUF_BYTES     // bytes
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic                             in_valid,
  input  logic [$clog2(P_PWS+1)-1:0]       in_cnt,
  input  logic [P_PWS-1:0][7:0]            in_bytes,
  input  logic                             flush,
  output logic                             flushed,
  output logic [LEN_W:0]                   byte_count,
  output logic                             overflow,
  input  logic [$clog2(DEPTH/P_PWS)-1:0]   rd_addr,
  output logic [P_PWS-1:0][7:0]            rd_data
);
  localparam int unsigned WORDS = DEPTH / P_PWS;
  localparam int unsigned WA    = $clog2(WORDS);
  localparam int unsigned SC    = $clog2(P_PWS);      // staged bytes 0..PWS-1
  localparam int unsigned CW    = $clog2(P_PWS+1);

  logic [P_PWS-1:0][7:0]   mem [WORDS];
  logic [P_PWS-1:0][7:0]   stage_q;
  logic [SC-1:0]           stage_cnt;
  logic [LEN_W:0]          waddr;          // words written (may pass the end)
  logic [2*P_PWS-1:0][7:0] merged;
  logic [CW:0]             total;
  logic                    we;
  logic [P_PWS-1:0][7:0]   wword;

  always_comb begin
    merged = '0;
    for (int k = 0; k < P_PWS; k++)
      if (k < int'(stage_cnt)) merged[k] = stage_q[k];
    for (int k = 0; k < P_PWS; k++)
      if (in_valid && k < int'(in_cnt)) merged[int'(stage_cnt) + k] = in_bytes[k];
    total = (CW+1)'(stage_cnt) + (in_valid ? (CW+1)'(in_cnt) : '0);
    we    = (total >= (CW+1)'(P_PWS)) || (flush && stage_cnt != 0);
    wword = merged[P_PWS-1:0];
  end

  always_ff @(posedge clk) begin
    if (we && waddr < (LEN_W+1)'(WORDS)) mem[waddr[WA-1:0]] <= wword;
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_q    <= '0;
      stage_cnt  <= '0;
      waddr      <= '0;
      byte_count <= '0;
      overflow   <= 1'b0;
      flushed    <= 1'b0;
    end else if (start) begin
      stage_q    <= '0;
      stage_cnt  <= '0;
      waddr      <= '0;
      byte_count <= '0;
      overflow   <= 1'b0;
      flushed    <= 1'b0;
    end else begin
      flushed <= flush;
      if (in_valid) byte_count <= byte_count + (LEN_W+1)'(in_cnt);
      if (we) begin
        waddr <= waddr + 1'b1;
        if (waddr >= (LEN_W+1)'(WORDS)) overflow <= 1'b1;
      end
      if (flush) begin
        stage_cnt <= '0;
        stage_q   <= '0;
      end else if (total >= (CW+1)'(P_PWS)) begin
        stage_cnt <= SC'(total - (CW+1)'(P_PWS));
        stage_q   <= merged[2*P_PWS-1:P_PWS];
      end else begin
        stage_cnt <= SC'(total);
        stage_q   <= merged[P_PWS-1:0];
      end
    end
  end

  a_flush_alone: assert property (@(posedge clk) disable iff (!rst_n) !(flush && in_valid));
endmodule
