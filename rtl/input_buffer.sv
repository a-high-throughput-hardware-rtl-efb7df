// input_buffer: holds one uncompressed block (up to 64 KB) and releases it as a
// stream of PWS-byte windows, one window per enabled clock.
//
// The host writes the block one PWS-byte word at a time (wr_en/wr_addr/wr_data)
// while the kernel is idle, then pulses start with the block length in bytes. From
// then on, on every cycle with adv high, the buffer reads the next word and presents
// it on the win_* outputs, registered (one cycle of latency, like a block RAM). Bytes
// at or beyond block_len are presented as zero. After the last real window the
// buffer releases LOOKAHEAD further all-zero windows so that the word shift stage,
// which needs the following windows to form 36-byte strings, can drain; win_real is
// low for those. adv is the kernel-wide pipeline enable: when it is low the output
// registers hold.
//
// The 64 KB size and the PWS bytes per cycle are the paper's. The host port, the
// start/length handshake, the zero padding and the drain windows are this design's
// own choices.
module input_buffer
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS     = PWS,
  parameter int unsigned DEPTH     = BUF_BYTES,   // bytes
  parameter int unsigned LOOKAHEAD = 5            // drain windows after the block
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host write port, used while idle
  input  logic                         wr_en,
  input  logic [$clog2(DEPTH/P_PWS)-1:0] wr_addr,
  input  logic [P_PWS-1:0][7:0]        wr_data,
  // block control
  input  logic                         start,
  input  logic [LEN_W-1:0]             block_len,   // 1..DEPTH
  input  logic                         adv,
  output logic                         busy,
  // released window
  output logic                         win_valid,
  output logic                         win_real,
  output logic [LEN_W-1:0]             win_pos,
  output logic [P_PWS-1:0][7:0]        win_data
);
  localparam int unsigned WORDS = DEPTH / P_PWS;
  localparam int unsigned WA    = $clog2(WORDS);

  logic [P_PWS-1:0][7:0] mem [WORDS];
  logic [WA+1:0]         cnt;       // next word to release
  logic [WA+1:0]         nwin;      // real windows in the block
  logic [WA+1:0]         total;     // real + drain windows
  logic [LEN_W-1:0]      len_q;

  always_ff @(posedge clk)
    if (wr_en && !busy) mem[wr_addr] <= wr_data;

  assign total = nwin + (WA+2)'(LOOKAHEAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      nwin      <= '0;
      len_q     <= '0;
      win_valid <= 1'b0;
      win_real  <= 1'b0;
      win_pos   <= '0;
      win_data  <= '0;
    end else begin
      if (start && !busy) begin
        busy  <= 1'b1;
        cnt   <= '0;
        len_q <= block_len;
        nwin  <= (WA+2)'((block_len + LEN_W'(P_PWS - 1)) / LEN_W'(P_PWS));
      end else if (adv) begin
        if (busy) begin
          win_valid <= 1'b1;
          win_real  <= cnt < nwin;
          win_pos   <= LEN_W'(cnt) * LEN_W'(P_PWS);
          for (int b = 0; b < P_PWS; b++)
            win_data[b] <= (cnt < nwin && (LEN_W'(cnt) * LEN_W'(P_PWS) + LEN_W'(b)) < len_q)
                           ? mem[cnt[WA-1:0]][b] : 8'h00;
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == total) busy <= 1'b0;
        end else begin
          win_valid <= 1'b0;
          win_real  <= 1'b0;
        end
      end
    end
  end

  // A block of zero length is not allowed.
  a_len: assert property (@(posedge clk) disable iff (!rst_n)
                          (start && !busy) |-> (block_len != 0 && block_len <= LEN_W'(DEPTH)));
endmodule
