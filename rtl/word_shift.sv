// word_shift: turns the stream of PWS-byte windows into the per-position strings
// the kernel works on.
//
// For a window starting at byte P, lane i (0..PWS-1) stands for the string that
// starts at byte P+i. The stage outputs, for every lane,
//   str4[i] - bytes P+i .. P+i+3 (the 4-byte prefix used for hashing and matching;
//             together the lanes span PWS+3 bytes),
//   ext[i]  - bytes P+i+4 .. P+i+MAX_MATCH-1 (the 32 bytes compared in the
//             extended match stage),
// plus the PWS window bytes themselves (the literals). Strings are little-endian:
// byte P+i is str4[i][7:0].
//
// Because ext reaches PWS-1+MAX_MATCH-1 bytes past P, the stage keeps NWIN windows
// in a shift register (6 for PWS = 8, MAX_MATCH = 36) and presents the oldest one.
// The shift register moves on every cycle with adv high, taking in the input
// buffer's registered window (or a bubble); the outputs are combinational from it,
// so the stage adds NWIN-1 windows of latency and no extra register.
//
// The PWS strings of PWS+3 bytes follow the paper's figure; the 32-byte extended
// strings follow the figure's "data to extended match (32 bytes)". The shift
// register organisation is this design's own.
module word_shift
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS       = PWS,
  parameter int unsigned P_MAX_MATCH = MAX_MATCH
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          adv,
  input  logic                          in_valid,
  input  logic                          in_real,
  input  logic [LEN_W-1:0]              in_pos,
  input  logic [P_PWS-1:0][7:0]         in_data,
  output logic                          out_valid,   // oldest window is a real one
  output logic [LEN_W-1:0]              out_pos,
  output logic [P_PWS-1:0][7:0]         out_bytes,
  output logic [P_PWS-1:0][31:0]        str4,
  output logic [P_PWS-1:0][P_MAX_MATCH-5:0][7:0] ext
);
  localparam int unsigned EXT  = P_MAX_MATCH - 4;
  localparam int unsigned SPAN = P_PWS - 1 + P_MAX_MATCH;
  localparam int unsigned NWIN = (SPAN + P_PWS - 1) / P_PWS;

  logic [NWIN-1:0][P_PWS-1:0][7:0] win;     // win[0] is the oldest
  logic [NWIN-1:0]                 real_q;
  logic [NWIN-1:0][LEN_W-1:0]      pos_q;
  logic [NWIN*P_PWS-1:0][7:0]      flat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win    <= '0;
      real_q <= '0;
      pos_q  <= '0;
    end else if (adv) begin
      for (int w = 0; w < NWIN-1; w++) begin
        win[w]    <= win[w+1];
        real_q[w] <= real_q[w+1];
        pos_q[w]  <= pos_q[w+1];
      end
      win[NWIN-1]    <= in_data;
      real_q[NWIN-1] <= in_valid && in_real;
      pos_q[NWIN-1]  <= in_pos;
    end
  end

  assign flat      = win;
  assign out_valid = real_q[0];
  assign out_pos   = pos_q[0];
  assign out_bytes = win[0];

  always_comb begin
    for (int i = 0; i < P_PWS; i++) begin
      str4[i] = {flat[i+3], flat[i+2], flat[i+1], flat[i]};
      for (int k = 0; k < EXT; k++)
        ext[i][k] = flat[i+4+k];
    end
  end
endmodule
