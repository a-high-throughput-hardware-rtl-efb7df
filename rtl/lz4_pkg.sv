// lz4_pkg: constants shared by the blocks of the parallel LZ4 compression kernel.
//
// The kernel looks at PWS (parallelization window size) consecutive input bytes per
// clock. Every byte position of a window is a potential match start; each window
// yields at most one match, and a match is never longer than MAX_MATCH bytes, so the
// length of a match is found in a single comparison step with no address feedback.
//
// Values that follow the paper: PWS = 8, a 256-entry hash table, a 36-byte match
// limit, 64 KB input and output buffers, the Fibonacci hash constant 2654435761 and
// the LZ4 minimum match of 4 bytes. The end-of-block rules (last 5 bytes are
// literals, last match starts 12 or more bytes before the end) come from the LZ4
// block format itself and are this design's addition. Linting the package on its
// own reports most constants as unused; the blocks import them.
package lz4_pkg;

  localparam int unsigned PWS          = 8;           // bytes per window
  localparam int unsigned HT_ENTRIES   = 256;         // hash table entries
  localparam int unsigned HASH_BITS    = 8;           // log2(HT_ENTRIES)
  localparam int unsigned MIN_MATCH    = 4;           // LZ4 minimum match
  localparam int unsigned MAX_MATCH    = 36;          // match length limit
  localparam int unsigned EXT_BYTES    = MAX_MATCH - MIN_MATCH; // 32 bytes compared in extended match
  localparam int unsigned BUF_BYTES    = 65536;       // input and output buffer size
  localparam int unsigned PTR_W        = 16;          // input buffer pointer width
  localparam int unsigned LEN_W        = 17;          // block length 1..65536
  localparam logic [31:0] FIB_CONST    = 32'd2654435761;
  localparam int unsigned LAST_LITERALS = 5;          // LZ4 end-of-block rule
  localparam int unsigned MF_LIMIT      = 12;         // LZ4 end-of-block rule

  // A hash table record: where the string was seen and its first four bytes.
  typedef struct packed {
    logic [PTR_W-1:0] ptr;
    logic [31:0]      str;
  } ht_entry_t;

  // Per-cycle event flags of the kernel, for performance counters.
  typedef struct packed {
    logic stall;    // pipeline held because the sequence queues were full
    logic multi;    // a window had several matching lanes; only the first was kept
    logic capped;   // a match reached the MAX_MATCH limit
    logic seq;      // a match was accepted as a sequence
    logic trim;     // a match was shortened because it began inside the previous one
    logic drop;     // a match was dropped (under 4 bytes left after trimming)
  } lz4_events_t;

endpackage
