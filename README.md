# Parallel LZ4 block compressor (PWS = 8)

This is a SystemVerilog model of a single-kernel, high-throughput LZ4 compressor.
It follows the architecture of "A High-Throughput Hardware Accelerator for
Lempel-Ziv 4 Compression Algorithm". The kernel looks at a window of 8 input bytes
per clock. Every byte position in the window is a possible match start.

Two rules keep the pipeline feed-forward:

- **One match per window.** Of the eight positions whose candidate holds the same
  4 bytes, only the earliest is used.
- **Match length limit of 36 bytes.** The length comes from a single 32-byte
  compare after the 4-byte prefix. No read address depends on an earlier compare.

The output is a standard LZ4 block, which any LZ4 decoder can decompress. It
respects the format's end-of-block rules:

- the last 5 bytes are literals;
- no match starts within the last 12 bytes.

## Structure

```
host ─► input_buffer ─► word_shift ─► hash_calc ─► hash_table ─► match_search
             │                │                                    │ candidate+4
             └──► data_memory ◄───────────────────────────────────┘
                              └──► extended_match ◄── word_shift (delayed)
                                        └──► sequence_encoding ─► output_buffer ─► host
```

| Module | File | What it does |
|---|---|---|
| `lz4_pkg` | rtl/lz4_pkg.sv | Constants: PWS 8, 256 entries, 36-byte limit, 64 KB, hash constant 2654435761. Also the hash record and event types. |
| `input_buffer` | rtl/input_buffer.sv | 64 KB block store. Releases one 8-byte window per enabled cycle, then 5 zero windows to drain the pipeline. |
| `word_shift` | rtl/word_shift.sv | Six-window shift register. Builds the 8 four-byte strings (PWS+3 bytes) and each position's next 32 bytes. |
| `hash_calc` | rtl/hash_calc.sv | 8 Fibonacci hashes: `(x·2654435761) mod 2^32`, top 8 bits. Two register stages. |
| `hash_table` | rtl/hash_table.sv | 256 records of {16-bit pointer, 4-byte string}. 8 read and 8 write ports, built from 8 one-write/eight-read banks (`ram_1wnr`) plus a live value table. The table holds each entry's last writer and a validity bit, so a new block clears the dictionary in one cycle. |
| `match_search` | rtl/match_search.sv | Compares each position's string with its candidate and keeps the first hit. Outputs the offset and the data-memory address (candidate + 4). |
| `data_memory` | rtl/data_memory.sv | Copy of the block, in 8 word-interleaved banks, so 32 bytes at any byte address are read in one access. |
| `extended_match` | rtl/extended_match.sv | Selects the matched position's 32 bytes and compares them with the candidate's. The length is 4 plus the equal prefix, at most 36, capped by the block end. |
| `sequence_encoding` | rtl/sequence_encoding.sv | Splits each window into literals and the match. Trims or drops overlapping matches. Fills the three queues: `lit_fifo`, and literal-length and match-length/offset `sync_fifo`s. `seq_encoder` then writes tokens, length bytes, literals and offsets. |
| `output_buffer` | rtl/output_buffer.sv | Packs 0–8 bytes per cycle into 8-byte words of a 64 KB store. Provides the byte count, the overflow flag and a host read port. |
| `lz4_compressor` | rtl/lz4_compressor.sv | The top module. `pipe_delay` carries positions, bytes and strings beside the stages. |

### Pipeline timing

| Stage | Register stages |
|---|---|
| input buffer read | 1 |
| hash | 2 |
| table read | 1 |
| match select | 1 |
| data memory read | 1 |
| length | 1 |

The sequence encoding block then queues the result.

Every stage is gated by one enable, `adv`. `adv` is high whenever the sequence queues can take a whole window. It is the only backward signal.

### Host interface (top)

1. With `busy` low, write the block as 8-byte words with `in_wr_en/in_wr_addr/in_wr_data`.
2. Pulse `start` with `block_len` (1..65536).
3. `done` pulses when the compressed block is complete. `out_len` then gives its size in bytes. `overflow` is set if the block did not fit in 64 KB.
4. Read the result with `out_rd_addr`. `out_rd_data` appears one cycle later.

`ev` gives per-cycle event flags: stall, several hits in a window, 36-byte match, sequence, trimmed match and dropped match.

## What follows the paper and what is this design's own

**From the paper:**
- the stage chain;
- PWS = 8;
- Fibonacci hashing into a 256-entry table that stores pointer and string;
- the LVT-based multi-port table with validity flags;
- one match per window, with the earliest position chosen;
- the 36-byte limit, found in one cycle;
- the separate data memory;
- the three queues in front of the sequence encoder;
- 64 KB input and output buffers.

**Own choices, not described in the paper:**
- **Latencies, the host interface and the drain windows.**
- **Intra-window visibility.** Table reads see the contents from before the same cycle's writes. The positions of one window never match each other.
- **Write conflicts.** When several positions write the same entry in one cycle, the last position wins.
- **Overlapping matches.** A match can reach up to 35 bytes past its window. A match that starts inside the previous one is trimmed: it starts where the previous one ends and keeps its offset. If fewer than 4 bytes remain, it is dropped.
- **Literals queue depth.** The queue holds a whole block. A sequence's literals can only follow its token, and the token holds the literal count, so a block without any match is one 64 KB literal run.
- **LZ4 end-of-block rules.** Added so that standard decoders accept the output.
- **The stall.** The encoder writes one group per cycle:
  - header (token and literal-length bytes);
  - up to 8 literals;
  - offset with the match-length byte.

  A sequence therefore costs about 2 cycles plus one per 8 literals. When most windows hold a short sequence, the queues fill and `adv` drops.

## Throughput

The paper's 16.10 Gb/s is 8 bytes per cycle at 251.57 MHz. Simulated results at the default parameters:

| Data | Result |
|---|---|
| Incompressible, 4 KB | 512 windows taken in 518 cycles, i.e. full rate. |
| Long repeated runs | Full rate. |
| Text-like, 64 KB | About 19,000 cycles for 8,192 windows, ratio 1.83. The encoder is the bottleneck. |

On incompressible data, the literals of the single final run leave only after the block has been read in, at 8 bytes per cycle. Reaching one window per cycle on text would need a wider sequence encoder, for example two sequences per cycle. That is not built here.

No FPGA implementation was run, so the clock frequency and the resource figures are not checked. The Calgary-corpus compression ratios were not reproduced, because the corpus was not available.

## Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>.sv`. Each testbench:
- compares the block with a behavioural model in the testbench;
- has a watchdog;
- ends with a `TB_RESULT checks=N failures=M` line.

`tb_lz4_compressor` runs the whole kernel at the default parameters on these blocks:
- text-like, 3 KB and the full 64 KB;
- long runs;
- a block that forces stalls;
- random data, including a 64 KB block that overflows the output buffer;
- a 13-byte block.

For each block it decodes the output with an LZ4 decoder written in the testbench and compares the result with the input. It also checks:
- the end-of-block rules;
- the intake rate on random data.

It also checks that every mechanism actually happened:
- stall;
- multiple hits in a window;
- 36-byte matches;
- trimmed and dropped matches;
- multi-byte literal lengths;
- overflow.

Run a testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lz4_pkg.sv tb/tb_lz4_compressor.sv \
          --top-module tb_lz4_compressor -Mdir obj -o sim && obj/sim
```

## Not implemented

- Hash-table sizes other than 256 entries and match limits other than 36 are parameters (`P_ENTRIES`, `P_MAX_MATCH`) and the widths follow them, but only the defaults were simulated.
- Compressing several blocks back-to-back with overlapped loading (double buffering).
- Multiple kernels.
- FPGA-specific primitives. The multiplier and memories are behavioural and left to synthesis inference.
