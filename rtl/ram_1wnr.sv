// ram_1wnr: one-write, NR-read memory bank ("1W8R" in the kernel's hash table).
//
// DEPTH words of W bits. One synchronous write port; NR synchronous read ports
// whose outputs are registered when en is high (one cycle of latency, reading the
// contents from before a write at the same edge). On an FPGA this is NR block RAM
// copies sharing the write port.
module ram_1wnr #(
  parameter int unsigned W     = 48,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned NR    = 8
) (
  input  logic                             clk,
  input  logic                             en,
  input  logic                             we,
  input  logic [$clog2(DEPTH)-1:0]         waddr,
  input  logic [W-1:0]                     wdata,
  input  logic [NR-1:0][$clog2(DEPTH)-1:0] raddr,
  output logic [NR-1:0][W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      for (int r = 0; r < NR; r++) rdata[r] <= mem[raddr[r]];
      if (we) mem[waddr] <= wdata;
    end
  end
endmodule
