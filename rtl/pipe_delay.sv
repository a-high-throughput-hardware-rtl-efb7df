// pipe_delay: a DEPTH-stage register delay line that advances only when en is high.
//
// Used by the kernel to carry a window's side information (position, bytes,
// strings) alongside the pipelined hash, hash table and match stages so that
// every stage sees the data of the same window. DEPTH = 0 is a wire. Registers
// reset to zero.
module pipe_delay #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) r[i] <= '0;
      end else if (en) begin
        r[0] <= d;
        for (int i = 1; i < DEPTH; i++) r[i] <= r[i-1];
      end
    end
    assign q = r[DEPTH-1];
  end
endmodule
