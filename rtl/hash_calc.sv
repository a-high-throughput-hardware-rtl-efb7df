// hash_calc: PWS parallel Fibonacci hashes, one per lane, pipelined.
//
// Each lane multiplies its 4-byte string (little-endian 32-bit value) by the
// Fibonacci constant 2654435761 modulo 2^32 and keeps the top HASH_BITS bits as the
// hash table address, as the LZ4 reference code does. The multiply is registered
// (the paper maps it to DSP slices, four per lane) and the truncated hash is
// registered again, so the latency is LATENCY = 2 enabled cycles. Both registers
// advance only when adv is high.
//
// The constant, the truncation to the most significant bits, the PWS-way
// organisation and the 8-bit output width (256 entries) follow the paper. The
// two-stage pipeline depth is this design's choice.
module hash_calc
  import lz4_pkg::*;
#(
  parameter int unsigned P_PWS       = PWS,
  parameter int unsigned P_HASH_BITS = HASH_BITS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              adv,
  input  logic [P_PWS-1:0][31:0]            str4,
  output logic [P_PWS-1:0][P_HASH_BITS-1:0] hash
);
  logic [P_PWS-1:0][31:0] prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod <= '0;
      hash <= '0;
    end else if (adv) begin
      for (int i = 0; i < P_PWS; i++) begin
        prod[i] <= str4[i] * FIB_CONST;
        hash[i] <= prod[i][31 -: P_HASH_BITS];
      end
    end
  end
endmodule
