// data_mem -- the per-core data memory (synaptic weights and neuron states),
// with two ports of different widths onto the same storage.
//
// Port A is the 32-bit port of the RISC-V controller. Port B is the wide port
// of the NPE vector: 16 bits per NPE, 128 bits for eight NPEs. The storage is
// an array of port-B words; port-A word k is the 32-bit slice (k mod W) of
// port-B word (k / W), W = port-B width / 32. Both ports read synchronously:
// read data appears the cycle after the request and holds until the next read
// of that port. When both ports write the same word in one cycle, port A's
// slice takes port A's data and the rest takes port B's.
//
// From the architecture: 2 Mb capacity, port A 32 bits, port B 16 x n bits.
// This design's own: the address mapping between the ports, the one-cycle
// read latency and the write-collision rule. The array stands in for the SRAM
// macro a chip would use.
module data_mem #(
  parameter int unsigned SIZE_BITS = 2097152,   // 2 Mb
  parameter int unsigned LANES     = 8,         // NPEs on port B
  parameter int unsigned LANE_W    = 16,
  parameter int unsigned B_W       = LANES * LANE_W,
  parameter int unsigned B_WORDS   = SIZE_BITS / B_W,
  parameter int unsigned B_AW      = $clog2(B_WORDS),
  parameter int unsigned A_PER_B   = B_W / 32,
  parameter int unsigned A_AW      = B_AW + $clog2(A_PER_B)
) (
  input  logic            clk,
  // port A (RISC-V, 32 bits)
  input  logic            a_en,
  input  logic            a_we,
  input  logic [A_AW-1:0] a_addr,
  input  logic [31:0]     a_wdata,
  output logic [31:0]     a_rdata,
  // port B (NPEs, 16 x LANES bits)
  input  logic            b_en,
  input  logic            b_we,
  input  logic [B_AW-1:0] b_addr,
  input  logic [B_W-1:0]  b_wdata,
  output logic [B_W-1:0]  b_rdata
);
  logic [B_W-1:0] mem [B_WORDS];

  logic [B_AW-1:0]            a_word;
  logic [$clog2(A_PER_B)-1:0] a_slice;
  assign a_word  = a_addr[A_AW-1 -: B_AW];
  assign a_slice = a_addr[$clog2(A_PER_B)-1:0];

  always_ff @(posedge clk) begin
    if (b_en && b_we)  mem[b_addr] <= b_wdata;
    if (a_en && a_we)  mem[a_word][32*a_slice +: 32] <= a_wdata;
    if (b_en && !b_we) b_rdata <= mem[b_addr];
    if (a_en && !a_we) a_rdata <= mem[a_word][32*a_slice +: 32];
  end
endmodule
