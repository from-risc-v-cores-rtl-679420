// inst_mem -- the RISC-V controller's instruction memory (256 Kb, 32-bit words).
//
// It holds the event-driven execution model and the network mapping code. The
// fetch port reads synchronously: `fetch_rdata` is valid the cycle after
// `fetch_req` and holds until the next fetch. A separate write port loads the
// program (how a program reaches the chip is outside this design).
//
// From the architecture: the 256 Kb capacity and the 32-bit instruction port
// of the Ibex core. This design's own: the load port and the read latency.
module inst_mem #(
  parameter int unsigned DEPTH = 8192,    // 256 Kb / 32
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             fetch_req,
  input  logic [AW-1:0]    fetch_addr,
  output logic [WIDTH-1:0] fetch_rdata,
  input  logic             load_we,
  input  logic [AW-1:0]    load_addr,
  input  logic [WIDTH-1:0] load_wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (load_we)   mem[load_addr] <= load_wdata;
    if (fetch_req) fetch_rdata    <= mem[fetch_addr];
  end
endmodule
