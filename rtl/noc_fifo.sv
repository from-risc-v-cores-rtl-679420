// noc_fifo -- small synchronous FIFO with valid/ready on both sides, used at
// every router input and between the router and the RISC-V controller.
//
// `in_ready` is low exactly when the FIFO is full (it does not look at
// `out_ready`, so no combinational path runs from a FIFO's output back to its
// input and a ring of routers forms no loop); `out_valid` is high whenever it
// holds an entry, and `out_data` is then the oldest entry. Push and pop may
// happen in the same cycle. Data written is visible at the output one cycle
// later (no fall-through).
// Depth and handshake are this design's own choice.
module noc_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = count < (AW+1)'(DEPTH);
  assign out_valid = count != '0;
  assign out_data  = mem[rd_ptr];
  assign pop       = out_valid && out_ready;
  assign push      = in_valid && in_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= in_data;
        wr_ptr      <= inc(wr_ptr);
      end
      if (pop) rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
