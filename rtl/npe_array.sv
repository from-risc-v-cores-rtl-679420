// npe_array -- the vector of Neural Processing Elements of one core, working in
// lock-step on a single instruction stream, plus their data-memory port.
//
// The loop controller presents one instruction at a time (valid/ready). An
// instruction is accepted when no NPE reports a read-after-write hazard; all
// NPEs see the same instruction, so they stall together. The array keeps a
// copy of the instruction in stage 1 and drives the data memory's port B from
// it: an LD reads the word at `addr` (NPE i takes lane i, bits 16i+15:16i) and
// an ST writes the word, lane i from NPE i's rs1.
//
// Timing: an accepted instruction enters stage 1 on the next clock edge; its
// port-B access happens in that cycle; its result is written to the NPE
// registers four cycles after acceptance. `busy` is high while any instruction
// is in flight. `stall` is high in a cycle where an instruction waits on a
// hazard.
//
// From the architecture: eight NPEs executing the same instructions on
// different data, sharing a port of width 16 x (number of NPEs) bits. This
// design's own: the handshake and the lane-to-NPE mapping.
module npe_array
  import seneca_pkg::*;
#(
  parameter int unsigned N    = N_NPE,
  parameter int unsigned NREG = 16,
  parameter int unsigned B_AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction stream
  input  logic              in_valid,
  output logic              in_ready,
  input  npe_instr_t        in_instr,
  // data memory port B
  output logic              b_en,
  output logic              b_we,
  output logic [B_AW-1:0]   b_addr,
  output logic [16*N-1:0]   b_wdata,
  input  logic [16*N-1:0]   b_rdata,
  // status
  output logic [N-1:0]      flags,
  output logic              busy,
  output logic              stall
);
  logic [N-1:0] hz, bz;
  logic         issue;
  npe_op_e      s1_op;
  logic         s1_valid;
  logic [MEM_AW-1:0] s1_addr;

  assign in_ready = ~|hz;
  assign issue    = in_valid && in_ready;
  assign stall    = in_valid && !in_ready;
  assign busy     = |bz;

  for (genvar i = 0; i < N; i++) begin : g_npe
    npe #(.NREG(NREG)) u_npe (
      .clk       (clk),
      .rst_n     (rst_n),
      .issue     (issue),
      .instr     (in_instr),
      .hazard    (hz[i]),
      .mem_rdata (b_rdata[16*i +: 16]),
      .st_data   (b_wdata[16*i +: 16]),
      .flag      (flags[i]),
      .busy      (bz[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_op    <= NPE_NOP;
      s1_addr  <= '0;
    end else begin
      s1_valid <= issue;
      if (issue) begin
        s1_op   <= in_instr.op;
        s1_addr <= in_instr.addr;
      end
    end
  end

  assign b_en   = s1_valid && (s1_op == NPE_LD || s1_op == NPE_LDQ || s1_op == NPE_ST);
  assign b_we   = s1_valid && (s1_op == NPE_ST);
  assign b_addr = s1_addr[B_AW-1:0];

  // All NPEs run the same program, so their hazard decisions must agree.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (hz == '0) || (hz == '1));
endmodule
