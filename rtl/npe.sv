// npe -- one Neural Processing Element: a BF16 datapath with its own register
// file and a four-stage pipeline.
//
// All NPEs of a core receive the same instruction in the same cycle (SIMD), each
// working on its own 16-bit lane of the data-memory port B and on its own
// registers. Pipeline:
//   S1  read the register file (rs1, rs2 and, for MAC, rd); an LD, LDQ or ST uses
//       port B in this cycle (the array drives the address), ST data = rs1
//   S2  BF16 multiply (rs1*rs2); the LD data returns from memory
//   S3  BF16 add/subtract (rs1+-rs2 or rd+product), compare, result select
//   S4  write the result back to rd
// A result is written at the end of S4, so an instruction that reads a
// register written by an instruction in S1, S2 or S3 must wait: `hazard` tells
// the issuing side so, for the instruction it presents. There is no
// forwarding, which is what makes back-to-back dependent operations costly.
//
// LDQ is a load of low-resolution weights: the lane holds four signed 4-bit
// (or two signed 8-bit) integers, imm[2:0] picks one, and S3 converts it to
// BF16, which is exact for every such integer (seneca_pkg::q_to_bf16).
//
// Interface: `issue` moves `instr` into S1 (the issuer checks `hazard`
// first). `mem_rdata` is this lane of port B, valid in the cycle after an LD
// is in S1. `st_data` is rs1 of the instruction in S1. `flag` is the result
// of the most recent THR (neuron fired). Reset clears registers and pipeline.
//
// From the architecture: BF16 operations, the register file, a four-stage
// pipeline that stalls on hazards, identical instructions for all NPEs. This
// design's own: the instruction set (seneca_pkg::npe_op_e), 16 registers, the
// stage split, rounding rules (see bf16_add, bf16_mul). The paper says the
// NPEs also take integer parameters; the packing and LDQ are this design's
// way of doing that. Integer or flex-point arithmetic is not built.
module npe
  import seneca_pkg::*;
#(
  parameter int unsigned NREG = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       issue,
  input  npe_instr_t instr,
  output logic       hazard,
  input  bf16_t      mem_rdata,
  output bf16_t      st_data,
  output logic       flag,
  output logic       busy
);
  typedef struct packed {
    logic                valid;
    npe_op_e             op;
    logic [NPE_RA_W-1:0] rd;
  } ctl_t;

  bf16_t rf [NREG];

  // stage registers
  ctl_t  c1, c2, c3, c4;
  npe_instr_t i1;
  bf16_t a2, b2, r2, imm2;       // S2 operands (r = old rd for MAC)
  bf16_t a3, b3, r3, imm3, p3, m3;
  bf16_t res4;

  // ---------------------------------------------------------------- hazard
  function automatic logic dep(ctl_t c, npe_instr_t n);
    return c.valid && npe_writes(c.op) &&
           ((npe_reads_rs1(n.op) && c.rd == n.rs1) ||
            (npe_reads_rs2(n.op) && c.rd == n.rs2) ||
            (npe_reads_rd(n.op)  && c.rd == n.rd));
  endfunction

  assign hazard = dep(c1, instr) || dep(c2, instr) || dep(c3, instr);
  assign busy   = c1.valid || c2.valid || c3.valid || c4.valid;

  // ------------------------------------------------------------- S1 read
  bf16_t a1, b1, r1;
  assign a1      = rf[i1.rs1[$clog2(NREG)-1:0]];
  assign b1      = rf[i1.rs2[$clog2(NREG)-1:0]];
  assign r1      = rf[i1.rd[$clog2(NREG)-1:0]];
  assign st_data = a1;

  // ---------------------------------------------------------- S2 multiply
  bf16_t prod2;
  bf16_mul u_mul (.a(a2), .b(b2), .y(prod2));

  // --------------------------------------------------------- S3 add/select
  bf16_t add_x, add_y, sum3, res3;
  logic  ge3;
  always_comb begin
    add_x = a3;
    add_y = b3;
    unique case (c3.op)
      NPE_SUB: add_y = {~b3[15], b3[14:0]};
      NPE_MAC: begin add_x = r3; add_y = p3; end
      default: ;
    endcase
  end
  bf16_add u_add (.a(add_x), .b(add_y), .y(sum3));

  always_comb begin
    ge3  = bf16_ge(a3, b3);
    res3 = sum3;
    unique case (c3.op)
      NPE_LD:  res3 = m3;
      NPE_LDQ: res3 = q_to_bf16(m3, imm3[2:0]);
      NPE_LDI: res3 = imm3;
      NPE_MUL: res3 = p3;
      NPE_MAX: res3 = ge3 ? a3 : b3;
      NPE_THR: res3 = ge3 ? 16'd0 : a3;
      default: res3 = sum3;
    endcase
  end

  // ------------------------------------------------------------ registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1   <= '0; c2 <= '0; c3 <= '0; c4 <= '0;
      i1   <= '0;
      a2   <= '0; b2 <= '0; r2 <= '0; imm2 <= '0;
      a3   <= '0; b3 <= '0; r3 <= '0; imm3 <= '0; p3 <= '0; m3 <= '0;
      res4 <= '0;
      flag <= 1'b0;
      for (int i = 0; i < NREG; i++) rf[i] <= '0;
    end else begin
      // S1
      c1 <= '{valid: issue, op: instr.op, rd: instr.rd};
      if (issue) i1 <= instr;
      // S2
      c2   <= c1;
      a2   <= a1;
      b2   <= b1;
      r2   <= r1;
      imm2 <= i1.imm;
      // S3
      c3   <= c2;
      a3   <= a2;
      b3   <= b2;
      r3   <= r2;
      imm3 <= imm2;
      p3   <= prod2;
      m3   <= mem_rdata;
      // S4
      c4   <= c3;
      res4 <= res3;
      if (c3.valid && c3.op == NPE_THR) flag <= ge3;
      // write-back
      if (c4.valid && npe_writes(c4.op))
        rf[c4.rd[$clog2(NREG)-1:0]] <= res4;
    end
  end

endmodule
