// loop_controller -- the middle level of the core's control hierarchy
// (RISC-V -> loop controller -> NPEs).
//
// Neural-network kernels are small nested loops around a handful of NPE
// instructions. Instead of having the RISC-V fetch, decode and hand over each
// of those instructions, the RISC-V writes the loop body once into this
// controller's small register-file program memory, sets a few registers and
// starts it. The controller then runs the loops itself, computes the data
// memory address of every NPE load/store, and streams the instructions to
// the NPE array, one per cycle when the NPEs accept them.
//
// Program (seneca_pkg::lc_instr_t, 47 bits, PROG_DEPTH entries):
//   LC_NPE   issue NPE op {nop, rd, rs1, rs2} with addr = AR[ar] and
//            imm = (psel ? PARAM[imm[2:0]] : imm); then AR[ar] += sext(inc)
//   LC_LOOP  run the next `inc` instructions `imm` times (imm = 0 skips them);
//            loops nest up to LOOP_DEPTH deep and may end on the same
//            instruction; jumping back costs no cycle
//   LC_SETAR AR[ar] <- psel ? PARAM[imm[2:0]] : imm
//   LC_ADDAR AR[ar] <- AR[ar] + imm
//   LC_END   wait until the NPE pipelines are empty, then raise done
// A zero-count loop, or a LOOP instruction, must not be the last instruction
// of an enclosing loop body.
//
// RISC-V register interface (word index cfg_addr, write with cfg_we, read
// combinationally on cfg_rdata):
//   0x00-0x3F program: entry cfg_addr[5:1], cfg_addr[0] = 0 low 32 bits,
//             1 high 15 bits
//   0x40+i    PARAM[i] (16 bits): spike values, base addresses, constants
//   0x48+i    AR[i] (16 bits): address registers
//   0x50      write bit0 = 1: start at entry 0. read: {npe_flags, 6'b0, done, busy}
//   0x51/52/53 counters: NPE instructions issued, cycles stalled on the NPEs,
//             loop jumps taken (cleared on start)
// `done_irq` pulses for one cycle when a program ends.
//
// From the architecture: a separate controller with its own small
// register-file instruction memory, programmed by the RISC-V, handling loop
// indexes, nested loops and address calculation and feeding the NPEs. This
// design's own: the instruction set and encoding, the register map, the
// number of registers, entries and nesting levels.
module loop_controller
  import seneca_pkg::*;
#(
  parameter int unsigned PROG_DEPTH = 32,
  parameter int unsigned N_AR       = 8,
  parameter int unsigned N_PARAM    = 8,
  parameter int unsigned LOOP_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // RISC-V side
  input  logic              cfg_we,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  output logic              done_irq,
  output logic              busy,
  // NPE side
  output logic              npe_valid,
  input  logic              npe_ready,
  output npe_instr_t        npe_instr,
  input  logic              npe_busy,
  input  logic [N_NPE-1:0]  npe_flags
);
  localparam int unsigned PW = $clog2(PROG_DEPTH);
  localparam int unsigned SW = $clog2(LOOP_DEPTH + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  lc_instr_t   prog   [PROG_DEPTH];
  logic [15:0] param  [N_PARAM];
  logic [15:0] ar     [N_AR];
  logic [PW-1:0] stk_start [LOOP_DEPTH];
  logic [PW-1:0] stk_end   [LOOP_DEPTH];
  logic [15:0]   stk_rem   [LOOP_DEPTH];
  logic [SW-1:0] sp;
  logic [PW-1:0] pc;
  state_e        state;
  logic          done;
  logic [31:0]   cnt_issue, cnt_stall, cnt_jump;

  lc_instr_t cur;
  logic [15:0] imm_val;
  assign cur     = prog[pc];
  assign imm_val = cur.psel ? param[cur.imm[$clog2(N_PARAM)-1:0]] : cur.imm;
  assign busy    = state != S_IDLE;

  // ----------------------------------------------------- NPE instruction
  always_comb begin
    npe_valid       = (state == S_RUN) && (cur.op == LC_NPE);
    npe_instr.op    = cur.nop;
    npe_instr.rd    = cur.rd;
    npe_instr.rs1   = cur.rs1;
    npe_instr.rs2   = cur.rs2;
    npe_instr.addr  = ar[cur.ar[$clog2(N_AR)-1:0]];
    npe_instr.imm   = imm_val;
  end

  // ------------------------------------------------ sequencing (advance)
  logic          step;           // current instruction completes this cycle
  logic [PW-1:0] adv_pc;
  logic [SW-1:0] adv_sp;
  logic          adv_jump;
  logic [$clog2(LOOP_DEPTH)-1:0] adv_lvl;

  always_comb begin
    logic stop;
    adv_pc   = pc + 1'b1;
    adv_sp   = sp;
    adv_jump = 1'b0;
    adv_lvl  = '0;
    stop     = 1'b0;
    for (int k = LOOP_DEPTH - 1; k >= 0; k--) begin
      if (!stop && k < int'(sp)) begin
        if (stk_end[k] == pc) begin
          if (stk_rem[k] > 16'd1) begin
            adv_pc   = stk_start[k];
            adv_sp   = SW'(k + 1);
            adv_jump = 1'b1;
            adv_lvl  = $clog2(LOOP_DEPTH)'(k);
            stop     = 1'b1;
          end else begin
            adv_sp = SW'(k);           // innermost finished loop: pop
          end
        end else begin
          stop = 1'b1;
        end
      end
    end
  end

  always_comb begin
    step = 1'b0;
    if (state == S_RUN) begin
      unique case (cur.op)
        LC_NPE:  step = npe_ready;
        LC_SETAR, LC_ADDAR: step = 1'b1;
        default: step = 1'b0;          // LOOP and END handled separately
      endcase
    end
  end

  // --------------------------------------------------------- cfg read
  always_comb begin
    cfg_rdata = '0;
    if (cfg_addr < 8'h40) begin
      if (cfg_addr[0]) cfg_rdata = 32'(prog[cfg_addr[PW:1]][LC_INSTR_W-1:32]);
      else             cfg_rdata = prog[cfg_addr[PW:1]][31:0];
    end else if (cfg_addr < 8'h48) cfg_rdata = {16'd0, param[cfg_addr[$clog2(N_PARAM)-1:0]]};
    else if (cfg_addr < 8'h50)     cfg_rdata = {16'd0, ar[cfg_addr[$clog2(N_AR)-1:0]]};
    else if (cfg_addr == 8'h50)    cfg_rdata = {16'd0, 8'(npe_flags), 6'd0, done, busy};
    else if (cfg_addr == 8'h51)    cfg_rdata = cnt_issue;
    else if (cfg_addr == 8'h52)    cfg_rdata = cnt_stall;
    else if (cfg_addr == 8'h53)    cfg_rdata = cnt_jump;
  end

  // -------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PROG_DEPTH; i++) prog[i] <= '0;
      for (int i = 0; i < N_PARAM; i++)    param[i] <= '0;
      for (int i = 0; i < N_AR; i++)       ar[i] <= '0;
      for (int i = 0; i < LOOP_DEPTH; i++) begin
        stk_start[i] <= '0; stk_end[i] <= '0; stk_rem[i] <= '0;
      end
      sp        <= '0;
      pc        <= '0;
      state     <= S_IDLE;
      done      <= 1'b0;
      done_irq  <= 1'b0;
      cnt_issue <= '0;
      cnt_stall <= '0;
      cnt_jump  <= '0;
    end else begin
      done_irq <= 1'b0;

      // RISC-V writes
      if (cfg_we) begin
        if (cfg_addr < 8'h40) begin
          if (cfg_addr[0]) prog[cfg_addr[PW:1]][LC_INSTR_W-1:32] <= cfg_wdata[LC_INSTR_W-33:0];
          else             prog[cfg_addr[PW:1]][31:0]            <= cfg_wdata;
        end else if (cfg_addr < 8'h48) param[cfg_addr[$clog2(N_PARAM)-1:0]] <= cfg_wdata[15:0];
        else if (cfg_addr < 8'h50)     ar[cfg_addr[$clog2(N_AR)-1:0]]       <= cfg_wdata[15:0];
        else if (cfg_addr == 8'h50 && cfg_wdata[0] && state == S_IDLE) begin
          state     <= S_RUN;
          pc        <= '0;
          sp        <= '0;
          done      <= 1'b0;
          cnt_issue <= '0;
          cnt_stall <= '0;
          cnt_jump  <= '0;
        end
      end

      if (state == S_RUN) begin
        if (npe_valid && npe_ready)  cnt_issue <= cnt_issue + 1;
        if (npe_valid && !npe_ready) cnt_stall <= cnt_stall + 1;

        unique case (cur.op)
          LC_END: state <= S_DRAIN;
          LC_LOOP: begin
            if (cur.imm == 16'd0 || cur.inc == 8'd0) begin
              pc <= pc + PW'(cur.inc) + 1'b1;
            end else begin
              if (int'(sp) < LOOP_DEPTH) begin
                stk_start[sp[$clog2(LOOP_DEPTH)-1:0]] <= pc + 1'b1;
                stk_end[sp[$clog2(LOOP_DEPTH)-1:0]] <= pc + PW'(cur.inc);
                stk_rem[sp[$clog2(LOOP_DEPTH)-1:0]] <= cur.imm;
                sp            <= sp + 1'b1;
              end
              pc <= pc + 1'b1;
            end
          end
          default: ;
        endcase

        if (step) begin
          pc <= adv_pc;
          sp <= adv_sp;
          if (adv_jump) begin
            stk_rem[adv_lvl] <= stk_rem[adv_lvl] - 1'b1;
            cnt_jump         <= cnt_jump + 1;
          end
          unique case (cur.op)
            LC_NPE:   ar[cur.ar[$clog2(N_AR)-1:0]] <= ar[cur.ar[$clog2(N_AR)-1:0]] + {{8{cur.inc[7]}}, cur.inc};
            LC_SETAR: ar[cur.ar[$clog2(N_AR)-1:0]] <= imm_val;
            LC_ADDAR: ar[cur.ar[$clog2(N_AR)-1:0]] <= ar[cur.ar[$clog2(N_AR)-1:0]] + cur.imm;
            default: ;
          endcase
        end
      end

      if (state == S_DRAIN && !npe_busy) begin
        state    <= S_IDLE;
        done     <= 1'b1;
        done_irq <= 1'b1;
      end
    end
  end

  a_no_stack_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN && cur.op == LC_LOOP && cur.imm != 0 && cur.inc != 0) |-> (int'(sp) < LOOP_DEPTH));
endmodule
