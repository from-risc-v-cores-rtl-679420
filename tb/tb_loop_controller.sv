// tb_loop_controller -- self-checking testbench of the loop controller.
//
// Loads, through the register interface, a program with two nested loops
// that end on the same instruction, address registers with post-increment,
// a parameter-register immediate and an ADDAR, runs it against an NPE stub
// and compares the issued NPE instruction stream (op, registers, address,
// immediate) with the sequence the program must produce, unrolled in the
// testbench. Run 1: the stub is always ready; the loops must add no cycle
// (start to done = one cycle per executed program instruction plus two).
// Run 2: the stub accepts at random and reports busy for a while after the
// last instruction; the stream must be unchanged, the stall counter must
// equal the cycles the stub refused, and done must wait for the stub.
module tb_loop_controller;
  import seneca_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [7:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic done_irq, busy;
  logic npe_valid, npe_ready = 1, npe_busy = 0;
  npe_instr_t npe_instr;
  logic [7:0] npe_flags = 8'hA5;
  int checks = 0, failures = 0;
  npe_instr_t got [$];
  npe_instr_t exp_q [$];
  int refused = 0;
  logic random_ready = 0;

  always #5 clk = ~clk;
  loop_controller dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // NPE stub
  always @(posedge clk) if (rst_n) begin
    if (npe_valid && npe_ready) got.push_back(npe_instr);
    if (npe_valid && !npe_ready) refused++;
  end
  always @(negedge clk) npe_ready = random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 8'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk);
    cfg_addr = 8'(a);
    #1 d = cfg_rdata;
  endtask

  function automatic lc_instr_t li(lc_op_e op, npe_op_e nop, int rd_, int rs1, int rs2, int ar, logic psel, int inc, int imm);
    lc_instr_t i;
    i = '0; i.op = op; i.nop = nop; i.rd = 4'(rd_); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2);
    i.ar = 3'(ar); i.psel = psel; i.inc = 8'(inc); i.imm = 16'(imm);
    return i;
  endfunction

  task automatic load(int e, lc_instr_t i);
    logic [63:0] w;
    w = 64'(i);
    wr(2 * e, w[31:0]);
    wr(2 * e + 1, w[63:32]);
  endtask

  function automatic npe_instr_t ni(npe_op_e op, int rd_, int rs1, int rs2, int addr, int imm);
    npe_instr_t i;
    i = '0; i.op = op; i.rd = 4'(rd_); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2);
    i.addr = 16'(addr); i.imm = 16'(imm);
    return i;
  endfunction

  task automatic run_and_check(string tag, output int cycles);
    logic [31:0] d;
    int t0;
    got.delete();
    refused = 0;
    @(negedge clk);
    cfg_we = 1; cfg_addr = 8'h50; cfg_wdata = 1;
    @(negedge clk);
    cfg_we = 0;
    t0 = 0;
    while (!done_irq) begin @(negedge clk); t0++; end
    cycles = t0 + 1;
    check({tag, " stream length"}, got.size() == exp_q.size());
    for (int k = 0; k < exp_q.size() && k < got.size(); k++)
      check($sformatf("%s instr %0d: %p vs %p", tag, k, got[k], exp_q[k]), got[k] == exp_q[k]);
    rd(8'h51, d); check({tag, " issue counter"}, d == 32'(exp_q.size()));
    rd(8'h52, d); check($sformatf("%s stall counter %0d vs %0d", tag, d, refused), d == 32'(refused));
    rd(8'h53, d); check($sformatf("%s loop jumps %0d", tag, d), d == 32'd5);
    rd(8'h50, d); check({tag, " status done, flags"}, d[1:0] == 2'b10 && d[15:8] == 8'hA5);
    rd(8'h48, d); check({tag, " AR0 final"}, d == 32'd113);
  endtask

  initial begin
    logic [31:0] d;
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(8'h40, 32'h0000_3F80);     // PARAM0: spike value 1.0
    wr(8'h41, 32'd200);           // PARAM1: state base address
    load(0, li(LC_SETAR, NPE_NOP, 0, 0, 0, 0, 0, 0, 10));
    load(1, li(LC_SETAR, NPE_NOP, 0, 0, 0, 1, 1, 0, 1));
    load(2, li(LC_LOOP,  NPE_NOP, 0, 0, 0, 0, 0, 4, 3));
    load(3, li(LC_NPE,   NPE_LD,  1, 0, 0, 0, 0, 1, 0));
    load(4, li(LC_LOOP,  NPE_NOP, 0, 0, 0, 0, 0, 2, 2));
    load(5, li(LC_NPE,   NPE_MAC, 2, 1, 3, 1, 1, 2, 0));
    load(6, li(LC_NPE,   NPE_ST,  0, 2, 0, 1, 0, -1, 0));
    load(7, li(LC_ADDAR, NPE_NOP, 0, 0, 0, 0, 0, 0, 100));
    load(8, li(LC_NPE,   NPE_LDI, 7, 0, 0, 0, 0, 0, 16'h4000));
    load(9, li(LC_END,   NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
    rd(7, d);
    check("program read back", d[14:0] == 15'(64'(li(LC_NPE, NPE_LD, 1, 0, 0, 0, 0, 1, 0)) >> 32));

    // expected stream, unrolled by hand from the program above
    begin
      int a0, a1;
      a0 = 10; a1 = 200;
      for (int o = 0; o < 3; o++) begin
        exp_q.push_back(ni(NPE_LD, 1, 0, 0, a0, 0)); a0 += 1;
        for (int i = 0; i < 2; i++) begin
          exp_q.push_back(ni(NPE_MAC, 2, 1, 3, a1, 16'h3F80)); a1 += 2;
          exp_q.push_back(ni(NPE_ST, 0, 2, 0, a1, 0));         a1 -= 1;
        end
      end
      a0 += 100;
      exp_q.push_back(ni(NPE_LDI, 7, 0, 0, a0, 16'h4000));
    end

    // run 1: always ready, zero-overhead loops
    run_and_check("run1", cyc);
    // executed instructions: 2 SETAR + 1 LOOP + 3 x (LD + LOOP + 4) + ADDAR + LDI + END = 24,
    // then one drain cycle, then done: 26 cycles from the start write
    check($sformatf("run1 start-to-done %0d cycles, expected 26", cyc), cyc == 26);

    // run 2: random ready, busy NPEs at the end
    random_ready = 1;
    fork
      run_and_check("run2", cyc);
      begin
        wait (busy && dut.cur.op == LC_END);
        npe_busy = 1;
        repeat (5) @(negedge clk);
        check("not done while NPEs are busy", !done_irq && busy);
        npe_busy = 0;
      end
    join
    check("run2 saw refusals", refused > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
