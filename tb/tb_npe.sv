// tb_npe -- self-checking testbench of one NPE.
//
// Runs random sequences of LDI, LD, LDQ, ADD, SUB, MUL, MAC, MAX and THR on random
// BF16 operands, keeps a model of the 16 registers computed with real
// arithmetic (bf16_ref_pkg), and after every operation stores the destination
// register (ST) and compares the store data with the model. Each store
// depends on the instruction just issued, so it must wait on the hazard
// interlock: the testbench checks it waits exactly three cycles (four pipeline
// stages, write-back at the end of the fourth). Directed cases cover overflow
// to infinity, flush to zero, exact cancellation and the THR spike flag.
module tb_npe;
  import seneca_pkg::*;
  import bf16_ref_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       issue = 0;
  npe_instr_t instr;
  logic       hazard, flag, busy;
  bf16_t      mem_rdata, st_data;
  int         checks = 0, failures = 0;
  bf16_t      model [16];
  int         n_stall_events = 0;

  always #5 clk = ~clk;

  npe dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // present an instruction at a negative edge, wait out hazards, issue it
  // (called at a negative edge)
  task automatic exec(npe_instr_t i, output int stalls);
    stalls = 0;
    instr = i;
    #1;
    while (hazard) begin
      stalls++;
      @(negedge clk);
      #1;
    end
    issue = 1;
    @(negedge clk);
    issue = 0;
    instr = '0;
  endtask

  function automatic npe_instr_t mk(npe_op_e op, int rd, int rs1, int rs2, bf16_t imm);
    npe_instr_t i;
    i      = '0;
    i.op   = op;
    i.rd   = 4'(rd);
    i.rs1  = 4'(rs1);
    i.rs2  = 4'(rs2);
    i.imm  = imm;
    return i;
  endfunction

  // store register r and compare with the model; expect `exp_stalls` stalls
  task automatic check_reg(int r, int exp_stalls, string what);
    int st;
    npe_instr_t i;
    i = mk(NPE_ST, 0, r, 0, '0);
    // exec returns at the negedge after issue: ST is in stage 1 now
    exec(i, st);
    check($sformatf("%s r%0d = %h expected %h", what, r, st_data, model[r]), bf_eq(st_data, model[r]));
    if (exp_stalls >= 0) begin
      check($sformatf("%s stall cycles %0d expected %0d", what, st, exp_stalls), st == exp_stalls);
      if (st > 0) n_stall_events++;
    end
  endtask

  // the integer that LDQ must take from a lane, worked out arithmetically
  function automatic int qint(bf16_t lane, logic [2:0] sel);
    int u;
    if (sel[2]) begin
      u = (int'(lane) >> (8 * int'(sel[0]))) % 256;
      return u >= 128 ? u - 256 : u;
    end
    u = (int'(lane) >> (4 * int'(sel[1:0]))) % 16;
    return u >= 8 ? u - 16 : u;
  endfunction

  task automatic do_op(npe_op_e op, int rd, int rs1, int rs2, bf16_t v);
    int st;
    bf16_t a, b, c, r, lane;
    lane = '0;
    a = model[rs1]; b = model[rs2]; c = model[rd];
    unique case (op)
      NPE_LDI: r = v;
      NPE_LD:  r = v;
      NPE_LDQ: begin
        lane = 16'($urandom);
        r = r2bf(real'(qint(lane, v[2:0])));
      end
      NPE_ADD: r = ref_add(a, b);
      NPE_SUB: r = ref_add(a, {~b[15], b[14:0]});
      NPE_MUL: r = ref_mul(a, b);
      NPE_MAC: r = ref_add(c, ref_mul(a, b));
      NPE_MAX: r = (bf2r(a) >= bf2r(b)) ? a : b;
      NPE_THR: r = (bf2r(a) >= bf2r(b)) ? 16'd0 : a;
      default: r = c;
    endcase
    if (op == NPE_LD) mem_rdata = v;
    if (op == NPE_LDQ) mem_rdata = lane;
    exec(mk(op, rd, rs1, rs2, v), st);
    model[rd] = r;
    check_reg(rd, 3, op.name());
    if (op == NPE_THR) begin
      wait (!busy);
      @(negedge clk);
      check("THR flag", flag == (bf2r(a) >= bf2r(b)));
    end
  endtask

  initial begin
    static npe_op_e ops [9] = '{NPE_LDI, NPE_LD, NPE_ADD, NPE_SUB, NPE_MUL, NPE_MAC, NPE_MAX, NPE_THR, NPE_LDQ};
    instr = '0;
    mem_rdata = '0;
    for (int i = 0; i < 16; i++) model[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // fill the registers
    for (int r = 0; r < 16; r++) do_op(NPE_LDI, r, 0, 0, rnd_bf(20));

    // directed corner cases
    do_op(NPE_LDI, 1, 0, 0, 16'h7E00);           // 2^125 * 1.0...
    do_op(NPE_MUL, 2, 1, 1, '0);                  // overflow -> +inf
    check("overflow gives infinity", model[2] == 16'h7F80);
    do_op(NPE_LDI, 3, 0, 0, 16'h0100);           // 2^-125
    do_op(NPE_MUL, 4, 3, 3, '0);                  // underflow -> 0
    check("underflow flushes to zero", model[4][14:0] == 0);
    do_op(NPE_LDI, 5, 0, 0, 16'h3FC0);           // 1.5
    do_op(NPE_SUB, 6, 5, 5, '0);                  // exact cancellation -> 0
    do_op(NPE_LDI, 7, 0, 0, 16'h3F80);           // 1.0
    do_op(NPE_LDI, 8, 0, 0, 16'h3B80);           // 2^-8: 1 + 2^-8 is a tie, stays 1.0
    do_op(NPE_ADD, 9, 7, 8, '0);
    check("tie rounds to even", model[9] == 16'h3F80);
    do_op(NPE_THR, 10, 5, 7, '0);                 // 1.5 >= 1.0 -> fires, reset to 0
    do_op(NPE_THR, 11, 7, 5, '0);                 // no fire

    // low-resolution weights: every int4 and every int8 value
    for (int q = -8; q < 8; q++) begin
      int st;
      mem_rdata = {4{4'(q)}};
      exec(mk(NPE_LDQ, 12, 0, 0, 16'($urandom_range(0, 3))), st);
      model[12] = r2bf(real'(q));
      check_reg(12, 3, "LDQ int4");
    end
    for (int q = -128; q < 128; q++) begin
      int st;
      logic s;
      s = 1'($urandom);
      mem_rdata = s ? {8'(q), 8'($urandom)} : {8'($urandom), 8'(q)};
      exec(mk(NPE_LDQ, 13, 0, 0, {13'd0, 2'b10, s}), st);
      model[13] = r2bf(real'(q));
      check_reg(13, 3, "LDQ int8");
    end

    // random operations (registers drifting far from 1.0 are reloaded first,
    // so that the model never meets infinities)
    for (int r = 0; r < 16; r++) do_op(NPE_LDI, r, 0, 0, rnd_bf(20));
    for (int n = 0; n < 600; n++) begin
      npe_op_e op;
      op = ops[$urandom_range(0, 8)];
      for (int r = 0; r < 16; r++)
        if (model[r][14:7] > 8'd187 || (model[r][14:7] < 8'd67 && model[r][14:7] != 0))
          do_op(NPE_LDI, r, 0, 0, rnd_bf(20));
      do_op(op, $urandom_range(0, 15), $urandom_range(0, 15), $urandom_range(0, 15), rnd_bf(20));
    end

    // independent instructions issue back to back (no stall)
    begin
      int s0, s1, s2;
      exec(mk(NPE_LDI, 12, 0, 0, 16'h4000), s0);
      exec(mk(NPE_LDI, 13, 0, 0, 16'h4040), s1);
      exec(mk(NPE_ADD, 14, 0, 1, '0), s2);
      model[12] = 16'h4000; model[13] = 16'h4040; model[14] = ref_add(model[0], model[1]);
      check("independent instructions do not stall", s0 == 0 && s1 == 0 && s2 == 0);
      exec(mk(NPE_ADD, 15, 12, 13, '0), s2);     // depends on LDI issued two before
      model[15] = ref_add(model[12], model[13]);
      check($sformatf("partial hazard stall %0d expected 2", s2), s2 == 2);
      check_reg(15, 3, "ADD 2+3");
      check("2 + 3 = 5", model[15] == 16'h40A0);
    end

    check("hazard stalls seen", n_stall_events > 600);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
