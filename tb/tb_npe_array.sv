// tb_npe_array -- self-checking testbench of the eight-NPE vector.
//
// A behavioural port-B memory (one-cycle synchronous read) holds random
// weight rows and neuron states. The testbench streams the event-driven
// update of a fully connected layer for a graded spike: for each weight row
// w, load the row (one weight per NPE), broadcast the spike value, load the
// neuron states, MAC, store the states back. Afterwards every lane of every
// state word is compared with a real-arithmetic model. It also checks that
// independent instructions are accepted one per cycle and that a dependent
// instruction holds `in_ready` low (stall) while its operand is in flight.
module tb_npe_array;
  import seneca_pkg::*;
  import bf16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  npe_instr_t in_instr;
  logic b_en, b_we;
  logic [13:0] b_addr;
  logic [127:0] b_wdata, b_rdata;
  logic [7:0] flags;
  logic busy, stall;
  logic [127:0] mem [256];
  logic [127:0] model [256];
  int checks = 0, failures = 0, stall_cycles = 0;

  always #5 clk = ~clk;
  npe_array dut (.*);

  always_ff @(posedge clk) begin
    if (b_en && b_we)  mem[b_addr[7:0]] <= b_wdata;
    if (b_en && !b_we) b_rdata <= mem[b_addr[7:0]];
  end
  always @(posedge clk) if (stall) stall_cycles++;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic npe_instr_t mk(npe_op_e op, int rd, int rs1, int rs2, int addr, bf16_t imm);
    npe_instr_t i;
    i = '0; i.op = op; i.rd = 4'(rd); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2);
    i.addr = 16'(addr); i.imm = imm;
    return i;
  endfunction

  // send one instruction; returns the cycles it waited (called at negedge)
  task automatic send(npe_instr_t i, output int waited);
    waited = 0;
    in_valid = 1; in_instr = i;
    #1;
    while (!in_ready) begin waited++; @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int w8;
    bf16_t spike;
    in_instr = '0;
    for (int a = 0; a < 256; a++) begin
      for (int l = 0; l < 8; l++) mem[a][16*l +: 16] = rnd_bf(6);
      model[a] = mem[a];
    end
    b_rdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // one spike with value `spike` updates 8 x 16 neurons (states at 100..115)
    spike = rnd_bf(3);
    for (int w = 0; w < 16; w++) begin
      send(mk(NPE_LD, 1, 0, 0, w, '0), w8);
      send(mk(NPE_LDI, 2, 0, 0, 0, spike), w8);
      send(mk(NPE_LD, 3, 0, 0, 100 + w, '0), w8);
      send(mk(NPE_MAC, 3, 1, 2, 0, '0), w8);
      check("MAC waits for its loads", w8 == 3);
      send(mk(NPE_ST, 0, 3, 0, 100 + w, '0), w8);
      check("ST waits for MAC", w8 == 3);
      for (int l = 0; l < 8; l++)
        model[100 + w][16*l +: 16] = ref_add(model[100 + w][16*l +: 16],
                                             ref_mul(model[w][16*l +: 16], spike));
    end
    wait (!busy);
    @(negedge clk);
    for (int w = 0; w < 16; w++)
      for (int l = 0; l < 8; l++)
        check($sformatf("state word %0d lane %0d: %h vs %h", w, l, mem[100 + w][16*l +: 16], model[100 + w][16*l +: 16]),
              bf_eq(mem[100 + w][16*l +: 16], model[100 + w][16*l +: 16]));

    // throughput: 8 independent instructions, one per cycle
    begin
      int t0, t1, tot;
      tot = 0;
      t0 = $time;
      for (int r = 4; r < 12; r++) begin send(mk(NPE_LDI, r, 0, 0, 0, 16'h3F80), w8); tot += w8; end
      t1 = $time;
      check($sformatf("8 independent instructions in %0d time units", t1 - t0), tot == 0 && (t1 - t0) == 8 * 10);
    end
    // threshold in every NPE: states >= 1.0 fire
    send(mk(NPE_LD, 5, 0, 0, 100, '0), w8);
    send(mk(NPE_THR, 6, 5, 4, 0, '0), w8);
    wait (!busy);
    @(negedge clk);
    for (int l = 0; l < 8; l++)
      check($sformatf("flag lane %0d", l), flags[l] == (bf2r(model[100][16*l +: 16]) >= 1.0));
    check("stalls observed", stall_cycles > 0);
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
