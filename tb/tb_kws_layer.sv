// tb_kws_layer -- workload testbench: the first fully connected layer of a
// keyword-spotting network (390 inputs x 256 neurons, BF16 weights) held in
// one full-size core, updated event by event, with and without spike grouping.
//
// The 390 x 256 weights take 390 x 32 port-B words (12,480 of the 16,384 in
// the 2 Mb data memory); two copies of the 256 neuron states follow them.
// The testbench, acting as the RISC-V, loads everything through the data
// port, then feeds the same 40 graded input spikes (about 10 % of the inputs
// active) twice:
//   ungrouped  one program run per spike: for each of the 32 state words,
//              load weights, load state, MAC, store state
//   grouped    one program run per four spikes: for each state word, load
//              four weight words and the state once, four MACs, store once
// A third pass keeps the weights as signed 4-bit integers (four rows per
// port-B word, a quarter of the memory), loads them with LDQ, which converts
// to BF16, and applies the weight scale through the spike value.
// All must give exactly the states of a real-arithmetic model (the MACs of
// each neuron happen in the same order either way). The testbench counts
// the cycles from start to done and the port-B accesses of both variants and
// checks that grouping four spikes halves the memory accesses per spike
// (3 per state word and spike ungrouped, 6 per word for four spikes grouped)
// and takes fewer cycles.
module tb_kws_layer;
  import seneca_pkg::*;
  import bf16_ref_pkg::*;

  localparam int NIN  = 390;
  localparam int NW   = 32;              // 256 neurons = 32 words of 8
  localparam int SB_U = NIN * NW;        // states, ungrouped run
  localparam int SB_G = NIN * NW + NW;   // states, grouped run
  localparam int NEV  = 40;
  localparam int WQ   = NIN * NW + 2 * NW;          // 4-bit weights, 4 rows per word
  localparam int NQW  = (NIN + 3) / 4 * NW;
  localparam int SB_Q = WQ + NQW;                   // states, 4-bit run
  localparam int unsigned LCB = 32'h4_0000;

  logic clk = 0, rst_n = 0;
  logic        instr_req = 0;
  logic [12:0] instr_addr = '0;
  logic [31:0] instr_rdata;
  logic        imem_we = 0;
  logic [12:0] imem_waddr = '0;
  logic [31:0] imem_wdata = '0;
  dbus_req_t   dreq;
  dbus_rsp_t   drsp;
  logic        irq;
  logic   [3:0] mesh_in_valid = '0, mesh_in_ready, mesh_out_valid, mesh_out_ready = '1;
  spike_t [3:0] mesh_in_flit, mesh_out_flit;

  seneca_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int b_acc = 0;
  always @(posedge clk) if (rst_n && dut.b_en) b_acc++;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bus(logic we, int unsigned addr, logic [31:0] wd, output logic [31:0] rd_);
    dreq.req = 1; dreq.we = we; dreq.addr = addr; dreq.wdata = wd;
    #1;
    while (!drsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq.req = 0;
    rd_ = drsp.rdata;
  endtask
  task automatic wr(int unsigned addr, logic [31:0] wd);
    logic [31:0] dummy;
    bus(1, addr, wd, dummy);
  endtask
  task automatic rd(int unsigned addr, output logic [31:0] d);
    bus(0, addr, '0, d);
  endtask

  function automatic lc_instr_t li(lc_op_e op, npe_op_e nop, int rd_, int rs1, int rs2, int ar, logic psel, int inc, int imm);
    lc_instr_t i;
    i = '0; i.op = op; i.nop = nop; i.rd = 4'(rd_); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2);
    i.ar = 3'(ar); i.psel = psel; i.inc = 8'(inc); i.imm = 16'(imm);
    return i;
  endfunction
  task automatic lc_load(int e, lc_instr_t i);
    logic [63:0] w;
    w = 64'(i);
    wr(LCB + 4 * (2 * e), w[31:0]);
    wr(LCB + 4 * (2 * e + 1), w[63:32]);
  endtask

  // one spike: PARAM0 value, PARAM1 weight row, states at SB_U
  task automatic prog_single();
    lc_load(0, li(LC_SETAR, NPE_NOP, 0, 0, 0, 0, 1, 0, 1));
    lc_load(1, li(LC_SETAR, NPE_NOP, 0, 0, 0, 1, 0, 0, SB_U));
    lc_load(2, li(LC_SETAR, NPE_NOP, 0, 0, 0, 2, 0, 0, SB_U));
    lc_load(3, li(LC_NPE, NPE_LDI, 2, 0, 0, 0, 1, 0, 0));
    lc_load(4, li(LC_LOOP, NPE_NOP, 0, 0, 0, 0, 0, 4, NW));
    lc_load(5, li(LC_NPE, NPE_LD, 1, 0, 0, 0, 0, 1, 0));
    lc_load(6, li(LC_NPE, NPE_LD, 3, 0, 0, 1, 0, 1, 0));
    lc_load(7, li(LC_NPE, NPE_MAC, 3, 1, 2, 0, 0, 0, 0));
    lc_load(8, li(LC_NPE, NPE_ST, 0, 3, 0, 2, 0, 1, 0));
    lc_load(9, li(LC_END, NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
  endtask

  // one spike with 4-bit weights: PARAM0 value x weight scale, PARAM1 row
  // group, PARAM3 nibble (row mod 4); states at SB_Q
  task automatic prog_single_q();
    lc_load(0, li(LC_SETAR, NPE_NOP, 0, 0, 0, 0, 1, 0, 1));
    lc_load(1, li(LC_SETAR, NPE_NOP, 0, 0, 0, 1, 0, 0, SB_Q));
    lc_load(2, li(LC_SETAR, NPE_NOP, 0, 0, 0, 2, 0, 0, SB_Q));
    lc_load(3, li(LC_NPE, NPE_LDI, 2, 0, 0, 0, 1, 0, 0));
    lc_load(4, li(LC_LOOP, NPE_NOP, 0, 0, 0, 0, 0, 4, NW));
    lc_load(5, li(LC_NPE, NPE_LDQ, 1, 0, 0, 0, 1, 1, 3));
    lc_load(6, li(LC_NPE, NPE_LD, 3, 0, 0, 1, 0, 1, 0));
    lc_load(7, li(LC_NPE, NPE_MAC, 3, 1, 2, 0, 0, 0, 0));
    lc_load(8, li(LC_NPE, NPE_ST, 0, 3, 0, 2, 0, 1, 0));
    lc_load(9, li(LC_END, NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
  endtask

  // four spikes: PARAM0-3 values, PARAM4-7 weight rows, states at SB_G
  task automatic prog_group4();
    for (int g = 0; g < 4; g++) begin
      lc_load(g, li(LC_SETAR, NPE_NOP, 0, 0, 0, g, 1, 0, 4 + g));
      lc_load(4 + g, li(LC_NPE, NPE_LDI, 10 + g, 0, 0, 0, 1, 0, g));
    end
    lc_load(8, li(LC_SETAR, NPE_NOP, 0, 0, 0, 4, 0, 0, SB_G));
    lc_load(9, li(LC_SETAR, NPE_NOP, 0, 0, 0, 5, 0, 0, SB_G));
    lc_load(10, li(LC_LOOP, NPE_NOP, 0, 0, 0, 0, 0, 10, NW));
    for (int g = 0; g < 4; g++)
      lc_load(11 + g, li(LC_NPE, NPE_LD, 1 + g, 0, 0, g, 0, 1, 0));
    lc_load(15, li(LC_NPE, NPE_LD, 5, 0, 0, 4, 0, 1, 0));
    for (int g = 0; g < 4; g++)
      lc_load(16 + g, li(LC_NPE, NPE_MAC, 5, 1 + g, 10 + g, 0, 0, 0, 0));
    lc_load(20, li(LC_NPE, NPE_ST, 0, 5, 0, 5, 0, 1, 0));
    lc_load(21, li(LC_END, NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
  endtask

  // the weights are generated from a hash of (row, word, lane) so that the
  // testbench needs no 100k-entry copy of them
  function automatic bf16_t wgt(int row, int w, int l);
    int unsigned h;
    h = (row * 32'd2654435761) ^ (w * 32'd40503) ^ (l * 32'd9973) ^ 32'h5bd1e995;
    h = h ^ (h >> 13);
    h = h * 32'd1274126177;
    h = h ^ (h >> 16);
    return {h[15], 8'(120 + int'(h[11:8]) % 9), h[6:0]};   // +-2^-7 .. 2^1
  endfunction

  // 4-bit weight of (row, word, lane), -8..7
  function automatic int qw(int row, int w, int l);
    bf16_t h;
    h = wgt(row, w, l);
    return int'(h[3:0]) - 8;
  endfunction

  task automatic run(output int cycles);
    logic [31:0] st;
    int t0;
    t0 = int'($time / 10);
    wr(LCB + 4 * 'h50, 1);
    do rd(LCB + 4 * 'h50, st); while (!st[1]);
    cycles = int'($time / 10) - t0;
  endtask

  initial begin
    logic [31:0] d;
    int ev_row [NEV];
    bf16_t ev_val [NEV];
    bf16_t st0 [NW][8];
    bf16_t model [NW][8];
    bf16_t model_q [NW][8];
    bf16_t ev_vq [NEV];
    int cyc, cyc_u, cyc_g, acc_u, acc_g;
    dreq = '0;
    for (int p = 0; p < 4; p++) mesh_in_flit[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // weights and two copies of the initial states, through port A
    for (int r = 0; r < NIN; r++)
      for (int w = 0; w < NW; w++)
        for (int j = 0; j < 4; j++)
          wr(4 * (4 * (NW * r + w) + j), {wgt(r, w, 2 * j + 1), wgt(r, w, 2 * j)});
    for (int w = 0; w < NW; w++) begin
      for (int l = 0; l < 8; l++) begin
        st0[w][l] = rnd_bf(1); model[w][l] = st0[w][l]; model_q[w][l] = st0[w][l];
      end
      for (int j = 0; j < 4; j++) begin
        wr(4 * (4 * (SB_U + w) + j), {st0[w][2 * j + 1], st0[w][2 * j]});
        wr(4 * (4 * (SB_G + w) + j), {st0[w][2 * j + 1], st0[w][2 * j]});
        wr(4 * (4 * (SB_Q + w) + j), {st0[w][2 * j + 1], st0[w][2 * j]});
      end
    end
    // 4-bit image: row r is nibble r mod 4 of word WQ + NW*(r/4) + w
    for (int q = 0; q < NQW / NW; q++)
      for (int w = 0; w < NW; w++)
        for (int j = 0; j < 4; j++) begin
          logic [31:0] pk;
          for (int h = 0; h < 2; h++)
            for (int n = 0; n < 4; n++)
              pk[16 * h + 4 * n +: 4] = (4 * q + n < NIN) ? 4'(qw(4 * q + n, w, 2 * j + h)) : 4'd0;
          wr(4 * (4 * (WQ + NW * q + w) + j), pk);
        end
    for (int e = 0; e < NEV; e++) begin
      ev_row[e] = $urandom_range(NIN - 1);
      ev_val[e] = rnd_bf(1);
      ev_vq[e]  = r2bf(bf2r(ev_val[e]) * 0.125);          // weight scale 1/8
      for (int w = 0; w < NW; w++)
        for (int l = 0; l < 8; l++)
          model_q[w][l] = ref_add(model_q[w][l], ref_mul(r2bf(real'(qw(ev_row[e], w, l))), ev_vq[e]));
      for (int w = 0; w < NW; w++)
        for (int l = 0; l < 8; l++)
          model[w][l] = ref_add(model[w][l], ref_mul(wgt(ev_row[e], w, l), ev_val[e]));
    end
    // spot-check the weight image through port A
    for (int k = 0; k < 8; k++) begin
      int r, w, j;
      r = $urandom_range(NIN - 1); w = $urandom_range(NW - 1); j = $urandom_range(3);
      rd(4 * (4 * (NW * r + w) + j), d);
      check("weight image", d == {wgt(r, w, 2 * j + 1), wgt(r, w, 2 * j)});
    end

    // ungrouped
    prog_single();
    cyc_u = 0;
    b_acc = 0;
    for (int e = 0; e < NEV; e++) begin
      wr(LCB + 4 * 'h40, 32'(ev_val[e]));
      wr(LCB + 4 * 'h41, NW * ev_row[e]);
      run(cyc);
      cyc_u += cyc;
    end
    acc_u = b_acc;

    // grouped by four
    prog_group4();
    cyc_g = 0;
    b_acc = 0;
    for (int e = 0; e < NEV; e += 4) begin
      for (int g = 0; g < 4; g++) begin
        wr(LCB + 4 * ('h40 + g), 32'(ev_val[e + g]));
        wr(LCB + 4 * ('h44 + g), NW * ev_row[e + g]);
      end
      run(cyc);
      cyc_g += cyc;
    end
    acc_g = b_acc;

    // 4-bit weights, one spike at a time
    begin
      int cyc_q, acc_q;
      prog_single_q();
      cyc_q = 0;
      b_acc = 0;
      for (int e = 0; e < NEV; e++) begin
        wr(LCB + 4 * 'h40, 32'(ev_vq[e]));
        wr(LCB + 4 * 'h41, WQ + NW * (ev_row[e] / 4));
        wr(LCB + 4 * 'h43, ev_row[e] % 4);
        run(cyc);
        cyc_q += cyc;
      end
      acc_q = b_acc;
      $display("4-bit:     %0d cycles, %0d port-B accesses for %0d spikes, weights in %0d words instead of %0d",
               cyc_q, acc_q, NEV, NQW, NIN * NW);
      for (int w = 0; w < NW; w++)
        for (int j = 0; j < 4; j++) begin
          rd(4 * (4 * (SB_Q + w) + j), d);
          for (int h = 0; h < 2; h++)
            check($sformatf("4-bit state %0d/%0d: %h vs %h", w, 2 * j + h, d[16 * h +: 16], model_q[w][2 * j + h]),
                  bf_eq(d[16 * h +: 16], model_q[w][2 * j + h]));
        end
    end

    for (int w = 0; w < NW; w++)
      for (int j = 0; j < 4; j++)
        for (int h = 0; h < 2; h++) begin
          logic [31:0] du, dg;
          rd(4 * (4 * (SB_U + w) + j), du);
          rd(4 * (4 * (SB_G + w) + j), dg);
          check($sformatf("ungrouped state %0d/%0d: %h vs %h", w, 2 * j + h, du[16 * h +: 16], model[w][2 * j + h]),
                bf_eq(du[16 * h +: 16], model[w][2 * j + h]));
          check($sformatf("grouped state %0d/%0d: %h vs %h", w, 2 * j + h, dg[16 * h +: 16], model[w][2 * j + h]),
                bf_eq(dg[16 * h +: 16], model[w][2 * j + h]));
        end

    $display("ungrouped: %0d cycles, %0d port-B accesses for %0d spikes", cyc_u, acc_u, NEV);
    $display("grouped:   %0d cycles, %0d port-B accesses for %0d spikes", cyc_g, acc_g, NEV);
    check("ungrouped accesses = 3 per word and spike", acc_u == 3 * NW * NEV);
    check("grouped accesses = 6 per word and 4 spikes", acc_g == 6 * NW * NEV / 4);
    check("grouping takes fewer cycles", cyc_g < cyc_u);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
