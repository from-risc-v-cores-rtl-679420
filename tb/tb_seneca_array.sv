// tb_seneca_array -- end-to-end testbench of the full 8 x 8 mesh at its
// default sizes (64 cores, 2 Mb data memory and 256 Kb instruction memory
// each): a two-layer spiking network spread over five cores.
//
// Mapping (core (x, y), y = 0 the northern row):
//   input     graded spikes (label 1) enter the West border link of row 1
//   layer 1   32 neurons, 8 per core on (0,1) (1,1) (2,1) (3,1); the routers
//             pass each input spike East along the row and copy it into every
//             one of the four cores (multicast); fired neurons send binary
//             spikes (label 2) South, then East along row 2
//   layer 2   8 neurons on core (3,2); its fired neurons send label-3 spikes
//             East to the border link of row 2, where the testbench takes them
// Every core's RISC-V controller is played by a bus-functional model (one
// process per core, all running at once) that receives packets from its
// eject FIFO, writes the spike into loop-controller registers, starts a
// stored update program (graded: state += w * value, two state words per
// input; binary: state += w) and waits for the end. After the last input a
// threshold program (THR, then store the reset value) gives each neuron's
// fire flag, and the model sends a spike for each fired neuron.
// A real-arithmetic model of both layers, fed in the order in which each
// core received its spikes, predicts every flag, state and output spike.
// Packets with labels that have no route are sent in too (drops), the East
// border link of row 2 is held not-ready at first (backpressure), and four
// cores send to one (contention). The testbench counts multicast copies,
// drops, backpressure cycles, NPE stall cycles, loop jumps, graded and binary
// updates, fired neurons and interrupts and fails if any count is zero.
module tb_seneca_array;
  import seneca_pkg::*;
  import bf16_ref_pkg::*;

  localparam int MX = 8, MY = 8, NC = MX * MY;
  localparam int NIN   = 8;          // input neurons
  localparam int NL1C  = 4;          // layer-1 cores
  localparam int NW1   = 2;          // state words per layer-1 core (16 neurons)
  localparam int NL1   = NL1C * 8 * NW1;
  localparam int WB1   = 32;         // port-B word addresses
  localparam int SB1   = 512;
  localparam int WB2   = 64;
  localparam int SB2   = 640;
  localparam int L2C   = 2 * MX + 3; // core (3,2)
  localparam bf16_t THR = 16'h3F80;  // 1.0
  localparam int unsigned LCB = 32'h4_0000, RTB = 32'h5_0000, NOC = 32'h6_0000;

  logic clk = 0, rst_n = 0;
  logic      [NC-1:0] instr_req = '0;
  logic      [12:0]   instr_addr  [NC];
  logic      [31:0]   instr_rdata [NC];
  logic      [NC-1:0] imem_we = '0;
  logic      [12:0]   imem_waddr  [NC];
  logic      [31:0]   imem_wdata  [NC];
  dbus_req_t          dreq        [NC];
  dbus_rsp_t          drsp        [NC];
  logic      [NC-1:0] irq;
  logic   [MX-1:0] north_in_valid = '0, north_in_ready, north_out_valid, north_out_ready;
  spike_t [MX-1:0] north_in_flit, north_out_flit;
  logic   [MX-1:0] south_in_valid = '0, south_in_ready, south_out_valid, south_out_ready;
  spike_t [MX-1:0] south_in_flit, south_out_flit;
  logic   [MY-1:0] west_in_valid = '0, west_in_ready, west_out_valid, west_out_ready;
  spike_t [MY-1:0] west_in_flit, west_out_flit;
  logic   [MY-1:0] east_in_valid = '0, east_in_ready, east_out_valid, east_out_ready;
  spike_t [MY-1:0] east_in_flit, east_out_flit;

  seneca_array dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ counters
  int n_irq [NC];
  int n_drop [NC];
  int n_mcast [NC];
  int n_bp [NC];
  int n_out = 0, n_edge_bp = 0;
  spike_t out_q [$];

  for (genvar c = 0; c < NC; c++) begin : g_cnt
    initial begin n_irq[c] = 0; n_drop[c] = 0; n_mcast[c] = 0; n_bp[c] = 0; end
    always @(posedge clk) if (rst_n) begin
      if (irq[c]) n_irq[c]++;
      n_drop[c] += $countones(dut.g_y[c / MX].g_x[c % MX].u_core.noc_drop);
      for (int i = 0; i < N_PORTS; i++)
        if (dut.g_y[c / MX].g_x[c % MX].u_core.u_router.pop[i] &&
            $countones(dut.g_y[c / MX].g_x[c % MX].u_core.u_router.route[i]) > 1)
          n_mcast[c]++;
      for (int d = 0; d < 4; d++)
        if (dut.out_valid[c][d] && !dut.out_ready[c][d]) n_bp[c]++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (east_out_valid[2] && east_out_ready[2]) begin out_q.push_back(east_out_flit[2]); n_out++; end
    if (east_out_valid[2] && !east_out_ready[2]) n_edge_bp++;
  end

  // ------------------------------------------------ RISC-V bus models
  task automatic bus(int c, logic we, int unsigned addr, logic [31:0] wd, output logic [31:0] rd_);
    dreq[c] = '{req: 1'b1, we: we, addr: addr, wdata: wd};
    #1;
    while (!drsp[c].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq[c].req = 1'b0;
    rd_ = drsp[c].rdata;
  endtask
  task automatic wr(int c, int unsigned addr, logic [31:0] wd);
    logic [31:0] dummy;
    bus(c, 1, addr, wd, dummy);
  endtask
  task automatic rd(int c, int unsigned addr, output logic [31:0] d);
    bus(c, 0, addr, '0, d);
  endtask
  task automatic wr_row(int c, int w, bf16_t v [8]);
    for (int j = 0; j < 4; j++) wr(c, 4 * (4 * w + j), {v[2 * j + 1], v[2 * j]});
  endtask
  task automatic rt_set(int c, port_e p, int label, port_mask_t m);
    wr(c, RTB + 4 * ((int'(p) << LABEL_W) | label), 32'(m));
  endtask

  function automatic lc_instr_t li(lc_op_e op, npe_op_e nop, int rd_, int rs1, int rs2, int ar, logic psel, int inc, int imm);
    lc_instr_t i;
    i = '0; i.op = op; i.nop = nop; i.rd = 4'(rd_); i.rs1 = 4'(rs1); i.rs2 = 4'(rs2);
    i.ar = 3'(ar); i.psel = psel; i.inc = 8'(inc); i.imm = 16'(imm);
    return i;
  endfunction
  task automatic lc_load(int c, int e, lc_instr_t i);
    logic [63:0] w;
    w = 64'(i);
    wr(c, LCB + 4 * (2 * e), w[31:0]);
    wr(c, LCB + 4 * (2 * e + 1), w[63:32]);
  endtask

  // update for one incoming spike: nw state words from PARAM2, weights from
  // PARAM1, value PARAM0 (graded) or 1 (binary: plain add)
  task automatic prog_update(int c, logic binary, int nw);
    lc_load(c, 0, li(LC_SETAR, NPE_NOP, 0, 0, 0, 0, 1, 0, 1));
    lc_load(c, 1, li(LC_SETAR, NPE_NOP, 0, 0, 0, 1, 1, 0, 2));
    lc_load(c, 2, li(LC_SETAR, NPE_NOP, 0, 0, 0, 2, 1, 0, 2));
    lc_load(c, 3, li(LC_NPE, NPE_LDI, 2, 0, 0, 0, 1, 0, 0));
    lc_load(c, 4, li(LC_LOOP, NPE_NOP, 0, 0, 0, 0, 0, 4, nw));
    lc_load(c, 5, li(LC_NPE, NPE_LD, 1, 0, 0, 0, 0, 1, 0));
    lc_load(c, 6, li(LC_NPE, NPE_LD, 3, 0, 0, 1, 0, 1, 0));
    if (binary) lc_load(c, 7, li(LC_NPE, NPE_ADD, 3, 3, 1, 0, 0, 0, 0));
    else        lc_load(c, 7, li(LC_NPE, NPE_MAC, 3, 1, 2, 0, 0, 0, 0));
    lc_load(c, 8, li(LC_NPE, NPE_ST, 0, 3, 0, 2, 0, 1, 0));
    lc_load(c, 9, li(LC_END, NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
  endtask
  // fire test of the state word at PARAM2 against PARAM3; fired neurons reset to 0
  task automatic prog_fire(int c);
    lc_load(c, 0, li(LC_SETAR, NPE_NOP, 0, 0, 0, 1, 1, 0, 2));
    lc_load(c, 1, li(LC_NPE, NPE_LDI, 5, 0, 0, 0, 1, 0, 3));
    lc_load(c, 2, li(LC_NPE, NPE_LD, 3, 0, 0, 1, 0, 0, 0));
    lc_load(c, 3, li(LC_NPE, NPE_THR, 6, 3, 5, 0, 0, 0, 0));
    lc_load(c, 4, li(LC_NPE, NPE_ST, 0, 6, 0, 1, 0, 0, 0));
    lc_load(c, 5, li(LC_END, NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
  endtask

  int tot_stall = 0, tot_jump = 0, n_graded = 0, n_binary = 0, n_fired1 = 0, n_fired2 = 0;

  // start the loaded program and wait for it to end; returns the status word
  task automatic run(int c, output logic [31:0] st);
    logic [31:0] d;
    wr(c, LCB + 4 * 'h50, 1);
    do rd(c, LCB + 4 * 'h50, st); while (!st[1]);
    rd(c, LCB + 4 * 'h52, d); tot_stall += int'(d);
    rd(c, LCB + 4 * 'h53, d); tot_jump += int'(d);
  endtask

  // ------------------------------------------------------------- data
  bf16_t w1 [NL1C][NIN][NW1][8];
  bf16_t s1 [NL1C][NW1][8];          // initial states
  bf16_t s1f [NL1C][NW1][8];         // model states after all inputs
  bf16_t w2 [NL1][8];
  bf16_t s2 [8];
  bf16_t in_val [NIN];
  logic  fired1 [NL1C][NW1][8];
  int    l2_order [$];
  int    l1_busy = NL1C;

  task automatic layer1(int k);
    int c;
    logic [31:0] d, st;
    spike_t sp;
    bf16_t row [8];
    c = MX + k;
    // routing: inputs along the row, outputs South
    rt_set(c, P_WEST, 1, (k == NL1C - 1) ? 5'b00001 : 5'b00101);
    rt_set(c, P_CORE, 2, 5'b01000);
    for (int i = 0; i < NIN; i++)
      for (int w = 0; w < NW1; w++) begin
        for (int l = 0; l < 8; l++) row[l] = w1[k][i][w][l];
        wr_row(c, WB1 + NW1 * i + w, row);
      end
    for (int w = 0; w < NW1; w++) begin
      for (int l = 0; l < 8; l++) row[l] = s1[k][w][l];
      wr_row(c, SB1 + w, row);
    end
    prog_update(c, 1'b0, NW1);
    wr(c, LCB + 4 * 'h42, SB1);
    for (int e = 0; e < NIN; e++) begin
      int polls;
      polls = 0;
      do begin rd(c, NOC, d); polls++; end while (d == 32'd0 && polls < 2000);
      if (d == 32'd0) begin
        check($sformatf("core %0d input %0d never arrived", c, e), 1'b0);
        break;
      end
      sp = d;
      check($sformatf("core %0d input %0d arrives in order", c, e), sp.label == 6'd1 && int'(sp.nid) == e);
      wr(c, LCB + 4 * 'h40, 32'(sp.value));
      wr(c, LCB + 4 * 'h41, WB1 + NW1 * int'(sp.nid));
      run(c, st);
      n_graded++;
    end
    prog_fire(c);
    wr(c, LCB + 4 * 'h43, 32'(THR));
    for (int w = 0; w < NW1; w++) begin
      wr(c, LCB + 4 * 'h42, SB1 + w);
      run(c, st);
      for (int l = 0; l < 8; l++) begin
        check($sformatf("layer-1 core %0d word %0d lane %0d fire flag", c, w, l), st[8 + l] == fired1[k][w][l]);
        if (st[8 + l]) begin
          wr(c, NOC, {6'd2, 10'(16 * k + 8 * w + l), 16'h3F80});
          n_fired1++;
        end
      end
    end
    // states after the reset of fired neurons
    for (int w = 0; w < NW1; w++)
      for (int j = 0; j < 4; j++) begin
        rd(c, 4 * (4 * (SB1 + w) + j), d);
        for (int h = 0; h < 2; h++)
          check($sformatf("layer-1 core %0d state %0d/%0d", c, w, 2 * j + h),
                bf_eq(d[16 * h +: 16], fired1[k][w][2 * j + h] ? 16'd0 : s1f[k][w][2 * j + h]));
      end
    l1_busy--;
  endtask

  task automatic layer2();
    int c, idle;
    logic [31:0] d, st;
    spike_t sp;
    bf16_t row [8];
    c = L2C;
    rt_set(c, P_NORTH, 2, 5'b00001);
    rt_set(c, P_WEST, 2, 5'b00001);
    rt_set(c, P_CORE, 3, 5'b00100);
    for (int g = 0; g < NL1; g++) begin
      for (int l = 0; l < 8; l++) row[l] = w2[g][l];
      wr_row(c, WB2 + g, row);
    end
    for (int l = 0; l < 8; l++) row[l] = s2[l];
    wr_row(c, SB2, row);
    prog_update(c, 1'b1, 1);
    wr(c, LCB + 4 * 'h42, SB2);
    idle = 0;
    while (idle < 200) begin
      rd(c, NOC, d);
      if (d != 32'd0) begin
        sp = d;
        l2_order.push_back(int'(sp.nid));
        check("layer-2 spike label", sp.label == 6'd2);
        wr(c, LCB + 4 * 'h41, WB2 + int'(sp.nid));
        run(c, st);
        n_binary++;
        idle = 0;
      end else if (l1_busy == 0) idle++;
    end
    prog_fire(c);
    wr(c, LCB + 4 * 'h43, 32'(THR));
    wr(c, LCB + 4 * 'h42, SB2);
    run(c, st);
    // the model of layer 2, in the order the spikes arrived
    foreach (l2_order[n])
      for (int l = 0; l < 8; l++) s2[l] = ref_add(s2[l], w2[l2_order[n]][l]);
    for (int l = 0; l < 8; l++) begin
      check($sformatf("layer-2 fire flag %0d", l), st[8 + l] == (bf2r(s2[l]) >= bf2r(THR)));
      if (st[8 + l]) begin
        wr(c, NOC, {6'd3, 10'(l), 16'h3F80});
        n_fired2++;
      end
    end
  endtask

  // ------------------------------------------------------------- main
  initial begin
    int n_l1_exp;
    logic [31:0] d;
    for (int c = 0; c < NC; c++) begin
      dreq[c] = '0; instr_addr[c] = '0; imem_waddr[c] = '0; imem_wdata[c] = '0;
    end
    north_in_flit = '0; south_in_flit = '0; west_in_flit = '0; east_in_flit = '0;
    north_out_ready = '1; south_out_ready = '1; west_out_ready = '1;
    east_out_ready = '1;
    east_out_ready[2] = 1'b0;              // held back until the first output is waiting

    for (int k = 0; k < NL1C; k++)
      for (int i = 0; i < NIN; i++)
        for (int w = 0; w < NW1; w++)
          for (int l = 0; l < 8; l++) w1[k][i][w][l] = rnd_bf(2);
    for (int k = 0; k < NL1C; k++)
      for (int w = 0; w < NW1; w++)
        for (int l = 0; l < 8; l++) s1[k][w][l] = rnd_bf(1);
    for (int g = 0; g < NL1; g++)
      for (int l = 0; l < 8; l++) w2[g][l] = rnd_bf(2);
    for (int l = 0; l < 8; l++) s2[l] = rnd_bf(1);
    for (int i = 0; i < NIN; i++) in_val[i] = rnd_bf(1);

    // layer-1 model (all four cores see the inputs in the order sent)
    n_l1_exp = 0;
    for (int k = 0; k < NL1C; k++)
      for (int w = 0; w < NW1; w++)
        for (int l = 0; l < 8; l++) begin
          s1f[k][w][l] = s1[k][w][l];
          for (int i = 0; i < NIN; i++)
            s1f[k][w][l] = ref_add(s1f[k][w][l], ref_mul(w1[k][i][w][l], in_val[i]));
          fired1[k][w][l] = bf2r(s1f[k][w][l]) >= bf2r(THR);
          if (fired1[k][w][l]) n_l1_exp++;
        end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // instruction memories: one word in the first and the last core
    imem_we[0] = 1'b1; imem_waddr[0] = 13'd5; imem_wdata[0] = 32'h0051_0113;
    imem_we[NC-1] = 1'b1; imem_waddr[NC-1] = 13'd8191; imem_wdata[NC-1] = 32'hFFF0_0093;
    @(negedge clk);
    imem_we = '0;
    instr_req[0] = 1'b1; instr_addr[0] = 13'd5;
    instr_req[NC-1] = 1'b1; instr_addr[NC-1] = 13'd8191;
    @(negedge clk);
    check("fetch core 0", instr_rdata[0] == 32'h0051_0113);
    check("fetch last core", instr_rdata[NC-1] == 32'hFFF0_0093);
    instr_req = '0;

    // routes along row 2 toward the layer-2 core and on to the East border
    for (int x = 0; x < 3; x++) begin
      rt_set(2 * MX + x, P_NORTH, 2, 5'b00100);
      rt_set(2 * MX + x, P_WEST, 2, 5'b00100);
    end
    for (int x = 4; x < MX; x++) rt_set(2 * MX + x, P_WEST, 3, 5'b00100);

    fork
      layer1(0);
      layer1(1);
      layer1(2);
      layer1(3);
      layer2();
      begin
        // inputs from the West border of row 1, plus packets with no route
        int j;
        j = 0;
        repeat (400) @(negedge clk);
        for (int i = 0; i < NIN + 2; i++) begin
          west_in_valid[1] = 1'b1;
          if (i == 3 || i == 7) west_in_flit[1] = {6'd9, 10'(i), 16'h3F80};
          else begin
            west_in_flit[1] = {6'd1, 10'(j), in_val[j]};
            j++;
          end
          #1;
          while (!west_in_ready[1]) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        west_in_valid[1] = 1'b0;
        // one more unrouted packet, from the North border into core (0,0)
        north_in_valid[0] = 1'b1; north_in_flit[0] = {6'd1, 10'd0, 16'h3F80};
        @(negedge clk);
        north_in_valid[0] = 1'b0;
      end
      begin
        for (int t = 0; t < 50000 && !east_out_valid[2]; t++) @(negedge clk);
        repeat (20) @(negedge clk);
        east_out_ready[2] = 1'b1;
      end
    join

    repeat (100) @(negedge clk);
    check($sformatf("layer-2 received %0d spikes, %0d fired in layer 1", l2_order.size(), n_l1_exp),
          l2_order.size() == n_l1_exp && n_fired1 == n_l1_exp);
    begin
      int seen [NL1];
      foreach (seen[g]) seen[g] = 0;
      foreach (l2_order[n]) seen[l2_order[n]]++;
      for (int k = 0; k < NL1C; k++)
        for (int w = 0; w < NW1; w++)
          for (int l = 0; l < 8; l++)
            check($sformatf("layer-1 neuron %0d reached layer 2 once iff it fired", 16 * k + 8 * w + l),
                  seen[16 * k + 8 * w + l] == (fired1[k][w][l] ? 1 : 0));
    end
    check("output spikes at the East border", n_out == n_fired2);
    for (int n = 0; n < n_out; n++) begin
      spike_t f;
      f = out_q.pop_front();
      check("output spike label", f.label == 6'd3 && bf2r(s2[f.nid[2:0]]) >= bf2r(THR));
    end

    begin
      int irqs, drops, mcast, bp;
      irqs = 0; drops = 0; mcast = 0; bp = 0;
      for (int c = 0; c < NC; c++) begin
        irqs += n_irq[c]; drops += n_drop[c]; mcast += n_mcast[c]; bp += n_bp[c];
      end
      $display("counts: multicast %0d, drops %0d, link backpressure %0d, border backpressure %0d, NPE stalls %0d, loop jumps %0d",
               mcast, drops, bp, n_edge_bp, tot_stall, tot_jump);
      $display("        graded updates %0d, binary updates %0d, fired L1 %0d, fired L2 %0d, irqs %0d, outputs %0d",
               n_graded, n_binary, n_fired1, n_fired2, irqs, n_out);
      check("multicast seen", mcast == (NL1C - 1) * NIN);
      check("drops seen", drops == 3);
      check("link backpressure seen", bp > 0);
      check("border backpressure seen", n_edge_bp > 0);
      check("NPE stalls seen", tot_stall > 0);
      check("loop jumps seen", tot_jump > 0);
      check("graded updates", n_graded == NL1C * NIN);
      check("binary updates", n_binary > 0);
      check("layer-1 spikes", n_fired1 > 0);
      check("layer-2 spikes", n_fired2 > 0);
      check("irqs", irqs == NL1C * (NIN + NW1) + n_binary + 1);
      check("outputs", n_out > 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
