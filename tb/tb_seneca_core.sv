// tb_seneca_core -- self-checking testbench of one core tile at full size
// (2 Mb data memory, 256 Kb instruction memory).
//
// The testbench plays the RISC-V controller: a bus-functional model drives
// the data port with the Ibex-style req/gnt/rvalid protocol. It
//   - loads and fetches a few instruction-memory words;
//   - writes random BF16 weight rows and neuron states through port A and
//     reads some of them back;
//   - programs the routing table, sends spike packets from the core to itself
//     (loop-back route), sends packets in from the North link, and checks what
//     comes out of the East link and the eject FIFO; packets with no route are
//     dropped; the East link is held not-ready for a while (backpressure);
//   - writes a fully-connected-layer update into the loop controller (graded
//     spike: state += weight * value; binary spike: state += weight) plus a
//     threshold test, starts it with the received spike's value, waits for
//     `irq`, and compares all neuron states and fire flags with a
//     real-arithmetic model.
// It counts loop jumps, NPE stall cycles, multicast copies, drops and
// backpressure cycles and fails if any of them is zero.
module tb_seneca_core;
  import seneca_pkg::*;
  import bf16_ref_pkg::*;

  localparam int ROWS   = 12;      // weight rows = input neurons used
  localparam int NOUT   = 3;       // state words per row (3 x 8 neurons)
  localparam int WBASE  = 64;      // port-B word address of the weights
  localparam int SBASE  = 1024;    // port-B word address of the states

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
  logic   [3:0] mesh_in_valid = '0, mesh_in_ready, mesh_out_valid, mesh_out_ready;
  spike_t [3:0] mesh_in_flit, mesh_out_flit;

  int checks = 0, failures = 0;
  int n_irq = 0, n_east = 0, n_bp = 0, n_drop = 0;
  bf16_t weight [ROWS * NOUT][8];
  bf16_t state  [NOUT][8];
  spike_t east_q [$];

  always #5 clk = ~clk;

  seneca_core dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (irq) n_irq++;
    n_drop += $countones(dut.noc_drop);
    if (mesh_out_valid[1] && mesh_out_ready[1]) begin east_q.push_back(mesh_out_flit[1]); n_east++; end
    if (mesh_out_valid[1] && !mesh_out_ready[1]) n_bp++;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one bus access, started and finished at a negedge
  task automatic bus(logic we, int unsigned addr, logic [31:0] wd, output logic [31:0] rd_);
    dreq.req = 1; dreq.we = we; dreq.addr = addr; dreq.wdata = wd;
    #1;
    while (!drsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq.req = 0;
    rd_ = drsp.rdata;
    if (!drsp.rvalid) begin failures++; $display("FAIL rvalid missing"); end
  endtask
  task automatic wr(int unsigned addr, logic [31:0] wd);
    logic [31:0] dummy;
    bus(1, addr, wd, dummy);
  endtask
  task automatic rd(int unsigned addr, output logic [31:0] d);
    bus(0, addr, '0, d);
  endtask

  // port-B word w, lanes 2j/2j+1 live at port-A word 4w+j
  task automatic wr_row(int w, bf16_t v [8]);
    for (int j = 0; j < 4; j++) wr(4 * (4 * w + j), {v[2 * j + 1], v[2 * j]});
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
    wr(32'h4_0000 + 4 * (2 * e), w[31:0]);
    wr(32'h4_0000 + 4 * (2 * e + 1), w[63:32]);
  endtask
  task automatic rt_set(port_e in_port, int label, port_mask_t m);
    wr(32'h5_0000 + 4 * ((int'(in_port) << LABEL_W) | label), 32'(m));
  endtask

  // FC update for one input neuron: states[0..NOUT-1] += row * v (graded)
  // or += row (binary); then the threshold test of the last state word.
  task automatic load_program(logic binary);
    lc_load(0, li(LC_SETAR, NPE_NOP, 0, 0, 0, 0, 1, 0, 1));   // ar0 = PARAM1 (weights)
    lc_load(1, li(LC_SETAR, NPE_NOP, 0, 0, 0, 1, 1, 0, 2));   // ar1 = PARAM2 (states, load)
    lc_load(2, li(LC_SETAR, NPE_NOP, 0, 0, 0, 2, 1, 0, 2));   // ar2 = PARAM2 (states, store)
    lc_load(3, li(LC_NPE, NPE_LDI, 2, 0, 0, 0, 1, 0, 0));     // r2 = spike value
    lc_load(4, li(LC_NPE, NPE_LDI, 5, 0, 0, 0, 1, 0, 3));     // r5 = threshold
    lc_load(5, li(LC_LOOP, NPE_NOP, 0, 0, 0, 0, 0, 4, NOUT));
    lc_load(6, li(LC_NPE, NPE_LD, 1, 0, 0, 0, 0, 1, 0));      // r1 = weights
    lc_load(7, li(LC_NPE, NPE_LD, 3, 0, 0, 1, 0, 1, 0));      // r3 = states
    if (binary)
      lc_load(8, li(LC_NPE, NPE_ADD, 3, 3, 1, 0, 0, 0, 0));   // r3 += r1
    else
      lc_load(8, li(LC_NPE, NPE_MAC, 3, 1, 2, 0, 0, 0, 0));   // r3 += r1 * r2
    lc_load(9, li(LC_NPE, NPE_ST, 0, 3, 0, 2, 0, 1, 0));
    lc_load(10, li(LC_NPE, NPE_THR, 6, 3, 5, 0, 0, 0, 0));    // fire test, last word
    lc_load(11, li(LC_END, NPE_NOP, 0, 0, 0, 0, 0, 0, 0));
  endtask

  initial begin
    logic [31:0] d;
    int jumps, stalls, drops, mc;
    bf16_t row [8];
    bf16_t thr;
    dreq = '0;
    mesh_out_ready = '1;
    for (int p = 0; p < 4; p++) mesh_in_flit[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------------------------------------- instruction memory
    for (int k = 0; k < 16; k++) begin
      imem_we = 1; imem_waddr = 13'(k * 509); imem_wdata = 32'hA500_0000 + k;
      @(negedge clk);
    end
    imem_we = 0;
    for (int k = 0; k < 16; k++) begin
      instr_req = 1; instr_addr = 13'(k * 509);
      @(negedge clk);
      check($sformatf("fetch %0d", k), instr_rdata == 32'hA500_0000 + k);
    end
    instr_req = 0;

    // --------------------------------------------------- data memory
    for (int r = 0; r < ROWS * NOUT; r++) begin
      for (int l = 0; l < 8; l++) begin weight[r][l] = rnd_bf(3); row[l] = weight[r][l]; end
      wr_row(WBASE + r, row);
    end
    for (int s = 0; s < NOUT; s++) begin
      for (int l = 0; l < 8; l++) begin state[s][l] = rnd_bf(2); row[l] = state[s][l]; end
      wr_row(SBASE + s, row);
    end
    for (int r = 0; r < 6; r++) begin
      int w, j;
      w = $urandom_range(ROWS * NOUT - 1); j = $urandom_range(3);
      rd(4 * (4 * (WBASE + w) + j), d);
      check($sformatf("port A read row %0d slice %0d", w, j), d == {weight[w][2 * j + 1], weight[w][2 * j]});
    end

    // ------------------------------------------------------- network
    rt_set(P_CORE, 1, 5'b00001);         // own spikes with label 1 come back to the core
    rt_set(P_NORTH, 2, 5'b00101);        // from North, label 2: East and the core (multicast)
    // label 3 from the core has no route: dropped
    for (int k = 0; k < 3; k++) begin
      wr(32'h6_0000, {6'd3, 10'(k), 16'h3F80});
    end
    repeat (4) @(negedge clk);
    rd(32'h6_0004, d);
    check("nothing received from dropped packets", d[0] == 1'b0);

    // mesh packets, East link held back for a while
    mesh_out_ready[1] = 0;
    for (int k = 0; k < 3; k++) begin
      mesh_in_valid[0] = 1; mesh_in_flit[0] = {6'd2, 10'(100 + k), 16'h4000};
      #1;
      while (!mesh_in_ready[0]) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    mesh_in_valid[0] = 0;
    repeat (6) @(negedge clk);
    check("East held: nothing out yet", n_east == 0);
    mesh_out_ready[1] = 1;
    repeat (6) @(negedge clk);
    check("three East copies", n_east == 3);
    for (int k = 0; k < 3; k++) begin
      spike_t f;
      rd(32'h6_0000, d);
      check($sformatf("core copy %0d", k), d == {6'd2, 10'(100 + k), 16'h4000});
      if (east_q.size() > 0) begin
        f = east_q.pop_front();
        check($sformatf("East copy %0d", k), f == {6'd2, 10'(100 + k), 16'h4000});
      end
    end
    rd(32'h6_0000, d);
    check("eject empty reads 0", d == 32'd0);

    // -------------------------------------------- spike-driven updates
    thr = 16'h3F80;                          // 1.0
    wr(32'h4_0000 + 4 * 'h43, 32'(thr));
    wr(32'h4_0000 + 4 * 'h42, SBASE);
    for (int ev = 0; ev < ROWS; ev++) begin
      logic binary;
      bf16_t v;
      spike_t got;
      binary = ev >= ROWS / 2;
      if (ev == 0 || ev == ROWS / 2) load_program(binary);
      v = binary ? 16'h3F80 : rnd_bf(2);
      // the spike goes around the loop-back route before it is used
      wr(32'h6_0000, {6'd1, 10'(ev), v});
      do rd(32'h6_0000, d); while (d == 32'd0);
      got = d;
      check($sformatf("loop-back spike %0d", ev), got.label == 6'd1 && got.nid == 10'(ev) && got.value == v);
      wr(32'h4_0000 + 4 * 'h40, 32'(got.value));
      wr(32'h4_0000 + 4 * 'h41, WBASE + NOUT * int'(got.nid));
      wr(32'h4_0000 + 4 * 'h50, 1);
      begin
        int irq0;
        irq0 = n_irq;
        while (n_irq == irq0) @(negedge clk);
      end
      for (int s = 0; s < NOUT; s++)
        for (int l = 0; l < 8; l++)
          state[s][l] = binary ? ref_add(state[s][l], weight[NOUT * ev + s][l])
                               : ref_add(state[s][l], ref_mul(weight[NOUT * ev + s][l], v));
      rd(32'h4_0000 + 4 * 'h50, d);
      check("done, not busy", d[1:0] == 2'b10);
      for (int l = 0; l < 8; l++)
        check($sformatf("fire flag %0d after event %0d", l, ev), d[8 + l] == (bf2r(state[NOUT - 1][l]) >= 1.0));
      rd(32'h4_0000 + 4 * 'h51, d);
      check("issue count", d == 2 + 4 * NOUT + 1);
      rd(32'h4_0000 + 4 * 'h52, d);
      stalls += d;
      rd(32'h4_0000 + 4 * 'h53, d);
      jumps += d;
    end
    for (int s = 0; s < NOUT; s++)
      for (int j = 0; j < 4; j++) begin
        rd(4 * (4 * (SBASE + s) + j), d);
        for (int h = 0; h < 2; h++)
          check($sformatf("state %0d lane %0d: %h vs %h", s, 2 * j + h, d[16 * h +: 16], state[s][2 * j + h]),
                bf_eq(d[16 * h +: 16], state[s][2 * j + h]));
      end

    drops = n_drop;
    mc = n_east;
    $display("counts: loop jumps %0d, NPE stall cycles %0d, East copies %0d, backpressure cycles %0d, irqs %0d",
             jumps, stalls, mc, n_bp, n_irq);
    check("loop jumps seen", jumps > 0);
    check("NPE stalls seen", stalls > 0);
    check("multicast copies seen", mc > 0);
    check("backpressure seen", n_bp > 0);
    check("every unrouted packet dropped", drops == 3);
    check("one irq per event", n_irq == ROWS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
