// tb_noc_router -- self-checking testbench of the mesh router.
//
// The routing table is loaded with the example table printed for core 5 of
// the 16-core mapping example: (West, 1) -> Core; (West, 2) -> N+S+E;
// (North, 2) -> S+E; (South, 2) -> N+E; (Core, 2) -> N+S+E; every other
// {input, label} is empty. Random packets with labels 1, 2 and 3 enter all
// five inputs while the five outputs accept at random. A scoreboard expects
// every packet at exactly the outputs of its table entry, in order per
// {input, output} pair, and nowhere else; label-3 packets (and label 1 from
// any input but West) must be dropped. Directed checks: one-cycle latency
// through an idle router, a full input FIFO (4 entries) de-asserting
// in_ready while its output is blocked, and a multicast whose copy to a
// blocked port waits while the copy to a free port goes out (the packets
// behind it wait too: a head leaves only when all its copies are out).
module tb_noc_router;
  import seneca_pkg::*;

  logic clk = 0, rst_n = 0;
  logic   [4:0] in_valid = 0, in_ready, out_valid, out_ready = 0;
  spike_t [4:0] in_flit, out_flit;
  logic rt_we = 0;
  logic [8:0] rt_addr = 0;
  port_mask_t rt_wdata = 0;
  logic [4:0] drop;
  int checks = 0, failures = 0, drops = 0, n_recv = 0, n_fullstall = 0;
  port_mask_t tbl [5][4];
  spike_t exp_q [5][5][$];     // [out][in]
  spike_t src_q [5][$];
  logic rand_ready = 1;
  logic [4:0] block_out = 0;

  always #5 clk = ~clk;
  noc_router dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam port_mask_t C = 5'b00001, N = 5'b00010, E = 5'b00100, S = 5'b01000;

  // receivers
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      int i;
      i = int'(out_flit[o].nid[9:7]);
      n_recv++;
      if (i > 4 || exp_q[o][i].size() == 0) begin
        checks++; failures++;
        $display("FAIL unexpected packet %h at output %0d", out_flit[o], o);
      end else begin
        spike_t e;
        e = exp_q[o][i].pop_front();
        check($sformatf("out %0d from in %0d: %h vs %h", o, i, out_flit[o], e), out_flit[o] == e);
      end
    end
    drops += $countones(drop);
    if (in_valid != 0 && (in_valid & ~in_ready) != 0) n_fullstall++;
  end
  always @(negedge clk) begin
    for (int o = 0; o < 5; o++)
      out_ready[o] = !block_out[o] && (rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1);
  end

  // senders: drive the head of each source queue
  always @(negedge clk) begin
    for (int i = 0; i < 5; i++) begin
      in_valid[i] = src_q[i].size() > 0 && (!rand_ready || $urandom_range(0, 1) == 1);
      in_flit[i]  = src_q[i].size() > 0 ? src_q[i][0] : '0;
    end
  end
  always @(posedge clk) if (rst_n) for (int i = 0; i < 5; i++)
    if (in_valid[i] && in_ready[i]) void'(src_q[i].pop_front());

  task automatic rt_write(int p, int label, port_mask_t m);
    @(negedge clk);
    rt_we = 1; rt_addr = {3'(p), 6'(label)}; rt_wdata = m;
    @(negedge clk);
    rt_we = 0;
  endtask

  task automatic queue_pkt(int i, int label, int seq);
    spike_t f;
    f.label = 6'(label);
    f.nid   = {3'(i), 7'(seq)};
    f.value = 16'($urandom);
    src_q[i].push_back(f);
    for (int o = 0; o < 5; o++)
      if (label < 4 && tbl[i][label][o]) exp_q[o][i].push_back(f);
  endtask

  function automatic int pending();
    int n = 0;
    for (int i = 0; i < 5; i++) n += src_q[i].size();
    for (int o = 0; o < 5; o++) for (int i = 0; i < 5; i++) n += exp_q[o][i].size();
    return n;
  endfunction

  initial begin
    int expected_drops;
    for (int i = 0; i < 5; i++) for (int l = 0; l < 4; l++) tbl[i][l] = '0;
    tbl[P_WEST][1]  = C;
    tbl[P_WEST][2]  = N | S | E;
    tbl[P_NORTH][2] = S | E;
    tbl[P_SOUTH][2] = N | E;
    tbl[P_CORE][2]  = N | S | E;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5; i++) for (int l = 0; l < 4; l++)
      if (tbl[i][l] != 0) rt_write(i, l, tbl[i][l]);

    // directed: latency through an idle router
    rand_ready = 0;
    begin
      int t;
      queue_pkt(P_WEST, 1, 0);
      @(posedge clk);
      while (!(in_valid[P_WEST] && in_ready[P_WEST])) @(posedge clk);
      t = 0;
      @(negedge clk);
      while (!out_valid[P_CORE]) begin @(negedge clk); t++; end
      check($sformatf("idle latency: out_valid %0d cycles after the accepting edge", t + 1), t == 0);
      @(negedge clk);
    end

    // directed: full FIFO and partial multicast (North input, label 2 -> S+E, S blocked)
    block_out = S;
    for (int k = 0; k < 6; k++) queue_pkt(P_NORTH, 2, 100 + k);
    repeat (20) @(negedge clk);
    check("head packet: its copy to the free East port went out", exp_q[P_EAST][P_NORTH].size() == 5);
    check("copies to the blocked South port wait", exp_q[P_SOUTH][P_NORTH].size() == 6);
    check("input FIFO full: in_ready low", in_ready[P_NORTH] == 1'b0);
    block_out = 0;
    repeat (30) @(negedge clk);
    check("blocked copies delivered", exp_q[P_SOUTH][P_NORTH].size() == 0);

    // random traffic
    rand_ready = 1;
    expected_drops = 0;
    for (int n = 0; n < 1500; n++) begin
      int i, l;
      i = $urandom_range(0, 4);
      l = $urandom_range(1, 3);
      queue_pkt(i, l, n % 100);
      if (tbl[i][l] == 0) expected_drops++;
    end
    while (pending() > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    check($sformatf("drops %0d expected %0d", drops, expected_drops), drops == expected_drops);
    check("back-pressure seen", n_fullstall > 0);
    $display("received %0d copies, %0d drops, %0d cycles with a refused input", n_recv, drops, n_fullstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
