// noc_router -- the per-core router of the 2-D mesh network, with
// source-based (label) routing and multicast.
//
// A spike packet does not carry its destination. It carries a label naming
// its source (for instance the source layer of the network), and every router
// holds a routing table that maps {input port, label} to a set of output
// ports: any of North, East, South, West and the local core. A packet whose
// set has several ports is copied to all of them (multicast), so a spike that
// fans out to many cores travels as one packet until the paths split.
//
// Structure: five input FIFOs (core, N, E, S, W). The head packet of each
// FIFO looks up its output set. Each output port picks, round-robin, one of
// the heads that still need that port and forwards it when the neighbour is
// ready. A head leaves its FIFO once every port in its set has taken a copy;
// copies to free ports go out at once and the others follow later, so one
// blocked port does not hold back the others. A packet whose set is empty is
// dropped (`drop[i]` pulses for input i). Packets are one flit (seneca_pkg::spike_t).
//
// Interface: valid/ready per link; a flit moves when both are high. The
// routing table is written through rt_we/rt_addr/rt_wdata with
// rt_addr = {input port (3 bits), label}; it resets to empty. Latency: a
// packet accepted in cycle t can leave in cycle t+1.
//
// From the architecture: mesh with one router per core, source-based routing
// table indexed by input port and label, output sets including the core,
// multicast, a FIFO in front of the router. This design's own: the flit
// format, FIFO depth, arbitration and the partial-multicast rule.
module noc_router
  import seneca_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic   [N_PORTS-1:0]        in_valid,
  output logic   [N_PORTS-1:0]        in_ready,
  input  spike_t [N_PORTS-1:0]        in_flit,
  output logic   [N_PORTS-1:0]        out_valid,
  input  logic   [N_PORTS-1:0]        out_ready,
  output spike_t [N_PORTS-1:0]        out_flit,
  input  logic                        rt_we,
  input  logic   [3+LABEL_W-1:0]      rt_addr,
  input  port_mask_t                  rt_wdata,
  output logic   [N_PORTS-1:0]        drop
);
  localparam int unsigned NL = 2 ** LABEL_W;

  port_mask_t table_q [N_PORTS][NL];

  spike_t     head  [N_PORTS];
  logic       hv    [N_PORTS];
  logic       pop   [N_PORTS];
  port_mask_t route [N_PORTS];
  port_mask_t pend  [N_PORTS];
  port_mask_t sent  [N_PORTS];
  port_mask_t fired [N_PORTS];     // fired[i][o]: input i sent a copy to output o now
  logic [2:0] gnt   [N_PORTS];     // per output: granted input
  logic [2:0] ptr   [N_PORTS];     // per output: round-robin start

  for (genvar i = 0; i < N_PORTS; i++) begin : g_in
    noc_fifo #(.WIDTH($bits(spike_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid[i]),
      .in_ready  (in_ready[i]),
      .in_data   (in_flit[i]),
      .out_valid (hv[i]),
      .out_ready (pop[i]),
      .out_data  (head[i])
    );
  end

  // lookup
  always_comb begin
    for (int i = 0; i < N_PORTS; i++) begin
      route[i] = table_q[i][head[i].label];
      pend[i]  = hv[i] ? (route[i] & ~sent[i]) : '0;
    end
  end

  // output arbitration
  always_comb begin
    for (int o = 0; o < N_PORTS; o++) begin
      logic found;
      found        = 1'b0;
      gnt[o]       = '0;
      for (int k = 0; k < N_PORTS; k++) begin
        int unsigned i;
        i = (int'(ptr[o]) + k) % N_PORTS;
        if (!found && pend[i][o]) begin
          found  = 1'b1;
          gnt[o] = 3'(i);
        end
      end
      out_valid[o] = found;
      out_flit[o]  = head[gnt[o]];
    end
    for (int i = 0; i < N_PORTS; i++)
      for (int o = 0; o < N_PORTS; o++)
        fired[i][o] = out_valid[o] && out_ready[o] && (gnt[o] == 3'(i));
    for (int i = 0; i < N_PORTS; i++)
      pop[i] = hv[i] && ((pend[i] & ~fired[i]) == '0);
  end

  always_comb begin
    for (int i = 0; i < N_PORTS; i++)
      drop[i] = hv[i] && route[i] == '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PORTS; i++) begin
        sent[i] <= '0;
        ptr[i]  <= '0;
        for (int l = 0; l < NL; l++) table_q[i][l] <= '0;
      end
    end else begin
      for (int i = 0; i < N_PORTS; i++)
        sent[i] <= pop[i] ? '0 : (sent[i] | fired[i]);
      for (int o = 0; o < N_PORTS; o++)
        if (out_valid[o] && out_ready[o])
          ptr[o] <= (gnt[o] == 3'(N_PORTS - 1)) ? 3'd0 : gnt[o] + 3'd1;
      if (rt_we && int'(rt_addr[3+LABEL_W-1 -: 3]) < N_PORTS)
        table_q[rt_addr[3+LABEL_W-1 -: 3]][rt_addr[LABEL_W-1:0]] <= rt_wdata;
    end
  end
endmodule
