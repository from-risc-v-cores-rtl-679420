// core_bus -- decoder between the RISC-V controller's 32-bit data port and
// the blocks of its core.
//
// The RISC-V reaches four things through its data port: the data memory's
// 32-bit port A, the loop controller's registers and program, the router's
// routing table, and the network FIFOs (send a spike packet, receive one).
// Memory map (byte address, bits 19:16 select):
//   0x0_0000-0x3_FFFF data memory port A (word address = addr[17:2])
//   0x4_0000 + 4*i    loop controller register i (see loop_controller)
//   0x5_0000 + 4*i    routing-table entry i = {input port, label}, write only
//   0x6_0000          write: send the spike packet in wdata (waits while the
//                     router's core FIFO is full); read: take the oldest
//                     received packet (0 if none)
//   0x6_0004          read: {30'b0, send FIFO has room, a packet is waiting}
// Protocol (as the Ibex data port): the core holds req/we/addr/wdata until
// gnt; rvalid and rdata follow one cycle after gnt, for writes as well.
// Only whole 32-bit words are accessed. The map and protocol handling are
// this design's own; the architecture shows only which blocks the RISC-V is
// wired to.
module core_bus
  import seneca_pkg::*;
#(
  parameter int unsigned DM_AW = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dbus_req_t         dreq,
  output dbus_rsp_t         drsp,
  // data memory port A
  output logic              a_en,
  output logic              a_we,
  output logic [DM_AW-1:0]  a_addr,
  output logic [31:0]       a_wdata,
  input  logic [31:0]       a_rdata,
  // loop controller
  output logic              lc_we,
  output logic [7:0]        lc_addr,
  output logic [31:0]       lc_wdata,
  input  logic [31:0]       lc_rdata,
  // routing table
  output logic              rt_we,
  output logic [3+LABEL_W-1:0] rt_addr,
  output port_mask_t        rt_wdata,
  // network: send
  output logic              inj_valid,
  input  logic              inj_ready,
  output spike_t            inj_flit,
  // network: receive
  input  logic              ej_valid,
  output logic              ej_ready,
  input  spike_t            ej_flit
);
  logic [3:0] region;
  logic       sel_dm, sel_lc, sel_rt, sel_noc, noc_data;
  logic       gnt;
  logic       rvalid_q, from_dm_q;
  logic [31:0] rdata_q;

  assign region   = dreq.addr[19:16];
  assign sel_dm   = region < 4'h4;
  assign sel_lc   = region == MAP_LC;
  assign sel_rt   = region == MAP_RT;
  assign sel_noc  = region == MAP_NOC;
  assign noc_data = sel_noc && !dreq.addr[2];

  assign inj_valid = dreq.req && dreq.we && noc_data;
  assign inj_flit  = dreq.wdata;
  assign gnt       = dreq.req && !(inj_valid && !inj_ready);

  assign a_en     = gnt && sel_dm;
  assign a_we     = dreq.we;
  assign a_addr   = dreq.addr[DM_AW+1:2];
  assign a_wdata  = dreq.wdata;

  assign lc_we    = gnt && dreq.we && sel_lc;
  assign lc_addr  = dreq.addr[9:2];
  assign lc_wdata = dreq.wdata;

  assign rt_we    = gnt && dreq.we && sel_rt;
  assign rt_addr  = dreq.addr[3+LABEL_W+1:2];
  assign rt_wdata = dreq.wdata[N_PORTS-1:0];

  assign ej_ready = gnt && !dreq.we && noc_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid_q  <= 1'b0;
      from_dm_q <= 1'b0;
      rdata_q   <= '0;
    end else begin
      rvalid_q  <= gnt;
      from_dm_q <= gnt && sel_dm;
      if (gnt && !dreq.we) begin
        if (sel_lc)        rdata_q <= lc_rdata;
        else if (noc_data) rdata_q <= ej_valid ? ej_flit : 32'd0;
        else if (sel_noc)  rdata_q <= {30'd0, inj_ready, ej_valid};
        else               rdata_q <= '0;
      end
    end
  end

  assign drsp.gnt    = gnt;
  assign drsp.rvalid = rvalid_q;
  assign drsp.rdata  = from_dm_q ? a_rdata : rdata_q;
endmodule
