// seneca_core -- one neuromorphic processing core (tile) of the mesh, in its
// third-generation form: RISC-V controller -> loop controller -> eight NPEs.
//
// Contents and wiring:
//   inst_mem         256 Kb program memory of the RISC-V controller
//   data_mem         2 Mb weights and neuron states; port A (32 b) to the
//                    RISC-V through core_bus, port B (16 b x 8) to the NPEs
//   loop_controller  runs the NPE loops; programmed by the RISC-V; the
//                    port-B address comes from it with each NPE instruction
//   npe_array        eight BF16 NPEs in lock-step
//   noc_router       this core's mesh router; its core port takes packets
//                    from the RISC-V (through the router's input FIFO) and
//                    delivers packets into an eject FIFO read by the RISC-V
//   core_bus         decodes the RISC-V data port (map in core_bus)
// The RISC-V core itself (an Ibex RV32 core) is not part of this module: its
// instruction fetch port, data port and interrupt line are this module's
// ports, so the core can be attached or driven by a testbench.
//
// Typical event flow: a spike packet arrives from the mesh, the RISC-V reads
// it from the eject FIFO, writes the spike value and the weight-row address
// into loop-controller registers and starts a stored program; the NPEs update
// the neuron states in data memory; `irq` tells the RISC-V the program ended;
// it checks thresholds (or lets the NPEs do it) and sends output spikes.
//
// The blocks and their connections follow the published core diagram; the
// bus map and the eject FIFO depth are this design's own.
module seneca_core
  import seneca_pkg::*;
#(
  parameter int unsigned DM_BITS    = 2097152,  // 2 Mb data memory
  parameter int unsigned IM_DEPTH   = 8192,     // 256 Kb instruction memory
  parameter int unsigned PROG_DEPTH = 32,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned IM_AW      = $clog2(IM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // RISC-V instruction port
  input  logic               instr_req,
  input  logic [IM_AW-1:0]   instr_addr,
  output logic [31:0]        instr_rdata,
  // program load
  input  logic               imem_we,
  input  logic [IM_AW-1:0]   imem_waddr,
  input  logic [31:0]        imem_wdata,
  // RISC-V data port and interrupt
  input  dbus_req_t          dreq,
  output dbus_rsp_t          drsp,
  output logic               irq,
  // mesh links, index 0 = North, 1 = East, 2 = South, 3 = West
  input  logic   [3:0]       mesh_in_valid,
  output logic   [3:0]       mesh_in_ready,
  input  spike_t [3:0]       mesh_in_flit,
  output logic   [3:0]       mesh_out_valid,
  input  logic   [3:0]       mesh_out_ready,
  output spike_t [3:0]       mesh_out_flit
);
  localparam int unsigned B_W   = 16 * N_NPE;
  localparam int unsigned B_AW  = $clog2(DM_BITS / B_W);
  localparam int unsigned A_AW  = B_AW + $clog2(B_W / 32);

  // ---------------------------------------------------------- memories
  logic              a_en, a_we;
  logic [A_AW-1:0]   a_addr;
  logic [31:0]       a_wdata, a_rdata;
  logic              b_en, b_we;
  logic [B_AW-1:0]   b_addr;
  logic [B_W-1:0]    b_wdata, b_rdata;

  inst_mem #(.DEPTH(IM_DEPTH)) u_imem (
    .clk         (clk),
    .fetch_req   (instr_req),
    .fetch_addr  (instr_addr),
    .fetch_rdata (instr_rdata),
    .load_we     (imem_we),
    .load_addr   (imem_waddr),
    .load_wdata  (imem_wdata)
  );

  data_mem #(.SIZE_BITS(DM_BITS), .LANES(N_NPE)) u_dmem (
    .clk     (clk),
    .a_en    (a_en),
    .a_we    (a_we),
    .a_addr  (a_addr),
    .a_wdata (a_wdata),
    .a_rdata (a_rdata),
    .b_en    (b_en),
    .b_we    (b_we),
    .b_addr  (b_addr),
    .b_wdata (b_wdata),
    .b_rdata (b_rdata)
  );

  // ------------------------------------- loop controller and NPE vector
  logic        lc_we;
  logic [7:0]  lc_addr;
  logic [31:0] lc_wdata, lc_rdata;
  logic        npe_valid, npe_ready, npe_busy, npe_stall;
  npe_instr_t  npe_instr;
  logic [N_NPE-1:0] npe_flags;
  logic        lc_busy;

  loop_controller #(.PROG_DEPTH(PROG_DEPTH)) u_lc (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (lc_we),
    .cfg_addr  (lc_addr),
    .cfg_wdata (lc_wdata),
    .cfg_rdata (lc_rdata),
    .done_irq  (irq),
    .busy      (lc_busy),
    .npe_valid (npe_valid),
    .npe_ready (npe_ready),
    .npe_instr (npe_instr),
    .npe_busy  (npe_busy),
    .npe_flags (npe_flags)
  );

  npe_array #(.N(N_NPE), .B_AW(B_AW)) u_npes (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (npe_valid),
    .in_ready (npe_ready),
    .in_instr (npe_instr),
    .b_en     (b_en),
    .b_we     (b_we),
    .b_addr   (b_addr),
    .b_wdata  (b_wdata),
    .b_rdata  (b_rdata),
    .flags    (npe_flags),
    .busy     (npe_busy),
    .stall    (npe_stall)
  );

  // ----------------------------------------------------------- network
  logic   [N_PORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  spike_t [N_PORTS-1:0] r_in_flit, r_out_flit;
  logic                 rt_we;
  logic [N_PORTS-1:0]   noc_drop;
  logic [3+LABEL_W-1:0] rt_addr;
  port_mask_t           rt_wdata;
  logic                 ej_valid, ej_ready;
  spike_t               ej_flit;

  assign r_in_valid[N_PORTS-1:1]  = mesh_in_valid;
  assign r_in_flit[N_PORTS-1:1]   = mesh_in_flit;
  assign mesh_in_ready            = r_in_ready[N_PORTS-1:1];
  assign mesh_out_valid           = r_out_valid[N_PORTS-1:1];
  assign mesh_out_flit            = r_out_flit[N_PORTS-1:1];
  assign r_out_ready[N_PORTS-1:1] = mesh_out_ready;

  noc_router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (r_in_valid),
    .in_ready  (r_in_ready),
    .in_flit   (r_in_flit),
    .out_valid (r_out_valid),
    .out_ready (r_out_ready),
    .out_flit  (r_out_flit),
    .rt_we     (rt_we),
    .rt_addr   (rt_addr),
    .rt_wdata  (rt_wdata),
    .drop      (noc_drop)
  );

  noc_fifo #(.WIDTH($bits(spike_t)), .DEPTH(FIFO_DEPTH)) u_eject (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (r_out_valid[P_CORE]),
    .in_ready  (r_out_ready[P_CORE]),
    .in_data   (r_out_flit[P_CORE]),
    .out_valid (ej_valid),
    .out_ready (ej_ready),
    .out_data  (ej_flit)
  );

  // ------------------------------------------------------ RISC-V bus
  core_bus #(.DM_AW(A_AW)) u_bus (
    .clk       (clk),
    .rst_n     (rst_n),
    .dreq      (dreq),
    .drsp      (drsp),
    .a_en      (a_en),
    .a_we      (a_we),
    .a_addr    (a_addr),
    .a_wdata   (a_wdata),
    .a_rdata   (a_rdata),
    .lc_we     (lc_we),
    .lc_addr   (lc_addr),
    .lc_wdata  (lc_wdata),
    .lc_rdata  (lc_rdata),
    .rt_we     (rt_we),
    .rt_addr   (rt_addr),
    .rt_wdata  (rt_wdata),
    .inj_valid (r_in_valid[P_CORE]),
    .inj_ready (r_in_ready[P_CORE]),
    .inj_flit  (r_in_flit[P_CORE]),
    .ej_valid  (ej_valid),
    .ej_ready  (ej_ready),
    .ej_flit   (ej_flit)
  );
endmodule
