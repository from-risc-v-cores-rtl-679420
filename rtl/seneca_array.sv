// seneca_array -- the complete neuromorphic processor: a MESH_X x MESH_Y mesh
// of SENECA cores, each with its own router, linked to its four neighbours.
//
// Every core runs its own program (time-multiplexing many neurons onto its
// NPEs); cores talk only by sending spike packets through the mesh. Routing
// is source-based: packets carry a label and each router's table decides
// where copies go, so a layer of a network mapped on several cores is reached
// by multicast from the core that fired.
//
// Core (x, y) has index c = y*MESH_X + x; y = 0 is the northern row, x = 0 the
// western column. Its East link goes to the West link of (x+1, y) and its
// South link to the North link of (x, y+1), each way with its own
// valid/ready/flit. Links on the border of the mesh are ports of this module
// (north_*[x], south_*[x], west_*[y], east_*[y]), so meshes can be joined or
// fed from outside (sensor input, result output).
//
// The RISC-V controller of each core is not in this module; its ports appear
// here as arrays indexed by core: instruction fetch (instr_*), program load
// (imem_*), data port (dreq/drsp, see core_bus for the map) and the loop
// controller's interrupt (irq).
//
// The default 8 x 8 = 64 cores follows the platform drawing of the
// architecture (four groups of 4 x 4 cores); the text itself gives no count.
module seneca_array
  import seneca_pkg::*;
#(
  parameter int unsigned MESH_X     = 8,
  parameter int unsigned MESH_Y     = 8,
  parameter int unsigned DM_BITS    = 2097152,
  parameter int unsigned IM_DEPTH   = 8192,
  parameter int unsigned NC         = MESH_X * MESH_Y,
  parameter int unsigned IM_AW      = $clog2(IM_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // per-core RISC-V ports
  input  logic      [NC-1:0]       instr_req,
  input  logic      [IM_AW-1:0]    instr_addr  [NC],
  output logic      [31:0]         instr_rdata [NC],
  input  logic      [NC-1:0]       imem_we,
  input  logic      [IM_AW-1:0]    imem_waddr  [NC],
  input  logic      [31:0]         imem_wdata  [NC],
  input  dbus_req_t                dreq        [NC],
  output dbus_rsp_t                drsp        [NC],
  output logic      [NC-1:0]       irq,
  // mesh border links
  input  logic      [MESH_X-1:0]   north_in_valid,
  output logic      [MESH_X-1:0]   north_in_ready,
  input  spike_t    [MESH_X-1:0]   north_in_flit,
  output logic      [MESH_X-1:0]   north_out_valid,
  input  logic      [MESH_X-1:0]   north_out_ready,
  output spike_t    [MESH_X-1:0]   north_out_flit,
  input  logic      [MESH_X-1:0]   south_in_valid,
  output logic      [MESH_X-1:0]   south_in_ready,
  input  spike_t    [MESH_X-1:0]   south_in_flit,
  output logic      [MESH_X-1:0]   south_out_valid,
  input  logic      [MESH_X-1:0]   south_out_ready,
  output spike_t    [MESH_X-1:0]   south_out_flit,
  input  logic      [MESH_Y-1:0]   west_in_valid,
  output logic      [MESH_Y-1:0]   west_in_ready,
  input  spike_t    [MESH_Y-1:0]   west_in_flit,
  output logic      [MESH_Y-1:0]   west_out_valid,
  input  logic      [MESH_Y-1:0]   west_out_ready,
  output spike_t    [MESH_Y-1:0]   west_out_flit,
  input  logic      [MESH_Y-1:0]   east_in_valid,
  output logic      [MESH_Y-1:0]   east_in_ready,
  input  spike_t    [MESH_Y-1:0]   east_in_flit,
  output logic      [MESH_Y-1:0]   east_out_valid,
  input  logic      [MESH_Y-1:0]   east_out_ready,
  output spike_t    [MESH_Y-1:0]   east_out_flit
);
  localparam int unsigned DN = 0, DE = 1, DS = 2, DW = 3;

  // per-core link bundles, index [core][direction]
  logic   [3:0] in_valid  [NC];
  logic   [3:0] in_ready  [NC];
  spike_t [3:0] in_flit   [NC];
  logic   [3:0] out_valid [NC];
  logic   [3:0] out_ready [NC];
  spike_t [3:0] out_flit  [NC];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned C = y * MESH_X + x;

      seneca_core #(.DM_BITS(DM_BITS), .IM_DEPTH(IM_DEPTH)) u_core (
        .clk            (clk),
        .rst_n          (rst_n),
        .instr_req      (instr_req[C]),
        .instr_addr     (instr_addr[C]),
        .instr_rdata    (instr_rdata[C]),
        .imem_we        (imem_we[C]),
        .imem_waddr     (imem_waddr[C]),
        .imem_wdata     (imem_wdata[C]),
        .dreq           (dreq[C]),
        .drsp           (drsp[C]),
        .irq            (irq[C]),
        .mesh_in_valid  (in_valid[C]),
        .mesh_in_ready  (in_ready[C]),
        .mesh_in_flit   (in_flit[C]),
        .mesh_out_valid (out_valid[C]),
        .mesh_out_ready (out_ready[C]),
        .mesh_out_flit  (out_flit[C])
      );

      // North side
      if (y == 0) begin : g_n_edge
        assign in_valid[C][DN]  = north_in_valid[x];
        assign in_flit[C][DN]   = north_in_flit[x];
        assign north_in_ready[x]  = in_ready[C][DN];
        assign north_out_valid[x] = out_valid[C][DN];
        assign north_out_flit[x]  = out_flit[C][DN];
        assign out_ready[C][DN] = north_out_ready[x];
      end else begin : g_n_link
        assign in_valid[C][DN]  = out_valid[C-MESH_X][DS];
        assign in_flit[C][DN]   = out_flit[C-MESH_X][DS];
        assign out_ready[C][DN] = in_ready[C-MESH_X][DS];
      end
      // South side
      if (y == MESH_Y - 1) begin : g_s_edge
        assign in_valid[C][DS]  = south_in_valid[x];
        assign in_flit[C][DS]   = south_in_flit[x];
        assign south_in_ready[x]  = in_ready[C][DS];
        assign south_out_valid[x] = out_valid[C][DS];
        assign south_out_flit[x]  = out_flit[C][DS];
        assign out_ready[C][DS] = south_out_ready[x];
      end else begin : g_s_link
        assign in_valid[C][DS]  = out_valid[C+MESH_X][DN];
        assign in_flit[C][DS]   = out_flit[C+MESH_X][DN];
        assign out_ready[C][DS] = in_ready[C+MESH_X][DN];
      end
      // West side
      if (x == 0) begin : g_w_edge
        assign in_valid[C][DW]  = west_in_valid[y];
        assign in_flit[C][DW]   = west_in_flit[y];
        assign west_in_ready[y]  = in_ready[C][DW];
        assign west_out_valid[y] = out_valid[C][DW];
        assign west_out_flit[y]  = out_flit[C][DW];
        assign out_ready[C][DW] = west_out_ready[y];
      end else begin : g_w_link
        assign in_valid[C][DW]  = out_valid[C-1][DE];
        assign in_flit[C][DW]   = out_flit[C-1][DE];
        assign out_ready[C][DW] = in_ready[C-1][DE];
      end
      // East side
      if (x == MESH_X - 1) begin : g_e_edge
        assign in_valid[C][DE]  = east_in_valid[y];
        assign in_flit[C][DE]   = east_in_flit[y];
        assign east_in_ready[y]  = in_ready[C][DE];
        assign east_out_valid[y] = out_valid[C][DE];
        assign east_out_flit[y]  = out_flit[C][DE];
        assign out_ready[C][DE] = east_out_ready[y];
      end else begin : g_e_link
        assign in_valid[C][DE]  = out_valid[C+1][DW];
        assign in_flit[C][DE]   = out_flit[C+1][DW];
        assign out_ready[C][DE] = in_ready[C+1][DW];
      end
    end
  end
endmodule
