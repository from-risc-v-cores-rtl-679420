// seneca_pkg -- types and constants shared by the neuromorphic core and its mesh.
//
// Holds the NPE instruction (what the loop controller broadcasts to the eight
// neural processing elements), the loop-controller instruction word, the spike
// packet carried by the mesh network, the RISC-V data-bus request/response
// structs, and small BF16 helper functions used by the NPE datapath.
//
// Fixed by the published architecture: BF16 (16-bit brain float) arithmetic in
// the NPEs, eight NPEs per core, 32-bit RISC-V data port, a 16-bit-per-NPE data
// memory port, a routing table indexed by input port and packet label whose
// entries are sets of output ports including the local core.
// This design's own choices: every field width and encoding below (opcode
// values, label/neuron-id widths, register-file size, the bus memory map).
package seneca_pkg;

  // ---------------------------------------------------------------- NPEs
  localparam int unsigned BF16_W   = 16;
  localparam int unsigned N_NPE    = 8;     // NPEs per core
  localparam int unsigned NPE_RA_W = 4;     // 16 registers per NPE
  localparam int unsigned MEM_AW   = 16;    // address field carried by an NPE instruction

  typedef logic [BF16_W-1:0] bf16_t;

  typedef enum logic [3:0] {
    NPE_NOP = 4'd0,
    NPE_LD  = 4'd1,  // rd  <- port-B word[addr], this NPE's lane
    NPE_ST  = 4'd2,  // port-B word[addr], this NPE's lane <- rs1
    NPE_LDI = 4'd3,  // rd  <- imm (same value in every NPE)
    NPE_ADD = 4'd4,  // rd  <- rs1 + rs2
    NPE_SUB = 4'd5,  // rd  <- rs1 - rs2
    NPE_MUL = 4'd6,  // rd  <- rs1 * rs2
    NPE_MAC = 4'd7,  // rd  <- rd + rs1 * rs2   (two roundings)
    NPE_MAX = 4'd8,  // rd  <- max(rs1, rs2)    (ReLU with rs2 = 0)
    NPE_THR = 4'd9,  // flag <- rs1 >= rs2 ; rd <- flag ? 0 : rs1 (fire and reset)
    NPE_LDQ = 4'd10  // rd  <- integer weight in port-B word[addr], this NPE's lane,
                     //        converted to BF16 (see q_to_bf16; imm[2:0] selects it)
  } npe_op_e;

  typedef struct packed {
    npe_op_e                op;
    logic [NPE_RA_W-1:0]    rd;
    logic [NPE_RA_W-1:0]    rs1;
    logic [NPE_RA_W-1:0]    rs2;
    logic [MEM_AW-1:0]      addr;
    bf16_t                  imm;
  } npe_instr_t;

  // Does the instruction write rd / read rs1 / read rs2 / read rd?
  function automatic logic npe_writes(npe_op_e op);
    return !(op inside {NPE_NOP, NPE_ST});
  endfunction
  function automatic logic npe_reads_rs1(npe_op_e op);
    return op inside {NPE_ST, NPE_ADD, NPE_SUB, NPE_MUL, NPE_MAC, NPE_MAX, NPE_THR};
  endfunction
  function automatic logic npe_reads_rs2(npe_op_e op);
    return op inside {NPE_ADD, NPE_SUB, NPE_MUL, NPE_MAC, NPE_MAX, NPE_THR};
  endfunction
  function automatic logic npe_reads_rd(npe_op_e op);
    return op == NPE_MAC;
  endfunction

  // BF16 helpers. Subnormals count as zero (flush to zero).
  function automatic logic bf16_is_zero(bf16_t a);
    return a[14:7] == 8'd0;
  endfunction
  // a >= b as real numbers (NaN not modelled; +0 == -0)
  function automatic logic bf16_ge(bf16_t a, bf16_t b);
    logic za, zb;
    za = bf16_is_zero(a);
    zb = bf16_is_zero(b);
    if (za && zb)                return 1'b1;
    if (za)                      return b[15];
    if (zb)                      return !a[15];
    if (a[15] != b[15])          return b[15];
    if (!a[15])                  return a[14:0] >= b[14:0];
    return a[14:0] <= b[14:0];
  endfunction

  // Low-resolution weights: a 16-bit lane holds four signed 4-bit integers
  // (sel[2] = 0, nibble sel[1:0]) or two signed 8-bit integers (sel[2] = 1,
  // byte sel[0]). Every such integer is exact in BF16.
  function automatic bf16_t int8_to_bf16(logic [7:0] v);
    logic [7:0] m;
    logic [14:0] f;
    int p;
    if (v == 8'd0) return '0;
    m = v[7] ? 8'(-v) : v;               // -128 gives 8'h80, read as unsigned
    p = 0;
    for (int i = 0; i < 8; i++) if (m[i]) p = i;
    f = {m, 7'd0} >> p;                  // leading one at bit 7
    return {v[7], 8'(127 + p), f[6:0]};
  endfunction
  function automatic bf16_t q_to_bf16(bf16_t lane, logic [2:0] sel);
    logic [7:0] v;
    logic [3:0] n;
    n = lane[4 * sel[1:0] +: 4];
    if (sel[2]) v = sel[0] ? lane[15:8] : lane[7:0];
    else        v = {{4{n[3]}}, n};
    return int8_to_bf16(v);
  endfunction

  // ---------------------------------------------------- loop controller
  typedef enum logic [2:0] {
    LC_END   = 3'd0,  // wait for the NPEs to drain, raise done
    LC_NPE   = 3'd1,  // issue an NPE instruction, addr = AR[ar], then AR[ar] += sext(inc)
    LC_LOOP  = 3'd2,  // repeat the next `inc` instructions `imm` times
    LC_SETAR = 3'd3,  // AR[ar] <- imm  (or PARAM[imm] when psel)
    LC_ADDAR = 3'd4   // AR[ar] <- AR[ar] + imm
  } lc_op_e;

  localparam int unsigned LC_AR_W = 3;

  typedef struct packed {
    lc_op_e                 op;
    npe_op_e                nop;
    logic [NPE_RA_W-1:0]    rd;
    logic [NPE_RA_W-1:0]    rs1;
    logic [NPE_RA_W-1:0]    rs2;
    logic [LC_AR_W-1:0]     ar;
    logic                   psel;  // immediate comes from parameter register imm[2:0]
    logic [7:0]             inc;   // AR post-increment (NPE) or loop body length (LOOP)
    logic [15:0]            imm;
  } lc_instr_t;                    // 47 bits

  localparam int unsigned LC_INSTR_W = $bits(lc_instr_t);

  // ------------------------------------------------------------ network
  localparam int unsigned N_PORTS = 5;
  localparam int unsigned LABEL_W = 6;
  localparam int unsigned NID_W   = 10;

  typedef enum logic [2:0] {
    P_CORE  = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4
  } port_e;

  // One spike (address-event) packet: source label, neuron id, graded value.
  typedef struct packed {
    logic [LABEL_W-1:0] label;
    logic [NID_W-1:0]   nid;
    bf16_t              value;
  } spike_t;                       // 32 bits

  // Output-port set of a routing-table entry, bit i = port_e i.
  typedef logic [N_PORTS-1:0] port_mask_t;

  // --------------------------------------------------- RISC-V data bus
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;    // byte address, word aligned
    logic [31:0] wdata;
  } dbus_req_t;

  typedef struct packed {
    logic        gnt;     // request accepted this cycle
    logic        rvalid;  // response (read data) for the request granted last cycle
    logic [31:0] rdata;
  } dbus_rsp_t;

  // Data-bus memory map (byte address bits 19:16)
  localparam logic [3:0] MAP_LC  = 4'h4;  // loop controller registers, word index addr[9:2]
  localparam logic [3:0] MAP_RT  = 4'h5;  // routing table, entry index addr[10:2]
  localparam logic [3:0] MAP_NOC = 4'h6;  // +0: inject(write)/eject-pop(read), +4: status
  // 0x0_0000 - 0x3_FFFF: data memory port A

endpackage
