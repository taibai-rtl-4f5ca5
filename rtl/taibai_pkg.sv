// taibai_pkg: types and constants shared by the whole chip.
//
// Holds the geometry (11 x 12 mesh of cortical columns, 8 neuron cores per
// column, 256 neurons per core), the 64-bit NoC packet, the 36-bit event that
// a scheduler hands to a neuron core, the formats of the fan-in and fan-out
// topology table entries and the neuron-core instruction set.
//
// From the paper: the mesh size, 8 NCs per CC, the 64-bit packet made of
// type, phase, tag, index, destination area and payload, the 36-bit event of
// neuron id, axon id and data, the table sizes (fan-in 2K x 22 / 64K x 11,
// fan-out 2K x 24 / 8K x 32), the four fan-in entry types and the instruction
// names of the ISA. The bit position of every field, the field widths that the
// paper does not print, and the instruction encoding are this design's own.
package taibai_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int N_NC          = 8;     // neuron cores per cortical column
  localparam int NEURONS_PER_NC = 256;  // 16 x 16-bit fired-neuron bitmap
  localparam int COORD_W       = 4;     // mesh coordinate width
  localparam logic [COORD_W-1:0] OFFCHIP_LOW = 4'hF; // coordinate "-1"

  // ---------------------------------------------------------------- packets
  typedef enum logic [2:0] {
    PKT_UNICAST   = 3'd0,   // point-to-point spike, XY routing
    PKT_MULTICAST = 3'd1,   // regional multicast spike
    PKT_BROADCAST = 3'd2,   // chip-wide broadcast spike
    PKT_MEM_WR    = 3'd3,   // memory-access write (configuration)
    PKT_MEM_RD    = 3'd4,   // memory-access read (probe request)
    PKT_RD_RESP   = 3'd5    // probe response
  } pkt_type_e;

  typedef enum logic [1:0] {
    PH_TRAVEL = 2'd0,       // on the way to the destination region
    PH_ROW    = 2'd1,       // spreading along the entry row of the region
    PH_COL    = 2'd2        // spreading along a column of the region
  } phase_e;

  // Destination area: rectangle x0..x1, y0..y1. Unicast uses x0,y0 only.
  typedef struct packed {
    logic [COORD_W-1:0] x0;
    logic [COORD_W-1:0] y0;
    logic [COORD_W-1:0] x1;
    logic [COORD_W-1:0] y1;
  } dest_t;   // 16 bits

  // 64-bit packet: type 3 | phase 2 | dest 16 | body 43
  typedef struct packed {
    pkt_type_e   ptype;
    phase_e      phase;
    dest_t       dest;
    logic [42:0] body;
  } packet_t;

  // Body of a spike packet: tag 4 | index 11 | spare 1 | global axon 11 | data 16
  typedef struct packed {
    logic [3:0]  tag;
    logic [10:0] index;
    logic        spare;
    logic [10:0] gaxon;
    logic [15:0] data;
  } spike_body_t;

  // Body of a memory-access packet:
  // sel 4 | alt 1 | addr 16 | data 16 | spare 6
  // For PKT_MEM_RD the data field carries the return destination.
  typedef struct packed {
    logic [3:0]  sel;
    logic        alt;
    logic [15:0] addr;
    logic [15:0] data;
    logic [5:0]  spare;
  } mem_body_t;

  // Memory selectors of memory-access packets
  localparam logic [3:0] SEL_FIN_DT  = 4'd0;  // fan-in first-level table
  localparam logic [3:0] SEL_FIN_IT  = 4'd1;  // fan-in second-level table
  localparam logic [3:0] SEL_FOUT_DT = 4'd2;  // fan-out first-level table (alt: bits 23:16)
  localparam logic [3:0] SEL_FOUT_IT = 4'd3;  // fan-out second-level table (alt: bits 31:16)
  localparam logic [3:0] SEL_REG     = 4'd4;  // CC registers
  localparam logic [3:0] SEL_NC0     = 4'd8;  // 8..15: NC n memories (alt: instruction mem)

  // ---------------------------------------------------------------- tables
  // Fan-in first-level entry (22 bits)
  typedef struct packed {
    logic [3:0]  tag;
    logic [15:0] addr;
    logic [1:0]  ietype;
  } fin_de_t;

  // Fan-out first-level entry (24 bits)
  typedef struct packed {
    logic [12:0] addr;
    logic [10:0] gaxon;
  } fout_de_t;

  // Fan-out second-level entry (32 bits)
  typedef struct packed {
    logic        last;    // "end"
    dest_t       dest;
    logic [3:0]  tag;
    logic [10:0] index;
  } fout_ie_t;

  // ---------------------------------------------------------------- NC event
  typedef struct packed {
    logic [7:0]  nid;     // local neuron id in the NC
    logic [11:0] axon;    // axon id (global, local or conv weight address)
    logic [15:0] data;
  } nc_event_t;           // 36 bits

  // NC configuration / probe access port (from the scheduler)
  typedef struct packed {
    logic        req;
    logic        we;
    logic        imem;    // 1: instruction memory, 0: data memory
    logic [12:0] addr;    // data memory word or instruction half-word
    logic [15:0] wdata;
  } nc_cfg_t;

  // ---------------------------------------------------------------- stages
  typedef enum logic [1:0] {
    ST_INIT  = 2'd0,
    ST_INTEG = 2'd1,
    ST_FIRE  = 2'd2
  } stage_e;

  // ---------------------------------------------------------------- ISA
  // 32-bit instruction: op 6 | rd 4 | rs1 4 | fp 1 | imm 1 | imm16
  // When imm=0, imm16 = {off12, rs2}.
  typedef enum logic [5:0] {
    OP_NOP     = 6'd0,
    OP_RECV    = 6'd1,
    OP_SEND    = 6'd2,
    OP_FINDIDX = 6'd3,
    OP_LOCACC  = 6'd4,
    OP_DIFF    = 6'd5,
    OP_ADD     = 6'd6,
    OP_SUB     = 6'd7,
    OP_MUL     = 6'd8,
    OP_ADDC    = 6'd9,
    OP_SUBC    = 6'd10,
    OP_MULC    = 6'd11,
    OP_AND     = 6'd12,
    OP_OR      = 6'd13,
    OP_XOR     = 6'd14,
    OP_CMP     = 6'd15,
    OP_MOV     = 6'd16,
    OP_LD      = 6'd17,
    OP_ST      = 6'd18,
    OP_B       = 6'd19,
    OP_BC      = 6'd20
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [3:0]  rd;
    logic [3:0]  rs1;
    logic        fp;
    logic        use_imm;
    logic [15:0] imm;
  } instr_t;

  // Compare conditions (in the rd field of CMP)
  localparam logic [3:0] CC_EQ = 4'd0;
  localparam logic [3:0] CC_NE = 4'd1;
  localparam logic [3:0] CC_LT = 4'd2;
  localparam logic [3:0] CC_GE = 4'd3;
  localparam logic [3:0] CC_GT = 4'd4;
  localparam logic [3:0] CC_LE = 4'd5;

  // SEND neuron types (imm[0]): normal spike or delayed (skip-connection) spike
  localparam logic [15:0] SEND_NEU   = 16'd0;
  localparam logic [15:0] SEND_DELAY = 16'd1;

  function automatic instr_t mk_instr(opcode_e op, logic [3:0] rd, logic [3:0] rs1,
                                      logic fp, logic use_imm, logic [15:0] imm);
    instr_t i;
    i.op = op; i.rd = rd; i.rs1 = rs1; i.fp = fp; i.use_imm = use_imm; i.imm = imm;
    return i;
  endfunction

  // register-operand form: imm16 = {off12, rs2}
  function automatic instr_t mk_rr(opcode_e op, logic [3:0] rd, logic [3:0] rs1,
                                   logic [3:0] rs2, logic fp, logic [11:0] off);
    return mk_instr(op, rd, rs1, fp, 1'b0, {off, rs2});
  endfunction

  // Mesh coordinate helpers: 4'hF stands for -1 (off-chip, west/south).
  function automatic int signed coord(logic [COORD_W-1:0] c);
    return (c == OFFCHIP_LOW) ? -1 : int'(c);
  endfunction

endpackage
