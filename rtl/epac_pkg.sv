// epac_pkg: types and constants shared by the EPAC uncore and tile blocks.
//
// The uncore is a 2D mesh of crosspoints (XPs) carrying a simplified AMBA 5
// CHI protocol on four dedicated channels (request, response, snoop, data).
// A flit carries its target and source node, a transaction id, an opcode, a
// physical address and one 512-bit cache line, so that a whole line moves in
// one flit per cycle as the chip's NoC does. Node ids are {y, x, port}: the
// mesh is three columns by two rows and every XP has two device ports.
// The 512-bit line, the four channels, the two device ports per XP and the
// 3x2 mesh follow the chip; the opcode encoding, the 40-bit address and the
// 8-bit transaction id are this design's own choices (the real CHI encodings
// are much richer).
package epac_pkg;

  localparam int unsigned MESH_X     = 3;
  localparam int unsigned MESH_Y     = 2;
  localparam int unsigned XW         = 2;   // bits of an x coordinate
  localparam int unsigned YW         = 1;   // bits of a y coordinate
  localparam int unsigned ADDR_W     = 40;
  localparam int unsigned LINE_BITS  = 512;
  localparam int unsigned LINE_BYTES = LINE_BITS / 8;
  localparam int unsigned OFFS_W     = $clog2(LINE_BYTES);
  localparam int unsigned TXN_W      = 8;
  localparam int unsigned N_CH       = 4;

  typedef struct packed {
    logic [YW-1:0] y;
    logic [XW-1:0] x;
    logic          p;      // device port of the crosspoint
  } node_id_t;

  localparam int unsigned NODE_W = $bits(node_id_t);

  typedef enum logic [1:0] {
    CH_REQ = 2'd0,
    CH_RSP = 2'd1,
    CH_SNP = 2'd2,
    CH_DAT = 2'd3
  } chi_ch_e;

  typedef enum logic [4:0] {
    OP_NONE          = 5'd0,
    // requests (REQ channel)
    OP_READ_SHARED   = 5'd1,
    OP_READ_UNIQUE   = 5'd2,
    OP_READ_NOSNP    = 5'd3,   // home node to memory
    OP_ATOMIC        = 5'd4,   // far atomic, operand in data[63:0], kind in resp
    OP_EVICT         = 5'd5,   // clean line dropped by a requester
    // data (DAT channel)
    OP_WRITEBACK     = 5'd6,   // dirty line from a requester to its home
    OP_WRITE_NOSNP   = 5'd7,   // home node to memory
    OP_COMP_DATA     = 5'd8,   // read/atomic data to the requester
    OP_SNP_RESP_DATA = 5'd9,   // dirty data returned by a snooped cache
    OP_MEM_DATA      = 5'd10,  // read data from memory to the home node
    // responses (RSP channel)
    OP_COMP          = 5'd11,  // write-back / evict / memory write done
    OP_SNP_RESP      = 5'd12,  // clean snoop response
    // snoops (SNP channel)
    OP_SNP_SHARED    = 5'd13,  // downgrade to shared, return dirty data
    OP_SNP_UNIQUE    = 5'd14   // invalidate, return dirty data
  } chi_op_e;

  // Granted cache state carried in flit.resp for OP_COMP_DATA (MESI-like)
  localparam logic [3:0] RESP_S = 4'd1;
  localparam logic [3:0] RESP_E = 4'd2;
  localparam logic [3:0] RESP_M = 4'd3;

  typedef struct packed {
    node_id_t             tgt;
    node_id_t             src;
    logic [TXN_W-1:0]     txn;
    chi_op_e              op;
    logic [3:0]           resp;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);

  // Far-atomic operations of the L2 atomic ALU (a subset of CHI's)
  typedef enum logic [3:0] {
    AMO_ADD  = 4'd0,
    AMO_CLR  = 4'd1,
    AMO_EOR  = 4'd2,
    AMO_SET  = 4'd3,
    AMO_SMAX = 4'd4,
    AMO_SMIN = 4'd5,
    AMO_UMAX = 4'd6,
    AMO_UMIN = 4'd7,
    AMO_SWAP = 4'd8,
    AMO_CAS  = 4'd9
  } amo_op_e;

  // Crosspoint port numbering
  localparam int unsigned XP_N = 0, XP_E = 1, XP_S = 2, XP_W = 3, XP_D0 = 4, XP_D1 = 5;
  localparam int unsigned XP_PORTS = 6;

endpackage
