// enbb_pkg: types and constants shared by the numerical-brain network.
//
// The network carries operands as packets of flits. A packet starts with a
// head flit (packet type, destination switch, operand tag) and continues with
// body flits that each carry one radix-2 signed digit, most significant digit
// first; the last flit of a packet has its tail bit set. Configuration packets
// carry two body flits of operator settings instead of digits.
//
// The paper fixes none of these encodings. The number of virtual channels per
// physical channel (3), flit-buffer depth (3 slots) and operators per output
// port (2) are the counts drawn in the paper's switch figure; the mesh size
// (10 x 8) is the one drawn in its example-computation figure. Everything else
// here (field widths, digit code, packet types, opcodes) is this design's own.
package enbb_pkg;

  // Mesh ports of a 2D switch.
  localparam int unsigned NPORTS  = 5;
  localparam int unsigned P_NORTH = 0;  // towards y-1
  localparam int unsigned P_EAST  = 1;  // towards x+1
  localparam int unsigned P_SOUTH = 2;  // towards y+1
  localparam int unsigned P_WEST  = 3;  // towards x-1
  localparam int unsigned P_LOCAL = 4;  // network interface to the front end

  localparam int unsigned COORD_W = 4;  // coordinate width (mesh up to 16 x 16)
  localparam int unsigned TAG_W   = 6;  // operand (signal) tag width
  localparam int unsigned DATA_W  = 16; // flit payload width
  localparam int unsigned VCID_W  = 2;  // virtual-channel number on a link

  // Signed digit in {-1,0,+1}, two's-complement coded on two bits:
  // 2'b01 = +1, 2'b00 = 0, 2'b11 = -1 (2'b10 is never produced).
  typedef logic [1:0] sdigit_t;
  localparam sdigit_t SD_ZERO = 2'b00;
  localparam sdigit_t SD_POS  = 2'b01;
  localparam sdigit_t SD_NEG  = 2'b11;

  typedef enum logic [1:0] {
    PT_DATA    = 2'd0,  // delivered to the front end at the destination
    PT_OPERAND = 2'd1,  // consumed by an operator at the destination switch
    PT_CONFIG  = 2'd2   // configures an operator at the destination switch
  } ptype_e;

  typedef enum logic [1:0] {
    OP_ADD = 2'd0,      // C = A + B
    OP_SUB = 2'd1       // C = A - B
  } opcode_e;

  // Head-flit payload.
  typedef struct packed {
    ptype_e             ptype;
    logic [COORD_W-1:0] dx;
    logic [COORD_W-1:0] dy;
    logic [TAG_W-1:0]   tag;
  } head_t;

  // First configuration body flit (padded to DATA_W).
  typedef struct packed {
    logic [1:0]       pad;
    opcode_e          op;
    logic [TAG_W-1:0] tag_a;
    logic [TAG_W-1:0] tag_b;
  } cfg1_t;

  // Operator configuration as held by an arithmetic channel.
  typedef struct packed {
    opcode_e          op;
    logic [TAG_W-1:0] tag_a;
    logic [TAG_W-1:0] tag_b;
    head_t            res;     // head of the result packet
  } opcfg_t;

  typedef struct packed {
    logic              head;
    logic              tail;
    logic [VCID_W-1:0] vc;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Value of a signed digit as an integer.
  function automatic int sd_val(sdigit_t d);
    return (d == SD_POS) ? 1 : (d == SD_NEG) ? -1 : 0;
  endfunction

  function automatic sdigit_t sd_neg(sdigit_t d);
    return (d == SD_POS) ? SD_NEG : (d == SD_NEG) ? SD_POS : SD_ZERO;
  endfunction

endpackage
