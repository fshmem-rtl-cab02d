// fshmem_pkg: types and constants shared by the FSHMEM node.
//
// The node moves 128-bit flits (16 bytes) on its network ports and its
// memory buses. An active message (AM) is cut into packets; every packet is
// one header flit followed by the payload flits. The header carries the
// handler opcode, so the receiving node invokes the handler in hardware
// instead of calling a function pointer. The 128-bit width and the opcode
// idea follow the paper; the exact header layout, the opcode numbers, the
// command layout and the memory map are this design's own choices.
package fshmem_pkg;

  localparam int unsigned DATA_W   = 128;            // flit / memory word
  localparam int unsigned BYTES_W  = DATA_W / 8;     // 16 bytes per flit
  localparam int unsigned ADDR_W   = 32;             // byte address
  localparam int unsigned NODE_W   = 4;

  // Message class: short carries no payload, medium carries payload to the
  // local (private) segment, long carries payload to the shared segment.
  typedef enum logic [1:0] {
    AM_SHORT  = 2'd0,
    AM_MEDIUM = 2'd1,
    AM_LONG   = 2'd2
  } am_type_e;

  // Handler opcodes carried in the header.
  typedef enum logic [3:0] {
    H_PUT     = 4'd1,
    H_GET     = 4'd2,
    H_COMPUTE = 4'd3
  } handler_e;

  // Header flit (exactly 128 bits).
  typedef struct packed {
    logic [31:0]       arg1;
    logic [31:0]       arg0;
    logic [15:0]       len;       // payload bytes in this packet
    logic [31:0]       addr;      // destination byte address of this packet
    logic [NODE_W-1:0] src_node;
    handler_e          handler;
    am_type_e          mtype;
    logic              reply;     // AMReply* rather than AMRequest*
    logic              last;      // last packet: invoke the handler
    logic [3:0]        rsvd;
  } am_hdr_t;

  // Command handed to a scheduler (from host, ART or the Rx handler).
  typedef struct packed {
    am_type_e          mtype;
    logic              reply;
    handler_e          handler;
    logic [31:0]       src_addr;  // local payload source (byte address)
    logic [31:0]       dst_addr;  // remote destination (segment offset)
    logic [31:0]       len;       // total payload bytes
    logic [31:0]       arg0;
    logic [31:0]       arg1;
  } am_cmd_t;

  localparam int unsigned CMD_W = $bits(am_cmd_t);

  // Command for the compute core.
  typedef struct packed {
    logic [NODE_W-1:0] src_node;
    logic [31:0]       arg0;
    logic [31:0]       arg1;
  } comp_cmd_t;

  localparam int unsigned COMP_W = $bits(comp_cmd_t);

  // Memory map (byte addresses): three 1 MiB banks. Banks 0-1 are the
  // shared (globally addressed) segment, 2 MiB so that the largest
  // transfer of the paper's measurements fits; bank 2 is the local segment.
  localparam int unsigned BANK_WORDS  = 65536;
  localparam int unsigned N_BANK      = 3;
  localparam logic [31:0] SHARED_BASE = 32'h0000_0000;
  localparam logic [31:0] LOCAL_BASE  = 32'h0020_0000;

  // Memory master indices on the interconnect.
  localparam int unsigned M_HOST = 0;
  localparam int unsigned M_RD   = 1;
  localparam int unsigned M_WR   = 2;
  localparam int unsigned M_COMP = 3;
  localparam int unsigned N_MASTER = 4;

endpackage
