// vc_pkg: types and constants shared by the VoxelCache blocks.
//
// A VoxelCache key is the integer coordinate (kx, ky, kz) of a voxel block,
// 12 bytes; its value is an 8-byte pointer to the block. Several key/pointer
// pairs are packed into one reserved cache line: 3 in a 64-byte CPU line,
// 6 in a 128-byte GPU line. The pair layout follows the printed line format
// (key1, block1, key2, block2, ...): with pair_t below and pair 0 in the low
// bits of a line, byte 0..11 hold key1, bytes 12..19 block1, and so on.
//
// Per-slot valid bits and LRU ages are kept in the line's cache state, not in
// the data bytes, as the within-line LRU bits are described as part of the
// cache state. The all-zero pointer is used as the "invalid value" that a
// failed lookup returns and that a remove writes; the paper does not give
// its encoding.
package vc_pkg;

  localparam int unsigned COORD_W  = 32;            // one coordinate, bits
  localparam int unsigned KEY_W    = 3 * COORD_W;   // 12-byte key
  localparam int unsigned PTR_W    = 64;            // 8-byte block pointer
  localparam int unsigned PAIR_W   = KEY_W + PTR_W; // 20 bytes
  localparam int unsigned REG_W    = 64;            // rd1, rd2, r1 register width
  localparam int unsigned AGE_W    = 3;             // slot LRU age, up to 8 slots
  localparam int unsigned ID_W     = 8;             // request tag returned with a response

  typedef logic [PTR_W-1:0] ptr_t;
  localparam ptr_t INVALID_PTR = '0;

  typedef struct packed {
    logic signed [COORD_W-1:0] kz;
    logic signed [COORD_W-1:0] ky;
    logic signed [COORD_W-1:0] kx;
  } key_t;

  // one key/pointer pair: key in the low 12 bytes, pointer in the next 8
  typedef struct packed {
    ptr_t ptr;
    key_t key;
  } pair_t;

  // within-line state of one slot (held in the line's cache state)
  typedef struct packed {
    logic             valid;
    logic [AGE_W-1:0] age;   // 0 = most recently used
  } slot_state_t;

  // VoxelCache memory operations carried by the load-store queue
  typedef enum logic [1:0] {
    VC_LOOKUP = 2'd0,
    VC_INSERT = 2'd1    // remove is an insert of INVALID_PTR
  } vc_op_e;

  // ISA instructions (Table "VoxelCache ISA instructions"); the encoding is
  // this design's own
  typedef enum logic [2:0] {
    OPC_NONE      = 3'd0,
    OPC_RESERVE   = 3'd1,   // reserve_cache_lines ways, lvl
    OPC_LOOKUP    = 3'd2,   // voxcache_lookup  state, rd1, rd2, r1
    OPC_REMOVE    = 3'd3,   // voxcache_remove  status, rd1, rd2
    OPC_INSERT    = 3'd4,   // voxcache_insert  status, rd1, rd2, r1
    OPC_UNRESERVE = 3'd5,   // unreserve_lines
    OPC_LOAD      = 3'd6,   // ordinary load,  address in rd1
    OPC_STORE     = 3'd7    // ordinary store, address in rd1, data in r1
  } vc_opcode_e;

  // one instruction as it reaches the memory pipeline
  typedef struct packed {
    logic [ID_W-1:0]  id;
    vc_opcode_e       opc;
    logic [REG_W-1:0] rd1;
    logic [REG_W-1:0] rd2;
    logic [REG_W-1:0] r1;
    logic [3:0]       ways;   // reserve_cache_lines: ways to reserve
    logic [1:0]       lvl;    // reserve_cache_lines: 1 = L1D, 2 = L2
  } vc_instr_t;

  // addressing mode flag of a load-store queue entry
  typedef enum logic {
    MODE_VADDR = 1'b0,
    MODE_VOX   = 1'b1
  } lsq_mode_e;

  // request handed from the load-store queue to the VoxelCache controller
  typedef struct packed {
    logic [ID_W-1:0] id;
    vc_op_e          op;
    logic [31:0]     pa;      // pseudoaddress, computed before queue insert
    key_t            key;
    ptr_t            value;
  } vc_req_t;

  // response of the controller: found = a valid pointer was returned
  typedef struct packed {
    logic [ID_W-1:0] id;
    vc_op_e          op;
    logic            found;
    ptr_t            value;
  } vc_resp_t;

  // a virtual-address request passed through to the ordinary cache port
  typedef struct packed {
    logic [ID_W-1:0]  id;
    logic             write;
    logic [REG_W-1:0] vaddr;
    logic [REG_W-1:0] wdata;
  } va_req_t;

  // one load-store queue entry
  typedef struct packed {
    lsq_mode_e mode;
    vc_req_t   vox;
    va_req_t   va;
  } lsq_entry_t;

  // key from the two source registers: rd1 = {ky, kx}, rd2[31:0] = kz.
  // The instruction reads 16 bytes; the upper 4 bytes of rd2 are not part
  // of the 12-byte stored key.
  function automatic key_t key_from_regs(logic [REG_W-1:0] rd1, logic [REG_W-1:0] rd2);
    key_t k;
    k.kx = rd1[31:0];
    k.ky = rd1[63:32];
    k.kz = rd2[31:0];
    return k;
  endfunction

endpackage
