// capstone_pkg: types and constants shared by the Capstone capability and
// revocation-tree hardware.
//
// Two 128-bit formats are defined here, with the field widths and bit
// positions of the published layouts:
//   capability    node-id[127:97] type[96:94] perm[93:91] bounds[90:64] cursor[63:0]
//   revocation    depth[127:97] next[96:66] prev[65:35] counter[34:2] freed[1] valid[0]
//   tree node
// The 3-bit permission code follows the formal model's DecodePerm
// (0 = R, 1 = RW, 2 = RX, 3 = RWX, anything else = no access). The 3-bit
// type code and the use of the counter field's top bit as the linear/
// non-linear node mark are this design's own choices (see node_t below).
package capstone_pkg;

  localparam int unsigned CAP_W     = 128;
  localparam int unsigned NODE_ID_W = 31;
  localparam int unsigned CURSOR_W  = 64;
  localparam int unsigned BOUNDS_W  = 27;
  localparam int unsigned COUNT_W   = 33;
  localparam int unsigned ADDR_W    = 64;

  typedef logic [NODE_ID_W-1:0] node_id_t;

  // All-ones id marks "no node" in next/prev links and in the free list.
  localparam node_id_t NODE_NULL = '1;
  // Node 0 is the root of the revocation tree and the head of the list.
  localparam node_id_t NODE_ROOT = '0;

  // Capability type code (3-bit field). Encoding chosen by this design.
  typedef enum logic [2:0] {
    CT_LIN        = 3'd0,
    CT_NONLIN     = 3'd1,
    CT_REV        = 3'd2,
    CT_UNINIT     = 3'd3,
    CT_SEALED     = 3'd4,
    CT_SEALED_RET = 3'd5
  } cap_type_e;

  // Permission code, from DecodePerm in the formal model.
  typedef enum logic [2:0] {
    P_R   = 3'd0,
    P_RW  = 3'd1,
    P_RX  = 3'd2,
    P_RWX = 3'd3,
    P_NA  = 3'd4
  } perm_e;

  // Capability-manipulation instructions handled by cap_alu.
  typedef enum logic [3:0] {
    CX_TIGHTEN = 4'd0,   // restrict permissions
    CX_SHRINK  = 4'd1,   // narrow the region
    CX_SPLIT   = 4'd2,   // cut a linear capability in two at an address
    CX_DELIN   = 4'd3,   // linear -> non-linear
    CX_SCC     = 4'd4,   // set cursor
    CX_LCC     = 4'd5,   // read cursor
    CX_MREV    = 4'd6,   // mint a revocation capability
    CX_REVOKE  = 4'd7,   // revoke with a revocation capability
    CX_INIT    = 4'd8,   // fully written uninitialized -> linear
    CX_DROP    = 4'd9,   // give up a capability
    CX_SEAL    = 4'd10   // linear, readable and writable -> sealed
  } cx_op_e;

  typedef struct packed {
    node_id_t              node_id;  // [127:97]
    logic [2:0]            ctype;    // [96:94]  cap_type_e
    logic [2:0]            perm;     // [93:91]  perm_e
    logic [BOUNDS_W-1:0]   bounds;   // [90:64]  compressed bounds
    logic [CURSOR_W-1:0]   cursor;   // [63:0]
  } cap_t;

  // Revocation tree node. The counter field is 33 bits wide; this design
  // keeps the reference count in counter[31:0] and uses counter[32] to
  // mark a node whose capability is linear (needed by revoke to decide
  // between a linear and an uninitialized result).
  typedef struct packed {
    node_id_t             depth;    // [127:97]
    node_id_t             next;     // [96:66]
    node_id_t             prev;     // [65:35]
    logic                 lin;      // [34]  counter[32]: linear-node mark
    logic [COUNT_W-2:0]   refcnt;   // [33:2] counter[31:0]: reference count
    logic                 freed;    // [1]
    logic                 valid;    // [0]
  } node_t;

  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } access_e;

  // Revocation-tree operations handled by the node controller.
  typedef enum logic [3:0] {
    OP_QUERY  = 4'd0,   // read validity of a node
    OP_ALLOC  = 4'd1,   // new node as a child of the root
    OP_MREV   = 4'd2,   // mint revocation: new node between n and its parent
    OP_SPLIT  = 4'd3,   // new sibling of n
    OP_DELIN  = 4'd4,   // mark n non-linear
    OP_REVOKE = 4'd5,   // invalidate and unlink the subtree below n
    OP_DROP   = 4'd6,   // remove n, its children move up to n's parent
    OP_RC_INC = 4'd7,   // one more capability refers to n
    OP_RC_DEC = 4'd8    // one capability fewer refers to n
  } node_op_e;

  // The formal model's readable predicate lists R, RX and RWX only, while
  // its permission order R <= RW makes RW a superset of R; the order is
  // followed here, so RW also grants reads.
  // Permission order of the formal model: pa <= pb when pb grants at least
  // what pa grants (NA below everything, R below RW and RX, both below RWX).
  function automatic logic perm_leq(logic [2:0] pa, logic [2:0] pb);
    case (pa)
      P_R:     return pb == P_R  || pb == P_RW || pb == P_RX || pb == P_RWX;
      P_RW:    return pb == P_RW || pb == P_RWX;
      P_RX:    return pb == P_RX || pb == P_RWX;
      P_RWX:   return pb == P_RWX;
      default: return 1'b1;
    endcase
  endfunction

  function automatic logic perm_readable(logic [2:0] p);
    return (p == P_R) || (p == P_RW) || (p == P_RX) || (p == P_RWX);
  endfunction

  function automatic logic perm_writable(logic [2:0] p);
    return (p == P_RW) || (p == P_RWX);
  endfunction

  function automatic logic perm_executable(logic [2:0] p);
    return (p == P_RX) || (p == P_RWX);
  endfunction

  // Type a revocation capability takes after revoke: linear unless a
  // linear node was revoked and the permissions allow writing.
  function automatic logic [2:0] revoke_result_type(logic lin_revoked, logic [2:0] p);
    // Formal rule: linear if no linear node was revoked or p in {NA, R, RX},
    // i.e. uninitialized only when a linear node went and p is writable.
    return (lin_revoked && perm_writable(p)) ? CT_UNINIT : CT_LIN;
  endfunction

endpackage
