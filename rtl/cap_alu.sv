// cap_alu: the execute step of the capability-manipulation instructions.
//
// Given the instruction, the capability in the operand register (with its
// decoded base and end) and the integer operands, it decides whether the
// instruction is allowed and forms the resulting capability words. The
// rules are those of the formal model:
//   TIGHTEN  any capability; perm becomes the operand's decoded permission
//            if that is at or below the current one, otherwise no access
//   SHRINK   linear or non-linear; new bounds [a, b) must lie inside the
//            old ones with a < b
//   SPLIT    linear; split address s with base < s < end gives [base, s)
//            on the old node and [s, end) on the new node (res2)
//   DELIN    linear -> non-linear
//   SCC      set the cursor to a (refused for sealed, sealed-return and
//            uninitialized capabilities)
//   LCC      res_int = cursor
//   MREV     linear; res = revocation capability with the same region and
//            permission on the new node; the source stays as it is
//   REVOKE   revocation capability; res becomes uninitialized with its
//            cursor at the base if a linear node was revoked and the
//            permission is writable, linear otherwise
//   INIT     uninitialized with cursor == end -> linear
//   DROP     linear, revocation, uninitialized, sealed or sealed-return;
//            the register is cleared
//   SEAL     linear, readable and writable -> sealed (the region then holds
//            a domain's context)
// Tree work is not done here: tree_op_valid/tree_op name the node
// controller operation the instruction needs (on the capability's node),
// and new_node / lin_revoked carry that operation's answer back in.
// Validity of the operand's node is also checked by that operation.
// Call and return (domain switching: saving and loading the register file)
// belong to the core's control flow and are not handled here. The formal
// model numbers sealed domains; the 3-bit type field has no room for that
// number and it is not kept.
//
// Bounds are handled decoded: res_base/res_end (and res2_*) are the new
// bounds for the compressed-bounds encoder, which is outside this design;
// the bounds field of res_cap is passed through unchanged.
// Purely combinational.
//
// Following the paper: the instruction set and each instruction's
// preconditions and results. This design's own choices: the operand
// packaging, decoded bounds at the interface, and following the prose
// for SCC (the formal rule allows every capability type; the prose
// excludes sealed and uninitialized ones).
module cap_alu
  import capstone_pkg::*;
(
  input  cx_op_e            op,
  input  logic              cap_tag,       // operand register holds a capability
  input  cap_t              cap,
  input  logic [ADDR_W-1:0] base,
  input  logic [ADDR_W-1:0] bound_end,
  input  logic [63:0]       opnd_a,        // perm code, new base, split address, cursor
  input  logic [63:0]       opnd_b,        // new end (SHRINK)
  input  node_id_t          new_node,      // node made by MREV / SPLIT
  input  logic              lin_revoked,   // REVOKE invalidated a linear node
  output logic              legal,
  output logic              tree_op_valid,
  output node_op_e          tree_op,
  output logic              res_tag,
  output cap_t              res_cap,
  output logic [ADDR_W-1:0] res_base,
  output logic [ADDR_W-1:0] res_end,
  output logic              res2_valid,
  output cap_t              res2_cap,
  output logic [ADDR_W-1:0] res2_base,
  output logic [ADDR_W-1:0] res2_end,
  output logic [63:0]       res_int
);

  logic [2:0] req_perm;
  assign req_perm = (opnd_a < 64'd4) ? opnd_a[2:0] : P_NA;

  always_comb begin
    legal         = 1'b0;
    tree_op_valid = 1'b0;
    tree_op       = OP_QUERY;
    res_tag       = cap_tag;
    res_cap       = cap;
    res_base      = base;
    res_end       = bound_end;
    res2_valid    = 1'b0;
    res2_cap      = cap;
    res2_base     = base;
    res2_end      = bound_end;
    res_int       = '0;
    case (op)
      CX_TIGHTEN: begin
        legal        = cap_tag;
        res_cap.perm = perm_leq(req_perm, cap.perm) ? req_perm : P_NA;
      end
      CX_SHRINK: begin
        legal    = cap_tag && (cap.ctype == CT_LIN || cap.ctype == CT_NONLIN) &&
                   base <= opnd_a && opnd_a < opnd_b && opnd_b <= bound_end;
        res_base = opnd_a;
        res_end  = opnd_b;
      end
      CX_SPLIT: begin
        legal            = cap_tag && cap.ctype == CT_LIN && base < opnd_a && opnd_a < bound_end;
        tree_op_valid    = legal;
        tree_op          = OP_SPLIT;
        res_end          = opnd_a;
        res2_valid       = legal;
        res2_cap.node_id = new_node;
        res2_base        = opnd_a;
      end
      CX_DELIN: begin
        legal         = cap_tag && cap.ctype == CT_LIN;
        tree_op_valid = legal;
        tree_op       = OP_DELIN;
        res_cap.ctype = CT_NONLIN;
      end
      CX_SCC: begin
        legal          = cap_tag && !(cap.ctype inside {CT_SEALED, CT_SEALED_RET, CT_UNINIT});
        res_cap.cursor = opnd_a;
      end
      CX_LCC: begin
        legal   = cap_tag;
        res_int = cap.cursor;
      end
      CX_MREV: begin
        legal            = cap_tag && cap.ctype == CT_LIN;
        tree_op_valid    = legal;
        tree_op          = OP_MREV;
        res_cap.ctype    = CT_REV;
        res_cap.node_id  = new_node;
      end
      CX_REVOKE: begin
        legal         = cap_tag && cap.ctype == CT_REV;
        tree_op_valid = legal;
        tree_op       = OP_REVOKE;
        res_cap.ctype = revoke_result_type(lin_revoked, cap.perm);
        if (res_cap.ctype == CT_UNINIT) res_cap.cursor = base;
      end
      CX_INIT: begin
        legal         = cap_tag && cap.ctype == CT_UNINIT && cap.cursor == bound_end;
        res_cap.ctype = CT_LIN;
      end
      CX_DROP: begin
        legal         = cap_tag && (cap.ctype inside {CT_LIN, CT_REV, CT_UNINIT, CT_SEALED,
                                                 CT_SEALED_RET});
        tree_op_valid = legal;
        tree_op       = OP_DROP;
        res_tag       = 1'b0;
        res_cap       = '0;
      end
      CX_SEAL: begin
        legal         = cap_tag && cap.ctype == CT_LIN && perm_readable(cap.perm) &&
                        perm_writable(cap.perm);
        res_cap.ctype = CT_SEALED;
      end
      default: legal = 1'b0;
    endcase
  end

endmodule
