// cap_checker: decides whether one memory access made through a Capstone
// capability is allowed.
//
// Every load, store and instruction fetch presents a 128-bit capability;
// the access goes to the capability's cursor. The check is purely
// combinational and is the conjunction of the formal model's predicates:
//   accessible  type is linear, non-linear or uninitialized (revocation,
//               sealed and sealed-return capabilities grant no access)
//   permission  read needs R/RW/RX/RWX and a type other than uninitialized,
//               write needs RW/RWX, execute needs RX/RWX and a type other
//               than uninitialized
//   bounds      base <= cursor and cursor + access size <= end
//   validity    the capability's revocation node is still valid; this bit
//               comes from the node controller's query, which runs in
//               parallel with the access, so it may arrive later than the
//               other inputs and is only ANDed in at the output
// A write through an uninitialized capability moves its cursor forward by
// one word (next_cursor); init_ok says such a capability has been written
// up to its end and may be turned into a linear one.
//
// Base and end are inputs: the 27-bit compressed bounds field uses an
// encoding taken from elsewhere and decoding it is outside this block.
// The formal model's readable predicate omits RW, but its permission order
// puts R below RW; RW is taken to grant reads, as its name says.
// Following the paper: the predicates and the permission encoding. This
// design's own choices: byte addresses, the access size input, and the
// word size of the uninitialized-cursor step (WORD_BYTES).
module cap_checker
  import capstone_pkg::*;
#(
  parameter int unsigned WORD_BYTES = 8
) (
  input  cap_t               cap,
  input  logic [ADDR_W-1:0]  base,
  input  logic [ADDR_W-1:0]  bound_end,   // first address past the region
  input  access_e            acc,
  input  logic [2:0]         size_log2,   // access size is 2**size_log2 bytes
  input  logic               node_valid,  // from the revocation-node query
  output logic               ok,          // access allowed
  output logic               f_type,      // type grants no access
  output logic               f_perm,      // permission missing
  output logic               f_bounds,    // outside [base, end)
  output logic               f_revoked,   // node no longer valid
  output logic [ADDR_W-1:0]  next_cursor, // cursor after the access
  output logic               init_ok      // uninitialized and fully written
);

  logic [ADDR_W:0] last_excl;
  logic            accessible, perm_ok, in_bounds;

  always_comb begin
    accessible = (cap.ctype == CT_LIN) || (cap.ctype == CT_NONLIN) ||
                 (cap.ctype == CT_UNINIT);

    unique case (acc)
      ACC_READ:  perm_ok = perm_readable(cap.perm)   && (cap.ctype != CT_UNINIT);
      ACC_WRITE: perm_ok = perm_writable(cap.perm);
      ACC_EXEC:  perm_ok = perm_executable(cap.perm) && (cap.ctype != CT_UNINIT);
      default:   perm_ok = 1'b0;
    endcase

    last_excl = {1'b0, cap.cursor} + ({{ADDR_W{1'b0}}, 1'b1} << size_log2);
    in_bounds = (cap.cursor >= base) && (last_excl <= {1'b0, bound_end});

    f_type    = !accessible;
    f_perm    = !perm_ok;
    f_bounds  = !in_bounds;
    f_revoked = !node_valid;
    ok        = accessible && perm_ok && in_bounds && node_valid;

    next_cursor = cap.cursor;
    if (ok && acc == ACC_WRITE && cap.ctype == CT_UNINIT)
      next_cursor = cap.cursor + ADDR_W'(WORD_BYTES);

    init_ok = (cap.ctype == CT_UNINIT) && (cap.cursor == bound_end) && node_valid;
  end

endmodule
