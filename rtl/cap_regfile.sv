// cap_regfile: general-purpose register file widened to hold capabilities,
// with the move rules of linear capabilities and the reference-count events
// of non-linear ones.
//
// Each register is 128 bits plus a hidden tag bit that tells a capability
// from plain data. Capabilities of the linear kinds (linear, revocation,
// uninitialized, sealed, sealed-return) may only be moved, never copied:
//   * a register move (mv_*) writes the source word to the destination and
//     then clears the source if it held a linear-kind capability; with the
//     same register as source and destination the register ends up cleared,
//     as in the formal model, where the source update comes last
//   * a store of a register to memory (st_*) clears the register in the
//     same case (the word itself leaves through ra_*, read by the core)
// Non-linear capabilities may be copied; each copy is a reference to the
// capability's revocation node. The register file reports, as at most one
// increment and one decrement event per cycle:
//   increment  a non-linear capability was copied into a register (move,
//              or a write marked as a new word, such as a load) or out to
//              memory (store)
//   decrement  a non-linear capability in a register was overwritten by a
//              move or a new-word write
// Moving a linear capability changes no count. A write marked as an update
// (w_update) replaces a capability with a modified version of itself
// (e.g. a new cursor) and raises no event.
//
// Reset puts the boot capability (linear, read/write/execute, node 1,
// bounds BOOT_BOUNDS covering all memory) in register BOOT_REG and clears
// the rest. Register 0 reads as zero and ignores writes.
// Interface: two combinational read ports; one write, move or store per
// cycle (asserted), applied at the clock edge together with its events.
//
// Following the paper: 16-byte registers with a tag bit, the move rule of
// linear capabilities, the reset state, and reference counts changing when
// non-linear capabilities are created or overwritten but not when linear
// ones move. This design's own choices: 32 registers, register 0 as zero,
// the boot register and bounds value, and the event ports.
//
// rst_n is the asynchronous reset and also the disable condition of the
// assertions below; lint tools report that as a mixed sync/async use of
// the same net, which is intended.
module cap_regfile
  import capstone_pkg::*;
#(
  parameter int unsigned         NREGS       = 32,
  parameter int unsigned         BOOT_REG    = 1,
  parameter logic [BOUNDS_W-1:0] BOOT_BOUNDS = '1,
  localparam int unsigned        RA_W        = $clog2(NREGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // read ports
  input  logic [RA_W-1:0]  ra_addr,
  output logic [CAP_W-1:0] ra_data,
  output logic             ra_tag,
  input  logic [RA_W-1:0]  rb_addr,
  output logic [CAP_W-1:0] rb_data,
  output logic             rb_tag,
  // write port
  input  logic             w_en,
  input  logic [RA_W-1:0]  w_addr,
  input  logic [CAP_W-1:0] w_data,
  input  logic             w_tag,
  input  logic             w_update,   // same capability, modified in place
  // register move: dst <= src, then src cleared if linear
  input  logic             mv_en,
  input  logic [RA_W-1:0]  mv_src,
  input  logic [RA_W-1:0]  mv_dst,
  // store of register st_src to memory: cleared if linear
  input  logic             st_en,
  input  logic [RA_W-1:0]  st_src,
  // reference-count events
  output logic             ev_inc_valid,
  output node_id_t         ev_inc_id,
  output logic             ev_dec_valid,
  output node_id_t         ev_dec_id
);

  cap_t data_q [NREGS];
  logic tag_q  [NREGS];
  cap_t w_cap;

  function automatic logic is_lin(logic tag, logic [2:0] t);
    return tag && (t == CT_LIN || t == CT_REV || t == CT_UNINIT ||
                   t == CT_SEALED || t == CT_SEALED_RET);
  endfunction

  function automatic logic is_nonlin(logic tag, logic [2:0] t);
    return tag && t == CT_NONLIN;
  endfunction

  assign w_cap   = cap_t'(w_data);
  assign ra_data = CAP_W'(data_q[ra_addr]);
  assign ra_tag  = tag_q[ra_addr];
  assign rb_data = CAP_W'(data_q[rb_addr]);
  assign rb_tag  = tag_q[rb_addr];

  // events of this cycle's operation
  always_comb begin
    ev_inc_valid = 1'b0;
    ev_inc_id    = '0;
    ev_dec_valid = 1'b0;
    ev_dec_id    = '0;
    if (w_en && w_addr != '0 && !w_update) begin
      ev_inc_valid = is_nonlin(w_tag, w_cap.ctype);
      ev_inc_id    = w_cap.node_id;
      ev_dec_valid = is_nonlin(tag_q[w_addr], data_q[w_addr].ctype);
      ev_dec_id    = data_q[w_addr].node_id;
    end else if (mv_en && mv_dst != '0 && mv_src != mv_dst) begin
      ev_inc_valid = is_nonlin(tag_q[mv_src], data_q[mv_src].ctype);
      ev_inc_id    = data_q[mv_src].node_id;
      ev_dec_valid = is_nonlin(tag_q[mv_dst], data_q[mv_dst].ctype);
      ev_dec_id    = data_q[mv_dst].node_id;
    end else if (st_en) begin
      ev_inc_valid = is_nonlin(tag_q[st_src], data_q[st_src].ctype);
      ev_inc_id    = data_q[st_src].node_id;
    end
  end

  cap_t boot_cap;
  always_comb begin
    boot_cap         = '0;
    boot_cap.node_id = node_id_t'(1);
    boot_cap.ctype   = CT_LIN;
    boot_cap.perm    = P_RWX;
    boot_cap.bounds  = BOOT_BOUNDS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) begin
        data_q[r] <= (r == BOOT_REG) ? boot_cap : '0;
        tag_q[r]  <= (r == BOOT_REG);
      end
    end else if (w_en) begin
      if (w_addr != '0) begin
        data_q[w_addr] <= w_cap;
        tag_q[w_addr]  <= w_tag;
      end
    end else if (mv_en) begin
      if (mv_dst != '0) begin
        data_q[mv_dst] <= data_q[mv_src];
        tag_q[mv_dst]  <= tag_q[mv_src];
      end
      if (is_lin(tag_q[mv_src], data_q[mv_src].ctype)) begin
        data_q[mv_src] <= '0;
        tag_q[mv_src]  <= 1'b0;
      end
    end else if (st_en) begin
      if (is_lin(tag_q[st_src], data_q[st_src].ctype)) begin
        data_q[st_src] <= '0;
        tag_q[st_src]  <= 1'b0;
      end
    end
  end

  a_one_op_per_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({w_en, mv_en, st_en}));

endmodule
