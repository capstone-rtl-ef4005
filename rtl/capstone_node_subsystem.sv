// capstone_node_subsystem: the hardware a Capstone core adds next to its
// caches: the capability register file, the execute step of the
// capability instructions, the capability access check, the node controller that keeps the revocation tree, and the node cache (N$)
// that holds tree nodes.
//
// Structure (the core's pipeline, its L1 caches, the LLC, the memory bus
// and DRAM sit outside; their connections are the ports below):
//
//     core ── register ports ─► cap_regfile ── count events ─► event queue ─┐
//     core ── execute port ───► cap_alu (reads register port A)             │
//     core ── access port ──► cap_checker ◄── node valid ──┐                │
//     core ── tree-op port ─┐                              │                │
//                           ├─► arbiter ─► node_controller ─► node_cache ─► memory bus
//     access query ─────────┘        ▲                                      │
//                                    └──────────────────────────────────────┘
//
// Register ports: two read ports, and one write, move or store per cycle
// (see cap_regfile). Copying or overwriting a non-linear capability makes
// the register file raise reference-count events (up to two per cycle),
// which wait in a RC_FIFO-entry queue (a power of two) and are sent to the
// controller as RC_INC / RC_DEC. rf_stall is high while fewer than two
// entries are free; the core must then hold its register operations.
// rc_idle is high when no event is pending. rc_errors counts events the
// controller refused (a count update on a freed node).
// Access port: the core presents the capability of a load, store or fetch
// with its decoded base and end. The permission, type and bounds check is
// done at once, while a QUERY of the capability's revocation node runs in
// parallel with the data access itself; acc_resp_valid comes when the
// query returns, with acc_ok = checks passed and node still valid.
// Tree-op port: the core's capability instructions and reference-count
// events (QUERY, ALLOC, MREV, SPLIT, DELIN, REVOKE, DROP, RC_INC, RC_DEC)
// with op_perm, the permissions of the revocation capability, so that a
// REVOKE answer also carries the type that capability takes (linear, or
// uninitialized if a linear capability was revoked and it is writable).
// Both ports use valid/ready and answer with one-cycle pulses. When more
// than one wants the controller in the same cycle, the access query goes
// first, then queued count events; a tree op is taken only when the event
// queue is empty, so it sees every count change made before it
// (acc_waits/op_waits count the cycles each side was held back).
// Execute port (cx_*): the capability in register read port A goes
// through cap_alu with the instruction and its operands; the result says
// whether the instruction is allowed, the new capability word(s) with
// their decoded bounds, and which tree operation it needs. The core issues
// that tree operation on the tree-op port and feeds its answer (new node,
// linear node revoked) back on cx_new_node / cx_lin_revoked, then writes
// the results through the register ports.
// Memory port: the node cache's line requests (16-byte nodes at
// NODE_BASE + 16*id), posted writes, reads answered by mem_resp_valid.
//
// Following the paper: the node controller and node cache between the core
// and the memory bus, the query in parallel with the access, the register
// file's move rules and count changes, and the node cache size. This
// design's own choices: the port handshakes, the event queue and its depth,
// the arbitration order, and the split of work between the core and this
// block.
//
// rst_n is the asynchronous reset and also the disable condition of the
// assertions below; lint tools report that as a mixed sync/async use of
// the same net, which is intended.
module capstone_node_subsystem
  import capstone_pkg::*;
#(
  parameter int unsigned  NC_BYTES   = 8192,
  parameter int unsigned  NC_WAYS    = 2,
  parameter logic [63:0]  NODE_BASE  = 64'h0000_0008_0000_0000,
  parameter node_id_t     MAX_NODES  = NODE_NULL,
  parameter int unsigned  WORD_BYTES = 8,
  parameter int unsigned  RF_NREGS   = 32,
  parameter int unsigned  RC_FIFO    = 8,
  localparam int unsigned RF_A_W     = $clog2(RF_NREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  // access check port
  input  logic              acc_valid,
  output logic              acc_ready,
  input  cap_t              acc_cap,
  input  logic [ADDR_W-1:0] acc_base,
  input  logic [ADDR_W-1:0] acc_end,
  input  access_e           acc_kind,
  input  logic [2:0]        acc_size_log2,
  output logic              acc_resp_valid,
  output logic              acc_ok,
  output logic [3:0]        acc_fault,       // {revoked, bounds, perm, type}
  output logic [ADDR_W-1:0] acc_next_cursor,
  output logic              acc_init_ok,
  // revocation-tree operation port
  input  logic              op_valid,
  output logic              op_ready,
  input  node_op_e          op_code,
  input  node_id_t          op_id,
  input  logic [2:0]        op_perm,
  output logic              op_resp_valid,
  output logic              op_err,
  output node_id_t          op_new_id,
  output logic              op_node_valid,
  output logic [2:0]        op_rev_type,     // type of the capability after REVOKE
  // capability register file
  input  logic [RF_A_W-1:0] rf_ra_addr,
  output logic [CAP_W-1:0]  rf_ra_data,
  output logic              rf_ra_tag,
  input  logic [RF_A_W-1:0] rf_rb_addr,
  output logic [CAP_W-1:0]  rf_rb_data,
  output logic              rf_rb_tag,
  input  logic              rf_w_en,
  input  logic [RF_A_W-1:0] rf_w_addr,
  input  logic [CAP_W-1:0]  rf_w_data,
  input  logic              rf_w_tag,
  input  logic              rf_w_update,
  input  logic              rf_mv_en,
  input  logic [RF_A_W-1:0] rf_mv_src,
  input  logic [RF_A_W-1:0] rf_mv_dst,
  input  logic              rf_st_en,
  input  logic [RF_A_W-1:0] rf_st_src,
  output logic              rf_stall,        // event queue full: hold register ops
  output logic              rc_idle,         // no reference-count event pending
  // capability-instruction execute step on the capability in read port A
  input  cx_op_e            cx_op,
  input  logic [63:0]       cx_base,         // decoded bounds of that capability
  input  logic [63:0]       cx_end,
  input  logic [63:0]       cx_opnd_a,
  input  logic [63:0]       cx_opnd_b,
  input  node_id_t          cx_new_node,     // answer of the tree operation
  input  logic              cx_lin_revoked,
  output logic              cx_legal,
  output logic              cx_tree_op_valid,
  output node_op_e          cx_tree_op,
  output logic              cx_res_tag,
  output cap_t              cx_res_cap,
  output logic [63:0]       cx_res_base,
  output logic [63:0]       cx_res_end,
  output logic              cx_res2_valid,
  output cap_t              cx_res2_cap,
  output logic [63:0]       cx_res2_base,
  output logic [63:0]       cx_res2_end,
  output logic [63:0]       cx_res_int,
  // memory-bus port of the node cache
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [63:0]       mem_req_addr,
  output logic [CAP_W-1:0]  mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [CAP_W-1:0]  mem_resp_rdata,
  // event counters
  output logic [31:0]       nc_hits,
  output logic [31:0]       nc_misses,
  output logic [31:0]       nc_writebacks,
  output logic [31:0]       n_alloc,
  output logic [31:0]       n_reused,
  output logic [31:0]       n_query,
  output logic [31:0]       n_rc_update,
  output logic [31:0]       n_revoke,
  output logic [31:0]       n_invalidated,
  output logic [31:0]       n_freed,
  output logic [31:0]       acc_waits,
  output logic [31:0]       op_waits,
  output logic [31:0]       rc_events,
  output logic [31:0]       rc_errors
);

  // ---------------- controller command arbitration ----------------
  typedef enum logic [1:0] { OWN_NONE, OWN_ACC, OWN_OP, OWN_RC } owner_e;

  owner_e   owner_q;
  logic     nc_cmd_valid, nc_cmd_ready;
  node_op_e nc_cmd_op;
  node_id_t nc_cmd_id;
  logic     ctl_resp_valid, ctl_resp_err, ctl_node_valid, ctl_lin_revoked;
  node_id_t ctl_resp_id;

  // reference-count events from the register file wait in a small queue
  // (two may enter per cycle); tree ops from the core wait until it is
  // empty, so they see every count change made before them
  localparam int unsigned RC_A_W = $clog2(RC_FIFO);
  typedef struct packed { logic dec; node_id_t id; } rc_ev_t;

  rc_ev_t              rc_q [RC_FIFO];
  logic [RC_A_W-1:0]   rc_rd_q, rc_wr_q;
  logic [RC_A_W:0]     rc_cnt_q;
  logic                ev_inc_valid, ev_dec_valid;
  node_id_t            ev_inc_id, ev_dec_id;
  logic                rc_pending;
  rc_ev_t              rc_head;

  assign rc_pending = (rc_cnt_q != '0);
  assign rc_head    = rc_q[rc_rd_q];
  assign rc_idle    = !rc_pending;
  assign rf_stall   = (rc_cnt_q > (RC_A_W+1)'(RC_FIFO - 2));

  logic grant_acc, grant_rc, grant_op;
  assign grant_acc = (owner_q == OWN_NONE) && nc_cmd_ready && acc_valid;
  assign grant_rc  = (owner_q == OWN_NONE) && nc_cmd_ready && rc_pending && !acc_valid;
  assign grant_op  = (owner_q == OWN_NONE) && nc_cmd_ready && op_valid && !acc_valid &&
                     !rc_pending;

  assign acc_ready    = grant_acc;
  assign op_ready     = grant_op;
  assign nc_cmd_valid = grant_acc || grant_rc || grant_op;
  always_comb begin
    if (grant_acc) begin
      nc_cmd_op = OP_QUERY;
      nc_cmd_id = acc_cap.node_id;
    end else if (grant_rc) begin
      nc_cmd_op = rc_head.dec ? OP_RC_DEC : OP_RC_INC;
      nc_cmd_id = rc_head.id;
    end else begin
      nc_cmd_op = op_code;
      nc_cmd_id = op_id;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc_rd_q   <= '0;
      rc_wr_q   <= '0;
      rc_cnt_q  <= '0;
      rc_events <= '0;
      rc_errors <= '0;
      for (int i = 0; i < RC_FIFO; i++) rc_q[i] <= '0;
    end else begin
      // an increment enters before a decrement of the same cycle, so a
      // word replaced by another reference to the same node never frees it
      if (ev_inc_valid) rc_q[rc_wr_q] <= '{dec: 1'b0, id: ev_inc_id};
      if (ev_dec_valid) rc_q[ev_inc_valid ? rc_wr_q + 1'b1 : rc_wr_q] <= '{dec: 1'b1, id: ev_dec_id};
      rc_wr_q  <= rc_wr_q + RC_A_W'(ev_inc_valid) + RC_A_W'(ev_dec_valid);
      rc_rd_q  <= rc_rd_q + RC_A_W'(grant_rc);
      rc_cnt_q <= rc_cnt_q + (RC_A_W+1)'(ev_inc_valid) + (RC_A_W+1)'(ev_dec_valid)
                  - (RC_A_W+1)'(grant_rc);
      if (grant_rc) rc_events <= rc_events + 1;
      if (ctl_resp_valid && owner_q == OWN_RC && ctl_resp_err) rc_errors <= rc_errors + 1;
    end
  end

  // latched access, checked while its node query is in flight
  cap_t              acc_cap_q;
  logic [ADDR_W-1:0] acc_base_q, acc_end_q;
  access_e           acc_kind_q;
  logic [2:0]        acc_size_q;
  logic [2:0]        op_perm_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner_q    <= OWN_NONE;
      acc_cap_q  <= '0;
      acc_base_q <= '0;
      acc_end_q  <= '0;
      acc_kind_q <= ACC_READ;
      acc_size_q <= '0;
      op_perm_q  <= P_NA;
      acc_waits  <= '0;
      op_waits   <= '0;
    end else begin
      if (grant_acc) begin
        owner_q    <= OWN_ACC;
        acc_cap_q  <= acc_cap;
        acc_base_q <= acc_base;
        acc_end_q  <= acc_end;
        acc_kind_q <= acc_kind;
        acc_size_q <= acc_size_log2;
      end else if (grant_rc) begin
        owner_q   <= OWN_RC;
      end else if (grant_op) begin
        owner_q   <= OWN_OP;
        op_perm_q <= op_perm;
      end else if (ctl_resp_valid) begin
        owner_q <= OWN_NONE;
      end
      if (acc_valid && !acc_ready) acc_waits <= acc_waits + 1;
      if (op_valid && !op_ready)   op_waits  <= op_waits + 1;
    end
  end

  // ---------------- access check ----------------
  logic chk_ok, f_type, f_perm, f_bounds, f_revoked, chk_init_ok;
  logic [ADDR_W-1:0] chk_next_cursor;

  cap_checker #(.WORD_BYTES(WORD_BYTES)) u_checker (
    .cap        (acc_cap_q),
    .base       (acc_base_q),
    .bound_end  (acc_end_q),
    .acc        (acc_kind_q),
    .size_log2  (acc_size_q),
    .node_valid (ctl_node_valid && !ctl_resp_err),
    .ok         (chk_ok),
    .f_type     (f_type),
    .f_perm     (f_perm),
    .f_bounds   (f_bounds),
    .f_revoked  (f_revoked),
    .next_cursor(chk_next_cursor),
    .init_ok    (chk_init_ok)
  );

  assign acc_resp_valid  = ctl_resp_valid && (owner_q == OWN_ACC);
  assign acc_ok          = chk_ok;
  assign acc_fault       = {f_revoked, f_bounds, f_perm, f_type};
  assign acc_next_cursor = chk_next_cursor;
  assign acc_init_ok     = chk_init_ok;

  assign op_resp_valid = ctl_resp_valid && (owner_q == OWN_OP);
  assign op_err        = ctl_resp_err;
  assign op_new_id     = ctl_resp_id;
  assign op_node_valid = ctl_node_valid;
  assign op_rev_type   = revoke_result_type(ctl_lin_revoked, op_perm_q);

  // ---------------- capability register file ----------------
  cap_regfile #(.NREGS(RF_NREGS)) u_regs (
    .clk          (clk),
    .rst_n        (rst_n),
    .ra_addr      (rf_ra_addr),
    .ra_data      (rf_ra_data),
    .ra_tag       (rf_ra_tag),
    .rb_addr      (rf_rb_addr),
    .rb_data      (rf_rb_data),
    .rb_tag       (rf_rb_tag),
    .w_en         (rf_w_en),
    .w_addr       (rf_w_addr),
    .w_data       (rf_w_data),
    .w_tag        (rf_w_tag),
    .w_update     (rf_w_update),
    .mv_en        (rf_mv_en),
    .mv_src       (rf_mv_src),
    .mv_dst       (rf_mv_dst),
    .st_en        (rf_st_en),
    .st_src       (rf_st_src),
    .ev_inc_valid (ev_inc_valid),
    .ev_inc_id    (ev_inc_id),
    .ev_dec_valid (ev_dec_valid),
    .ev_dec_id    (ev_dec_id)
  );

  // ---------------- capability-instruction execute step ----------------
  cap_alu u_alu (
    .op            (cx_op),
    .cap_tag       (rf_ra_tag),
    .cap           (cap_t'(rf_ra_data)),
    .base          (cx_base),
    .bound_end     (cx_end),
    .opnd_a        (cx_opnd_a),
    .opnd_b        (cx_opnd_b),
    .new_node      (cx_new_node),
    .lin_revoked   (cx_lin_revoked),
    .legal         (cx_legal),
    .tree_op_valid (cx_tree_op_valid),
    .tree_op       (cx_tree_op),
    .res_tag       (cx_res_tag),
    .res_cap       (cx_res_cap),
    .res_base      (cx_res_base),
    .res_end       (cx_res_end),
    .res2_valid    (cx_res2_valid),
    .res2_cap      (cx_res2_cap),
    .res2_base     (cx_res2_base),
    .res2_end      (cx_res2_end),
    .res_int       (cx_res_int)
  );

  a_no_reg_op_while_stalled: assert property (@(posedge clk) disable iff (!rst_n)
    rf_stall |-> !(rf_w_en || rf_mv_en || rf_st_en));
  a_rc_queue_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rc_cnt_q <= (RC_A_W+1)'(RC_FIFO));

  // ---------------- node controller and node cache ----------------
  logic             c_req_valid, c_req_ready, c_req_we, c_resp_valid;
  node_id_t         c_req_id;
  logic [CAP_W-1:0] c_req_wdata, c_resp_rdata;

  node_controller #(.MAX_NODES(MAX_NODES)) u_ctrl (
    .clk              (clk),
    .rst_n            (rst_n),
    .init_done        (init_done),
    .cmd_valid        (nc_cmd_valid),
    .cmd_ready        (nc_cmd_ready),
    .cmd_op           (nc_cmd_op),
    .cmd_id           (nc_cmd_id),
    .resp_valid       (ctl_resp_valid),
    .resp_err         (ctl_resp_err),
    .resp_id          (ctl_resp_id),
    .resp_node_valid  (ctl_node_valid),
    .resp_lin_revoked (ctl_lin_revoked),
    .nc_req_valid     (c_req_valid),
    .nc_req_ready     (c_req_ready),
    .nc_req_we        (c_req_we),
    .nc_req_id        (c_req_id),
    .nc_req_wdata     (c_req_wdata),
    .nc_resp_valid    (c_resp_valid),
    .nc_resp_rdata    (c_resp_rdata),
    .n_alloc          (n_alloc),
    .n_reused         (n_reused),
    .n_query          (n_query),
    .n_rc_update      (n_rc_update),
    .n_revoke         (n_revoke),
    .n_invalidated    (n_invalidated),
    .n_freed          (n_freed)
  );

  node_cache #(.CACHE_BYTES(NC_BYTES), .WAYS(NC_WAYS), .NODE_BASE(NODE_BASE)) u_ncache (
    .clk             (clk),
    .rst_n           (rst_n),
    .req_valid       (c_req_valid),
    .req_ready       (c_req_ready),
    .req_we          (c_req_we),
    .req_id          (c_req_id),
    .req_wdata       (c_req_wdata),
    .resp_valid      (c_resp_valid),
    .resp_rdata      (c_resp_rdata),
    .mem_req_valid   (mem_req_valid),
    .mem_req_ready   (mem_req_ready),
    .mem_req_we      (mem_req_we),
    .mem_req_addr    (mem_req_addr),
    .mem_req_wdata   (mem_req_wdata),
    .mem_resp_valid  (mem_resp_valid),
    .mem_resp_rdata  (mem_resp_rdata),
    .hit_count       (nc_hits),
    .miss_count      (nc_misses),
    .writeback_count (nc_writebacks)
  );

endmodule
