// tb_node_controller: self-checking test of the revocation-tree controller.
//
// The controller is connected to a simple node store (one 128-bit node per
// id, answering one cycle after each request, sometimes not ready). A
// reference model keeps the tree the way the formal model does, as a
// parent pointer per node plus a linear mark and a reference count, and a
// LIFO of freed ids. Random operations (including invalid ones that must
// be refused) are applied to both. After every operation the test
//   * compares the response (error, new id, query result, linear-revoked)
//   * walks the stored list from the root and checks it is exactly the
//     set of nodes in the reference tree, in an order where each node's
//     depth equals its reference depth and its nearest preceding node one
//     level up is its reference parent, with consistent prev links, the
//     right valid/freed/linear bits and counts
//   * checks freed nodes carry freed=1, valid=0
// MAX_NODES is lowered to 48 so that id exhaustion and free-list reuse
// both happen. The cycle counts of QUERY and RC_INC with a store that
// never waits are checked against the state sequence: accept, then per
// node access a request cycle, an answer cycle and a consuming cycle,
// then a response cycle: QUERY 5, RC_INC 7.
module tb_node_controller;
  import capstone_pkg::*;

  localparam int MAXN = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         init_done, cmd_valid, cmd_ready;
  node_op_e     cmd_op;
  node_id_t     cmd_id;
  logic         resp_valid, resp_err, resp_node_valid, resp_lin_revoked;
  node_id_t     resp_id;
  logic         nc_req_valid, nc_req_ready, nc_req_we, nc_resp_valid;
  node_id_t     nc_req_id;
  logic [127:0] nc_req_wdata, nc_resp_rdata;
  logic [31:0]  n_alloc, n_reused, n_query, n_rc_update, n_revoke, n_invalidated, n_freed;

  node_controller #(.MAX_NODES(node_id_t'(MAXN))) dut (
    .clk(clk), .rst_n(rst_n), .init_done(init_done),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_op(cmd_op), .cmd_id(cmd_id),
    .resp_valid(resp_valid), .resp_err(resp_err), .resp_id(resp_id),
    .resp_node_valid(resp_node_valid), .resp_lin_revoked(resp_lin_revoked),
    .nc_req_valid(nc_req_valid), .nc_req_ready(nc_req_ready), .nc_req_we(nc_req_we),
    .nc_req_id(nc_req_id), .nc_req_wdata(nc_req_wdata),
    .nc_resp_valid(nc_resp_valid), .nc_resp_rdata(nc_resp_rdata),
    .n_alloc(n_alloc), .n_reused(n_reused), .n_query(n_query), .n_rc_update(n_rc_update),
    .n_revoke(n_revoke), .n_invalidated(n_invalidated), .n_freed(n_freed));

  // ---------------- node store ----------------
  logic [127:0] store [MAXN];
  bit           stall_mode = 0;
  assign nc_req_ready = !stall_mode || ($urandom_range(0, 2) != 0);
  always_ff @(posedge clk) begin
    nc_resp_valid <= 1'b0;
    if (rst_n && nc_req_valid && nc_req_ready) begin
      if (nc_req_we) store[nc_req_id] <= nc_req_wdata;
      nc_resp_rdata <= nc_req_we ? nc_req_wdata : store[nc_req_id];
      nc_resp_valid <= 1'b1;
    end
  end

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
    end
  endtask

  // ---------------- reference model ----------------
  int  parent [MAXN];     // -1: not in the tree
  bit  lin    [MAXN];
  int  cnt    [MAXN];
  bit  freed  [MAXN];
  int  bump;
  int  free_stack [$];    // back = most recently freed

  function automatic bit in_tree(int n);
    int k = n, steps = 0;
    if (n == 0) return 1;
    while (k > 0 && steps < MAXN + 2) begin
      k = parent[k];
      steps++;
    end
    return k == 0;
  endfunction

  function automatic int depth_of(int n);
    int d = 0, k = n;
    while (k != 0) begin k = parent[k]; d++; end
    return d;
  endfunction

  function automatic bit is_desc(int k, int n);   // k strictly below n
    int a = k;
    if (!in_tree(k) || k == n) return 0;
    while (a != 0) begin
      a = parent[a];
      if (a == n) return 1;
    end
    return 0;
  endfunction

  function automatic void ref_free(int n);
    freed[n] = 1;
    parent[n] = -1;
    free_stack.push_back(n);
  endfunction

  function automatic int ref_alloc();   // -1 when exhausted
    int x;
    if (free_stack.size() > 0) x = free_stack.pop_back();
    else if (bump < MAXN) begin x = bump; bump++; end
    else return -1;
    freed[x] = 0;
    cnt[x] = 1;
    return x;
  endfunction

  // expected result of one operation, applied to the reference
  typedef struct { bit err; int id; bit nvalid; bit linrev; } result_t;

  function automatic result_t ref_apply(node_op_e op, int n);
    result_t r = '{err: 0, id: int'(NODE_NULL), nvalid: 0, linrev: 0};
    bit valid_n;
    int x, p;
    if (op != OP_ALLOC && (n == 0 || n >= bump)) begin r.err = 1; return r; end
    valid_n = (op == OP_ALLOC) ? 1 : (!freed[n] && in_tree(n));
    case (op)
      OP_QUERY: r.nvalid = valid_n;
      OP_RC_INC: if (freed[n]) r.err = 1; else cnt[n]++;
      OP_RC_DEC: begin
        if (freed[n] || cnt[n] == 0) r.err = 1;
        else begin
          cnt[n]--;
          if (cnt[n] == 0) begin
            if (valid_n) begin
              for (int k = 1; k < bump; k++) if (parent[k] == n) parent[k] = parent[n];
            end
            ref_free(n);
          end
        end
      end
      default: begin
        if (!valid_n) begin r.err = 1; return r; end
        case (op)
          OP_ALLOC: begin
            x = ref_alloc();
            if (x < 0) r.err = 1;
            else begin parent[x] = 0; lin[x] = 1; r.id = x; end
          end
          OP_DELIN: lin[n] = 0;
          OP_MREV: begin
            x = ref_alloc();
            if (x < 0) r.err = 1;
            else begin
              parent[x] = parent[n]; lin[x] = lin[n];
              parent[n] = x; lin[n] = 1; r.id = x;
            end
          end
          OP_SPLIT: begin
            x = ref_alloc();
            if (x < 0) r.err = 1;
            else begin parent[x] = parent[n]; lin[x] = lin[n]; r.id = x; end
          end
          OP_REVOKE: begin
            int sub [$];
            for (int k = 1; k < bump; k++) if (is_desc(k, n)) sub.push_back(k);
            foreach (sub[i]) begin
              r.linrev |= lin[sub[i]];
              parent[sub[i]] = -1;   // counts stay >= 1, nothing is freed
            end
          end
          OP_DROP: begin
            p = parent[n];
            for (int k = 1; k < bump; k++) if (parent[k] == n) parent[k] = p;
            parent[n] = -1;
            if (cnt[n] > 0) cnt[n]--;
            if (cnt[n] == 0) ref_free(n);
          end
          default: r.err = 1;
        endcase
      end
    endcase
    return r;
  endfunction

  // ---------------- structural check of the stored list ----------------
  task automatic check_structure();
    node_t nd;
    int id, prev_id, len, expect_len;
    int path [$];    // ids of the current ancestor chain, by depth
    bit ok = 1;
    string why = "";
    expect_len = 0;
    for (int k = 1; k < bump; k++) if (!freed[k] && in_tree(k)) expect_len++;
    nd = node_t'(store[0]);
    if (!(nd.valid && nd.depth == 0 && nd.prev == NODE_NULL)) begin ok = 0; why = "root"; end
    path.push_back(0);
    prev_id = 0;
    id = int'(nd.next);
    len = 0;
    while (ok && id != int'(NODE_NULL)) begin
      int d;
      if (id <= 0 || id >= bump || len > MAXN) begin ok = 0; why = $sformatf("bad link %0d", id); break; end
      nd = node_t'(store[id]);
      d = int'(nd.depth);
      if (freed[id] || !in_tree(id)) begin ok = 0; why = $sformatf("node %0d in list but not in tree", id); break; end
      if (d != depth_of(id)) begin ok = 0; why = $sformatf("node %0d depth %0d ref %0d", id, d, depth_of(id)); break; end
      if (int'(nd.prev) != prev_id) begin ok = 0; why = $sformatf("node %0d prev %0d expected %0d", id, nd.prev, prev_id); break; end
      if (d < 1 || d > path.size()) begin ok = 0; why = $sformatf("node %0d depth jump", id); break; end
      while (path.size() > d) void'(path.pop_back());
      if (path[d-1] != parent[id]) begin ok = 0; why = $sformatf("node %0d parent %0d ref %0d", id, path[d-1], parent[id]); break; end
      path.push_back(id);
      if (!nd.valid || nd.freed || nd.lin != lin[id] || int'(nd.refcnt) != cnt[id]) begin
        ok = 0; why = $sformatf("node %0d bits v%0d f%0d l%0d c%0d ref l%0d c%0d", id, nd.valid, nd.freed, nd.lin, nd.refcnt, lin[id], cnt[id]); break;
      end
      prev_id = id;
      id = int'(nd.next);
      len++;
    end
    if (ok && len != expect_len) begin ok = 0; why = $sformatf("list length %0d ref %0d", len, expect_len); end
    for (int k = 1; k < bump && ok; k++) begin
      nd = node_t'(store[k]);
      if (freed[k] && !(nd.freed && !nd.valid)) begin ok = 0; why = $sformatf("freed node %0d bits", k); end
      if (!freed[k] && !in_tree(k) && nd.valid) begin ok = 0; why = $sformatf("revoked node %0d still valid", k); end
    end
    expect_true(ok, {"structure: ", why});
  endtask

  // ---------------- driver ----------------
  task automatic do_op(node_op_e op, int n, output int lat, output node_id_t nid);
    result_t e;
    int t0;
    cmd_valid <= 1; cmd_op <= op; cmd_id <= node_id_t'(n);
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    t0 = cycle;
    cmd_valid <= 0;
    e = ref_apply(op, n);
    @(posedge clk);
    while (!resp_valid) @(posedge clk);
    lat = cycle - t0;
    nid = resp_id;
    expect_true(resp_err == e.err && (e.err || (int'(resp_id) == e.id &&
                resp_node_valid == e.nvalid && resp_lin_revoked == e.linrev)),
      $sformatf("op %s n=%0d: err %0d/%0d id %0d/%0d valid %0d/%0d linrev %0d/%0d",
                op.name(), n, resp_err, e.err, resp_id, e.id, resp_node_valid, e.nvalid,
                resp_lin_revoked, e.linrev));
    check_structure();
  endtask

  int hist [16];

  initial begin
    int lat;
    node_id_t a, b, r1, r2, s;
    cmd_valid = 0; cmd_op = OP_QUERY; cmd_id = '0;
    foreach (parent[i]) begin parent[i] = -1; lin[i] = 0; cnt[i] = 0; freed[i] = 0; end
    parent[0] = 0;
    parent[1] = 0; lin[1] = 1; cnt[1] = 1;   // boot node
    bump = 2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);

    // directed: the revocation hierarchy of two nested revocation nodes
    do_op(OP_ALLOC, 0, lat, a);                 // linear capability c
    do_op(OP_MREV, int'(a), lat, r1);           // r1 above c
    do_op(OP_MREV, int'(a), lat, r2);           // r2 between r1 and c
    expect_true(depth_of(int'(a)) == 3, "c at depth 3 under r1, r2");
    do_op(OP_REVOKE, int'(r2), lat, s);         // revokes c only
    expect_true(resp_lin_revoked, "revoking a linear node reports it");
    do_op(OP_QUERY, int'(r1), lat, s);
    expect_true(resp_node_valid, "stronger r1 survives revoke of r2");
    do_op(OP_QUERY, int'(a), lat, s);
    expect_true(!resp_node_valid, "c revoked");
    expect_true(lat == 5, $sformatf("QUERY latency %0d, expected 5", lat));
    do_op(OP_RC_INC, int'(r1), lat, s);
    expect_true(lat == 7, $sformatf("RC_INC latency %0d, expected 7", lat));
    do_op(OP_ALLOC, 0, lat, b);
    do_op(OP_MREV, int'(b), lat, r2);
    do_op(OP_DELIN, int'(b), lat, s);
    do_op(OP_REVOKE, int'(r2), lat, s);
    expect_true(!resp_lin_revoked, "only non-linear revoked");
    do_op(OP_RC_DEC, int'(b), lat, s);          // last reference: freed
    expect_true(n_freed == 1, "revoked node freed at count zero");
    do_op(OP_ALLOC, 0, lat, s);
    expect_true(s == b && n_reused == 1, "freed node reused first");

    // random
    stall_mode = 1;
    for (int i = 0; i < 3000; i++) begin
      node_op_e op;
      int n, w;
      w = $urandom_range(0, 99);
      if      (w < 12) op = OP_ALLOC;
      else if (w < 27) op = OP_QUERY;
      else if (w < 40) op = OP_MREV;
      else if (w < 52) op = OP_SPLIT;
      else if (w < 58) op = OP_DELIN;
      else if (w < 66) op = OP_REVOKE;
      else if (w < 74) op = OP_DROP;
      else if (w < 86) op = OP_RC_INC;
      else             op = OP_RC_DEC;
      n = $urandom_range(1, bump > 1 ? bump - 1 : 1);
      if ($urandom_range(0, 49) == 0) n = $urandom_range(0, 1) ? 0 : bump + 3;
      do_op(op, n, lat, s);
      if (!resp_err) hist[int'(op)]++;
    end
    for (int o = 0; o <= 8; o++) begin
      expect_true(hist[o] > 0, $sformatf("operation %s never succeeded", node_op_e'(o)));
    end
    expect_true(n_reused > 10 && n_invalidated > 10 && n_freed > 10,
                $sformatf("reuse %0d invalidated %0d freed %0d", n_reused, n_invalidated, n_freed));
    $display("ops ok: alloc=%0d query=%0d mrev=%0d split=%0d delin=%0d revoke=%0d drop=%0d inc=%0d dec=%0d",
             hist[1], hist[0], hist[2], hist[3], hist[4], hist[5], hist[6], hist[7], hist[8]);
    $display("alloc=%0d reused=%0d invalidated=%0d freed=%0d", n_alloc, n_reused, n_invalidated, n_freed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
