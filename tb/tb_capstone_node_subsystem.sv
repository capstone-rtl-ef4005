// tb_capstone_node_subsystem: end-to-end test of the node subsystem with
// every parameter at its default (8 kB 2-way node cache, full 31-bit node
// id space), in front of a behavioural DRAM model with a 40-cycle read
// latency.
//
// It plays the revocation-tree side of an allocator-heavy program, using
// the mapping of program events to capability events the design is
// evaluated with: an allocation is a new linear capability (ALLOC) for
// which the allocator keeps a revocation capability (MREV); producing a
// copy of an address is a new non-linear capability (DELIN once, then
// RC_INC per copy); overwriting a copy is RC_DEC; a free is a REVOKE with
// the revocation capability. Some objects are split in two (SPLIT), some
// revocation capabilities are dropped (DROP). Loads and stores through the
// objects' capabilities (including out-of-bounds, wrong-permission,
// wrong-type and revoked ones) go through the access port, sometimes in
// the same cycle as a tree operation. After reset the boot capability in
// register 1 is checked, used for accesses, and put through the execute
// port (SHRINK, SPLIT, TIGHTEN, SEAL, a refused INIT, an empty register).
// A later phase drives the register file with loads, moves, stores and
// overwrites, whose count events must reach the tree in order.
//
// A reference model of the tree (parent, linear mark and count per node,
// LIFO of freed ids) predicts every tree-op answer and node validity; the
// access answers are predicted from the check predicates and that
// validity. Each mechanism must happen at least once: node-cache hit,
// miss and write-back, fresh and reused allocation, mint-revocation,
// split, delinearize, drop, revoke giving a linear and an uninitialized
// capability, a node freed at count zero, each access fault kind, the
// uninitialized cursor step and the init condition, and an access and a
// tree operation contending for the controller.
module tb_capstone_node_subsystem;
  import capstone_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              init_done;
  logic              acc_valid, acc_ready, acc_resp_valid, acc_ok, acc_init_ok;
  cap_t              acc_cap;
  logic [63:0]       acc_base, acc_end, acc_next_cursor;
  access_e           acc_kind;
  logic [2:0]        acc_size_log2;
  logic [3:0]        acc_fault;
  logic              op_valid, op_ready, op_resp_valid, op_err, op_node_valid;
  node_op_e          op_code;
  node_id_t          op_id, op_new_id;
  logic [2:0]        op_perm, op_rev_type;
  logic              mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [63:0]       mem_req_addr;
  logic [127:0]      mem_req_wdata, mem_resp_rdata;
  logic [31:0]       nc_hits, nc_misses, nc_writebacks, n_alloc, n_reused, n_query,
                     n_rc_update, n_revoke, n_invalidated, n_freed, acc_waits, op_waits,
                     rc_events, rc_errors;
  logic [4:0]        rf_ra_addr, rf_rb_addr, rf_w_addr, rf_mv_src, rf_mv_dst, rf_st_src;
  logic [127:0]      rf_ra_data, rf_rb_data, rf_w_data;
  logic              rf_ra_tag, rf_rb_tag, rf_w_en, rf_w_tag, rf_w_update, rf_mv_en, rf_st_en;
  logic              rf_stall, rc_idle;
  cx_op_e            cx_op;
  logic [63:0]       cx_base, cx_end, cx_opnd_a, cx_opnd_b, cx_res_base, cx_res_end,
                     cx_res2_base, cx_res2_end, cx_res_int;
  node_id_t          cx_new_node;
  logic              cx_lin_revoked, cx_legal, cx_tree_op_valid, cx_res_tag, cx_res2_valid;
  node_op_e          cx_tree_op;
  cap_t              cx_res_cap, cx_res2_cap;
  int unsigned       m_reads, m_writes;

  capstone_node_subsystem dut (
    .clk(clk), .rst_n(rst_n), .init_done(init_done),
    .acc_valid(acc_valid), .acc_ready(acc_ready), .acc_cap(acc_cap), .acc_base(acc_base),
    .acc_end(acc_end), .acc_kind(acc_kind), .acc_size_log2(acc_size_log2),
    .acc_resp_valid(acc_resp_valid), .acc_ok(acc_ok), .acc_fault(acc_fault),
    .acc_next_cursor(acc_next_cursor), .acc_init_ok(acc_init_ok),
    .op_valid(op_valid), .op_ready(op_ready), .op_code(op_code), .op_id(op_id),
    .op_perm(op_perm), .op_resp_valid(op_resp_valid), .op_err(op_err),
    .op_new_id(op_new_id), .op_node_valid(op_node_valid), .op_rev_type(op_rev_type),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_resp_valid(mem_resp_valid), .mem_resp_rdata(mem_resp_rdata),
    .nc_hits(nc_hits), .nc_misses(nc_misses), .nc_writebacks(nc_writebacks),
    .n_alloc(n_alloc), .n_reused(n_reused), .n_query(n_query), .n_rc_update(n_rc_update),
    .n_revoke(n_revoke), .n_invalidated(n_invalidated), .n_freed(n_freed),
    .acc_waits(acc_waits), .op_waits(op_waits), .rc_events(rc_events), .rc_errors(rc_errors),
    .cx_op(cx_op), .cx_base(cx_base), .cx_end(cx_end), .cx_opnd_a(cx_opnd_a),
    .cx_opnd_b(cx_opnd_b), .cx_new_node(cx_new_node), .cx_lin_revoked(cx_lin_revoked),
    .cx_legal(cx_legal), .cx_tree_op_valid(cx_tree_op_valid), .cx_tree_op(cx_tree_op),
    .cx_res_tag(cx_res_tag), .cx_res_cap(cx_res_cap), .cx_res_base(cx_res_base),
    .cx_res_end(cx_res_end), .cx_res2_valid(cx_res2_valid), .cx_res2_cap(cx_res2_cap),
    .cx_res2_base(cx_res2_base), .cx_res2_end(cx_res2_end), .cx_res_int(cx_res_int),
    .rf_ra_addr(rf_ra_addr), .rf_ra_data(rf_ra_data), .rf_ra_tag(rf_ra_tag),
    .rf_rb_addr(rf_rb_addr), .rf_rb_data(rf_rb_data), .rf_rb_tag(rf_rb_tag),
    .rf_w_en(rf_w_en), .rf_w_addr(rf_w_addr), .rf_w_data(rf_w_data), .rf_w_tag(rf_w_tag),
    .rf_w_update(rf_w_update), .rf_mv_en(rf_mv_en), .rf_mv_src(rf_mv_src),
    .rf_mv_dst(rf_mv_dst), .rf_st_en(rf_st_en), .rf_st_src(rf_st_src),
    .rf_stall(rf_stall), .rc_idle(rc_idle));

  node_mem_model #(.LATENCY(40), .READY_GAP(0)) dram (
    .clk(clk), .rst_n(rst_n),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_resp_valid(mem_resp_valid), .mem_resp_rdata(mem_resp_rdata),
    .n_reads(m_reads), .n_writes(m_writes));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000000) @(posedge clk);
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

  // ---------------- reference tree ----------------
  int parent [int];
  bit lin    [int];
  int cnt    [int];
  bit freed  [int];
  int bump = 2;   // node 1 is the boot capability's node
  int free_stack [$];

  function automatic bit in_tree(int n);
    int k = n;
    if (n == 0) return 1;
    while (k > 0) k = parent.exists(k) ? parent[k] : -1;
    return k == 0;
  endfunction
  function automatic bit ref_valid(int n);
    return n > 0 && n < bump && !freed[n] && in_tree(n);
  endfunction
  function automatic void ref_free(int n);
    freed[n] = 1; parent[n] = -1; free_stack.push_back(n);
  endfunction
  function automatic int ref_alloc();
    int x;
    if (free_stack.size() > 0) x = free_stack.pop_back();
    else begin x = bump; bump++; end
    freed[x] = 0; cnt[x] = 1;
    return x;
  endfunction

  // children lists are derived on demand from the parent map
  function automatic void reparent_children(int n, int p);
    foreach (parent[k]) if (parent[k] == n && k != n) parent[k] = p;
  endfunction

  function automatic bit subtree_revoke(int n);
    int sub [$];
    bit l = 0;
    foreach (parent[k]) begin
      int a = k;
      if (k == n || !in_tree(k)) continue;
      while (a > 0) begin
        a = parent[a];
        if (a == n) begin sub.push_back(k); break; end
      end
    end
    foreach (sub[i]) begin l |= lin[sub[i]]; parent[sub[i]] = -1; end
    return l;
  endfunction

  // ---------------- mechanism counters ----------------
  int m_mrev, m_split, m_delin, m_drop, m_rev_lin, m_rev_uninit, m_dec_free;
  int m_f_type, m_f_perm, m_f_bounds, m_f_revoked, m_acc_ok, m_cursor_step, m_init_ok;

  // ---------------- drivers ----------------
  task automatic tree_op(node_op_e op, int n, logic [2:0] perm, output int nid,
                         output logic [2:0] rtype);
    bit e_err = 0, e_lr = 0;
    int e_id = int'(NODE_NULL);
    bit e_valid = 0;
    op_valid <= 1; op_code <= op; op_id <= node_id_t'(n); op_perm <= perm;
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    op_valid <= 0;
    // reference
    if (op != OP_ALLOC && !(n > 0 && n < bump)) e_err = 1;
    else case (op)
      OP_QUERY:  e_valid = ref_valid(n);
      OP_ALLOC:  begin e_id = ref_alloc(); parent[e_id] = 0; lin[e_id] = 1; end
      OP_RC_INC: if (freed[n]) e_err = 1; else cnt[n]++;
      OP_RC_DEC: if (freed[n] || cnt[n] == 0) e_err = 1;
                 else begin
                   cnt[n]--;
                   if (cnt[n] == 0) begin
                     if (ref_valid(n)) reparent_children(n, parent[n]);
                     ref_free(n);
                   end
                 end
      default:
        if (!ref_valid(n)) e_err = 1;
        else case (op)
          OP_MREV:  begin e_id = ref_alloc(); parent[e_id] = parent[n]; lin[e_id] = lin[n];
                          parent[n] = e_id; lin[n] = 1; end
          OP_SPLIT: begin e_id = ref_alloc(); parent[e_id] = parent[n]; lin[e_id] = lin[n]; end
          OP_DELIN: lin[n] = 0;
          OP_REVOKE: e_lr = subtree_revoke(n);
          OP_DROP: begin
            reparent_children(n, parent[n]);
            parent[n] = -1;
            if (cnt[n] > 0) cnt[n]--;
            if (cnt[n] == 0) ref_free(n);
          end
          default: e_err = 1;
        endcase
    endcase
    @(posedge clk);
    while (!op_resp_valid) @(posedge clk);
    nid = int'(op_new_id);
    rtype = op_rev_type;
    expect_true(op_err == e_err && (e_err || (int'(op_new_id) == e_id &&
                op_node_valid == e_valid)),
                $sformatf("%s %0d: err %0d/%0d id %0d/%0d valid %0d/%0d", op.name(), n,
                          op_err, e_err, op_new_id, e_id, op_node_valid, e_valid));
    if (op == OP_REVOKE && !e_err) begin
      logic [2:0] et;
      et = (e_lr && (perm == P_RW || perm == P_RWX)) ? CT_UNINIT : CT_LIN;
      expect_true(op_rev_type == et, $sformatf("revoke type %0d expected %0d", op_rev_type, et));
      if (et == CT_LIN) m_rev_lin++; else m_rev_uninit++;
    end
  endtask

  task automatic access(cap_t c, logic [63:0] b, logic [63:0] e, access_e k, logic [2:0] sz);
    bit e_type, e_perm, e_bounds, e_rev, e_ok;
    logic [64:0] last;
    acc_valid <= 1; acc_cap <= c; acc_base <= b; acc_end <= e; acc_kind <= k;
    acc_size_log2 <= sz;
    @(posedge clk);
    while (!acc_ready) @(posedge clk);
    acc_valid <= 0;
    e_type = !(c.ctype inside {CT_LIN, CT_NONLIN, CT_UNINIT});
    case (k)
      ACC_READ:  e_perm = !(c.perm inside {P_R, P_RW, P_RX, P_RWX}) || c.ctype == CT_UNINIT;
      ACC_WRITE: e_perm = !(c.perm inside {P_RW, P_RWX});
      default:   e_perm = !(c.perm inside {P_RX, P_RWX}) || c.ctype == CT_UNINIT;
    endcase
    last     = {1'b0, c.cursor} + (65'd1 << sz);
    e_bounds = !(c.cursor >= b && last <= {1'b0, e});
    e_rev    = !ref_valid(int'(c.node_id));
    e_ok     = !e_type && !e_perm && !e_bounds && !e_rev;
    @(posedge clk);
    while (!acc_resp_valid) @(posedge clk);
    expect_true(acc_ok == e_ok && acc_fault == {e_rev, e_bounds, e_perm, e_type},
                $sformatf("access node %0d: ok %0d/%0d fault %b/%b", c.node_id, acc_ok, e_ok,
                          acc_fault, {e_rev, e_bounds, e_perm, e_type}));
    if (e_ok) m_acc_ok++;
    if (e_type) m_f_type++;
    if (e_perm) m_f_perm++;
    if (e_bounds) m_f_bounds++;
    if (e_rev) m_f_revoked++;
    if (e_ok && k == ACC_WRITE && c.ctype == CT_UNINIT) begin
      expect_true(acc_next_cursor == c.cursor + 8, "uninitialized cursor step");
      m_cursor_step++;
    end
    if (c.ctype == CT_UNINIT && c.cursor == e && !e_rev) begin
      expect_true(acc_init_ok, "init_ok at end of region");
      m_init_ok++;
    end
  endtask

  // ---------------- program model ----------------
  localparam int NOBJ = 1500;
  typedef struct {
    int          c;        // node of the object's capability
    int          c2;       // second half after a split, or 0
    int          r;        // node of the allocator's revocation capability
    bit          nonlin;   // delinearized, copies exist
    int          copies;
    logic [63:0] base, bend;
    logic [2:0]  perm;
    bit          live;
  } obj_t;
  obj_t objs [NOBJ];

  function automatic cap_t mkcap(int node, cap_type_e t, logic [2:0] p, logic [63:0] cur);
    cap_t c = '0;
    c.node_id = node_id_t'(node); c.ctype = t; c.perm = p; c.cursor = cur;
    return c;
  endfunction

  task automatic malloc(int i);
    int nid;
    logic [2:0] rt;
    tree_op(OP_ALLOC, 0, P_NA, nid, rt);
    objs[i].c = nid;
    tree_op(OP_MREV, objs[i].c, P_NA, nid, rt);
    objs[i].r = nid;
    m_mrev++;
    objs[i].c2 = 0;
    objs[i].nonlin = 0;
    objs[i].copies = 0;
    objs[i].base = 64'h1_0000 + 64'(i) * 64'h1000;
    objs[i].bend = objs[i].base + 64'h400;
    objs[i].perm = ($urandom_range(0, 3) == 0) ? P_R : P_RW;
    objs[i].live = 1;
  endtask

  task automatic use_obj(int i);
    int nid, w;
    logic [2:0] rt;
    logic [63:0] cur;
    cap_type_e t;
    w = $urandom_range(0, 9);
    t = objs[i].nonlin ? CT_NONLIN : CT_LIN;
    cur = objs[i].base + 64'($urandom_range(0, 'h3F8));
    if (w == 0) cur = objs[i].bend;                       // out of bounds
    if (w <= 5)
      access(mkcap(objs[i].c, t, objs[i].perm, cur), objs[i].base, objs[i].bend,
             access_e'($urandom_range(0, 2)), 3'd3);
    else if (w == 6 && !objs[i].nonlin && objs[i].c2 == 0) begin
      tree_op(OP_SPLIT, objs[i].c, P_NA, nid, rt);
      objs[i].c2 = nid;
      m_split++;
    end else if (w == 7 && !objs[i].nonlin && objs[i].c2 == 0) begin
      tree_op(OP_DELIN, objs[i].c, P_NA, nid, rt);
      objs[i].nonlin = 1;
      m_delin++;
    end else if (w == 8 && objs[i].nonlin) begin
      tree_op(OP_RC_INC, objs[i].c, P_NA, nid, rt);
      objs[i].copies++;
    end else if (objs[i].copies > 0) begin
      tree_op(OP_RC_DEC, objs[i].c, P_NA, nid, rt);
      objs[i].copies--;
    end else
      // a revocation capability grants no access
      access(mkcap(objs[i].r, CT_REV, objs[i].perm, objs[i].base), objs[i].base,
             objs[i].bend, ACC_READ, 3'd3);
  endtask

  task automatic free_obj(int i);
    int nid, stale;
    logic [2:0] rt;
    int freed_before;
    tree_op(OP_REVOKE, objs[i].r, objs[i].perm, nid, rt);
    // the stale capability must now be refused
    access(mkcap(objs[i].c, objs[i].nonlin ? CT_NONLIN : CT_LIN, objs[i].perm, objs[i].base),
           objs[i].base, objs[i].bend, ACC_READ, 3'd3);
    if (rt == CT_UNINIT) begin
      // the allocator initializes the region with the uninitialized capability
      access(mkcap(objs[i].r, CT_UNINIT, objs[i].perm, objs[i].base), objs[i].base,
             objs[i].bend, ACC_WRITE, 3'd3);
      access(mkcap(objs[i].r, CT_UNINIT, objs[i].perm, objs[i].bend), objs[i].base,
             objs[i].bend, ACC_WRITE, 3'd3);
    end
    // program overwrites its remaining copies; the last one frees the node
    freed_before = int'(n_freed);
    stale = objs[i].copies + (objs[i].nonlin ? 1 : 0);
    for (int k = 0; k < stale; k++) tree_op(OP_RC_DEC, objs[i].c, P_NA, nid, rt);
    if (objs[i].nonlin && int'(n_freed) > freed_before) m_dec_free++;
    // linear halves are dropped by the program, and the allocator drops r
    if (!objs[i].nonlin) tree_op(OP_RC_DEC, objs[i].c, P_NA, nid, rt);
    if (objs[i].c2 != 0) tree_op(OP_RC_DEC, objs[i].c2, P_NA, nid, rt);
    tree_op(OP_DROP, objs[i].r, P_NA, nid, rt);
    m_drop++;
    objs[i].live = 0;
  endtask

  // ---------------- register file ----------------
  // model of each register: 0 plain data, 1 linear, 2 non-linear copy of
  // object robj[r]
  int rkind [32];
  int robj  [32];
  int exp_rc_events = 0, rf_stall_cycles = 0;

  task automatic rf_cycle(int kind, int a, int b, logic [127:0] d, bit t, bit upd);
    @(negedge clk);
    while (rf_stall) begin rf_stall_cycles++; @(negedge clk); end
    case (kind)
      0: begin rf_w_en = 1; rf_w_addr = 5'(a); rf_w_data = d; rf_w_tag = t;
               rf_w_update = upd; end
      1: begin rf_mv_en = 1; rf_mv_src = 5'(a); rf_mv_dst = 5'(b); end
      default: begin rf_st_en = 1; rf_st_src = 5'(a); end
    endcase
    @(negedge clk);
    rf_w_en = 0; rf_mv_en = 0; rf_st_en = 0; rf_w_update = 0;
  endtask

  function automatic void rc_ev(int i, bit inc);
    int n = objs[i].c;
    exp_rc_events++;
    if (inc) begin cnt[n]++; objs[i].copies++; end
    else     begin cnt[n]--; objs[i].copies--; end
  endfunction

  // a load of object i's capability (new word), a plain-data write, a
  // move, an in-place update or a store, with its count changes predicted
  task automatic rf_step();
    int k, a, b, i;
    k = $urandom_range(0, 9);
    a = $urandom_range(1, 31);
    b = $urandom_range(0, 31);
    if (k < 3) begin
      i = $urandom_range(0, NOBJ - 1);
      if (!objs[i].live || !objs[i].nonlin) k = 3;
      else begin
        if (rkind[a] == 2) rc_ev(robj[a], 0);
        rc_ev(i, 1);
        rf_cycle(0, a, 0, 128'(mkcap(objs[i].c, CT_NONLIN, objs[i].perm, objs[i].base)), 1, 0);
        rkind[a] = 2; robj[a] = i;
        return;
      end
    end
    if (k == 3) begin
      if (rkind[a] == 2) rc_ev(robj[a], 0);
      rf_cycle(0, a, 0, {$urandom, $urandom, $urandom, $urandom}, 0, 0);
      rkind[a] = 0;
    end else if (k < 8) begin
      if (rkind[b] == 2 && a != b && b != 0) begin
        if (rkind[a] == 2) rc_ev(robj[a], 1);
        rc_ev(robj[b], 0);
      end else if (rkind[a] == 2 && a != b && b != 0) rc_ev(robj[a], 1);
      rf_cycle(1, a, b, '0, 0, 0);
      if (b != 0) begin rkind[b] = rkind[a]; robj[b] = robj[a]; end
      if (rkind[a] == 1) rkind[a] = 0;
    end else if (k == 8 && rkind[a] == 2) begin
      // cursor update of the same capability: no count change
      rf_ra_addr = 5'(a); #1;
      rf_cycle(0, a, 0, rf_ra_data + 128'd8, 1, 1);
    end else begin
      if (rkind[a] == 2) rc_ev(robj[a], 1);
      rf_cycle(2, a, 0, '0, 0, 0);
      if (rkind[a] == 1) rkind[a] = 0;
    end
  endtask

  initial begin
    int nid;
    logic [2:0] rt;
    rf_ra_addr = 0; rf_rb_addr = 0; rf_w_en = 0; rf_w_addr = 0; rf_w_data = '0; rf_w_tag = 0;
    rf_w_update = 0; rf_mv_en = 0; rf_mv_src = 0; rf_mv_dst = 0; rf_st_en = 0; rf_st_src = 0;
    acc_valid = 0; acc_cap = '0; acc_base = '0; acc_end = '0; acc_kind = ACC_READ;
    cx_op = CX_LCC; cx_base = '0; cx_end = '1; cx_opnd_a = '0; cx_opnd_b = '0;
    cx_new_node = 31'd9; cx_lin_revoked = 0;
    acc_size_log2 = 3; op_valid = 0; op_code = OP_QUERY; op_id = '0; op_perm = P_NA;
    repeat (3) @(posedge clk);
    rst_n = 1;
    parent[0] = 0; parent[1] = 0; lin[1] = 1; cnt[1] = 1; freed[1] = 0;
    wait (init_done);
    @(posedge clk);

    // phase 0: the boot capability in register 1 is live and grants access
    begin
      cap_t bc;
      rf_ra_addr = 5'd1; rf_rb_addr = 5'd2; #1;
      bc = cap_t'(rf_ra_data);
      expect_true(rf_ra_tag && bc.ctype == CT_LIN && bc.perm == P_RWX && bc.node_id == 1 &&
                  !rf_rb_tag, "boot capability in register 1 after reset");
      access(bc, 64'h0, '1, ACC_EXEC, 3'd3);
      access(bc, 64'h0, '1, ACC_WRITE, 3'd3);
      // the execute step reads the same register: shrink, split, tighten
      cx_op = CX_SHRINK; cx_opnd_a = 64'h100; cx_opnd_b = 64'h200; #1;
      expect_true(cx_legal && !cx_tree_op_valid && cx_res_base == 64'h100 &&
                  cx_res_end == 64'h200 && cx_res_cap.node_id == 1, "execute: shrink boot");
      cx_op = CX_SPLIT; cx_opnd_a = 64'h1000; #1;
      expect_true(cx_legal && cx_tree_op_valid && cx_tree_op == OP_SPLIT && cx_res2_valid &&
                  cx_res2_cap.node_id == 9 && cx_res2_base == 64'h1000 &&
                  cx_res_end == 64'h1000, "execute: split boot names the tree op");
      cx_op = CX_TIGHTEN; cx_opnd_a = 64'(P_RX); #1;
      expect_true(cx_legal && cx_res_cap.perm == P_RX, "execute: tighten boot to RX");
      cx_op = CX_SEAL; #1;
      expect_true(cx_legal && cx_res_cap.ctype == CT_SEALED, "execute: seal boot");
      cx_op = CX_INIT; #1;
      expect_true(!cx_legal, "execute: init refused on a linear capability");
      rf_ra_addr = 5'd2; cx_op = CX_LCC; #1;
      expect_true(!cx_legal, "execute: empty register refused");
      for (int r = 0; r < 32; r++) rkind[r] = (r == 1) ? 1 : 0;
    end

    // phase 1: many live objects, more nodes than the node cache holds
    for (int i = 0; i < NOBJ; i++) begin
      malloc(i);
      repeat (2) use_obj($urandom_range(0, i));
    end
    // phase 2: steady state of frees, reallocations and uses
    for (int s = 0; s < 4000; s++) begin
      int i, w;
      i = $urandom_range(0, NOBJ - 1);
      w = $urandom_range(0, 9);
      if (!objs[i].live) malloc(i);
      else if (w == 0) free_obj(i);
      else use_obj(i);
    end
    // phase 4: capabilities loaded, moved, overwritten and stored through
    // the register file; their count events reach the tree in the order
    // given, and accesses use register contents
    for (int s = 0; s < 3000; s++) begin
      rf_step();
      if (s % 50 == 0) begin
        int r;
        r = $urandom_range(1, 31);
        rf_ra_addr = 5'(r); #1;
        expect_true(rf_ra_tag == (rkind[r] != 0), $sformatf("register %0d tag", r));
        if (rkind[r] == 2) begin
          cap_t rc;
          rc = cap_t'(rf_ra_data);
          expect_true(int'(rc.node_id) == objs[robj[r]].c, $sformatf("register %0d node", r));
          access(rc, objs[robj[r]].base, objs[robj[r]].bend, ACC_READ, 3'd3);
        end
      end
    end
    for (int r = 1; r < 32; r++) begin
      if (rkind[r] == 2) rc_ev(robj[r], 0);
      rf_cycle(0, r, 0, '0, 0, 0);
      rkind[r] = 0;
    end
    wait (rc_idle);
    repeat (20) @(posedge clk);
    expect_true(rc_events == exp_rc_events && rc_errors == 0,
                $sformatf("count events %0d expected %0d, errors %0d", rc_events, exp_rc_events,
                          rc_errors));
    expect_true(rf_stall_cycles > 0, "register file held back by a full event queue");
    // every object is freed with the counts the events left behind
    for (int i = 0; i < NOBJ; i++) if (objs[i].live) free_obj(i);
    for (int i = 0; i < 50; i++) malloc(i);

    // phase 3: an access and a tree operation in the same cycle
    for (int s = 0; s < 8; s++) begin
      int i;
      i = $urandom_range(0, NOBJ - 1);
      if (!objs[i].live) malloc(i);
      fork
        access(mkcap(objs[i].c, objs[i].nonlin ? CT_NONLIN : CT_LIN, objs[i].perm,
                     objs[i].base), objs[i].base, objs[i].bend, ACC_READ, 3'd3);
        tree_op(OP_QUERY, objs[i].r, P_NA, nid, rt);
      join
    end

    expect_true(nc_hits > 0,       "node cache hit");
    expect_true(nc_misses > 0,     "node cache miss");
    expect_true(nc_writebacks > 0, "node cache write-back");
    expect_true(n_alloc > n_reused && n_reused > 0, "fresh and reused allocations");
    expect_true(m_mrev > 0 && m_split > 0 && m_delin > 0 && m_drop > 0, "mrev/split/delin/drop");
    expect_true(m_rev_lin > 0,     "revoke giving a linear capability");
    expect_true(m_rev_uninit > 0,  "revoke giving an uninitialized capability");
    expect_true(m_dec_free > 0 && n_freed > 0, "node freed at count zero");
    expect_true(m_f_type > 0 && m_f_perm > 0 && m_f_bounds > 0 && m_f_revoked > 0,
                "every access fault kind");
    expect_true(m_acc_ok > 0,      "allowed access");
    expect_true(m_cursor_step > 0 && m_init_ok > 0, "uninitialized cursor step and init");
    expect_true(acc_waits > 0 || op_waits > 0, "access/tree-op contention");
    $display("N$ hits=%0d misses=%0d miss-rate=%0.3f%% writebacks=%0d  DRAM reads=%0d writes=%0d",
             nc_hits, nc_misses, 100.0 * real'(nc_misses) / real'(nc_hits + nc_misses),
             nc_writebacks, m_reads, m_writes);
    $display("tree: alloc=%0d reused=%0d query=%0d rc-update=%0d revoke=%0d invalidated=%0d freed=%0d",
             n_alloc, n_reused, n_query, n_rc_update, n_revoke, n_invalidated, n_freed);
    $display("mechanisms: mrev=%0d split=%0d delin=%0d drop=%0d revoke->lin=%0d revoke->uninit=%0d dec-free=%0d",
             m_mrev, m_split, m_delin, m_drop, m_rev_lin, m_rev_uninit, m_dec_free);
    $display("accesses: ok=%0d type=%0d perm=%0d bounds=%0d revoked=%0d cursor-step=%0d init=%0d waits acc=%0d op=%0d",
             m_acc_ok, m_f_type, m_f_perm, m_f_bounds, m_f_revoked, m_cursor_step, m_init_ok,
             acc_waits, op_waits);
    $display("register file: count events=%0d stall cycles=%0d", rc_events, rf_stall_cycles);
    $display("cycles=%0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
