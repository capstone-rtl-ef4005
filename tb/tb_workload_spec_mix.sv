// tb_workload_spec_mix: the revocation-tree traffic of the SPEC CPU 2017
// intspeed runs, replayed at reduced size through the node subsystem at its
// default parameters (8 kB 2-way node cache, full node id space) in front of
// a DRAM model with a 40-cycle read latency.
//
// For each benchmark run the published operation counts (allocations,
// queries, reference-count updates, revocations) are divided by one factor
// so that the run issues about OPS_PER_RUN operations in the same
// proportions; a kind with a non-zero count issues at least one. Operations
// follow the evaluation's mapping of program behaviour to capability
// events:
//   allocation   ALLOC a linear capability, MREV for the allocator's
//                revocation capability, DELIN as the program shares it
//   query        a load through a live object's capability (access port)
//   RC update    RC_INC when an address is produced, RC_DEC when one is
//                overwritten
//   revocation   REVOKE with the revocation capability, RC_DEC of the
//                remaining copies (the last frees the node), DROP of the
//                revocation capability
// The heap is first filled with POPULATION live objects (the published runs
// were measured after a long fast-forward; the size of their heaps is not
// given, so this number is this test's own choice), and the kinds are
// interleaved at random. Each run is checked: no operation is refused,
// every load through a live object is allowed, a load through a freed one
// is refused, and the controller's counters grow by exactly the number of
// queries, count updates and revocations issued. The node-cache miss rate
// and cycles per operation are printed per run; with a heap of a guessed
// size they show the behaviour, not the published numbers.
module tb_workload_spec_mix;
  import capstone_pkg::*;

  localparam int OPS_PER_RUN = 4000;
  localparam int POPULATION  = 1200;
  localparam int MAXOBJ      = 1600;
  localparam int NRUNS       = 17;

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
  logic [127:0]      rf_ra_data, rf_rb_data;
  logic              rf_ra_tag, rf_rb_tag, rf_stall, rc_idle;
  int unsigned       m_reads, m_writes;

  // the register file is not used here: its inputs are held idle
  capstone_node_subsystem dut (
    .clk(clk), .rst_n(rst_n), .init_done(init_done),
    .acc_valid(acc_valid), .acc_ready(acc_ready), .acc_cap(acc_cap), .acc_base(acc_base),
    .acc_end(acc_end), .acc_kind(acc_kind), .acc_size_log2(acc_size_log2),
    .acc_resp_valid(acc_resp_valid), .acc_ok(acc_ok), .acc_fault(acc_fault),
    .acc_next_cursor(acc_next_cursor), .acc_init_ok(acc_init_ok),
    .op_valid(op_valid), .op_ready(op_ready), .op_code(op_code), .op_id(op_id),
    .op_perm(op_perm), .op_resp_valid(op_resp_valid), .op_err(op_err),
    .op_new_id(op_new_id), .op_node_valid(op_node_valid), .op_rev_type(op_rev_type),
    .rf_ra_addr(5'd0), .rf_ra_data(rf_ra_data), .rf_ra_tag(rf_ra_tag),
    .rf_rb_addr(5'd0), .rf_rb_data(rf_rb_data), .rf_rb_tag(rf_rb_tag),
    .rf_w_en(1'b0), .rf_w_addr(5'd0), .rf_w_data('0), .rf_w_tag(1'b0), .rf_w_update(1'b0),
    .rf_mv_en(1'b0), .rf_mv_src(5'd0), .rf_mv_dst(5'd0), .rf_st_en(1'b0), .rf_st_src(5'd0),
    .rf_stall(rf_stall), .rc_idle(rc_idle),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_resp_valid(mem_resp_valid), .mem_resp_rdata(mem_resp_rdata),
    .nc_hits(nc_hits), .nc_misses(nc_misses), .nc_writebacks(nc_writebacks),
    .n_alloc(n_alloc), .n_reused(n_reused), .n_query(n_query), .n_rc_update(n_rc_update),
    .n_revoke(n_revoke), .n_invalidated(n_invalidated), .n_freed(n_freed),
    .acc_waits(acc_waits), .op_waits(op_waits), .rc_events(rc_events), .rc_errors(rc_errors),
    .cx_op(CX_LCC), .cx_base(64'd0), .cx_end(64'd0), .cx_opnd_a(64'd0), .cx_opnd_b(64'd0),
    .cx_new_node('0), .cx_lin_revoked(1'b0), .cx_legal(), .cx_tree_op_valid(), .cx_tree_op(),
    .cx_res_tag(), .cx_res_cap(), .cx_res_base(), .cx_res_end(), .cx_res2_valid(),
    .cx_res2_cap(), .cx_res2_base(), .cx_res2_end(), .cx_res_int());

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
    repeat (30000000) @(posedge clk);
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

  // published counts per run: allocation, query, RC update, revocation
  typedef struct {
    string   name;
    longint  alloc, query, rc, revoke;
  } run_t;
  run_t runs [NRUNS] = '{
    '{"600.perlbench_s/0",  22402,  96213853, 259932183,  18754},
    '{"600.perlbench_s/1",  59565, 106558849, 211290520,  58279},
    '{"600.perlbench_s/2",   1293,  95528533, 265646893,   1161},
    '{"602.gcc_s/0",       139829,  98004533, 258869083, 139020},
    '{"602.gcc_s/1",       139870,  98162127, 259262035, 139032},
    '{"602.gcc_s/2",       139814,  98120826, 259183800, 139011},
    '{"605.mcf_s/0",            0,         0,         0,      0},
    '{"620.omnetpp_s/0",   430165, 172949008, 368670213, 379251},
    '{"623.xalancbmk_s/0", 112500, 273464398, 297073283,  80999},
    '{"625.x264_s/0",          38, 175363916, 101015339,      0},
    '{"625.x264_s/1",           0, 183377516,  94857766,      0},
    '{"625.x264_s/2",         116, 146974430,  81288420,      2},
    '{"631.deepsjeng_s/0",      0,   4280475,   2585822,      0},
    '{"641.leela_s/0",      23432,  33280704,  27675933,  19844},
    '{"648.exchange2_s/0",  22078,   1909208,    972060,  22078},
    '{"657.xz_s/0",             0,  24748672,   4253678,      0},
    '{"657.xz_s/1",             0,  73389965,  74229339,      0}
  };

  // ---------------- heap model ----------------
  typedef struct {
    int          c, r;      // object node, revocation node
    int          copies;    // references beyond the first
    logic [63:0] base;
    bit          live;
  } obj_t;
  obj_t objs [MAXOBJ];
  int   live_list [$];

  function automatic cap_t mkcap(int node, logic [63:0] cur);
    cap_t c = '0;
    c.node_id = node_id_t'(node); c.ctype = CT_NONLIN; c.perm = P_RW; c.cursor = cur;
    return c;
  endfunction

  task automatic tree_op(node_op_e op, int n, output int nid);
    op_valid <= 1; op_code <= op; op_id <= node_id_t'(n); op_perm <= P_RW;
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    op_valid <= 0;
    @(posedge clk);
    while (!op_resp_valid) @(posedge clk);
    nid = int'(op_new_id);
    expect_true(!op_err, $sformatf("%s on node %0d refused", op.name(), n));
  endtask

  task automatic load(int i, bit expect_ok);
    acc_valid <= 1; acc_cap <= mkcap(objs[i].c, objs[i].base + 64'($urandom_range(0, 31)) * 8);
    acc_base <= objs[i].base; acc_end <= objs[i].base + 64'h100; acc_kind <= ACC_READ;
    acc_size_log2 <= 3'd3;
    @(posedge clk);
    while (!acc_ready) @(posedge clk);
    acc_valid <= 0;
    @(posedge clk);
    while (!acc_resp_valid) @(posedge clk);
    expect_true(acc_ok == expect_ok, $sformatf("load via node %0d ok=%0d expected %0d fault %b",
                                               objs[i].c, acc_ok, expect_ok, acc_fault));
  endtask

  task automatic do_malloc();
    int i, nid;
    i = -1;
    for (int k = 0; k < MAXOBJ; k++) if (!objs[k].live) begin i = k; break; end
    if (i < 0) return;
    tree_op(OP_ALLOC, 0, nid);
    objs[i].c = nid;
    tree_op(OP_MREV, objs[i].c, nid);
    objs[i].r = nid;
    tree_op(OP_DELIN, objs[i].c, nid);
    objs[i].copies = 0;
    objs[i].base   = 64'h10_0000 + 64'(i) * 64'h1000;
    objs[i].live   = 1;
    live_list.push_back(i);
  endtask

  task automatic do_free();
    int k, i, nid;
    k = $urandom_range(0, live_list.size() - 1);
    i = live_list[k];
    live_list.delete(k);
    tree_op(OP_REVOKE, objs[i].r, nid);
    load(i, 0);
    for (int j = 0; j <= objs[i].copies; j++) tree_op(OP_RC_DEC, objs[i].c, nid);
    tree_op(OP_DROP, objs[i].r, nid);
    objs[i].live = 0;
  endtask

  task automatic do_rc();
    int i, nid;
    i = live_list[$urandom_range(0, live_list.size() - 1)];
    if (objs[i].copies == 0 || $urandom_range(0, 1) == 0) begin
      tree_op(OP_RC_INC, objs[i].c, nid);
      objs[i].copies++;
    end else begin
      tree_op(OP_RC_DEC, objs[i].c, nid);
      objs[i].copies--;
    end
  endtask

  initial begin
    acc_valid = 0; acc_cap = '0; acc_base = '0; acc_end = '0; acc_kind = ACC_READ;
    acc_size_log2 = 3; op_valid = 0; op_code = OP_QUERY; op_id = '0; op_perm = P_NA;
    foreach (objs[i]) objs[i].live = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);
    for (int i = 0; i < POPULATION; i++) do_malloc();

    foreach (runs[ri]) begin
      longint total, f;
      int na, nq, nr, nv, left, c0, h0, m0, q0, u0, v0, n_ops, ok_before;
      total = runs[ri].alloc + runs[ri].query + runs[ri].rc + runs[ri].revoke;
      f  = (total + OPS_PER_RUN - 1) / OPS_PER_RUN;
      if (f == 0) f = 1;
      na = int'((runs[ri].alloc  + f - 1) / f);
      nq = int'((runs[ri].query  + f - 1) / f);
      nr = int'((runs[ri].rc     + f - 1) / f);
      nv = int'((runs[ri].revoke + f - 1) / f);
      n_ops = na + nq + nr + nv;
      c0 = cycle; h0 = int'(nc_hits); m0 = int'(nc_misses);
      q0 = int'(n_query); u0 = int'(n_rc_update); v0 = int'(n_revoke);
      ok_before = failures;
      // interleave the kinds at random in their proportions
      left = n_ops;
      while (left > 0) begin
        int x;
        x = $urandom_range(1, left);
        if (x <= na) begin na--; do_malloc(); end
        else if (x <= na + nq) begin nq--; load(live_list[$urandom_range(0, live_list.size() - 1)], 1); end
        else if (x <= na + nq + nr) begin nr--; do_rc(); end
        else begin nv--; do_free(); end
        left--;
      end
      // a revocation also issues one stale load (a query) and the RC_DECs
      // that free the node; those are part of the counts checked here
      begin
        int dq, du, dv, hits, misses;
        dq = int'(n_query) - q0; du = int'(n_rc_update) - u0; dv = int'(n_revoke) - v0;
        hits = int'(nc_hits) - h0; misses = int'(nc_misses) - m0;
        expect_true(dv == int'((runs[ri].revoke + f - 1) / f),
                    $sformatf("%s: %0d revocations counted", runs[ri].name, dv));
        expect_true(dq >= int'((runs[ri].query + f - 1) / f) + dv,
                    $sformatf("%s: %0d queries counted", runs[ri].name, dq));
        expect_true(du >= int'((runs[ri].rc + f - 1) / f),
                    $sformatf("%s: %0d count updates counted", runs[ri].name, du));
        $display("%-18s ops=%5d (alloc %0d query %0d rc %0d revoke %0d)  N$ miss-rate=%6.3f%%  cycles/op=%0.1f  %s",
                 runs[ri].name, n_ops, int'((runs[ri].alloc + f - 1) / f), dq, du, dv,
                 (hits + misses) > 0 ? 100.0 * real'(misses) / real'(hits + misses) : 0.0,
                 n_ops > 0 ? real'(cycle - c0) / real'(n_ops) : 0.0,
                 failures == ok_before ? "ok" : "FAILED");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
