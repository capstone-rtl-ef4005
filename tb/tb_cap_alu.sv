// tb_cap_alu: self-checking test of the capability-instruction execute
// step, including SEAL. Directed cases walk each instruction's preconditions at their
// edges (split address at base and end, shrink bounds equal, init with the
// cursor one short of the end, every type for each instruction, every
// permission pair for TIGHTEN, REVOKE with and without a linear node).
// Then 30000 random instructions are compared field by field with a
// reference written from the formal instruction rules: legality, tree
// operation, result tag, type, permission, node, cursor, bounds of both
// results and the integer result.
module tb_cap_alu;
  import capstone_pkg::*;

  cx_op_e      op;
  logic        cap_tag, lin_revoked, legal, tree_op_valid, res_tag, res2_valid;
  cap_t        cap, res_cap, res2_cap;
  logic [63:0] base, bend, opnd_a, opnd_b, res_base, res_end, res2_base, res2_end, res_int;
  node_id_t    new_node;
  node_op_e    tree_op;

  cap_alu dut (
    .op(op), .cap_tag(cap_tag), .cap(cap), .base(base), .bound_end(bend),
    .opnd_a(opnd_a), .opnd_b(opnd_b), .new_node(new_node), .lin_revoked(lin_revoked),
    .legal(legal), .tree_op_valid(tree_op_valid), .tree_op(tree_op), .res_tag(res_tag),
    .res_cap(res_cap), .res_base(res_base), .res_end(res_end), .res2_valid(res2_valid),
    .res2_cap(res2_cap), .res2_base(res2_base), .res2_end(res2_end), .res_int(res_int));

  int checks = 0, failures = 0;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // permission order as a table: stronger[p] lists what p is at or below
  function automatic bit below(int pa, int pb);
    bit t [5][5] = '{'{1,1,1,1,0},    // R   <= R, RW, RX, RWX
                     '{0,1,0,1,0},    // RW  <= RW, RWX
                     '{0,0,1,1,0},    // RX  <= RX, RWX
                     '{0,0,0,1,0},    // RWX <= RWX
                     '{1,1,1,1,1}};   // NA  <= everything
    if (pa > 4) pa = 4;
    if (pb > 4) pb = 4;
    return t[pa][pb];
  endfunction

  int n_legal [11];

  // apply the current inputs and compare with the rules
  task automatic check(string what);
    bit          e_legal, e_tv, e_tag, e_r2;
    node_op_e    e_op;
    cap_t        e_cap, e_cap2;
    logic [63:0] e_b, e_e, e_b2, e_e2, e_int;
    int          t, rp;
    #1;
    t = int'(cap.ctype);
    e_legal = 0; e_tv = 0; e_op = OP_QUERY; e_tag = cap_tag; e_r2 = 0;
    e_cap = cap; e_cap2 = cap; e_b = base; e_e = bend; e_b2 = base; e_e2 = bend; e_int = 0;
    case (op)
      CX_TIGHTEN: begin
        e_legal = cap_tag;
        rp = (opnd_a <= 3) ? int'(opnd_a) : 4;
        e_cap.perm = below(rp, int'(cap.perm)) ? 3'(rp) : 3'd4;
      end
      CX_SHRINK: begin
        e_legal = cap_tag && (t == 0 || t == 1) && base <= opnd_a && opnd_a < opnd_b &&
                  opnd_b <= bend;
        e_b = opnd_a; e_e = opnd_b;
      end
      CX_SPLIT: begin
        e_legal = cap_tag && t == 0 && base < opnd_a && opnd_a < bend;
        e_tv = e_legal; e_op = OP_SPLIT; e_r2 = e_legal;
        e_e = opnd_a; e_b2 = opnd_a; e_cap2.node_id = new_node;
      end
      CX_DELIN: begin
        e_legal = cap_tag && t == 0; e_tv = e_legal; e_op = OP_DELIN; e_cap.ctype = 3'd1;
      end
      CX_SCC: begin
        e_legal = cap_tag && !(t == 3 || t == 4 || t == 5); e_cap.cursor = opnd_a;
      end
      CX_LCC: begin
        e_legal = cap_tag; e_int = cap.cursor;
      end
      CX_MREV: begin
        e_legal = cap_tag && t == 0; e_tv = e_legal; e_op = OP_MREV;
        e_cap.ctype = 3'd2; e_cap.node_id = new_node;
      end
      CX_REVOKE: begin
        e_legal = cap_tag && t == 2; e_tv = e_legal; e_op = OP_REVOKE;
        if (lin_revoked && (cap.perm == 3'd1 || cap.perm == 3'd3)) begin
          e_cap.ctype = 3'd3; e_cap.cursor = base;
        end else e_cap.ctype = 3'd0;
      end
      CX_INIT: begin
        e_legal = cap_tag && t == 3 && cap.cursor == bend; e_cap.ctype = 3'd0;
      end
      CX_SEAL: begin
        e_legal = cap_tag && t == 0 && (cap.perm == 3'd1 || cap.perm == 3'd3);
        e_cap.ctype = 3'd4;
      end
      default: begin   // DROP
        e_legal = cap_tag && t inside {0, 2, 3, 4, 5}; e_tv = e_legal; e_op = OP_DROP;
        e_tag = 0; e_cap = '0;
      end
    endcase
    expect_true(legal == e_legal, $sformatf("%s: %s legal %0d expected %0d", what, op.name(),
                                            legal, e_legal));
    expect_true(tree_op_valid == e_tv && (!e_tv || tree_op == e_op),
                $sformatf("%s: %s tree op %0d/%s expected %0d/%s", what, op.name(),
                          tree_op_valid, tree_op.name(), e_tv, e_op.name()));
    if (e_legal) begin
      n_legal[int'(op)]++;
      expect_true(res_tag == e_tag && res_cap == e_cap,
                  $sformatf("%s: %s result %h expected %h", what, op.name(), res_cap, e_cap));
      expect_true(res_base == e_b && res_end == e_e,
                  $sformatf("%s: %s bounds [%h,%h) expected [%h,%h)", what, op.name(),
                            res_base, res_end, e_b, e_e));
      expect_true(res2_valid == e_r2 && (!e_r2 || (res2_cap == e_cap2 && res2_base == e_b2 &&
                  res2_end == e_e2)), $sformatf("%s: %s second result", what, op.name()));
      expect_true(res_int == e_int, $sformatf("%s: %s integer result", what, op.name()));
    end
  endtask

  function automatic cap_t rnd_cap(int t, int p);
    cap_t c;
    c = '0;
    c.node_id = node_id_t'($urandom_range(1, 1000));
    c.ctype   = 3'(t);
    c.perm    = 3'(p);
    c.bounds  = 27'($urandom);
    c.cursor  = 64'h1000 + 64'($urandom_range(0, 64));
    return c;
  endfunction

  initial begin
    cap_tag = 1; lin_revoked = 0; new_node = 31'd77; opnd_b = '0;
    base = 64'h1000; bend = 64'h1040;

    // every instruction x every type x every permission, fixed operands
    for (int o = 0; o < 11; o++)
      for (int t = 0; t < 8; t++)
        for (int p = 0; p < 8; p++) begin
          op = cx_op_e'(o); cap = rnd_cap(t, p);
          opnd_a = (o == 0) ? 64'($urandom_range(0, 5)) : 64'h1010;
          opnd_b = 64'h1030;
          lin_revoked = p[0];
          check("table");
        end
    // untagged operands are refused
    cap_tag = 0;
    for (int o = 0; o < 11; o++) begin
      op = cx_op_e'(o); cap = rnd_cap(0, 3); opnd_a = 64'h1010; opnd_b = 64'h1020;
      check("untagged");
    end
    cap_tag = 1;
    // edges
    op = CX_SPLIT; cap = rnd_cap(0, 1);
    opnd_a = base;     check("split at base");
    opnd_a = bend;     check("split at end");
    opnd_a = base + 1; check("split just above base");
    opnd_a = bend - 1; check("split just below end");
    op = CX_SHRINK;
    opnd_a = base; opnd_b = bend;       check("shrink to same bounds");
    opnd_a = 64'h1020; opnd_b = 64'h1020; check("shrink to empty");
    opnd_a = base - 1; opnd_b = bend;   check("shrink below base");
    opnd_a = base; opnd_b = bend + 1;   check("shrink beyond end");
    op = CX_INIT; cap = rnd_cap(3, 1);
    cap.cursor = bend;     check("init at end");
    expect_true(legal, "init allowed at end");
    cap.cursor = bend - 8; check("init one word short");
    expect_true(!legal, "init refused short of end");
    op = CX_REVOKE; cap = rnd_cap(2, 3);
    lin_revoked = 1; check("revoke rwx linear");
    expect_true(res_cap.ctype == CT_UNINIT && res_cap.cursor == base, "revoke gives uninit at base");
    lin_revoked = 0; check("revoke rwx no linear");
    expect_true(res_cap.ctype == CT_LIN, "revoke gives linear");
    cap.perm = P_RX; lin_revoked = 1; check("revoke rx linear");
    expect_true(res_cap.ctype == CT_LIN, "revoke without write gives linear");

    // random
    for (int i = 0; i < 30000; i++) begin
      int t;
      op = cx_op_e'($urandom_range(0, 10));
      t = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 7) : $urandom_range(0, 3);
      cap = rnd_cap(t, $urandom_range(0, 7));
      cap_tag = ($urandom_range(0, 15) != 0);
      base = 64'h1000 + 64'($urandom_range(0, 32));
      bend = base + 64'($urandom_range(0, 48));
      opnd_a = (op == CX_TIGHTEN) ? 64'($urandom_range(0, 6)) : 64'h1000 + 64'($urandom_range(0, 96));
      opnd_b = 64'h1000 + 64'($urandom_range(0, 96));
      if (op == CX_INIT && $urandom_range(0, 1) == 0) cap.cursor = bend;
      new_node = node_id_t'($urandom_range(1, 5000));
      lin_revoked = 1'($urandom_range(0, 1));
      check("random");
    end
    foreach (n_legal[o])
      expect_true(n_legal[o] > 0, $sformatf("%s was legal at least once", cx_op_e'(o)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
