// tb_cap_checker: self-checking test of the capability access check.
// Runs directed cases for each predicate (type, each permission code and
// access kind, bounds edges, revoked node, uninitialized cursor step and
// init condition), then random capabilities compared against a reference
// written from the predicate table: readable = perm in {R,RW,RX,RWX} and not
// uninitialized, writable = perm in {RW,RWX}, executable = perm in {RX,RWX}
// and not uninitialized, accessible = linear, non-linear or uninitialized.
module tb_cap_checker;
  import capstone_pkg::*;

  cap_t        cap;
  logic [63:0] base, bend;
  access_e     acc;
  logic [2:0]  size_log2;
  logic        node_valid;
  logic        ok, f_type, f_perm, f_bounds, f_revoked, init_ok;
  logic [63:0] next_cursor;

  int checks = 0, failures = 0;

  cap_checker #(.WORD_BYTES(8)) dut (
    .cap(cap), .base(base), .bound_end(bend), .acc(acc), .size_log2(size_log2),
    .node_valid(node_valid), .ok(ok), .f_type(f_type), .f_perm(f_perm),
    .f_bounds(f_bounds), .f_revoked(f_revoked), .next_cursor(next_cursor),
    .init_ok(init_ok));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference, table-driven
  function automatic bit ref_perm(int t, int p, access_e a);
    bit rd_ok [8] = '{1,1,1,1,0,0,0,0};   // R, RW, RX, RWX, NA...
    bit wr_ok [8] = '{0,1,0,1,0,0,0,0};
    bit ex_ok [8] = '{0,0,1,1,0,0,0,0};
    case (a)
      ACC_READ:  return rd_ok[p] && t != 3;
      ACC_WRITE: return wr_ok[p];
      ACC_EXEC:  return ex_ok[p] && t != 3;
      default:   return 0;
    endcase
  endfunction

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic expect_check(string what);
    bit e_type, e_perm, e_bounds, e_ok;
    longint unsigned lo, hi;
    logic [64:0] last;
    int t = int'(cap.ctype);
    e_type   = !(t == 0 || t == 1 || t == 3);
    e_perm   = !ref_perm(t, int'(cap.perm), acc);
    last     = {1'b0, cap.cursor} + (65'd1 << size_log2);
    e_bounds = !(cap.cursor >= base && last <= {1'b0, bend});
    e_ok     = !e_type && !e_perm && !e_bounds && node_valid;
    #1;
    checks++;
    if (ok !== e_ok || f_type !== e_type || f_perm !== e_perm ||
        f_bounds !== e_bounds || f_revoked !== !node_valid) begin
      failures++;
      $display("FAIL %s: t=%0d p=%0d acc=%0d cur=%h [%h,%h) ok=%b/%b type=%b/%b perm=%b/%b bnd=%b/%b",
               what, t, cap.perm, acc, cap.cursor, base, bend, ok, e_ok,
               f_type, e_type, f_perm, e_perm, f_bounds, e_bounds);
    end
    checks++;
    lo = cap.cursor;
    hi = (e_ok && acc == ACC_WRITE && t == 3) ? lo + 8 : lo;
    if (next_cursor !== hi) begin
      failures++;
      $display("FAIL %s: next_cursor %h expected %h", what, next_cursor, hi);
    end
    checks++;
    if (init_ok !== (t == 3 && cap.cursor == bend && node_valid)) begin
      failures++;
      $display("FAIL %s: init_ok %b", what, init_ok);
    end
  endtask

  initial begin
    cap = '0; base = 64'h1000; bend = 64'h2000; acc = ACC_READ; size_log2 = 3;
    node_valid = 1;
    // every type, every permission code, every access kind
    for (int t = 0; t < 8; t++)
      for (int p = 0; p < 8; p++)
        for (int a = 0; a < 3; a++) begin
          cap.ctype = 3'(t); cap.perm = 3'(p); acc = access_e'(a);
          cap.cursor = 64'h1800;
          expect_check("table");
        end
    // bounds edges with a linear RWX capability
    cap.ctype = CT_LIN; cap.perm = P_RWX; acc = ACC_READ;
    cap.cursor = 64'h1000; expect_check("at base");
    expect_true(ok, "access at base refused");
    cap.cursor = 64'h0FFF; expect_check("below base");
    expect_true(!ok, "access below base allowed");
    cap.cursor = 64'h1FF8; expect_check("last word");
    expect_true(ok, "last word refused");
    cap.cursor = 64'h1FF9; expect_check("straddles end");
    expect_true(!ok, "straddling access allowed");
    size_log2 = 0; cap.cursor = 64'h1FFF; expect_check("last byte");
    cap.cursor = 64'h2000; expect_check("at end");
    size_log2 = 3;
    // revoked node
    cap.cursor = 64'h1800; node_valid = 0; expect_check("revoked");
    expect_true(!ok && f_revoked, "revoked node allowed");
    node_valid = 1;
    // uninitialized: writes step the cursor, reads refused, init at end
    cap.ctype = CT_UNINIT; cap.perm = P_RW; acc = ACC_WRITE; cap.cursor = 64'h1000;
    expect_check("uninit write");
    expect_true(next_cursor == 64'h1008, "uninit cursor step");
    acc = ACC_READ; expect_check("uninit read");
    expect_true(!ok, "uninit read allowed");
    cap.cursor = 64'h2000; expect_check("uninit at end");
    expect_true(init_ok, "init_ok at end");
    // random
    for (int i = 0; i < 20000; i++) begin
      cap        = {$urandom, $urandom, $urandom, $urandom};
      cap.ctype  = 3'($urandom_range(0, 5));
      cap.perm   = 3'($urandom_range(0, 5));
      base       = {$urandom, $urandom};
      bend       = base + 64'($urandom_range(0, 4096));
      cap.cursor = base + 64'($urandom_range(0, 4200)) - 64'd64;
      if ($urandom_range(0, 9) == 0) cap.cursor = bend;
      acc        = access_e'($urandom_range(0, 2));
      size_log2  = 3'($urandom_range(0, 4));
      node_valid = ($urandom_range(0, 7) != 0);
      expect_check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
