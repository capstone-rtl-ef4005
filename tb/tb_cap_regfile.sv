// tb_cap_regfile: self-checking test of the capability register file.
//   * reset state: the boot register holds a linear read/write/execute
//     capability on node 1 with all-ones bounds, every other register is
//     zero and untagged
//   * directed: a linear move clears the source and raises no event; a
//     move onto itself clears a linear register but keeps a non-linear one;
//     a non-linear copy raises an increment, overwriting one a decrement;
//     a store clears a linear register and counts a non-linear copy; an
//     in-place update raises nothing; register 0 stays zero
//   * 20000 random writes, moves and stores over a mix of linear,
//     non-linear and plain words, with every register, tag and event
//     compared against a reference model written from the same rules
module tb_cap_regfile;
  import capstone_pkg::*;

  localparam int NR = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0]       ra_addr, rb_addr, w_addr, mv_src, mv_dst, st_src;
  logic [CAP_W-1:0] ra_data, rb_data, w_data;
  logic             ra_tag, rb_tag, w_en, w_tag, w_update, mv_en, st_en;
  logic             ev_inc_valid, ev_dec_valid;
  node_id_t         ev_inc_id, ev_dec_id;

  cap_regfile dut (
    .clk(clk), .rst_n(rst_n),
    .ra_addr(ra_addr), .ra_data(ra_data), .ra_tag(ra_tag),
    .rb_addr(rb_addr), .rb_data(rb_data), .rb_tag(rb_tag),
    .w_en(w_en), .w_addr(w_addr), .w_data(w_data), .w_tag(w_tag), .w_update(w_update),
    .mv_en(mv_en), .mv_src(mv_src), .mv_dst(mv_dst),
    .st_en(st_en), .st_src(st_src),
    .ev_inc_valid(ev_inc_valid), .ev_inc_id(ev_inc_id),
    .ev_dec_valid(ev_dec_valid), .ev_dec_id(ev_dec_id));

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // reference state
  logic [CAP_W-1:0] m_data [NR];
  logic             m_tag  [NR];

  function automatic logic [CAP_W-1:0] mk(cap_type_e t, int node);
    cap_t c;
    c = '0;
    c.node_id = node_id_t'(node);
    c.ctype   = t;
    c.perm    = P_RW;
    c.cursor  = 64'($urandom);
    return CAP_W'(c);
  endfunction

  function automatic bit m_lin(int r);
    cap_t c = cap_t'(m_data[r]);
    return m_tag[r] && c.ctype inside {CT_LIN, CT_REV, CT_UNINIT, CT_SEALED, CT_SEALED_RET};
  endfunction

  function automatic bit m_nonlin(int r);
    cap_t c = cap_t'(m_data[r]);
    return m_tag[r] && c.ctype == CT_NONLIN;
  endfunction

  function automatic node_id_t m_node(int r);
    cap_t c = cap_t'(m_data[r]);
    return c.node_id;
  endfunction

  task automatic idle();
    w_en <= 0; mv_en <= 0; st_en <= 0; w_update <= 0;
  endtask

  // apply one operation: check events against the reference before the
  // edge, update the reference, then check every register after the edge
  int n_inc = 0, n_dec = 0;

  task automatic check_events(bit ei, node_id_t ii, bit ed, node_id_t di, string what);
    expect_true(ev_inc_valid == ei && (!ei || ev_inc_id == ii),
                $sformatf("%s: inc event %0b/%0d expected %0b/%0d", what,
                          ev_inc_valid, ev_inc_id, ei, ii));
    expect_true(ev_dec_valid == ed && (!ed || ev_dec_id == di),
                $sformatf("%s: dec event %0b/%0d expected %0b/%0d", what,
                          ev_dec_valid, ev_dec_id, ed, di));
    n_inc += int'(ei);
    n_dec += int'(ed);
  endtask

  task automatic check_all(string what);
    for (int r = 0; r < NR; r++) begin
      ra_addr = 5'(r);
      rb_addr = 5'((r + 7) % NR);
      #1;
      expect_true(ra_data == m_data[r] && ra_tag == m_tag[r],
                  $sformatf("%s: register %0d mismatch", what, r));
      expect_true(rb_data == m_data[(r + 7) % NR] && rb_tag == m_tag[(r + 7) % NR],
                  $sformatf("%s: port b register %0d mismatch", what, (r + 7) % NR));
    end
  endtask

  task automatic do_write(int a, logic [CAP_W-1:0] d, bit t, bit upd);
    bit ei, ed;
    node_id_t ii, di;
    cap_t c;
    c = cap_t'(d);
    w_en <= 1; w_addr <= 5'(a); w_data <= d; w_tag <= t; w_update <= upd;
    #1;
    ei = (a != 0) && !upd && t && c.ctype == CT_NONLIN; ii = c.node_id;
    ed = (a != 0) && !upd && m_nonlin(a);               di = m_node(a);
    check_events(ei, ii, ed, di, $sformatf("write r%0d", a));
    @(posedge clk);
    if (a != 0) begin m_data[a] = d; m_tag[a] = t; end
    idle();
    #1;
  endtask

  task automatic do_move(int s, int d);
    bit ei, ed, lin;
    node_id_t ii, di;
    logic [CAP_W-1:0] sd;
    logic st;
    mv_en <= 1; mv_src <= 5'(s); mv_dst <= 5'(d);
    #1;
    ei = (d != 0) && (s != d) && m_nonlin(s); ii = m_node(s);
    ed = (d != 0) && (s != d) && m_nonlin(d); di = m_node(d);
    check_events(ei, ii, ed, di, $sformatf("move r%0d->r%0d", s, d));
    @(posedge clk);
    sd = m_data[s]; st = m_tag[s]; lin = m_lin(s);
    if (d != 0) begin m_data[d] = sd; m_tag[d] = st; end
    if (lin) begin m_data[s] = '0; m_tag[s] = 0; end
    idle();
    #1;
  endtask

  task automatic do_store(int s);
    st_en <= 1; st_src <= 5'(s);
    #1;
    check_events(m_nonlin(s), m_node(s), 0, '0, $sformatf("store r%0d", s));
    @(posedge clk);
    if (m_lin(s)) begin m_data[s] = '0; m_tag[s] = 0; end
    idle();
    #1;
  endtask

  initial begin
    cap_t bc;
    w_en = 0; mv_en = 0; st_en = 0; w_update = 0; w_tag = 0;
    w_addr = '0; w_data = '0; mv_src = '0; mv_dst = '0; st_src = '0;
    ra_addr = '0; rb_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;

    // reset state
    for (int r = 0; r < NR; r++) begin m_data[r] = '0; m_tag[r] = 0; end
    bc = '0; bc.node_id = 31'd1; bc.ctype = CT_LIN; bc.perm = P_RWX; bc.bounds = '1;
    m_data[1] = CAP_W'(bc); m_tag[1] = 1;
    check_all("reset");

    // directed
    do_move(1, 2);
    expect_true(m_tag[1] == 0 && m_tag[2] == 1, "linear move clears source");
    check_all("linear move");
    do_move(2, 2);
    expect_true(m_tag[2] == 0, "linear self-move clears the register");
    check_all("linear self-move");
    do_write(3, mk(CT_NONLIN, 9), 1, 0);
    do_move(3, 4);
    do_move(3, 3);
    expect_true(m_tag[3] == 1, "non-linear self-move keeps the register");
    do_write(4, mk(CT_NONLIN, 11), 1, 0);
    do_store(4);
    do_write(5, mk(CT_LIN, 12), 1, 0);
    do_store(5);
    expect_true(m_tag[5] == 0, "store clears a linear register");
    do_write(4, mk(CT_NONLIN, 11), 1, 1);
    do_write(0, mk(CT_NONLIN, 13), 1, 0);
    do_move(4, 0);
    check_all("directed");
    expect_true(n_inc == 4 && n_dec == 1,
                $sformatf("directed events inc=%0d dec=%0d, expected 4/1", n_inc, n_dec));

    // random
    for (int i = 0; i < 20000; i++) begin
      int k, a, b;
      cap_type_e t;
      k = $urandom_range(0, 9);
      a = $urandom_range(0, NR - 1);
      b = $urandom_range(0, NR - 1);
      t = cap_type_e'($urandom_range(0, 5));
      if (k < 4)      do_write(a, mk(t, $urandom_range(0, 63)), $urandom_range(0, 3) != 0,
                               $urandom_range(0, 4) == 0);
      else if (k < 8) do_move(a, b);
      else            do_store(a);
      if (i % 500 == 0) check_all($sformatf("random step %0d", i));
    end
    check_all("end");
    expect_true(n_inc > 1000 && n_dec > 500,
                $sformatf("event coverage inc=%0d dec=%0d", n_inc, n_dec));
    $display("register file: inc events=%0d dec events=%0d", n_inc, n_dec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
