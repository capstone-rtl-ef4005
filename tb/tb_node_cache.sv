// tb_node_cache: self-checking test of the node cache at its default size
// (8 kB, 2-way, one 16-byte node per line, 256 sets) in front of a
// behavioural DRAM model with a 10-cycle read latency.
//   * directed: three nodes mapping to one set exercise a read miss with a
//     fill, a write hit, a write miss installed without a fill, LRU victim
//     choice and write-back of a dirty victim (checked in the DRAM model)
//   * a read hit answers exactly one cycle after the request is taken
//   * random reads and writes over 2048 node ids compared with a shadow
//     copy of every node; hits and misses compared with a reference
//     two-way LRU model kept per set
module tb_node_cache;
  import capstone_pkg::*;

  localparam logic [63:0] BASE = 64'h0000_0008_0000_0000;
  localparam int SETS = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         req_valid, req_ready, req_we, resp_valid;
  node_id_t     req_id;
  logic [127:0] req_wdata, resp_rdata;
  logic         mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [63:0]  mem_req_addr;
  logic [127:0] mem_req_wdata, mem_resp_rdata;
  logic [31:0]  hit_count, miss_count, wb_count;
  int unsigned  n_reads, n_writes;

  node_cache dut (
    .clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_ready(req_ready), .req_we(req_we), .req_id(req_id),
    .req_wdata(req_wdata), .resp_valid(resp_valid), .resp_rdata(resp_rdata),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_resp_valid(mem_resp_valid), .mem_resp_rdata(mem_resp_rdata),
    .hit_count(hit_count), .miss_count(miss_count), .writeback_count(wb_count));

  node_mem_model #(.LATENCY(10), .READY_GAP(1)) mem (
    .clk(clk), .rst_n(rst_n),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_wdata(mem_req_wdata),
    .mem_resp_valid(mem_resp_valid), .mem_resp_rdata(mem_resp_rdata),
    .n_reads(n_reads), .n_writes(n_writes));

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic expect_true(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, msg);
    end
  endtask

  // one request; returns read data and the cycles from acceptance to answer
  task automatic access(input bit we, input node_id_t id, input logic [127:0] wd,
                        output logic [127:0] rd, output int lat);
    int t0;
    req_valid <= 1; req_we <= we; req_id <= id; req_wdata <= wd;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t0 = cycle;
    req_valid <= 0;
    @(posedge clk);
    while (!resp_valid) @(posedge clk);
    lat = cycle - t0;
    rd  = resp_rdata;
  endtask

  // shadow of node contents, reference LRU state
  logic [127:0] shadow [node_id_t];
  node_id_t     lru_ids [SETS][$];   // front = most recently used

  function automatic bit ref_lookup(node_id_t id);
    int s = int'(id % SETS);
    foreach (lru_ids[s][i]) begin
      if (lru_ids[s][i] == id) begin
        lru_ids[s].delete(i);
        lru_ids[s].push_front(id);
        return 1;
      end
    end
    lru_ids[s].push_front(id);
    if (lru_ids[s].size() > 2) void'(lru_ids[s].pop_back());
    return 0;
  endfunction

  initial begin
    logic [127:0] rd, v1, v2;
    int lat;
    int hits0, miss0, exp_hits, exp_miss;
    node_id_t a, b, c;
    req_valid = 0; req_we = 0; req_id = '0; req_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    a = 31'd5; b = a + 31'(SETS); c = b + 31'(SETS);
    v1 = {4{32'hA5A5_0001}}; v2 = {4{32'h5A5A_0002}};

    access(0, a, '0, rd, lat);
    expect_true(rd == '0 && miss_count == 1 && n_reads == 1, "cold read miss with fill");
    access(1, a, v1, rd, lat);
    expect_true(hit_count == 1 && lat == 1, "write hit, 1 cycle");
    access(0, a, '0, rd, lat);
    expect_true(rd == v1 && hit_count == 2, "read hit returns written data");
    expect_true(lat == 1, $sformatf("read hit latency %0d, expected 1", lat));
    access(1, b, v2, rd, lat);
    expect_true(miss_count == 2 && n_reads == 1, "write miss installs without fill");
    access(0, c, '0, rd, lat);
    expect_true(wb_count == 1 && mem.peek(BASE + 64'(a) * 16) == v1,
                "LRU victim a written back");
    access(0, a, '0, rd, lat);
    expect_true(rd == v1 && wb_count == 2 && mem.peek(BASE + 64'(b) * 16) == v2,
                "a refetched, dirty b written back");
    expect_true(lat > 10, $sformatf("miss latency %0d includes DRAM latency", lat));

    // reset reference state to the contents now held
    shadow[a] = v1; shadow[b] = v2; shadow[c] = '0;
    lru_ids[a % SETS] = '{a, c};

    hits0 = int'(hit_count); miss0 = int'(miss_count);
    exp_hits = 0; exp_miss = 0;
    for (int i = 0; i < 6000; i++) begin
      node_id_t id;
      bit we;
      logic [127:0] wd;
      id = 31'($urandom_range(0, 2047));
      we = ($urandom_range(0, 2) == 0);
      wd = {$urandom, $urandom, $urandom, $urandom};
      if (ref_lookup(id)) exp_hits++; else exp_miss++;
      access(we, id, wd, rd, lat);
      if (we) shadow[id] = wd;
      else begin
        logic [127:0] e;
        e = shadow.exists(id) ? shadow[id] : '0;
        expect_true(rd == e, $sformatf("read %0d data %h expected %h", id, rd, e));
      end
    end
    expect_true(int'(hit_count) - hits0 == exp_hits,
                $sformatf("hits %0d expected %0d", int'(hit_count) - hits0, exp_hits));
    expect_true(int'(miss_count) - miss0 == exp_miss,
                $sformatf("misses %0d expected %0d", int'(miss_count) - miss0, exp_miss));
    $display("node cache: hits=%0d misses=%0d writebacks=%0d", hit_count, miss_count, wb_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
