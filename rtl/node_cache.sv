// node_cache: the node cache (N$), a set-associative write-back cache that
// holds revocation-tree nodes close to the node controller.
//
// Revocation nodes live in a DRAM region that software cannot reach; the
// node controller reads and writes them one 128-bit node at a time through
// this cache. The default size is the evaluated one: 8 kB, 2-way set
// associative. A line holds exactly one node (16 bytes), so the default
// has 256 sets. The set index is the low bits of the node id and the tag
// the rest. Replacement is least-recently-used (one bit per set), an
// invalid way is filled first, dirty victims are written back. A write miss
// does not fetch the line: a node write always replaces the whole line.
//
// Controller side: one request at a time. req_valid/req_ready handshake in
// IDLE; the answer comes as a one-cycle resp_valid pulse (read data in
// resp_rdata, writes answered too). A hit answers on the cycle after the
// request; a miss costs a write-back (if dirty) and a fill.
// Memory side: mem_req_valid/mem_req_ready handshake; writes are posted,
// reads are answered by a mem_resp_valid pulse with mem_resp_rdata.
// Node n sits at byte address NODE_BASE + 16*n, so the low four address
// bits and the bits above the node region are constant.
//
// Following the paper: the N$ itself, its place between the node
// controller and the memory bus, its size and its associativity.
// This design's own choices: line size, replacement, write policy, the
// handshakes and the NODE_BASE address.
//
// rst_n is the asynchronous reset and also the disable condition of the
// assertions below; lint tools report that as a mixed sync/async use of
// the same net, which is intended.
module node_cache
  import capstone_pkg::*;
#(
  parameter int unsigned     CACHE_BYTES = 8192,
  parameter int unsigned     WAYS        = 2,
  parameter logic [63:0]     NODE_BASE   = 64'h0000_0008_0000_0000
) (
  input  logic              clk,
  input  logic              rst_n,
  // controller side
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_we,
  input  node_id_t          req_id,
  input  logic [CAP_W-1:0]  req_wdata,
  output logic              resp_valid,
  output logic [CAP_W-1:0]  resp_rdata,
  // memory-bus side
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [63:0]       mem_req_addr,
  output logic [CAP_W-1:0]  mem_req_wdata,
  input  logic              mem_resp_valid,
  input  logic [CAP_W-1:0]  mem_resp_rdata,
  // statistics
  output logic [31:0]       hit_count,
  output logic [31:0]       miss_count,
  output logic [31:0]       writeback_count
);

  localparam int unsigned LINE_BYTES = CAP_W / 8;
  localparam int unsigned SETS       = CACHE_BYTES / LINE_BYTES / WAYS;
  localparam int unsigned IDX_W      = $clog2(SETS);
  localparam int unsigned TAG_W      = NODE_ID_W - IDX_W;
  localparam int unsigned WAY_W      = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef enum logic [1:0] { S_IDLE, S_WB, S_FILL, S_WAIT } state_e;

  logic [CAP_W-1:0] data_q  [SETS][WAYS];
  logic [TAG_W-1:0] tag_q   [SETS][WAYS];
  logic             vld_q   [SETS][WAYS];
  logic             dirty_q [SETS][WAYS];
  logic [WAY_W-1:0] lru_q   [SETS];       // way to replace next

  state_e           state_q;
  logic             we_q;
  node_id_t         id_q;
  logic [CAP_W-1:0] wdata_q;
  logic [WAY_W-1:0] victim_q;

  // lookup on the incoming request
  logic [IDX_W-1:0] idx_in;
  logic [TAG_W-1:0] tag_in;
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;

  assign idx_in = req_id[IDX_W-1:0];
  assign tag_in = req_id[NODE_ID_W-1:IDX_W];

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld_q[idx_in][w] && tag_q[idx_in][w] == tag_in) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    victim = lru_q[idx_in];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!vld_q[idx_in][w]) victim = WAY_W'(w);
    end
  end

  logic [IDX_W-1:0] idx_q;
  assign idx_q = id_q[IDX_W-1:0];

  function automatic logic [WAY_W-1:0] next_lru(logic [WAY_W-1:0] used);
    // With two ways this is the other way; with more, round-robin after
    // the way just used.
    return (WAYS == 1) ? '0 : WAY_W'((32'(used) + 1) % WAYS);
  endfunction

  assign req_ready = (state_q == S_IDLE);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = NODE_BASE + {33'd0, id_q} * 64'(LINE_BYTES);
    mem_req_wdata = data_q[idx_q][victim_q];
    unique case (state_q)
      S_WB: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = NODE_BASE +
                        {33'd0, tag_q[idx_q][victim_q], idx_q} * 64'(LINE_BYTES);
      end
      S_FILL: mem_req_valid = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q         <= S_IDLE;
      resp_valid      <= 1'b0;
      resp_rdata      <= '0;
      we_q            <= 1'b0;
      id_q            <= '0;
      wdata_q         <= '0;
      victim_q        <= '0;
      hit_count       <= '0;
      miss_count      <= '0;
      writeback_count <= '0;
      for (int s = 0; s < SETS; s++) begin
        lru_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          vld_q[s][w]   <= 1'b0;
          dirty_q[s][w] <= 1'b0;
        end
      end
    end else begin
      resp_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          we_q    <= req_we;
          id_q    <= req_id;
          wdata_q <= req_wdata;
          if (hit) begin
            hit_count          <= hit_count + 1;
            resp_valid         <= 1'b1;
            resp_rdata         <= req_we ? req_wdata : data_q[idx_in][hit_way];
            lru_q[idx_in]      <= next_lru(hit_way);
            if (req_we) begin
              data_q[idx_in][hit_way]  <= req_wdata;
              dirty_q[idx_in][hit_way] <= 1'b1;
            end
          end else begin
            miss_count <= miss_count + 1;
            victim_q   <= victim;
            if (vld_q[idx_in][victim] && dirty_q[idx_in][victim])
              state_q <= S_WB;
            else if (req_we) begin
              // whole-line write: install without a fill
              data_q[idx_in][victim]  <= req_wdata;
              tag_q[idx_in][victim]   <= tag_in;
              vld_q[idx_in][victim]   <= 1'b1;
              dirty_q[idx_in][victim] <= 1'b1;
              lru_q[idx_in]           <= next_lru(victim);
              resp_valid              <= 1'b1;
              resp_rdata              <= req_wdata;
            end else
              state_q <= S_FILL;
          end
        end
        S_WB: if (mem_req_ready) begin
          writeback_count <= writeback_count + 1;
          dirty_q[idx_q][victim_q] <= 1'b0;
          if (we_q) begin
            data_q[idx_q][victim_q]  <= wdata_q;
            tag_q[idx_q][victim_q]   <= id_q[NODE_ID_W-1:IDX_W];
            vld_q[idx_q][victim_q]   <= 1'b1;
            dirty_q[idx_q][victim_q] <= 1'b1;
            lru_q[idx_q]             <= next_lru(victim_q);
            resp_valid               <= 1'b1;
            resp_rdata               <= wdata_q;
            state_q                  <= S_IDLE;
          end else begin
            state_q <= S_FILL;
          end
        end
        S_FILL: if (mem_req_ready) state_q <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          data_q[idx_q][victim_q]  <= mem_resp_rdata;
          tag_q[idx_q][victim_q]   <= id_q[NODE_ID_W-1:IDX_W];
          vld_q[idx_q][victim_q]   <= 1'b1;
          dirty_q[idx_q][victim_q] <= 1'b0;
          lru_q[idx_q]             <= next_lru(victim_q);
          resp_valid               <= 1'b1;
          resp_rdata               <= mem_resp_rdata;
          state_q                  <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Memory must not answer a read that was never issued.
  a_resp_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> state_q == S_WAIT);

endmodule
