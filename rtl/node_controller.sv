// node_controller: maintains the Capstone revocation tree in memory and
// carries out the tree operations the capability instructions need.
//
// Every capability names a revocation node (its node-id). A capability is
// valid while its node is in the tree. The tree is kept as a doubly-linked
// list of nodes in depth-first order, each node recording its depth, so
// the subtree below node n is the run of list entries after n whose depth
// is greater than n's. Node 0 is the root and heads the list. Nodes are
// 128 bits (depth, next, prev, counter, freed, valid) and are read and
// written one at a time through the node cache.
//
// Operations (cmd_op, on node cmd_id):
//   QUERY   answer whether the node is still valid
//   ALLOC   new node, first child of the root (a new top-level capability)
//   MREV    mint revocation: new node x between n and its parent; x takes
//           n's place in the list, n and its subtree move one level down
//   SPLIT   new node x, a sibling of n, linked in after n's subtree
//   DELIN   mark n as belonging to a non-linear capability
//   REVOKE  invalidate every node in n's subtree and unlink the subtree;
//           n stays valid. resp_lin_revoked tells whether a linear node
//           was among them (the revocation capability then becomes
//           uninitialized instead of linear)
//   DROP    unlink n, its children move up to n's parent (their depth
//           drops by one), and release the dropped capability's reference
//   RC_INC  one more capability refers to n
//   RC_DEC  one fewer; a node whose count reaches zero is unlinked as in
//           DROP if still valid, and freed
// A node is freed, i.e. pushed onto the free-nodes list (freed=1, next =
// old list head), once it is invalid and its reference count is zero;
// allocation pops that list, or takes the next never-used id when it is
// empty. Each invalidated node is visited once, so revocation costs are
// amortized constant per node.
//
// Interface: cmd_valid/cmd_ready handshake (ready only when idle), then a
// one-cycle resp_valid pulse with the result; resp_err flags an operation
// on an id never allocated, on the root, on an invalid node, a count
// underflow, or an exhausted id space. After reset the controller first
// writes the root node and, with BOOT_NODE set, node 1 as the root's only
// child: the node of the capability over all of memory that the register
// file holds after reset (init_done rises when this is done). Every node
// access is a request to the node cache, so an operation takes at least
// two cycles per node touched plus cache misses.
//
// Following the paper: the node format, the DFS-ordered list with depths,
// the unlinking of revoked subtrees, reference counting and the free-nodes
// list, and the tree effects of revoke, mrev, split, delin and drop from
// the formal model. This design's own choices: node 0 as the root, the
// all-ones id as null, the never-used-id pointer, starting counts of one,
// the list positions chosen for new nodes, and the use of the counter's
// top bit as the linear-node mark (the published node format has no type
// field, but revoke's result depends on it).
//
// rst_n is the asynchronous reset and also the disable condition of the
// assertions below; lint tools report that as a mixed sync/async use of
// the same net, which is intended.
module node_controller
  import capstone_pkg::*;
#(
  // Largest node id handed out plus one; the full 31-bit space by default.
  parameter node_id_t MAX_NODES = NODE_NULL,
  // Create node 1 at reset for the capability the register file holds
  // after reset (a linear capability over all of memory).
  parameter bit       BOOT_NODE = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  node_op_e          cmd_op,
  input  node_id_t          cmd_id,
  // response
  output logic              resp_valid,
  output logic              resp_err,
  output node_id_t          resp_id,          // node created by ALLOC/MREV/SPLIT
  output logic              resp_node_valid,  // QUERY result
  output logic              resp_lin_revoked, // REVOKE result
  // node cache port
  output logic              nc_req_valid,
  input  logic              nc_req_ready,
  output logic              nc_req_we,
  output node_id_t          nc_req_id,
  output logic [CAP_W-1:0]  nc_req_wdata,
  input  logic              nc_resp_valid,
  input  logic [CAP_W-1:0]  nc_resp_rdata,
  // event counters
  output logic [31:0]       n_alloc,        // nodes allocated (all sources)
  output logic [31:0]       n_reused,       // allocations served by the free list
  output logic [31:0]       n_query,
  output logic [31:0]       n_rc_update,
  output logic [31:0]       n_revoke,
  output logic [31:0]       n_invalidated,  // nodes invalidated by REVOKE
  output logic [31:0]       n_freed         // nodes pushed onto the free list
);

  typedef enum logic [5:0] {
    S_INIT, S_INIT_BOOT, S_IDLE, S_RD, S_RD_W, S_WR, S_WR_W, S_GOT_N,
    S_ALLOC, S_ALLOC_POP,
    S_ALC_1, S_ALC_2, S_ALC_3,
    S_MREV_1, S_MREV_2, S_MREV_3, S_MREV_4, S_INC_LOOP, S_INC_2,
    S_SPL_1, S_SPL_WALK, S_SPL_2, S_SPL_INS, S_SPL_3, S_SPL_4,
    S_REV_LOOP, S_REV_2, S_REV_LINK,
    S_DROP_LOOP, S_DROP_2, S_DROP_UNLINK, S_DROP_3, S_DROP_4,
    S_FIXP_1, S_FIXP_2,
    S_DONE, S_ERR
  } state_e;

  state_e   state_q, ret_q, alloc_ret_q;
  node_op_e op_q;
  node_id_t n_q;          // operand node
  node_t    nn_q;         // operand node as read (possibly updated)
  node_t    nd_q;         // last node read
  node_id_t mt_q;         // node id of the pending memory access
  node_t    mw_q;         // data of the pending write
  node_id_t x_q;          // newly allocated node
  node_id_t cur_q, last_q;
  node_id_t fix_id_q, fix_prev_q;
  node_id_t free_head_q, bump_q;
  logic     lin_rev_q;
  logic     node_valid_q;

  node_t rd_node;
  assign rd_node = node_t'(nc_resp_rdata);

  assign cmd_ready    = (state_q == S_IDLE);
  assign nc_req_valid = (state_q == S_RD) || (state_q == S_WR);
  assign nc_req_we    = (state_q == S_WR);
  assign nc_req_id    = mt_q;
  assign nc_req_wdata = CAP_W'(mw_q);

  function automatic node_t new_node(node_id_t depth, node_id_t next,
                                     node_id_t prev, logic lin);
    node_t r;
    r        = '0;
    r.depth  = depth;
    r.next   = next;
    r.prev   = prev;
    r.lin    = lin;
    r.refcnt = 1;
    r.valid  = 1'b1;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q          <= S_INIT;
      ret_q            <= S_IDLE;
      alloc_ret_q      <= S_IDLE;
      op_q             <= OP_QUERY;
      n_q              <= '0;
      nn_q             <= '0;
      nd_q             <= '0;
      mt_q             <= NODE_ROOT;
      mw_q             <= '0;
      x_q              <= NODE_NULL;
      cur_q            <= NODE_NULL;
      last_q           <= NODE_NULL;
      fix_id_q         <= NODE_NULL;
      fix_prev_q       <= NODE_NULL;
      free_head_q      <= NODE_NULL;
      bump_q           <= node_id_t'(1);
      lin_rev_q        <= 1'b0;
      node_valid_q     <= 1'b0;
      init_done        <= 1'b0;
      resp_valid       <= 1'b0;
      resp_err         <= 1'b0;
      resp_id          <= NODE_NULL;
      resp_node_valid  <= 1'b0;
      resp_lin_revoked <= 1'b0;
      n_alloc          <= '0;
      n_reused         <= '0;
      n_query          <= '0;
      n_rc_update      <= '0;
      n_revoke         <= '0;
      n_invalidated    <= '0;
      n_freed          <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state_q)
        // write the root (depth 0) and, with BOOT_NODE, node 1 as its
        // only child
        S_INIT: begin
          mt_q    <= NODE_ROOT;
          mw_q    <= '{depth: '0, next: BOOT_NODE ? node_id_t'(1) : NODE_NULL,
                       prev: NODE_NULL, lin: 1'b0, refcnt: '0, freed: 1'b0,
                       valid: 1'b1};
          ret_q   <= BOOT_NODE ? S_INIT_BOOT : S_IDLE;
          state_q <= S_WR;
        end
        S_INIT_BOOT: begin
          mt_q    <= node_id_t'(1);
          mw_q    <= new_node(node_id_t'(1), NODE_NULL, NODE_ROOT, 1'b1);
          bump_q  <= node_id_t'(2);
          ret_q   <= S_IDLE;
          state_q <= S_WR;
        end

        S_IDLE: begin
          init_done <= 1'b1;
          if (cmd_valid) begin
            op_q         <= cmd_op;
            n_q          <= cmd_id;
            x_q          <= NODE_NULL;
            lin_rev_q    <= 1'b0;
            node_valid_q <= 1'b0;
            if (cmd_op == OP_QUERY)  n_query  <= n_query + 1;
            if (cmd_op == OP_REVOKE) n_revoke <= n_revoke + 1;
            if (cmd_op == OP_RC_INC || cmd_op == OP_RC_DEC)
              n_rc_update <= n_rc_update + 1;
            if (cmd_op == OP_ALLOC) begin
              alloc_ret_q <= S_ALC_1;
              state_q     <= S_ALLOC;
            end else if (cmd_id == NODE_ROOT || cmd_id >= bump_q) begin
              state_q <= S_ERR;
            end else begin
              mt_q    <= cmd_id;
              ret_q   <= S_GOT_N;
              state_q <= S_RD;
            end
          end
        end

        // ---- node access subroutines ----
        S_RD:   if (nc_req_ready) state_q <= S_RD_W;
        S_RD_W: if (nc_resp_valid) begin
          nd_q    <= rd_node;
          state_q <= ret_q;
        end
        S_WR:   if (nc_req_ready) state_q <= S_WR_W;
        S_WR_W: if (nc_resp_valid) state_q <= ret_q;

        // ---- operand node read: dispatch ----
        S_GOT_N: begin
          nn_q   <= nd_q;
          cur_q  <= nd_q.next;
          last_q <= n_q;
          if (op_q == OP_QUERY) begin
            node_valid_q <= nd_q.valid && !nd_q.freed;
            state_q      <= S_DONE;
          end else if (op_q == OP_RC_INC) begin
            if (nd_q.freed) state_q <= S_ERR;
            else begin
              mw_q        <= nd_q;
              mw_q.refcnt <= nd_q.refcnt + 1;
              mt_q        <= n_q;
              ret_q       <= S_DONE;
              state_q     <= S_WR;
            end
          end else if (op_q == OP_RC_DEC) begin
            if (nd_q.freed || nd_q.refcnt == 0) state_q <= S_ERR;
            else if (nd_q.refcnt != 1) begin
              mw_q        <= nd_q;
              mw_q.refcnt <= nd_q.refcnt - 1;
              mt_q        <= n_q;
              ret_q       <= S_DONE;
              state_q     <= S_WR;
            end else if (nd_q.valid) begin
              // last reference of a node still in the tree: unlink it
              nn_q.refcnt <= '0;
              state_q     <= S_DROP_LOOP;
            end else begin
              // last reference of an invalidated node: free it
              mw_q          <= nd_q;
              mw_q.refcnt   <= '0;
              mw_q.freed    <= 1'b1;
              mw_q.next     <= free_head_q;
              free_head_q   <= n_q;
              n_freed       <= n_freed + 1;
              mt_q          <= n_q;
              ret_q         <= S_DONE;
              state_q       <= S_WR;
            end
          end else if (!nd_q.valid || nd_q.freed) begin
            state_q <= S_ERR;
          end else begin
            unique case (op_q)
              OP_DELIN: begin
                mw_q     <= nd_q;
                mw_q.lin <= 1'b0;
                mt_q     <= n_q;
                ret_q    <= S_DONE;
                state_q  <= S_WR;
              end
              OP_MREV: begin
                alloc_ret_q <= S_MREV_1;
                state_q     <= S_ALLOC;
              end
              OP_SPLIT: begin
                alloc_ret_q <= S_SPL_1;
                state_q     <= S_ALLOC;
              end
              OP_REVOKE: state_q <= S_REV_LOOP;
              OP_DROP: begin
                // the dropped capability releases its reference
                nn_q.refcnt <= (nd_q.refcnt == 0) ? '0 : nd_q.refcnt - 1;
                state_q     <= S_DROP_LOOP;
              end
              default: state_q <= S_ERR;
            endcase
          end
        end

        // ---- node allocation: free list first, then a fresh id ----
        S_ALLOC: begin
          if (free_head_q != NODE_NULL) begin
            mt_q    <= free_head_q;
            ret_q   <= S_ALLOC_POP;
            state_q <= S_RD;
          end else if (bump_q >= MAX_NODES) begin
            state_q <= S_ERR;
          end else begin
            x_q     <= bump_q;
            bump_q  <= bump_q + 1;
            n_alloc <= n_alloc + 1;
            state_q <= alloc_ret_q;
          end
        end
        S_ALLOC_POP: begin
          x_q         <= free_head_q;
          free_head_q <= nd_q.next;
          n_alloc     <= n_alloc + 1;
          n_reused    <= n_reused + 1;
          state_q     <= alloc_ret_q;
        end

        // ---- ALLOC: link x right after the root at depth 1 ----
        S_ALC_1: begin
          mt_q    <= NODE_ROOT;
          ret_q   <= S_ALC_2;
          state_q <= S_RD;
        end
        S_ALC_2: begin
          cur_q     <= nd_q.next;           // old first child
          mw_q      <= nd_q;
          mw_q.next <= x_q;
          mt_q      <= NODE_ROOT;
          ret_q     <= S_ALC_3;
          state_q   <= S_WR;
        end
        S_ALC_3: begin
          mw_q       <= new_node(node_id_t'(1), cur_q, NODE_ROOT, 1'b1);
          mt_q       <= x_q;
          fix_id_q   <= cur_q;
          fix_prev_q <= x_q;
          ret_q      <= S_FIXP_1;
          state_q    <= S_WR;
        end

        // ---- MREV: x takes n's list place, n's subtree moves down ----
        S_MREV_1: begin
          mt_q    <= nn_q.prev;
          ret_q   <= S_MREV_2;
          state_q <= S_RD;
        end
        S_MREV_2: begin
          mw_q      <= nd_q;
          mw_q.next <= x_q;
          mt_q      <= nn_q.prev;
          ret_q     <= S_MREV_3;
          state_q   <= S_WR;
        end
        S_MREV_3: begin
          mw_q    <= new_node(nn_q.depth, n_q, nn_q.prev, nn_q.lin);
          mt_q    <= x_q;
          ret_q   <= S_MREV_4;
          state_q <= S_WR;
        end
        S_MREV_4: begin
          mw_q       <= nn_q;
          mw_q.prev  <= x_q;
          mw_q.depth <= nn_q.depth + 1;
          mw_q.lin   <= 1'b1;
          mt_q       <= n_q;
          ret_q      <= S_INC_LOOP;
          state_q    <= S_WR;
        end
        S_INC_LOOP: begin
          if (cur_q == NODE_NULL) state_q <= S_DONE;
          else begin
            mt_q    <= cur_q;
            ret_q   <= S_INC_2;
            state_q <= S_RD;
          end
        end
        S_INC_2: begin
          if (nd_q.depth > nn_q.depth) begin
            mw_q       <= nd_q;
            mw_q.depth <= nd_q.depth + 1;
            mt_q       <= cur_q;
            cur_q      <= nd_q.next;
            ret_q      <= S_INC_LOOP;
            state_q    <= S_WR;
          end else state_q <= S_DONE;
        end

        // ---- SPLIT: x is linked in after the end of n's subtree ----
        S_SPL_1: state_q <= S_SPL_WALK;
        S_SPL_WALK: begin
          if (cur_q == NODE_NULL) state_q <= S_SPL_INS;
          else begin
            mt_q    <= cur_q;
            ret_q   <= S_SPL_2;
            state_q <= S_RD;
          end
        end
        S_SPL_2: begin
          if (nd_q.depth > nn_q.depth) begin
            last_q  <= cur_q;
            cur_q   <= nd_q.next;
            state_q <= S_SPL_WALK;
          end else state_q <= S_SPL_INS;
        end
        S_SPL_INS: begin
          mt_q    <= last_q;
          ret_q   <= S_SPL_3;
          state_q <= S_RD;
        end
        S_SPL_3: begin
          mw_q      <= nd_q;
          mw_q.next <= x_q;
          mt_q      <= last_q;
          ret_q     <= S_SPL_4;
          state_q   <= S_WR;
        end
        S_SPL_4: begin
          mw_q       <= new_node(nn_q.depth, cur_q, last_q, nn_q.lin);
          mt_q       <= x_q;
          fix_id_q   <= cur_q;
          fix_prev_q <= x_q;
          ret_q      <= S_FIXP_1;
          state_q    <= S_WR;
        end

        // ---- REVOKE: invalidate the subtree, then unlink it ----
        S_REV_LOOP: begin
          if (cur_q == NODE_NULL) state_q <= S_REV_LINK;
          else begin
            mt_q    <= cur_q;
            ret_q   <= S_REV_2;
            state_q <= S_RD;
          end
        end
        S_REV_2: begin
          if (nd_q.depth > nn_q.depth) begin
            lin_rev_q     <= lin_rev_q | nd_q.lin;
            n_invalidated <= n_invalidated + 1;
            mw_q          <= nd_q;
            mw_q.valid    <= 1'b0;
            if (nd_q.refcnt == 0) begin
              mw_q.freed  <= 1'b1;
              mw_q.next   <= free_head_q;
              free_head_q <= cur_q;
              n_freed     <= n_freed + 1;
            end
            mt_q    <= cur_q;
            cur_q   <= nd_q.next;
            ret_q   <= S_REV_LOOP;
            state_q <= S_WR;
          end else state_q <= S_REV_LINK;
        end
        S_REV_LINK: begin
          mw_q       <= nn_q;
          mw_q.next  <= cur_q;
          mt_q       <= n_q;
          fix_id_q   <= cur_q;
          fix_prev_q <= n_q;
          ret_q      <= S_FIXP_1;
          state_q    <= S_WR;
        end

        // ---- DROP: children move up a level, n is unlinked ----
        S_DROP_LOOP: begin
          if (cur_q == NODE_NULL) state_q <= S_DROP_UNLINK;
          else begin
            mt_q    <= cur_q;
            ret_q   <= S_DROP_2;
            state_q <= S_RD;
          end
        end
        S_DROP_2: begin
          if (nd_q.depth > nn_q.depth) begin
            mw_q       <= nd_q;
            mw_q.depth <= nd_q.depth - 1;
            mt_q       <= cur_q;
            cur_q      <= nd_q.next;
            ret_q      <= S_DROP_LOOP;
            state_q    <= S_WR;
          end else state_q <= S_DROP_UNLINK;
        end
        S_DROP_UNLINK: begin
          mt_q    <= nn_q.prev;
          ret_q   <= S_DROP_3;
          state_q <= S_RD;
        end
        S_DROP_3: begin
          mw_q      <= nd_q;
          mw_q.next <= nn_q.next;
          mt_q      <= nn_q.prev;
          ret_q     <= S_DROP_4;
          state_q   <= S_WR;
        end
        S_DROP_4: begin
          mw_q       <= nn_q;
          mw_q.valid <= 1'b0;
          if (nn_q.refcnt == 0) begin
            mw_q.freed  <= 1'b1;
            mw_q.next   <= free_head_q;
            free_head_q <= n_q;
            n_freed     <= n_freed + 1;
          end
          mt_q       <= n_q;
          fix_id_q   <= nn_q.next;
          fix_prev_q <= nn_q.prev;
          ret_q      <= S_FIXP_1;
          state_q    <= S_WR;
        end

        // ---- set prev of fix_id to fix_prev (skipped for null) ----
        S_FIXP_1: begin
          if (fix_id_q == NODE_NULL) state_q <= S_DONE;
          else begin
            mt_q    <= fix_id_q;
            ret_q   <= S_FIXP_2;
            state_q <= S_RD;
          end
        end
        S_FIXP_2: begin
          mw_q      <= nd_q;
          mw_q.prev <= fix_prev_q;
          mt_q      <= fix_id_q;
          ret_q     <= S_DONE;
          state_q   <= S_WR;
        end

        S_DONE: begin
          resp_valid       <= 1'b1;
          resp_err         <= 1'b0;
          resp_id          <= x_q;
          resp_node_valid  <= node_valid_q;
          resp_lin_revoked <= lin_rev_q;
          state_q          <= S_IDLE;
        end
        S_ERR: begin
          resp_valid       <= 1'b1;
          resp_err         <= 1'b1;
          resp_id          <= NODE_NULL;
          resp_node_valid  <= 1'b0;
          resp_lin_revoked <= 1'b0;
          state_q          <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A command is only taken when idle, and the cache answers only what
  // was asked.
  a_resp_after_req: assert property (@(posedge clk) disable iff (!rst_n)
    nc_resp_valid |-> (state_q == S_RD_W || state_q == S_WR_W));

endmodule
