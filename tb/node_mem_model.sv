// node_mem_model: behavioural model of the DRAM behind the memory bus, as
// seen by the node cache. Not synthesizable logic: a sparse associative
// array of 128-bit lines. Writes are accepted at once (posted); a read is
// accepted when no other read is pending and answered LATENCY cycles later
// with one mem_resp_valid pulse. Lines never written read as zero.
// READY_GAP > 0 holds mem_req_ready low that many cycles after each
// accepted request, to exercise the handshake.
module node_mem_model #(
  parameter int unsigned LATENCY   = 20,
  parameter int unsigned READY_GAP = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         mem_req_valid,
  output logic         mem_req_ready,
  input  logic         mem_req_we,
  input  logic [63:0]  mem_req_addr,
  input  logic [127:0] mem_req_wdata,
  output logic         mem_resp_valid,
  output logic [127:0] mem_resp_rdata,
  output int unsigned  n_reads,
  output int unsigned  n_writes
);
  logic [127:0] mem [logic [63:0]];
  int unsigned  wait_cnt, gap_cnt;
  logic         busy;
  logic [63:0]  raddr;

  assign mem_req_ready = !busy && gap_cnt == 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      wait_cnt       <= 0;
      gap_cnt        <= 0;
      raddr          <= '0;
      mem_resp_valid <= 1'b0;
      mem_resp_rdata <= '0;
      n_reads        <= 0;
      n_writes       <= 0;
    end else begin
      mem_resp_valid <= 1'b0;
      if (gap_cnt != 0) gap_cnt <= gap_cnt - 1;
      if (mem_req_valid && mem_req_ready) begin
        gap_cnt <= READY_GAP;
        if (mem_req_we) begin
          n_writes <= n_writes + 1;
        end else begin
          busy     <= 1'b1;
          raddr    <= mem_req_addr;
          wait_cnt <= LATENCY;
          n_reads  <= n_reads + 1;
        end
      end
      if (busy) begin
        if (wait_cnt <= 1) begin
          busy           <= 1'b0;
          mem_resp_valid <= 1'b1;
          mem_resp_rdata <= mem.exists(raddr) ? mem[raddr] : '0;
        end else wait_cnt <= wait_cnt - 1;
      end
    end
  end

  // the array itself is written with blocking assignments
  always @(posedge clk) begin
    if (rst_n && mem_req_valid && mem_req_ready && mem_req_we)
      mem[mem_req_addr] = mem_req_wdata;
  end

  // direct peek for checkers
  function automatic logic [127:0] peek(logic [63:0] addr);
    return mem.exists(addr) ? mem[addr] : '0;
  endfunction
endmodule
