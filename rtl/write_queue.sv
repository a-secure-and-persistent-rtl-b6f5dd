// write_queue -- the memory controller's write queue, battery-backed by ADR,
// with locality-aware counter write reduction (CWR).
//
// Entries are kept in arrival order in slots 0..count-1 (slot 0 is the
// oldest) and leave from slot 0 towards NVM. Every entry carries a one-bit
// source flag, 1 for a line from the CPU caches and 0 for a counter line from
// the counter cache, as in the paper. The lines reaching this queue are
// durable: on a power failure ADR writes the whole queue to NVM.
//
// CWR: when a new counter line arrives, the queue looks among the entries
// flagged 0 for one with the same NVM address. Because the counter cache is
// write-through, the new line already holds every update of the queued one,
// so the queued one is removed and the queue closes the gap; only the newest
// copy of a page's counters is ever written. Comparing only flag-0 entries is
// the paper's use of the flag. At most one counter line per address is ever
// queued, which an assertion checks.
//
// Push port: one handshake appends a counter line and/or a data line; when
// both are given they enter in the same cycle, counter first (App(Ac+A)).
// push_ready requires two free slots, whatever the push holds (this design's
// choice). The drain port is valid/ready and presents slot 0. Removal, drain
// and append may all happen in the same cycle.
//
// Read forwarding: lk_* returns the newest queued line with the given flag
// and address, so that reads see lines that have not yet reached NVM (the
// paper does not describe reads that hit the write queue; this is the usual
// memory-controller behaviour).
module write_queue
  import secpm_pkg::*;
#(
  parameter int DEPTH = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  // append
  input  logic   push_valid,
  output logic   push_ready,
  input  logic   push_ctr_valid,
  input  naddr_t push_ctr_addr,
  input  line_t  push_ctr_line,
  input  logic   push_data_valid,
  input  naddr_t push_data_addr,
  input  line_t  push_data_line,
  // drain to NVM
  output logic   nvm_wr_valid,
  input  logic   nvm_wr_ready,
  output naddr_t nvm_wr_addr,
  output line_t  nvm_wr_line,
  output logic   nvm_wr_flag,
  // read forwarding
  input  naddr_t lk_addr,
  input  logic   lk_flag,
  output logic   lk_hit,
  output line_t  lk_line,
  // status
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic   empty,
  output logic   cwr_merge
);

  localparam int CW = $clog2(DEPTH + 1);

  wq_entry_t q [DEPTH];
  wq_entry_t nq [DEPTH];
  logic [CW-1:0] ncount;

  logic pop, push;
  logic merge;

  assign empty        = (count == '0);
  assign nvm_wr_valid = !empty;
  assign nvm_wr_addr  = q[0].addr;
  assign nvm_wr_line  = q[0].data;
  assign nvm_wr_flag  = q[0].flag;
  assign pop          = nvm_wr_valid && nvm_wr_ready;
  assign push_ready   = (count <= CW'(DEPTH - 2));
  assign push         = push_valid && push_ready;

  // lookup: newest match wins
  always_comb begin
    lk_hit  = 1'b0;
    lk_line = '0;
    for (int i = 0; i < DEPTH; i++)
      if (CW'(i) < count && q[i].flag == lk_flag && q[i].addr == lk_addr) begin
        lk_hit  = 1'b1;
        lk_line = q[i].data;
      end
  end

  always_comb begin
    int n;
    int k;
    for (int i = 0; i < DEPTH; i++) nq[i] = q[i];
    n = int'(count);
    merge = 1'b0;
    // 1) drain the head
    if (pop) begin
      for (int i = 0; i < DEPTH - 1; i++) nq[i] = nq[i+1];
      n = n - 1;
    end
    // 2) CWR: drop the queued counter line the new one supersedes
    k = DEPTH;
    if (push && push_ctr_valid)
      for (int i = 0; i < DEPTH; i++)
        if (i < n && nq[i].flag == FLAG_CTR && nq[i].addr == push_ctr_addr) k = i;
    if (k < DEPTH) begin
      merge = 1'b1;
      for (int i = 0; i < DEPTH - 1; i++)
        if (i >= k) nq[i] = nq[i+1];
      n = n - 1;
    end
    // 3) append, counter first
    if (push && push_ctr_valid) begin
      nq[n] = '{flag: FLAG_CTR, addr: push_ctr_addr, data: push_ctr_line};
      n = n + 1;
    end
    if (push && push_data_valid) begin
      nq[n] = '{flag: FLAG_CPU, addr: push_data_addr, data: push_data_line};
      n = n + 1;
    end
    ncount = CW'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      cwr_merge <= 1'b0;
    end else begin
      count     <= ncount;
      cwr_merge <= merge;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < DEPTH; i++) q[i] <= nq[i];
  end

  // CWR invariant: never two queued counter lines with the same address.
  always_ff @(posedge clk) begin
    for (int i = 0; i < DEPTH; i++)
      for (int j = i + 1; j < DEPTH; j++)
        if (rst_n && CW'(j) < count)
          assert (!(q[i].flag == FLAG_CTR && q[j].flag == FLAG_CTR &&
                    q[i].addr == q[j].addr))
            else $error("write_queue: duplicate counter line queued");
  end

endmodule
