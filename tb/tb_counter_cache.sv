// tb_counter_cache -- self-checking test of the write-through counter cache.
//
// A small configuration (4 sets x 2 ways) is run against a reference model:
// per set an LRU-ordered list of resident pages, plus a map of the newest
// counter line of every page. Memory fills return that newest line, as
// the write queue / NVM would. Checked: hit or miss of every lookup as the
// LRU model predicts, the returned line, the 12-cycle hit latency of the
// paper, and that every update leaves at once as a write-through copy with
// the page's counter-region address.
module tb_counter_cache;
  import secpm_pkg::*;

  localparam int SETS = 4, WAYS = 2, LAT = 12;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init_done, rv, rr, rsv, rsh, wv, wrdy, wtv, mv, mr, msv;
  ppn_t rp, wp, mp;
  line_t rsl, wl, wtl, msl;
  naddr_t wta;

  counter_cache #(.SETS(SETS), .WAYS(WAYS), .LATENCY(LAT)) dut (
    .clk, .rst_n, .init_done, .rd_valid(rv), .rd_ready(rr), .rd_ppn(rp),
    .rd_rsp_valid(rsv), .rd_rsp_hit(rsh), .rd_rsp_line(rsl), .wr_valid(wv),
    .wr_ready(wrdy), .wr_ppn(wp), .wr_line(wl), .wt_valid(wtv), .wt_addr(wta),
    .wt_line(wtl), .mem_rd_valid(mv), .mem_rd_ready(mr), .mem_rd_ppn(mp),
    .mem_rsp_valid(msv), .mem_rsp_line(msl));

  line_t newest [ppn_t];
  ppn_t  lru [SETS][$];      // front = most recent
  int    hits = 0, misses = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t backing(ppn_t p);
    return newest.exists(p) ? newest[p] : {16{10'(p), 22'h2AAAA}};
  endfunction

  // memory side: answer fills 5 cycles after the request
  initial begin
    mr = 1; msv = 0; msl = '0;
    forever begin
      @(posedge clk);
      if (mv && mr) begin
        ppn_t p;
        p = mp;
        repeat (5) @(posedge clk);
        #1 msv = 1; msl = backing(p);
        @(posedge clk); #1 msv = 0;
      end
    end
  end

  function automatic bit model_touch(ppn_t p);
    int s;
    bit hit;
    s = int'(p) % SETS;
    hit = 0;
    foreach (lru[s][i]) if (lru[s][i] == p) begin hit = 1; lru[s].delete(i); break; end
    lru[s].push_front(p);
    if (lru[s].size() > WAYS) void'(lru[s].pop_back());
    return hit;
  endfunction

  task automatic lookup(input ppn_t p);
    int lat;
    bit exp_hit;
    exp_hit = model_touch(p);
    @(negedge clk); rv = 1; rp = p;
    while (!rr) @(negedge clk);
    @(negedge clk); rv = 0; lat = 1;
    while (!rsv) begin @(negedge clk); lat++; end
    check(rsh == exp_hit, $sformatf("page %h: hit=%0d, model says %0d", p, rsh, exp_hit));
    check(rsl == backing(p), $sformatf("page %h: returned counter line", p));
    if (exp_hit) begin
      hits++;
      check(lat == LAT, $sformatf("hit latency %0d, expected %0d", lat, LAT));
    end else misses++;
  endtask

  task automatic update(input ppn_t p, input line_t l);
    void'(model_touch(p));
    newest[p] = l;
    @(negedge clk); wv = 1; wp = p; wl = l;
    while (!wrdy) @(negedge clk);
    @(negedge clk); wv = 0;
    check(wtv && wta == ctr_naddr(p) && wtl == l, $sformatf("write-through copy of page %h", p));
  endtask

  function automatic line_t rline();
    line_t l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rv = 0; wv = 0; rp = '0; wp = '0; wl = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    while (!init_done) @(negedge clk);
    // directed: fill, hit, update, LRU eviction
    lookup(22'h10);
    lookup(22'h10);
    update(22'h10, rline());
    lookup(22'h10);
    lookup(22'h14);
    lookup(22'h10);
    lookup(22'h18);   // evicts 0x14, the least recently used
    lookup(22'h10);
    lookup(22'h14);
    // random
    for (int t = 0; t < 600; t++) begin
      ppn_t p;
      p = ppn_t'($urandom_range(11, 0));
      if ($urandom_range(2, 0) == 0) update(p, rline());
      else lookup(p);
    end
    check(hits > 50 && misses > 50, $sformatf("hits %0d, misses %0d", hits, misses));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
