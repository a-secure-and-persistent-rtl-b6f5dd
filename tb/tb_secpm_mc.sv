// tb_secpm_mc -- end-to-end test of the SecPM memory controller at its
// default sizes (1 MB counter cache, 32-entry write queue, 80-cycle pad,
// 12-cycle counter cache) against a behavioural NVM with PCM-like latencies.
//
// The reference is a map of the last acknowledged plaintext of every line and
// of how many times each line was flushed. Phases:
//  A  A 1 KB log (16 contiguous lines of one page) is flushed, as the
//     prepare stage of a durable transaction, then 16 data lines and the
//     commit line. Checks the acknowledge latency of a flush that hits the
//     counter cache (CC_LATENCY + ENC_LATENCY + 6 cycles), that NVM holds
//     ciphertext, not plaintext, and that every line reads back.
//  B  All 64 lines of one page are flushed: the write queue fills (the
//     flush stalls) and CWR removes counter lines; every counter line that
//     entered the queue is either written to NVM or removed by CWR.
//  C  One line is flushed 128 times: its 7-bit minor counter overflows, the
//     page is re-encrypted in the background, a read of a line not yet
//     re-encrypted waits; afterwards every line of the page reads back and
//     the NVM counter line holds major 1 and the expected minors.
//  D  A second overflow is interrupted by a power failure, together with a
//     flush that has not been acknowledged. After ADR has drained the queue
//     and saved the RSR, the controller is reset (NVM keeps its contents):
//     it must restore the RSR, finish the re-encryption, and every line must
//     decrypt to its last acknowledged value.
// Each mechanism (counter-cache hit and miss, CWR merge, queue-full stall,
// read forwarding, overflow, re-encryption, RSR wait, ADR save and resume)
// is counted and must have happened at least once.
module tb_secpm_mc;
  import secpm_pkg::*;

  localparam int CC_LAT = 12, ENC_LAT = 80;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [127:0] key = 128'h0f1e2d3c4b5a69788796a5b4c3d2e1f0;
  logic   ready, req_valid, req_ready, req_write, ack_valid, rd_valid;
  laddr_t req_addr;
  line_t  req_data, rd_line;
  logic   wv, wr, wf, rv, rr, rsv;
  naddr_t wa, ra;
  line_t  wl, rsl;
  logic   power_fail, adr_done;
  logic   ev_hit, ev_miss, ev_merge, ev_ovf, ev_reenc, ev_wait, ev_full, ev_fwd;

  secpm_mc dut (
    .clk, .rst_n, .key, .ready, .req_valid, .req_ready, .req_write, .req_addr,
    .req_data, .ack_valid, .rd_valid, .rd_line,
    .nvm_wr_valid(wv), .nvm_wr_ready(wr), .nvm_wr_addr(wa), .nvm_wr_line(wl), .nvm_wr_flag(wf),
    .nvm_rd_valid(rv), .nvm_rd_ready(rr), .nvm_rd_addr(ra), .nvm_rd_rsp_valid(rsv),
    .nvm_rd_rsp_line(rsl), .power_fail, .adr_done,
    .ev_cc_hit(ev_hit), .ev_cc_miss(ev_miss), .ev_cwr_merge(ev_merge), .ev_overflow(ev_ovf),
    .ev_reenc_line(ev_reenc), .ev_rsr_wait(ev_wait), .ev_wq_full(ev_full), .ev_fwd(ev_fwd));

  nvm_model u_nvm (
    .clk, .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_line(wl), .wr_flag(wf),
    .rd_valid(rv), .rd_ready(rr), .rd_addr(ra), .rd_rsp_valid(rsv), .rd_rsp_line(rsl));

  // ---------------- reference and event counters ----------------
  line_t plain [laddr_t];
  int    nflush [laddr_t];
  int n_hit = 0, n_miss = 0, n_merge = 0, n_ovf = 0, n_reenc = 0, n_wait = 0,
      n_full = 0, n_fwd = 0, n_adr = 0, n_resume = 0, n_ctr_app = 0;

  always @(posedge clk) begin
    if (ev_hit)   n_hit++;
    if (ev_miss)  n_miss++;
    if (ev_merge) n_merge++;
    if (ev_ovf)   n_ovf++;
    if (ev_reenc) n_reenc++;
    if (ev_wait)  n_wait++;
    if (ev_full)  n_full++;
    if (ev_fwd)   n_fwd++;
    if (dut.wq_push_valid && dut.wq_push_ready && dut.wq_push_ctr) n_ctr_app++;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t rline();
    line_t l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  // ---------------- CPU-side tasks ----------------
  task automatic flush(input laddr_t a, input line_t d, output int lat);
    @(negedge clk);
    req_valid = 1; req_write = 1; req_addr = a; req_data = d;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0; lat = 1;
    while (!ack_valid) begin @(negedge clk); lat++; end
    plain[a] = d;
    nflush[a] = nflush.exists(a) ? nflush[a] + 1 : 1;
  endtask

  task automatic read_check(input laddr_t a, input string what);
    line_t exp;
    exp = plain.exists(a) ? plain[a] : '0;
    @(negedge clk);
    req_valid = 1; req_write = 0; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!rd_valid) @(negedge clk);
    check(rd_line == exp, $sformatf("%s: line %h reads back", what, a));
  endtask

  // lines never flushed hold whatever the pad of their current counter
  // makes of NVM's zeros; record that value so that re-encryption can be
  // checked to preserve it
  task automatic read_capture(input laddr_t a);
    @(negedge clk);
    req_valid = 1; req_write = 0; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!rd_valid) @(negedge clk);
    plain[a] = rd_line;
  endtask

  task automatic wait_drained();
    while (!(dut.u_wq.empty && wr)) @(negedge clk);
  endtask

  initial begin
    #50000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, before_ctr_writes, before_merge, before_app;
    laddr_t a;
    ppn_t   pg;
    line_t  c;
    req_valid = 0; req_write = 0; req_addr = '0; req_data = '0; power_fail = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);

    // ---------------- A: durable transaction ----------------
    for (int i = 0; i < 16; i++) begin          // prepare: undo log
      flush({22'h00100, 6'(i)}, rline(), lat);
      if (i > 0) check(lat == CC_LAT + ENC_LAT + 6,
                       $sformatf("flush latency on a counter-cache hit: %0d", lat));
    end
    for (int i = 0; i < 16; i++) flush({22'h03a00, 6'(16 + i)}, rline(), lat);  // mutate
    flush({22'h00100, 6'd63}, '0, lat);                                          // commit
    for (int i = 0; i < 16; i++) begin
      a = {22'h00100, 6'(i)};
      check(u_nvm.peek(data_naddr(a)) != plain[a] || !u_nvm.mem.exists(data_naddr(a)),
            "NVM holds ciphertext");
    end
    for (int i = 0; i < 16; i++) read_check({22'h00100, 6'(i)}, "A log");
    for (int i = 0; i < 16; i++) read_check({22'h03a00, 6'(16 + i)}, "A data");

    // ---------------- B: one whole page, CWR ----------------
    for (int i = 0; i < 64; i++) flush({22'h00200, 6'(i)}, rline(), lat);
    wait_drained();
    check(n_merge > 0 && n_full > 0, "queue stalls and counter merges in a page-sized log");
    check(u_nvm.n_ctr_writes + n_merge == n_ctr_app,
          $sformatf("every queued counter line written or merged: %0d + %0d vs %0d",
                    u_nvm.n_ctr_writes, n_merge, n_ctr_app));
    c = u_nvm.peek(ctr_naddr(22'h00200));
    for (int i = 0; i < 64; i++)
      check(get_minor(c, lidx_t'(i)) == 7'd1, "persisted minor counter of page 0x200");
    for (int i = 0; i < 64; i += 7) read_check({22'h00200, 6'(i)}, "B");

    // ---------------- C: minor overflow and re-encryption ----------------
    pg = 22'h00300;
    for (int i = 0; i < 8; i++) flush({pg, 6'(8 * i + 1)}, rline(), lat);
    for (int i = 0; i < 64; i++) if (!plain.exists({pg, 6'(i)})) read_capture({pg, 6'(i)});
    for (int k = 0; k < 128; k++) flush({pg, 6'd0}, rline(), lat);
    check(n_ovf == 1, "the 128th write overflows the 7-bit minor counter");
    read_check({pg, 6'd57}, "C read waiting for re-encryption");
    check(n_wait > 0, "a request to a line not yet re-encrypted waited");
    while (dut.rsr_active) @(negedge clk);
    repeat (2) @(negedge clk);
    check(n_reenc == 63, $sformatf("63 lines re-encrypted, saw %0d", n_reenc));
    for (int i = 0; i < 64; i++) read_check({pg, 6'(i)}, "C after re-encryption");
    wait_drained();
    c = u_nvm.peek(ctr_naddr(pg));
    check(get_major(c) == 64'd1, "major counter incremented once");
    check(get_minor(c, 6'd0) == 7'd0, "overflowed minor restarted");
    for (int i = 1; i < 64; i++) check(get_minor(c, lidx_t'(i)) == 7'd0, "re-encrypted minors are zero");

    // ---------------- D: power failure during re-encryption ----------------
    pg = 22'h00400;
    for (int i = 0; i < 64; i += 3) flush({pg, 6'(i)}, rline(), lat);
    for (int i = 0; i < 64; i++) if (!plain.exists({pg, 6'(i)})) read_capture({pg, 6'(i)});
    for (int k = 0; k < 128; k++) flush({pg, 6'd1}, rline(), lat);
    check(n_ovf == 2, "second overflow");
    while (n_reenc < 63 + 10) @(negedge clk);
    // a flush that will not be acknowledged
    @(negedge clk);
    req_valid = 1; req_write = 1; req_addr = {22'h00100, 6'd3}; req_data = rline();
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    repeat (40) @(negedge clk);
    check(!ack_valid, "flush still in flight at the power failure");
    power_fail = 1;
    while (!adr_done) @(negedge clk);
    n_adr++;
    c = u_nvm.peek(RSR_SAVE_ADDR);
    check(c[LINE_BITS-1 -: 32] == 32'(pg) && c[LINE_BITS-1-96 -: 64] != 64'd0,
          "RSR image saved through ADR");
    // power cycle: controller state is lost, NVM is kept
    rst_n = 0; power_fail = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    check(dut.rsr_active && dut.rsr_ppn == 32'(pg), "RSR restored after power returns");
    if (dut.rsr_active) n_resume++;
    while (dut.rsr_active) @(negedge clk);
    for (int i = 0; i < 64; i++) read_check({pg, 6'(i)}, "D after recovery");
    for (int i = 0; i < 16; i++) read_check({22'h00100, 6'(i)}, "D unacknowledged flush left the old value");
    for (int i = 0; i < 64; i += 5) read_check({22'h00200, 6'(i)}, "D older page");

    // ---------------- mechanisms ----------------
    check(n_hit > 0,    $sformatf("counter-cache hits: %0d", n_hit));
    check(n_miss > 0,   $sformatf("counter-cache misses: %0d", n_miss));
    check(n_merge > 0,  $sformatf("CWR merges: %0d", n_merge));
    check(n_full > 0,   $sformatf("queue-full stall cycles: %0d", n_full));
    check(n_fwd > 0,    $sformatf("reads forwarded from the write queue: %0d", n_fwd));
    check(n_ovf > 0,    $sformatf("minor overflows: %0d", n_ovf));
    check(n_reenc > 0,  $sformatf("lines re-encrypted: %0d", n_reenc));
    check(n_wait > 0,   $sformatf("requests waiting on the RSR: %0d", n_wait));
    check(n_adr > 0,    $sformatf("ADR saves: %0d", n_adr));
    check(n_resume > 0, $sformatf("re-encryptions resumed after power failure: %0d", n_resume));
    $display("events: hit=%0d miss=%0d merge=%0d full=%0d fwd=%0d ovf=%0d reenc=%0d wait=%0d adr=%0d resume=%0d",
             n_hit, n_miss, n_merge, n_full, n_fwd, n_ovf, n_reenc, n_wait, n_adr, n_resume);
    $display("NVM writes: data=%0d counter=%0d", u_nvm.n_data_writes, u_nvm.n_ctr_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
