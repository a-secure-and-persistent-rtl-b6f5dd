// tb_secpm_txn -- durable transactions of different sizes through the SecPM
// controller at its default sizes, measuring how many counter writes the
// counter write reduction (CWR) removes.
//
// For each transaction size of 64 B, 256 B, 1 KB and 4 KB (1, 4, 16 and 64
// lines) it runs TXNS undo-log transactions: the prepare stage flushes S
// contiguous log lines into a log region that grows page by page, the mutate
// stage flushes S contiguous data lines of a randomly chosen page, and the
// commit stage flushes one commit line. After the write queue has drained it
// reports the NVM writes of that size: data lines, counter lines, and the
// share of the counter lines entering the queue that CWR removed. Without
// CWR every flush would also write its counter line, so the number of NVM
// writes would be twice the number of flushes.
//
// Checks, per size: every counter line that entered the queue was written to
// NVM or removed by CWR; NVM received exactly one data write per flush;
// transactions of 4 lines or more had counter writes removed; and the lines
// of the last transaction read back. The flushes are issued one after the
// other, each waiting for its acknowledgement, as a single core does with a
// flush followed by a fence. The NVM is the behavioural model with
// PCM-like latencies (126-cycle reads, 600-cycle writes, one access at a
// time), so the queue fills during large transactions.
module tb_secpm_txn;
  import secpm_pkg::*;

  localparam int TXNS = 6;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [127:0] key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
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

  line_t plain [laddr_t];
  int n_merge = 0, n_ctr_app = 0, n_flush = 0;

  always @(posedge clk) begin
    if (ev_merge) n_merge++;
    if (dut.wq_push_valid && dut.wq_push_ready && dut.wq_push_ctr) n_ctr_app++;
    if (ack_valid) n_flush++;
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

  task automatic flush(input laddr_t a, input line_t d);
    @(negedge clk);
    req_valid = 1; req_write = 1; req_addr = a; req_data = d;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!ack_valid) @(negedge clk);
    plain[a] = d;
  endtask

  task automatic read_check(input laddr_t a, input string what);
    @(negedge clk);
    req_valid = 1; req_write = 0; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!rd_valid) @(negedge clk);
    check(rd_line == plain[a], $sformatf("%s: line %h reads back", what, a));
  endtask

  task automatic wait_drained();
    while (!(dut.u_wq.empty && wr)) @(negedge clk);
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [4] = '{1, 4, 16, 64};
    laddr_t log_ptr, data_base, last_data;
    int s, d0, c0, m0, a0, f0, dd, dc, dm, da, df;
    req_valid = 0; req_write = 0; req_addr = '0; req_data = '0; power_fail = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    log_ptr = {22'h000400, 6'd0};
    $display("size  flushes  data_writes  ctr_appended  ctr_written  ctr_removed  removed_%%");
    for (int z = 0; z < 4; z++) begin
      s  = sizes[z];
      d0 = u_nvm.n_data_writes; c0 = u_nvm.n_ctr_writes;
      m0 = n_merge; a0 = n_ctr_app; f0 = n_flush;
      for (int t = 0; t < TXNS; t++) begin
        for (int i = 0; i < s; i++) begin            // prepare: undo log
          flush(log_ptr, rline());
          log_ptr++;
        end
        data_base = {22'h010000 + 22'($urandom_range(0, 4095)), 6'(64 - s == 0 ? 0 :
                     $urandom_range(0, 64 - s))};
        for (int i = 0; i < s; i++) flush(data_base + laddr_t'(i), rline());  // mutate
        flush({22'h000300, 6'd0}, rline());          // commit record
        last_data = data_base;
      end
      wait_drained();
      dd = u_nvm.n_data_writes - d0; dc = u_nvm.n_ctr_writes - c0;
      dm = n_merge - m0; da = n_ctr_app - a0; df = n_flush - f0;
      $display("%4d  %7d  %11d  %12d  %11d  %11d  %8.1f", 64 * s, df, dd, da, dc, dm,
               100.0 * real'(dm) / real'(da));
      check(dc + dm == da, $sformatf("%0d B: counter lines written + removed == appended", 64 * s));
      check(dd == df, $sformatf("%0d B: one data write per flush (%0d vs %0d)", 64 * s, dd, df));
      if (s >= 4) check(dm > 0, $sformatf("%0d B: CWR removed counter writes", 64 * s));
      for (int i = 0; i < s; i++) read_check(last_data + laddr_t'(i), $sformatf("%0d B", 64 * s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
