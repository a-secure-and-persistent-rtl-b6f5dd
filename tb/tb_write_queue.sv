// tb_write_queue -- self-checking test of the write queue with CWR.
//
// A scoreboard model of the queue (an ordered list with the same removal
// rule) predicts every line that leaves towards NVM.
//  1. Figure-10 case: four data lines A, B, C, D of one page, each with its
//     counter line, appended while NVM is busy. Only the last counter line
//     may remain: the queue must drain A, B, C, Dc, D with flags 1,1,1,0,1.
//  2. Random pushes (pairs and data-only, a few counter addresses so that
//     merges are frequent) with random NVM back-pressure; drained lines are
//     compared with the model, and the merge count with the model's.
//  3. push_ready must fall when fewer than two slots are free; forwarding
//     must return the newest queued copy.
module tb_write_queue;
  import secpm_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pv, pr, pcv, pdv, wv, wr, wf, lflag, lhit, empty, merge;
  naddr_t pca, pda, wa, la;
  line_t pcl, pdl, wl, ll;
  logic [$clog2(DEPTH+1)-1:0] count;

  write_queue #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .push_valid(pv), .push_ready(pr), .push_ctr_valid(pcv),
    .push_ctr_addr(pca), .push_ctr_line(pcl), .push_data_valid(pdv),
    .push_data_addr(pda), .push_data_line(pdl), .nvm_wr_valid(wv), .nvm_wr_ready(wr),
    .nvm_wr_addr(wa), .nvm_wr_line(wl), .nvm_wr_flag(wf), .lk_addr(la), .lk_flag(lflag),
    .lk_hit(lhit), .lk_line(ll), .count, .empty, .cwr_merge(merge));

  wq_entry_t model [$];
  int model_merges = 0, dut_merges = 0;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && merge) dut_merges++;

  // random NVM back-pressure during the random phase
  logic rand_bp = 1'b0;
  always @(negedge clk) if (rand_bp) wr = ($urandom_range(3, 0) == 0);

  // checks the drained line against the model at every handshake
  always @(posedge clk) begin
    if (rst_n && wv && wr) begin
      checks++;
      if (model.size() == 0 || model[0].flag != wf || model[0].addr != wa || model[0].data != wl) begin
        failures++;
        $display("FAIL: drained line differs from the model (addr %h flag %b)", wa, wf);
      end
      if (model.size() > 0) void'(model.pop_front());
    end
  end

  function automatic line_t rline();
    line_t l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  // model update for an accepted push (after this cycle's pop)
  task automatic model_push(input logic c, input naddr_t ca, input line_t cl,
                            input logic d, input naddr_t da, input line_t dl);
    if (c) begin
      for (int i = 0; i < model.size(); i++)
        if (model[i].flag == FLAG_CTR && model[i].addr == ca) begin
          model.delete(i);
          model_merges++;
          break;
        end
      model.push_back('{flag: FLAG_CTR, addr: ca, data: cl});
    end
    if (d) model.push_back('{flag: FLAG_CPU, addr: da, data: dl});
  endtask

  task automatic push(input logic c, input naddr_t ca, input line_t cl,
                      input logic d, input naddr_t da, input line_t dl);
    pv = 1; pcv = c; pca = ca; pcl = cl; pdv = d; pda = da; pdl = dl;
    @(posedge clk);
    while (!pr) @(posedge clk);
    // pop of this same edge is handled by the monitor first (same time step,
    // it runs before this task resumes after the edge)
    #1;
    model_push(c, ca, cl, d, da, dl);
    pv = 0; pcv = 0; pdv = 0;
  endtask

  initial begin
    naddr_t pg;
    line_t  cl;
    int     expect_order [5];
    pv = 0; pcv = 0; pdv = 0; wr = 0; pca = 0; pda = 0; pcl = 0; pdl = 0; la = 0; lflag = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    // ---- 1. Figure 10 ----
    pg = ctr_naddr(ppn_t'(22'h1234));
    cl = '0;
    for (int i = 0; i < 4; i++) begin
      cl[447 - 7*i -: 7] = 7'd1;    // the counter line grows by one update each time
      push(1'b1, pg, cl, 1'b1, data_naddr({22'h1234, 6'(i)}), rline());
    end
    @(negedge clk);
    @(negedge clk);
    check(count == 5, $sformatf("Figure-10 queue holds 5 lines, holds %0d", count));
    check(dut_merges == 3, "three counter lines removed");
    check(!empty, "queue not empty");
    la = pg; lflag = FLAG_CTR; #1;
    check(lhit && ll == cl, "forwarding returns the newest counter line");
    check(dut.q[0].flag && dut.q[1].flag && dut.q[2].flag && !dut.q[3].flag && dut.q[4].flag,
          "flags 1,1,1,0,1 from oldest to newest");
    wr = 1;
    while (!empty) @(negedge clk);
    wr = 0;
    check(model.size() == 0, "all five lines drained");
    // ---- 3. ready with fewer than two free slots ----
    for (int i = 0; i < DEPTH/2 - 1; i++) push(1'b1, ctr_naddr(ppn_t'(i)), rline(), 1'b1, data_naddr(laddr_t'(i)), rline());
    @(negedge clk);
    check(count == DEPTH - 2 && pr, "two free slots: ready");
    push(1'b0, '0, '0, 1'b1, data_naddr(28'h77), rline());
    @(negedge clk);
    check(!pr, "one free slot: not ready");
    la = data_naddr(28'h77); lflag = FLAG_CPU; #1;
    check(lhit && ll == model[model.size()-1].data, "forwarding of a data line");
    wr = 1;
    while (!empty) @(negedge clk);
    // ---- 2. random traffic ----
    model_merges = 0; dut_merges = 0;
    rand_bp = 1'b1;
    for (int t = 0; t < 400; t++) begin
      logic c;
      c  = ($urandom_range(4, 0) != 0);
      push(c, ctr_naddr(ppn_t'($urandom_range(3, 0))), rline(),
           1'b1, data_naddr(laddr_t'($urandom_range(40, 0))), rline());
      @(negedge clk);
    end
    rand_bp = 1'b0;
    @(negedge clk);
    wr = 1;
    while (!empty) @(negedge clk);
    repeat (2) @(negedge clk);
    check(model.size() == 0, "random traffic fully drained");
    check(model_merges == dut_merges && dut_merges > 0,
          $sformatf("merge count %0d vs model %0d", dut_merges, model_merges));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
