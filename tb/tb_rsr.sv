// tb_rsr -- self-checking test of the re-encryption status register.
//
// Checks the free state after reset, loading a page with the overflowing
// line already done, the lowest-pending-line output while lines are marked
// done in random order, freeing when the 64th bit is set, the 20-byte save
// image {page, old major, ~done} and restoring from such an image.
module tb_rsr;
  import secpm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, sdv, mark, restore, active;
  logic [31:0] sppn, ppn;
  major_t      som, om;
  lidx_t       sidx, midx, nxt;
  logic [159:0] rimg, img;
  logic [63:0]  done;

  rsr dut (.clk, .rst_n, .start, .start_ppn(sppn), .start_old_major(som),
           .start_done_valid(sdv), .start_done_idx(sidx), .mark_done(mark),
           .mark_idx(midx), .restore, .restore_image(rimg), .active, .ppn,
           .old_major(om), .done, .next_idx(nxt), .image(img));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] ref_done;
    int order [64];
    start = 0; sdv = 0; mark = 0; restore = 0; sppn = 0; som = 0; sidx = 0; midx = 0; rimg = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!active && done == '1, "free after reset");
    check(img[63:0] == 64'd0, "free image has no pending line");
    // load
    sppn = 32'h0012_3456; som = 64'hDEAD_BEEF_0000_0007; sdv = 1; sidx = 6'd5; start = 1;
    @(negedge clk); start = 0;
    ref_done = 64'd1 << 5;
    check(active && ppn == sppn && om == som && done == ref_done, "loaded page");
    check(img == {sppn, som, ~ref_done}, "save image after load");
    check(nxt == 6'd0, "lowest pending line");
    // mark in a shuffled order
    for (int i = 0; i < 64; i++) order[i] = i;
    for (int i = 63; i > 0; i--) begin
      int j, t; j = $urandom_range(i, 0); t = order[i]; order[i] = order[j]; order[j] = t;
    end
    for (int i = 0; i < 64; i++) begin
      int low;
      if (order[i] == 5) continue;
      mark = 1; midx = lidx_t'(order[i]);
      @(negedge clk); mark = 0;
      ref_done[order[i]] = 1'b1;
      low = 0;
      while (low < 64 && ref_done[low]) low++;
      check(done == ref_done, "done bits");
      check(active == (ref_done != '1), "active while lines pending");
      if (low < 64) check(nxt == lidx_t'(low), "next pending line");
    end
    check(!active, "freed after the last done bit");
    // restore
    rimg = {32'h0000_00AB, 64'h1111_2222_3333_4444, 64'hF0F0_0000_0000_0001};
    restore = 1; @(negedge clk); restore = 0;
    check(active && ppn == 32'hAB && om == 64'h1111_2222_3333_4444, "restored page");
    check(done == ~64'hF0F0_0000_0000_0001 && nxt == 6'd0, "restored done bits");
    check(img == rimg, "image round trip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
