// tb_ctr_incr -- self-checking test of the counter increment (Ac++).
//
// The reference slices the 512-bit counter line itself: major counter in
// bits [511:448], minor counter of line i (0-based) in bits
// [447-7i -: 7]. Random lines and line indices check a plain increment that
// leaves every other bit alone; lines whose minor is 127 check the overflow
// (major + 1, minor 0, overflow flag).
module tb_ctr_incr;
  import secpm_pkg::*;

  int checks = 0, failures = 0;
  line_t  cin, cout, exp_line;
  lidx_t  idx;
  major_t maj;
  minor_t mnr;
  logic   ovf;

  ctr_incr dut (.ctr_in(cin), .line_idx(idx), .ctr_out(cout), .major_out(maj),
                .minor_out(mnr), .overflow(ovf));

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
    logic [63:0]  m_old;
    logic [6:0]   n_old;
    for (int t = 0; t < 300; t++) begin
      for (int w = 0; w < 16; w++) cin[32*w +: 32] = $urandom;
      idx = lidx_t'($urandom);
      if (t % 3 == 0) cin[447 - 7*int'(idx) -: 7] = 7'h7f;   // force overflow
      if (t == 1) begin idx = 6'd0; end
      if (t == 2) begin idx = 6'd63; end
      #1;
      m_old = cin[511:448];
      n_old = cin[447 - 7*int'(idx) -: 7];
      exp_line = cin;
      if (n_old == 7'h7f) begin
        exp_line[511:448] = m_old + 64'd1;
        exp_line[447 - 7*int'(idx) -: 7] = 7'd0;
        check(ovf == 1'b1, "overflow flagged");
        check(maj == m_old + 64'd1 && mnr == 7'd0, "overflow counter pair");
      end else begin
        exp_line[447 - 7*int'(idx) -: 7] = n_old + 7'd1;
        check(ovf == 1'b0, "no overflow");
        check(maj == m_old && mnr == n_old + 7'd1, "incremented counter pair");
      end
      check(cout == exp_line, $sformatf("counter line, trial %0d idx %0d", t, idx));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
