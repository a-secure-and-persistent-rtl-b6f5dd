// tb_atomic_reg -- self-checking test of the two-line atomic register.
//
// The append must not be offered with only one half stored, in either
// order; both lines must be offered together with their addresses, held
// while the write queue refuses, and cleared by the handshake; a second
// store to a full half is refused; `drop` empties the register.
module tb_atomic_reg;
  import secpm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic drop, scv, scr, sdv, sdr, av, ar;
  naddr_t sca, sda, aca, ada;
  line_t  scl, sdl, acl, adl;

  atomic_reg dut (.clk, .rst_n, .drop, .sto_ctr_valid(scv), .sto_ctr_ready(scr),
    .sto_ctr_addr(sca), .sto_ctr_line(scl), .sto_data_valid(sdv), .sto_data_ready(sdr),
    .sto_data_addr(sda), .sto_data_line(sdl), .app_valid(av), .app_ready(ar),
    .app_ctr_addr(aca), .app_ctr_line(acl), .app_data_addr(ada), .app_data_line(adl));

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
    line_t c1, d1;
    drop = 0; scv = 0; sdv = 0; ar = 0; sca = 0; sda = 0; scl = 0; sdl = 0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int t = 0; t < 8; t++) begin
      for (int w = 0; w < 16; w++) begin c1[32*w +: 32] = $urandom; d1[32*w +: 32] = $urandom; end
      // first half
      if (t % 2 == 0) begin scv = 1; sca = naddr_t'($urandom); scl = c1; end
      else            begin sdv = 1; sda = naddr_t'($urandom); sdl = d1; end
      @(negedge clk); scv = 0; sdv = 0;
      check(!av, "no append with one half stored");
      repeat (3) @(negedge clk);
      check(!av, "still no append");
      // a second store to the same half is refused
      check((t % 2 == 0) ? !scr : !sdr, "full half refuses a store");
      // second half
      if (t % 2 == 0) begin sdv = 1; sda = naddr_t'($urandom); sdl = d1; end
      else            begin scv = 1; sca = naddr_t'($urandom); scl = c1; end
      @(negedge clk); scv = 0; sdv = 0;
      check(av, "append offered with both halves");
      check(acl == c1 && adl == d1 && aca == sca && ada == sda, "appended lines and addresses");
      repeat (2) @(negedge clk);
      check(av, "held while the queue refuses");
      if (t == 7) begin
        drop = 1; @(negedge clk); drop = 0;
        check(!av && scr && sdr, "drop empties the register");
      end else begin
        ar = 1; @(negedge clk); ar = 0;
        check(!av && scr && sdr, "handshake empties the register");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
