// tb_otp_gen -- self-checking test of the one-time-pad generator.
//
// 1. Known-answer test of the AES-128 core against FIPS-197 Appendix C.1
//    (key 000102..0f, plaintext 00112233..ff -> 69c4e0d8..c55a).
// 2. For several random (address, major, minor) inputs, each 128-bit quarter
//    of the pad must equal AES-128 of the seed this design defines for that
//    quarter, computed by a separate, known-answer-checked core.
// 3. The pad must arrive exactly LATENCY cycles after start (80 = 40 ns at
//    2 GHz) and must change when only the minor counter changes.
module tb_otp_gen;
  import secpm_pkg::*;

  localparam int LAT = 80;
  logic clk = 1'b0;
  logic rst_n = 1'b1;
  initial #1 rst_n = 1'b0;  // a falling edge applies the asynchronous reset
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [127:0] key;
  logic         start, busy, done;
  laddr_t       addr;
  major_t       major;
  minor_t       minor;
  line_t        otp;

  otp_gen #(.LATENCY(LAT)) dut (
    .clk, .rst_n, .start, .key, .line_addr(addr), .major, .minor,
    .busy, .done, .otp
  );

  // reference core
  logic         r_start, r_busy, r_done;
  logic [127:0] r_pt, r_ct;
  aes128_enc u_ref (
    .clk, .rst_n, .start(r_start), .key, .pt(r_pt), .busy(r_busy), .done(r_done), .ct(r_ct)
  );

  task automatic ref_encrypt(input logic [127:0] pt, output logic [127:0] ct);
    @(negedge clk); r_pt = pt; r_start = 1'b1;
    @(negedge clk); r_start = 1'b0;
    while (!r_done) @(negedge clk);
    ct = r_ct;
  endtask

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] ct, seed;
    line_t prev;
    int lat;
    start = 0; r_start = 0; addr = '0; major = '0; minor = '0; r_pt = '0;
    key = 128'h000102030405060708090a0b0c0d0e0f;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    ref_encrypt(128'h00112233445566778899aabbccddeeff, ct);
    check(ct == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1 known answer");
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    ref_encrypt(128'h3243f6a8885a308d313198a2e0370734, ct);
    check(ct == 128'h3925841d02dc09fbdc118597196a0b32, "FIPS-197 Appendix B known answer");

    prev = '0;
    for (int t = 0; t < 6; t++) begin
      addr  = laddr_t'({$urandom, $urandom});
      major = {$urandom, $urandom};
      minor = (t == 5) ? minor + 7'd1 : minor_t'($urandom);
      if (t == 5) addr = addr;  // same line, next minor
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == LAT, $sformatf("pad latency %0d, expected %0d", lat, LAT));
      for (int b = 0; b < 4; b++) begin
        seed = {4'b0, addr, major, 1'b0, minor, 22'b0, 2'(b)};
        ref_encrypt(seed, ct);
        check(otp[511-128*b -: 128] == ct, $sformatf("pad quarter %0d of trial %0d", b, t));
      end
      if (t == 5) check(otp != prev, "pad changes with the minor counter");
      prev = otp;
      if (t == 4) begin addr = addr; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
