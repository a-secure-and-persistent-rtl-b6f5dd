// otp_gen -- counter-mode one-time-pad generator ("AES-ctr" of the paper).
//
// The pad for a 64-byte line is four AES-128 blocks computed in parallel by
// four aes128_enc lanes sharing the secret key. Lane b encrypts the 128-bit
// seed {line_addr (zero-extended to 32 bits), major (64), 1'b0, minor (7),
// 22'b0, b (2)}; lane 0 gives otp[511:384]. The paper fixes what goes into
// the pad -- key, line address and the major counter concatenated with the
// minor counter -- but not the seed layout, the cipher width or the lane
// count, which are this design's choices.
//
// Timing: `start` is taken when not busy; `done` pulses exactly LATENCY
// cycles later with `otp` valid, and `otp` holds until the next start.
// LATENCY defaults to 80 cycles, the paper's 40 ns en/decryption latency at
// its 2 GHz clock. The AES lanes finish after 10 cycles; the result is held
// back until LATENCY so that the controller sees the paper's latency.
// LATENCY must be at least 12.
module otp_gen
  import secpm_pkg::*;
#(
  parameter int LATENCY = 80
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [KEY_BITS-1:0]   key,
  input  laddr_t                line_addr,
  input  major_t                major,
  input  minor_t                minor,
  output logic                  busy,
  output logic                  done,
  output line_t                 otp
);

  localparam int CW = $clog2(LATENCY + 1);

  logic [CW-1:0]     cnt;
  logic [3:0]        lane_done, lane_busy;
  logic [3:0][127:0] lane_ct;
  logic              go;

  assign go = start && !busy;

  for (genvar b = 0; b < 4; b++) begin : g_lane
    logic [127:0] seed;
    assign seed = {{(32-LINE_ADDR_BITS){1'b0}}, line_addr, major, 1'b0, minor,
                   22'b0, 2'(b)};
    aes128_enc u_aes (
      .clk   (clk),
      .rst_n (rst_n),
      .start (go),
      .key   (key),
      .pt    (seed),
      .busy  (lane_busy[b]),
      .done  (lane_done[b]),
      .ct    (lane_ct[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      otp  <= '0;
    end else begin
      done <= 1'b0;
      if (go) begin
        busy <= 1'b1;
        cnt  <= CW'(1);
      end else if (busy) begin
        cnt <= cnt + CW'(1);
        if (cnt == CW'(LATENCY - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          otp  <= {lane_ct[0], lane_ct[1], lane_ct[2], lane_ct[3]};
        end
      end
    end
  end

  // The lanes must have finished by the time the pad is released.
  always_ff @(posedge clk) begin
    if (busy && cnt == CW'(LATENCY - 1))
      assert (lane_busy == 4'b0000)
        else $error("otp_gen: LATENCY shorter than the AES core");
  end

endmodule
