// aes128_enc -- iterative AES-128 encryption core, one round per clock.
//
// A one-cycle `start` loads the plaintext XOR the key; the ten rounds then run
// on the following ten clocks with the round keys expanded on the fly, and
// `done` pulses with `ct` valid on the tenth. `ct` holds until the next start.
// Starting while busy restarts the core. This core is this design's choice of
// "the AES circuit": the paper gives only the cipher's name and its 40 ns
// latency, which the enclosing OTP generator enforces.
module aes128_enc
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] pt,
  output logic         busy,
  output logic         done,
  output logic [127:0] ct
);

  logic [3:0]   round;
  logic [7:0]   rcon;
  logic [127:0] st, rk, rk_next, st_next;

  always_comb begin
    rk_next = next_round_key(rk, rcon);
    if (round == 4'd10) st_next = shift_rows(sub_bytes(st)) ^ rk_next;
    else                st_next = mix_columns(shift_rows(sub_bytes(st))) ^ rk_next;
  end

  assign ct = st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      round <= '0;
      rcon  <= 8'h01;
      st    <= '0;
      rk    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        round <= 4'd1;
        rcon  <= 8'h01;
        st    <= pt ^ key;
        rk    <= key;
      end else if (busy) begin
        st    <= st_next;
        rk    <= rk_next;
        rcon  <= xtime(rcon);
        round <= round + 4'd1;
        if (round == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
