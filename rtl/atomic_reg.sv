// atomic_reg -- the two-line register placed beside the AES circuit that makes
// a counter update and its data line reach the write queue together.
//
// While a line is being encrypted, its updated counter line is stored here
// (Sto(Ac)) instead of going straight to the write queue; when encryption
// ends the ciphertext is stored too (Sto(A)). Only when both halves are held
// does `app_valid` rise, and both are handed to the write queue in one cycle
// (App(Ac+A)), so that after a power failure either both or neither are in
// the battery-backed queue. This follows the paper; the paper sizes the
// register at two cache lines, and the addresses kept with them are this
// design's addition.
//
// Interface: the two store ports are independent one-cycle strobes; a store
// to a half that is already full is refused (see sto_*_ready). The append
// port is valid/ready; the register is emptied on the cycle the handshake
// completes. `drop` empties it without appending: it models the loss of
// this volatile register when power fails before the append.
module atomic_reg
  import secpm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   drop,
  // Sto(Ac): write-through copy of the updated counter line
  input  logic   sto_ctr_valid,
  output logic   sto_ctr_ready,
  input  naddr_t sto_ctr_addr,
  input  line_t  sto_ctr_line,
  // Sto(A): the encrypted data line
  input  logic   sto_data_valid,
  output logic   sto_data_ready,
  input  naddr_t sto_data_addr,
  input  line_t  sto_data_line,
  // App(Ac+A)
  output logic   app_valid,
  input  logic   app_ready,
  output naddr_t app_ctr_addr,
  output line_t  app_ctr_line,
  output naddr_t app_data_addr,
  output line_t  app_data_line
);

  logic ctr_held, data_held;

  assign sto_ctr_ready  = !ctr_held;
  assign sto_data_ready = !data_held;
  assign app_valid      = ctr_held && data_held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctr_held      <= 1'b0;
      data_held     <= 1'b0;
      app_ctr_addr  <= '0;
      app_ctr_line  <= '0;
      app_data_addr <= '0;
      app_data_line <= '0;
    end else if (drop) begin
      ctr_held  <= 1'b0;
      data_held <= 1'b0;
    end else begin
      if (app_valid && app_ready) begin
        ctr_held  <= 1'b0;
        data_held <= 1'b0;
      end else begin
        if (sto_ctr_valid && !ctr_held) begin
          ctr_held     <= 1'b1;
          app_ctr_addr <= sto_ctr_addr;
          app_ctr_line <= sto_ctr_line;
        end
        if (sto_data_valid && !data_held) begin
          data_held     <= 1'b1;
          app_data_addr <= sto_data_addr;
          app_data_line <= sto_data_line;
        end
      end
    end
  end

endmodule
