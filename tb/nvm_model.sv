// nvm_model -- behavioural model of the encrypted NVM main memory (not
// synthesizable; for simulation only).
//
// Holds lines sparsely in an associative array keyed by the 29-bit NVM line
// address; a line never written reads as zero. Contents survive the
// controller's reset, which is how the testbenches model a power cycle.
// One access at a time: a write is taken when the device is idle, stored at
// once and keeps the device busy for WR_LAT cycles; a read is taken when idle
// and answered RD_LAT cycles later. Defaults are the PCM figures the SecPM
// evaluation uses at 2 GHz: tRCD + tCL = 63 ns -> 126 cycles for a read and
// tWR = 300 ns -> 600 cycles for a write. Bank parallelism is not modelled.
// It counts the data-line and counter-line writes it receives.
module nvm_model
  import secpm_pkg::*;
#(
  parameter int RD_LAT = 126,
  parameter int WR_LAT = 600
) (
  input  logic   clk,
  input  logic   wr_valid,
  output logic   wr_ready,
  input  naddr_t wr_addr,
  input  line_t  wr_line,
  input  logic   wr_flag,
  input  logic   rd_valid,
  output logic   rd_ready,
  input  naddr_t rd_addr,
  output logic   rd_rsp_valid,
  output line_t  rd_rsp_line
);

  line_t mem [naddr_t];
  int    busy_cnt = 0;
  int    rd_cnt   = 0;
  logic  rd_pend  = 1'b0;
  line_t rd_buf   = '0;
  int    n_data_writes = 0;
  int    n_ctr_writes  = 0;

  assign wr_ready = (busy_cnt == 0) && !rd_pend;
  assign rd_ready = (busy_cnt == 0) && !rd_pend && !wr_valid;

  initial begin
    rd_rsp_valid = 1'b0;
    rd_rsp_line  = '0;
  end

  function automatic line_t peek(naddr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    rd_rsp_valid <= 1'b0;
    if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    if (rd_pend) begin
      if (rd_cnt <= 1) begin
        rd_pend      <= 1'b0;
        rd_rsp_valid <= 1'b1;
        rd_rsp_line  <= rd_buf;
      end else rd_cnt <= rd_cnt - 1;
    end else if (wr_valid && wr_ready) begin
      mem[wr_addr] = wr_line;
      busy_cnt <= WR_LAT - 1;
      if (wr_flag) n_data_writes++;
      else         n_ctr_writes++;
    end else if (rd_valid && rd_ready) begin
      rd_buf  <= peek(rd_addr);
      rd_pend <= 1'b1;
      rd_cnt  <= RD_LAT;
    end
  end

endmodule
