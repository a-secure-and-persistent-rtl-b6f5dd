// rsr -- re-encryption status register.
//
// Tracks the one page whose minor counter overflowed and is being
// re-encrypted: its page number (32 bits), the major counter the page was
// encrypted with before the overflow (64 bits) and one done bit per line
// (64 bits), 20 bytes in all, as in the paper. The register is free when all
// done bits are 1, which is also its reset state.
//
// `start` loads a new page with every done bit clear except, when
// `start_done_valid`, the bit of the line whose write caused the overflow
// (that line is written with the new counter and needs no re-encryption).
// `mark_done` sets one bit. `next_idx` is the lowest line still to be done.
//
// ADR: `image` is the 160-bit word written to NVM on a power failure,
// {page, old major, pending}, where pending = ~done so that an NVM line that
// was never written (all zero) restores as a free register. `restore` loads
// such a word back after power returns. The paper has the RSR saved and
// reloaded through ADR; the inverted encoding is this design's choice.
module rsr
  import secpm_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [RSR_PPN_BITS-1:0] start_ppn,
  input  major_t                  start_old_major,
  input  logic                    start_done_valid,
  input  lidx_t                   start_done_idx,
  input  logic                    mark_done,
  input  lidx_t                   mark_idx,
  input  logic                    restore,
  input  logic [159:0]            restore_image,
  output logic                    active,
  output logic [RSR_PPN_BITS-1:0] ppn,
  output major_t                  old_major,
  output logic [PAGE_LINES-1:0]   done,
  output lidx_t                   next_idx,
  output logic [159:0]            image
);

  assign active = ~&done;
  assign image  = {ppn, old_major, ~done};

  always_comb begin
    next_idx = '0;
    for (int i = PAGE_LINES - 1; i >= 0; i--)
      if (!done[i]) next_idx = lidx_t'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ppn       <= '0;
      old_major <= '0;
      done      <= '1;
    end else if (restore) begin
      ppn       <= restore_image[159 -: RSR_PPN_BITS];
      old_major <= restore_image[127 -: MAJOR_BITS];
      done      <= ~restore_image[PAGE_LINES-1:0];
    end else if (start) begin
      ppn       <= start_ppn;
      old_major <= start_old_major;
      done      <= '0;
      if (start_done_valid) done[start_done_idx] <= 1'b1;
    end else if (mark_done) begin
      done[mark_idx] <= 1'b1;
    end
  end

endmodule
