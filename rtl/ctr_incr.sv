// ctr_incr -- the "Ac++" step of a flush: advance one line's counter inside
// its page's counter line.
//
// Purely combinational. The minor counter of line `line_idx` is incremented
// and written back into the 64-byte counter line; the pad for the new data is
// then made from {major_out, minor_out}. When the 7-bit minor counter is
// already at its maximum the increment overflows: as in the paper, the page's
// major counter is incremented and the minor counter restarts at 0, and
// `overflow` tells the controller to start re-encrypting the rest of the
// page. Only the written line's minor is zeroed here; the other lines keep
// their old minors until the re-encryption engine reaches them, so that they
// can still be decrypted with the old major counter held in the RSR (this
// split is this design's choice; the paper resets "all minor counters").
module ctr_incr
  import secpm_pkg::*;
(
  input  line_t  ctr_in,
  input  lidx_t  line_idx,
  output line_t  ctr_out,
  output major_t major_out,
  output minor_t minor_out,
  output logic   overflow
);

  major_t major_old;
  minor_t minor_old;

  always_comb begin
    major_old = get_major(ctr_in);
    minor_old = get_minor(ctr_in, line_idx);
    overflow  = (minor_old == MINOR_MAX);
    if (overflow) begin
      major_out = major_old + major_t'(1);
      minor_out = '0;
    end else begin
      major_out = major_old;
      minor_out = minor_old + minor_t'(1);
    end
    ctr_out = set_minor(set_major(ctr_in, major_out), line_idx, minor_out);
  end

endmodule
