// secpm_pkg -- sizes, types and counter-line helpers shared by the SecPM
// memory controller.
//
// A memory line is 64 bytes. A 4 KB page holds 64 lines, and all counters of
// one page live in a single 64-byte counter line: a 64-bit major counter M
// shared by the page followed by 64 minor counters m1..m64 of 7 bits each
// (64 + 64*7 = 512 bits). This layout and these widths follow the paper. The
// bit order (M in the most significant bits, then m1 .. m64 towards bit 0)
// is this design's choice; the paper only draws M to the left of m1..m64.
//
// The NVM is 16 GB, so a data line address is 28 bits. Counter lines live in
// a separate counter region; the NVM line address carries one extra top bit
// that selects that region (a choice of this design). Counter line of page P
// sits at {1'b1, P}. The line {1'b1, all ones} is reserved for the image of
// the re-encryption status register saved on a power failure.
package secpm_pkg;

  localparam int LINE_BITS      = 512;  // 64-byte memory line
  localparam int PAGE_LINES     = 64;   // lines per 4 KB page
  localparam int LIDX_BITS      = 6;    // log2(PAGE_LINES)
  localparam int MAJOR_BITS     = 64;
  localparam int MINOR_BITS     = 7;
  localparam int LINE_ADDR_BITS = 28;   // 16 GB / 64 B
  localparam int PPN_BITS       = LINE_ADDR_BITS - LIDX_BITS;  // 22
  localparam int NVM_ADDR_BITS  = LINE_ADDR_BITS + 1;          // + region bit
  localparam int RSR_PPN_BITS   = 32;   // page number field of the RSR
  localparam int KEY_BITS       = 128;

  typedef logic [LINE_BITS-1:0]      line_t;
  typedef logic [LINE_ADDR_BITS-1:0] laddr_t;
  typedef logic [PPN_BITS-1:0]       ppn_t;
  typedef logic [NVM_ADDR_BITS-1:0]  naddr_t;
  typedef logic [MAJOR_BITS-1:0]     major_t;
  typedef logic [MINOR_BITS-1:0]     minor_t;
  typedef logic [LIDX_BITS-1:0]      lidx_t;

  localparam minor_t MINOR_MAX = '1;

  // Source flag carried by every write-queue entry: 1 = line from the CPU
  // caches, 0 = line from the counter cache (values as printed in the paper).
  localparam logic FLAG_CPU = 1'b1;
  localparam logic FLAG_CTR = 1'b0;

  typedef struct packed {
    logic   flag;
    naddr_t addr;
    line_t  data;
  } wq_entry_t;

  localparam naddr_t RSR_SAVE_ADDR = '1;

  function automatic naddr_t data_naddr(laddr_t a);
    return {1'b0, a};
  endfunction

  function automatic naddr_t ctr_naddr(ppn_t p);
    return {1'b1, {(LINE_ADDR_BITS-PPN_BITS){1'b0}}, p};
  endfunction

  function automatic major_t get_major(line_t c);
    return c[LINE_BITS-1 -: MAJOR_BITS];
  endfunction

  // Minor counter of line i (i = 0 is m1 in the paper's numbering).
  function automatic minor_t get_minor(line_t c, lidx_t i);
    return c[LINE_BITS-MAJOR_BITS-1 - int'(i)*MINOR_BITS -: MINOR_BITS];
  endfunction

  function automatic line_t set_minor(line_t c, lidx_t i, minor_t v);
    line_t r;
    r = c;
    r[LINE_BITS-MAJOR_BITS-1 - int'(i)*MINOR_BITS -: MINOR_BITS] = v;
    return r;
  endfunction

  function automatic line_t set_major(line_t c, major_t v);
    line_t r;
    r = c;
    r[LINE_BITS-1 -: MAJOR_BITS] = v;
    return r;
  endfunction

endpackage
