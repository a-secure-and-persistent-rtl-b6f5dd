// counter_cache -- on-chip write-through cache of counter lines (CWT).
//
// One 64-byte entry holds all counters of one 4 KB page, so the cache is
// indexed by physical page number: the low log2(SETS) bits pick the set and
// the rest is the tag. The defaults give the paper's 1 MB, 8-way cache
// (2048 sets x 8 ways x 64 B) with LRU replacement and a 12-cycle access.
//
// Write-through is the paper's counter cache write-through scheme: every
// counter update (`wr_*`) is written into the cache and, in the same cycle,
// a copy leaves on `wt_*` towards the write queue (in SecPM it goes through
// the atomic register first). As a result no line in the cache is ever dirty
// and an eviction never writes anything back.
//
// Lookups (`rd_*`): accepted when rd_ready; on a hit `rd_rsp_valid` pulses
// exactly LATENCY cycles after the accepting edge with the line and
// rd_rsp_hit = 1. On a miss the cache asks for the line on the fill port
// (mem_rd_* valid/ready, then mem_rsp_valid with the line), installs it in
// an invalid way or the LRU way, and answers with rd_rsp_hit = 0.
// Updates (`wr_*`) take one cycle: the line is written into its way (or
// allocated when absent) and wt_valid pulses on the next cycle. Updates
// have priority over lookups in the idle state.
// LRU is kept as a per-way age (0 = most recent) in each set; ages start as
// the way numbers when the valid bits are cleared. After reset the cache
// clears its tags one set per cycle and raises init_done when finished.
// Set/tag split, the age-based LRU and the handshakes are this design's
// choices.
module counter_cache
  import secpm_pkg::*;
#(
  parameter int SETS    = 2048,
  parameter int WAYS    = 8,
  parameter int LATENCY = 12
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   init_done,
  // lookup
  input  logic   rd_valid,
  output logic   rd_ready,
  input  ppn_t   rd_ppn,
  output logic   rd_rsp_valid,
  output logic   rd_rsp_hit,
  output line_t  rd_rsp_line,
  // update (write-through)
  input  logic   wr_valid,
  output logic   wr_ready,
  input  ppn_t   wr_ppn,
  input  line_t  wr_line,
  output logic   wt_valid,
  output naddr_t wt_addr,
  output line_t  wt_line,
  // fill from memory on a miss
  output logic   mem_rd_valid,
  input  logic   mem_rd_ready,
  output ppn_t   mem_rd_ppn,
  input  logic   mem_rsp_valid,
  input  line_t  mem_rsp_line
);

  localparam int SB  = $clog2(SETS);
  localparam int WB  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int TB  = PPN_BITS - SB;
  localparam int LB  = $clog2(LATENCY + 1);

  typedef logic [TB:0]                tagv_t;   // {valid, tag}
  typedef logic [WAYS-1:0][TB:0]      set_tags_t;
  typedef logic [WAYS-1:0][WB-1:0]    set_ages_t;

  set_tags_t tags [SETS];
  set_ages_t ages [SETS];
  line_t     data [SETS*WAYS];

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LAT, S_FILL_REQ, S_FILL_WAIT} state_t;
  state_t state;

  logic [SB-1:0] init_set;
  logic [LB-1:0] cnt;
  ppn_t          cur_ppn, lk_ppn;
  logic [SB-1:0] lk_set;
  logic [TB-1:0] lk_tag;
  set_tags_t     lk_tags;
  set_ages_t     lk_ages;
  logic          lk_hit;
  logic [WB-1:0] lk_way, victim, use_way;
  logic          do_wr;

  assign init_done = (state != S_INIT);
  assign wr_ready  = (state == S_IDLE);
  assign rd_ready  = (state == S_IDLE) && !wr_valid;
  assign do_wr     = wr_valid && wr_ready;

  assign lk_ppn  = (state == S_IDLE) ? wr_ppn : cur_ppn;
  assign lk_set  = lk_ppn[SB-1:0];
  assign lk_tag  = lk_ppn[PPN_BITS-1:SB];
  assign lk_tags = tags[lk_set];
  assign lk_ages = ages[lk_set];

  always_comb begin
    lk_hit  = 1'b0;
    lk_way  = '0;
    victim  = '0;
    for (int w = 0; w < WAYS; w++)
      if (lk_tags[w] == {1'b1, lk_tag}) begin
        lk_hit = 1'b1;
        lk_way = WB'(w);
      end
    // victim: an invalid way if any, else the least recently used
    for (int w = WAYS - 1; w >= 0; w--)
      if (lk_ages[w] == WB'(WAYS - 1)) victim = WB'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!lk_tags[w][TB]) victim = WB'(w);
    use_way = lk_hit ? lk_way : victim;
  end

  function automatic set_ages_t touch(set_ages_t a, logic [WB-1:0] w);
    set_ages_t r;
    for (int j = 0; j < WAYS; j++)
      r[j] = (a[j] < a[w]) ? a[j] + WB'(1) : a[j];
    r[w] = '0;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      init_set     <= '0;
      cnt          <= '0;
      cur_ppn      <= '0;
      rd_rsp_valid <= 1'b0;
      rd_rsp_hit   <= 1'b0;
      rd_rsp_line  <= '0;
      wt_valid     <= 1'b0;
      wt_addr      <= '0;
      wt_line      <= '0;
      mem_rd_valid <= 1'b0;
      mem_rd_ppn   <= '0;
    end else begin
      rd_rsp_valid <= 1'b0;
      wt_valid     <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_set <= init_set + SB'(1);
          if (init_set == SB'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (do_wr) begin
            wt_valid <= 1'b1;
            wt_addr  <= ctr_naddr(wr_ppn);
            wt_line  <= wr_line;
          end else if (rd_valid) begin
            cur_ppn <= rd_ppn;
            cnt     <= LB'(1);
            state   <= S_LAT;
          end
        end
        S_LAT: begin
          cnt <= cnt + LB'(1);
          if (cnt == LB'(LATENCY - 1)) begin
            if (lk_hit) begin
              rd_rsp_valid <= 1'b1;
              rd_rsp_hit   <= 1'b1;
              rd_rsp_line  <= data[{lk_set, lk_way}];
              state        <= S_IDLE;
            end else begin
              mem_rd_valid <= 1'b1;
              mem_rd_ppn   <= cur_ppn;
              state        <= S_FILL_REQ;
            end
          end
        end
        S_FILL_REQ: begin
          if (mem_rd_ready) begin
            mem_rd_valid <= 1'b0;
            state        <= S_FILL_WAIT;
          end
        end
        S_FILL_WAIT: begin
          if (mem_rsp_valid) begin
            rd_rsp_valid <= 1'b1;
            rd_rsp_hit   <= 1'b0;
            rd_rsp_line  <= mem_rsp_line;
            state        <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // tag, age and data arrays
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      tags[init_set] <= '0;
      for (int w = 0; w < WAYS; w++) ages[init_set][w] <= WB'(w);
    end else if (do_wr) begin
      tags[lk_set][use_way] <= {1'b1, lk_tag};
      ages[lk_set]          <= touch(lk_ages, use_way);
      data[{lk_set, use_way}] <= wr_line;
    end else if (state == S_LAT && cnt == LB'(LATENCY - 1) && lk_hit) begin
      ages[lk_set] <= touch(lk_ages, lk_way);
    end else if (state == S_FILL_WAIT && mem_rsp_valid) begin
      tags[lk_set][use_way] <= {1'b1, lk_tag};
      ages[lk_set]          <= touch(lk_ages, use_way);
      data[{lk_set, use_way}] <= mem_rsp_line;
    end
  end

endmodule
