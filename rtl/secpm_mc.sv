// secpm_mc -- SecPM memory controller: counter-mode encryption for an NVM
// main memory that stays crash consistent under cache-line flushes.
//
// What it does. Every line written to NVM is encrypted with a one-time pad
// made from the key, the line address and the line's counter (page major
// counter concatenated with the line's minor counter). A flush therefore
// produces two writes, the data and its counter line. The controller makes
// them reach the battery-backed write queue together, before the flush is
// acknowledged, so that after a power failure every persisted line can be
// decrypted:
//   Flush(A): read A's counter line from the counter cache, increment A's
//   minor counter (ctr_incr), start the pad, write the new counter line into
//   the write-through counter cache whose copy goes to the atomic register
//   (Sto(Ac)); when the pad is ready XOR it in and store the ciphertext in
//   the register (Sto(A)); append both lines to the write queue in one cycle
//   (App(Ac+A)); pulse ack_valid (Ack(A)). This order follows the paper.
//   Read(A): read the counter line, then compute the pad while the NVM read
//   is in flight and XOR the two when both are back.
//   In the write queue a new counter line replaces a queued one of the same
//   page (CWR), which removes most counter writes for flushes with locality.
//   Minor overflow: the flush that overflows writes with the incremented
//   major counter and loads the re-encryption status register (RSR) with the
//   page and its old major counter. Whenever no CPU request can be served,
//   the controller re-encrypts the page's remaining lines one at a time:
//   read the line, decrypt with {old major, its minor}, re-encrypt with
//   {new major, 0}, and append line and counter like a flush while setting
//   the line's done bit. A CPU request to a line of that page whose done
//   bit is still 0 waits; other requests proceed (as in the paper).
//   Power failure (power_fail high): the register's content is dropped (its
//   flush was not acknowledged), the RSR image is appended to the write queue
//   for the reserved NVM line, and the queue drains; adr_done then rises. The
//   draining stands for the ADR battery backup. After reset the controller
//   reads the saved RSR image back and resumes any unfinished re-encryption.
//
// Interfaces. CPU side: req_valid/req_ready with req_write (1 = flush,
// 0 = read), a 28-bit line address and the 64-byte plaintext; ack_valid
// pulses when a flush retires, rd_valid/rd_line return read data. One
// request is handled at a time. NVM side: a write port fed by the write
// queue (valid/ready, 29-bit address whose top bit selects the counter
// region, line, source flag) and a read port (valid/ready, then
// nvm_rd_rsp_valid with the line; one read outstanding). ev_* are one-cycle
// event pulses for monitoring. `ready` is low during the counter cache's tag
// clearing and the RSR recovery after reset.
//
// Timing. The pad takes ENC_LATENCY cycles (80 = 40 ns at 2 GHz) and a
// counter-cache hit CC_LATENCY cycles (12), both from the paper. A flush
// that hits the counter cache and finds room in the queue is acknowledged
// CC_LATENCY + ENC_LATENCY + 6 cycles after the cycle in which it is
// accepted (98 cycles at the defaults).
//
// Choices of this design where the paper is silent: the handshakes, one
// request in flight, read forwarding from the write queue, the NVM address
// map (counter region, reserved RSR line), re-encryption done inside the
// controller rather than through the last-level cache, and CPU requests
// taking priority over re-encryption steps.
module secpm_mc
  import secpm_pkg::*;
#(
  parameter int WQ_DEPTH    = 32,
  parameter int CC_SETS     = 2048,
  parameter int CC_WAYS     = 8,
  parameter int CC_LATENCY  = 12,
  parameter int ENC_LATENCY = 80
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [KEY_BITS-1:0] key,
  output logic                ready,
  // CPU / last-level cache
  input  logic                req_valid,
  output logic                req_ready,
  input  logic                req_write,
  input  laddr_t              req_addr,
  input  line_t               req_data,
  output logic                ack_valid,
  output logic                rd_valid,
  output line_t               rd_line,
  // NVM write port
  output logic                nvm_wr_valid,
  input  logic                nvm_wr_ready,
  output naddr_t              nvm_wr_addr,
  output line_t               nvm_wr_line,
  output logic                nvm_wr_flag,
  // NVM read port
  output logic                nvm_rd_valid,
  input  logic                nvm_rd_ready,
  output naddr_t              nvm_rd_addr,
  input  logic                nvm_rd_rsp_valid,
  input  line_t               nvm_rd_rsp_line,
  // power failure (ADR)
  input  logic                power_fail,
  output logic                adr_done,
  // event pulses
  output logic                ev_cc_hit,
  output logic                ev_cc_miss,
  output logic                ev_cwr_merge,
  output logic                ev_overflow,
  output logic                ev_reenc_line,
  output logic                ev_rsr_wait,
  output logic                ev_wq_full,
  output logic                ev_fwd
);

  // ------------------------------------------------------------------
  // main sequencer state
  // ------------------------------------------------------------------
  typedef enum logic [4:0] {
    S_BOOT, S_REC_WAIT, S_IDLE,
    S_F_CC, S_F_CC_WAIT, S_F_INC, S_F_ENC, S_F_APP,
    S_R_CC, S_R_CC_WAIT, S_R_WAIT,
    S_E_CC, S_E_CC_WAIT, S_E_OLD, S_E_NEW, S_E_ENC, S_E_APP,
    S_ADR_SAVE, S_ADR_DRAIN, S_ADR_DONE
  } state_t;
  state_t state;

  // current request
  logic   cur_valid;
  laddr_t cur_addr;
  line_t  cur_data;
  line_t  ctr_line;     // counter line as read from the counter cache
  line_t  text;         // ciphertext read (reads, re-encryption)
  logic   got_pad, got_text;
  lidx_t  e_idx;        // line being re-encrypted
  logic   ovf_pending;  // the flush in progress overflowed its minor counter

  ppn_t  cur_ppn;
  lidx_t cur_idx;
  assign cur_ppn = cur_addr[LINE_ADDR_BITS-1:LIDX_BITS];
  assign cur_idx = cur_addr[LIDX_BITS-1:0];

  // ------------------------------------------------------------------
  // blocks
  // ------------------------------------------------------------------
  // counter cache
  logic  cc_init_done, cc_rd_valid, cc_rd_ready, cc_rsp_valid, cc_rsp_hit;
  ppn_t  cc_rd_ppn, cc_wr_ppn, cc_mem_ppn;
  line_t cc_rsp_line, cc_wr_line, cc_wt_line, cc_mem_line;
  logic  cc_wr_valid, cc_wr_ready, cc_wt_valid, cc_mem_valid, cc_mem_ready, cc_mem_rsp;
  naddr_t cc_wt_addr;

  counter_cache #(.SETS(CC_SETS), .WAYS(CC_WAYS), .LATENCY(CC_LATENCY)) u_cc (
    .clk, .rst_n,
    .init_done     (cc_init_done),
    .rd_valid      (cc_rd_valid),
    .rd_ready      (cc_rd_ready),
    .rd_ppn        (cc_rd_ppn),
    .rd_rsp_valid  (cc_rsp_valid),
    .rd_rsp_hit    (cc_rsp_hit),
    .rd_rsp_line   (cc_rsp_line),
    .wr_valid      (cc_wr_valid),
    .wr_ready      (cc_wr_ready),
    .wr_ppn        (cc_wr_ppn),
    .wr_line       (cc_wr_line),
    .wt_valid      (cc_wt_valid),
    .wt_addr       (cc_wt_addr),
    .wt_line       (cc_wt_line),
    .mem_rd_valid  (cc_mem_valid),
    .mem_rd_ready  (cc_mem_ready),
    .mem_rd_ppn    (cc_mem_ppn),
    .mem_rsp_valid (cc_mem_rsp),
    .mem_rsp_line  (cc_mem_line)
  );

  // counter increment (Ac++)
  line_t  inc_line;
  major_t inc_major;
  minor_t inc_minor;
  logic   inc_ovf;
  ctr_incr u_inc (
    .ctr_in    (ctr_line),
    .line_idx  (cur_idx),
    .ctr_out   (inc_line),
    .major_out (inc_major),
    .minor_out (inc_minor),
    .overflow  (inc_ovf)
  );

  // AES-ctr pad generator
  logic   otp_start, otp_done;
  laddr_t otp_addr;
  major_t otp_major;
  minor_t otp_minor;
  line_t  otp;
  otp_gen #(.LATENCY(ENC_LATENCY)) u_otp (
    .clk, .rst_n,
    .start     (otp_start),
    .key       (key),
    .line_addr (otp_addr),
    .major     (otp_major),
    .minor     (otp_minor),
    .busy      (),
    .done      (otp_done),
    .otp       (otp)
  );

  // re-encryption status register
  logic                    rsr_start, rsr_mark, rsr_restore, rsr_active;
  logic [RSR_PPN_BITS-1:0] rsr_ppn;
  major_t                  rsr_old_major;
  logic [PAGE_LINES-1:0]   rsr_done;
  lidx_t                   rsr_next;
  logic [159:0]            rsr_image;
  line_t                   ru_line;
  rsr u_rsr (
    .clk, .rst_n,
    .start            (rsr_start),
    .start_ppn        (RSR_PPN_BITS'(cur_ppn)),
    .start_old_major  (get_major(ctr_line)),
    .start_done_valid (1'b1),
    .start_done_idx   (cur_idx),
    .mark_done        (rsr_mark),
    .mark_idx         (e_idx),
    .restore          (rsr_restore),
    .restore_image    (ru_line[LINE_BITS-1 -: 160]),
    .active           (rsr_active),
    .ppn              (rsr_ppn),
    .old_major        (rsr_old_major),
    .done             (rsr_done),
    .next_idx         (rsr_next),
    .image            (rsr_image)
  );

  // atomic register (Sto(Ac), Sto(A), App(Ac+A))
  logic   ar_sto_data, ar_ctr_ready, ar_data_ready, ar_app_valid, ar_app_ready, ar_drop;
  naddr_t ar_data_addr, ar_app_ctr_addr, ar_app_data_addr;
  line_t  ar_data_line, ar_app_ctr_line, ar_app_data_line;
  atomic_reg u_reg (
    .clk, .rst_n,
    .drop           (ar_drop),
    .sto_ctr_valid  (cc_wt_valid),
    .sto_ctr_ready  (ar_ctr_ready),
    .sto_ctr_addr   (cc_wt_addr),
    .sto_ctr_line   (cc_wt_line),
    .sto_data_valid (ar_sto_data),
    .sto_data_ready (ar_data_ready),
    .sto_data_addr  (ar_data_addr),
    .sto_data_line  (ar_data_line),
    .app_valid      (ar_app_valid),
    .app_ready      (ar_app_ready),
    .app_ctr_addr   (ar_app_ctr_addr),
    .app_ctr_line   (ar_app_ctr_line),
    .app_data_addr  (ar_app_data_addr),
    .app_data_line  (ar_app_data_line)
  );

  // write queue
  logic   wq_push_valid, wq_push_ready, wq_push_ctr;
  naddr_t wq_push_data_addr;
  line_t  wq_push_data_line;
  naddr_t lk_addr;
  logic   lk_flag, lk_hit, wq_empty;
  line_t  lk_line;
  write_queue #(.DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n,
    .push_valid      (wq_push_valid),
    .push_ready      (wq_push_ready),
    .push_ctr_valid  (wq_push_ctr),
    .push_ctr_addr   (ar_app_ctr_addr),
    .push_ctr_line   (ar_app_ctr_line),
    .push_data_valid (wq_push_valid),
    .push_data_addr  (wq_push_data_addr),
    .push_data_line  (wq_push_data_line),
    .nvm_wr_valid    (nvm_wr_valid),
    .nvm_wr_ready    (nvm_wr_ready),
    .nvm_wr_addr     (nvm_wr_addr),
    .nvm_wr_line     (nvm_wr_line),
    .nvm_wr_flag     (nvm_wr_flag),
    .lk_addr         (lk_addr),
    .lk_flag         (lk_flag),
    .lk_hit          (lk_hit),
    .lk_line         (lk_line),
    .count           (),
    .empty           (wq_empty),
    .cwr_merge       (ev_cwr_merge)
  );

  // ------------------------------------------------------------------
  // write-queue input: the atomic register, or the RSR image under ADR
  // ------------------------------------------------------------------
  logic adr_push;
  assign adr_push          = (state == S_ADR_SAVE);
  assign wq_push_valid     = adr_push ? 1'b1 : ar_app_valid;
  assign wq_push_ctr       = !adr_push;
  assign wq_push_data_addr = adr_push ? RSR_SAVE_ADDR : ar_app_data_addr;
  assign wq_push_data_line = adr_push ? {rsr_image, {(LINE_BITS-160){1'b0}}}
                                      : ar_app_data_line;
  assign ar_app_ready      = wq_push_ready && !adr_push && !power_fail;
  assign ar_drop           = power_fail;
  assign ev_wq_full        = ar_app_valid && !wq_push_ready;

  // ------------------------------------------------------------------
  // read unit: NVM reads with forwarding from the write queue
  // (counter-cache fills first, then the sequencer's reads)
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {RU_IDLE, RU_REQ, RU_WAIT} ru_state_t;
  ru_state_t ru_state;
  logic   ru_req, ru_owner_cc, ru_done;
  naddr_t ru_req_addr;
  logic   ru_req_flag;
  logic   seq_rd;           // sequencer read strobe
  naddr_t seq_rd_addr;
  logic   seq_rd_flag;

  assign ru_req       = (ru_state == RU_IDLE) && (cc_mem_valid || seq_rd);
  assign ru_req_addr  = cc_mem_valid ? ctr_naddr(cc_mem_ppn) : seq_rd_addr;
  assign ru_req_flag  = cc_mem_valid ? FLAG_CTR : seq_rd_flag;
  assign lk_addr      = ru_req_addr;
  assign lk_flag      = ru_req_flag;
  assign cc_mem_ready = (ru_state == RU_IDLE);
  assign cc_mem_rsp   = ru_done && ru_owner_cc;
  assign cc_mem_line  = ru_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ru_state     <= RU_IDLE;
      ru_owner_cc  <= 1'b0;
      ru_done      <= 1'b0;
      ru_line      <= '0;
      nvm_rd_valid <= 1'b0;
      nvm_rd_addr  <= '0;
      ev_fwd       <= 1'b0;
    end else begin
      ru_done <= 1'b0;
      ev_fwd  <= 1'b0;
      unique case (ru_state)
        RU_IDLE: if (ru_req) begin
          ru_owner_cc <= cc_mem_valid;
          if (lk_hit) begin
            ru_done <= 1'b1;
            ru_line <= lk_line;
            ev_fwd  <= 1'b1;
          end else begin
            nvm_rd_valid <= 1'b1;
            nvm_rd_addr  <= ru_req_addr;
            ru_state     <= RU_REQ;
          end
        end
        RU_REQ: if (nvm_rd_ready) begin
          nvm_rd_valid <= 1'b0;
          ru_state     <= RU_WAIT;
        end
        RU_WAIT: if (nvm_rd_rsp_valid) begin
          ru_done  <= 1'b1;
          ru_line  <= nvm_rd_rsp_line;
          ru_state <= RU_IDLE;
        end
        default: ru_state <= RU_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------
  // sequencer
  // ------------------------------------------------------------------
  // may the incoming CPU request be served now?
  logic req_blocked, can_accept;
  assign req_blocked = rsr_active && (RSR_PPN_BITS'(req_addr[LINE_ADDR_BITS-1:LIDX_BITS]) == rsr_ppn)
                       && !rsr_done[req_addr[LIDX_BITS-1:0]];
  assign can_accept  = (state == S_IDLE) && !cur_valid && !power_fail && !req_blocked;
  assign req_ready   = can_accept;
  assign ready       = (state != S_BOOT) && (state != S_REC_WAIT);
  assign adr_done    = (state == S_ADR_DONE);

  // line being re-encrypted
  ppn_t   e_ppn;
  laddr_t e_addr;
  assign e_ppn  = ppn_t'(rsr_ppn);
  assign e_addr = {e_ppn, e_idx};

  // RSR updates happen in the cycle of the append, so that the RSR and the
  // write queue always agree when ADR saves them.
  assign rsr_start = (state == S_F_APP) && ar_app_valid && ar_app_ready && ovf_pending;
  assign rsr_mark  = (state == S_E_APP) && ar_app_valid && ar_app_ready;
  // the saved image is loaded in the cycle it arrives
  assign rsr_restore = (state == S_REC_WAIT) && ru_done && !ru_owner_cc && !power_fail;

  always_comb begin
    cc_rd_valid = (state == S_F_CC) || (state == S_R_CC) || (state == S_E_CC);
    cc_rd_ppn   = (state == S_E_CC) ? e_ppn : cur_ppn;
    ev_cc_hit   = cc_rsp_valid && cc_rsp_hit;
    ev_cc_miss  = cc_rsp_valid && !cc_rsp_hit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_BOOT;
      cur_valid     <= 1'b0;
      cur_addr      <= '0;
      cur_data      <= '0;
      ctr_line      <= '0;
      text          <= '0;
      got_pad       <= 1'b0;
      got_text      <= 1'b0;
      e_idx         <= '0;
      otp_start     <= 1'b0;
      otp_addr      <= '0;
      otp_major     <= '0;
      otp_minor     <= '0;
      cc_wr_valid   <= 1'b0;
      cc_wr_ppn     <= '0;
      cc_wr_line    <= '0;
      ar_sto_data   <= 1'b0;
      ar_data_addr  <= '0;
      ar_data_line  <= '0;
      ovf_pending   <= 1'b0;
      seq_rd        <= 1'b0;
      seq_rd_addr   <= '0;
      seq_rd_flag   <= FLAG_CPU;
      ack_valid     <= 1'b0;
      rd_valid      <= 1'b0;
      rd_line       <= '0;
      ev_overflow   <= 1'b0;
      ev_reenc_line <= 1'b0;
      ev_rsr_wait   <= 1'b0;
    end else begin
      otp_start     <= 1'b0;
      cc_wr_valid   <= 1'b0;
      ar_sto_data   <= 1'b0;
      ack_valid     <= 1'b0;
      rd_valid      <= 1'b0;
      ev_overflow   <= 1'b0;
      ev_reenc_line <= 1'b0;
      ev_rsr_wait   <= 1'b0;
      if (seq_rd && ru_state == RU_IDLE && !cc_mem_valid) seq_rd <= 1'b0;
      if (otp_done) got_pad <= 1'b1;
      if (ru_done && !ru_owner_cc) begin
        got_text <= 1'b1;
        text     <= ru_line;
      end

      if (power_fail && state != S_ADR_SAVE && state != S_ADR_DRAIN && state != S_ADR_DONE) begin
        // ADR: what is not yet in the write queue is lost
        state     <= S_ADR_SAVE;
        cur_valid <= 1'b0;
      end else begin
        unique case (state)
          // ---------------- boot and RSR recovery ----------------
          S_BOOT: if (cc_init_done) begin
            seq_rd      <= 1'b1;
            seq_rd_addr <= RSR_SAVE_ADDR;
            seq_rd_flag <= FLAG_CPU;
            got_text    <= 1'b0;
            state       <= S_REC_WAIT;
          end
          S_REC_WAIT: if (rsr_restore) state <= S_IDLE;
          // ---------------- dispatch ----------------
          S_IDLE: begin
            got_pad  <= 1'b0;
            got_text <= 1'b0;
            if (req_valid && can_accept) begin
              cur_valid <= 1'b1;
              cur_addr  <= req_addr;
              cur_data  <= req_data;
              state     <= req_write ? S_F_CC : S_R_CC;
            end else if (cur_valid && !rsr_active) begin
              // a flush that overflowed while the RSR was busy
              state <= S_F_CC;
            end else if (rsr_active) begin
              ev_rsr_wait <= req_valid && req_blocked;
              e_idx       <= rsr_next;
              state       <= S_E_CC;
            end
          end
          // ---------------- flush ----------------
          S_F_CC:      if (cc_rd_ready) state <= S_F_CC_WAIT;
          S_F_CC_WAIT: if (cc_rsp_valid) begin
            ctr_line <= cc_rsp_line;
            state    <= S_F_INC;
          end
          S_F_INC: begin
            if (inc_ovf && rsr_active) begin
              state <= S_IDLE;                 // wait for the RSR to be freed
            end else if (cc_wr_ready) begin
              otp_start   <= 1'b1;
              otp_addr    <= cur_addr;
              otp_major   <= inc_major;
              otp_minor   <= inc_minor;
              cc_wr_valid <= 1'b1;             // CWT: cache + copy to register
              cc_wr_ppn   <= cur_ppn;
              cc_wr_line  <= inc_line;
              ovf_pending <= inc_ovf;
              ev_overflow <= inc_ovf;
              state <= S_F_ENC;
            end
          end
          S_F_ENC: if (otp_done) begin
            ar_sto_data  <= 1'b1;
            ar_data_addr <= data_naddr(cur_addr);
            ar_data_line <= cur_data ^ otp;
            state        <= S_F_APP;
          end
          S_F_APP: if (ar_app_valid && ar_app_ready) begin
            ack_valid <= 1'b1;
            cur_valid <= 1'b0;
            state     <= S_IDLE;
          end
          // ---------------- read ----------------
          S_R_CC:      if (cc_rd_ready) state <= S_R_CC_WAIT;
          S_R_CC_WAIT: if (cc_rsp_valid) begin
            otp_start   <= 1'b1;
            otp_addr    <= cur_addr;
            otp_major   <= get_major(cc_rsp_line);
            otp_minor   <= get_minor(cc_rsp_line, cur_idx);
            seq_rd      <= 1'b1;
            seq_rd_addr <= data_naddr(cur_addr);
            seq_rd_flag <= FLAG_CPU;
            state       <= S_R_WAIT;
          end
          S_R_WAIT: if (got_pad && got_text) begin
            rd_valid  <= 1'b1;
            rd_line   <= text ^ otp;
            cur_valid <= 1'b0;
            state     <= S_IDLE;
          end
          // ---------------- page re-encryption, one line ----------------
          S_E_CC:      if (cc_rd_ready) state <= S_E_CC_WAIT;
          S_E_CC_WAIT: if (cc_rsp_valid) begin
            ctr_line    <= cc_rsp_line;
            otp_start   <= 1'b1;                 // old pad
            otp_addr    <= e_addr;
            otp_major   <= rsr_old_major;
            otp_minor   <= get_minor(cc_rsp_line, e_idx);
            seq_rd      <= 1'b1;
            seq_rd_addr <= data_naddr(e_addr);
            seq_rd_flag <= FLAG_CPU;
            state       <= S_E_OLD;
          end
          S_E_OLD: if (got_pad && got_text && cc_wr_ready) begin
            text        <= text ^ otp;           // plaintext
            got_pad     <= 1'b0;
            otp_start   <= 1'b1;                 // new pad
            otp_major   <= get_major(ctr_line);
            otp_minor   <= '0;
            cc_wr_valid <= 1'b1;
            cc_wr_ppn   <= e_ppn;
            cc_wr_line  <= set_minor(ctr_line, e_idx, '0);
            state       <= S_E_NEW;
          end
          S_E_NEW: state <= S_E_ENC;
          S_E_ENC: if (got_pad) begin
            ar_sto_data  <= 1'b1;
            ar_data_addr <= data_naddr(e_addr);
            ar_data_line <= text ^ otp;
            state        <= S_E_APP;
          end
          S_E_APP: if (ar_app_valid && ar_app_ready) begin
            ev_reenc_line <= 1'b1;
            state         <= S_IDLE;
          end
          // ---------------- power failure ----------------
          S_ADR_SAVE:  if (wq_push_ready) state <= S_ADR_DRAIN;
          S_ADR_DRAIN: if (wq_empty) state <= S_ADR_DONE;
          S_ADR_DONE:  ;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // The write-through copy must always find the counter half of the register
  // free; otherwise a counter update could be lost.
  always_ff @(posedge clk) begin
    if (cc_wt_valid) assert (ar_ctr_ready) else $error("secpm_mc: register busy on Sto(Ac)");
    if (ar_sto_data) assert (ar_data_ready) else $error("secpm_mc: register busy on Sto(A)");
  end

endmodule
