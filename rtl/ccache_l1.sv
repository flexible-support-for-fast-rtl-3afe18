// ccache_l1: one core's L1 data cache extended for CCache, with its merge
// controller, source buffer, merge registers and merge function register file.
//
// What it does. Ordinary loads and stores use the L1 as a write-back cache in
// front of the shared LLC. c_read and c_write privatize a line on demand: on an
// L1 miss the line is fetched from the LLC without any coherence action,
// written into the L1 with its CCache bit set and its merge type recorded, and
// copied into the source buffer as the source copy. Later c_reads and c_writes
// hit the L1 copy, which becomes the updated copy. A merge walks the source
// buffer; for each entry whose L1 line is dirty it locks the LLC line, loads
// merge register 1 with the LLC value, 2 with the source value and 3 with the
// updated value, asks the core to run the merge function whose pointer the
// line's merge type selects in the MFRF, writes register 1 back to the LLC and
// unlocks it, then drops the source entry and the L1 line. Clean lines are
// dropped without a merge (dirty-merge optimization).
//
// Replacement. A line with its CCache bit set may not be evicted, unless
// soft_merge has set its mergeable bit; evicting such a line first runs the
// merge above (merge-on-evict). A c_read/c_write to a mergeable line clears its
// mergeable bit. A c_read/c_write miss that finds the source buffer full frees
// an entry the same way, by merging a mergeable line. If no way of the set (or
// no source buffer entry) can be freed, the request waits: this is the
// deadlock the programmer must avoid by touching at most ways-1 CData lines
// between merges.
//
// Interface.
//   req_valid/req_ready/req: one operation (ccache_pkg::op_e) at a time.
//   resp_valid/resp_rdata:   one-cycle completion; rdata for loads and c_reads.
//   mf_call/mf_ptr/mf_line/mf_done: while mf_call is high the core runs the
//     merge function at mf_ptr and pulses mf_done when it returns; during the
//     call it uses the mreg_* ports (rd_mreg/wr_mreg).
//   llc_req/llc_resp: this core's port on llc_lock_store.
//   events: one-cycle pulses of the mechanisms above.
// Timing: a hit answers HIT_CYCLES cycles after the request is taken (4 in
// the paper). Other operations answer no earlier than that.
//
// Following the paper: CCache bit, mergeable bit and two-bit merge type per
// line; 8-way, 32 KB, 64-byte lines; 8-entry source buffer; 4-entry MFRF; the
// merge sequence of lock, load three merge registers, call, write back,
// unlock, invalidate source entry, clear CCache bit; soft_merge; merge-on-evict;
// skipping clean lines. Own choices: the L1 is a single-level cache directly
// in front of the LLC (no L2, no MESI directory, so ordinary data is not kept
// coherent between cores); soft_merge marks every CCache line of the L1, which
// is the same set of lines as the valid source buffer entries; a merged line is
// dropped from the L1 rather than kept as a clean copy; round-robin replacement.
module ccache_l1
  import ccache_pkg::*;
#(
  parameter int unsigned WAYS       = 8,
  parameter int unsigned SIZE_BYTES = 32 * 1024,
  parameter int unsigned SB_ENTRIES = 8,
  parameter int unsigned HIT_CYCLES = 4,
  localparam int unsigned SETS   = SIZE_BYTES / (LINE_BYTES * WAYS),
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned TAG_W  = LADDR_W - SET_W,
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned SBI_W  = (SB_ENTRIES > 1) ? $clog2(SB_ENTRIES) : 1,
  localparam int unsigned LAT_W  = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  // core requests
  input  logic           req_valid,
  output logic           req_ready,
  input  core_req_t      req,
  output logic           resp_valid,
  output word_t          resp_rdata,
  // merge function call
  output logic           mf_call,
  output ptr_t           mf_ptr,
  output laddr_t         mf_line,
  input  logic           mf_done,
  // rd_mreg / wr_mreg
  input  mreg_e          mreg_rd_reg,
  input  widx_t          mreg_rd_word,
  output word_t          mreg_rd_data,
  input  logic           mreg_wr_en,
  input  mreg_e          mreg_wr_reg,
  input  widx_t          mreg_wr_word,
  input  word_t          mreg_wr_data,
  // LLC port
  output llc_req_t       llc_req,
  input  llc_resp_t      llc_resp,
  // observation
  output ccache_events_t events
);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_WB, S_FILL, S_MG_START, S_MG_LOCK, S_MG_CALL, S_MG_WB,
    S_MSCAN, S_RESP
  } state_e;

  // ---------------------------------------------------------------- state
  state_e               state_q;
  core_req_t            r_q;
  logic [LAT_W-1:0]     lat_q;
  logic                 filled_q;
  word_t                rdata_q;

  logic [TAG_W-1:0]     tag_q [SETS][WAYS];
  logic [WAYS-1:0]      v_q   [SETS];   // valid
  logic [WAYS-1:0]      d_q   [SETS];   // dirty
  logic [WAYS-1:0]      c_q   [SETS];   // CCache bit
  logic [WAYS-1:0]      m_q   [SETS];   // mergeable bit
  mtype_t               mt_q  [SETS][WAYS];
  logic [WAY_W-1:0]     rr_q  [SETS];
  line_t                data_q[SETS][WAYS];

  // merge / eviction target
  logic [SET_W-1:0]     mg_set_q;
  logic [WAY_W-1:0]     mg_way_q;
  logic [SBI_W-1:0]     mg_sbi_q;
  logic                 mg_ret_scan_q;   // return to S_MSCAN (else S_LOOKUP)
  logic [WAY_W-1:0]     wb_way_q;
  logic [WAY_W-1:0]     fill_way_q;

  // ------------------------------------------------------- request decode
  logic             is_cop, is_write;
  logic [SET_W-1:0] r_set;
  logic [TAG_W-1:0] r_tag;
  assign is_cop   = (r_q.op == OP_CREAD) || (r_q.op == OP_CWRITE);
  assign is_write = (r_q.op == OP_STORE) || (r_q.op == OP_CWRITE);
  assign r_set    = r_q.line[SET_W-1:0];
  assign r_tag    = r_q.line[LADDR_W-1:SET_W];

  // --------------------------------------------------------- tag lookup
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (v_q[r_set][w] && tag_q[r_set][w] == r_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
  end

  // ---------------------------------------------------- victim selection
  // Invalid way first; otherwise the first way at or after the set's
  // round-robin pointer that is ordinary or CCache-and-mergeable.
  logic             inv_found, vict_found;
  logic [WAY_W-1:0] inv_way, vict_way;
  always_comb begin
    inv_found  = 1'b0;
    inv_way    = '0;
    vict_found = 1'b0;
    vict_way   = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!v_q[r_set][w]) begin
        inv_found = 1'b1;
        inv_way   = WAY_W'(w);
      end
    end
    for (int k = 0; k < WAYS; k++) begin
      int unsigned w;
      w = (int'(rr_q[r_set]) + k) % WAYS;
      if (!vict_found && v_q[r_set][w] && (!c_q[r_set][w] || m_q[r_set][w])) begin
        vict_found = 1'b1;
        vict_way   = WAY_W'(w);
      end
    end
  end

  laddr_t vict_line;
  assign vict_line = {tag_q[r_set][vict_way], r_set};

  // ------------------------------------------------------- source buffer
  logic                  sb_hit, sb_full, sb_alloc, sb_inv, sb_flash;
  logic [SBI_W-1:0]      sb_hit_idx, sb_free_idx;
  logic [SB_ENTRIES-1:0] sb_valid;
  laddr_t                sb_line [SB_ENTRIES];
  line_t                 sb_rd_data;
  laddr_t                sb_lookup_line;

  assign sb_lookup_line = (state_q == S_FILL) ? r_q.line : vict_line;
  assign sb_alloc = (state_q == S_FILL) && llc_resp.valid && !llc_resp.nack && is_cop;
  assign sb_inv   = ((state_q == S_MG_START) && !d_q[mg_set_q][mg_way_q]) ||
                    ((state_q == S_MG_WB) && llc_resp.valid);
  assign sb_flash = (state_q == S_MSCAN) && (sb_valid == '0);

  source_buffer #(.ENTRIES(SB_ENTRIES)) u_sb (
    .clk, .rst_n,
    .lookup_line (sb_lookup_line),
    .lookup_hit  (sb_hit),
    .lookup_idx  (sb_hit_idx),
    .alloc_en    (sb_alloc),
    .alloc_line  (r_q.line),
    .alloc_data  (llc_resp.rdata),
    .full        (sb_full),
    .free_idx    (sb_free_idx),
    .inv_en      (sb_inv),
    .inv_idx     (mg_sbi_q),
    .flash_clear (sb_flash),
    .rd_idx      (mg_sbi_q),
    .rd_data     (sb_rd_data),
    .valid       (sb_valid),
    .entry_line  (sb_line)
  );

  // Where each source buffer entry's line sits in the L1 (it always does).
  logic [SET_W-1:0] sbe_set [SB_ENTRIES];
  logic [WAY_W-1:0] sbe_way [SB_ENTRIES];
  logic [SB_ENTRIES-1:0] sbe_mergeable;
  always_comb begin
    for (int e = 0; e < SB_ENTRIES; e++) begin
      sbe_set[e]       = sb_line[e][SET_W-1:0];
      sbe_way[e]       = '0;
      sbe_mergeable[e] = 1'b0;
      for (int w = 0; w < WAYS; w++) begin
        if (v_q[sbe_set[e]][w] && tag_q[sbe_set[e]][w] == sb_line[e][LADDR_W-1:SET_W]) begin
          sbe_way[e]       = WAY_W'(w);
          sbe_mergeable[e] = sb_valid[e] && m_q[sbe_set[e]][w];
        end
      end
    end
  end

  // first valid entry (for merge) and first mergeable entry (to free one)
  logic             first_valid_found, first_merg_found;
  logic [SBI_W-1:0] first_valid, first_merg;
  always_comb begin
    first_valid_found = 1'b0;
    first_valid       = '0;
    first_merg_found  = 1'b0;
    first_merg        = '0;
    for (int e = SB_ENTRIES - 1; e >= 0; e--) begin
      if (sb_valid[e]) begin
        first_valid_found = 1'b1;
        first_valid       = SBI_W'(e);
      end
      if (sbe_mergeable[e]) begin
        first_merg_found = 1'b1;
        first_merg       = SBI_W'(e);
      end
    end
  end

  // ---------------------------------------------------------------- MFRF
  logic mfrf_we;
  assign mfrf_we = (state_q == S_IDLE) && req_valid && (req.op == OP_MERGE_INIT);

  merge_fn_regfile #(.ENTRIES(N_MERGE_TYPES)) u_mfrf (
    .clk, .rst_n,
    .we    (mfrf_we),
    .waddr (req.idx),
    .wdata (req.wdata),
    .raddr (mt_q[mg_set_q][mg_way_q]),
    .rdata (mf_ptr)
  );

  // ----------------------------------------------------- merge registers
  logic  mreg_load;
  line_t mreg_mem_line;
  assign mreg_load = (state_q == S_MG_LOCK) && llc_resp.valid && !llc_resp.nack;

  merge_registers u_mregs (
    .clk,
    .load     (mreg_load),
    .load_mem (llc_resp.rdata),
    .load_src (sb_rd_data),
    .load_upd (data_q[mg_set_q][mg_way_q]),
    .rd_reg   (mreg_rd_reg),
    .rd_word  (mreg_rd_word),
    .rd_data  (mreg_rd_data),
    .wr_en    (mreg_wr_en && mf_call),
    .wr_reg   (mreg_wr_reg),
    .wr_word  (mreg_wr_word),
    .wr_data  (mreg_wr_data),
    .mem_line (mreg_mem_line)
  );

  laddr_t mg_line;
  assign mg_line = {tag_q[mg_set_q][mg_way_q], mg_set_q};
  assign mf_call = (state_q == S_MG_CALL);
  assign mf_line = mg_line;

  // ------------------------------------------------------------ LLC port
  always_comb begin
    llc_req = '0;
    unique case (state_q)
      S_WB: begin
        llc_req.valid = 1'b1;
        llc_req.op    = LLC_WRITE;
        llc_req.line  = {tag_q[r_set][wb_way_q], r_set};
        llc_req.wdata = data_q[r_set][wb_way_q];
      end
      S_FILL: begin
        llc_req.valid = 1'b1;
        llc_req.op    = LLC_READ;
        llc_req.line  = r_q.line;
      end
      S_MG_LOCK: begin
        llc_req.valid = 1'b1;
        llc_req.op    = LLC_LOCK_READ;
        llc_req.line  = mg_line;
      end
      S_MG_WB: begin
        llc_req.valid = 1'b1;
        llc_req.op    = LLC_WRITE_UNLOCK;
        llc_req.line  = mg_line;
        llc_req.wdata = mreg_mem_line;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------- core response
  assign req_ready  = (state_q == S_IDLE);
  assign resp_valid = (state_q == S_RESP) && (lat_q >= LAT_W'(HIT_CYCLES));
  assign resp_rdata = rdata_q;

  // ------------------------------------------------------------ data array
  always_ff @(posedge clk) begin
    if (state_q == S_FILL && llc_resp.valid && !llc_resp.nack) begin
      data_q[r_set][fill_way_q] <= llc_resp.rdata;
    end else if (state_q == S_LOOKUP && hit && is_write) begin
      data_q[r_set][hit_way][r_q.word*WORD_BITS +: WORD_BITS] <= r_q.wdata;
    end
  end

  // ------------------------------------------------------------ controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      r_q           <= '0;
      lat_q         <= '0;
      filled_q      <= 1'b0;
      rdata_q       <= '0;
      mg_set_q      <= '0;
      mg_way_q      <= '0;
      mg_sbi_q      <= '0;
      mg_ret_scan_q <= 1'b0;
      wb_way_q      <= '0;
      fill_way_q    <= '0;
      events        <= '0;
      for (int s = 0; s < SETS; s++) begin
        v_q[s]  <= '0;
        d_q[s]  <= '0;
        c_q[s]  <= '0;
        m_q[s]  <= '0;
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          tag_q[s][w] <= '0;
          mt_q[s][w]  <= '0;
        end
      end
    end else begin
      events <= '0;
      if (lat_q != '1) lat_q <= lat_q + 1'b1;

      unique case (state_q)
        // ------------------------------------------------------------
        S_IDLE: if (req_valid) begin
          r_q      <= req;
          lat_q    <= LAT_W'(1);
          filled_q <= 1'b0;
          unique case (req.op)
            OP_MERGE_INIT: state_q <= S_RESP;
            OP_SOFT_MERGE: begin
              for (int s = 0; s < SETS; s++) m_q[s] <= m_q[s] | (c_q[s] & v_q[s]);
              events.soft_merge <= 1'b1;
              state_q <= S_RESP;
            end
            OP_MERGE: state_q <= S_MSCAN;
            default:  state_q <= S_LOOKUP;
          endcase
        end
        // ------------------------------------------------------------
        S_LOOKUP: begin
          if (hit) begin
            rdata_q <= data_q[r_set][hit_way][r_q.word*WORD_BITS +: WORD_BITS];
            if (is_cop) begin
              m_q[r_set][hit_way]  <= 1'b0;
              mt_q[r_set][hit_way] <= r_q.idx;
              events.mergeable_reset <= m_q[r_set][hit_way];
              events.cop_hit         <= !filled_q;
            end
            if (is_write) d_q[r_set][hit_way] <= 1'b1;
            state_q <= S_RESP;
          end else if (is_cop && sb_full) begin
            if (first_merg_found) begin
              mg_set_q      <= sbe_set[first_merg];
              mg_way_q      <= sbe_way[first_merg];
              mg_sbi_q      <= first_merg;
              mg_ret_scan_q <= 1'b0;
              events.evict_merge <= 1'b1;
              state_q       <= S_MG_START;
            end else begin
              events.cdata_stall <= 1'b1;
            end
          end else if (inv_found) begin
            fill_way_q <= inv_way;
            state_q    <= S_FILL;
          end else if (vict_found) begin
            rr_q[r_set] <= WAY_W'((int'(vict_way) + 1) % WAYS);
            if (c_q[r_set][vict_way]) begin
              mg_set_q      <= r_set;
              mg_way_q      <= vict_way;
              mg_sbi_q      <= sb_hit_idx;
              mg_ret_scan_q <= 1'b0;
              events.evict_merge <= 1'b1;
              state_q       <= S_MG_START;
            end else if (d_q[r_set][vict_way]) begin
              wb_way_q <= vict_way;
              state_q  <= S_WB;
            end else begin
              v_q[r_set][vict_way] <= 1'b0;
            end
          end else begin
            events.cdata_stall <= 1'b1;
          end
        end
        // ------------------------------------------------------------
        S_WB: if (llc_resp.valid) begin
          if (llc_resp.nack) begin
            events.lock_retry <= 1'b1;
          end else begin
            v_q[r_set][wb_way_q] <= 1'b0;
            d_q[r_set][wb_way_q] <= 1'b0;
            events.writeback     <= 1'b1;
            state_q              <= S_LOOKUP;
          end
        end
        // ------------------------------------------------------------
        S_FILL: if (llc_resp.valid) begin
          if (llc_resp.nack) begin
            events.lock_retry <= 1'b1;
          end else begin
            tag_q[r_set][fill_way_q] <= r_tag;
            v_q[r_set][fill_way_q]   <= 1'b1;
            d_q[r_set][fill_way_q]   <= 1'b0;
            c_q[r_set][fill_way_q]   <= is_cop;
            m_q[r_set][fill_way_q]   <= 1'b0;
            mt_q[r_set][fill_way_q]  <= r_q.idx;
            filled_q                 <= 1'b1;
            events.cop_miss          <= is_cop;
            state_q                  <= S_LOOKUP;
          end
        end
        // ------------------------------------------------------------
        S_MG_START: begin
          if (d_q[mg_set_q][mg_way_q]) begin
            state_q <= S_MG_LOCK;
          end else begin
            v_q[mg_set_q][mg_way_q] <= 1'b0;
            c_q[mg_set_q][mg_way_q] <= 1'b0;
            m_q[mg_set_q][mg_way_q] <= 1'b0;
            events.merge_clean      <= 1'b1;
            state_q <= mg_ret_scan_q ? S_MSCAN : S_LOOKUP;
          end
        end
        S_MG_LOCK: if (llc_resp.valid) begin
          if (llc_resp.nack) events.lock_retry <= 1'b1;
          else               state_q <= S_MG_CALL;
        end
        S_MG_CALL: if (mf_done) state_q <= S_MG_WB;
        S_MG_WB: if (llc_resp.valid) begin
          v_q[mg_set_q][mg_way_q] <= 1'b0;
          d_q[mg_set_q][mg_way_q] <= 1'b0;
          c_q[mg_set_q][mg_way_q] <= 1'b0;
          m_q[mg_set_q][mg_way_q] <= 1'b0;
          events.merge_dirty      <= 1'b1;
          state_q <= mg_ret_scan_q ? S_MSCAN : S_LOOKUP;
        end
        // ------------------------------------------------------------
        S_MSCAN: begin
          if (!first_valid_found) begin
            state_q <= S_RESP;
          end else begin
            mg_set_q      <= sbe_set[first_valid];
            mg_way_q      <= sbe_way[first_valid];
            mg_sbi_q      <= first_valid;
            mg_ret_scan_q <= 1'b1;
            state_q       <= S_MG_START;
          end
        end
        // ------------------------------------------------------------
        S_RESP: if (lat_q >= LAT_W'(HIT_CYCLES)) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ assertions
  // CData and ordinary data never share a line.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_LOOKUP && hit) |-> (c_q[r_set][hit_way] == is_cop))
    else $error("ccache_l1: line %0h accessed both as CData and as ordinary data", r_q.line);
  // An evicted CCache line always has its source copy.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_LOOKUP && !hit && !(is_cop && sb_full) && !inv_found &&
                    vict_found && c_q[r_set][vict_way]) |-> sb_hit)
    else $error("ccache_l1: CCache line without source buffer entry");
  // rd_mreg / wr_mreg only inside a merge function.
  assert property (@(posedge clk) disable iff (!rst_n) mreg_wr_en |-> mf_call)
    else $error("ccache_l1: wr_mreg outside a merge function");
  assert property (@(posedge clk) disable iff (!rst_n) mf_done |-> mf_call)
    else $error("ccache_l1: mf_done without a call");

endmodule
