// tb_ccache_l1: self-checking test of one core's CCache unit (L1 with CCache
// bits, source buffer, merge registers, MFRF and merge controller) in front of
// an LLC.
//
// A small L1 (4 sets x 4 ways) and a 6-entry source buffer make conflicts easy
// to reach. The test plays the core: it issues operations and, when the unit
// calls a merge function, runs it word by word through rd_mreg/wr_mreg. Three
// software merge functions are registered: add the difference (ptr 0x1000),
// saturating add with ceiling 100 (0x2000) and bitwise OR (0x3000). Other
// cores' merges are imitated by writing the LLC directly. Checked: c_read miss
// and hit values, the 4-cycle hit latency, merge results, skipping clean
// lines, saturating and OR merges, ordinary store/load and write-back,
// soft_merge with merge-on-evict, freeing a full source buffer, clearing of
// the mergeable bit, retrying a locked LLC line, and the stall when a set is
// full of CData.
module tb_ccache_l1;
  import ccache_pkg::*;
  localparam int unsigned WAYS = 4, SETS = 4, SBN = 6, HIT = 4;
  localparam word_t SAT_MAX = 64'd100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, mf_call, mf_done, mreg_wr_en;
  core_req_t req;
  word_t resp_rdata, mreg_rd_data, mreg_wr_data;
  ptr_t mf_ptr;
  laddr_t mf_line;
  mreg_e mreg_rd_reg, mreg_wr_reg;
  widx_t mreg_rd_word, mreg_wr_word;
  llc_req_t  llc_req  [1];
  llc_resp_t llc_resp [1];
  ccache_events_t events;

  ccache_l1 #(.WAYS(WAYS), .SIZE_BYTES(WAYS * SETS * LINE_BYTES), .SB_ENTRIES(SBN),
              .HIT_CYCLES(HIT)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_rdata,
    .mf_call, .mf_ptr, .mf_line, .mf_done,
    .mreg_rd_reg, .mreg_rd_word, .mreg_rd_data,
    .mreg_wr_en, .mreg_wr_reg, .mreg_wr_word, .mreg_wr_data,
    .llc_req (llc_req[0]), .llc_resp (llc_resp[0]), .events);

  llc_lock_store #(.N_PORTS(1), .LINES(1024), .HIT_CYCLES(2)) u_llc (
    .clk, .rst_n, .req (llc_req), .resp (llc_resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------- event counts
  // Counted only after reset is released: before that the outputs hold
  // arbitrary start-up values.
  int n_hit = 0, n_miss = 0, n_mreset = 0, n_soft = 0, n_mdirty = 0, n_mclean = 0,
      n_evict = 0, n_retry = 0, n_wb = 0, n_stall = 0;
  always @(posedge clk) if (rst_n) begin
    n_hit    += int'(events.cop_hit);
    n_miss   += int'(events.cop_miss);
    n_mreset += int'(events.mergeable_reset);
    n_soft   += int'(events.soft_merge);
    n_mdirty += int'(events.merge_dirty);
    n_mclean += int'(events.merge_clean);
    n_evict  += int'(events.evict_merge);
    n_retry  += int'(events.lock_retry);
    n_wb     += int'(events.writeback);
    n_stall  += int'(events.cdata_stall);
  end

  // ------------------------------------------------ software merge functions
  int n_calls = 0;
  initial begin
    word_t m, s, u, n;
    mf_done = 0; mreg_wr_en = 0; mreg_rd_reg = MREG_MEM; mreg_rd_word = 0;
    mreg_wr_reg = MREG_MEM; mreg_wr_word = 0; mreg_wr_data = 0;
    forever begin
      @(negedge clk);
      if (mf_call) begin
        n_calls++;
        for (int w = 0; w < WORDS_PER_LINE; w++) begin
          mreg_rd_word = widx_t'(w);
          mreg_rd_reg = MREG_MEM; #1 m = mreg_rd_data;
          mreg_rd_reg = MREG_SRC; #1 s = mreg_rd_data;
          mreg_rd_reg = MREG_UPD; #1 u = mreg_rd_data;
          case (mf_ptr)
            64'h1000: n = m + (u - s);
            64'h2000: begin n = m + (u - s); if (n > SAT_MAX) n = SAT_MAX; end
            default:  n = m | u;
          endcase
          mreg_wr_en = 1; mreg_wr_reg = MREG_MEM; mreg_wr_word = widx_t'(w); mreg_wr_data = n;
          @(negedge clk);
          mreg_wr_en = 0;
        end
        mf_done = 1;
        @(negedge clk);
        mf_done = 0;
      end
    end
  end

  // -------------------------------------------------------------- core ops
  task automatic op(input op_e o, input laddr_t line, input int word, input word_t wdata,
                    input int idx, output word_t rdata, output int cycles);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1;
    req = '{op: o, line: line, word: widx_t'(word), wdata: wdata, idx: mtype_t'(idx)};
    @(negedge clk);
    req_valid = 0;
    cycles = 1;
    while (!resp_valid) begin
      @(negedge clk);
      cycles++;
    end
    rdata = resp_rdata;
  endtask

  function automatic line_t fill(input word_t v);
    line_t l;
    for (int w = 0; w < WORDS_PER_LINE; w++) l[w*64 +: 64] = v;
    return l;
  endfunction

  function automatic word_t llc_word(input int line, input int w);
    return u_llc.mem[line][w*64 +: 64];
  endfunction

  word_t rd;
  int cyc, calls0, ev0;

  initial begin
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // LLC contents
    u_llc.mem['h010] = fill(5);
    u_llc.mem['h021] = fill(7);
    u_llc.mem['h030] = fill(90);
    u_llc.mem['h040] = fill(0);
    u_llc.mem['h050] = fill(0);
    for (int l = 'h100; l < 'h110; l++) u_llc.mem[l] = fill(word_t'(l));

    // merge_init
    op(OP_MERGE_INIT, 0, 0, 64'h1000, 0, rd, cyc);
    op(OP_MERGE_INIT, 0, 0, 64'h2000, 1, rd, cyc);
    op(OP_MERGE_INIT, 0, 0, 64'h3000, 2, rd, cyc);
    check(dut.u_mfrf.regs[1] == 64'h2000, "merge_init wrote MFR 1");

    // c_read miss, then hit with the L1 hit latency
    op(OP_CREAD, 'h010, 2, 0, 0, rd, cyc);
    check(rd == 5, $sformatf("c_read miss value %0d", rd));
    check(cyc > HIT, "c_read miss slower than a hit");
    check(n_miss == 1, "one privatizing miss");
    op(OP_CREAD, 'h010, 2, 0, 0, rd, cyc);
    check(rd == 5 && cyc == HIT, $sformatf("c_read hit value %0d in %0d cycles", rd, cyc));
    check(n_hit == 1, "one c_read hit");
    op(OP_CWRITE, 'h010, 2, 6, 0, rd, cyc);
    op(OP_CREAD, 'h010, 2, 0, 0, rd, cyc);
    check(rd == 6, "c_write visible in L1");
    check(llc_word('h010, 2) == 5, "c_write not visible in LLC before merge");
    // another core merged +45 meanwhile
    u_llc.mem['h010][2*64 +: 64] = 50;
    calls0 = n_calls;
    op(OP_MERGE, 0, 0, 0, 0, rd, cyc);
    check(n_calls == calls0 + 1, "merge called the merge function once");
    check(llc_word('h010, 2) == 51, $sformatf("merged word %0d, expected 51", llc_word('h010, 2)));
    check(llc_word('h010, 3) == 5, "untouched word unchanged");
    check(dut.u_sb.valid == '0, "source buffer empty after merge");
    op(OP_CREAD, 'h010, 2, 0, 0, rd, cyc);
    check(rd == 51 && n_miss == 2, "line re-privatized after merge");

    // clean lines are dropped without calling the merge function
    op(OP_CREAD, 'h021, 0, 0, 0, rd, cyc);
    check(rd == 7, "c_read 0x021");
    calls0 = n_calls; ev0 = n_mclean;
    op(OP_MERGE, 0, 0, 0, 0, rd, cyc);
    check(n_calls == calls0, "clean lines not merged");
    check(n_mclean == ev0 + 2, "two clean lines dropped");

    // saturating add
    op(OP_CREAD, 'h030, 0, 0, 1, rd, cyc);
    op(OP_CWRITE, 'h030, 0, rd + 30, 1, rd, cyc);
    op(OP_MERGE, 0, 0, 0, 0, rd, cyc);
    check(llc_word('h030, 0) == SAT_MAX, $sformatf("saturating merge gave %0d", llc_word('h030, 0)));
    // bitwise OR with a concurrent update
    op(OP_CWRITE, 'h040, 1, 5, 2, rd, cyc);
    u_llc.mem['h040][1*64 +: 64] = 'h30;
    op(OP_MERGE, 0, 0, 0, 0, rd, cyc);
    check(llc_word('h040, 1) == 'h35, "OR merge");

    // ordinary stores and loads; dirty eviction writes back
    op(OP_STORE, 'h100, 0, 'habc, 0, rd, cyc);
    op(OP_LOAD, 'h100, 0, 0, 0, rd, cyc);
    check(rd == 'habc && cyc == HIT, "store then load hit");
    for (int k = 1; k < 6; k++) op(OP_LOAD, laddr_t'('h100 + 4 * k), 1, 0, 0, rd, cyc);
    check(n_wb >= 1, "dirty line written back on eviction");
    check(llc_word('h100, 0) == 'habc, "written-back value in LLC");

    // soft_merge then merge-on-evict
    op(OP_CWRITE, 'h050, 0, 1, 0, rd, cyc);
    op(OP_SOFT_MERGE, 0, 0, 0, 0, rd, cyc);
    check(n_soft == 1, "soft_merge executed");
    check(llc_word('h050, 0) == 0, "soft_merge does not merge at once");
    calls0 = n_calls; ev0 = n_evict;
    for (int k = 0; k < 8; k++) op(OP_LOAD, laddr_t'('h200 + 4 * k), 0, 0, 0, rd, cyc);
    check(n_evict == ev0 + 1 && n_calls == calls0 + 1, "mergeable line merged on eviction");
    check(llc_word('h050, 0) == 1, "merge-on-evict result");

    // a c_read to a mergeable line clears its mergeable bit
    op(OP_CREAD, 'h101, 0, 0, 0, rd, cyc);
    op(OP_SOFT_MERGE, 0, 0, 0, 0, rd, cyc);
    ev0 = n_mreset;
    op(OP_CREAD, 'h101, 0, 0, 0, rd, cyc);
    check(n_mreset == ev0 + 1, "mergeable bit cleared by c_read");
    op(OP_MERGE, 0, 0, 0, 0, rd, cyc);

    // full source buffer: a new c_read merges a mergeable entry first
    for (int k = 0; k < SBN; k++) op(OP_CREAD, laddr_t'('h101 + k + k / 3), 0, 0, 0, rd, cyc);
    check(dut.u_sb.full, "source buffer full");
    op(OP_SOFT_MERGE, 0, 0, 0, 0, rd, cyc);
    ev0 = n_evict;
    op(OP_CREAD, 'h10d, 0, 0, 0, rd, cyc);
    check(rd == 'h10d, "c_read after freeing a source entry");
    check(n_evict == ev0 + 1, "full source buffer freed by merge-on-evict");
    op(OP_MERGE, 0, 0, 0, 0, rd, cyc);

    // a locked LLC line is retried until the lock is released
    op(OP_CWRITE, 'h010, 0, 99, 0, rd, cyc);
    u_llc.lock_q['h010] = 1'b1;
    ev0 = n_retry;
    fork
      op(OP_MERGE, 0, 0, 0, 0, rd, cyc);
      begin
        repeat (40) @(posedge clk);
        check(n_retry > ev0, "merge retries a locked line");
        check(llc_word('h010, 0) == 5, "no merge while locked");
        u_llc.lock_q['h010] = 1'b0;
      end
    join
    check(llc_word('h010, 0) == 99, "merge completes after unlock");

    // a set full of CData lines (no soft_merge) stalls a fifth c_read
    for (int k = 0; k < WAYS; k++) op(OP_CREAD, laddr_t'('h300 + 4 * k), 0, 0, 0, rd, cyc);
    ev0 = n_stall;
    fork
      op(OP_CREAD, 'h310, 0, 0, 0, rd, cyc);
      repeat (60) @(posedge clk);
    join_any
    disable fork;
    check(n_stall > ev0 + 20, "c_read stalls on a set full of CData");
    check(!resp_valid && !req_ready, "stalled request not answered");

    $display("events: hit=%0d miss=%0d mreset=%0d soft=%0d mdirty=%0d mclean=%0d evict=%0d retry=%0d wb=%0d stall=%0d",
             n_hit, n_miss, n_mreset, n_soft, n_mdirty, n_mclean, n_evict, n_retry, n_wb, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
