// tb_ccache_top: end-to-end test of the whole CCache system at its default
// size (8 cores, 8-way 32 KB L1s, 8-entry source buffers, 4 MB LLC with
// 70-cycle hits).
//
// Each core is played by tb_core_model. Part 1 runs the two-core key-value
// example (cores 0 and 1 increment keys 0,1,1 and 2,1,2 on privatized copies
// and merge): the shared copy must end as 1,3,2. Part 2 runs all eight cores
// on a random mix of commutative updates with three merge functions (add,
// saturating add, OR), clean c_reads and private ordinary stores, all crowded
// into one L1 set so that replacement, merge-on-evict and full source buffers
// occur. Afterwards the LLC must hold exactly the initial values plus every
// core's updates (sum for add, min(sum, ceiling) for saturating, union for
// OR), no lock bit may remain set, and each mechanism must have happened:
// c_read/c_write hits and misses, clearing of the mergeable bit, soft_merge,
// merges of dirty lines, drops of clean lines, merge-on-evict, retries on a
// locked LLC line, and write-back of ordinary lines.
module tb_ccache_top;
  import ccache_pkg::*;
  localparam int N = 8;
  localparam int KV = 6, SATK = 2, BMP = 2, PEEK = 2;
  localparam int STRIDE = 64;
  localparam longint SAT_MAX = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           req_valid [N], req_ready [N], resp_valid [N];
  core_req_t      req [N];
  word_t          resp_rdata [N];
  logic           mf_call [N], mf_done [N];
  ptr_t           mf_ptr [N];
  laddr_t         mf_line [N];
  mreg_e          mreg_rd_reg [N], mreg_wr_reg [N];
  widx_t          mreg_rd_word [N], mreg_wr_word [N];
  word_t          mreg_rd_data [N], mreg_wr_data [N];
  logic           mreg_wr_en [N];
  ccache_events_t events [N];

  ccache_top dut (.*);

  logic start = 1'b0;
  int   mode = 0;
  logic done [N];
  int   kv_inc  [N][KV * WORDS_PER_LINE];
  int   sat_inc [N][SATK];
  word_t bmp_set [N][BMP * WORDS_PER_LINE];
  int   core_checks [N], core_failures [N], core_calls [N];

  // ----------------------------------------------------- event counting
  localparam int NEV = 10;
  int ev_cnt [N][NEV];
  logic sb_empty [N];
  for (genvar c = 0; c < N; c++) begin : g_core
    tb_core_model #(.CORE_ID(c), .N_OPS(100), .KV_KEYS(KV), .SAT_KEYS(SATK), .BMP_LINES(BMP),
                    .PEEK_LINES(PEEK), .LINE_STRIDE(STRIDE), .SAT_MAX(SAT_MAX)) u_core (
      .clk, .start, .mode, .done (done[c]),
      .req_valid (req_valid[c]), .req_ready (req_ready[c]), .req (req[c]),
      .resp_valid (resp_valid[c]), .resp_rdata (resp_rdata[c]),
      .mf_call (mf_call[c]), .mf_ptr (mf_ptr[c]), .mf_done (mf_done[c]),
      .mreg_rd_reg (mreg_rd_reg[c]), .mreg_rd_word (mreg_rd_word[c]),
      .mreg_rd_data (mreg_rd_data[c]), .mreg_wr_en (mreg_wr_en[c]),
      .mreg_wr_reg (mreg_wr_reg[c]), .mreg_wr_word (mreg_wr_word[c]),
      .mreg_wr_data (mreg_wr_data[c]),
      .kv_inc (kv_inc[c]), .sat_inc (sat_inc[c]), .bmp_set (bmp_set[c]),
      .checks (core_checks[c]), .failures (core_failures[c]), .mf_calls (core_calls[c]));

    assign sb_empty[c] = (dut.g_core[c].u_l1.u_sb.valid == '0);
    initial for (int e = 0; e < NEV; e++) ev_cnt[c][e] = 0;
    // counted only after reset is released
    always @(posedge clk) if (rst_n) begin
      ev_cnt[c][0] += int'(events[c].cop_hit);
      ev_cnt[c][1] += int'(events[c].cop_miss);
      ev_cnt[c][2] += int'(events[c].mergeable_reset);
      ev_cnt[c][3] += int'(events[c].soft_merge);
      ev_cnt[c][4] += int'(events[c].merge_dirty);
      ev_cnt[c][5] += int'(events[c].merge_clean);
      ev_cnt[c][6] += int'(events[c].evict_merge);
      ev_cnt[c][7] += int'(events[c].lock_retry);
      ev_cnt[c][8] += int'(events[c].writeback);
      ev_cnt[c][9] += int'(events[c].cdata_stall);
    end
  end

  string ev_name [NEV] = '{"c_read/c_write hit", "privatizing miss", "mergeable bit cleared",
                           "soft_merge", "dirty line merged", "clean line dropped",
                           "merge-on-evict", "locked-line retry", "ordinary write-back",
                           "CData stall"};

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t fill(input word_t v);
    line_t l;
    for (int w = 0; w < WORDS_PER_LINE; w++) l[w*64 +: 64] = v;
    return l;
  endfunction

  task automatic run(input int m);
    bit all;
    mode = m;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(negedge clk);
    do begin
      @(negedge clk);
      all = 1;
      for (int c = 0; c < N; c++) all &= done[c];
    end while (!all);
  endtask

  longint cyc0, cycles;
  always @(posedge clk) cycles++;

  initial begin
    cycles = 0;
    // initial shared contents (written directly, before any core runs)
    for (int k = 0; k < 3; k++) dut.u_llc.mem['h0500 + k] = '0;
    for (int k = 0; k < KV; k++) dut.u_llc.mem['h1000 + k * STRIDE] = '0;
    for (int k = 0; k < SATK; k++) dut.u_llc.mem['h2000 + k * STRIDE] = '0;
    for (int k = 0; k < BMP; k++) dut.u_llc.mem['h3000 + k * STRIDE] = '0;
    for (int k = 0; k < PEEK; k++) dut.u_llc.mem['h5000 + k * STRIDE] = fill(word_t'('h5000 + k));
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------------------------------------- part 1: key-value example
    cyc0 = cycles;
    run(0);
    check(dut.u_llc.mem['h0500][63:0] == 1, "KV[0] == 1");
    check(dut.u_llc.mem['h0501][63:0] == 3, "KV[1] == 3");
    check(dut.u_llc.mem['h0502][63:0] == 2, "KV[2] == 2");
    $display("key-value example: KV = %0d %0d %0d after %0d cycles",
             dut.u_llc.mem['h0500][63:0], dut.u_llc.mem['h0501][63:0],
             dut.u_llc.mem['h0502][63:0], cycles - cyc0);

    // ---------------------------------------------- part 2: random mix
    cyc0 = cycles;
    run(1);
    $display("random mix finished after %0d cycles", cycles - cyc0);
    for (int k = 0; k < KV; k++) begin
      for (int w = 0; w < WORDS_PER_LINE; w++) begin
        longint sum;
        sum = 0;
        for (int c = 0; c < N; c++) sum += kv_inc[c][k * WORDS_PER_LINE + w];
        check(dut.u_llc.mem['h1000 + k * STRIDE][w*64 +: 64] == word_t'(sum),
              $sformatf("KV line %0d word %0d = %0d, expected %0d", k, w,
                        dut.u_llc.mem['h1000 + k * STRIDE][w*64 +: 64], sum));
      end
    end
    for (int k = 0; k < SATK; k++) begin
      longint sum;
        sum = 0;
      for (int c = 0; c < N; c++) sum += sat_inc[c][k];
      if (sum > SAT_MAX) sum = SAT_MAX;
      check(dut.u_llc.mem['h2000 + k * STRIDE][63:0] == word_t'(sum),
            $sformatf("saturating counter %0d = %0d, expected %0d", k,
                      dut.u_llc.mem['h2000 + k * STRIDE][63:0], sum));
    end
    for (int k = 0; k < BMP; k++) begin
      for (int w = 0; w < WORDS_PER_LINE; w++) begin
        word_t u;
        u = '0;
        for (int c = 0; c < N; c++) u |= bmp_set[c][k * WORDS_PER_LINE + w];
        check(dut.u_llc.mem['h3000 + k * STRIDE][w*64 +: 64] == u,
              $sformatf("bitmap line %0d word %0d", k, w));
      end
    end
    for (int k = 0; k < PEEK; k++)
      check(dut.u_llc.mem['h5000 + k * STRIDE] == fill(word_t'('h5000 + k)), "read-only line unchanged");
    check(dut.u_llc.lock_q == '0, "no LLC line left locked");
    for (int c = 0; c < N; c++) begin
      checks += core_checks[c];
      failures += core_failures[c];
      check(sb_empty[c], $sformatf("core %0d source buffer empty", c));
    end
    // every mechanism happened
    for (int e = 0; e < NEV - 1; e++) begin
      int tot;
      tot = 0;
      for (int c = 0; c < N; c++) tot += ev_cnt[c][e];
      $display("  %-24s %0d", ev_name[e], tot);
      check(tot > 0, $sformatf("mechanism never happened: %s", ev_name[e]));
    end
    begin
      int tot;
      tot = 0;
      for (int c = 0; c < N; c++) tot += ev_cnt[c][NEV - 1];
      check(tot == 0, "no CData stall when the ways-1 rule is kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
