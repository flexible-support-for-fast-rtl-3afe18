// tb_core_model: behavioural model of one processor core driving a CCache unit.
//
// The core is not part of the design; this model stands in for it. It issues
// operations on the unit's request port and, whenever the unit raises mf_call,
// runs the registered software merge function through rd_mreg/wr_mreg and
// pulses mf_done. Merge functions, selected by pointer:
//   0x1000  add:        mem += upd - src            (key-value store, K-Means)
//   0x2000  saturating: mem = min(mem + upd - src, SAT_MAX)
//   0x3000  OR:         mem |= upd                  (BFS bitmap)
//
// Programs, chosen by `mode` when `start` is pulsed:
//   0  the two-core key-value example: core 0 increments keys 0,1,1, core 1
//      keys 2,1,2, then both merge (the memory must end as 1,3,2).
//   1  a random mix of key-value increments on random words (add merge),
//      saturating increments, bitmap bit sets (OR merge), c_reads that never
//      write (clean lines), and ordinary stores to private lines. soft_merge
//      after every SOFT_EVERY commutative updates, merge every MERGE_EVERY
//      operations and at the end; then every private line is loaded back and
//      checked. The counts of what was applied are outputs, for the checker.
module tb_core_model
  import ccache_pkg::*;
#(
  parameter int CORE_ID     = 0,
  parameter int N_OPS       = 100,
  parameter int KV_KEYS     = 6,
  parameter int SAT_KEYS    = 2,
  parameter int BMP_LINES   = 2,
  parameter int PEEK_LINES  = 2,
  parameter int PRIV_LINES  = 12,
  parameter int SOFT_EVERY  = 3,
  parameter int MERGE_EVERY = 40,
  parameter int KV_BASE     = 'h1000,
  parameter int SAT_BASE    = 'h2000,
  parameter int BMP_BASE    = 'h3000,
  parameter int PEEK_BASE   = 'h5000,
  parameter int PRIV_BASE   = 'h8000,
  parameter int FIG_BASE    = 'h0500,
  parameter int LINE_STRIDE = 64,       // line spacing: 64 puts lines in one L1 set
  parameter longint SAT_MAX = 20
) (
  input  logic      clk,
  input  logic      start,
  input  int        mode,
  output logic      done,
  // unit request / response
  output logic      req_valid,
  input  logic      req_ready,
  output core_req_t req,
  input  logic      resp_valid,
  input  word_t     resp_rdata,
  // merge function call
  input  logic      mf_call,
  input  ptr_t      mf_ptr,
  output logic      mf_done,
  output mreg_e     mreg_rd_reg,
  output widx_t     mreg_rd_word,
  input  word_t     mreg_rd_data,
  output logic      mreg_wr_en,
  output mreg_e     mreg_wr_reg,
  output widx_t     mreg_wr_word,
  output word_t     mreg_wr_data,
  // what this core applied
  output int        kv_inc  [KV_KEYS * WORDS_PER_LINE],
  output int        sat_inc [SAT_KEYS],
  output word_t     bmp_set [BMP_LINES * WORDS_PER_LINE],
  output int        checks,
  output int        failures,
  output int        mf_calls
);

  // ------------------------------------------------ software merge functions
  initial begin
    word_t m, s, u, n;
    mf_calls = 0;
    mf_done = 0; mreg_wr_en = 0; mreg_rd_reg = MREG_MEM; mreg_rd_word = 0;
    mreg_wr_reg = MREG_MEM; mreg_wr_word = 0; mreg_wr_data = 0;
    forever begin
      @(negedge clk);
      if (mf_call) begin
        mf_calls++;
        for (int w = 0; w < WORDS_PER_LINE; w++) begin
          mreg_rd_word = widx_t'(w);
          mreg_rd_reg = MREG_MEM; #1 m = mreg_rd_data;
          mreg_rd_reg = MREG_SRC; #1 s = mreg_rd_data;
          mreg_rd_reg = MREG_UPD; #1 u = mreg_rd_data;
          case (mf_ptr)
            64'h1000: n = m + (u - s);
            64'h2000: begin n = m + (u - s); if (n > word_t'(SAT_MAX)) n = word_t'(SAT_MAX); end
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

  // ------------------------------------------------------------ operations
  task automatic op(input op_e o, input int line, input int word, input word_t wdata,
                    input int idx, output word_t rdata);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1;
    req = '{op: o, line: laddr_t'(line), word: widx_t'(word), wdata: wdata, idx: mtype_t'(idx)};
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    rdata = resp_rdata;
  endtask

  logic [31:0] rng;
  function automatic int unsigned rnd(input int unsigned n);
    rng = rng ^ (rng << 13);
    rng = rng ^ (rng >> 17);
    rng = rng ^ (rng << 5);
    return rng % n;
  endfunction

  task automatic inc_key(input int key);
    word_t v;
    op(OP_CREAD, FIG_BASE + key, 0, 0, 0, v);
    op(OP_CWRITE, FIG_BASE + key, 0, v + 1, 0, v);
  endtask

  word_t priv_val [PRIV_LINES];
  logic  priv_written [PRIV_LINES];

  task automatic run_mix();
    word_t v;
    int cops = 0;
    for (int i = 0; i < N_OPS; i++) begin
      int unsigned kind = rnd(100);
      if (kind < 40) begin
        int k = int'(rnd(KV_KEYS)), w = int'(rnd(WORDS_PER_LINE));
        op(OP_CREAD, KV_BASE + k * LINE_STRIDE, w, 0, 0, v);
        op(OP_CWRITE, KV_BASE + k * LINE_STRIDE, w, v + 1, 0, v);
        kv_inc[k * WORDS_PER_LINE + w]++;
        cops++;
      end else if (kind < 55) begin
        int k = int'(rnd(SAT_KEYS));
        op(OP_CREAD, SAT_BASE + k * LINE_STRIDE, 0, 0, 1, v);
        op(OP_CWRITE, SAT_BASE + k * LINE_STRIDE, 0, v + 1, 1, v);
        sat_inc[k]++;
        cops++;
      end else if (kind < 70) begin
        int k = int'(rnd(BMP_LINES)), w = int'(rnd(WORDS_PER_LINE)), b = int'(rnd(64));
        op(OP_CREAD, BMP_BASE + k * LINE_STRIDE, w, 0, 2, v);
        op(OP_CWRITE, BMP_BASE + k * LINE_STRIDE, w, v | (word_t'(1) << b), 2, v);
        bmp_set[k * WORDS_PER_LINE + w] |= word_t'(1) << b;
        cops++;
      end else if (kind < 80) begin
        int k = int'(rnd(PEEK_LINES));
        op(OP_CREAD, PEEK_BASE + k * LINE_STRIDE, 0, 0, 0, v);
        checks++;
        if (v != word_t'(PEEK_BASE + k)) begin
          failures++;
          $display("FAIL core %0d: peek line %0d read %0h", CORE_ID, k, v);
        end
        cops++;
      end else begin
        int j = int'(rnd(PRIV_LINES));
        priv_val[j] = {32'(CORE_ID), 32'(i)};
        priv_written[j] = 1'b1;
        op(OP_STORE, PRIV_BASE + CORE_ID * PRIV_LINES * LINE_STRIDE + j * LINE_STRIDE, 0,
           priv_val[j], 0, v);
      end
      if (cops == SOFT_EVERY) begin
        op(OP_SOFT_MERGE, 0, 0, 0, 0, v);
        cops = 0;
      end
      if (i % MERGE_EVERY == MERGE_EVERY - 1) op(OP_MERGE, 0, 0, 0, 0, v);
    end
    op(OP_MERGE, 0, 0, 0, 0, v);
    for (int j = 0; j < PRIV_LINES; j++) begin
      if (priv_written[j]) begin
        op(OP_LOAD, PRIV_BASE + CORE_ID * PRIV_LINES * LINE_STRIDE + j * LINE_STRIDE, 0, 0, 0, v);
        checks++;
        if (v != priv_val[j]) begin
          failures++;
          $display("FAIL core %0d: private line %0d read %0h expected %0h", CORE_ID, j, v, priv_val[j]);
        end
      end
    end
  endtask

  initial begin
    word_t v;
    done = 0; req_valid = 0; req = '0; checks = 0; failures = 0;
    rng = 32'h9e3779b9 ^ (32'(CORE_ID + 1) * 32'h85ebca6b);
    foreach (kv_inc[i]) kv_inc[i] = 0;
    foreach (sat_inc[i]) sat_inc[i] = 0;
    foreach (bmp_set[i]) bmp_set[i] = '0;
    foreach (priv_written[i]) priv_written[i] = 1'b0;
    forever begin
      @(posedge clk);
      if (start) begin
        done = 0;
        op(OP_MERGE_INIT, 0, 0, 64'h1000, 0, v);
        op(OP_MERGE_INIT, 0, 0, 64'h2000, 1, v);
        op(OP_MERGE_INIT, 0, 0, 64'h3000, 2, v);
        if (mode == 0) begin
          if (CORE_ID == 0) begin
            inc_key(0); inc_key(1); inc_key(1);
          end else if (CORE_ID == 1) begin
            inc_key(2); inc_key(1); inc_key(2);
          end
          op(OP_MERGE, 0, 0, 0, 0, v);
        end else begin
          run_mix();
        end
        done = 1;
      end
    end
  end

endmodule
