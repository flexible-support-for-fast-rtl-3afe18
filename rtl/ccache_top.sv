// ccache_top: an N-core CCache memory system.
//
// Each core has one ccache_l1 (L1 with CCache, mergeable and merge-type bits,
// source buffer, merge registers, merge function register file and the merge
// controller). All of them share one llc_lock_store, the last-level cache with
// a lock bit per line that serializes merges of the same line.
//
// The processor cores themselves are outside this design: each core drives
// its request port (loads, stores, c_read, c_write, merge_init, soft_merge,
// merge) and, when its unit raises mf_call, runs the software merge function
// at mf_ptr using the rd_mreg/wr_mreg ports, then pulses mf_done.
//
// Per-core ports are arrays indexed by core number; see ccache_l1 for the
// handshakes and timing. Defaults follow the paper's evaluated machine: 8
// cores, 8-way 32 KB L1 with 64-byte lines and 4-cycle hits, 8-entry (512 B)
// source buffer, 4 MB LLC with 70-cycle hits. The missing private L2 and the
// MESI directory of the paper's base machine are not part of this design.
module ccache_top
  import ccache_pkg::*;
#(
  parameter int unsigned N_CORES        = 8,
  parameter int unsigned L1_WAYS        = 8,
  parameter int unsigned L1_BYTES       = 32 * 1024,
  parameter int unsigned L1_HIT_CYCLES  = 4,
  parameter int unsigned SB_ENTRIES     = 8,
  parameter int unsigned LLC_HIT_CYCLES = 70
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid    [N_CORES],
  output logic           req_ready    [N_CORES],
  input  core_req_t      req          [N_CORES],
  output logic           resp_valid   [N_CORES],
  output word_t          resp_rdata   [N_CORES],
  output logic           mf_call      [N_CORES],
  output ptr_t           mf_ptr       [N_CORES],
  output laddr_t         mf_line      [N_CORES],
  input  logic           mf_done      [N_CORES],
  input  mreg_e          mreg_rd_reg  [N_CORES],
  input  widx_t          mreg_rd_word [N_CORES],
  output word_t          mreg_rd_data [N_CORES],
  input  logic           mreg_wr_en   [N_CORES],
  input  mreg_e          mreg_wr_reg  [N_CORES],
  input  widx_t          mreg_wr_word [N_CORES],
  input  word_t          mreg_wr_data [N_CORES],
  output ccache_events_t events       [N_CORES]
);

  llc_req_t  llc_req  [N_CORES];
  llc_resp_t llc_resp [N_CORES];

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    ccache_l1 #(
      .WAYS       (L1_WAYS),
      .SIZE_BYTES (L1_BYTES),
      .SB_ENTRIES (SB_ENTRIES),
      .HIT_CYCLES (L1_HIT_CYCLES)
    ) u_l1 (
      .clk, .rst_n,
      .req_valid    (req_valid[c]),
      .req_ready    (req_ready[c]),
      .req          (req[c]),
      .resp_valid   (resp_valid[c]),
      .resp_rdata   (resp_rdata[c]),
      .mf_call      (mf_call[c]),
      .mf_ptr       (mf_ptr[c]),
      .mf_line      (mf_line[c]),
      .mf_done      (mf_done[c]),
      .mreg_rd_reg  (mreg_rd_reg[c]),
      .mreg_rd_word (mreg_rd_word[c]),
      .mreg_rd_data (mreg_rd_data[c]),
      .mreg_wr_en   (mreg_wr_en[c]),
      .mreg_wr_reg  (mreg_wr_reg[c]),
      .mreg_wr_word (mreg_wr_word[c]),
      .mreg_wr_data (mreg_wr_data[c]),
      .llc_req      (llc_req[c]),
      .llc_resp     (llc_resp[c]),
      .events       (events[c])
    );
  end

  llc_lock_store #(
    .N_PORTS    (N_CORES),
    .HIT_CYCLES (LLC_HIT_CYCLES)
  ) u_llc (
    .clk, .rst_n,
    .req  (llc_req),
    .resp (llc_resp)
  );

endmodule
