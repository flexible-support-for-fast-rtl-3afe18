// source_buffer: per-core, fully associative store of source copies.
//
// When a c_read or c_write misses in the L1, the line fetched from the LLC is
// written into the L1 (as the updated copy) and, in the same cycle, into a free
// entry of this buffer (as the source copy). At a merge the unit reads the
// entry back to fill merge register 2, then invalidates it.
//
// Interface: a combinational CAM lookup by line address (lookup_hit/_idx), an
// allocate port that writes the lowest-numbered free entry, an invalidate port,
// a flash clear, and a read port by entry index. All entry lines and the valid
// vector are visible so the owner can walk the buffer. Writes take effect at
// the next rising clock edge; lookups and reads are combinational.
//
// Following the paper: fully associative, 64-byte lines, 512 bytes per core
// (8 entries), flash clear. Own choices: lowest-free-entry allocation, and
// allocation into a full buffer being ignored (the owner frees an entry first).
module source_buffer
  import ccache_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // lookup
  input  laddr_t             lookup_line,
  output logic               lookup_hit,
  output logic [IDX_W-1:0]   lookup_idx,
  // allocate
  input  logic               alloc_en,
  input  laddr_t             alloc_line,
  input  line_t              alloc_data,
  output logic               full,
  output logic [IDX_W-1:0]   free_idx,
  // invalidate one entry / all entries
  input  logic               inv_en,
  input  logic [IDX_W-1:0]   inv_idx,
  input  logic               flash_clear,
  // read
  input  logic [IDX_W-1:0]   rd_idx,
  output line_t              rd_data,
  // state
  output logic [ENTRIES-1:0] valid,
  output laddr_t             entry_line [ENTRIES]
);

  line_t data_q [ENTRIES];

  always_comb begin
    lookup_hit = 1'b0;
    lookup_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (valid[i] && entry_line[i] == lookup_line) begin
        lookup_hit = 1'b1;
        lookup_idx = IDX_W'(i);
      end
    end
  end

  always_comb begin
    full     = &valid;
    free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!valid[i]) free_idx = IDX_W'(i);
    end
  end

  assign rd_data = data_q[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      for (int i = 0; i < ENTRIES; i++) entry_line[i] <= '0;
    end else begin
      if (inv_en) valid[inv_idx] <= 1'b0;
      if (alloc_en && !full) begin
        valid[free_idx]      <= 1'b1;
        entry_line[free_idx] <= alloc_line;
      end
      if (flash_clear) valid <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_en && !full) data_q[free_idx] <= alloc_data;
  end

  // A line may have at most one source copy.
  assert property (@(posedge clk) disable iff (!rst_n)
                   alloc_en |-> !(lookup_hit && lookup_line == alloc_line))
    else $error("source_buffer: line allocated twice");

endmodule
