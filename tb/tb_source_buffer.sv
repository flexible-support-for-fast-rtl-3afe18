// tb_source_buffer: self-checking test of the source buffer.
// Fills all entries, checks lookups and read-back against a scoreboard,
// checks that the full buffer refuses allocation, invalidates single entries,
// reuses the lowest free entry, and flash-clears.
module tb_source_buffer;
  import ccache_pkg::*;
  localparam int unsigned N = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  laddr_t lookup_line, alloc_line;
  logic lookup_hit, alloc_en, full, inv_en, flash_clear;
  logic [2:0] lookup_idx, free_idx, inv_idx, rd_idx;
  line_t alloc_data, rd_data;
  logic [N-1:0] valid;
  laddr_t entry_line [N];

  source_buffer #(.ENTRIES(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t pattern(input int k);
    line_t l;
    for (int w = 0; w < WORDS_PER_LINE; w++) l[w*64 +: 64] = {32'(k * 977 + 13), 32'(w)};
    return l;
  endfunction

  laddr_t lines [N];

  initial begin
    alloc_en = 0; inv_en = 0; flash_clear = 0; inv_idx = 0; rd_idx = 0;
    lookup_line = 16'hffff; alloc_line = 0; alloc_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(valid == '0 && !full, "empty after reset");
    for (int k = 0; k < N; k++) begin
      lines[k] = laddr_t'(k * 131 + 7);
      check(free_idx == 3'(k), $sformatf("free idx %0d got %0d valid %b", k, free_idx, valid));
      alloc_en = 1; alloc_line = lines[k]; alloc_data = pattern(k);
      lookup_line = 16'hffff;
      @(posedge clk); #1;
      alloc_en = 0;
    end
    check(full, "full after 8 allocations");
    for (int k = 0; k < N; k++) begin
      lookup_line = lines[k]; rd_idx = 3'(k); #1;
      check(lookup_hit && lookup_idx == 3'(k), $sformatf("lookup %0d", k));
      check(rd_data == pattern(k), $sformatf("data %0d", k));
    end
    lookup_line = 16'h1234; #1;
    check(!lookup_hit, "miss on absent line");
    // allocation into a full buffer is ignored
    alloc_en = 1; alloc_line = 16'h1234; alloc_data = pattern(99);
    @(posedge clk); #1; alloc_en = 0;
    lookup_line = 16'h1234; #1;
    check(!lookup_hit, "full buffer refuses allocation");
    // invalidate entries 5 and 2
    inv_en = 1; inv_idx = 5; @(posedge clk); #1;
    inv_idx = 2; @(posedge clk); #1; inv_en = 0;
    check(valid == 8'b1101_1011, "two entries invalidated");
    check(free_idx == 3'd2 && !full, "lowest free entry");
    lookup_line = lines[5]; #1; check(!lookup_hit, "invalidated entry misses");
    alloc_en = 1; alloc_line = 16'h0abc; alloc_data = pattern(42);
    lookup_line = 16'hffff;
    @(posedge clk); #1; alloc_en = 0;
    lookup_line = 16'h0abc; rd_idx = 2; #1;
    check(lookup_hit && lookup_idx == 3'd2 && rd_data == pattern(42), "reuse entry 2");
    flash_clear = 1; @(posedge clk); #1; flash_clear = 0;
    check(valid == '0, "flash clear");
    lookup_line = lines[0]; #1; check(!lookup_hit, "miss after flash clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
