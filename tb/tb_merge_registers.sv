// tb_merge_registers: self-checking test of the three merge registers.
// Loads memory, source and updated lines, reads every word back with rd_mreg,
// runs the "mem += upd - src" merge word by word through rd_mreg/wr_mreg and
// checks the merged memory line against a reference.
module tb_merge_registers;
  import ccache_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic load, wr_en;
  line_t load_mem, load_src, load_upd, mem_line;
  mreg_e rd_reg, wr_reg;
  widx_t rd_word, wr_word;
  word_t rd_data, wr_data;

  merge_registers dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t rand_line();
    line_t l;
    for (int w = 0; w < WORDS_PER_LINE; w++) l[w*64 +: 64] = {$urandom, $urandom};
    return l;
  endfunction

  line_t ref_line;
  word_t m, s, u;

  initial begin
    load = 0; wr_en = 0; rd_reg = MREG_MEM; wr_reg = MREG_MEM; rd_word = 0; wr_word = 0; wr_data = 0;
    load_mem = rand_line(); load_src = rand_line(); load_upd = rand_line();
    @(posedge clk); #1;
    load = 1; @(posedge clk); #1; load = 0;
    for (int w = 0; w < WORDS_PER_LINE; w++) begin
      rd_word = widx_t'(w);
      rd_reg = MREG_MEM; #1; check(rd_data == load_mem[w*64 +: 64], "mem word");
      rd_reg = MREG_SRC; #1; check(rd_data == load_src[w*64 +: 64], "src word");
      rd_reg = MREG_UPD; #1; check(rd_data == load_upd[w*64 +: 64], "upd word");
    end
    // merge: mem += upd - src
    for (int w = 0; w < WORDS_PER_LINE; w++) begin
      rd_word = widx_t'(w);
      rd_reg = MREG_MEM; #1; m = rd_data;
      rd_reg = MREG_SRC; #1; s = rd_data;
      rd_reg = MREG_UPD; #1; u = rd_data;
      ref_line[w*64 +: 64] = load_mem[w*64 +: 64] + load_upd[w*64 +: 64] - load_src[w*64 +: 64];
      wr_en = 1; wr_reg = MREG_MEM; wr_word = widx_t'(w); wr_data = m + (u - s);
      @(posedge clk); #1; wr_en = 0;
    end
    check(mem_line == ref_line, "merged memory line");
    rd_reg = MREG_SRC; rd_word = 3; #1;
    check(rd_data == load_src[3*64 +: 64], "source register untouched");
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
