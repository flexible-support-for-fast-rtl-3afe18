// merge_registers: the three cache-line-sized merge registers of a core.
//
// Before a merge function runs, the CCache unit loads all three registers in
// one cycle: register 1 with the LLC (memory) value, register 2 with the source
// value from the source buffer, register 3 with the modified value from the L1.
// The merge function then reads and writes single words with rd_mreg/wr_mreg;
// when it returns, register 1 holds the merged line that is written to the LLC.
//
// Interface: load (three lines, one cycle), a word read port (combinational)
// and a word write port (next edge) for rd_mreg/wr_mreg, and the full memory
// register as an output. A load and a word write in the same cycle: load wins.
//
// Following the paper: three registers, one line each, word-addressed access.
// Own choices: 64-bit words (8 per line), any register writable by wr_mreg.
module merge_registers
  import ccache_pkg::*;
(
  input  logic  clk,
  input  logic  load,
  input  line_t load_mem,
  input  line_t load_src,
  input  line_t load_upd,
  // rd_mreg
  input  mreg_e rd_reg,
  input  widx_t rd_word,
  output word_t rd_data,
  // wr_mreg
  input  logic  wr_en,
  input  mreg_e wr_reg,
  input  widx_t wr_word,
  input  word_t wr_data,
  // merged result
  output line_t mem_line
);

  line_t regs [3];

  always_ff @(posedge clk) begin
    if (load) begin
      regs[MREG_MEM] <= load_mem;
      regs[MREG_SRC] <= load_src;
      regs[MREG_UPD] <= load_upd;
    end else if (wr_en && wr_reg != 2'd3) begin
      regs[wr_reg][wr_word*WORD_BITS +: WORD_BITS] <= wr_data;
    end
  end

  assign rd_data  = (rd_reg == 2'd3) ? '0 : regs[rd_reg][rd_word*WORD_BITS +: WORD_BITS];
  assign mem_line = regs[MREG_MEM];

endmodule
