// merge_fn_regfile: the merge function register file (MFRF).
//
// merge_init(&fn, i) writes the address of a software merge function into
// entry i. When a CData line is merged, its merge-type field selects the entry
// and the stored pointer is handed to the core, which calls the function.
//
// Interface: one synchronous write port (we, waddr, wdata) and one
// combinational read port (raddr -> rdata). Entries reset to zero.
//
// Following the paper: four entries, selected by a two-bit merge type.
// Own choices: 64-bit pointers, reset value zero.
module merge_fn_regfile
  import ccache_pkg::*;
#(
  parameter int unsigned ENTRIES = N_MERGE_TYPES,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [IDX_W-1:0] waddr,
  input  ptr_t             wdata,
  input  logic [IDX_W-1:0] raddr,
  output ptr_t             rdata
);

  ptr_t regs [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata = regs[raddr];

endmodule
