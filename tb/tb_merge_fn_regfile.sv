// tb_merge_fn_regfile: self-checking test of the merge function register file.
// Checks reset to zero, merge_init writes to each of the four entries, that a
// write touches only its entry, and overwrite.
module tb_merge_fn_regfile;
  import ccache_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic we;
  logic [1:0] waddr, raddr;
  ptr_t wdata, rdata;
  ptr_t model [4];

  merge_fn_regfile dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all();
    for (int i = 0; i < 4; i++) begin
      raddr = 2'(i); #1;
      check(rdata == model[i], $sformatf("entry %0d = %h, expected %h", i, rdata, model[i]));
    end
  endtask

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 4; i++) model[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    check_all();
    for (int n = 0; n < 12; n++) begin
      waddr = 2'($urandom_range(0, 3));
      wdata = {$urandom, $urandom};
      we = 1; @(posedge clk); #1; we = 0;
      model[waddr] = wdata;
      check_all();
    end
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
