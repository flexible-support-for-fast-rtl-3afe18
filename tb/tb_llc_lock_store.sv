// tb_llc_lock_store: self-checking test of the shared LLC and its lock bits.
// Checks write/read data, the response latency (HIT_CYCLES+1 cycles after the
// request), that a locked line refuses LOCK_READ, READ and WRITE from every
// port until the holder's WRITE_UNLOCK, and that two ports requesting together
// are both served, one after the other.
module tb_llc_lock_store;
  import ccache_pkg::*;
  localparam int unsigned HIT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  llc_req_t  req  [2];
  llc_resp_t resp [2];

  llc_lock_store #(.N_PORTS(2), .LINES(256), .HIT_CYCLES(HIT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t pattern(input int k);
    line_t l;
    for (int w = 0; w < WORDS_PER_LINE; w++) l[w*64 +: 64] = {32'(k), 32'(w * 3 + 1)};
    return l;
  endfunction

  // issue one request on port p and wait for its answer
  task automatic access(input int p, input llc_op_e op, input laddr_t line, input line_t wdata,
                        output llc_resp_t r, output int cycles);
    req[p] <= '{valid: 1'b1, op: op, line: line, wdata: wdata};
    cycles = 0;
    do begin
      @(posedge clk);
      cycles++;
    end while (!resp[p].valid);
    r = resp[p];
    req[p] <= '0;
  endtask

  llc_resp_t r0, r1;
  int c0, c1;

  initial begin
    req[0] = '0; req[1] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk);
    access(0, LLC_WRITE, 16'd10, pattern(10), r0, c0);
    check(!r0.nack, "write accepted");
    check(c0 == HIT + 2, $sformatf("latency %0d cycles, expected %0d", c0, HIT + 2));
    access(1, LLC_READ, 16'd10, '0, r1, c1);
    check(!r1.nack && r1.rdata == pattern(10), "read back from other port");
    // lock by port 0
    access(0, LLC_LOCK_READ, 16'd10, '0, r0, c0);
    check(!r0.nack && r0.rdata == pattern(10), "lock acquired, data returned");
    access(1, LLC_LOCK_READ, 16'd10, '0, r1, c1);
    check(r1.nack, "second lock refused");
    access(1, LLC_READ, 16'd10, '0, r1, c1);
    check(r1.nack, "read of locked line refused");
    access(1, LLC_WRITE, 16'd10, pattern(77), r1, c1);
    check(r1.nack, "write of locked line refused");
    access(0, LLC_LOCK_READ, 16'd10, '0, r0, c0);
    check(r0.nack, "lock is not re-entrant");
    access(1, LLC_READ, 16'd11, '0, r1, c1);
    check(!r1.nack, "other lines stay accessible");
    access(0, LLC_WRITE_UNLOCK, 16'd10, pattern(20), r0, c0);
    check(!r0.nack, "write-unlock accepted");
    access(1, LLC_LOCK_READ, 16'd10, '0, r1, c1);
    check(!r1.nack && r1.rdata == pattern(20), "lock after unlock sees merged value");
    access(1, LLC_WRITE_UNLOCK, 16'd10, pattern(21), r1, c1);
    // both ports at once
    fork
      access(0, LLC_WRITE, 16'd20, pattern(200), r0, c0);
      access(1, LLC_WRITE, 16'd21, pattern(210), r1, c1);
    join
    check(!r0.nack && !r1.nack, "both concurrent writes served");
    check((c0 == HIT + 2 && c1 > c0) || (c1 == HIT + 2 && c0 > c1), "one port waits for the other");
    access(0, LLC_READ, 16'd21, '0, r0, c0);
    check(r0.rdata == pattern(210), "concurrent write 1 stored");
    access(1, LLC_READ, 16'd20, '0, r1, c1);
    check(r1.rdata == pattern(200), "concurrent write 0 stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
