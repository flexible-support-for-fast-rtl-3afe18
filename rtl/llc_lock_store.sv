// llc_lock_store: the shared last-level cache with one lock bit per line.
//
// Every core's CCache unit has one request port. A round-robin arbiter takes
// one request at a time, holds it for HIT_CYCLES cycles (the LLC hit latency)
// and then answers on that port's response for one cycle. Lock bits serialize
// merges: LLC_LOCK_READ sets a line's lock bit and returns the line,
// LLC_WRITE_UNLOCK writes the merged line and clears the bit. While a line is
// locked, any other LOCK_READ, READ or WRITE to it is answered with nack and
// the requester retries, so no core can touch the line until the merge is done.
//
// Interface: req[p] must stay asserted, unchanged, until resp[p].valid; the
// port may present a new request in the cycle after the response.
// Timing: response HIT_CYCLES+1 cycles after the request is taken (one cycle
// to arbitrate, HIT_CYCLES of access).
//
// Following the paper: a lock bit per LLC line; LLC of 4 MB with 64-byte
// lines; 70-cycle hit latency. Own choices: the LLC is modelled as directly
// addressed storage for the whole 4 MB line address space (no tags, ways or
// main memory behind it), one request is served at a time, and lock and read
// are one combined request. Lock bits are cleared at reset; line data is not.
module llc_lock_store
  import ccache_pkg::*;
#(
  parameter int unsigned N_PORTS    = 8,
  parameter int unsigned LINES      = LLC_LINES,
  parameter int unsigned HIT_CYCLES = 70,
  localparam int unsigned PORT_W    = (N_PORTS > 1) ? $clog2(N_PORTS) : 1,
  localparam int unsigned CNT_W     = $clog2(HIT_CYCLES + 1) + 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  llc_req_t  req  [N_PORTS],
  output llc_resp_t resp [N_PORTS]
);

  line_t mem [LINES];
  logic [LINES-1:0] lock_q;

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_RESP} state_e;
  state_e state_q;

  logic [PORT_W-1:0] rr_q;     // next port to favour
  logic [PORT_W-1:0] cur_q;    // port being served
  logic [CNT_W-1:0]  cnt_q;

  // round-robin pick
  logic              pick_found;
  logic [PORT_W-1:0] pick;
  always_comb begin
    pick_found = 1'b0;
    pick       = '0;
    for (int k = 0; k < N_PORTS; k++) begin
      int unsigned p;
      p = (int'(rr_q) + k) % N_PORTS;
      if (!pick_found && req[p].valid) begin
        pick_found = 1'b1;
        pick       = PORT_W'(p);
      end
    end
  end

  llc_req_t  cur_req;
  logic      cur_locked;
  assign cur_req    = req[cur_q];
  assign cur_locked = lock_q[cur_req.line[$clog2(LINES)-1:0]];

  llc_resp_t resp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      rr_q    <= '0;
      cur_q   <= '0;
      cnt_q   <= '0;
      lock_q  <= '0;
      resp_q  <= '0;
    end else begin
      resp_q.valid <= 1'b0;
      case (state_q)
        S_IDLE: if (pick_found) begin
          cur_q   <= pick;
          rr_q    <= PORT_W'((int'(pick) + 1) % N_PORTS);
          cnt_q   <= CNT_W'(1);
          state_q <= S_BUSY;
        end
        S_BUSY: if (cnt_q >= CNT_W'(HIT_CYCLES)) begin
          state_q      <= S_RESP;
          resp_q.valid <= 1'b1;
          resp_q.nack  <= 1'b0;
          resp_q.rdata <= mem[cur_req.line[$clog2(LINES)-1:0]];
          // Only LLC_WRITE_UNLOCK may touch a locked line: it is sent by
          // the lock holder, the one core that got the lock.
          if (cur_locked && cur_req.op != LLC_WRITE_UNLOCK) begin
            resp_q.nack <= 1'b1;
          end else begin
            unique case (cur_req.op)
              LLC_READ:         ;
              LLC_WRITE:        ;
              LLC_LOCK_READ:    lock_q[cur_req.line[$clog2(LINES)-1:0]] <= 1'b1;
              LLC_WRITE_UNLOCK: lock_q[cur_req.line[$clog2(LINES)-1:0]] <= 1'b0;
            endcase
          end
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
        S_RESP: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // line storage (not reset)
  logic do_write;
  assign do_write = (state_q == S_BUSY) && (cnt_q >= CNT_W'(HIT_CYCLES)) &&
                    ((cur_req.op == LLC_WRITE && !cur_locked) || cur_req.op == LLC_WRITE_UNLOCK);
  always_ff @(posedge clk) begin
    if (do_write) mem[cur_req.line[$clog2(LINES)-1:0]] <= cur_req.wdata;
  end

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      resp[p]       = resp_q;
      resp[p].valid = resp_q.valid && (cur_q == PORT_W'(p));
    end
  end

  // A request must be held until it is answered.
  for (genvar p = 0; p < N_PORTS; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     (state_q == S_BUSY && cur_q == PORT_W'(p)) |-> req[p].valid)
      else $error("llc_lock_store: port %0d dropped its request", p);
  end

endmodule
