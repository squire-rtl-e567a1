// sync_module: Squire's synchronization module.
//
// Holds one 64-bit global counter and NUM_WORKERS 64-bit local counters, all
// readable and updatable in one cycle, as the paper describes. Each worker has
// its own operation port (op, counter index w, threshold s) and the host has a
// wait-only port; `ready` answers an operation in the cycle it is presented:
//   SYNC_INC_L  increments local counter w; always ready. Several workers may
//               increment the same counter in one cycle; all increments count.
//   SYNC_WAIT_L ready while local counter w >= s (the caller holds the request).
//   SYNC_WAIT_G ready while the global counter >= s.
//   SYNC_INC_G  in-order increment of the global counter. Following the paper,
//               a token names the worker whose increment is next (reset to 0);
//               an increment from any other worker is parked in that worker's
//               queue. Each cycle the queues are scanned in worker order from
//               the token: every consecutive worker with a pending increment
//               (parked, or arriving this cycle) is retired, the counter grows
//               by their number and the token moves past them (wrapping at
//               NUM_WORKERS). An increment from the token holder with nothing
//               parked therefore retires in the cycle it arrives.
// The paper does not size the queues. Since every entry is the same "one
// increment", each queue is kept as a count of pending increments, up to
// QDEPTH; a worker whose queue is full is not ready (it stalls) until it
// drains. `clear` (start_squire) resets counters, token and queues.
module sync_module
  import squire_pkg::*;
#(
  parameter int unsigned NUM_WORKERS = 16,
  parameter int unsigned QDEPTH      = 4,
  localparam int unsigned WID_W      = (NUM_WORKERS > 1) ? $clog2(NUM_WORKERS) : 1,
  localparam int unsigned QCNT_W     = $clog2(QDEPTH + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  // worker ports
  input  sync_op_e                wk_op    [NUM_WORKERS],
  input  logic [WID_W-1:0]        wk_w     [NUM_WORKERS],
  input  logic [XLEN-1:0]         wk_s     [NUM_WORKERS],
  output logic                    wk_ready [NUM_WORKERS],
  // host port (waits only)
  input  sync_op_e                host_op,
  input  logic [WID_W-1:0]        host_w,
  input  logic [XLEN-1:0]         host_s,
  output logic                    host_ready,
  // observation
  output logic [XLEN-1:0]         gcounter,
  output logic [XLEN-1:0]         lcounter [NUM_WORKERS],
  output logic [WID_W-1:0]        token,
  output logic [QCNT_W-1:0]       pending  [NUM_WORKERS]
);

  logic [XLEN-1:0]   gcnt_q;
  logic [XLEN-1:0]   lcnt_q   [NUM_WORKERS];
  logic [WID_W-1:0]  token_q;
  logic [QCNT_W-1:0] pend_q   [NUM_WORKERS];

  // ---------------- global counter: accept, then retire in order ----------
  logic              inc_acc  [NUM_WORKERS];
  logic              has_inc  [NUM_WORKERS];
  logic              retire   [NUM_WORKERS];
  logic [WID_W:0]    n_retire;
  logic [WID_W-1:0]  token_d;

  always_comb begin
    logic chain;
    int unsigned idx;
    for (int i = 0; i < NUM_WORKERS; i++) begin
      inc_acc[i] = (wk_op[i] == SYNC_INC_G) && (pend_q[i] < QCNT_W'(QDEPTH));
      has_inc[i] = inc_acc[i] || (pend_q[i] != '0);
      retire[i]  = 1'b0;
    end
    chain    = 1'b1;
    n_retire = '0;
    for (int k = 0; k < NUM_WORKERS; k++) begin
      idx = (int'(token_q) + k) % NUM_WORKERS;
      if (chain && has_inc[idx]) begin
        retire[idx] = 1'b1;
        n_retire    = n_retire + 1'b1;
      end else begin
        chain = 1'b0;
      end
    end
    token_d = WID_W'((int'(token_q) + int'(n_retire)) % NUM_WORKERS);
  end

  // ---------------- local counters: increments per counter ---------------
  logic [WID_W:0] l_inc [NUM_WORKERS];
  always_comb begin
    for (int c = 0; c < NUM_WORKERS; c++) l_inc[c] = '0;
    for (int i = 0; i < NUM_WORKERS; i++)
      if (wk_op[i] == SYNC_INC_L && int'(wk_w[i]) < NUM_WORKERS)
        l_inc[wk_w[i]] = l_inc[wk_w[i]] + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt_q  <= '0;
      token_q <= '0;
      for (int i = 0; i < NUM_WORKERS; i++) begin
        lcnt_q[i] <= '0;
        pend_q[i] <= '0;
      end
    end else if (clear) begin
      gcnt_q  <= '0;
      token_q <= '0;
      for (int i = 0; i < NUM_WORKERS; i++) begin
        lcnt_q[i] <= '0;
        pend_q[i] <= '0;
      end
    end else begin
      gcnt_q  <= gcnt_q + XLEN'(n_retire);
      token_q <= token_d;
      for (int i = 0; i < NUM_WORKERS; i++) begin
        lcnt_q[i] <= lcnt_q[i] + XLEN'(l_inc[i]);
        pend_q[i] <= pend_q[i] + QCNT_W'(inc_acc[i]) - QCNT_W'(retire[i]);
      end
    end
  end

  // ---------------- ready / wait comparisons ------------------------------
  always_comb begin
    for (int i = 0; i < NUM_WORKERS; i++) begin
      unique case (wk_op[i])
        SYNC_INC_L:  wk_ready[i] = 1'b1;
        SYNC_INC_G:  wk_ready[i] = inc_acc[i];
        SYNC_WAIT_L: wk_ready[i] = (lcnt_q[wk_w[i]] >= wk_s[i]);
        SYNC_WAIT_G: wk_ready[i] = (gcnt_q >= wk_s[i]);
        default:     wk_ready[i] = 1'b0;
      endcase
    end
    unique case (host_op)
      SYNC_WAIT_L: host_ready = (lcnt_q[host_w] >= host_s);
      SYNC_WAIT_G: host_ready = (gcnt_q >= host_s);
      default:     host_ready = 1'b0;
    endcase
  end

  assign gcounter = gcnt_q;
  assign token    = token_q;
  always_comb
    for (int i = 0; i < NUM_WORKERS; i++) begin
      lcounter[i] = lcnt_q[i];
      pending[i]  = pend_q[i];
    end

  // A queue never exceeds its depth.
  always_ff @(posedge clk)
    if (rst_n)
      for (int i = 0; i < NUM_WORKERS; i++)
        assert (pend_q[i] <= QCNT_W'(QDEPTH))
          else $error("sync_module: queue %0d overflow", i);

endmodule
