// tb_sync_module: self-checking test of the synchronization module.
//
// Four workers, queue depth 2. The expected counter values are computed from
// scratch each cycle rather than by mirroring the hardware's queues: the
// global counter must equal the longest prefix 0,1,2,... of increment slots
// whose owner (slot p belongs to worker p mod 4) has had at least p/4+1
// increments accepted; a worker's increment must be accepted exactly when it
// has fewer than 2 accepted-but-not-yet-counted increments. Local counters
// must equal the number of accepted increments addressed to them, waits must
// answer by comparing with those numbers, and start (clear) must zero all.
module tb_sync_module;
  import squire_pkg::*;

  localparam int NW = 4;
  localparam int QD = 2;

  logic clk = 0, rst_n = 0, clear = 0;
  sync_op_e        wk_op [NW];
  logic [1:0]      wk_w  [NW];
  logic [XLEN-1:0] wk_s  [NW];
  logic            wk_ready [NW];
  sync_op_e        host_op;
  logic [1:0]      host_w;
  logic [XLEN-1:0] host_s;
  logic            host_ready;
  logic [XLEN-1:0] gcounter;
  logic [XLEN-1:0] lcounter [NW];
  logic [1:0]      token;
  logic [1:0]      pending [NW];

  sync_module #(.NUM_WORKERS(NW), .QDEPTH(QD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int acc_g [NW];      // accepted global increments per worker
  int ref_l [NW];      // expected local counter values
  bit rdy_s [NW];
  int tok_s;
  int n_enq = 0, n_full = 0, n_bypass = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int ref_g();
    int k = 0;
    while (acc_g[k % NW] > k / NW) k++;
    return k;
  endfunction

  function automatic int retired_of(int i, int g);
    // slots p < g with p mod NW == i
    return (g > i) ? (g - 1 - i) / NW + 1 : 0;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int r, g, pend;

  initial begin
    for (int i = 0; i < NW; i++) begin
      wk_op[i] = SYNC_NONE; wk_w[i] = '0; wk_s[i] = '0; acc_g[i] = 0; ref_l[i] = 0;
    end
    host_op = SYNC_NONE; host_w = '0; host_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1: token holder increments alone: counted in one cycle ----
    wk_op[0] = SYNC_INC_G;
    #1 check(wk_ready[0] == 1'b1, "inc_g from token holder accepted");
    @(posedge clk); acc_g[0]++; n_bypass++;
    @(negedge clk); wk_op[0] = SYNC_NONE;
    check(gcounter == 1, "gcounter after one in-order increment");
    check(token == 1, "token advanced");

    // ---- 2: out-of-order increments are parked, then released together ----
    wk_op[3] = SYNC_INC_G; wk_op[2] = SYNC_INC_G;
    @(posedge clk); acc_g[3]++; acc_g[2]++; n_enq += 2;
    @(negedge clk); wk_op[3] = SYNC_NONE; wk_op[2] = SYNC_NONE;
    check(gcounter == 1, "parked increments not counted yet");
    check(pending[2] == 1 && pending[3] == 1, "increments parked in queues");
    wk_op[1] = SYNC_INC_G;
    @(posedge clk); acc_g[1]++;
    @(negedge clk); wk_op[1] = SYNC_NONE;
    check(gcounter == 4, "chain of three released in one cycle");
    check(token == 0, "token wrapped");

    // ---- 3: random traffic against the prefix model ----
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < NW; i++) begin
        r = $urandom_range(0, 9);
        wk_w[i] = 2'($urandom_range(0, NW - 1));
        wk_s[i] = XLEN'($urandom_range(0, 300));
        if (r < 4)       wk_op[i] = SYNC_INC_G;
        else if (r < 6)  wk_op[i] = SYNC_INC_L;
        else if (r < 8)  wk_op[i] = SYNC_WAIT_L;
        else if (r < 9)  wk_op[i] = SYNC_WAIT_G;
        else             wk_op[i] = SYNC_NONE;
        // worker 0 sometimes goes quiet so the queues fill up
        if (i == 0 && (cyc % 200) < 60) wk_op[i] = SYNC_NONE;
      end
      host_op = ($urandom_range(0, 1) == 0) ? SYNC_WAIT_L : SYNC_WAIT_G;
      host_w  = 2'($urandom_range(0, NW - 1));
      host_s  = XLEN'($urandom_range(0, 300));
      #1;
      for (int i = 0; i < NW; i++) begin
        rdy_s[i] = wk_ready[i];
        tok_s    = int'(token);
      end
      for (int i = 0; i < NW; i++) begin
        g = ref_g();
        pend = acc_g[i] - retired_of(i, g);
        case (wk_op[i])
          SYNC_INC_G: begin
            check(wk_ready[i] == (pend < QD), "inc_g accepted iff queue not full");
            if (wk_ready[i] != (pend < QD) && failures < 4) $display("i=%0d rdy=%0d pend=%0d hwpend=%0d g=%0d hwg=%0d acc=%0d", i, wk_ready[i], pend, pending[i], g, gcounter, acc_g[i]);
            if (pend >= QD) n_full++;
          end
          SYNC_INC_L:  check(wk_ready[i] == 1'b1, "inc_l always accepted");
          SYNC_WAIT_L: check(wk_ready[i] == (ref_l[wk_w[i]] >= int'(wk_s[i])), "wait_l compare");
          SYNC_WAIT_G: check(wk_ready[i] == (g >= int'(wk_s[i])), "wait_g compare");
          default: ;
        endcase
      end
      if (host_op == SYNC_WAIT_L) check(host_ready == (ref_l[host_w] >= int'(host_s)), "host wait_l");
      else                        check(host_ready == (ref_g() >= int'(host_s)), "host wait_g");
      @(posedge clk);
      for (int i = 0; i < NW; i++) begin
        if (wk_op[i] == SYNC_INC_G && rdy_s[i]) begin
          if (tok_s != i) n_enq++;
          acc_g[i]++;
        end
        if (wk_op[i] == SYNC_INC_L) ref_l[wk_w[i]]++;
      end
      #1;
      check(int'(gcounter) == ref_g(), "gcounter equals in-order prefix");
      for (int i = 0; i < NW; i++)
        check(int'(lcounter[i]) == ref_l[i], "local counter value");
    end

    // ---- 4: clear (start_squire) zeroes everything ----
    @(negedge clk);
    for (int i = 0; i < NW; i++) wk_op[i] = SYNC_NONE;
    clear = 1;
    @(posedge clk); #1 clear = 0;
    check(gcounter == 0 && token == 0, "clear resets global counter and token");
    for (int i = 0; i < NW; i++) check(lcounter[i] == 0 && pending[i] == 0, "clear resets local counters and queues");

    check(n_enq > 0 && n_full > 0 && n_bypass > 0, "enqueue, queue-full stall and bypass all seen");
    $display("enqueued=%0d full_stalls=%0d", n_enq, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
