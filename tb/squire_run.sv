// squire_run: one end-to-end run of the Squire top at a chosen worker count,
// used by tb_squire_workers to cover the other worker counts the paper
// evaluates (4, 8 and 32; the default 16 is covered by tb_squire).
//
// It is the same environment as tb_squire: NUM_WORKERS behavioural worker
// cores (worker_model), a behavioural L2 (l2_model) and an initial block that
// plays the host. The host program is smaller: radix sort of 64 keys per
// worker, chain over 128 anchors with window T = 64, DTW and Smith-Waterman
// on 6 x 64 matrices and a burst of global increments. Every result is
// checked against a reference computed here, and the synchronization
// mechanisms whose behaviour depends on the worker count (token wrap-around,
// parked and queue-full increments, waits on both kinds of counter, bus
// contention) must each occur. When done, `done` rises and `checks` and
// `failures` hold the totals; the instance has its own clock and reset.
module squire_run #(
  parameter int NW = 4
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import squire_pkg::*;
  import tb_squire_fn::*;

  localparam int WID_W = (NW > 1) ? $clog2(NW) : 1;
  localparam int ID_W  = $clog2(2 * NW);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // host side
  logic            host_we = 0;
  logic [3:0]      host_waddr = '0, host_raddr = '0;
  logic [XLEN-1:0] host_wdata = '0, host_rdata;
  sync_op_e        host_sync_op = SYNC_NONE;
  logic [WID_W-1:0] host_sync_w = '0;
  logic [XLEN-1:0] host_sync_s = '0;
  logic            host_sync_ready, busy;
  // worker side
  logic                 wk_start;
  logic [ADDR_W-1:0]    wk_start_pc;
  logic [XLEN-1:0]      wk_start_args [NUM_ARGS];
  logic [NW-1:0]        wk_stop, wk_running;
  logic                 wk_fetch_valid [NW], wk_fetch_ready [NW], wk_fetch_rvalid [NW];
  logic [ADDR_W-1:0]    wk_fetch_addr [NW];
  logic [XLEN-1:0]      wk_fetch_rdata [NW];
  logic                 wk_dreq_valid [NW], wk_dreq_write [NW], wk_dreq_ready [NW], wk_drsp_valid [NW];
  logic [ADDR_W-1:0]    wk_dreq_addr [NW];
  logic [XLEN-1:0]      wk_dreq_wdata [NW], wk_drsp_rdata [NW];
  logic [7:0]           wk_dreq_be [NW];
  sync_op_e             wk_sync_op [NW];
  logic [WID_W-1:0]     wk_sync_w [NW];
  logic [XLEN-1:0]      wk_sync_s [NW];
  logic                 wk_sync_ready [NW];
  // L2 side
  logic                 l2_req_valid, l2_req_ready, l2_rsp_valid, l2_inv_valid;
  bus_req_t             l2_req;
  logic [ID_W-1:0]      l2_req_id, l2_rsp_id;
  logic [LINE_W-1:0]    l2_rsp_data;
  logic [ADDR_W-1:0]    l2_inv_addr;

  squire #(.NUM_WORKERS(NW)) dut (.*);

  l2_model #(.ID_W(ID_W)) u_l2 (
    .clk, .rst_n,
    .req_valid (l2_req_valid), .req (l2_req), .req_id (l2_req_id), .req_ready (l2_req_ready),
    .rsp_valid (l2_rsp_valid), .rsp_id (l2_rsp_id), .rsp_data (l2_rsp_data),
    .inv_valid (l2_inv_valid), .inv_addr (l2_inv_addr)
  );

  for (genvar w = 0; w < NW; w++) begin : g_wk
    worker_model #(.ID(w), .NUM_WORKERS(NW), .WID_W(WID_W)) u_wk (
      .clk,
      .start (wk_start), .start_pc (wk_start_pc), .start_args (wk_start_args),
      .stop (wk_stop[w]),
      .fetch_valid (wk_fetch_valid[w]), .fetch_addr (wk_fetch_addr[w]), .fetch_ready (wk_fetch_ready[w]),
      .fetch_rvalid (wk_fetch_rvalid[w]), .fetch_rdata (wk_fetch_rdata[w]),
      .dreq_valid (wk_dreq_valid[w]), .dreq_write (wk_dreq_write[w]), .dreq_addr (wk_dreq_addr[w]),
      .dreq_wdata (wk_dreq_wdata[w]), .dreq_be (wk_dreq_be[w]), .dreq_ready (wk_dreq_ready[w]),
      .drsp_valid (wk_drsp_valid[w]), .drsp_rdata (wk_drsp_rdata[w]),
      .sync_op (wk_sync_op[w]), .sync_w (wk_sync_w[w]), .sync_s (wk_sync_s[w]), .sync_ready (wk_sync_ready[w])
    );
  end

  initial begin checks = 0; failures = 0; done = 0; end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- mechanism monitor ----------------
  int n_start = 0, n_stop = 0, n_ihit = 0, n_imiss = 0, n_dhit = 0, n_dmiss = 0, n_snoop = 0;
  int n_contend = 0, n_parked = 0, n_qfull = 0, n_waitg = 0, n_waitl = 0, n_l2inv = 0;
  int cyc = 0;
  always @(negedge clk) if (rst_n) begin
    #2;
    cyc++;
    if (wk_start) n_start++;
    n_stop += $countones(wk_stop);
    if ($countones(dut.req_valid) > 1) n_contend++;
    if (l2_inv_valid) n_l2inv++;
    for (int w = 0; w < NW; w++) begin
      if (wk_sync_op[w] == SYNC_INC_G && wk_sync_ready[w] && int'(dut.token) != w) n_parked++;
      if (wk_sync_op[w] == SYNC_INC_G && !wk_sync_ready[w]) n_qfull++;
      if (wk_sync_op[w] == SYNC_WAIT_G && !wk_sync_ready[w]) n_waitg++;
      if (wk_sync_op[w] == SYNC_WAIT_L && !wk_sync_ready[w]) n_waitl++;
    end
  end
  int fetch_err [NW];
  for (genvar w = 0; w < NW; w++) begin : g_mon
    always_comb fetch_err[w] = g_wk[w].u_wk.fetch_errors;
    always @(negedge clk) if (rst_n) begin
      #2;
      if (dut.g_worker[w].u_l1i.ev_hit)       n_ihit++;
      if (dut.g_worker[w].u_l1i.ev_miss)      n_imiss++;
      if (dut.g_worker[w].u_l1d.ev_hit)       n_dhit++;
      if (dut.g_worker[w].u_l1d.ev_miss)      n_dmiss++;
      if (dut.g_worker[w].u_l1d.ev_snoop_inv) n_snoop++;
    end
  end


  // ---------------- host primitives ----------------
  task automatic host_wr(creg_e a, logic [XLEN-1:0] d);
    @(negedge clk);
    host_we = 1; host_waddr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic start_squire(logic [ADDR_W-1:0] f, logic [XLEN-1:0] a [NUM_ARGS]);
    host_wr(CR_FUNC, f);
    for (int k = 0; k < NUM_ARGS; k++) host_wr(creg_e'(int'(CR_ARG0) + k), a[k]);
    host_wr(CR_START, '0);
  endtask

  task automatic host_wait(sync_op_e op, int w, longint s, output int cycles);
    @(negedge clk);
    host_sync_op = op; host_sync_w = WID_W'(w); host_sync_s = XLEN'(s);
    cycles = 0;
    #1;
    while (!host_sync_ready) begin @(negedge clk); #1; cycles++; end
    @(negedge clk);
    host_sync_op = SYNC_NONE;
  endtask

  task automatic wait_all_stopped();
    int guard = 0;
    @(negedge clk);
    while (busy && guard < 100000) begin @(negedge clk); guard++; end
    check(!busy && wk_running == '0, "all workers stopped");
  endtask

  function automatic longint mem_rd(logic [ADDR_W-1:0] a);
    return longint'(u_l2.rd(a));
  endfunction

  // ---------------- the host program ----------------
  localparam logic [ADDR_W-1:0] XBASE = 64'h0010_0000;   // radix keys / anchors
  localparam logic [ADDR_W-1:0] FBASE = 64'h0011_0000;   // chain scores
  localparam logic [ADDR_W-1:0] SBASE = 64'h0012_0000;   // DTW signal S
  localparam logic [ADDR_W-1:0] RBASE = 64'h0012_1000;   // DTW signal R
  localparam logic [ADDR_W-1:0] MBASE = 64'h0013_0000;   // DTW / SW matrix
  localparam logic [ADDR_W-1:0] KBASE = 64'h0020_0000;   // radix keys

  logic [XLEN-1:0] args [NUM_ARGS];
  int wcyc;

  // 2-D dynamic programming over column bands: DTW (sw = 0) on small
  // integer samples or Smith-Waterman (sw = 1) on a 4-letter alphabet.
  task automatic run_dp(bit sw, string name);
    localparam int N = 6, M = 64;
    longint s [N], r [M], mm [N][M], up, left, diag;
    for (int i = 0; i < N; i++) s[i] = sw ? $urandom_range(0, 3) : $urandom_range(0, 50);
    for (int j = 0; j < M; j++) r[j] = sw ? $urandom_range(0, 3) : $urandom_range(0, 50);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        up   = (i > 0) ? mm[i-1][j] : dp_edge(sw, i, j, 1, 0);
        left = (j > 0) ? mm[i][j-1] : dp_edge(sw, i, j, 0, 1);
        diag = (i > 0 && j > 0) ? mm[i-1][j-1] : dp_edge(sw, i, j, 1, 1);
        mm[i][j] = dp_cell(sw, up, left, diag, s[i], r[j]);
      end
    for (int i = 0; i < N; i++) u_l2.host_write(SBASE + 64'(i * 8), s[i]);
    for (int j = 0; j < M; j++) u_l2.host_write(RBASE + 64'(j * 8), r[j]);
    // the matrix area is reused by both runs: clear it so stale cells show up
    for (int k = 0; k < N * M; k++) u_l2.host_write(MBASE + 64'(k * 8), -1);
    args[0] = SBASE; args[1] = RBASE; args[2] = MBASE; args[3] = {32'(M), 32'(N)};
    start_squire(sw ? 64'h5000 : 64'h3000, args);
    host_wait(SYNC_WAIT_L, NW - 1, N, wcyc);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        check(mem_rd(MBASE + 64'((i * M + j) * 8)) == mm[i][j], {name, ": matrix cell"});
    for (int w = 0; w < NW; w++) check(dut.lcounter[w] == N, {name, ": one local increment per row"});
    wait_all_stopped();
    $display("[%0d workers] %s done at cycle %0d (host waited %0d cycles)", NW, name, cyc, wcyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    host_raddr = CR_NUMW;
    #1 check(host_rdata == XLEN'(NW), "num_workers readable by the host");

    // ---- 1. Radix sort ----
    begin
      localparam int N = 64 * NW;
      longint keys [N], chunk [$], got;
      for (int k = 0; k < N; k++) begin keys[k] = $urandom_range(0, 65535); u_l2.wr(KBASE + 64'(k * 8), keys[k]); end
      args[0] = KBASE; args[1] = N; args[2] = 0; args[3] = 0;
      start_squire(64'h1000, args);
      host_wait(SYNC_WAIT_G, 0, NW, wcyc);
      check(dut.gcounter == NW, "radix: global counter equals num_workers");
      for (int w = 0; w < NW; w++) begin
        chunk.delete();
        for (int k = w * (N / NW); k < (w + 1) * (N / NW); k++) chunk.push_back(keys[k]);
        chunk.sort();
        for (int k = 0; k < N / NW; k++) begin
          got = mem_rd(KBASE + 64'((w * (N / NW) + k) * 8));
          check(got == chunk[k], "radix: chunk sorted");
        end
      end
      wait_all_stopped();
      $display("[%0d workers] radix done at cycle %0d (host waited %0d cycles)", NW, cyc, wcyc);
    end

    // ---- 2. Chain ----
    begin
      localparam int N = 128, T = 64;
      longint x [N], f [N], a, best;
      x[0] = 100;
      for (int i = 1; i < N; i++) x[i] = x[i-1] + (($urandom_range(0, 5) == 0) ? $urandom_range(13, 30) : $urandom_range(1, 6));
      for (int i = 0; i < N; i++) begin
        best = ANCHOR_W;
        for (int j = i - T; j < i; j++)
          if (j >= 0) begin
            a = match_up(x[i], x[j]);
            if (a != NEG_INF && f[j] + a > best) best = f[j] + a;
          end
        f[i] = best;
      end
      for (int i = 0; i < N; i++) begin
        u_l2.host_write(XBASE + 64'(i * 8), x[i]);
        u_l2.host_write(FBASE + 64'(i * 8), -1);
      end
      args[0] = XBASE; args[1] = FBASE; args[2] = N; args[3] = T;
      start_squire(64'h2000, args);
      host_wait(SYNC_WAIT_G, 0, N, wcyc);
      for (int i = 0; i < N; i++) check(mem_rd(FBASE + 64'(i * 8)) == f[i], "chain: score F[i]");
      check(dut.gcounter == N, "chain: one in-order increment per anchor");
      wait_all_stopped();
      $display("[%0d workers] chain done at cycle %0d (host waited %0d cycles)", NW, cyc, wcyc);
    end

    // ---- 3. DTW and 4. Smith-Waterman ----
    run_dp(0, "dtw");
    run_dp(1, "sw");

    // ---- 5. Burst of increments ----
    begin
      args[0] = 6; args[1] = 0; args[2] = 0; args[3] = 0;
      start_squire(64'h4000, args);
      host_wait(SYNC_WAIT_G, 0, NW * 6, wcyc);
      wait_all_stopped();
      check(dut.gcounter == NW * 6, "burst: every increment counted once");
    end

    for (int w = 0; w < NW; w++) check(fetch_err[w] == 0, "instruction fetches returned the code");
    $display("[%0d workers] mechanisms: start=%0d stop=%0d ihit=%0d imiss=%0d dhit=%0d dmiss=%0d snoop_inv=%0d l2_inv=%0d",
              NW, n_start, n_stop, n_ihit, n_imiss, n_dhit, n_dmiss, n_snoop, n_l2inv);
    $display("            bus_contention=%0d parked_inc=%0d queue_full=%0d wait_g_stall=%0d wait_l_stall=%0d",
             n_contend, n_parked, n_qfull, n_waitg, n_waitl);
    check(n_start == 5, "five start pulses");
    check(n_stop == 5 * NW, "every worker stopped after every run");
    check(n_ihit > 0, "mechanism: L1I hit");
    check(n_imiss > 0, "mechanism: L1I miss");
    check(n_dhit > 0, "mechanism: L1D hit");
    check(n_dmiss > 0, "mechanism: L1D miss");
    check(n_snoop > 0, "mechanism: snoop invalidation");
    check(n_l2inv > 0, "mechanism: L2 invalidation");
    check(n_contend > 0, "mechanism: bus contention");
    check(n_parked > 0, "mechanism: out-of-order increment parked");
    check(n_qfull > 0, "mechanism: increment queue full");
    check(n_waitg > 0, "mechanism: wait_gcounter stall");
    check(n_waitl > 0, "mechanism: wait_lcounter stall");
    $display("%0d workers: total cycles %0d, checks %0d, failures %0d", NW, cyc, checks, failures);
    done = 1;
  end
endmodule
