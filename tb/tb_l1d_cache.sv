// tb_l1d_cache: self-checking test of the worker data cache.
//
// The cache (shrunk to 512 bytes so that lines conflict) serves a random
// stream of loads and stores over a 2 KB region. The testbench plays the L2:
// it grants bus requests after random delays, keeps the reference memory,
// captures a line when a read is granted and answers after a random latency.
// It also plays the rest of the system: other requesters' writes appear on
// the snoop lines (and change memory), and L2 invalidations announce lines
// changed by the host. Every load must return the memory value at the moment
// the load was ordered: at acceptance for a hit (no bus request), at the
// grant for a miss. Timing checks: a hit answers one cycle after acceptance,
// a miss one cycle after the line arrives, a store after its acknowledgement.
module tb_l1d_cache;
  import squire_pkg::*;

  localparam int WORDS = 256;                       // 2 KB region
  localparam logic [ADDR_W-1:0] BASE = 64'h0000_0000_1000_0000;

  logic clk = 0, rst_n = 0;
  logic              core_req_valid = 0, core_req_write = 0;
  logic [ADDR_W-1:0] core_req_addr = '0;
  logic [XLEN-1:0]   core_req_wdata = '0, core_rsp_rdata;
  logic [7:0]        core_req_be = '0;
  logic              core_req_ready, core_rsp_valid;
  logic              bus_req_valid, bus_gnt = 0, bus_rsp_valid = 0;
  bus_req_t          bus_req;
  logic [LINE_W-1:0] bus_rsp_data = '0;
  logic              snp_wr_valid = 0, snp_inv_valid = 0;
  logic [ADDR_W-1:0] snp_wr_addr = '0, snp_inv_addr = '0;
  logic [4:0]        snp_wr_src = '0;
  logic              ev_hit, ev_miss, ev_snoop_inv;

  l1d_cache #(.SIZE_BYTES(512), .ID_W(5), .SELF_ID(3)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [XLEN-1:0] mem [WORDS];
  function automatic int widx(logic [ADDR_W-1:0] a);
    return int'((a - BASE) >> 3) % WORDS;
  endfunction
  function automatic logic [XLEN-1:0] merge(logic [XLEN-1:0] o, logic [XLEN-1:0] n, logic [7:0] be);
    for (int b = 0; b < 8; b++) if (be[b]) o[b*8 +: 8] = n[b*8 +: 8];
    return o;
  endfunction

  // core-side state
  bit busy = 0, is_wr, on_bus, got_gnt;
  logic [ADDR_W-1:0] a_cur;
  logic [XLEN-1:0]   v_exp, st_data;
  logic [7:0]        st_be;
  int since_acc, since_rsp;
  // L2 side state
  int lat = -1;
  logic [LINE_W-1:0] line_cap;
  int n_hit = 0, n_miss = 0, n_sinv = 0, n_kill = 0, n_loads = 0, n_stores = 0;
  int pw_idx, iv_idx;
  logic [XLEN-1:0] pw_val, iv_val;
  bit do_pw, do_iv, gnt_now, rsp_now;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      // ---- drive core ----
      if (!busy && $urandom_range(0, 2) != 0) begin
        core_req_valid = 1;
        core_req_write = ($urandom_range(0, 3) == 0);
        core_req_addr  = BASE + 64'($urandom_range(0, WORDS - 1)) * 8;
        core_req_wdata = {$urandom, $urandom};
        core_req_be    = ($urandom_range(0, 1) == 0) ? 8'hff : 8'($urandom);
      end else if (!busy) begin
        core_req_valid = 0;
      end
      // ---- drive L2 / system ----
      gnt_now = bus_req_valid && ($urandom_range(0, 2) != 0);
      bus_gnt = gnt_now;
      rsp_now = (lat == 0);
      bus_rsp_valid = rsp_now;
      bus_rsp_data  = line_cap;
      do_pw = !gnt_now && ($urandom_range(0, 9) == 0);
      // a third of the foreign writes aim at the line the cache is working on
      pw_idx = (busy && $urandom_range(0, 2) == 0) ? (widx(a_cur) / 8) * 8 + $urandom_range(0, 7)
                                                   : $urandom_range(0, WORDS - 1);
      pw_val = {$urandom, $urandom};
      snp_wr_valid = do_pw;
      snp_wr_addr  = BASE + 64'(pw_idx) * 8;
      snp_wr_src   = 5'($urandom_range(4, 31));
      // the cache's own writes come back on the snoop bus; they must be ignored
      if (!do_pw && $urandom_range(0, 9) == 0) begin
        snp_wr_valid = 1; snp_wr_src = 5'd3; snp_wr_addr = BASE + 64'($urandom_range(0, WORDS-1)) * 8;
      end
      do_iv = ($urandom_range(0, 19) == 0);
      iv_idx = (busy && $urandom_range(0, 2) == 0) ? (widx(a_cur) / 8) * 8 + $urandom_range(0, 7)
                                                   : $urandom_range(0, WORDS - 1);
      iv_val = {$urandom, $urandom};
      snp_inv_valid = do_iv;
      snp_inv_addr  = BASE + 64'(iv_idx) * 8;
      #1;
      // ---- what happens at this edge ----
      if (core_req_valid && core_req_ready && !busy) begin
        busy = 1; is_wr = core_req_write; a_cur = core_req_addr;
        st_data = core_req_wdata; st_be = core_req_be;
        v_exp = mem[widx(core_req_addr)];
        on_bus = 0; got_gnt = 0; since_acc = 0; since_rsp = -1;
        if (is_wr) n_stores++; else n_loads++;
      end else if (busy) begin
        since_acc++;
        if (bus_req_valid) on_bus = 1;
      end
      if (ev_snoop_inv) n_sinv++;
      if (gnt_now) begin
        check(!core_req_write || bus_req.write == is_wr, "bus request kind");
        if (bus_req.write) begin
          check(bus_req.addr == a_cur && bus_req.wdata == st_data && bus_req.be == st_be, "write-through word");
          mem[widx(a_cur)] = merge(mem[widx(a_cur)], st_data, st_be);
        end else begin
          check(bus_req.addr[5:0] == 0 && bus_req.addr[ADDR_W-1:6] == a_cur[ADDR_W-1:6], "line read address");
          for (int k = 0; k < 8; k++) line_cap[k*64 +: 64] = mem[widx({bus_req.addr[ADDR_W-1:6], 6'b0}) + k];
          v_exp = mem[widx(a_cur)];
        end
        got_gnt = 1;
        lat = $urandom_range(1, 5);
      end else if (lat >= 0) begin
        lat--;
      end
      if (rsp_now) since_rsp = 0;
      // a foreign write or invalidation racing a fill that is in flight
      if (busy && !is_wr && (got_gnt || gnt_now) && lat >= 0 &&
          ((do_pw && pw_idx / 8 == widx(a_cur) / 8) || (do_iv && iv_idx / 8 == widx(a_cur) / 8))) n_kill++;
      if (do_pw) mem[pw_idx] = pw_val;
      if (do_iv) mem[iv_idx] = iv_val;
      @(posedge clk);
      #1;
      // ---- response check (registered output, visible after the edge) ----
      if (busy && core_rsp_valid) begin
        if (!is_wr) begin
          check(core_rsp_rdata == v_exp, "load value");
          if (!on_bus) begin check(since_acc == 0, "hit answers next cycle"); n_hit++; end
          else begin check(since_rsp == 0, "miss answers the cycle after the line"); n_miss++; end
        end else begin
          check(got_gnt && since_rsp == 0, "store answers after its acknowledgement");
        end
        busy = 0;
      end
      if (rsp_now) lat = -1;
      if (busy) check(since_acc < 60, "request completes");
    end
    check(n_hit > 100 && n_miss > 100 && n_sinv > 20 && n_kill > 10, "hits, misses, snoop invalidations and fill races seen");
    $display("loads=%0d stores=%0d hits=%0d misses=%0d snoop_inv=%0d fill_races=%0d", n_loads, n_stores, n_hit, n_miss, n_sinv, n_kill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
