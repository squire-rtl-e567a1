// tb_l1i_cache: self-checking test of the worker instruction cache.
//
// The cache (shrunk to 256 bytes) serves random 64-bit fetches over a 1 KB
// code region. The testbench plays the L2 (random grant delay and latency,
// line captured at the grant) and the rest of the system: snooped writes and
// L2 invalidations change the code, and a flush pulse models start_squire
// after new code was loaded. Every fetch must return the code as it was when
// the fetch was ordered (acceptance for a hit, grant for a miss); a hit
// answers one cycle after acceptance, a miss one cycle after the line.
module tb_l1i_cache;
  import squire_pkg::*;

  localparam int WORDS = 128;
  localparam logic [ADDR_W-1:0] BASE = 64'h0000_0000_0040_0000;

  logic clk = 0, rst_n = 0, flush = 0;
  logic              fetch_valid = 0, fetch_ready, fetch_rsp_valid;
  logic [ADDR_W-1:0] fetch_addr = '0;
  logic [XLEN-1:0]   fetch_rsp_data;
  logic              bus_req_valid, bus_gnt = 0, bus_rsp_valid = 0;
  logic [ADDR_W-7:0] bus_req_line;
  logic [LINE_W-1:0] bus_rsp_data = '0;
  logic              snp_wr_valid = 0, snp_inv_valid = 0;
  logic [ADDR_W-1:0] snp_wr_addr = '0, snp_inv_addr = '0;
  logic              ev_hit, ev_miss;

  l1i_cache #(.SIZE_BYTES(256)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [XLEN-1:0] mem [WORDS];
  function automatic int widx(logic [ADDR_W-1:0] a);
    return int'((a - BASE) >> 3) % WORDS;
  endfunction

  bit busy = 0, on_bus, gnt_now, rsp_now, do_w, do_iv, do_fl;
  logic [ADDR_W-1:0] a_cur;
  logic [XLEN-1:0]   v_exp, w_val, iv_val;
  int since_acc, since_rsp, lat = -1, w_idx, iv_idx;
  logic [LINE_W-1:0] line_cap;
  int n_hit = 0, n_miss = 0, n_flush = 0;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      if (!busy) begin
        fetch_valid = ($urandom_range(0, 3) != 0);
        // mostly sequential fetch with occasional jumps
        fetch_addr  = ($urandom_range(0, 7) == 0) ? BASE + 64'($urandom_range(0, WORDS - 1)) * 8
                                                  : BASE + 64'((widx(fetch_addr) + 1) % WORDS) * 8;
      end
      gnt_now = bus_req_valid && ($urandom_range(0, 2) != 0);
      bus_gnt = gnt_now;
      rsp_now = (lat == 0);
      bus_rsp_valid = rsp_now;
      bus_rsp_data  = line_cap;
      do_w  = !gnt_now && ($urandom_range(0, 39) == 0);
      w_idx = $urandom_range(0, WORDS - 1); w_val = {$urandom, $urandom};
      snp_wr_valid = do_w; snp_wr_addr = BASE + 64'(w_idx) * 8;
      do_iv = ($urandom_range(0, 59) == 0);
      iv_idx = $urandom_range(0, WORDS - 1); iv_val = {$urandom, $urandom};
      snp_inv_valid = do_iv; snp_inv_addr = BASE + 64'(iv_idx) * 8;
      do_fl = ($urandom_range(0, 499) == 0);
      flush = do_fl;
      #1;
      if (fetch_valid && fetch_ready && !busy) begin
        busy = 1; a_cur = fetch_addr; v_exp = mem[widx(fetch_addr)];
        on_bus = 0; since_acc = 0; since_rsp = -1;
      end else if (busy) begin
        since_acc++;
        if (bus_req_valid) on_bus = 1;
      end
      if (gnt_now) begin
        check(bus_req_line == a_cur[ADDR_W-1:6], "line read request");
        for (int k = 0; k < 8; k++) line_cap[k*64 +: 64] = mem[(widx(a_cur) / 8) * 8 + k];
        v_exp = mem[widx(a_cur)];
        lat = $urandom_range(1, 5);
      end else if (lat >= 0) lat--;
      if (rsp_now) since_rsp = 0;
      if (do_w)  mem[w_idx]  = w_val;
      if (do_iv) mem[iv_idx] = iv_val;
      if (do_fl) begin
        n_flush++;
        for (int i = 0; i < WORDS; i++) mem[i] = {$urandom, $urandom};
      end
      @(posedge clk);
      #1;
      if (busy && fetch_rsp_valid) begin
        check(fetch_rsp_data == v_exp, "fetched code");
        if (fetch_rsp_data != v_exp) $display("cyc=%0d addr=%h on_bus=%0d since_acc=%0d", cyc, a_cur, on_bus, since_acc);
        if (!on_bus) begin check(since_acc == 0, "hit answers next cycle"); n_hit++; end
        else begin check(since_rsp == 0, "miss answers the cycle after the line"); n_miss++; end
        busy = 0;
      end
      if (rsp_now) lat = -1;
      if (busy) check(since_acc < 60, "fetch completes");
    end
    check(n_hit > 100 && n_miss > 100 && n_flush > 5, "hits, misses and flushes seen");
    $display("hits=%0d misses=%0d flushes=%0d", n_hit, n_miss, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
