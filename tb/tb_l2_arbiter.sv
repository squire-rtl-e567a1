// tb_l2_arbiter: self-checking test of the shared L2 bus arbiter.
//
// Eight requesters raise random requests and hold them until granted; the L2
// side is randomly not ready. Checked every cycle: at most one grant, and only
// when the L2 is ready; the grant goes to the first requesting index after
// the previous grant (round robin, computed here from the request vector);
// the forwarded request and id are the granted requester's; a granted write
// appears on the snoop lines with its source; L2 invalidations and responses
// are passed to the right place. Also checked: no requester waits longer than
// NREQ grants (fairness).
module tb_l2_arbiter;
  import squire_pkg::*;

  localparam int N = 8;

  logic clk = 0, rst_n = 0;
  logic [N-1:0]      req_valid;
  bus_req_t          req [N];
  logic [N-1:0]      req_gnt, rsp_valid;
  logic [LINE_W-1:0] rsp_data;
  logic              snp_wr_valid, snp_inv_valid;
  logic [ADDR_W-1:0] snp_wr_addr, snp_inv_addr;
  logic [2:0]        snp_wr_src;
  logic              l2_req_valid, l2_req_ready;
  bus_req_t          l2_req;
  logic [2:0]        l2_req_id;
  logic              l2_rsp_valid, l2_inv_valid;
  logic [2:0]        l2_rsp_id;
  logic [LINE_W-1:0] l2_rsp_data;
  logic [ADDR_W-1:0] l2_inv_addr;

  l2_arbiter #(.NREQ(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #300000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int clr = -1, last = N - 1, exp_sel, wait_grants [N], n_contended = 0;

  initial begin
    req_valid = '0;
    for (int i = 0; i < N; i++) begin req[i] = '0; wait_grants[i] = 0; end
    l2_req_ready = 0; l2_rsp_valid = 0; l2_inv_valid = 0;
    l2_rsp_id = '0; l2_rsp_data = '0; l2_inv_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      if (clr >= 0) req_valid[clr] = 0;
      clr = -1;
      for (int i = 0; i < N; i++)
        if (!req_valid[i] && $urandom_range(0, 3) == 0) begin
          req_valid[i] = 1;
          req[i].write = 1'($urandom);
          req[i].addr  = {32'(i), $urandom};
          req[i].wdata = {$urandom, $urandom};
          req[i].be    = 8'($urandom);
        end
      l2_req_ready = ($urandom_range(0, 4) != 0);
      l2_rsp_valid = 1'($urandom);
      l2_rsp_id    = 3'($urandom);
      l2_rsp_data  = {16{$urandom}};
      l2_inv_valid = 1'($urandom);
      l2_inv_addr  = {$urandom, $urandom};
      #1;
      // expected round-robin choice
      exp_sel = -1;
      for (int k = 1; k <= N; k++)
        if (exp_sel < 0 && req_valid[(last + k) % N]) exp_sel = (last + k) % N;
      if ($countones(req_valid) > 1) n_contended++;
      check($countones(req_gnt) <= 1, "at most one grant per cycle");
      check(l2_req_valid == (exp_sel >= 0), "L2 request valid when anyone asks");
      if (exp_sel >= 0 && l2_req_ready) begin
        check(req_gnt == N'(1) << exp_sel, "round-robin grant");
        check(l2_req == req[exp_sel] && int'(l2_req_id) == exp_sel, "granted request forwarded");
        if (failures < 3 && l2_req != req[exp_sel]) $display("%p\n%p id=%0d sel=%0d", l2_req, req[exp_sel], l2_req_id, exp_sel);
        check(snp_wr_valid == req[exp_sel].write, "granted write snooped");
        if (req[exp_sel].write) check(snp_wr_addr == req[exp_sel].addr && int'(snp_wr_src) == exp_sel, "snoop address and source");
      end else begin
        check(req_gnt == '0 && !snp_wr_valid, "no grant when L2 not ready or no request");
      end
      check(snp_inv_valid == l2_inv_valid && snp_inv_addr == l2_inv_addr, "L2 invalidation broadcast");
      check(rsp_valid == (l2_rsp_valid ? N'(1) << l2_rsp_id : '0) && rsp_data == l2_rsp_data, "response routed to its owner");
      @(posedge clk);
      if (exp_sel >= 0 && l2_req_ready) begin
        for (int i = 0; i < N; i++) if (req_valid[i] && i != exp_sel) wait_grants[i]++;
        wait_grants[exp_sel] = 0;
        clr = exp_sel;
        last = exp_sel;
      end
      for (int i = 0; i < N; i++) check(wait_grants[i] < N, "no requester passed over N times");
    end
    check(n_contended > 100, "contention exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
