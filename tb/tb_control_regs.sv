// tb_control_regs: self-checking test of the control registers.
//
// Writes the entry address and arguments the way start_squire does, then
// checks that the start pulse comes exactly one cycle after the CR_START
// write, lasts one cycle, carries the written values, clears the counters and
// marks every worker running; that stop bits clear single workers; that
// `busy` follows the running mask; and that the read port returns the
// registers, the running mask and the worker count.
module tb_control_regs;
  import squire_pkg::*;

  localparam int NW = 8;

  logic clk = 0, rst_n = 0;
  logic            host_we = 0;
  logic [3:0]      host_waddr = '0, host_raddr = '0;
  logic [XLEN-1:0] host_wdata = '0, host_rdata;
  logic            start, clear_sync, busy;
  logic [ADDR_W-1:0] start_pc;
  logic [XLEN-1:0] start_args [NUM_ARGS];
  logic [NW-1:0]   stop = '0, running;

  control_regs #(.NUM_WORKERS(NW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(creg_e a, logic [XLEN-1:0] d);
    @(negedge clk);
    host_we = 1; host_waddr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [XLEN-1:0] f, a [NUM_ARGS];
  int start_cycles;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(start == 0 && running == '0 && busy == 0, "idle after reset");
    for (int round = 0; round < 4; round++) begin
      f = {$urandom, $urandom};
      for (int k = 0; k < NUM_ARGS; k++) a[k] = {$urandom, $urandom};
      wr(CR_FUNC, f);
      for (int k = 0; k < NUM_ARGS; k++) wr(creg_e'(int'(CR_ARG0) + k), a[k]);
      host_raddr = CR_FUNC; #1 check(host_rdata == f, "read back FUNC");
      for (int k = 0; k < NUM_ARGS; k++) begin
        host_raddr = 4'(int'(CR_ARG0) + k); #1 check(host_rdata == a[k], "read back ARG");
      end
      check(start == 0, "no start before CR_START");
      // start write: pulse in the following cycle, one cycle long
      @(negedge clk); host_we = 1; host_waddr = CR_START; host_wdata = '0;
      #1 check(start == 0, "start not in the write cycle");
      @(negedge clk); host_we = 0;
      check(start == 1 && clear_sync == 1, "start and clear one cycle after the write");
      check(start_pc == f, "start_pc carries FUNC");
      for (int k = 0; k < NUM_ARGS; k++) check(start_args[k] == a[k], "start_args carry ARGs");
      @(negedge clk);
      check(start == 0, "start lasts one cycle");
      check(running == '1 && busy == 1, "all workers running after start");
      host_raddr = CR_STATUS; #1 check(host_rdata == XLEN'({NW{1'b1}}), "status reads running mask");
      host_raddr = CR_NUMW;   #1 check(host_rdata == XLEN'(NW), "num_workers");
      // workers stop one by one, in random order
      for (int w = 0; w < NW; w++) begin
        @(negedge clk);
        stop = '0;
        stop[(w * 3 + round) % NW] = 1'b1;
        @(negedge clk);
        stop = '0;
        check(running[(w * 3 + round) % NW] == 0, "stop clears one worker");
        check($countones(running) == NW - 1 - w, "others keep running");
        check(busy == (w != NW - 1), "busy while any worker runs");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
