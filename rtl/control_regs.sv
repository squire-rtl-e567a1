// control_regs: Squire's control registers.
//
// The host core performs start_squire(f, a) by writing the entry address f to
// CR_FUNC, the arguments to CR_ARG0..CR_ARG3 and then any value to CR_START.
// Writing CR_START (one cycle later) pulses `start` for one cycle: every worker
// loads its program counter from `start_pc` and its argument registers from
// `start_args`, the synchronization module clears its counters (`clear_sync`)
// and all workers are marked running. A worker that executes stop_worker()
// pulses its `stop` bit and is marked not running. The host reads CR_STATUS
// (running mask), CR_NUMW (num_workers()) and the written registers
// combinationally on its read port; `busy` is high while any worker runs.
// What the registers hold and what start does follow the paper; the register
// map, the number of argument registers (4) and the write/read ports are this
// design's own choices. A start while workers still run restarts them all.
module control_regs
  import squire_pkg::*;
#(
  parameter int unsigned NUM_WORKERS = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host port
  input  logic                   host_we,
  input  logic [3:0]             host_waddr,
  input  logic [XLEN-1:0]        host_wdata,
  input  logic [3:0]             host_raddr,
  output logic [XLEN-1:0]        host_rdata,
  // to the workers and the synchronization module
  output logic                   start,
  output logic [ADDR_W-1:0]      start_pc,
  output logic [XLEN-1:0]        start_args [NUM_ARGS],
  output logic                   clear_sync,
  // from the workers
  input  logic [NUM_WORKERS-1:0] stop,
  output logic [NUM_WORKERS-1:0] running,
  output logic                   busy
);

  logic [ADDR_W-1:0]      func_q;
  logic [XLEN-1:0]        args_q [NUM_ARGS];
  logic                   start_q;
  logic [NUM_WORKERS-1:0] run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      func_q  <= '0;
      start_q <= 1'b0;
      run_q   <= '0;
      for (int a = 0; a < NUM_ARGS; a++) args_q[a] <= '0;
    end else begin
      start_q <= host_we && (host_waddr == CR_START);
      if (host_we) begin
        if (host_waddr == CR_FUNC) func_q <= host_wdata;
        for (int a = 0; a < NUM_ARGS; a++)
          if (host_waddr == 4'(int'(CR_ARG0) + a)) args_q[a] <= host_wdata;
      end
      if (start_q) run_q <= '1;
      else         run_q <= run_q & ~stop;
    end
  end

  always_comb begin
    unique case (host_raddr)
      CR_FUNC:   host_rdata = func_q;
      CR_ARG0:   host_rdata = args_q[0];
      CR_ARG1:   host_rdata = args_q[1];
      CR_ARG2:   host_rdata = args_q[2];
      CR_ARG3:   host_rdata = args_q[3];
      CR_STATUS: host_rdata = XLEN'(run_q);
      CR_NUMW:   host_rdata = XLEN'(NUM_WORKERS);
      default:   host_rdata = '0;
    endcase
  end

  assign start      = start_q;
  assign clear_sync = start_q;
  assign start_pc   = func_q;
  assign start_args = args_q;
  assign running    = run_q;
  assign busy       = |run_q;

endmodule
