// worker_model: behavioural stand-in for one Squire worker core (the paper's
// workers are small Armv8 in-order cores; their pipeline is not part of the
// RTL). Not synthesizable.
//
// On a start pulse the model latches the entry address and arguments, fetches
// the first instruction words through its instruction cache (checking their
// contents) and then runs, as a sequence of loads, stores and Squire
// primitives through the real cache and synchronization ports, the worker
// function named by the entry address:
//   PC_RADIX  Radix-sort worker: sort this worker's chunk of arg0[arg1], then
//             inc_gcounter() and stop_worker().
//   PC_CHAIN  Chain worker (round-robin anchors, window T = arg3): match-up
//             scores first, then for each useful predecessor j
//             wait_gcounter(j+1) and read F[j]; store F[i]; inc_gcounter().
//   PC_DTW    DTW worker: a band of M/num_workers columns; before each row
//             wait_lcounter(id-1, i+1) (not worker 0), after it inc_lcounter(id).
//   PC_SW     Smith-Waterman worker: the same band scheme as PC_DTW with the
//             local-alignment cell function.
//   PC_BURST  arg0 back-to-back inc_gcounter() calls (worker 0 starts late),
//             which fills the other workers' increment queues.
// Data layout and the cost/score/cell functions are shared with tb_squire through
// the functions below. Every primitive and access holds its request until the
// DUT accepts it, driving on falling edges and sampling just after them.
module worker_model
  import squire_pkg::*;
#(
  parameter int ID          = 0,
  parameter int NUM_WORKERS = 16,
  parameter int WID_W       = 4
) (
  input  logic               clk,
  input  logic               start,
  input  logic [ADDR_W-1:0]  start_pc,
  input  logic [XLEN-1:0]    start_args [NUM_ARGS],
  output logic               stop,
  output logic               fetch_valid,
  output logic [ADDR_W-1:0]  fetch_addr,
  input  logic               fetch_ready,
  input  logic               fetch_rvalid,
  input  logic [XLEN-1:0]    fetch_rdata,
  output logic               dreq_valid,
  output logic               dreq_write,
  output logic [ADDR_W-1:0]  dreq_addr,
  output logic [XLEN-1:0]    dreq_wdata,
  output logic [7:0]         dreq_be,
  input  logic               dreq_ready,
  input  logic               drsp_valid,
  input  logic [XLEN-1:0]    drsp_rdata,
  output sync_op_e           sync_op,
  output logic [WID_W-1:0]   sync_w,
  output logic [XLEN-1:0]    sync_s,
  input  logic               sync_ready
);

  localparam logic [ADDR_W-1:0] PC_RADIX = 64'h1000;
  localparam logic [ADDR_W-1:0] PC_CHAIN = 64'h2000;
  localparam logic [ADDR_W-1:0] PC_DTW   = 64'h3000;
  localparam logic [ADDR_W-1:0] PC_BURST = 64'h4000;
  localparam logic [ADDR_W-1:0] PC_SW    = 64'h5000;
  localparam longint NEG_INF = -64'sd1 <<< 40;

  int fetch_errors = 0;

  // ---------------- primitives ----------------
  task automatic sync(sync_op_e op, int w, longint s);
    @(negedge clk);
    sync_op = op; sync_w = WID_W'(w); sync_s = XLEN'(s);
    #1;
    while (!sync_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    sync_op = SYNC_NONE;
  endtask

  task automatic load(logic [ADDR_W-1:0] a, output longint d);
    @(negedge clk);
    dreq_valid = 1; dreq_write = 0; dreq_addr = a; dreq_be = 8'hff;
    #1;
    while (!dreq_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq_valid = 0;
    while (!drsp_valid) @(negedge clk);
    d = longint'(drsp_rdata);
  endtask

  task automatic store(logic [ADDR_W-1:0] a, longint d);
    @(negedge clk);
    dreq_valid = 1; dreq_write = 1; dreq_addr = a; dreq_wdata = XLEN'(d); dreq_be = 8'hff;
    #1;
    while (!dreq_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    dreq_valid = 0;
    while (!drsp_valid) @(negedge clk);
  endtask

  task automatic fetch(logic [ADDR_W-1:0] a);
    @(negedge clk);
    fetch_valid = 1; fetch_addr = a;
    #1;
    while (!fetch_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    fetch_valid = 0;
    while (!fetch_rvalid) @(negedge clk);
    if (fetch_rdata != {a[31:0] ^ 32'hC0DE_0000, ~a[31:0]}) fetch_errors++;
  endtask

  task automatic stop_worker();
    @(negedge clk);
    stop = 1;
    @(negedge clk);
    stop = 0;
  endtask

  // ---------------- worker functions ----------------
  task automatic radix_worker(logic [ADDR_W-1:0] x, longint n);
    longint lo = ID * (n / NUM_WORKERS);
    longint hi = (ID + 1) * (n / NUM_WORKERS);
    longint v [$];
    longint t;
    for (longint k = lo; k < hi; k++) begin load(x + 64'(k * 8), t); v.push_back(t); end
    // LSD radix sort on 8-bit digits of 16-bit keys
    for (int sh = 0; sh < 16; sh += 8) begin
      longint b [256][$];
      foreach (v[k]) b[(v[k] >> sh) & 255].push_back(v[k]);
      v.delete();
      for (int d = 0; d < 256; d++) foreach (b[d][k]) v.push_back(b[d][k]);
    end
    foreach (v[k]) store(x + 64'((lo + k) * 8), v[k]);
    sync(SYNC_INC_G, 0, 0);
  endtask

  task automatic chain_worker(logic [ADDR_W-1:0] xa, logic [ADDR_W-1:0] fa, longint n, longint tw);
    longint aux [$];
    longint xi, xj, f, best;
    for (longint i = ID; i < n; i += NUM_WORKERS) begin
      aux.delete();
      load(xa + 64'(i * 8), xi);
      for (longint j = i - tw; j <= i - 1; j++) begin
        if (j < 0) begin aux.push_back(NEG_INF); continue; end
        load(xa + 64'(j * 8), xj);
        aux.push_back(tb_squire_fn::match_up(xi, xj));
      end
      best = tb_squire_fn::ANCHOR_W;
      for (longint j = i - tw; j <= i - 1; j++) begin
        if (aux[j - (i - tw)] != NEG_INF) begin
          sync(SYNC_WAIT_G, 0, j + 1);
          load(fa + 64'(j * 8), f);
          if (f + aux[j - (i - tw)] > best) best = f + aux[j - (i - tw)];
        end
      end
      store(fa + 64'(i * 8), best);
      sync(SYNC_INC_G, 0, 0);
    end
  endtask

  // DTW and Smith-Waterman share the column-band scheme of the paper's DTW
  // worker; only the cell function differs (tb_squire_fn::dp_cell).
  task automatic dp_worker(bit sw, logic [ADDR_W-1:0] sa, logic [ADDR_W-1:0] ra, logic [ADDR_W-1:0] ma,
                           longint n, longint m);
    longint lo = ID * (m / NUM_WORKERS);
    longint hi = (ID + 1) * (m / NUM_WORKERS);
    longint up, left, diag, si, rj;
    for (longint i = 0; i < n; i++) begin
      if (ID != 0) sync(SYNC_WAIT_L, ID - 1, i + 1);
      load(sa + 64'(i * 8), si);
      for (longint j = lo; j < hi; j++) begin
        up   = tb_squire_fn::dp_edge(sw, i, j, 1, 0);
        left = tb_squire_fn::dp_edge(sw, i, j, 0, 1);
        diag = tb_squire_fn::dp_edge(sw, i, j, 1, 1);
        if (i > 0) load(ma + 64'(((i - 1) * m + j) * 8), up);
        if (j > 0) load(ma + 64'((i * m + j - 1) * 8), left);
        if (i > 0 && j > 0) load(ma + 64'(((i - 1) * m + j - 1) * 8), diag);
        load(ra + 64'(j * 8), rj);
        store(ma + 64'((i * m + j) * 8), tb_squire_fn::dp_cell(sw, up, left, diag, si, rj));
      end
      sync(SYNC_INC_L, ID, 0);
    end
  endtask

  task automatic burst_worker(longint k);
    if (ID == 0) repeat (60) @(negedge clk);
    for (longint r = 0; r < k; r++) sync(SYNC_INC_G, 0, 0);
  endtask

  // ---------------- main loop ----------------
  logic [ADDR_W-1:0] pc;
  logic [XLEN-1:0]   args [NUM_ARGS];

  initial begin
    stop = 0; fetch_valid = 0; fetch_addr = '0;
    dreq_valid = 0; dreq_write = 0; dreq_addr = '0; dreq_wdata = '0; dreq_be = '0;
    sync_op = SYNC_NONE; sync_w = '0; sync_s = '0;
    forever begin
      @(negedge clk);
      if (start) begin
        pc = start_pc;
        args = start_args;
        // the function prologue: a few instruction fetches
        for (int k = 0; k < 4; k++) fetch(pc + 64'(k * 8));
        fetch(pc + 64'(ID % 8) * 8);
        case (pc)
          PC_RADIX: radix_worker(args[0], longint'(args[1]));
          PC_CHAIN: chain_worker(args[0], args[1], longint'(args[2]), longint'(args[3]));
          PC_DTW:   dp_worker(0, args[0], args[1], args[2], longint'(args[3][31:0]), longint'(args[3][63:32]));
          PC_SW:    dp_worker(1, args[0], args[1], args[2], longint'(args[3][31:0]), longint'(args[3][63:32]));
          PC_BURST: burst_worker(longint'(args[0]));
          default: ;
        endcase
        stop_worker();
      end
    end
  end

endmodule
