// squire: one Squire accelerator, the private companion of one host core.
//
// NUM_WORKERS small in-order worker cores each own a 1 KB instruction cache
// and an 8 KB data cache. All caches share one bus to the host's L2, on which
// a central arbiter grants one access per cycle and which every cache snoops
// for invalidations. The host starts work through the control registers
// (start_squire: entry address, arguments, start) and both the host and the
// workers synchronize through the synchronization module's global counter
// (in-order increments) and per-worker local counters.
// The worker pipelines themselves (Armv8, Cortex-M35P-like) are not part of
// this RTL: each worker's fetch port, data port, synchronization port, start
// and stop signals are ports of this module, to be tied to a core. The host
// core's control-register and wait ports and the L2's Squire port are ports
// too. id_worker() is a worker's index in these arrays and num_workers() is
// NUM_WORKERS (also readable by the host in CR_NUMW).
// Bus requester numbering: worker w's instruction cache is 2w, its data
// cache 2w+1 (the L2 id).
// Default sizes follow the paper's main configuration: 16 workers, 1 KB L1I,
// 8 KB L1D. Queue depth 4 and the port protocols are this design's choices.
module squire
  import squire_pkg::*;
#(
  parameter int unsigned NUM_WORKERS = 16,
  parameter int unsigned L1I_BYTES   = 1024,
  parameter int unsigned L1D_BYTES   = 8192,
  parameter int unsigned QDEPTH      = 4,
  localparam int unsigned NREQ       = 2 * NUM_WORKERS,
  localparam int unsigned ID_W       = $clog2(NREQ),
  localparam int unsigned WID_W      = (NUM_WORKERS > 1) ? $clog2(NUM_WORKERS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host core: control registers
  input  logic                    host_we,
  input  logic [3:0]              host_waddr,
  input  logic [XLEN-1:0]         host_wdata,
  input  logic [3:0]              host_raddr,
  output logic [XLEN-1:0]         host_rdata,
  // host core: wait_lcounter / wait_gcounter
  input  sync_op_e                host_sync_op,
  input  logic [WID_W-1:0]        host_sync_w,
  input  logic [XLEN-1:0]         host_sync_s,
  output logic                    host_sync_ready,
  output logic                    busy,
  // worker cores: launch and stop
  output logic                    wk_start,
  output logic [ADDR_W-1:0]       wk_start_pc,
  output logic [XLEN-1:0]         wk_start_args   [NUM_ARGS],
  input  logic [NUM_WORKERS-1:0]  wk_stop,
  output logic [NUM_WORKERS-1:0]  wk_running,
  // worker cores: instruction fetch
  input  logic                    wk_fetch_valid  [NUM_WORKERS],
  input  logic [ADDR_W-1:0]       wk_fetch_addr   [NUM_WORKERS],
  output logic                    wk_fetch_ready  [NUM_WORKERS],
  output logic                    wk_fetch_rvalid [NUM_WORKERS],
  output logic [XLEN-1:0]         wk_fetch_rdata  [NUM_WORKERS],
  // worker cores: loads and stores
  input  logic                    wk_dreq_valid   [NUM_WORKERS],
  input  logic                    wk_dreq_write   [NUM_WORKERS],
  input  logic [ADDR_W-1:0]       wk_dreq_addr    [NUM_WORKERS],
  input  logic [XLEN-1:0]         wk_dreq_wdata   [NUM_WORKERS],
  input  logic [7:0]              wk_dreq_be      [NUM_WORKERS],
  output logic                    wk_dreq_ready   [NUM_WORKERS],
  output logic                    wk_drsp_valid   [NUM_WORKERS],
  output logic [XLEN-1:0]         wk_drsp_rdata   [NUM_WORKERS],
  // worker cores: synchronization primitives
  input  sync_op_e                wk_sync_op      [NUM_WORKERS],
  input  logic [WID_W-1:0]        wk_sync_w       [NUM_WORKERS],
  input  logic [XLEN-1:0]         wk_sync_s       [NUM_WORKERS],
  output logic                    wk_sync_ready   [NUM_WORKERS],
  // host L2: the extra port used by Squire
  output logic                    l2_req_valid,
  output bus_req_t                l2_req,
  output logic [ID_W-1:0]         l2_req_id,
  input  logic                    l2_req_ready,
  input  logic                    l2_rsp_valid,
  input  logic [ID_W-1:0]         l2_rsp_id,
  input  logic [LINE_W-1:0]       l2_rsp_data,
  input  logic                    l2_inv_valid,
  input  logic [ADDR_W-1:0]       l2_inv_addr
);

  // ---------------- control registers ----------------
  logic clear_sync;

  control_regs #(.NUM_WORKERS(NUM_WORKERS)) u_ctrl (
    .clk, .rst_n,
    .host_we, .host_waddr, .host_wdata, .host_raddr, .host_rdata,
    .start      (wk_start),
    .start_pc   (wk_start_pc),
    .start_args (wk_start_args),
    .clear_sync,
    .stop       (wk_stop),
    .running    (wk_running),
    .busy
  );

  // ---------------- synchronization module ----------------
  logic [XLEN-1:0]                 gcounter;
  logic [XLEN-1:0]                 lcounter [NUM_WORKERS];
  logic [WID_W-1:0]                token;
  logic [$clog2(QDEPTH+1)-1:0]     pending  [NUM_WORKERS];

  sync_module #(.NUM_WORKERS(NUM_WORKERS), .QDEPTH(QDEPTH)) u_sync (
    .clk, .rst_n,
    .clear      (clear_sync),
    .wk_op      (wk_sync_op),
    .wk_w       (wk_sync_w),
    .wk_s       (wk_sync_s),
    .wk_ready   (wk_sync_ready),
    .host_op    (host_sync_op),
    .host_w     (host_sync_w),
    .host_s     (host_sync_s),
    .host_ready (host_sync_ready),
    .gcounter, .lcounter, .token, .pending
  );

  // ---------------- shared L2 bus ----------------
  logic [NREQ-1:0]   req_valid;
  bus_req_t          req [NREQ];
  logic [NREQ-1:0]   req_gnt;
  logic [NREQ-1:0]   rsp_valid;
  logic [LINE_W-1:0] rsp_data;
  logic              snp_wr_valid, snp_inv_valid;
  logic [ADDR_W-1:0] snp_wr_addr, snp_inv_addr;
  logic [ID_W-1:0]   snp_wr_src;

  l2_arbiter #(.NREQ(NREQ)) u_arb (
    .clk, .rst_n,
    .req_valid, .req, .req_gnt, .rsp_valid, .rsp_data,
    .snp_wr_valid, .snp_wr_addr, .snp_wr_src, .snp_inv_valid, .snp_inv_addr,
    .l2_req_valid, .l2_req, .l2_req_id, .l2_req_ready,
    .l2_rsp_valid, .l2_rsp_id, .l2_rsp_data, .l2_inv_valid, .l2_inv_addr
  );

  // ---------------- per-worker caches ----------------
  logic [ADDR_W-OFF_W-1:0] il2_line [NUM_WORKERS];
  for (genvar w = 0; w < NUM_WORKERS; w++) begin : g_worker
    l1i_cache #(.SIZE_BYTES(L1I_BYTES)) u_l1i (
      .clk, .rst_n,
      .flush           (wk_start),
      .fetch_valid     (wk_fetch_valid[w]),
      .fetch_addr      (wk_fetch_addr[w]),
      .fetch_ready     (wk_fetch_ready[w]),
      .fetch_rsp_valid (wk_fetch_rvalid[w]),
      .fetch_rsp_data  (wk_fetch_rdata[w]),
      .bus_req_valid   (req_valid[2*w]),
      .bus_req_line    (il2_line[w]),
      .bus_gnt         (req_gnt[2*w]),
      .bus_rsp_valid   (rsp_valid[2*w]),
      .bus_rsp_data    (rsp_data),
      .snp_wr_valid, .snp_wr_addr, .snp_inv_valid, .snp_inv_addr,
      .ev_hit          (),
      .ev_miss         ()
    );

    // the instruction cache only ever reads whole lines
    always_comb begin
      req[2*w]      = '0;
      req[2*w].addr = {il2_line[w], {OFF_W{1'b0}}};
    end

    l1d_cache #(.SIZE_BYTES(L1D_BYTES), .ID_W(ID_W), .SELF_ID(2*w+1)) u_l1d (
      .clk, .rst_n,
      .core_req_valid  (wk_dreq_valid[w]),
      .core_req_write  (wk_dreq_write[w]),
      .core_req_addr   (wk_dreq_addr[w]),
      .core_req_wdata  (wk_dreq_wdata[w]),
      .core_req_be     (wk_dreq_be[w]),
      .core_req_ready  (wk_dreq_ready[w]),
      .core_rsp_valid  (wk_drsp_valid[w]),
      .core_rsp_rdata  (wk_drsp_rdata[w]),
      .bus_req_valid   (req_valid[2*w+1]),
      .bus_req         (req[2*w+1]),
      .bus_gnt         (req_gnt[2*w+1]),
      .bus_rsp_valid   (rsp_valid[2*w+1]),
      .bus_rsp_data    (rsp_data),
      .snp_wr_valid, .snp_wr_addr, .snp_wr_src, .snp_inv_valid, .snp_inv_addr,
      .ev_hit          (),
      .ev_miss         (),
      .ev_snoop_inv    ()
    );
  end

endmodule
