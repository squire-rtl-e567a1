// l2_arbiter: the workers' shared L2 bus and its central arbiter.
//
// NREQ requesters (each worker's L1 instruction and L1 data cache) raise
// req_valid with a bus_req_t. Each cycle in which the L2 port is ready, the
// arbiter grants exactly one pending request, so the L2 needs only one extra
// access port, as the paper describes. The request is forwarded to the L2 in
// the same cycle with the requester's index as its id, and req_gnt tells the
// requester it was taken. The L2 answers later with (l2_rsp_valid, id, line);
// the answer is broadcast and rsp_valid[id] marks its owner.
// Snooping: a granted write is broadcast to all caches on the snp_wr_* lines
// (with its source, so the writer can ignore it), and an invalidation sent by
// the L2 (l2_inv_*) is broadcast on snp_inv_*; caches drop matching lines.
// The grant order is round robin starting after the last grant; the paper
// names a centralized arbiter but no policy, so round robin is this design's
// choice, as are the signal-level handshake and the combinational grant.
module l2_arbiter
  import squire_pkg::*;
#(
  parameter int unsigned NREQ = 32,
  localparam int unsigned ID_W = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // requesters
  input  logic [NREQ-1:0]     req_valid,
  input  bus_req_t            req      [NREQ],
  output logic [NREQ-1:0]     req_gnt,
  output logic [NREQ-1:0]     rsp_valid,
  output logic [LINE_W-1:0]   rsp_data,
  // snoop broadcast
  output logic                snp_wr_valid,
  output logic [ADDR_W-1:0]   snp_wr_addr,
  output logic [ID_W-1:0]     snp_wr_src,
  output logic                snp_inv_valid,
  output logic [ADDR_W-1:0]   snp_inv_addr,
  // L2 port
  output logic                l2_req_valid,
  output bus_req_t            l2_req,
  output logic [ID_W-1:0]     l2_req_id,
  input  logic                l2_req_ready,
  input  logic                l2_rsp_valid,
  input  logic [ID_W-1:0]     l2_rsp_id,
  input  logic [LINE_W-1:0]   l2_rsp_data,
  input  logic                l2_inv_valid,
  input  logic [ADDR_W-1:0]   l2_inv_addr
);

  logic [ID_W-1:0] last_q;   // index granted most recently
  logic            found;
  logic [ID_W-1:0] sel;

  always_comb begin
    int unsigned idx;
    found = 1'b0;
    sel   = '0;
    for (int k = 1; k <= NREQ; k++) begin
      idx = (int'(last_q) + k) % NREQ;
      if (!found && req_valid[idx]) begin
        found = 1'b1;
        sel   = ID_W'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     last_q <= ID_W'(NREQ - 1);
    else if (found && l2_req_ready) last_q <= sel;
  end

  always_comb begin
    req_gnt = '0;
    if (found && l2_req_ready) req_gnt[sel] = 1'b1;
  end

  assign l2_req_valid  = found;
  assign l2_req        = req[sel];
  assign l2_req_id     = sel;

  assign snp_wr_valid  = found && l2_req_ready && req[sel].write;
  assign snp_wr_addr   = req[sel].addr;
  assign snp_wr_src    = sel;
  assign snp_inv_valid = l2_inv_valid;
  assign snp_inv_addr  = l2_inv_addr;

  always_comb begin
    rsp_valid = '0;
    if (l2_rsp_valid) rsp_valid[l2_rsp_id] = 1'b1;
  end
  assign rsp_data = l2_rsp_data;

  // One L2 access per cycle, and only to a requester that asked.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_gnt));
  a_gnt_req: assert property (@(posedge clk) disable iff (!rst_n) (req_gnt & ~req_valid) == '0);

endmodule
