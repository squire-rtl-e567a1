// l1d_cache: a worker's private L1 data cache (8 KB by default).
//
// Direct mapped, 64-byte lines, write-through with no write allocate, one
// outstanding miss (blocking). The worker core presents one 64-bit access at a
// time on core_req_*; it is taken when core_req_ready is high (the cache is
// idle). Timing: a load hit answers on core_rsp_* the next cycle; a load miss
// requests the line on the shared L2 bus, waits for the grant and the line,
// installs it and answers in the cycle after the line arrives; a store updates
// the line if present, is written through to the L2 as one word with byte
// enables, and answers once the L2 acknowledges it.
// Coherence follows the paper's snoop scheme: the cache watches the bus for
// writes by other requesters and for invalidations from the L2 and drops a
// matching line. Because stores go straight to the L2 no line is ever dirty,
// so dropping a line is always safe. A line whose fill is in flight when a
// snoop hits it is returned to the core but not installed.
// The 8 KB size is the paper's; direct mapping, the line size, write-through
// and the blocking interface are this design's own choices (the paper gives
// no cache organisation). Accesses are assumed 8-byte aligned.
module l1d_cache
  import squire_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 8192,
  parameter int unsigned ID_W       = 5,
  parameter int unsigned SELF_ID    = 0,
  localparam int unsigned LINES     = SIZE_BYTES / LINE_BYTES,
  localparam int unsigned IDX_W     = $clog2(LINES),
  localparam int unsigned TAG_W     = ADDR_W - OFF_W - IDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // core side
  input  logic               core_req_valid,
  input  logic               core_req_write,
  input  logic [ADDR_W-1:0]  core_req_addr,
  input  logic [XLEN-1:0]    core_req_wdata,
  input  logic [7:0]         core_req_be,
  output logic               core_req_ready,
  output logic               core_rsp_valid,
  output logic [XLEN-1:0]    core_rsp_rdata,
  // shared bus side
  output logic               bus_req_valid,
  output bus_req_t           bus_req,
  input  logic               bus_gnt,
  input  logic               bus_rsp_valid,
  input  logic [LINE_W-1:0]  bus_rsp_data,
  input  logic               snp_wr_valid,
  input  logic [ADDR_W-1:0]  snp_wr_addr,
  input  logic [ID_W-1:0]    snp_wr_src,
  input  logic               snp_inv_valid,
  input  logic [ADDR_W-1:0]  snp_inv_addr,
  // event strobes (for performance counting)
  output logic               ev_hit,
  output logic               ev_miss,
  output logic               ev_snoop_inv
);

  typedef enum logic [2:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WR_REQ, S_WR_WAIT} state_e;

  state_e              state_q;
  logic [LINE_W-1:0]   data_q  [LINES];
  logic [TAG_W-1:0]    tag_q   [LINES];
  logic [LINES-1:0]    valid_q;
  logic [ADDR_W-1:0]   addr_q;
  logic [XLEN-1:0]     wdata_q;
  logic [7:0]          be_q;
  logic                kill_q;
  logic                rsp_valid_q;
  logic [XLEN-1:0]     rsp_data_q;

  function automatic logic [IDX_W-1:0] idx_of(logic [ADDR_W-1:0] a);
    return a[OFF_W +: IDX_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction
  function automatic logic [WORD_SEL_W-1:0] wsel_of(logic [ADDR_W-1:0] a);
    return a[3 +: WORD_SEL_W];
  endfunction

  // lookup of the incoming request
  logic             acc, hit;
  logic [IDX_W-1:0] ridx;
  assign acc  = core_req_valid && (state_q == S_IDLE);
  assign ridx = idx_of(core_req_addr);
  assign hit  = valid_q[ridx] && (tag_q[ridx] == tag_of(core_req_addr));

  // snoops: does a broadcast address hit a valid line / the pending fill?
  logic snp_w, snp_i;
  assign snp_w = snp_wr_valid && (snp_wr_src != ID_W'(SELF_ID));
  assign snp_i = snp_inv_valid;

  function automatic logic same_line(logic [ADDR_W-1:0] a, logic [ADDR_W-1:0] b);
    return a[ADDR_W-1:OFF_W] == b[ADDR_W-1:OFF_W];
  endfunction

  logic snoop_kills_fill;
  assign snoop_kills_fill = ((snp_w && same_line(snp_wr_addr, addr_q)) ||
                             (snp_i && same_line(snp_inv_addr, addr_q)));

  logic inv_w, inv_i;
  assign inv_w = snp_w && valid_q[idx_of(snp_wr_addr)] &&
                 (tag_q[idx_of(snp_wr_addr)] == tag_of(snp_wr_addr));
  assign inv_i = snp_i && valid_q[idx_of(snp_inv_addr)] &&
                 (tag_q[idx_of(snp_inv_addr)] == tag_of(snp_inv_addr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      valid_q     <= '0;
      addr_q      <= '0;
      wdata_q     <= '0;
      be_q        <= '0;
      kill_q      <= 1'b0;
      rsp_valid_q <= 1'b0;
      rsp_data_q  <= '0;
    end else begin
      rsp_valid_q <= 1'b0;
      // snoop invalidations
      if (inv_w) valid_q[idx_of(snp_wr_addr)]  <= 1'b0;
      if (inv_i) valid_q[idx_of(snp_inv_addr)] <= 1'b0;

      unique case (state_q)
        S_IDLE: if (acc) begin
          addr_q  <= core_req_addr;
          wdata_q <= core_req_wdata;
          be_q    <= core_req_be;
          if (core_req_write) begin
            state_q <= S_WR_REQ;
          end else if (hit) begin
            rsp_valid_q <= 1'b1;
            rsp_data_q  <= data_q[ridx][wsel_of(core_req_addr)*XLEN +: XLEN];
          end else begin
            state_q <= S_RD_REQ;
          end
        end
        S_RD_REQ: if (bus_gnt) begin
          state_q <= S_RD_WAIT;
          kill_q  <= snp_i && same_line(snp_inv_addr, addr_q);
        end
        S_RD_WAIT: begin
          if (snoop_kills_fill) kill_q <= 1'b1;
          if (bus_rsp_valid) begin
            state_q     <= S_IDLE;
            rsp_valid_q <= 1'b1;
            rsp_data_q  <= bus_rsp_data[wsel_of(addr_q)*XLEN +: XLEN];
            // the arrays are overwritten either way: a cancelled fill leaves the index empty
            valid_q[idx_of(addr_q)] <= !kill_q && !snoop_kills_fill;
          end
        end
        S_WR_REQ: if (bus_gnt) state_q <= S_WR_WAIT;
        S_WR_WAIT: if (bus_rsp_valid) begin
          state_q     <= S_IDLE;
          rsp_valid_q <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // data and tag arrays (no reset)
  always_ff @(posedge clk) begin
    if (acc && core_req_write && hit)
      for (int b = 0; b < 8; b++)
        if (core_req_be[b])
          data_q[ridx][wsel_of(core_req_addr)*XLEN + b*8 +: 8] <= core_req_wdata[b*8 +: 8];
    if (state_q == S_RD_WAIT && bus_rsp_valid) begin
      data_q[idx_of(addr_q)] <= bus_rsp_data;
      tag_q[idx_of(addr_q)]  <= tag_of(addr_q);
    end
  end

  assign core_req_ready = (state_q == S_IDLE);
  assign core_rsp_valid = rsp_valid_q;
  assign core_rsp_rdata = rsp_data_q;

  assign bus_req_valid  = (state_q == S_RD_REQ) || (state_q == S_WR_REQ);
  always_comb begin
    bus_req.write = (state_q == S_WR_REQ);
    bus_req.addr  = (state_q == S_WR_REQ) ? addr_q : {addr_q[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
    bus_req.wdata = wdata_q;
    bus_req.be    = be_q;
  end

  assign ev_hit       = acc && !core_req_write && hit;
  assign ev_miss      = acc && !core_req_write && !hit;
  assign ev_snoop_inv = inv_w || inv_i;

endmodule
