// l1i_cache: a worker's private L1 instruction cache (1 KB by default).
//
// Direct mapped, 64-byte lines, read only, one outstanding miss. The worker
// fetches one aligned 64-bit word (two 32-bit Armv8 instructions, matching a
// dual-issue front end) per request on fetch_*: taken when fetch_ready is
// high, answered the next cycle on a hit, or the cycle after the line arrives
// from the shared L2 bus on a miss. A miss asks the bus for a line by its
// line address (bus_req_line; the top makes it a read request). The whole cache is invalidated by `flush`
// (asserted at start_squire, since new code may have been loaded) and single
// lines are dropped by the same bus snoops as the data cache, so code written
// by the host or a worker is seen. The 1 KB size is the paper's; organisation,
// fetch width and flush-on-start are this design's own choices.
module l1i_cache
  import squire_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 1024,
  localparam int unsigned LINES     = SIZE_BYTES / LINE_BYTES,
  localparam int unsigned IDX_W     = $clog2(LINES),
  localparam int unsigned TAG_W     = ADDR_W - OFF_W - IDX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  // fetch side
  input  logic               fetch_valid,
  input  logic [ADDR_W-1:0]  fetch_addr,
  output logic               fetch_ready,
  output logic               fetch_rsp_valid,
  output logic [XLEN-1:0]    fetch_rsp_data,
  // shared bus side
  output logic               bus_req_valid,
  output logic [ADDR_W-OFF_W-1:0] bus_req_line,
  input  logic               bus_gnt,
  input  logic               bus_rsp_valid,
  input  logic [LINE_W-1:0]  bus_rsp_data,
  input  logic               snp_wr_valid,
  input  logic [ADDR_W-1:0]  snp_wr_addr,
  input  logic               snp_inv_valid,
  input  logic [ADDR_W-1:0]  snp_inv_addr,
  output logic               ev_hit,
  output logic               ev_miss
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;

  state_e             state_q;
  logic [LINE_W-1:0]  data_q [LINES];
  logic [TAG_W-1:0]   tag_q  [LINES];
  logic [LINES-1:0]   valid_q;
  logic [ADDR_W-1:0]  addr_q;
  logic               kill_q;
  logic               rsp_valid_q;
  logic [XLEN-1:0]    rsp_data_q;

  logic [IDX_W-1:0] ridx;
  logic             acc, hit;
  assign ridx = fetch_addr[OFF_W +: IDX_W];
  assign acc  = fetch_valid && (state_q == S_IDLE);
  assign hit  = valid_q[ridx] && (tag_q[ridx] == fetch_addr[ADDR_W-1 -: TAG_W]);

  // A fetch never writes, so every snooped write (including one from the
  // same worker's data cache) can make an instruction line stale.
  logic [ADDR_W-1:0] sw_line, si_line, pend_line;
  assign sw_line   = {snp_wr_addr[ADDR_W-1:OFF_W],  {OFF_W{1'b0}}};
  assign si_line   = {snp_inv_addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
  assign pend_line = {addr_q[ADDR_W-1:OFF_W],       {OFF_W{1'b0}}};

  logic snoop_kills_fill;
  assign snoop_kills_fill = (snp_wr_valid && sw_line == pend_line) ||
                            (snp_inv_valid && si_line == pend_line) || flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      valid_q     <= '0;
      addr_q      <= '0;
      kill_q      <= 1'b0;
      rsp_valid_q <= 1'b0;
      rsp_data_q  <= '0;
    end else begin
      rsp_valid_q <= 1'b0;
      if (snp_wr_valid && tag_q[snp_wr_addr[OFF_W +: IDX_W]] == snp_wr_addr[ADDR_W-1 -: TAG_W])
        valid_q[snp_wr_addr[OFF_W +: IDX_W]] <= 1'b0;
      if (snp_inv_valid && tag_q[snp_inv_addr[OFF_W +: IDX_W]] == snp_inv_addr[ADDR_W-1 -: TAG_W])
        valid_q[snp_inv_addr[OFF_W +: IDX_W]] <= 1'b0;
      unique case (state_q)
        S_IDLE: if (acc) begin
          addr_q <= fetch_addr;
          if (hit) begin
            rsp_valid_q <= 1'b1;
            rsp_data_q  <= data_q[ridx][fetch_addr[3 +: WORD_SEL_W]*XLEN +: XLEN];
          end else begin
            state_q <= S_REQ;
          end
        end
        S_REQ: if (bus_gnt) begin
          state_q <= S_WAIT;
          kill_q  <= (snp_inv_valid && si_line == pend_line) || flush;
        end
        S_WAIT: begin
          if (snoop_kills_fill) kill_q <= 1'b1;
          if (bus_rsp_valid) begin
            state_q     <= S_IDLE;
            rsp_valid_q <= 1'b1;
            rsp_data_q  <= bus_rsp_data[addr_q[3 +: WORD_SEL_W]*XLEN +: XLEN];
            // the arrays are overwritten either way: a cancelled fill leaves the index empty
            valid_q[addr_q[OFF_W +: IDX_W]] <= !kill_q && !snoop_kills_fill;
          end
        end
        default: state_q <= S_IDLE;
      endcase
      if (flush) valid_q <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_WAIT && bus_rsp_valid) begin
      data_q[addr_q[OFF_W +: IDX_W]] <= bus_rsp_data;
      tag_q[addr_q[OFF_W +: IDX_W]]  <= addr_q[ADDR_W-1 -: TAG_W];
    end
  end

  assign fetch_ready     = (state_q == S_IDLE);
  assign fetch_rsp_valid = rsp_valid_q;
  assign fetch_rsp_data  = rsp_data_q;

  assign bus_req_valid = (state_q == S_REQ);
  assign bus_req_line  = addr_q[ADDR_W-1:OFF_W];

  assign ev_hit  = acc && hit;
  assign ev_miss = acc && !hit;

endmodule
