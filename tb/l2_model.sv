// l2_model: behavioural stand-in for the host core's private L2 cache, seen
// through the extra port that the Squire bus uses. Not synthesizable.
//
// A sparse 64-bit-word memory. A request is taken whenever `ready` is high
// (low on random cycles when STALL_PCT > 0); reads return the whole 64-byte
// line and writes merge one word under its byte enables, both answered
// LATENCY cycles later (4 cycles, the L2 data access time used in the paper's
// evaluation), at most one answer per cycle, in order. Words never written
// read as code_word(addr), so instruction fetches have known contents.
// The model also stands for the rest of the core complex: host_write()
// changes a word and broadcasts an invalidation of its line, and with
// EVICT_PCT > 0 it sends spurious invalidations of recently read lines
// (back-invalidations on L2 evictions), which the caches must tolerate.
module l2_model
  import squire_pkg::*;
#(
  parameter int unsigned LATENCY   = 4,
  parameter int unsigned STALL_PCT = 10,
  parameter int unsigned EVICT_PCT = 2,
  parameter int unsigned ID_W      = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  input  bus_req_t           req,
  input  logic [ID_W-1:0]    req_id,
  output logic               req_ready,
  output logic               rsp_valid,
  output logic [ID_W-1:0]    rsp_id,
  output logic [LINE_W-1:0]  rsp_data,
  output logic               inv_valid,
  output logic [ADDR_W-1:0]  inv_addr
);

  logic [XLEN-1:0] mem [longint];

  function automatic logic [XLEN-1:0] code_word(logic [ADDR_W-1:0] a);
    return {a[31:0] ^ 32'hC0DE_0000, ~a[31:0]};
  endfunction

  function automatic logic [XLEN-1:0] rd(logic [ADDR_W-1:0] a);
    longint k = longint'(a >> 3);
    return mem.exists(k) ? mem[k] : code_word({a[ADDR_W-1:3], 3'b000});
  endfunction

  function automatic void wr(logic [ADDR_W-1:0] a, logic [XLEN-1:0] d);
    mem[longint'(a >> 3)] = d;
  endfunction

  typedef struct {
    longint            due;
    logic [ID_W-1:0]   id;
    logic [LINE_W-1:0] data;
  } pend_t;
  pend_t pq [$];

  longint cyc = 0;
  logic [ADDR_W-1:0] recent = '0;
  bit                host_inv = 0;
  logic [ADDR_W-1:0] host_inv_addr = '0;
  int n_reads = 0, n_writes = 0, n_evict_inv = 0, n_host_inv = 0;

  // Host store into memory, announced to the workers' caches by an invalidation.
  task automatic host_write(logic [ADDR_W-1:0] a, logic [XLEN-1:0] d);
    @(negedge clk);
    wr(a, d);
    host_inv = 1; host_inv_addr = a;
    @(negedge clk);
    host_inv = 0;
  endtask

  // Everything the DUT sees from here changes right after a rising edge
  // (non-blocking), so it never races the DUT's own flops.
  bit evict_now = 0;
  always_ff @(negedge clk) evict_now <= rst_n && ($urandom_range(0, 99) < EVICT_PCT);

  always_comb begin
    inv_valid = 1'b0;
    inv_addr  = recent;
    if (host_inv) begin
      inv_valid = 1'b1; inv_addr = host_inv_addr;
    end else if (evict_now) begin
      inv_valid = 1'b1;
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
    rsp_valid <= 1'b0;
    if (!rst_n) begin
      pq.delete();
    end else begin
      if (inv_valid) begin
        if (host_inv) n_host_inv++; else n_evict_inv++;
      end
      if (req_valid && req_ready) begin
        pend_t p;
        p.due = cyc + LATENCY;
        p.id  = req_id;
        if (req.write) begin
          logic [XLEN-1:0] o;
          o = rd(req.addr);
          for (int b = 0; b < 8; b++) if (req.be[b]) o[b*8 +: 8] = req.wdata[b*8 +: 8];
          wr(req.addr, o);
          p.data = '0;
          n_writes++;
        end else begin
          for (int k = 0; k < 8; k++)
            p.data[k*64 +: 64] = rd({req.addr[ADDR_W-1:6], 6'b0} + ADDR_W'(k * 8));
          recent = req.addr;
          n_reads++;
        end
        pq.push_back(p);
      end
      // one answer per cycle, in order, once due
      if (pq.size() > 0 && pq[0].due <= cyc + 1) begin
        rsp_valid <= 1'b1;
        rsp_id    <= pq[0].id;
        rsp_data  <= pq[0].data;
        void'(pq.pop_front());
      end
    end
  end

endmodule
