// DMA engine: in-order return of output data and retirement of queue entries.
//
// Memory requests complete out of order, in whatever order the chips finish
// them. Following the paper, the DMA engine nevertheless brings read data
// back to the host from the start of each I/O request, one page payload at a
// time, in order. It keeps a pointer per queue entry to the next memory
// request to return; an entry advances when the "done" bit of that memory
// request is set in the queue. Read pages produce a payload descriptor (tag,
// index, logical page) on the host port (valid/ready); write pages produce
// none, their data already went to the flash at commit time. When the pointer
// reaches the I/O length the entry is retired (free, one cycle) and the host
// is told the I/O is complete.
//
// Entries are served round-robin, one action per cycle. A payload that waits
// for pay_ready stays stable until accepted. Round-robin service across
// entries is this design's choice.
module dma_engine
  import sprinkler_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [QUEUE_DEPTH-1:0] ent_valid,
  input  io_req_t                ent_req  [QUEUE_DEPTH],
  input  logic [MAX_MREQ-1:0]    ent_done [QUEUE_DEPTH],
  // host payload
  output logic                   pay_valid,
  output logic [TAG_W-1:0]       pay_tag,
  output logic [IDX_W-1:0]       pay_idx,
  output logic [LPN_W-1:0]       pay_lpn,
  input  logic                   pay_ready,
  // retirement / host completion
  output logic                   free_valid,
  output logic [TAG_W-1:0]       free_tag
);

  localparam int unsigned QW = (QUEUE_DEPTH > 1) ? $clog2(QUEUE_DEPTH) : 1;

  logic [LEN_W-1:0] ptr [QUEUE_DEPTH];
  logic [QW-1:0]    rr;
  logic             lock;       // a payload is waiting for pay_ready
  logic [QW-1:0]    lock_e;

  logic          act;
  logic [QW-1:0] e;
  logic          is_free;

  always_comb begin
    int unsigned c;
    act = 1'b0; e = '0; c = 0;
    if (lock) begin
      act = 1'b1; e = lock_e;
    end else begin
      for (int unsigned k = 0; k < QUEUE_DEPTH; k++) begin
        c = (int'(rr) + k) % QUEUE_DEPTH;
        if (!act && ent_valid[c] &&
            (ptr[c] >= ent_req[c].len || ent_done[c][ptr[c][IDX_W-1:0]])) begin
          act = 1'b1; e = QW'(c);
        end
      end
    end
    is_free    = act && (ptr[e] >= ent_req[e].len);
    free_valid = is_free;
    free_tag   = TAG_W'(e);
    pay_valid  = act && !is_free && !ent_req[e].wr;
    pay_tag    = TAG_W'(e);
    pay_idx    = ptr[e][IDX_W-1:0];
    pay_lpn    = ent_req[e].lpn + LPN_W'(ptr[e]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; lock <= 1'b0; lock_e <= '0;
      for (int i = 0; i < QUEUE_DEPTH; i++) ptr[i] <= '0;
    end else if (act) begin
      if (is_free) begin
        ptr[e] <= '0;
        rr     <= (e == QW'(QUEUE_DEPTH - 1)) ? '0 : e + 1'b1;
      end else if (pay_valid && !pay_ready) begin
        lock   <= 1'b1;
        lock_e <= e;
      end else begin
        lock   <= 1'b0;
        ptr[e] <= ptr[e] + 1'b1;
        rr     <= (e == QW'(QUEUE_DEPTH - 1)) ? '0 : e + 1'b1;
      end
    end
  end

endmodule
