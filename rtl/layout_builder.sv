// Layout builder: the tag-securing step of resource-driven I/O scheduling.
//
// For every host I/O request it accepts, the builder allocates a queue entry
// and then, one memory request at a time, asks the core (the FTL) where that
// page lives, and files the request under its chip in the physical-layout
// table. No memory request is composed and no data moves here; that happens
// only when the scheduler visits the chip. Following the paper, this runs in
// parallel with the scheduler.
//
// Force unit access: following the paper, an I/O with FUA set is served
// without reordering. The builder waits until the queue is empty before
// accepting it, and accepts nothing after it until the queue is empty again.
//
// Interface: host (valid/ready, io_req_t); queue allocation (valid/ready and
// granted tag); translation request to the core (valid/ready) and its
// response (valid, phys_t; the builder is always ready for it); insert into
// the layout table (valid/ready). Timing: one memory request costs at least
// three cycles (request, response, insert) when the core answers in one.
module layout_builder
  import sprinkler_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // host
  input  logic              host_valid,
  input  io_req_t           host_req,
  output logic              host_ready,
  // queue
  output logic              q_alloc_valid,
  output io_req_t           q_alloc_req,
  input  logic              q_alloc_ready,
  input  logic [TAG_W-1:0]  q_alloc_tag,
  input  logic              q_empty,
  // core translation
  output logic              xlat_valid,
  output mreq_t             xlat_req,     // loc field unused
  input  logic              xlat_ready,
  input  logic              xlat_rsp_valid,
  input  phys_t             xlat_rsp,
  // layout table
  output logic              ins_valid,
  output logic [CHIP_W-1:0] ins_chip,
  output mreq_t             ins_ent,
  input  logic              ins_ready,
  // status
  output logic              busy,
  output logic              fua_wait      // a force-unit-access drain holds the host
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RSP, S_INS} state_e;

  state_e           state;
  io_req_t          cur;
  logic [TAG_W-1:0] tag;
  logic [IDX_W-1:0] idx;
  phys_t            ph;
  logic             fua_block;

  logic may_accept;
  assign may_accept = (state == S_IDLE) && (!(host_req.fua || fua_block) || q_empty);
  assign fua_wait   = (state == S_IDLE) && host_valid && (host_req.fua || fua_block) && !q_empty;

  assign q_alloc_valid = host_valid && may_accept;
  assign q_alloc_req   = host_req;
  assign host_ready    = may_accept && q_alloc_ready;
  assign busy          = (state != S_IDLE);

  always_comb begin
    xlat_valid   = (state == S_REQ);
    xlat_req     = '0;
    xlat_req.tag = tag;
    xlat_req.idx = idx;
    xlat_req.lpn = cur.lpn + LPN_W'(idx);
    xlat_req.wr  = cur.wr;
    ins_valid    = (state == S_INS);
    ins_chip     = ph.chip;
    ins_ent      = xlat_req;
    ins_ent.loc  = ph.loc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      tag       <= '0;
      idx       <= '0;
      ph        <= '0;
      fua_block <= 1'b0;
    end else begin
      if (q_empty && state == S_IDLE) fua_block <= 1'b0;
      case (state)
        S_IDLE: if (host_valid && host_ready) begin
          cur   <= host_req;
          tag   <= q_alloc_tag;
          idx   <= '0;
          state <= S_REQ;
        end
        S_REQ: if (xlat_ready) state <= S_RSP;
        S_RSP: if (xlat_rsp_valid) begin
          ph    <= xlat_rsp;
          state <= S_INS;
        end
        S_INS: if (ins_ready) begin
          if (LEN_W'(idx) + 1'b1 >= cur.len) begin
            state <= S_IDLE;
            if (cur.fua) fua_block <= 1'b1;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && host_valid && host_ready)
      assert (host_req.len != '0 && host_req.len <= LEN_W'(MAX_MREQ))
        else $error("layout_builder: I/O length out of range");
  end

endmodule
