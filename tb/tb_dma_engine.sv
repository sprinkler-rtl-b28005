// Self-checking test of dma_engine. Memory requests of two read I/Os and
// one write I/O complete in a scrambled order; the test checks that every
// read payload leaves in index order per I/O, that each appears exactly
// once, that writes produce no payload, that a payload held by pay_ready
// stays stable, and that each I/O is retired exactly once, after its last
// memory request completed.
module tb_dma_engine;
  import sprinkler_pkg::*;

  localparam int unsigned QD = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [QD-1:0]       ent_valid;
  io_req_t             ent_req [QD];
  logic [MAX_MREQ-1:0] ent_done [QD];
  logic                pay_valid, pay_ready, free_valid;
  logic [TAG_W-1:0]    pay_tag, free_tag;
  logic [IDX_W-1:0]    pay_idx;
  logic [LPN_W-1:0]    pay_lpn;

  dma_engine #(.QUEUE_DEPTH(QD)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int next_idx [QD];
  int freed [QD];
  int npay = 0;
  logic             held;
  logic [TAG_W-1:0] held_tag;
  logic [IDX_W-1:0] held_idx;

  // scoreboard on the host side
  always @(posedge clk) if (rst_n) begin
    if (held) check(pay_valid && pay_tag == held_tag && pay_idx == held_idx, "held payload stable");
    held <= pay_valid && !pay_ready;
    held_tag <= pay_tag; held_idx <= pay_idx;
    if (pay_valid && pay_ready) begin
      npay++;
      check(!ent_req[pay_tag].wr, "payload only for reads");
      check(int'(pay_idx) == next_idx[pay_tag], $sformatf("tag %0d payload in order (%0d)", pay_tag, pay_idx));
      check(ent_done[pay_tag][pay_idx], "payload only after completion");
      check(pay_lpn == ent_req[pay_tag].lpn + pay_idx, "payload logical page");
      next_idx[pay_tag]++;
    end
    if (free_valid) begin
      freed[free_tag]++;
      check(ent_done[free_tag] == ((64'd1 << ent_req[free_tag].len) - 1), "retired only when all done");
      if (!ent_req[free_tag].wr)
        check(next_idx[free_tag] == int'(ent_req[free_tag].len), "all payloads sent before retirement");
      ent_valid[free_tag] <= 1'b0;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int order [24];
  initial begin
    held = 0;
    ent_valid = '0;
    for (int i = 0; i < QD; i++) begin ent_req[i] = '0; ent_done[i] = '0; next_idx[i] = 0; freed[i] = 0; end
    pay_ready = 1;
    ent_req[0].lpn = 1000; ent_req[0].len = 8;  ent_req[0].wr = 0;
    ent_req[2].lpn = 2000; ent_req[2].len = 10; ent_req[2].wr = 0;
    ent_req[3].lpn = 3000; ent_req[3].len = 6;  ent_req[3].wr = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ent_valid = 4'b1101;
    // completion order: a fixed permutation of all 24 memory requests
    for (int k = 0; k < 24; k++) order[k] = k;
    for (int k = 23; k > 0; k--) begin
      automatic int j = $urandom % (k + 1);
      automatic int t = order[k];
      order[k] = order[j]; order[j] = t;
    end
    for (int k = 0; k < 24; k++) begin
      @(negedge clk);
      pay_ready = ($urandom % 3) != 0;
      if (order[k] < 8) ent_done[0][order[k]] = 1;
      else if (order[k] < 18) ent_done[2][order[k] - 8] = 1;
      else ent_done[3][order[k] - 18] = 1;
    end
    repeat (100) begin @(negedge clk); pay_ready = ($urandom % 3) != 0; end
    check(npay == 18, $sformatf("18 read payloads (%0d)", npay));
    check(freed[0] == 1 && freed[2] == 1 && freed[3] == 1 && freed[1] == 0, "each I/O retired once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
