// tb_dram_ctrl: self-checking test of the DRAM-side checkpoint logic (page
// tables, walkers, predictor, scrub service), on a pool of 8 nodes per table
// and a 16-entry shared-counter table.  A behavioural DRAM (one request at a
// time, read data one cycle after the request, unwritten blocks read as a
// pattern of their address) and a page sink with ready held high stand
// around it.  Steps:
//  1. initialisation clears the table memory (init_done after
//     2 * 8 * 1024 cycles);
//  2. writes of the running epoch reach DRAM and count modified pages
//     (two blocks of one page count once);
//  3. epoch_flip: those pages become pre-snapshot;
//  4. avatar: a post-snapshot write to a pre-snapshot page first sends the
//     old version of the page (the blocks written in that epoch) out, then
//     the page moves to the running table and the block is written;
//  5. scrub service: a pre-snapshot page is answered ack with its data and
//     leaves the table; a page not there is answered nak;
//  6. checkpoint walk: late pre-snapshot writes fill the pre table; the walk
//     sends each of them out exactly once (spec = 0) and empties the table;
//  7. predictor: with the walk enabled, a written page whose counters decay
//     to zero is persisted speculatively (spec = 1) with its newest data;
//  8. pool exhaustion raises pt_overflow.
module tb_dram_ctrl;
  import jass_pkg::*;

  localparam int unsigned NODES = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic              init_done, wr_valid, wr_snap, wr_ready;
  logic [PA_W-1:0]   wr_addr, dram_req_addr;
  logic [LINE_W-1:0] wr_data, dram_req_wdata, dram_rsp_data;
  logic              dram_req_valid, dram_req_we, dram_req_ready, dram_rsp_valid;
  logic              sreq_valid, sreq_ready, srsp_valid, srsp_ack;
  logic [PAGE_W-1:0] sreq_page;
  page_t             srsp_page, pg;
  logic              pg_valid, pg_spec, pg_ready;
  logic              epoch_flip, sreq_hold, walk_start, walk_busy, walk_done, pred_enable, epoch, pt_overflow;
  logic [19:0]       walk_step;
  logic [31:0]       mod_count, pre_count, n_ckpt_pages, n_spec_pages, n_avatar_pages, n_naks;

  dram_ctrl #(.PT_NODES(NODES), .SH_ENTRIES(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------ DRAM model
  logic [LINE_W-1:0] mem [logic [PA_W-1:0]];
  function automatic logic [LINE_W-1:0] rd(input logic [PA_W-1:0] a);
    return mem.exists(a) ? mem[a] : {a, 32'h0DEF0DEF};
  endfunction
  assign dram_req_ready = 1'b1;
  always @(posedge clk) begin
    dram_rsp_valid <= 1'b0;
    if (rst_n && dram_req_valid && dram_req_ready) begin
      if (dram_req_we) mem[dram_req_addr] = dram_req_wdata;
      else begin
        dram_rsp_valid <= 1'b1;
        dram_rsp_data  <= rd(dram_req_addr);
      end
    end
  end

  // ------------------------------------------------ page sink
  page_t pq[$];
  bit    sq[$];
  assign pg_ready = 1'b1;
  always @(posedge clk) if (rst_n && pg_valid && pg_ready) begin
    pq.push_back(pg);
    sq.push_back(pg_spec);
  end

  function automatic bit page_ok(input page_t p);
    if (p.mask == 4'h0) return 1'b0;
    for (int b = 0; b < 4; b++)
      if (p.mask[b] && p.data[b] != rd({p.page, 2'(b), 6'd0})) return 1'b0;
    return 1'b1;
  endfunction

  task automatic write(input logic [PAGE_W-1:0] p, input int b, input logic s,
                       input logic [LINE_W-1:0] d);
    bit ok;
    @(negedge clk);
    wr_valid = 1'b1; wr_addr = {p, 2'(b), 6'd0}; wr_data = d; wr_snap = s;
    do begin
      #1 ok = wr_ready;
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    wr_valid = 1'b0;
    // let the write reach DRAM
    while (!wr_ready) @(negedge clk);
  endtask

  task automatic scrub(input logic [PAGE_W-1:0] p, output bit ack, output page_t data);
    bit ok;
    @(negedge clk);
    sreq_valid = 1'b1; sreq_page = p;
    do begin
      #1 ok = sreq_ready;
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    sreq_valid = 1'b0;
    while (!srsp_valid) @(negedge clk);
    ack = srsp_ack; data = srsp_page;
    @(negedge clk);
  endtask

  localparam logic [PAGE_W-1:0] P1 = 40'h1, P2 = 40'h2, P3 = 40'h3;

  initial begin
    int t;
    bit a;
    page_t d;
    wr_valid = 1'b0; wr_addr = '0; wr_data = '0; wr_snap = 1'b0;
    sreq_valid = 1'b0; sreq_page = '0; epoch_flip = 1'b0; walk_start = 1'b0; sreq_hold = 1'b0;
    pred_enable = 1'b0; walk_step = 20'd16;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1.
    t = 0;
    while (!init_done) begin @(negedge clk); t++; end
    check(t >= 2 * NODES * 1024 - 2 && t <= 2 * NODES * 1024 + 2,
          $sformatf("init took %0d cycles", t));

    // 2.
    write(P1, 0, 1'b0, 512'hA0);
    write(P1, 1, 1'b0, 512'hA1);
    write(P2, 3, 1'b0, 512'hB3);
    check(mem[{P1, 2'd1, 6'd0}] == 512'hA1, "block reached DRAM");
    check(mod_count == 2 && pre_count == 0, $sformatf("modified pages %0d", mod_count));

    // 3.
    @(negedge clk); epoch_flip = 1'b1; @(negedge clk); epoch_flip = 1'b0;
    repeat (3) @(negedge clk);
    check(epoch == 1'b1 && mod_count == 0 && pre_count == 2, "flip: pages are pre-snapshot");

    // 4. avatar
    write(P1, 2, 1'b1, 512'hC2);
    check(pq.size() == 1 && n_avatar_pages == 1, "earlier version persisted first");
    if (pq.size() == 1) begin
      check(pq[0].page == P1 && !sq[0], "page P1, not speculative");
      check(pq[0].data[0] == 512'hA0 && pq[0].data[1] == 512'hA1 && pq[0].mask == 4'b0011,
            "old version of the blocks written in that epoch");
    end
    check(mem[{P1, 2'd2, 6'd0}] == 512'hC2, "then the new block is written");
    check(mod_count == 1 && pre_count == 1, "P1 moved to the running table");
    pq.delete(); sq.delete();
    write(P1, 3, 1'b1, 512'hC3);
    check(pq.size() == 0 && mod_count == 1, "second post write: no persist, counted once");

    // 5.
    scrub(P2, a, d);
    check(a && d.page == P2 && page_ok(d) && d.data[3] == 512'hB3 && d.mask == 4'b1000,
          "scrub ack with the page's written block");
    check(pre_count == 0, "scrubbed page left the table");
    scrub(P3, a, d);
    check(!a && n_naks == 1, "scrub of an absent page: nak");
    scrub(P2, a, d);
    check(!a && n_naks == 2, "a page is scrubbed only once");

    // 6. late pre-snapshot write-backs, then the walk
    write(40'h10, 0, 1'b0, 512'hD0);
    write(40'h11, 1, 1'b0, 512'hD1);
    write(40'h12, 2, 1'b0, 512'hD2);
    check(pre_count == 3, "three late pre-snapshot pages");
    pq.delete(); sq.delete();
    @(negedge clk); walk_start = 1'b1; @(negedge clk); walk_start = 1'b0;
    t = 0;
    while (!walk_done) begin @(negedge clk); t++; end
    repeat (2) @(negedge clk);
    check(pq.size() == 3 && n_ckpt_pages == 4, $sformatf("walk persisted %0d pages", pq.size()));
    foreach (pq[i]) check(page_ok(pq[i]) && !sq[i] && pq[i].page >= 40'h10 && pq[i].page <= 40'h12,
                          $sformatf("walk page %h", pq[i].page));
    check(pre_count == 0 && !walk_busy, "pre table empty after the walk");

    // 7. predictor on P1 (running table)
    pq.delete(); sq.delete();
    pred_enable = 1'b1;
    t = 0;
    while (n_spec_pages == 0 && t < 200000) begin @(negedge clk); t++; end
    pred_enable = 1'b0;
    repeat (12) @(negedge clk);
    check(n_spec_pages == 1 && pq.size() == 1, "cold page persisted speculatively");
    if (pq.size() == 1)
      check(pq[0].page == P1 && sq[0] && pq[0].data[2] == 512'hC2 && pq[0].data[3] == 512'hC3 &&
            pq[0].mask == 4'b1100,
            "speculative page carries the newest data");
    check(mod_count == 0, "and leaves the running table");

    // 8. overflow: three pages in separate subtrees need 9 nodes > 7
    check(!pt_overflow, "no overflow yet");
    write(40'h0100000000, 0, 1'b1, 512'h1);
    write(40'h0200000000, 0, 1'b1, 512'h2);
    write(40'h0300000000, 0, 1'b1, 512'h3);
    check(pt_overflow, "pool exhaustion flagged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
