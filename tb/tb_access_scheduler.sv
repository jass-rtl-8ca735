// tb_access_scheduler: self-checking test of the NVM write-coalescing buffer.
//  1. coalescing: the four blocks of one page arrive separately and leave as
//     a single NVM page write holding all four, after the DRAM scrubber says
//     nak (page not in DRAM);
//  2. merge: two blocks of a page come from the caches, the scrubber answers
//     ack with the DRAM copy; the NVM write holds the cache blocks where the
//     caches gave them and the DRAM blocks elsewhere;
//  3. a pending entry (scrub answer not yet back) is not written out even
//     while draining;
//  4. a speculative page and a checkpoint page of the same address are kept
//     in separate entries;
//  5. full: with all 16 entries taken by DRAM pages and drain low, nothing is
//     written until one more page arrives; then exactly one entry leaves;
//  6. `empty` after the final drain, and every page written exactly once.
// A scrub-responder process plays the DRAM controller (answers after a few
// cycles, ack or nak as the step asks); an NVM sink records every write.
// Inputs change on the falling edge; handshakes complete on the rising edge.
module tb_access_scheduler;
  import jass_pkg::*;

  localparam int unsigned ENT = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic              blk_valid, blk_ready, page_valid, page_spec, page_ready;
  logic [PA_W-1:0]   blk_addr;
  logic [LINE_W-1:0] blk_data;
  page_t             page_in, scrub_rsp_page, nvm_page;
  logic              scrub_req_valid, scrub_req_ready, scrub_rsp_valid, scrub_rsp_ack;
  logic [PAGE_W-1:0] scrub_req_page;
  logic              nvm_valid, nvm_spec, nvm_ready, drain, empty;

  access_scheduler #(.ENTRIES(ENT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [LINE_W-1:0] cdat(input logic [PAGE_W-1:0] p, input int b);
    return {p, 8'(b), 32'hCAC4E000};
  endfunction
  function automatic logic [LINE_W-1:0] ddat(input logic [PAGE_W-1:0] p, input int b);
    return {p, 8'(b), 32'hD7A30000};
  endfunction

  // ------------------------------------------------ scrub responder
  bit ack_mode;
  int n_sreq;
  logic [PAGE_W-1:0] last_sreq;
  initial begin
    scrub_rsp_valid = 1'b0; scrub_rsp_ack = 1'b0; scrub_rsp_page = '0;
    scrub_req_ready = 1'b1; n_sreq = 0;
    forever begin
      @(posedge clk);
      if (scrub_req_valid && scrub_req_ready) begin
        last_sreq = scrub_req_page;
        n_sreq++;
        repeat (3) @(negedge clk);
        scrub_rsp_valid = 1'b1;
        scrub_rsp_ack   = ack_mode;
        scrub_rsp_page.page = last_sreq;
        scrub_rsp_page.mask = '1;
        for (int b = 0; b < 4; b++) scrub_rsp_page.data[b] = ddat(last_sreq, b);
        @(negedge clk);
        scrub_rsp_valid = 1'b0;
      end
    end
  end

  // ------------------------------------------------ NVM sink
  int   n_nvm;
  page_t last_nvm;
  bit    last_spec;
  int    wr_count [logic [PAGE_W:0]];
  always @(posedge clk) if (rst_n && nvm_valid && nvm_ready) begin
    n_nvm++;
    last_nvm  = nvm_page;
    last_spec = nvm_spec;
    wr_count[{nvm_spec, nvm_page.page}] = wr_count.exists({nvm_spec, nvm_page.page}) ?
                                          wr_count[{nvm_spec, nvm_page.page}] + 1 : 1;
  end

  // ------------------------------------------------ drivers
  task automatic send_blk(input logic [PAGE_W-1:0] p, input int b);
    bit ok;
    @(negedge clk);
    blk_valid = 1'b1;
    blk_addr  = {p, 2'(b), 6'd0};
    blk_data  = cdat(p, b);
    do begin
      #1 ok = blk_ready;
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    blk_valid = 1'b0;
  endtask

  task automatic send_page(input logic [PAGE_W-1:0] p, input bit spec, output bit took,
                           input int max_wait);
    bit ok;
    int w;
    @(negedge clk);
    page_valid = 1'b1;
    page_spec  = spec;
    page_in.page = p;
    page_in.mask = '1;
    for (int b = 0; b < 4; b++) page_in.data[b] = ddat(p, b) ^ LINE_W'(spec);
    w = 0;
    do begin
      #1 ok = page_ready;
      @(posedge clk);
      w++;
      if (!ok) @(negedge clk);
    end while (!ok && w < max_wait);
    took = ok;
    @(negedge clk);
    page_valid = 1'b0;
  endtask

  task automatic drain_all();
    int w;
    @(negedge clk);
    drain = 1'b1;
    w = 0;
    while (!empty && w < 200) begin @(negedge clk); w++; end
    drain = 1'b0;
  endtask

  initial begin
    blk_valid = 1'b0; blk_addr = '0; blk_data = '0;
    page_valid = 1'b0; page_in = '0; page_spec = 1'b0;
    nvm_ready = 1'b1; drain = 1'b0; ack_mode = 1'b0; n_nvm = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. coalescing + nak
    for (int b = 0; b < 4; b++) send_blk(40'hA0, b);
    repeat (8) @(negedge clk);
    check(n_sreq == 1 && last_sreq == 40'hA0, "one scrub request for the page");
    check(n_nvm == 0 && !empty, "held until drained");
    drain_all();
    check(n_nvm == 1, $sformatf("four blocks coalesced into %0d NVM writes", n_nvm));
    check(last_nvm.page == 40'hA0 && last_nvm.mask == 4'hF && !last_spec, "whole page written");
    for (int b = 0; b < 4; b++)
      check(last_nvm.data[b] == cdat(40'hA0, b), $sformatf("block %0d from the cache", b));

    // 2. merge with the DRAM copy
    ack_mode = 1'b1;
    send_blk(40'hB1, 0);
    send_blk(40'hB1, 2);
    repeat (8) @(negedge clk);
    drain_all();
    check(n_nvm == 2 && last_nvm.page == 40'hB1 && last_nvm.mask == 4'hF, "merged page written");
    check(last_nvm.data[0] == cdat(40'hB1, 0) && last_nvm.data[2] == cdat(40'hB1, 2),
          "cache blocks kept");
    check(last_nvm.data[1] == ddat(40'hB1, 1) && last_nvm.data[3] == ddat(40'hB1, 3),
          "DRAM blocks fill the rest");

    // 3. pending entry held while draining
    scrub_req_ready = 1'b0;
    send_blk(40'hC2, 1);
    @(negedge clk);
    drain = 1'b1;
    repeat (6) @(negedge clk);
    check(n_nvm == 2 && !empty, "pending entry not written");
    scrub_req_ready = 1'b1;
    repeat (12) @(negedge clk);
    drain = 1'b0;
    check(n_nvm == 3 && empty && last_nvm.data[1] == cdat(40'hC2, 1), "written after the answer");

    // 4. speculative and checkpoint page of one address
    begin
      bit t;
      send_page(40'hD3, 1'b1, t, 5);
      send_page(40'hD3, 1'b0, t, 5);
      drain_all();
      check(n_nvm == 5, $sformatf("two separate writes for spec and ckpt, got %0d", n_nvm - 3));
      check(wr_count[{1'b1, 40'hD3}] == 1 && wr_count[{1'b0, 40'hD3}] == 1, "one of each");
    end

    // 5. full
    begin
      bit t;
      for (int i = 0; i < ENT; i++) begin
        send_page(40'h100 + 40'(i), 1'b0, t, 5);
        check(t, "page taken while not full");
      end
      repeat (4) @(negedge clk);
      check(n_nvm == 5, "nothing written while full and not draining");
      send_page(40'h200, 1'b0, t, 10);
      check(t, "a 17th page is taken after one write-out");
      repeat (3) @(negedge clk);
      check(n_nvm == 6, $sformatf("exactly one eviction, got %0d", n_nvm - 5));
      drain_all();
      check(n_nvm == 5 + ENT + 1, "all written after the drain");
    end

    // 6.
    check(empty, "empty at the end");
    foreach (wr_count[k]) check(wr_count[k] == 1, $sformatf("page %h written %0d times", k, wr_count[k]));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
