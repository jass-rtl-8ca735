// tb_snap_cache: self-checking test of the snapshot-bit cache and its
// scrubber, on a small 8-set, 2-way instance.
//  1. a write then a read hits with the written line;
//  2. after the epoch flips, a post-snapshot write to a modified
//     pre-snapshot line first sends the old line down with the old bit, a
//     second post-snapshot write sends nothing;
//  3. a late pre-snapshot write to that (now post-snapshot) line updates the
//     data but does not send anything down;
//  4. a miss with a modified victim writes the victim back;
//  5. GETS answers without a change, GETX of a modified pre-snapshot line
//     sends it down and invalidates it, INV of a modified line sends it down;
//  6. the scrubber sends down exactly the modified pre-snapshot lines (and
//     no post-snapshot one), takes SETS*WAYS visit cycles plus scrub_step
//     cycles after every scrub_gran sets, blocks requests while visiting,
//     and leaves the lines clean: a second scrub sends nothing.
// Lines sent down are collected by a sink process with ready held high
// (step 4 also holds it low for a while to check that the cache waits).
// Requests are driven on the falling edge; responses are read one cycle
// after acceptance.
module tb_snap_cache;
  import jass_pkg::*;

  localparam int unsigned SETS = 8, WAYS = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic              epoch, req_valid, req_ready, rsp_valid, rsp_hit, down_valid, down_ready;
  creq_t             req, down;
  logic [LINE_W-1:0] rsp_data;
  logic              scrub_start, scrub_busy, scrub_done;
  logic [19:0]       scrub_step;
  logic [7:0]        scrub_gran;

  snap_cache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // down sink
  creq_t dq[$];
  always @(posedge clk) if (rst_n && down_valid && down_ready) dq.push_back(down);

  function automatic logic [PA_W-1:0] ad(input int set, input int t);
    return PA_W'((t * SETS + set) * 64);
  endfunction

  task automatic op(input msg_e m, input logic [PA_W-1:0] a, input logic s,
                    input logic [LINE_W-1:0] d);
    bit ok;
    @(negedge clk);
    req_valid = 1'b1;
    req = '{mtype: m, snap: s, addr: a, data: d};
    do begin
      #1 ok = req_ready;
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  initial begin
    int n0, busy_cyc, nd;
    epoch = 1'b0; req_valid = 1'b0; req = '0; down_ready = 1'b1;
    scrub_start = 1'b0; scrub_step = 20'd3; scrub_gran = 8'd2;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1.
    op(M_WRITE, ad(1, 1), 1'b0, 512'h11);
    op(M_READ, ad(1, 1), 1'b0, '0);
    check(rsp_valid && rsp_hit && rsp_data == 512'h11, "read hits the written line");
    op(M_READ, ad(1, 2), 1'b0, '0);
    check(rsp_valid && !rsp_hit, "read of another line misses");
    check(dq.size() == 0, "nothing sent down yet");

    // 2.
    epoch = 1'b1;
    op(M_WRITE, ad(1, 1), 1'b1, 512'h22);
    check(dq.size() == 1, "post-snapshot write sends the pre-snapshot line first");
    if (dq.size() == 1) begin
      check(dq[0].addr == ad(1, 1) && dq[0].data == 512'h11 && dq[0].snap == 1'b0,
            "old data with the old snapshot bit");
      check(dq[0].mtype == M_WB, "as a write-back");
    end
    dq.delete();
    op(M_WRITE, ad(1, 1), 1'b1, 512'h33);
    check(dq.size() == 0, "second post-snapshot write sends nothing");

    // 3.
    op(M_WB, ad(1, 1), 1'b0, 512'h44);
    check(dq.size() == 0, "late pre-snapshot write sends nothing");
    op(M_READ, ad(1, 1), 1'b0, '0);
    check(rsp_hit && rsp_data == 512'h44, "and updates the data");

    // 4. fill set 2, then a third tag evicts a modified line
    op(M_WRITE, ad(2, 1), 1'b1, 512'h51);
    op(M_WRITE, ad(2, 2), 1'b1, 512'h52);
    down_ready = 1'b0;
    fork
      op(M_WRITE, ad(2, 3), 1'b1, 512'h53);
      begin
        repeat (4) @(negedge clk);
        check(dq.size() == 0 && req_valid, "cache waits for the next level");
        down_ready = 1'b1;
      end
    join
    check(dq.size() == 1 && (dq[0].addr == ad(2, 1) || dq[0].addr == ad(2, 2)),
          "victim written back");
    if (dq.size() == 1)
      check(dq[0].data == (dq[0].addr == ad(2, 1) ? 512'h51 : 512'h52), "victim data");
    dq.delete();
    op(M_READ, ad(2, 3), 1'b0, '0);
    check(rsp_hit && rsp_data == 512'h53, "new line installed");

    // 5.
    epoch = 1'b0;                 // lines with bit 1 are now pre-snapshot
    op(M_GETS, ad(2, 3), 1'b0, '0);
    check(rsp_hit && rsp_data == 512'h53 && dq.size() == 0, "GETS forwards only");
    op(M_GETX, ad(2, 3), 1'b0, '0);
    check(rsp_hit && rsp_data == 512'h53, "GETX forwards");
    check(dq.size() == 1 && dq[0].addr == ad(2, 3) && dq[0].snap == 1'b1,
          "GETX sends the modified pre-snapshot line down");
    dq.delete();
    op(M_READ, ad(2, 3), 1'b0, '0);
    check(!rsp_hit, "GETX invalidated the line");
    op(M_INV, ad(1, 1), 1'b0, '0);
    check(dq.size() == 1 && dq[0].addr == ad(1, 1) && dq[0].data == 512'h44, "INV writes back");
    dq.delete();

    // 6. scrubber: epoch 0 now; make 5 pre-snapshot (bit 1) and 3 post lines
    for (int s = 3; s < 8; s++) op(M_WRITE, ad(s, 5), 1'b1, LINE_W'(s + 700));
    for (int s = 3; s < 6; s++) op(M_WRITE, ad(s, 6), 1'b0, LINE_W'(s + 800));
    // remaining modified lines: set 2 keeps one of (2,1)/(2,2) with bit 1
    n0 = 6;
    dq.delete();
    @(negedge clk);
    scrub_start = 1'b1;
    @(negedge clk);
    scrub_start = 1'b0;
    busy_cyc = 0;
    fork
      begin
        bit ok;
        req_valid = 1'b1;
        req = '{mtype: M_READ, snap: 1'b0, addr: ad(3, 6), data: '0};
        #1 ok = req_ready;
        check(!ok, "requests wait while the scrubber visits");
        @(negedge clk);
        req_valid = 1'b0;
      end
      while (scrub_busy) begin
        busy_cyc++;
        @(negedge clk);
      end
    join
    // busy was already counted once at the first negedge after start
    check(busy_cyc == SETS * WAYS + (SETS / 2 - 1) * 3,
          $sformatf("scrub took %0d cycles, expected %0d", busy_cyc, SETS * WAYS + (SETS / 2 - 1) * 3));
    check(dq.size() == n0, $sformatf("%0d lines scrubbed, expected %0d", dq.size(), n0));
    nd = 0;
    foreach (dq[i]) if (dq[i].snap != 1'b1) nd++;
    check(nd == 0, "only pre-snapshot lines scrubbed");
    dq.delete();
    op(M_READ, ad(4, 5), 1'b0, '0);
    check(rsp_hit && rsp_data == LINE_W'(704), "scrubbed line stays valid");
    @(negedge clk);
    scrub_start = 1'b1;
    @(negedge clk);
    scrub_start = 1'b0;
    while (scrub_busy) @(negedge clk);
    check(dq.size() == 0, "second scrub finds nothing to send");

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
