// tb_jass_top: end-to-end test of the whole chip at reduced sizes (8-set,
// 2-way L2 and LLC banks, a 16-node page-table pool per table, a 4-page
// access scheduler) so that evictions, scheduler overflow and table walks
// happen within a short run.
//
// Around the chip: eight core models issue random writes and reads, each to
// its own 8 pages (so no coherence is needed); a DRAM model (one request at a
// time, unwritten blocks read as a pattern of their address); an NVM model
// that applies every page write (masked blocks) to an image; a directory
// model that sends pre-snapshot messages to core tiles and, for every marked
// message it receives, absorbs it (n = 0), forwards it (n = 1) or splits it
// in two (n = 2), reporting n to its router.
//
// Scenario: an external checkpoint request during traffic, then periodic
// checkpoints during traffic, then a checkpoint without traffic, then a few
// writes followed by a long quiet stretch (so the predictor finds cold pages
// and persists them speculatively), then a last checkpoint.
// Checks, worked out from the models only:
//  * a read that hits returns the newest value the core wrote;
//  * after every checkpoint k, for every block written in an epoch before k,
//    the NVM image holds the newest value written before the core took the
//    k-th token (a consistent snapshot);
//  * at the end the NVM holds the newest value of every block;
//  * every mechanism happened at least once: external and periodic trigger,
//    token at every tile, L2 and LLC scrub write-backs, DRAM checkpoint
//    walk, persist of the earlier version (avatar), speculative persist,
//    scrub ack and nak, scheduler coalescing and overflow eviction,
//    directory n = 0 / 1 / 2, walk-step tuning; and no table overflow.
module tb_jass_top;
  import jass_pkg::*;

  localparam int unsigned NC = 8, NL = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic  [NC-1:0]             core_req_valid, core_req_ready, core_rsp_valid, core_rsp_hit;
  creq_t [NC-1:0]             core_req;
  logic  [NC-1:0][LINE_W-1:0] core_rsp_data;
  logic  [NC-1:0]             core_epoch, core_snap;
  flit_t                      dir_ej_flit, dir_inj_flit;
  logic                       dir_ej_valid, dir_ej_ready, dir_inj_valid, dir_inj_ready;
  logic                       dir_done_valid, dir_snap;
  logic [3:0]                 dir_done_n;
  logic                       dram_req_valid, dram_req_we, dram_req_ready, dram_rsp_valid;
  logic [PA_W-1:0]            dram_req_addr;
  logic [LINE_W-1:0]          dram_req_wdata, dram_rsp_data;
  logic                       nvm_valid, nvm_spec, nvm_ready;
  page_t                      nvm_page;
  logic                       periodic_en, ext_req;
  logic [31:0]                es_cycles, cl_cycles;
  logic [15:0]                k_cycles;
  logic [19:0]                scrub_step, walk_step_init, walk_step;
  logic [7:0]                 scrub_gran;
  logic                       ready, ckpt_busy, ckpt_done, pt_overflow;
  logic [31:0]                last_cl, last_flush, n_ckpts, n_tunes, mod_count;
  logic [31:0]                n_ckpt_pages, n_spec_pages, n_avatar_pages, n_naks;

  jass_top #(.L2_SETS(8), .LLC_SETS(8), .WAYS(2), .PT_NODES(16), .AS_PAGES(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------ DRAM model
  logic [LINE_W-1:0] dmem [logic [PA_W-1:0]];
  assign dram_req_ready = 1'b1;
  always @(posedge clk) begin
    dram_rsp_valid <= 1'b0;
    if (rst_n && dram_req_valid && dram_req_ready) begin
      if (dram_req_we) dmem[dram_req_addr] = dram_req_wdata;
      else begin
        dram_rsp_valid <= 1'b1;
        dram_rsp_data  <= dmem.exists(dram_req_addr) ? dmem[dram_req_addr]
                                                     : {dram_req_addr, 32'h0DEF0DEF};
      end
    end
  end

  // ------------------------------------------------ NVM model
  logic [LINE_W-1:0] nvm [logic [PA_W-1:0]];
  int n_nvm, n_nvm_full, n_nvm_spec, n_overflow_evict;
  always @(posedge clk) if (rst_n && nvm_valid && nvm_ready) begin
    n_nvm++;
    if (nvm_page.mask == 4'hF) n_nvm_full++;
    if (nvm_spec) n_nvm_spec++;
    if (!dut.drain) n_overflow_evict++;
    for (int b = 0; b < 4; b++)
      if (nvm_page.mask[b]) nvm[{nvm_page.page, 2'(b), 6'd0}] = nvm_page.data[b];
  end
  always @(negedge clk) nvm_ready = ($urandom % 8) != 0;

  // ------------------------------------------------ cores
  bit               traffic;
  int               focus;            // >= 0: only this core writes, to few blocks
  int               ce [NC];          // tokens seen by each core
  logic [LINE_W-1:0] newest [logic [PA_W-1:0]];
  logic [LINE_W-1:0] snapv  [int][logic [PA_W-1:0]];  // per epoch: last value in it
  logic [PA_W-1:0]  rd_a [NC];
  bit               rd_p [NC];
  int               n_rd_hits, wcnt;
  logic [NC-1:0]    acc_q;

  function automatic logic [PA_W-1:0] rand_addr(input int c, input bit narrow);
    int pg, b;
    pg = narrow ? ($urandom % 2) : ($urandom % 8);
    b  = $urandom % 4;
    return {PAGE_W'(32'h100 + c * 8 + pg), 2'(b), 6'd0};
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (rd_p[c]) begin
        rd_p[c] = 1'b0;
        if (core_rsp_valid[c] && core_rsp_hit[c]) begin
          n_rd_hits++;
          check(newest.exists(rd_a[c]) && core_rsp_data[c] == newest[rd_a[c]],
                $sformatf("core %0d read hit of %h returns the newest value", c, rd_a[c]));
        end
      end
      if (core_req_valid[c] && core_req_ready[c]) begin
        if (core_req[c].mtype == M_WRITE) begin
          newest[core_req[c].addr] = core_req[c].data;
          snapv[ce[c]][core_req[c].addr] = core_req[c].data;
        end else begin
          rd_p[c] = 1'b1;
          rd_a[c] = core_req[c].addr;
        end
      end
      if (core_snap[c]) ce[c]++;
    end
    acc_q <= core_req_valid & core_req_ready;
  end

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (!core_req_valid[c] || acc_q[c]) begin
        core_req_valid[c] = 1'b0;
        if (traffic && (focus < 0 || focus == c) && ($urandom % 100) < 30) begin
          creq_t r;
          wcnt++;
          r.addr  = rand_addr(c, focus >= 0);
          r.snap  = 1'b0;                      // the tile stamps its own colour
          r.mtype = (($urandom % 10) < 7) ? M_WRITE : M_READ;
          r.data  = {r.addr, 32'(wcnt), 8'(c)};
          core_req[c] = r;
          core_req_valid[c] = 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------ directory model
  int  n_dir [3];
  int  dir_send;                      // messages waiting to be injected
  logic [NODE_W-1:0] dir_dst;
  bit  dir_ep;
  bit  dir_traffic;
  assign dir_ej_ready = 1'b1;
  always @(posedge clk) if (rst_n) begin
    dir_done_valid <= 1'b0;
    if (dir_snap) dir_ep = !dir_ep;
    if (dir_inj_valid && dir_inj_ready) dir_send--;
    if (dir_ej_valid && dir_ej_ready && dir_ej_flit.mark) begin
      int n;
      n = $urandom % 3;
      n_dir[n]++;
      dir_done_valid <= 1'b1;
      dir_done_n     <= 4'(n);
      dir_send += n;
    end
  end
  always @(negedge clk) if (rst_n) begin
    if (dir_send > 0) begin
      // a forwarded / generated message: pre-snapshot, marked
      dir_inj_flit = '{mtype: M_INV, snap: !dir_ep, mark: 1'b1, dst: NODE_W'($urandom % 8),
                       src: NODE_W'(16), addr: '0, data: '0};
      dir_inj_valid = 1'b1;
    end else if (dir_traffic && ($urandom % 100) < 5) begin
      // an ordinary message of the running epoch to a core or to itself
      dir_inj_flit = '{mtype: M_INV, snap: dir_ep, mark: 1'b0,
                       dst: (($urandom % 2) == 0) ? NODE_W'(16) : NODE_W'($urandom % 8),
                       src: NODE_W'(16), addr: '0, data: '0};
      dir_inj_valid = 1'b1;
    end else begin
      dir_inj_valid = 1'b0;
    end
  end

  // ------------------------------------------------ mechanism monitors
  int n_l2_wb, n_llc_nvm, n_ack, n_ext, n_per, n_tokens, n_tok_tiles, ws_changes;
  logic [19:0] ws_q;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++)
      if (dut.inj_valid[c] && dut.inj_ready[c] && dut.inj_flit[c].mark) n_l2_wb++;
    for (int b = 8; b < 16; b++)
      if (dut.inj_valid[b] && dut.inj_ready[b] && dut.inj_flit[b].dst == NODE_W'(18)) n_llc_nvm++;
    if (dut.srsp_valid && dut.srsp_ack) n_ack++;
    if (dut.ck_tok) begin
      n_tokens++;
      if (ext_req_q) n_ext++; else n_per++;
    end
    n_tok_tiles += $countones(dut.tile_tok_out);
    if (walk_step != ws_q) ws_changes++;
    ws_q <= walk_step;
  end
  logic ext_req_q;
  always @(posedge clk) ext_req_q <= ext_req;

  // ------------------------------------------------ snapshot check
  task automatic check_snapshot(input int k, input bit final_all);
    int bad, n;
    bad = 0; n = 0;
    if (final_all) begin
      foreach (newest[a]) begin
        n++;
        if (!nvm.exists(a) || nvm[a] != newest[a]) bad++;
      end
    end else begin
      logic [LINE_W-1:0] want [logic [PA_W-1:0]];
      for (int e = 0; e < k; e++)
        if (snapv.exists(e))
          foreach (snapv[e][a]) want[a] = snapv[e][a];
      foreach (want[a]) begin
        n++;
        if (!nvm.exists(a) || nvm[a] != want[a]) begin
          bad++;
          if (bad < 4) $display("  block %h: nvm %h want %h", a,
                                nvm.exists(a) ? nvm[a][63:0] : 64'hx, want[a][63:0]);
        end
      end
    end
    check(bad == 0, $sformatf("checkpoint %0d: %0d of %0d blocks wrong in NVM", k, bad, n));
    $display("checkpoint %0d: %0d blocks checked, latency %0d cycles (flush %0d)",
             k, n, last_cl, last_flush);
  endtask

  task automatic wait_ckpt(input int k);
    int t;
    t = 0;
    while (n_ckpts < 32'(k) && t < 200000) begin @(negedge clk); t++; end
    check(n_ckpts >= 32'(k), $sformatf("checkpoint %0d completes", k));
    if (n_ckpts < 32'(k))
      $display("  stuck: state %0d tr %h settled %h x %0d p %0d l2 %h llc %h walk %0d empty %0d",
               dut.u_ckpt.st, dut.tr, dut.settled, dut.u_ckpt.sum_x, dut.u_ckpt.sum_p,
               dut.l2_scrub_busy, dut.llc_scrub_busy, dut.walk_busy, dut.as_empty);
  endtask

  task automatic pulse_ext();
    @(negedge clk);
    ext_req = 1'b1;
    @(negedge clk);
    ext_req = 1'b0;
  endtask

  initial begin
    core_req_valid = '0; core_req = '0;
    dir_inj_valid = 1'b0; dir_inj_flit = '0; dir_done_valid = 1'b0; dir_done_n = '0;
    dir_send = 0; dir_ep = 1'b0; dir_traffic = 1'b0;
    periodic_en = 1'b0; ext_req = 1'b0; es_cycles = 32'd6000; cl_cycles = 32'd3000;
    k_cycles = 16'd100; scrub_step = 20'd4; scrub_gran = 8'd2; walk_step_init = 20'd1024;
    traffic = 1'b0; focus = -1; wcnt = 0; n_rd_hits = 0;
    n_nvm = 0; n_nvm_full = 0; n_nvm_spec = 0; n_overflow_evict = 0;
    n_l2_wb = 0; n_llc_nvm = 0; n_ack = 0; n_ext = 0; n_per = 0; n_tokens = 0;
    n_tok_tiles = 0; ws_changes = 0; ws_q = '0;
    for (int i = 0; i < 3; i++) n_dir[i] = 0;
    for (int c = 0; c < NC; c++) begin ce[c] = 0; rd_p[c] = 1'b0; rd_a[c] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!ready) @(negedge clk);

    // traffic, then an external checkpoint during traffic
    traffic = 1'b1; dir_traffic = 1'b1;
    repeat (3000) @(negedge clk);
    pulse_ext();
    wait_ckpt(1);
    check_snapshot(1, 1'b0);

    // periodic checkpoints during traffic
    periodic_en = 1'b1;
    wait_ckpt(2);
    check_snapshot(2, 1'b0);
    wait_ckpt(3);
    check_snapshot(3, 1'b0);
    periodic_en = 1'b0;

    // a checkpoint without traffic
    traffic = 1'b0; dir_traffic = 1'b0;
    repeat (500) @(negedge clk);
    pulse_ext();
    wait_ckpt(4);
    check_snapshot(4, 1'b0);

    // a few writes, then quiet: cold pages get persisted early
    focus = 2; traffic = 1'b1;
    repeat (300) @(negedge clk);
    traffic = 1'b0;
    begin
      int t;
      t = 0;
      while (n_spec_pages == 0 && t < 150000) begin @(negedge clk); t++; end
    end
    repeat (2000) @(negedge clk);
    pulse_ext();
    wait_ckpt(5);
    check_snapshot(5, 1'b0);
    check_snapshot(5, 1'b1);

    // mechanisms
    $display("reads hit %0d, L2 scrub/avatar write-backs %0d, LLC->NVM %0d, NVM writes %0d (full pages %0d, speculative %0d, overflow evictions %0d)",
             n_rd_hits, n_l2_wb, n_llc_nvm, n_nvm, n_nvm_full, n_nvm_spec, n_overflow_evict);
    $display("DRAM: walk pages %0d, avatar %0d, speculative %0d, scrub ack %0d nak %0d; directory n=0/1/2: %0d/%0d/%0d",
             n_ckpt_pages, n_avatar_pages, n_spec_pages, n_ack, n_naks, n_dir[0], n_dir[1], n_dir[2]);
    $display("tokens: external %0d periodic %0d, tile deliveries %0d; tunings %0d, walk-step changes %0d",
             n_ext, n_per, n_tok_tiles, n_tunes, ws_changes);
    check(n_ext >= 3 && n_per >= 2, "external and periodic triggers");
    check(n_tok_tiles == 20 * n_tokens, "token reached every tile every time");
    check(n_rd_hits > 0, "read hits");
    check(n_l2_wb > 0, "pre-snapshot write-backs from the L2s");
    check(n_llc_nvm > 0, "pre-snapshot LLC write-backs to the NVM");
    check(n_ckpt_pages > 0, "DRAM walk persisted pages");
    check(n_avatar_pages > 0, "earlier version persisted before a post-snapshot write");
    check(n_spec_pages > 0 && n_nvm_spec > 0, "speculative persists");
    check(n_ack > 0 && n_naks > 0, "scrub ack and nak");
    check(n_nvm_full > 0, "coalesced page writes");
    check(n_overflow_evict > 0, "scheduler overflow evictions");
    check(n_dir[0] > 0 && n_dir[1] > 0 && n_dir[2] > 0, "directory absorbs, forwards and splits");
    check(n_tunes > 0 && ws_changes > 1, "walk step tuned");
    check(!pt_overflow, "no page-table overflow");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
