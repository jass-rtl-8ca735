// tb_ckpt_ctrl: self-checking test of the checkpoint controller.  The NoC
// counters, scrubbers, DRAM walker and access scheduler are played by this
// testbench (scrubbers and walker stay busy a set number of cycles after
// their start pulse).  Checks:
//  1. tuning: n = c / k (Eq. 1) and, at each sub-epoch boundary, the walk
//     step 512 + (n - m) / n * (256K - 512) for a modified count m < n, and
//     512 for m >= n; the values are computed here in integer arithmetic;
//  2. an external request sends the token with the tunables;
//  3. phase order: nothing starts before the NoC is quiet; the L2 scrub and
//     the DRAM walk start together; the LLC scrub only after the L2
//     scrubbers are done; the drain only after the LLC scrubbers and the walk
//     are done; completion only once the access scheduler is empty;
//     flush_clear and ckpt_done then pulse, and last_cl equals the latency
//     measured here;
//  4. periodic mode: tokens every es_cycles cycles.
module tb_ckpt_ctrl;
  import jass_pkg::*;

  localparam int unsigned NN = 20, NL2 = 8, NLLC = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                   periodic_en, ext_req, tok_out, flush_clear;
  logic [31:0]            es_cycles, cl_cycles, mod_count;
  logic [15:0]            k_cycles;
  logic [19:0]            scrub_step, walk_step_init, walk_step;
  logic [7:0]             scrub_gran;
  tune_t                  tune_out;
  logic [NN-1:0]          tr, settled;
  logic [NN-1:0][CNT_W-1:0] xcount, pcount;
  logic                   l2_scrub_start, llc_scrub_start, walk_start, walk_busy, drain, as_empty;
  logic [NL2-1:0]         l2_scrub_busy;
  logic [NLLC-1:0]        llc_scrub_busy;
  logic                   busy, in_flush, ckpt_done;
  logic [31:0]            last_cl, last_flush, n_pages, n_ckpts, n_tunes;

  ckpt_ctrl #(.NNODES(NN), .NL2(NL2), .NLLC(NLLC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------ environment
  int l2_len = 20, llc_len = 15, walk_len = 60;
  int l2_t, llc_t, walk_t;
  int ev_tok, ev_l2, ev_llc, ev_walk, ev_drain, ev_done;   // cycle stamps
  int cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (l2_scrub_start) begin l2_t = l2_len; ev_l2 = cyc; end
    else if (l2_t > 0) l2_t--;
    if (llc_scrub_start) begin llc_t = llc_len; ev_llc = cyc; end
    else if (llc_t > 0) llc_t--;
    if (walk_start) begin walk_t = walk_len; ev_walk = cyc; end
    else if (walk_t > 0) walk_t--;
    if (tok_out) ev_tok = cyc;
    if (drain && ev_drain < 0) ev_drain = cyc;
    if (ckpt_done) ev_done = cyc;
  end
  assign l2_scrub_busy  = (l2_t > 0) ? NL2'(1) : '0;
  assign llc_scrub_busy = (llc_t > 0) ? NLLC'(2) : '0;
  assign walk_busy      = walk_t > 0;

  function automatic int unsigned exp_step(input longint n, input longint m);
    if (m >= n) return 512;
    return 512 + int'(((n - m) * (262144 - 512)) / n);
  endfunction

  initial begin
    int t, t0, t1;
    cyc = 0; l2_t = 0; llc_t = 0; walk_t = 0; ev_drain = -1; ev_done = -1; ev_tok = -1;
    periodic_en = 1'b0; ext_req = 1'b0; es_cycles = 32'd5000; cl_cycles = 32'd10000;
    k_cycles = 16'd100; scrub_step = 20'd9; scrub_gran = 8'd3; walk_step_init = 20'd1024;
    mod_count = 32'd25; tr = '0; settled = '0; xcount = '0; pcount = '0; as_empty = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. tuning
    repeat (5) @(negedge clk);
    check(walk_step == 20'd1024, "initial walk step");
    repeat (300) @(negedge clk);
    check(n_pages == 100, $sformatf("n = c/k = %0d", n_pages));
    t = 0;
    while (n_tunes == 0 && t < 1000) begin @(negedge clk); t++; end
    repeat (70) @(negedge clk);
    check(walk_step == 20'(exp_step(100, 25)),
          $sformatf("walk step %0d, expected %0d", walk_step, exp_step(100, 25)));
    mod_count = 32'd90;
    t = n_tunes;
    while (n_tunes == t) @(negedge clk);
    repeat (70) @(negedge clk);
    check(walk_step == 20'(exp_step(100, 90)),
          $sformatf("walk step %0d, expected %0d", walk_step, exp_step(100, 90)));
    mod_count = 32'd150;
    t = n_tunes;
    while (n_tunes == t) @(negedge clk);
    @(negedge clk);
    check(walk_step == 20'd512, "at the bound: walk step 512");
    t0 = cyc; t = n_tunes;
    while (n_tunes == t) @(negedge clk);
    t1 = cyc;
    check(t1 - t0 >= 100 && t1 - t0 <= 100 + 140, $sformatf("sub-epoch length %0d", t1 - t0));

    // 2. external request
    @(negedge clk);
    ext_req = 1'b1;
    @(negedge clk);
    ext_req = 1'b0;
    check(tok_out && busy, "token sent on the request");
    check(tune_out.scrub_step == 20'd9 && tune_out.scrub_gran == 8'd3 && tune_out.walk_step == 20'd512,
          "token carries the tunables");
    t0 = cyc;

    // 3. phases
    repeat (10) @(negedge clk);
    tr = '1;
    repeat (5) @(negedge clk);
    settled = '1;
    xcount[3] = 32'd5; pcount[7] = 32'd3;
    repeat (10) @(negedge clk);
    check(ev_l2 < 0 || ev_l2 < t0, "no scrub before the sums agree");
    ev_l2 = -1;
    pcount[8] = 32'd2;
    repeat (3) @(negedge clk);
    check(ev_l2 >= 0 && ev_walk == ev_l2, "L2 scrub and DRAM walk start together");
    check(last_flush == 32'(ev_l2 - t0 + 1) || last_flush == 32'(ev_l2 - t0),
          $sformatf("flush time %0d", last_flush));
    as_empty = 1'b0;
    t = 0;
    while (!ckpt_done && t < 500) begin @(negedge clk); t++; end
    check(!ckpt_done, "not done while the scheduler holds pages");
    check(ev_llc >= ev_l2 + l2_len, "LLC scrub after the L2 scrubbers");
    check(ev_drain >= ev_llc + llc_len && ev_drain >= ev_walk + walk_len,
          "drain after the LLC scrub and the walk");
    check(drain, "draining");
    as_empty = 1'b1;
    t = 0;
    while (!ckpt_done && t < 10) begin @(negedge clk); t++; end
    check(ckpt_done && flush_clear, "done and flush_clear");
    t1 = cyc;
    check(n_ckpts == 1, "one checkpoint counted");
    check(last_cl >= 32'(t1 - t0) - 1 && last_cl <= 32'(t1 - t0) + 1,
          $sformatf("latency %0d, measured %0d", last_cl, t1 - t0));
    @(negedge clk);
    check(!busy && !drain, "idle again");

    // 4. periodic
    es_cycles = 32'd400; l2_len = 2; llc_len = 2; walk_len = 2;
    xcount = '0; pcount = '0;
    periodic_en = 1'b1;
    t = 0;
    while (!tok_out && t < 1000) begin @(negedge clk); t++; end
    t0 = cyc;
    @(negedge clk);
    t = 0;
    while (!tok_out && t < 1000) begin @(negedge clk); t++; end
    t1 = cyc;
    check(t1 - t0 == 400, $sformatf("periodic interval %0d, expected 400", t1 - t0));
    check(n_ckpts >= 2, "periodic checkpoints completed");
    periodic_en = 1'b0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
