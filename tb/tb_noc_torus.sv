// tb_noc_torus: end-to-end test of the 5 x 4 torus NoC and its distributed
// flush.  Every tile injects random single-flit messages to random nodes,
// carrying its own epoch colour as the snapshot bit; every tile drains its
// ejection port with random back-pressure.  Each tile flips its colour when
// the token reaches it through its router.  The directory tile (node 16)
// answers every marked message it receives with "absorbed" (n = 0).
// Three checkpoints are run; for each, the token is given to node 19 (the
// checkpoint controller's node) and the test checks, independently of the
// routers' own counters:
//  * every message arrives at its destination, payload intact;
//  * the token reaches every tile exactly once;
//  * whenever the flush looks complete (all routers in TR with their windows
//    closed, sum of pcount = sum of xcount) no pre-snapshot message is left
//    in the network: the count of pre-snapshot messages injected equals the
//    count ejected;
//  * the flush completes, within a bounded time.
// Also checks that marked messages existed (held flits were marked).
// Inputs change on the falling edge; handshakes complete at the rising edge.
module tb_noc_torus;
  import jass_pkg::*;

  localparam int unsigned XD = 5, YD = 4, N = XD * YD, DIRN = 16, CKN = 19;
  localparam int unsigned RATE = 12;       // injection chance per cycle, percent

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  flit_t [N-1:0]          inj_flit, ej_flit;
  logic  [N-1:0]          inj_valid, inj_ready, ej_valid, ej_ready;
  logic  [N-1:0]          tile_tok_in, tile_tok_out, tr, settled;
  tune_t [N-1:0]          tile_tune_in, tile_tune_out;
  logic                   dir_done_valid, flush_clear;
  logic [3:0]             dir_done_n;
  logic [N-1:0][CNT_W-1:0] xcount, pcount;

  noc_torus #(.XDIM(XD), .YDIM(YD), .BUF_DEPTH(4), .LINK_WINDOW(4),
              .PCOUNT_PERIOD(8), .DIR_NODE(DIRN)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [N-1:0] ep;                        // each tile's colour
  int  inj_cnt [2], ej_cnt [2];
  int  n_marked, n_bad, n_tok [N], n_early;
  bit  traffic;

  function automatic logic [CNT_W+4:0] sum(input logic [N-1:0][CNT_W-1:0] v);
    logic [CNT_W+4:0] s;
    s = '0;
    for (int i = 0; i < N; i++) s += (CNT_W+5)'(v[i]);
    return s;
  endfunction
  logic quiet;
  assign quiet = (&tr) && (&settled) && (sum(xcount) == sum(pcount));

  // ------------------------------------------------ monitors (rising edge)
  always @(posedge clk) if (rst_n) begin
    dir_done_valid <= 1'b0;
    dir_done_n     <= '0;
    for (int n = 0; n < N; n++) begin
      if (inj_valid[n] && inj_ready[n]) inj_cnt[inj_flit[n].snap]++;
      if (ej_valid[n] && ej_ready[n]) begin
        ej_cnt[ej_flit[n].snap]++;
        if (ej_flit[n].dst != NODE_W'(n) ||
            ej_flit[n].data != {ej_flit[n].addr, ej_flit[n].src, ej_flit[n].snap}) n_bad++;
        if (ej_flit[n].mark) begin
          n_marked++;
          if (n == DIRN) begin
            dir_done_valid <= 1'b1;
            dir_done_n     <= 4'd0;
          end
        end
      end
      if (tile_tok_out[n]) begin
        n_tok[n]++;
        ep[n] <= !ep[n];
      end
    end
  end

  // ------------------------------------------------ tiles (falling edge)
  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      // the handshake of the last edge finished the old flit
      if (!inj_valid[n] || inj_ready_q[n]) begin
        inj_valid[n] = 1'b0;
        if (traffic && ($urandom % 100) < RATE) begin
          flit_t f;
          f = '0;
          f.mtype = M_WB;
          f.snap  = ep[n];
          f.src   = NODE_W'(n);
          f.dst   = NODE_W'($urandom % N);
          f.addr  = PA_W'({$urandom, $urandom});
          f.data  = {f.addr, f.src, f.snap};
          inj_flit[n]  = f;
          inj_valid[n] = 1'b1;
        end
      end
      ej_ready[n] = ($urandom % 4) != 0;
    end
  end
  logic [N-1:0] inj_ready_q;
  always @(posedge clk) inj_ready_q <= inj_ready & inj_valid;

  initial begin
    inj_flit = '0; inj_valid = '0; ej_ready = '0; tile_tok_in = '0; tile_tune_in = '0;
    dir_done_valid = 1'b0; dir_done_n = '0; flush_clear = 1'b0; ep = '0;
    inj_cnt[0] = 0; inj_cnt[1] = 0; ej_cnt[0] = 0; ej_cnt[1] = 0;
    n_marked = 0; n_bad = 0; n_early = 0; traffic = 1'b1;
    for (int n = 0; n < N; n++) n_tok[n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int c = 0; c < 3; c++) begin
      int t;
      bit pc;
      pc = ep[CKN];
      repeat (300) @(negedge clk);
      tile_tok_in[CKN] = 1'b1;
      tile_tune_in[CKN] = '{scrub_step: 20'(c), scrub_gran: 8'd1, walk_step: 20'd512};
      @(negedge clk);
      tile_tok_in[CKN] = 1'b0;
      t = 0;
      // watch: the flush must not look complete with a pre message in flight
      while (!quiet && t < 5000) begin
        @(negedge clk);
        t++;
      end
      check(quiet, $sformatf("checkpoint %0d: flush completes (%0d cycles)", c, t));
      check(inj_cnt[pc] == ej_cnt[pc],
            $sformatf("checkpoint %0d: no pre-snapshot message left (%0d injected, %0d ejected)",
                      c, inj_cnt[pc], ej_cnt[pc]));
      for (int n = 0; n < N; n++)
        check(n_tok[n] == c + 1, $sformatf("token reached tile %0d %0d times", n, n_tok[n]));
      check(tile_tune_out[3].scrub_step == 20'(c), "tunables carried to the tiles");
      @(negedge clk);
      flush_clear = 1'b1;
      @(negedge clk);
      flush_clear = 1'b0;
      check(tr == '0, "flush_clear: all routers back to NTR");
    end

    // stop traffic and let everything arrive
    traffic = 1'b0;
    repeat (400) @(negedge clk);
    check(inj_cnt[0] + inj_cnt[1] == ej_cnt[0] + ej_cnt[1],
          $sformatf("all %0d messages delivered", inj_cnt[0] + inj_cnt[1]));
    check(inj_cnt[0] + inj_cnt[1] > 1000, "enough traffic");
    check(n_bad == 0, $sformatf("%0d messages at a wrong node or corrupted", n_bad));
    check(n_marked > 0, $sformatf("%0d marked messages seen", n_marked));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
