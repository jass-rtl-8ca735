// tb_snap_router: self-checking test of one torus router with its flush
// logic.  Router 6 (column 1, row 1) of a 5 x 4 torus is driven directly:
//  1. routing: flits injected on the local port leave on the port that
//     X-then-Y routing without wrap-around links predicts (computed here
//     from the coordinates, not by the router's function);
//  2. token: three flits held in the FIFOs are marked and counted (xcount),
//     the token goes out on all five ports one cycle later;
//  3. missed messages: an unmarked pre-snapshot flit arriving inside the
//     window is counted, a post-snapshot one is not, one after the window
//     is not;
//  4. pcount counts marked flits leaving on the local port and is reported
//     after the reporting period; settled rises when the windows close;
//  5. a marked flit injected by the tile is counted into xcount;
//  6. flush_clear returns to NTR; a directory router counts from its
//     directory's notifications instead of ejections.
module tb_snap_router;
  import jass_pkg::*;

  localparam int unsigned ME = 6, XD = 5, YD = 4, WIN = 4, PER = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  flit_t [NPORTS-1:0] in_flit, out_flit;
  logic  [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready, tok_in, tok_out;
  tune_t [NPORTS-1:0] tok_tune_in;
  tune_t              tok_tune_out;
  logic               dir_done_valid, flush_clear, tr, settled;
  logic [3:0]         dir_done_n;
  logic [CNT_W-1:0]   xcount, rep_pcount;

  snap_router #(.NODE_ID(ME), .XDIM(XD), .YDIM(YD), .BUF_DEPTH(4),
                .LINK_WINDOW(WIN), .PCOUNT_PERIOD(PER)) dut (.*);

  // a directory router for step 6
  flit_t [NPORTS-1:0] d_out_flit;
  logic  [NPORTS-1:0] d_in_ready, d_out_valid, d_tok_out;
  tune_t              d_tune_out;
  logic               d_tr, d_settled;
  logic [CNT_W-1:0]   d_xcount, d_pcount;
  snap_router #(.NODE_ID(ME), .XDIM(XD), .YDIM(YD), .LINK_WINDOW(WIN),
                .PCOUNT_PERIOD(PER), .IS_DIR(1'b1)) dut_dir (
    .clk, .rst_n, .in_flit, .in_valid, .in_ready(d_in_ready),
    .out_flit(d_out_flit), .out_valid(d_out_valid), .out_ready,
    .tok_in, .tok_tune_in, .tok_out(d_tok_out), .tok_tune_out(d_tune_out),
    .dir_done_valid, .dir_done_n, .flush_clear,
    .tr(d_tr), .settled(d_settled), .xcount(d_xcount), .rep_pcount(d_pcount));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic flit_t mk(input int dst, input bit snap, input bit mark);
    flit_t f;
    f       = '0;
    f.mtype = M_WB;
    f.dst   = NODE_W'(dst);
    f.src   = NODE_W'(ME);
    f.snap  = snap;
    f.mark  = mark;
    f.addr  = PA_W'(dst * 64);
    f.data  = LINE_W'(dst + 100);
    return f;
  endfunction

  // expected output port, from coordinates
  function automatic int exp_port(input int dst);
    int mx, my, dx, dy;
    mx = ME % XD; my = ME / XD; dx = dst % XD; dy = dst / XD;
    if (dx != mx) return (dx > mx) ? P_E : P_W;
    if (dy != my) return (dy > my) ? P_S : P_N;
    return P_L;
  endfunction

  task automatic inject(input int port, input flit_t f);
    @(negedge clk);
    in_flit[port]  = f;
    in_valid[port] = 1'b1;
    @(negedge clk);
    in_valid[port] = 1'b0;
  endtask

  initial begin
    in_flit = '0; in_valid = '0; out_ready = '0; tok_in = '0; tok_tune_in = '0;
    dir_done_valid = 1'b0; dir_done_n = '0; flush_clear = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---------------------------------------------------------- 1. routing
    for (int dst = 0; dst < XD * YD; dst++) begin
      int seen;
      inject(P_L, mk(dst, 1'b0, 1'b0));
      seen = -1;
      for (int p = 0; p < NPORTS; p++) if (out_valid[p]) seen = p;
      check(seen == exp_port(dst), $sformatf("route to %0d: port %0d, expected %0d",
                                              dst, seen, exp_port(dst)));
      check(out_flit[seen < 0 ? 0 : seen].data == LINE_W'(dst + 100), "payload kept");
      out_ready = '1;
      @(negedge clk);
      out_ready = '0;
    end
    check(tr == 1'b0 && xcount == 0, "NTR before the token");

    // ---------------------------------------------------------- 2. token
    inject(P_N, mk(ME, 1'b0, 1'b0));
    inject(P_E, mk(ME, 1'b0, 1'b0));
    inject(P_L, mk(0, 1'b0, 1'b0));            // leaves on N, held by out_ready = 0
    @(negedge clk);
    tok_in[P_S] = 1'b1;
    tok_tune_in[P_S] = '{scrub_step: 20'd7, scrub_gran: 8'd2, walk_step: 20'd1000};
    @(negedge clk);
    tok_in = '0;
    check(tr == 1'b1, "TR after the token");
    check(xcount == 3, $sformatf("xcount %0d after marking, expected 3", xcount));
    check(tok_out == '1, "token sent on all ports one cycle later");
    check(tok_tune_out.walk_step == 20'd1000 && tok_tune_out.scrub_gran == 8'd2,
          "tunables travel with the token");
    // ---------------------------------------------------------- 3. window
    in_flit[P_W] = mk(ME, 1'b0, 1'b0);      // unmarked pre-snapshot: counted
    in_valid[P_W] = 1'b1;
    @(negedge clk);
    in_flit[P_W] = mk(ME, 1'b1, 1'b0);      // post-snapshot: not counted
    @(negedge clk);
    in_valid[P_W] = 1'b0;
    check(tok_out == '0, "token sent once");
    check(xcount == 4, $sformatf("xcount %0d after window arrivals, expected 4", xcount));
    repeat (WIN) @(negedge clk);
    check(settled == 1'b1, "settled after the window");
    inject(P_W, mk(ME, 1'b0, 1'b0));        // after the window: not counted
    check(xcount == 4, "no count after the window");
    // second token ignored
    tok_in[P_E] = 1'b1;
    @(negedge clk);
    tok_in = '0;
    @(negedge clk);
    check(tok_out == '0 && xcount == 4, "later tokens ignored");

    // ---------------------------------------------------------- 4. pcount
    out_ready = '1;
    repeat (12) @(negedge clk);
    repeat (PER + 1) @(negedge clk);
    // ejected at node ME: two held ones, the window one (marked), the post
    // one and the late one (unmarked): 3 marked
    check(rep_pcount == 3, $sformatf("pcount %0d, expected 3", rep_pcount));

    // ---------------------------------------------------------- 5. tile marked flit
    inject(P_L, mk(ME, 1'b0, 1'b1));
    check(xcount == 5, $sformatf("marked tile flit counted, xcount %0d", xcount));
    repeat (PER + 4) @(negedge clk);
    check(rep_pcount == 4, $sformatf("and ejected, pcount %0d", rep_pcount));

    // ---------------------------------------------------------- 6. clear and directory
    flush_clear = 1'b1;
    @(negedge clk);
    flush_clear = 1'b0;
    check(tr == 1'b0 && xcount == 0 && rep_pcount == 0, "flush_clear returns to NTR");
    check(d_tr == 1'b0, "directory router cleared too");
    // directory router: marked flit ejected does not count until notified
    tok_in[P_N] = 1'b1;
    @(negedge clk);
    tok_in = '0;
    inject(P_E, mk(ME, 1'b1, 1'b1));
    repeat (PER + 2) @(negedge clk);
    check(d_pcount == 0, "directory pcount waits for the directory");
    dir_done_valid = 1'b1; dir_done_n = 4'd0;
    @(negedge clk);
    dir_done_n = 4'd3;
    @(negedge clk);
    dir_done_n = 4'd1;
    @(negedge clk);
    dir_done_valid = 1'b0;
    repeat (PER + 2) @(negedge clk);
    check(d_pcount == 1, $sformatf("directory absorbed message counted, pcount %0d", d_pcount));
    check(d_xcount == 2, $sformatf("directory n=3 adds 2, xcount %0d", d_xcount));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
