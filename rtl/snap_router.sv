// snap_router: one router of the torus NoC, with the snapshot-token flush
// logic of JASS.
//
// Datapath: five input FIFOs (N, E, S, W, local), dimension-order routing
// (X first, then Y) that never takes a wrap-around link, and a round-robin
// arbiter per output.  With a single virtual channel, routing the shorter way
// round a ring can deadlock (the ring's buffers fill in a cycle); keeping
// flits off the wrap-around links makes the routing that of a mesh, which is
// deadlock-free.  The wrap-around links still carry the token.
// A flit moves one hop per cycle: an output
// is granted combinationally from the head of an input FIFO and written into
// the neighbour's FIFO at the clock edge; in_ready depends only on FIFO
// occupancy, so there is no combinational path through a router.
//
// Flush logic (the paper's flushing algorithm):
//  * The router is in NTR (no token received) or TR.  The token travels on
//    its own wires (tok_in/tok_out) so that nothing can block it: this is
//    how the paper's "highest priority" of the token is realised.
//  * On the first token: enter TR, flip the epoch colour, mark every flit
//    held in the FIFOs (flits leaving in that very cycle leave marked), add
//    their number to xcount, and one cycle later send the token to all four
//    neighbours and to the tile element on the local port, together with
//    the tunables it came with.  Later tokens are ignored.
//  * "Missed messages": for LINK_WINDOW cycles after entering TR, every
//    unmarked pre-snapshot flit that arrives on any input is counted into
//    xcount and marked.
//  * A marked flit that leaves the NoC on the local port adds one to pcount.
//    A directory router (IS_DIR) instead waits for its directory:
//    dir_done_n = 0 (message absorbed) adds one to pcount, n >= 2 generated
//    messages add n-1 to xcount, n = 1 changes nothing.
//  * A flit that the tile element injects already marked (pre-snapshot data
//    sent after the token, e.g. by a scrubber) is added to xcount here, so
//    the controller's sum test also covers it (an extension of this design).
//    Not so at the directory router: the messages its directory generates
//    are already counted by the n-1 rule.
//  * pcount is reported every PCOUNT_PERIOD cycles; xcount is reported live.
//    `settled` says TR has been entered and all windows are closed.
//  * flush_clear from the checkpoint controller returns the router to NTR and
//    clears both counts.
// Counting ejected *marked* flits rather than every non-token message is this
// design's reading of the algorithm: only marked flits are in xcount.
module snap_router
  import jass_pkg::*;
#(
  parameter int unsigned NODE_ID       = 0,
  parameter int unsigned XDIM          = 5,
  parameter int unsigned YDIM          = 4,
  parameter int unsigned BUF_DEPTH     = 4,
  parameter int unsigned LINK_WINDOW   = 4,
  parameter int unsigned PCOUNT_PERIOD = 16,
  parameter bit          IS_DIR        = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // flit inputs/outputs, index = port (N, E, S, W, L)
  input  flit_t [NPORTS-1:0]       in_flit,
  input  logic  [NPORTS-1:0]       in_valid,
  output logic  [NPORTS-1:0]       in_ready,
  output flit_t [NPORTS-1:0]       out_flit,
  output logic  [NPORTS-1:0]       out_valid,
  input  logic  [NPORTS-1:0]       out_ready,
  // token wires
  input  logic  [NPORTS-1:0]       tok_in,
  input  tune_t [NPORTS-1:0]       tok_tune_in,
  output logic  [NPORTS-1:0]       tok_out,
  output tune_t                    tok_tune_out,
  // directory notification (used when IS_DIR)
  input  logic                     dir_done_valid,
  input  logic [3:0]               dir_done_n,
  // checkpoint controller side band
  input  logic                     flush_clear,
  output logic                     tr,
  output logic                     settled,
  output logic [CNT_W-1:0]         xcount,
  output logic [CNT_W-1:0]         rep_pcount
);

  localparam int unsigned PTR_W = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1;
  localparam int unsigned MYX   = NODE_ID % XDIM;
  localparam int unsigned MYY   = NODE_ID / XDIM;
  localparam int unsigned WIN_W = $clog2(LINK_WINDOW + 1);

  // ------------------------------------------------------------ FIFOs
  flit_t             buf_q   [NPORTS][BUF_DEPTH];
  logic [PTR_W-1:0]  head_q  [NPORTS];
  logic [PTR_W-1:0]  tail_q  [NPORTS];
  logic [PTR_W:0]    cnt_q   [NPORTS];

  logic              epoch_q;          // colour of the current epoch
  logic [WIN_W-1:0]  win_q [NPORTS];
  logic [CNT_W-1:0]  pcount_q;
  logic [$clog2(PCOUNT_PERIOD+1)-1:0] per_q;
  logic              tok_send_q;
  tune_t             tune_q;

  logic              tok_any;
  logic              tr_event;
  assign tok_any  = |tok_in;
  assign tr_event = tok_any && !tr;

  // Route of each input head.
  logic [NPORTS-1:0][NPORTS-1:0] want;   // want[in][out]
  logic [NPORTS-1:0]             head_v;
  flit_t [NPORTS-1:0]            head_f;

  function automatic logic [2:0] route(input logic [NODE_W-1:0] dst);
    int unsigned dx, dy;
    dx = int'(dst) % XDIM;
    dy = int'(dst) / XDIM;
    if (dx != MYX) return (dx > MYX) ? 3'(P_E) : 3'(P_W);
    if (dy != MYY) return (dy > MYY) ? 3'(P_S) : 3'(P_N);
    return 3'(P_L);
  endfunction

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      head_v[i] = (cnt_q[i] != '0);
      head_f[i] = buf_q[i][head_q[i]];
      want[i]   = '0;
      if (head_v[i]) want[i][route(head_f[i].dst)] = 1'b1;
    end
  end

  // Round-robin arbitration per output.
  logic [NPORTS-1:0][2:0]        rr_q;
  logic [NPORTS-1:0][NPORTS-1:0] grant;   // grant[out][in]
  logic [NPORTS-1:0]             deq;

  always_comb begin
    int unsigned i;
    logic        found;
    i     = 0;
    found = 1'b0;
    grant = '0;
    for (int o = 0; o < NPORTS; o++) begin
      // the choice does not depend on out_ready (valid never waits for ready)
      found = 1'b0;
      for (int k = 0; k < NPORTS; k++) begin
        i = (int'(rr_q[o]) + k) % NPORTS;
        if (want[i][o] && !found) begin
          grant[o][i] = 1'b1;
          found       = 1'b1;
        end
      end
    end
  end

  always_comb begin
    deq = '0;
    for (int o = 0; o < NPORTS; o++)
      if (out_ready[o])
        for (int j = 0; j < NPORTS; j++) if (grant[o][j]) deq[j] = 1'b1;
  end

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = 1'b0;
      out_flit[o]  = head_f[0];
      for (int i = 0; i < NPORTS; i++) begin
        if (grant[o][i]) begin
          out_valid[o] = 1'b1;
          out_flit[o]  = head_f[i];
          if (tr_event) out_flit[o].mark = 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) in_ready[i] = (cnt_q[i] != (PTR_W+1)'(BUF_DEPTH));
  end

  // Flits counted at TR: unmarked pre-snapshot flits held in the FIFOs.
  logic [CNT_W-1:0] held_cnt;
  always_comb begin
    held_cnt = '0;
    for (int i = 0; i < NPORTS; i++)
      for (int d = 0; d < BUF_DEPTH; d++)
        if ((PTR_W+1)'((d + BUF_DEPTH - int'(head_q[i])) % BUF_DEPTH) < cnt_q[i] &&
            !buf_q[i][d].mark && buf_q[i][d].snap == epoch_q)
          held_cnt = held_cnt + 1'b1;
  end

  // Arrivals: missed-message counting and local injections of marked flits.
  logic [NPORTS-1:0] acc;
  logic [NPORTS-1:0] arr_count;
  logic [NPORTS-1:0] arr_mark;
  logic [CNT_W-1:0]  arr_cnt;
  always_comb begin
    arr_cnt = '0;
    for (int i = 0; i < NPORTS; i++) begin
      acc[i]       = in_valid[i] && in_ready[i];
      arr_count[i] = 1'b0;
      arr_mark[i]  = 1'b0;
      if (acc[i] && !in_flit[i].mark) begin
        // window open now (it opens in the TR cycle itself)
        if ((tr_event || (tr && win_q[i] != '0)) &&
            in_flit[i].snap == (tr_event ? epoch_q : !epoch_q)) begin
          arr_count[i] = 1'b1;
          arr_mark[i]  = 1'b1;
        end
      end
      if (acc[i] && in_flit[i].mark && i == P_L && !IS_DIR) arr_count[i] = 1'b1;
      if (arr_count[i]) arr_cnt = arr_cnt + 1'b1;
    end
  end

  // Marked flits leave the FIFOs only through deq; the local output counts.
  logic eject_marked;
  assign eject_marked = out_valid[P_L] && out_ready[P_L] && out_flit[P_L].mark;

  // FIFO storage (not reset: only entries below the count are ever read)
  always_ff @(posedge clk) begin
    for (int i = 0; i < NPORTS; i++) begin
      if (tr_event)
        for (int d = 0; d < BUF_DEPTH; d++) buf_q[i][d].mark <= 1'b1;
      if (acc[i]) begin
        buf_q[i][tail_q[i]] <= in_flit[i];
        if (arr_mark[i] || tr_event) buf_q[i][tail_q[i]].mark <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) begin
        head_q[i] <= '0;
        tail_q[i] <= '0;
        cnt_q[i]  <= '0;
        win_q[i]  <= '0;
      end
      rr_q       <= '0;
      tr         <= 1'b0;
      epoch_q    <= 1'b0;
      xcount     <= '0;
      pcount_q   <= '0;
      rep_pcount <= '0;
      per_q      <= '0;
      tok_send_q <= 1'b0;
      tune_q     <= '0;
    end else begin
      // FIFO pointers and marking
      for (int i = 0; i < NPORTS; i++) begin
        if (acc[i]) tail_q[i] <= (tail_q[i] == PTR_W'(BUF_DEPTH-1)) ? '0 : tail_q[i] + 1'b1;
        if (deq[i]) head_q[i] <= (head_q[i] == PTR_W'(BUF_DEPTH-1)) ? '0 : head_q[i] + 1'b1;
        cnt_q[i] <= cnt_q[i] + (PTR_W+1)'(acc[i]) - (PTR_W+1)'(deq[i]);
        if (tr_event)                 win_q[i] <= WIN_W'(LINK_WINDOW - 1);
        else if (win_q[i] != '0)      win_q[i] <= win_q[i] - 1'b1;
      end
      for (int o = 0; o < NPORTS; o++)
        for (int i = 0; i < NPORTS; i++)
          if (grant[o][i] && out_ready[o]) rr_q[o] <= 3'((i + 1) % NPORTS);

      // token handling
      tok_send_q <= tr_event;
      if (tr_event) begin
        tr      <= 1'b1;
        epoch_q <= !epoch_q;
        for (int i = NPORTS-1; i >= 0; i--) if (tok_in[i]) tune_q <= tok_tune_in[i];
      end

      // counters
      if (flush_clear) begin
        tr         <= 1'b0;
        xcount     <= '0;
        pcount_q   <= '0;
        rep_pcount <= '0;
      end else begin
        xcount <= xcount + (tr_event ? held_cnt : '0) + arr_cnt +
                  ((IS_DIR && dir_done_valid && dir_done_n >= 4'd2) ?
                     CNT_W'(dir_done_n - 4'd1) : '0);
        if (IS_DIR) begin
          if (dir_done_valid && dir_done_n == 4'd0) pcount_q <= pcount_q + 1'b1;
        end else if (eject_marked) begin
          pcount_q <= pcount_q + 1'b1;
        end
        if (per_q == '0) rep_pcount <= pcount_q;
      end
      per_q <= (per_q == '0) ? ($bits(per_q))'(PCOUNT_PERIOD - 1) : per_q - 1'b1;
    end
  end

  always_comb begin
    settled = tr;
    for (int i = 0; i < NPORTS; i++) if (win_q[i] != '0) settled = 1'b0;
  end

  assign tok_out      = {NPORTS{tok_send_q}};
  assign tok_tune_out = tune_q;

  // A post-snapshot flit never reaches a router that has not seen the token
  // (Lemma 1 of the paper); flits from the local element are exempt, since
  // the element learns of the token from this router.
  for (genvar gi = 0; gi < P_L; gi++) begin : g_lemma1
    a_lemma1: assert property (@(posedge clk) disable iff (!rst_n)
      !(acc[gi] && !tr && !tok_any && in_flit[gi].snap != epoch_q))
      else $error("post-snapshot flit reached an NTR router on port %0d", gi);
  end

endmodule
