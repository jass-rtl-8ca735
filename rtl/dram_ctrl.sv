// dram_ctrl: the JASS additions to the DRAM controller - two per-epoch DRAM
// page tables, the hierarchical page-table walker that scrubs the DRAM at a
// checkpoint, the locality-predictor walk that persists cold pages early, and
// the "scrub this page" service used by the NVM access scheduler.
//
// Page tables (paper Sec. 4.6.1, Fig. 7).  A 48-bit physical address is split
// into four 10-bit indices and an 8-bit offset (256-byte pages).  Each table
// is a four-level radix tree of 1024-entry nodes; a non-leaf entry holds a
// valid bit and the 48-bit pointer to the next node, a leaf entry a valid bit
// and the page's 2-bit private counter.  This design also keeps in the leaf
// (bits 5:2) which of the page's four blocks were written to DRAM in that
// epoch, and persists only those: the LLC banks take the token at slightly
// different times, so a block of a page may reach the NVM from a cache
// before another block of the same page enters the DRAM table, and
// persisting the whole DRAM page then would overwrite the newer block.  A valid leaf means that the page was
// written in that epoch.  There is one table per epoch colour: table[c]
// tracks the pages written by blocks whose snapshot bit is c.  Here the
// nodes come from a pool of PT_NODES nodes per table held in controller
// memory (the paper keeps them in DRAM and gives no size); node 0 is the
// root, a pointer is a node number.  Pool exhaustion sets pt_overflow.
//
// Operations, one at a time, in this priority order (a running checkpoint
// walk and DRAM writes take turns, so that neither can starve the other):
//  1. Scrub request (from the access scheduler): look the page up in the
//     pre-snapshot table; if present, read its four blocks from DRAM, clear
//     the leaf and answer ack with the page, else answer nak.
//  2. DRAM write (wr_*): if the block is post-snapshot and its page is still
//     in the pre-snapshot table, first persist that earlier version of the
//     page (read it, send it to the access scheduler, clear the leaf).  Then
//     insert the page into table[wr_snap], allocating nodes as needed, with
//     its private counter at 3 (the shared counter is set to 7 by the
//     predictor), and finally write the block to DRAM.
//  3. Checkpoint walk (walk_start .. walk_done) over the pre-snapshot table:
//     a per-level counter and a per-level node register implement the nested
//     loop of Sec. 4.6.1, one entry per cycle; every valid leaf is persisted;
//     every entry is cleared as the walk leaves it, so the table is empty
//     and its pool free when walk_done pulses.
//  4. Predictor walk over the current table, started every walk_step cycles
//     (the memory-walk step, the activation rate R): it advances to the next
//     valid leaf and asks the locality predictor; a cold page is persisted
//     speculatively (page_spec = 1) and its leaf cleared, otherwise the
//     cyclically cleared private counter is written back.
// sreq_hold (high while the checkpoint controller waits for the NoC flush)
// defers scrub requests: a pre-snapshot write may still be on its way to
// the DRAM, and a scrub answered before it arrives would let that older
// block be persisted after the newer one from the caches.
// epoch_flip (the token reaching the controller) swaps the roles of the two
// tables; it is taken between operations.  mod_count is the number of valid
// leaves of the current table (the modified set the checkpoint controller
// compares with n); pre_count that of the pre-snapshot table.
// DRAM port: one request at a time; a read answers on dram_rsp_valid.
module dram_ctrl
  import jass_pkg::*;
#(
  parameter int unsigned PT_NODES   = 64,
  parameter int unsigned SH_ENTRIES = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 init_done,
  // writes of blocks into DRAM (write-backs from the LLC)
  input  logic                 wr_valid,
  input  logic [PA_W-1:0]      wr_addr,
  input  logic [LINE_W-1:0]    wr_data,
  input  logic                 wr_snap,
  output logic                 wr_ready,
  // DRAM device
  output logic                 dram_req_valid,
  output logic                 dram_req_we,
  output logic [PA_W-1:0]      dram_req_addr,
  output logic [LINE_W-1:0]    dram_req_wdata,
  input  logic                 dram_req_ready,
  input  logic                 dram_rsp_valid,
  input  logic [LINE_W-1:0]    dram_rsp_data,
  // scrub service for the access scheduler
  input  logic                 sreq_valid,
  input  logic [PAGE_W-1:0]    sreq_page,
  output logic                 sreq_ready,
  output logic                 srsp_valid,
  output logic                 srsp_ack,
  output page_t                srsp_page,
  // pages to the access scheduler
  output logic                 pg_valid,
  output page_t                pg,
  output logic                 pg_spec,
  input  logic                 pg_ready,
  // checkpoint control
  input  logic                 epoch_flip,
  input  logic                 sreq_hold,
  input  logic                 walk_start,
  output logic                 walk_busy,
  output logic                 walk_done,
  input  logic                 pred_enable,
  input  logic [19:0]          walk_step,
  output logic                 epoch,
  output logic [31:0]          mod_count,
  output logic [31:0]          pre_count,
  output logic                 pt_overflow,
  // statistics
  output logic [31:0]          n_ckpt_pages,
  output logic [31:0]          n_spec_pages,
  output logic [31:0]          n_avatar_pages,
  output logic [31:0]          n_naks
);

  localparam int unsigned NB_W  = $clog2(PT_NODES);
  localparam int unsigned MA_W  = 1 + NB_W + PT_IDX_W;
  localparam int unsigned ENT_W = 1 + PA_W;          // valid + pointer/counter
  localparam int unsigned DEPTH = 2 * PT_NODES * PT_ENTRIES;
  localparam logic [PT_IDX_W-1:0] LAST = '1;

  // ------------------------------------------------------------- storage
  logic [ENT_W-1:0] pt_mem [DEPTH];
  logic [MA_W-1:0]  rd_addr;
  logic [ENT_W-1:0] rd_e;
  logic             we;
  logic [MA_W-1:0]  wa;
  logic [ENT_W-1:0] wd;
  assign rd_e = pt_mem[rd_addr];
  always_ff @(posedge clk) if (we) pt_mem[wa] <= wd;

  function automatic logic [MA_W-1:0] maddr(input logic t, input logic [NB_W-1:0] n,
                                            input logic [PT_IDX_W-1:0] i);
    return {t, n, i};
  endfunction
  function automatic logic [PT_IDX_W-1:0] lvidx(input logic [PAGE_W-1:0] p, input logic [1:0] l);
    return p[PAGE_W-1 - 10*l -: PT_IDX_W];
  endfunction

  // ------------------------------------------------------------- state
  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LK, S_INS, S_DWR, S_RD, S_RDW, S_OUT, S_WALK
  } state_e;
  typedef enum logic [1:0] {OP_SCRUB, OP_WRITE, OP_CKPT, OP_PRED} op_e;

  state_e            st;
  op_e               op;
  logic [MA_W-1:0]   init_a;
  logic [NB_W:0]     alloc_q [2];
  logic [31:0]       cnt_q [2];
  logic              flip_pend;

  // the operation's page and lookup cursor
  logic [PAGE_W-1:0] pg_q;
  logic [1:0]        lk_lv;
  logic [NB_W-1:0]   lk_node;
  logic              found_q;     // lookup found the page
  logic [MA_W-1:0]   leaf_a;      // address of the found leaf
  // write being serviced
  logic [PA_W-1:0]   w_addr;
  logic [LINE_W-1:0] w_data;
  logic              w_snap;
  // DRAM page read
  logic [1:0]        rb;
  page_t             buf_pg;
  logic [3:0]        pmask;       // blocks written in the epoch of the page being read
  logic [3:0]        w_blk;
  assign w_blk = 4'b0001 << w_addr[BLK_OFF_W +: 2];

  // walkers: 0 = checkpoint, 1 = predictor
  logic [1:0]                 wl_lv   [2];
  logic [3:0][PT_IDX_W-1:0]   wl_idx  [2];
  logic [3:0][NB_W-1:0]       wl_node [2];
  logic                       wl_asc  [2];
  logic                       ws;          // walker in use in S_WALK
  logic                       ck_active;
  logic                       walk_turn;   // the walk's turn against writes
  logic                       pred_go;
  logic [19:0]                pred_tmr;

  logic pre_t, cur_t, wt;
  assign cur_t = epoch;
  assign pre_t = !epoch;
  assign wt    = ws ? cur_t : pre_t;     // table the walker in use walks

  // ------------------------------------------------------------- predictor
  logic       chk_valid, chk_persist;
  logic [1:0] chk_priv_new;
  logic [2:0] chk_shared;
  logic       upd_valid;
  logic       leaf_hit;
  logic [PAGE_W-1:0] wl_page;

  assign wl_page  = {wl_idx[ws][0], wl_idx[ws][1], wl_idx[ws][2], wl_idx[ws][3]};
  assign leaf_hit = (st == S_WALK) && !wl_asc[ws] && wl_lv[ws] == 2'd3 && rd_e[ENT_W-1];
  assign chk_valid = leaf_hit && ws;
  assign upd_valid = (st == S_INS) && lk_lv == 2'd3;

  locality_predictor #(.SH_ENTRIES(SH_ENTRIES)) u_pred (
    .clk, .rst_n,
    .upd_valid, .upd_page(pg_q),
    .chk_valid, .chk_page(wl_page), .chk_priv(rd_e[1:0]),
    .chk_persist, .chk_priv_new, .chk_shared
  );

  // ------------------------------------------------------------- read address
  always_comb begin
    unique case (st)
      S_LK:    rd_addr = maddr(pre_t, lk_node, lvidx(pg_q, lk_lv));
      S_INS:   rd_addr = maddr(w_snap, lk_node, lvidx(pg_q, lk_lv));
      S_WALK:  rd_addr = maddr(wt, wl_node[ws][wl_lv[ws]], wl_idx[ws][wl_lv[ws]]);
      default: rd_addr = '0;
    endcase
  end

  // ------------------------------------------------------------- outputs
  assign init_done  = (st != S_INIT);
  assign mod_count  = cnt_q[cur_t];
  assign pre_count  = cnt_q[pre_t];
  assign walk_busy  = ck_active;
  assign wr_ready   = (st == S_IDLE) && !flip_pend && !(sreq_valid && !sreq_hold);
  assign sreq_ready = (st == S_IDLE) && !flip_pend && !sreq_hold;

  always_comb begin
    dram_req_valid = 1'b0;
    dram_req_we    = 1'b0;
    dram_req_addr  = {pg_q, rb, BLK_OFF_W'(0)};
    dram_req_wdata = w_data;
    if (st == S_RD) dram_req_valid = 1'b1;
    if (st == S_DWR) begin
      dram_req_valid = 1'b1;
      dram_req_we    = 1'b1;
      dram_req_addr  = w_addr;
    end
  end

  assign srsp_page = buf_pg;
  assign pg        = buf_pg;
  assign pg_spec   = (op == OP_PRED);
  assign pg_valid  = (st == S_OUT) && op != OP_SCRUB;
  assign srsp_valid = (st == S_OUT) && op == OP_SCRUB;
  assign srsp_ack   = found_q;

  // ------------------------------------------------------------- FSM
  always_comb begin
    we = 1'b0;
    wa = '0;
    wd = '0;
    unique case (st)
      S_INIT: begin
        we = 1'b1; wa = init_a; wd = '0;
      end
      S_LK: if (lk_lv == 2'd3 && rd_e[ENT_W-1]) begin
        we = 1'b1; wa = rd_addr; wd = '0;          // take it out of the table
      end
      S_INS: begin
        if (lk_lv == 2'd3) begin
          we = 1'b1; wa = rd_addr;
          wd = {1'b1, (PA_W-6)'(0), (rd_e[ENT_W-1] ? rd_e[5:2] : 4'b0) | w_blk, 2'b11};
        end else if (!rd_e[ENT_W-1] && alloc_q[w_snap] != (NB_W+1)'(PT_NODES)) begin
          we = 1'b1; wa = rd_addr; wd = {1'b1, PA_W'(alloc_q[w_snap])};
        end
      end
      S_WALK: begin
        if (wl_asc[ws] && !ws) begin
          we = 1'b1; wa = rd_addr; wd = '0;        // a finished entry of the walk
        end else if (leaf_hit && (!ws || chk_persist)) begin
          we = 1'b1; wa = rd_addr; wd = '0;
        end else if (leaf_hit) begin
          we = 1'b1; wa = rd_addr; wd = {1'b1, (PA_W-6)'(0), rd_e[5:2], chk_priv_new};
        end
      end
      default: ;
    endcase
  end

  // advance a walker by one entry at its level (used after a leaf or an
  // invalid entry, and after a finished child)
  task automatic adv(input logic w);
    if (wl_idx[w][wl_lv[w]] == LAST) begin
      if (wl_lv[w] == 2'd0) begin
        // walked the whole tree
        wl_idx[w] <= '0;
        wl_asc[w] <= 1'b0;
        if (!w) begin
          ck_active      <= 1'b0;
          walk_done      <= 1'b1;
          alloc_q[pre_t] <= (NB_W+1)'(1);
        end else begin
          pred_go <= 1'b0;
        end
      end else begin
        wl_lv[w]  <= wl_lv[w] - 2'd1;
        wl_asc[w] <= 1'b1;
      end
    end else begin
      wl_idx[w][wl_lv[w]] <= wl_idx[w][wl_lv[w]] + 1'b1;
      wl_asc[w] <= 1'b0;
    end
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_INIT;
      op          <= OP_SCRUB;
      init_a      <= '0;
      alloc_q[0]  <= (NB_W+1)'(1);
      alloc_q[1]  <= (NB_W+1)'(1);
      cnt_q[0]    <= '0;
      cnt_q[1]    <= '0;
      flip_pend   <= 1'b0;
      epoch       <= 1'b0;
      pg_q        <= '0;
      lk_lv       <= '0;
      lk_node     <= '0;
      found_q     <= 1'b0;
      leaf_a      <= '0;
      w_addr      <= '0;
      w_data      <= '0;
      w_snap      <= 1'b0;
      rb          <= '0;
      buf_pg      <= '0;
      pmask       <= '0;
      for (int w = 0; w < 2; w++) begin
        wl_lv[w]   <= '0;
        wl_idx[w]  <= '0;
        wl_node[w] <= '0;
        wl_asc[w]  <= 1'b0;
      end
      ws          <= 1'b0;
      ck_active   <= 1'b0;
      walk_turn   <= 1'b0;
      walk_done   <= 1'b0;
      pred_go     <= 1'b0;
      pred_tmr    <= '0;
      pt_overflow <= 1'b0;
      n_ckpt_pages   <= '0;
      n_spec_pages   <= '0;
      n_avatar_pages <= '0;
      n_naks         <= '0;
    end else begin
      walk_done <= 1'b0;
      if (epoch_flip) flip_pend <= 1'b1;
      if (walk_start) begin
        ck_active  <= 1'b1;
        wl_lv[0]   <= '0;
        wl_idx[0]  <= '0;
        wl_node[0] <= '0;
        wl_asc[0]  <= 1'b0;
      end
      // activation timer of the predictor walk
      if (pred_tmr == '0) begin
        pred_tmr <= walk_step;
        if (pred_enable && init_done) pred_go <= 1'b1;
      end else begin
        pred_tmr <= pred_tmr - 1'b1;
      end

      unique case (st)
        S_INIT: begin
          init_a <= init_a + 1'b1;
          if (init_a == MA_W'(DEPTH - 1)) st <= S_IDLE;
        end

        S_IDLE: begin
          if (flip_pend) begin
            flip_pend <= 1'b0;
            epoch     <= !epoch;
            // the predictor starts over on the new current table
            wl_lv[1]   <= '0;
            wl_idx[1]  <= '0;
            wl_node[1] <= '0;
            wl_asc[1]  <= 1'b0;
          end else if (sreq_valid && !sreq_hold) begin
            op      <= OP_SCRUB;
            pg_q    <= sreq_page;
            lk_lv   <= '0;
            lk_node <= '0;
            found_q <= 1'b0;
            st      <= S_LK;
          end else if (wr_valid && !(ck_active && walk_turn)) begin
            walk_turn <= 1'b1;
            op      <= OP_WRITE;
            pg_q    <= wr_addr[PA_W-1:PAGE_OFF_W];
            w_addr  <= wr_addr;
            w_data  <= wr_data;
            w_snap  <= wr_snap;
            lk_lv   <= '0;
            lk_node <= '0;
            found_q <= 1'b0;
            // a post-snapshot write first looks for the page's older version
            st      <= (wr_snap == epoch && cnt_q[!epoch] != '0) ? S_LK : S_INS;
          end else if (ck_active) begin
            walk_turn <= 1'b0;
            op <= OP_CKPT;
            ws <= 1'b0;
            st <= S_WALK;
          end else if (pred_go) begin
            op <= OP_PRED;
            ws <= 1'b1;
            st <= S_WALK;
          end
        end

        S_LK: begin
          if (!rd_e[ENT_W-1]) begin
            // not in the pre-snapshot table
            if (op == OP_SCRUB) begin
              n_naks <= n_naks + 1'b1;
              st     <= S_OUT;
            end else begin
              lk_lv   <= '0;
              lk_node <= '0;
              st      <= S_INS;
            end
          end else if (lk_lv == 2'd3) begin
            found_q      <= 1'b1;
            leaf_a       <= rd_addr;
            pmask        <= rd_e[5:2];
            cnt_q[pre_t] <= cnt_q[pre_t] - 1'b1;
            if (op == OP_WRITE) n_avatar_pages <= n_avatar_pages + 1'b1;
            else                n_ckpt_pages   <= n_ckpt_pages + 1'b1;
            rb  <= '0;
            st  <= S_RD;
          end else begin
            lk_node <= NB_W'(rd_e[PA_W-1:0]);
            lk_lv   <= lk_lv + 2'd1;
          end
        end

        S_INS: begin
          if (lk_lv == 2'd3) begin
            if (!rd_e[ENT_W-1]) cnt_q[w_snap] <= cnt_q[w_snap] + 1'b1;
            st <= S_DWR;
          end else if (rd_e[ENT_W-1]) begin
            lk_node <= NB_W'(rd_e[PA_W-1:0]);
            lk_lv   <= lk_lv + 2'd1;
          end else if (alloc_q[w_snap] != (NB_W+1)'(PT_NODES)) begin
            lk_node         <= NB_W'(alloc_q[w_snap]);
            alloc_q[w_snap] <= alloc_q[w_snap] + 1'b1;
            lk_lv           <= lk_lv + 2'd1;
          end else begin
            // no node left: the page cannot be tracked
            pt_overflow <= 1'b1;
            st          <= S_DWR;
          end
        end

        S_DWR: if (dram_req_ready) st <= S_IDLE;

        S_WALK: begin
          st <= S_IDLE;        // one entry per visit, then re-arbitrate
          if (wl_asc[ws]) begin
            adv(ws);
          end else if (wl_lv[ws] != 2'd3) begin
            if (rd_e[ENT_W-1]) begin
              wl_node[ws][wl_lv[ws] + 2'd1] <= NB_W'(rd_e[PA_W-1:0]);
              wl_idx[ws][wl_lv[ws] + 2'd1]  <= '0;
              wl_lv[ws]                     <= wl_lv[ws] + 2'd1;
            end else begin
              adv(ws);
            end
          end else begin
            adv(ws);
            if (leaf_hit) begin
              pg_q  <= wl_page;
              pmask <= rd_e[5:2];
              if (!ws) begin
                cnt_q[pre_t] <= cnt_q[pre_t] - 1'b1;
                n_ckpt_pages <= n_ckpt_pages + 1'b1;
                rb <= '0;
                st <= S_RD;
              end else begin
                pred_go <= 1'b0;               // one page per activation
                if (chk_persist) begin
                  cnt_q[cur_t] <= cnt_q[cur_t] - 1'b1;
                  n_spec_pages <= n_spec_pages + 1'b1;
                  rb <= '0;
                  st <= S_RD;
                end
              end
            end
          end
        end

        S_RD: if (dram_req_ready) st <= S_RDW;

        S_RDW: if (dram_rsp_valid) begin
          buf_pg.page     <= pg_q;
          buf_pg.mask     <= pmask;
          buf_pg.data[rb] <= dram_rsp_data;
          rb <= rb + 2'd1;
          st <= (rb == 2'd3) ? S_OUT : S_RD;
        end

        S_OUT: begin
          if (op == OP_SCRUB) st <= S_IDLE;
          else if (pg_ready) begin
            if (op == OP_WRITE) begin
              lk_lv   <= '0;
              lk_node <= '0;
              st      <= S_INS;
            end else begin
              st <= S_IDLE;
            end
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
