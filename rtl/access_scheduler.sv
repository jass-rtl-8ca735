// access_scheduler: the write-coalescing buffer in front of the NVM.
//
// It holds ENTRIES pages (16 in the paper), each with its four 64-byte
// blocks (64 cache lines in all), and merges every write to the same page so
// that the NVM sees one write per page instead of one per block: this is how
// JASS keeps the write amplification down (paper Sec. 4.5, Fig. 6).
//
// Inputs:
//  * blk_*   a pre-snapshot cache block (scrubbed from the caches).  The
//            first block of a page allocates an entry and sends a scrub
//            request for that page to the DRAM scrubber (Sec. 4.6.5).  The
//            answer comes on scrub_rsp_*: with the page's DRAM copy (ack),
//            whose blocks fill only the places no cache block has filled
//            (the cache copy is newer), or a nak (page not in the
//            pre-snapshot DRAM table).  Until the answer the entry is pending
//            and is not written out.  One scrub request is outstanding at a
//            time.
//  * page_*  a whole page from the DRAM controller (checkpoint walk,
//            "persist the earlier avatar first", or a speculative persist of
//            the running epoch when page_spec = 1).  Speculative pages are
//            kept apart from checkpoint pages of the same address, since
//            they belong to another epoch.
// Output nvm_*: one page write (page number, block mask, data).  Entries are
// written out when the buffer is full and something must be allocated
// (round-robin choice of a non-pending entry) or, all of them, while `drain`
// is held.  `empty` says no entry is held.
// One input action per cycle; a scrub answer has priority, then a DRAM page,
// then a cache block; a block may not take the last free entry.  The spec bit, the eviction choice and the
// one-outstanding-request rule are this design's choices; the paper gives the
// size and the coalescing function only.
module access_scheduler
  import jass_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // cache blocks
  input  logic                 blk_valid,
  input  logic [PA_W-1:0]      blk_addr,
  input  logic [LINE_W-1:0]    blk_data,
  output logic                 blk_ready,
  // pages from the DRAM controller
  input  logic                 page_valid,
  input  page_t                page_in,
  input  logic                 page_spec,
  output logic                 page_ready,
  // scrub requests to the DRAM scrubber
  output logic                 scrub_req_valid,
  output logic [PAGE_W-1:0]    scrub_req_page,
  input  logic                 scrub_req_ready,
  input  logic                 scrub_rsp_valid,
  input  logic                 scrub_rsp_ack,
  input  page_t                scrub_rsp_page,
  // NVM writes
  output logic                 nvm_valid,
  output page_t                nvm_page,
  output logic                 nvm_spec,
  input  logic                 nvm_ready,
  // control
  input  logic                 drain,
  output logic                 empty
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0]      e_valid, e_pend, e_sent, e_spec;
  page_t                   e_pg [ENTRIES];
  logic                    outstanding;
  logic [IDX_W-1:0]        out_idx;   // entry waiting for the scrub answer
  logic [IDX_W-1:0]        ev_ptr;

  // ---------------------------------------------------------- matching
  logic [PAGE_W-1:0] b_page;
  assign b_page = blk_addr[PA_W-1:PAGE_OFF_W];

  logic             b_hit, p_hit, have_free;
  logic [IDX_W-1:0] b_idx, p_idx, free_idx;
  logic [IDX_W:0]   n_free;
  always_comb begin
    b_hit = 1'b0; b_idx = '0;
    p_hit = 1'b0; p_idx = '0;
    have_free = 1'b0; free_idx = '0;
    n_free = '0;
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (e_valid[i] && !e_spec[i] && e_pg[i].page == b_page) begin
        b_hit = 1'b1; b_idx = IDX_W'(i);
      end
      if (e_valid[i] && e_spec[i] == page_spec && e_pg[i].page == page_in.page) begin
        p_hit = 1'b1; p_idx = IDX_W'(i);
      end
      if (!e_valid[i]) begin
        have_free = 1'b1; free_idx = IDX_W'(i);
        n_free = n_free + 1'b1;
      end
    end
  end

  // The last free entry is kept for DRAM pages: a cache block may only take
  // a new entry while two are free.  Otherwise the buffer could fill with
  // entries waiting for scrub answers while the DRAM controller waits to
  // hand over a page, and neither could move.  DRAM pages go first.
  assign page_ready = !scrub_rsp_valid && (p_hit || have_free);
  assign blk_ready  = !scrub_rsp_valid && !page_valid && (b_hit || n_free >= 2);

  // ---------------------------------------------------------- scrub requests
  logic             sr_have;
  logic [IDX_W-1:0] sr_idx;
  always_comb begin
    sr_have = 1'b0; sr_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--)
      if (e_valid[i] && e_pend[i] && !e_sent[i]) begin
        sr_have = 1'b1; sr_idx = IDX_W'(i);
      end
  end
  assign scrub_req_valid = sr_have && !outstanding;
  assign scrub_req_page  = e_pg[sr_idx].page;

  // ---------------------------------------------------------- write-out
  logic             wo_have;
  logic [IDX_W-1:0] wo_idx;
  always_comb begin
    wo_have = 1'b0; wo_idx = '0;
    for (int k = ENTRIES-1; k >= 0; k--) begin
      int unsigned i;
      i = (int'(ev_ptr) + k) % ENTRIES;
      if (e_valid[i] && !e_pend[i]) begin
        wo_have = 1'b1; wo_idx = IDX_W'(i);
      end
    end
  end
  // outside a drain, an entry leaves only when a block or page needs room
  logic need_alloc;
  assign need_alloc = (blk_valid && !b_hit && n_free < 2) || (page_valid && !p_hit && !have_free);
  assign nvm_valid = wo_have && (drain || need_alloc);
  assign nvm_page  = e_pg[wo_idx];
  assign nvm_spec  = e_spec[wo_idx];
  logic wo_fire;
  assign wo_fire = nvm_valid && nvm_ready;
  assign empty   = (e_valid == '0);

  // ---------------------------------------------------------- state
  logic b_acc, p_acc;
  assign b_acc = blk_valid && blk_ready;
  assign p_acc = page_valid && page_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid     <= '0;
      e_pend      <= '0;
      e_sent      <= '0;
      e_spec      <= '0;
      outstanding <= 1'b0;
      out_idx     <= '0;
      ev_ptr      <= '0;
      for (int i = 0; i < ENTRIES; i++) e_pg[i] <= '0;
    end else begin
      if (scrub_req_valid && scrub_req_ready) begin
        e_sent[sr_idx] <= 1'b1;
        outstanding    <= 1'b1;
        out_idx        <= sr_idx;
      end
      if (wo_fire) begin
        e_valid[wo_idx] <= 1'b0;
        ev_ptr          <= wo_idx + 1'b1;
      end
      if (scrub_rsp_valid && outstanding) begin
        outstanding     <= 1'b0;
        e_pend[out_idx] <= 1'b0;
        if (scrub_rsp_ack)
          for (int b = 0; b < BLKS_PER_PAGE; b++)
            if (!e_pg[out_idx].mask[b] && scrub_rsp_page.mask[b]) begin
              e_pg[out_idx].data[b] <= scrub_rsp_page.data[b];
              e_pg[out_idx].mask[b] <= 1'b1;
            end
      end else if (p_acc) begin
        automatic logic [IDX_W-1:0] i = p_hit ? p_idx : free_idx;
        if (!p_hit) begin
          e_valid[i] <= 1'b1;
          e_pend[i]  <= 1'b0;
          e_sent[i]  <= 1'b0;
          e_spec[i]  <= page_spec;
          e_pg[i]    <= page_in;
        end else begin
          // blocks already held came from the caches and are newer
          for (int b = 0; b < BLKS_PER_PAGE; b++)
            if (page_in.mask[b] && !e_pg[i].mask[b]) begin
              e_pg[i].data[b] <= page_in.data[b];
              e_pg[i].mask[b] <= 1'b1;
            end
        end
      end else if (b_acc) begin
        automatic logic [IDX_W-1:0] i = b_hit ? b_idx : free_idx;
        automatic logic [1:0] bi = blk_addr[BLK_OFF_W +: 2];
        if (!b_hit) begin
          e_valid[i]     <= 1'b1;
          e_pend[i]      <= 1'b1;
          e_sent[i]      <= 1'b0;
          e_spec[i]      <= 1'b0;
          e_pg[i].page   <= b_page;
          e_pg[i].mask   <= '0;
          e_pg[i].mask[bi] <= 1'b1;
        end else begin
          e_pg[i].mask[bi] <= 1'b1;
        end
        e_pg[i].data[bi] <= blk_data;
      end
    end
  end

  // A scrub answer only comes for the one outstanding request.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    scrub_rsp_valid |-> outstanding)
    else $error("scrub answer without a request");

endmodule
