// jass_top: the JASS chip - eight core tiles with private L2 caches, eight
// last-level-cache banks, a directory node, the DRAM controller, the NVM
// controller with its access scheduler and the checkpoint controller, all on
// one torus NoC (paper Fig. 3 and its setup table).
//
// Node map of the 5 x 4 torus (this design's choice): 0-7 core tiles,
// 8-15 LLC banks, 16 directory, 17 DRAM controller, 18 NVM controller,
// 19 checkpoint controller.
//
// Data flow.  A core (outside this design) sends requests to its L2 on
// core_req_*; the tile stamps them with its epoch colour.  The L2 sends
// write-backs over the NoC to the LLC bank chosen by block-address bits [8:6]
// (static interleaving, SNUCA).  An LLC bank sends a current-epoch write-back
// to the DRAM controller (it enters that epoch's DRAM page table) and a
// pre-snapshot one to the NVM controller (it is part of the checkpoint).
// Any element marks a pre-snapshot flit it injects after it has seen the
// token, so that the routers' counts cover it.  The DRAM controller hands
// whole pages to the access scheduler and answers its scrub requests over
// point-to-point wires; the access scheduler writes pages to the NVM on
// nvm_*.
//
// Checkpoint.  The checkpoint controller injects the token at node 19; every
// router passes it on and hands it to its tile element, which flips its epoch
// colour (the core tile also reports it on core_snap so that the core can
// save its registers).  The controller then runs flush, L2 scrub, LLC scrub,
// DRAM walk and NVM drain, and reports the latency on last_cl.
//
// Outside this design, on ports: the cores, the coherence directory
// (dir_*), the DRAM devices (dram_*) and the NVM devices (nvm_*).
// Core requests and the directory carry the coherence traffic that the paper
// assumes but does not describe; there are no fills from memory.
// Known limitation: the DRAM controller's sreq_hold is tied low.  Holding
// scrub requests during the flush closes a race (a pre-snapshot DRAM write
// still in the NoC while the access scheduler scrubs its page, so that an
// older block can reach the NVM after a newer one), but with a small access
// scheduler it stalls the flush; under heavy traffic a few blocks of a
// checkpoint can therefore be stale.
module jass_top
  import jass_pkg::*;
#(
  parameter int unsigned NCORE    = 8,
  parameter int unsigned NLLC     = 8,
  parameter int unsigned L2_SETS  = 512,    // 256 KB, 8-way, 64 B
  parameter int unsigned LLC_SETS = 4096,   // 2 MB bank, 8-way, 64 B
  parameter int unsigned WAYS     = 8,
  parameter int unsigned PT_NODES = 64,
  parameter int unsigned AS_PAGES = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // cores
  input  logic  [NCORE-1:0]             core_req_valid,
  input  creq_t [NCORE-1:0]             core_req,
  output logic  [NCORE-1:0]             core_req_ready,
  output logic  [NCORE-1:0]             core_rsp_valid,
  output logic  [NCORE-1:0]             core_rsp_hit,
  output logic  [NCORE-1:0][LINE_W-1:0] core_rsp_data,
  output logic  [NCORE-1:0]             core_epoch,
  output logic  [NCORE-1:0]             core_snap,
  // directory
  output flit_t                         dir_ej_flit,
  output logic                          dir_ej_valid,
  input  logic                          dir_ej_ready,
  input  flit_t                         dir_inj_flit,
  input  logic                          dir_inj_valid,
  output logic                          dir_inj_ready,
  input  logic                          dir_done_valid,
  input  logic [3:0]                    dir_done_n,
  output logic                          dir_snap,
  // DRAM devices
  output logic                          dram_req_valid,
  output logic                          dram_req_we,
  output logic [PA_W-1:0]               dram_req_addr,
  output logic [LINE_W-1:0]             dram_req_wdata,
  input  logic                          dram_req_ready,
  input  logic                          dram_rsp_valid,
  input  logic [LINE_W-1:0]             dram_rsp_data,
  // NVM devices
  output logic                          nvm_valid,
  output page_t                         nvm_page,
  output logic                          nvm_spec,
  input  logic                          nvm_ready,
  // checkpoint configuration and requests
  input  logic                          periodic_en,
  input  logic [31:0]                   es_cycles,
  input  logic [31:0]                   cl_cycles,
  input  logic [15:0]                   k_cycles,
  input  logic [19:0]                   scrub_step,
  input  logic [7:0]                    scrub_gran,
  input  logic [19:0]                   walk_step_init,
  input  logic                          ext_req,
  // status
  output logic                          ready,
  output logic                          ckpt_busy,
  output logic                          ckpt_done,
  output logic [31:0]                   last_cl,
  output logic [31:0]                   last_flush,
  output logic [31:0]                   n_ckpts,
  output logic [31:0]                   n_tunes,
  output logic [19:0]                   walk_step,
  output logic [31:0]                   mod_count,
  output logic [31:0]                   n_ckpt_pages,
  output logic [31:0]                   n_spec_pages,
  output logic [31:0]                   n_avatar_pages,
  output logic [31:0]                   n_naks,
  output logic                          pt_overflow
);

  localparam int unsigned XDIM   = 5;
  localparam int unsigned YDIM   = 4;
  localparam int unsigned NN     = XDIM * YDIM;
  localparam int unsigned N_LLC0 = 8;
  localparam int unsigned N_DIR  = 16;
  localparam int unsigned N_DRAM = 17;
  localparam int unsigned N_NVM  = 18;
  localparam int unsigned N_CKPT = 19;

  // ------------------------------------------------------------------ NoC
  flit_t [NN-1:0]            inj_flit, ej_flit;
  logic  [NN-1:0]            inj_valid, inj_ready, ej_valid, ej_ready;
  logic  [NN-1:0]            tile_tok_in, tile_tok_out;
  tune_t [NN-1:0]            tile_tune_in, tile_tune_out;
  logic                      flush_clear;
  logic  [NN-1:0]            tr, settled;
  logic  [NN-1:0][CNT_W-1:0] xcount, pcount;

  noc_torus #(.XDIM(XDIM), .YDIM(YDIM), .DIR_NODE(N_DIR)) u_noc (
    .clk, .rst_n,
    .inj_flit, .inj_valid, .inj_ready, .ej_flit, .ej_valid, .ej_ready,
    .tile_tok_in, .tile_tune_in, .tile_tok_out, .tile_tune_out,
    .dir_done_valid, .dir_done_n,
    .flush_clear, .tr, .settled, .xcount, .pcount
  );

  // ------------------------------------------------------------------ checkpoint controller
  logic              ck_tok;
  tune_t             ck_tune;
  logic              l2_scrub_start, llc_scrub_start, walk_start, walk_busy, drain, as_empty;
  logic [NCORE-1:0]  l2_scrub_busy;
  logic [NLLC-1:0]   llc_scrub_busy;

  ckpt_ctrl #(.NNODES(NN), .NL2(NCORE), .NLLC(NLLC)) u_ckpt (
    .clk, .rst_n,
    .periodic_en, .es_cycles, .cl_cycles, .k_cycles, .scrub_step, .scrub_gran,
    .walk_step_init, .ext_req,
    .tok_out(ck_tok), .tune_out(ck_tune),
    .tr, .settled, .xcount, .pcount, .flush_clear,
    .l2_scrub_start, .l2_scrub_busy, .llc_scrub_start, .llc_scrub_busy,
    .walk_start, .walk_busy, .mod_count, .walk_step,
    .drain, .as_empty,
    .busy(ckpt_busy), .in_flush(), .ckpt_done, .last_cl, .last_flush, .n_pages(), .n_ckpts, .n_tunes
  );

  // token injection: only the checkpoint controller starts one
  always_comb begin
    tile_tok_in  = '0;
    tile_tune_in = '0;
    tile_tok_in[N_CKPT]  = ck_tok;
    tile_tune_in[N_CKPT] = ck_tune;
  end

  // ------------------------------------------------------------------ core tiles
  for (genvar c = 0; c < NCORE; c++) begin : g_core
    logic  epoch_q;
    tune_t tune_q;
    creq_t l2_req;
    logic  dn_valid;
    creq_t dn;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        epoch_q <= 1'b0;
        tune_q  <= '0;
      end else if (tile_tok_out[c]) begin
        epoch_q <= !epoch_q;
        tune_q  <= tile_tune_out[c];
      end
    end
    assign core_epoch[c] = epoch_q;
    assign core_snap[c]  = tile_tok_out[c];

    always_comb begin
      l2_req      = core_req[c];
      l2_req.snap = epoch_q;
    end

    snap_cache #(.SETS(L2_SETS), .WAYS(WAYS)) u_l2 (
      .clk, .rst_n, .epoch(epoch_q),
      .req_valid(core_req_valid[c]), .req(l2_req), .req_ready(core_req_ready[c]),
      .rsp_valid(core_rsp_valid[c]), .rsp_hit(core_rsp_hit[c]), .rsp_data(core_rsp_data[c]),
      .down_valid(dn_valid), .down(dn), .down_ready(inj_ready[c]),
      .scrub_start(l2_scrub_start), .scrub_step(tune_q.scrub_step),
      .scrub_gran(tune_q.scrub_gran), .scrub_busy(l2_scrub_busy[c]), .scrub_done()
    );

    assign inj_valid[c] = dn_valid;
    assign inj_flit[c]  = '{mtype: dn.mtype, snap: dn.snap, mark: (dn.snap != epoch_q),
                            dst: NODE_W'(N_LLC0 + int'(dn.addr[BLK_OFF_W +: 3])),
                            src: NODE_W'(c), addr: dn.addr, data: dn.data};
    assign ej_ready[c]  = 1'b1;     // nothing is addressed to a core tile here
  end

  // ------------------------------------------------------------------ LLC banks
  for (genvar b = 0; b < NLLC; b++) begin : g_llc
    localparam int unsigned NODE = N_LLC0 + b;
    logic  epoch_q;
    tune_t tune_q;
    creq_t rq;
    logic  dn_valid;
    creq_t dn;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        epoch_q <= 1'b0;
        tune_q  <= '0;
      end else if (tile_tok_out[NODE]) begin
        epoch_q <= !epoch_q;
        tune_q  <= tile_tune_out[NODE];
      end
    end

    assign rq = '{mtype: ej_flit[NODE].mtype, snap: ej_flit[NODE].snap,
                  addr: ej_flit[NODE].addr, data: ej_flit[NODE].data};

    snap_cache #(.SETS(LLC_SETS), .WAYS(WAYS), .IDX_SHIFT(3)) u_llc (
      .clk, .rst_n, .epoch(epoch_q),
      .req_valid(ej_valid[NODE]), .req(rq), .req_ready(ej_ready[NODE]),
      .rsp_valid(), .rsp_hit(), .rsp_data(),
      .down_valid(dn_valid), .down(dn), .down_ready(inj_ready[NODE]),
      .scrub_start(llc_scrub_start), .scrub_step(tune_q.scrub_step),
      .scrub_gran(tune_q.scrub_gran), .scrub_busy(llc_scrub_busy[b]), .scrub_done()
    );

    assign inj_valid[NODE] = dn_valid;
    assign inj_flit[NODE]  = '{mtype: M_WB, snap: dn.snap, mark: (dn.snap != epoch_q),
                               dst: (dn.snap == epoch_q) ? NODE_W'(N_DRAM) : NODE_W'(N_NVM),
                               src: NODE_W'(NODE), addr: dn.addr, data: dn.data};
  end

  // ------------------------------------------------------------------ directory
  assign dir_ej_flit         = ej_flit[N_DIR];
  assign dir_ej_valid        = ej_valid[N_DIR];
  assign ej_ready[N_DIR]     = dir_ej_ready;
  assign inj_flit[N_DIR]     = dir_inj_flit;
  assign inj_valid[N_DIR]    = dir_inj_valid;
  assign dir_inj_ready       = inj_ready[N_DIR];
  assign dir_snap            = tile_tok_out[N_DIR];

  // ------------------------------------------------------------------ DRAM controller
  logic              sreq_valid, sreq_ready, srsp_valid, srsp_ack;
  logic [PAGE_W-1:0] sreq_page;
  page_t             srsp_page, dpg;
  logic              dpg_valid, dpg_spec, dpg_ready;

  dram_ctrl #(.PT_NODES(PT_NODES)) u_dram (
    .clk, .rst_n, .init_done(ready),
    .wr_valid(ej_valid[N_DRAM]), .wr_addr(ej_flit[N_DRAM].addr),
    .wr_data(ej_flit[N_DRAM].data), .wr_snap(ej_flit[N_DRAM].snap), .wr_ready(ej_ready[N_DRAM]),
    .dram_req_valid, .dram_req_we, .dram_req_addr, .dram_req_wdata, .dram_req_ready,
    .dram_rsp_valid, .dram_rsp_data,
    .sreq_valid, .sreq_page, .sreq_ready, .srsp_valid, .srsp_ack, .srsp_page,
    .pg_valid(dpg_valid), .pg(dpg), .pg_spec(dpg_spec), .pg_ready(dpg_ready),
    .epoch_flip(tile_tok_out[N_DRAM]), .sreq_hold(1'b0), .walk_start, .walk_busy, .walk_done(),
    .pred_enable(1'b1), .walk_step, .epoch(), .mod_count, .pre_count(), .pt_overflow,
    .n_ckpt_pages, .n_spec_pages, .n_avatar_pages, .n_naks
  );

  // ------------------------------------------------------------------ NVM controller
  access_scheduler #(.ENTRIES(AS_PAGES)) u_as (
    .clk, .rst_n,
    .blk_valid(ej_valid[N_NVM]), .blk_addr(ej_flit[N_NVM].addr),
    .blk_data(ej_flit[N_NVM].data), .blk_ready(ej_ready[N_NVM]),
    .page_valid(dpg_valid), .page_in(dpg), .page_spec(dpg_spec), .page_ready(dpg_ready),
    .scrub_req_valid(sreq_valid), .scrub_req_page(sreq_page), .scrub_req_ready(sreq_ready),
    .scrub_rsp_valid(srsp_valid), .scrub_rsp_ack(srsp_ack), .scrub_rsp_page(srsp_page),
    .nvm_valid, .nvm_page, .nvm_spec, .nvm_ready,
    .drain, .empty(as_empty)
  );

  // ------------------------------------------------------------------ idle injection ports
  for (genvar n = N_DRAM; n < NN; n++) begin : g_noinj
    assign inj_valid[n] = 1'b0;
    assign inj_flit[n]  = '0;
  end
  assign ej_ready[N_CKPT] = 1'b1;

endmodule
