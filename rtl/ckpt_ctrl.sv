// ckpt_ctrl: the JASS checkpoint controller.
//
// It starts checkpoints, detects the end of each phase and tunes the DRAM
// walker (paper Sec. 3.2-3.3, 4, 4.6.2-4.6.3, 4.7).
//
// Start: a checkpoint begins on ext_req (an event of interest, a system call
// or a message from a remote node) or, if periodic_en, every es_cycles cycles
// (the epoch size ES).  The controller then sends the snapshot token into its
// router (tok_out), with the tunables: scrubbing-step, scrubbing-granularity
// and the current memory-walk step.
// Phases (one state each):
//  FLUSH   wait until every router has taken the token and closed its
//          missed-message windows and the sum of pcount equals the sum of
//          xcount: no pre-snapshot message is left in the NoC.
//  L2      tell all private L2 caches to scrub, start the DRAM walk; wait
//          until the L2 scrubbers are done and their lines have arrived
//          (sums equal again).
//  LLC     then tell the LLC banks to scrub (scrubbing is serialised so that
//          no pre-snapshot line reaches a level that has already been
//          scrubbed); wait for the scrubbers, the sums and the DRAM walk.
//  DRAIN   hold `drain` until the NVM access scheduler is empty.
//  DONE    clear the routers' flush state; last_cl is the checkpoint latency
//          in cycles, from the start to here.
// Tuning: n = cl_cycles / k_cycles is the most modified pages the DRAM may
// hold (Eq. 1: c = l f cycles, k cycles per page).  The epoch is cut into 50
// sub-epochs (es_cycles / 50 each); at the start of each, with m the
// modified-page count, delta = (n - m) / n (0 when m >= n) and the
// activation interval of the predictor walk is
//     walk_step = R_MIN + delta * (R_MAX - R_MIN),   R_MIN = 512, R_MAX = 256K,
// so the predictor persists pages more often as the modified set nears n.
// The divisions use one sequential divider.  The side-band sums (instead of
// count messages over the NoC), reusing the count test to end the scrub
// phases, and the direction of the linear map are this design's choices.
module ckpt_ctrl
  import jass_pkg::*;
#(
  parameter int unsigned NNODES     = 20,
  parameter int unsigned NL2        = 8,
  parameter int unsigned NLLC       = 8,
  parameter int unsigned SUBEPOCHS  = 50,
  parameter int unsigned R_MIN      = 512,
  parameter int unsigned R_MAX      = 262144
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration (set by a privileged instruction)
  input  logic                          periodic_en,
  input  logic [31:0]                   es_cycles,
  input  logic [31:0]                   cl_cycles,
  input  logic [15:0]                   k_cycles,
  input  logic [19:0]                   scrub_step,
  input  logic [7:0]                    scrub_gran,
  input  logic [19:0]                   walk_step_init,
  input  logic                          ext_req,
  // token
  output logic                          tok_out,
  output tune_t                         tune_out,
  // NoC flush state
  input  logic [NNODES-1:0]             tr,
  input  logic [NNODES-1:0]             settled,
  input  logic [NNODES-1:0][CNT_W-1:0]  xcount,
  input  logic [NNODES-1:0][CNT_W-1:0]  pcount,
  output logic                          flush_clear,
  // scrubbers
  output logic                          l2_scrub_start,
  input  logic [NL2-1:0]                l2_scrub_busy,
  output logic                          llc_scrub_start,
  input  logic [NLLC-1:0]               llc_scrub_busy,
  // DRAM controller
  output logic                          walk_start,
  input  logic                          walk_busy,
  input  logic [31:0]                   mod_count,
  output logic [19:0]                   walk_step,
  // NVM access scheduler
  output logic                          drain,
  input  logic                          as_empty,
  // status
  output logic                          busy,
  output logic                          in_flush,
  output logic                          ckpt_done,
  output logic [31:0]                   last_cl,
  output logic [31:0]                   last_flush,
  output logic [31:0]                   n_pages,
  output logic [31:0]                   n_ckpts,
  output logic [31:0]                   n_tunes
);

  typedef enum logic [2:0] {C_IDLE, C_FLUSH, C_L2W, C_L2, C_LLCW, C_LLC, C_DRAIN, C_DONE} cst_e;
  cst_e        st;
  logic [31:0] es_cnt, cl_cnt;

  // -------------------------------------------------------------- sums
  logic [CNT_W+4:0] sum_x, sum_p;
  always_comb begin
    sum_x = '0;
    sum_p = '0;
    for (int i = 0; i < NNODES; i++) begin
      sum_x = sum_x + (CNT_W+5)'(xcount[i]);
      sum_p = sum_p + (CNT_W+5)'(pcount[i]);
    end
  end
  logic quiet;
  assign quiet = (&settled) && (&tr) && (sum_x == sum_p);

  logic trigger;
  assign trigger = ext_req || (periodic_en && es_cycles != '0 && es_cnt >= es_cycles - 1);

  // -------------------------------------------------------------- checkpoint FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st              <= C_IDLE;
      es_cnt          <= '0;
      cl_cnt          <= '0;
      tok_out         <= 1'b0;
      tune_out        <= '0;
      flush_clear     <= 1'b0;
      l2_scrub_start  <= 1'b0;
      llc_scrub_start <= 1'b0;
      walk_start      <= 1'b0;
      drain           <= 1'b0;
      ckpt_done       <= 1'b0;
      last_cl         <= '0;
      last_flush      <= '0;
      n_ckpts         <= '0;
    end else begin
      tok_out         <= 1'b0;
      flush_clear     <= 1'b0;
      l2_scrub_start  <= 1'b0;
      llc_scrub_start <= 1'b0;
      walk_start      <= 1'b0;
      ckpt_done       <= 1'b0;
      es_cnt          <= es_cnt + 1'b1;
      if (st != C_IDLE) cl_cnt <= cl_cnt + 1'b1;
      unique case (st)
        C_IDLE: if (trigger) begin
          es_cnt   <= '0;
          cl_cnt   <= 32'd1;
          tok_out  <= 1'b1;
          tune_out <= '{scrub_step: scrub_step, scrub_gran: scrub_gran, walk_step: walk_step};
          st       <= C_FLUSH;
        end
        C_FLUSH: if (quiet) begin
          last_flush     <= cl_cnt;
          l2_scrub_start <= 1'b1;
          walk_start     <= 1'b1;
          st             <= C_L2W;
        end
        C_L2W: st <= C_L2;                 // let the scrubbers raise busy
        C_L2: if (l2_scrub_busy == '0 && quiet) begin
          llc_scrub_start <= 1'b1;
          st              <= C_LLCW;
        end
        C_LLCW: st <= C_LLC;
        C_LLC: if (llc_scrub_busy == '0 && quiet && !walk_busy) st <= C_DRAIN;
        C_DRAIN: begin
          drain <= 1'b1;
          if (drain && as_empty && !walk_busy) begin
            drain <= 1'b0;
            st    <= C_DONE;
          end
        end
        C_DONE: begin
          flush_clear <= 1'b1;
          ckpt_done   <= 1'b1;
          last_cl     <= cl_cnt;
          n_ckpts     <= n_ckpts + 1'b1;
          st          <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
  assign busy     = (st != C_IDLE);
  assign in_flush = (st == C_FLUSH);

  // -------------------------------------------------------------- tuning
  typedef enum logic [2:0] {T_N, T_NW, T_SUB, T_SUBW, T_RUN, T_RW} tst_e;
  tst_e        tst;
  logic        dv_start, dv_done;
  logic [63:0] dv_a, dv_b, dv_q, dv_r;
  logic [31:0] sub_len, sub_cnt;

  seq_div #(.W(64)) u_div (
    .clk, .rst_n, .start(dv_start), .dividend(dv_a), .divisor(dv_b),
    .busy(), .done(dv_done), .quot(dv_q), .rem(dv_r)
  );

  localparam logic [63:0] RANGE = 64'(R_MAX - R_MIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tst       <= T_N;
      dv_start  <= 1'b0;
      dv_a      <= '0;
      dv_b      <= '0;
      n_pages   <= '0;
      sub_len   <= '0;
      sub_cnt   <= '0;
      walk_step <= '0;
      n_tunes   <= '0;
    end else begin
      dv_start <= 1'b0;
      if (walk_step == '0) walk_step <= walk_step_init;
      unique case (tst)
        T_N: begin
          dv_a     <= 64'(cl_cycles);
          dv_b     <= 64'(k_cycles);
          dv_start <= 1'b1;
          tst      <= T_NW;
        end
        T_NW: if (dv_done) begin
          n_pages <= (dv_q[63:32] != '0) ? '1 : dv_q[31:0];
          tst     <= T_SUB;
        end
        T_SUB: begin
          dv_a     <= 64'(es_cycles);
          dv_b     <= 64'(SUBEPOCHS);
          dv_start <= 1'b1;
          tst      <= T_SUBW;
        end
        T_SUBW: if (dv_done) begin
          sub_len <= dv_q[31:0];
          sub_cnt <= '0;
          tst     <= T_RUN;
        end
        T_RUN: begin
          sub_cnt <= sub_cnt + 1'b1;
          if (sub_len != '0 && sub_cnt >= sub_len - 1) begin
            sub_cnt <= '0;
            if (mod_count >= n_pages || n_pages == '0) begin
              walk_step <= 20'(R_MIN);           // at the bound: most aggressive
              n_tunes   <= n_tunes + 1'b1;
              tst       <= T_N;                  // pick up new targets
            end else begin
              dv_a     <= 64'(n_pages - mod_count) * RANGE;
              dv_b     <= 64'(n_pages);
              dv_start <= 1'b1;
              tst      <= T_RW;
            end
          end
        end
        T_RW: if (dv_done) begin
          walk_step <= 20'(64'(R_MIN) + dv_q);
          n_tunes   <= n_tunes + 1'b1;
          tst       <= T_N;
        end
        default: tst <= T_N;
      endcase
    end
  end

endmodule
