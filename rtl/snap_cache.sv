// snap_cache: a set-associative write-back cache whose lines carry the JASS
// snapshot bit, with the cache operations of the paper's Algorithm 3 and a
// cache scrubber.  The same module serves as a private L2 (whose scrubber is
// the "flusher" of the core tile) and as a bank of the shared LLC.
//
// Each line holds valid, modified (dirty), its snapshot bit and a 64-byte
// block.  A line is pre-snapshot when its bit differs from `epoch`, the
// cache's own epoch colour, which the tile flips when the token reaches it.
// One request is handled per cycle (single-cycle lookup):
//  * READ: answered on a hit.
//  * WRITE / WB (a line from above): a post-snapshot write to a modified
//    pre-snapshot line first sends the old line down with its bit, then
//    writes.  A pre-snapshot write (from an upper level, sent during the
//    checkpoint) simply overwrites: the upper level's value is newer.  On a
//    miss the line is installed; a modified victim is written back down.
//  * GETS: forwards the line, no state change (no eviction needed, Sec. 4.3).
//  * GETX: sends a modified pre-snapshot line down, forwards, invalidates.
//  * INV / EVICT: sends a modified line down with its bit, invalidates.
// Scrubber: after scrub_start it visits every (set, way) in order, one per
// cycle, and sends each modified pre-snapshot line down (it then stays valid
// and clean).  It scrubs `scrub_gran` sets per scrubbing cycle and waits
// `scrub_step` cycles between cycles.  While it is visiting, it takes the
// cache's port (requests wait); scrub_done pulses when the last set is done.
//
// Interface timing: req is accepted when req_valid && req_ready; the answer
// (rsp_valid/rsp_hit/rsp_data) is registered and appears the next cycle.
// down_* is a valid/ready channel; the cache holds a request until
// down_ready so a write-back is never lost.
// Own choices (the paper is silent): a write carries a whole line and a write
// miss installs it without a fill from below; coherence states other than
// modified are not kept; a modified post-snapshot line is also written back
// on eviction (an ordinary write-back cache does this anyway); round-robin
// victim selection; the tag holds the whole block address, so IDX_SHIFT can
// skip the bank-select bits of an interleaved LLC bank.
module snap_cache
  import jass_pkg::*;
#(
  parameter int unsigned SETS = 512,   // 256 KB / 64 B / 8 ways (L2 in Table 1)
  parameter int unsigned WAYS = 8,
  parameter int unsigned IDX_SHIFT = 0  // address bits above the block offset left out of the index (bank select)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              epoch,
  // requests from above (core, upper cache, coherence)
  input  logic              req_valid,
  input  creq_t             req,
  output logic              req_ready,
  // responses to READ/GETS/GETX
  output logic              rsp_valid,
  output logic              rsp_hit,
  output logic [LINE_W-1:0] rsp_data,
  // lines sent to the next level
  output logic              down_valid,
  output creq_t             down,
  input  logic              down_ready,
  // scrubber
  input  logic              scrub_start,
  input  logic [19:0]       scrub_step,
  input  logic [7:0]        scrub_gran,
  output logic              scrub_busy,
  output logic              scrub_done
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = PA_W - BLK_OFF_W;   // the whole block address

  logic [TAG_W-1:0]  tag_q  [SETS*WAYS];
  logic [LINE_W-1:0] data_q [SETS*WAYS];
  logic [SETS-1:0][WAYS-1:0] valid_q, dirty_q, snap_q;
  logic [SETS-1:0][WAY_W-1:0] rr_q;

  // ---------------------------------------------------------------- lookup
  logic [SET_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  logic             hit;
  logic [WAY_W-1:0] hway, vway, way;
  logic             have_inv;

  assign idx = req.addr[BLK_OFF_W + IDX_SHIFT +: SET_W];
  assign tag = req.addr[PA_W-1 -: TAG_W];

  always_comb begin
    hit      = 1'b0;
    hway     = '0;
    have_inv = 1'b0;
    vway     = rr_q[idx];
    for (int w = WAYS-1; w >= 0; w--) begin
      if (valid_q[idx][w] && tag_q[{idx, WAY_W'(w)}] == tag) begin
        hit  = 1'b1;
        hway = WAY_W'(w);
      end
      if (!valid_q[idx][w]) begin
        have_inv = 1'b1;
        vway     = WAY_W'(w);
      end
    end
    way = hit ? hway : vway;
  end

  logic              l_valid, l_dirty, l_snap, l_pre;
  logic [LINE_W-1:0] l_data;
  logic [PA_W-1:0]   l_addr;
  assign l_valid = valid_q[idx][way];
  assign l_dirty = dirty_q[idx][way];
  assign l_snap  = snap_q[idx][way];
  assign l_pre   = l_snap != epoch;
  assign l_data  = data_q[{idx, way}];
  assign l_addr  = {tag_q[{idx, way}], BLK_OFF_W'(0)};

  // ---------------------------------------------------------------- scrubber
  typedef enum logic [1:0] {S_IDLE, S_VISIT, S_WAIT} scrub_e;
  scrub_e            s_state;
  logic [SET_W-1:0]  s_set;
  logic [WAY_W-1:0]  s_way;
  logic [7:0]        s_gcnt;
  logic [19:0]       s_wait;
  logic              s_need;
  logic              s_fire;

  assign scrub_busy = (s_state != S_IDLE);
  assign s_need = (s_state == S_VISIT) && valid_q[s_set][s_way] && dirty_q[s_set][s_way] &&
                  (snap_q[s_set][s_way] != epoch);
  // the visit completes this cycle (a needed write-back waits for down_ready)
  assign s_fire = (s_state == S_VISIT) && (!s_need || down_ready);

  // ---------------------------------------------------------------- request
  logic need_down;
  always_comb begin
    need_down = 1'b0;
    unique case (req.mtype)
      M_WRITE, M_WB: need_down = hit ? (l_dirty && l_pre && req.snap == epoch)
                                     : (l_valid && l_dirty);
      M_GETX:        need_down = hit && l_dirty && l_pre;
      M_INV, M_EVICT:need_down = hit && l_dirty;
      default:       need_down = 1'b0;
    endcase
  end

  assign req_ready = (s_state != S_VISIT) && down_ready;
  logic acc;
  assign acc = req_valid && req_ready;

  always_comb begin
    down_valid = 1'b0;
    down       = '{mtype: M_WB, snap: l_snap, addr: l_addr, data: l_data};
    if (s_state == S_VISIT) begin
      down_valid = s_need;
      down       = '{mtype: M_WB, snap: snap_q[s_set][s_way],
                     addr: {tag_q[{s_set, s_way}], BLK_OFF_W'(0)},
                     data: data_q[{s_set, s_way}]};
    end else if (req_valid && need_down) begin
      down_valid = 1'b1;
    end
  end

  // data/tag storage (not reset; guarded by valid)
  always_ff @(posedge clk) begin
    if (acc && (req.mtype == M_WRITE || req.mtype == M_WB)) begin
      data_q[{idx, way}] <= req.data;
      tag_q[{idx, way}]  <= tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q    <= '0;
      dirty_q    <= '0;
      snap_q     <= '0;
      rr_q       <= '0;
      rsp_valid  <= 1'b0;
      rsp_hit    <= 1'b0;
      rsp_data   <= '0;
      s_state    <= S_IDLE;
      s_set      <= '0;
      s_way      <= '0;
      s_gcnt     <= '0;
      s_wait     <= '0;
      scrub_done <= 1'b0;
    end else begin
      rsp_valid  <= 1'b0;
      scrub_done <= 1'b0;
      if (acc) begin
        unique case (req.mtype)
          M_READ, M_GETS: begin
            rsp_valid <= 1'b1;
            rsp_hit   <= hit;
            rsp_data  <= l_data;
          end
          M_WRITE, M_WB: begin
            // a pre-snapshot write never turns a post-snapshot line back
            valid_q[idx][way] <= 1'b1;
            dirty_q[idx][way] <= 1'b1;
            snap_q[idx][way]  <= (hit && l_dirty && !l_pre) ? l_snap : req.snap;
            if (!hit && !have_inv) rr_q[idx] <= rr_q[idx] + 1'b1;
          end
          M_GETX: begin
            rsp_valid <= 1'b1;
            rsp_hit   <= hit;
            rsp_data  <= l_data;
            if (hit) valid_q[idx][way] <= 1'b0;
          end
          M_INV, M_EVICT: begin
            if (hit) valid_q[idx][way] <= 1'b0;
          end
          default: ;
        endcase
      end

      unique case (s_state)
        S_IDLE: if (scrub_start) begin
          s_state <= S_VISIT;
          s_set   <= '0;
          s_way   <= '0;
          s_gcnt  <= '0;
        end
        S_VISIT: if (s_fire) begin
          if (s_need) dirty_q[s_set][s_way] <= 1'b0;
          s_way <= s_way + 1'b1;
          if (s_way == WAY_W'(WAYS-1)) begin
            s_way <= '0;
            s_set <= s_set + 1'b1;
            if (s_set == SET_W'(SETS-1)) begin
              s_state    <= S_IDLE;
              scrub_done <= 1'b1;
            end else if (s_gcnt + 8'd1 >= scrub_gran) begin
              s_gcnt  <= '0;
              s_wait  <= scrub_step;
              s_state <= (scrub_step == '0) ? S_VISIT : S_WAIT;
            end else begin
              s_gcnt <= s_gcnt + 8'd1;
            end
          end
        end
        S_WAIT: begin
          if (s_wait <= 20'd1) s_state <= S_VISIT;
          s_wait <= s_wait - 1'b1;
        end
        default: s_state <= S_IDLE;
      endcase
    end
  end

endmodule
