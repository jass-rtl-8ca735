// locality_predictor: decides which modified DRAM pages of the running epoch
// can be persisted ahead of the checkpoint (paper Sec. 4.6.4).
//
// Each DRAM page has a 2-bit private counter, kept in its leaf entry of the
// DRAM page table (so it lives in dram_ctrl and is passed in here); each
// group of 64 contiguous pages shares a 3-bit counter, kept in this module in
// a small direct-mapped, tagged table of SH_ENTRIES counters (the paper only
// says that few of them are live at a time and that they are stored apart
// from the page table; a group that is not in the table reads as 0).
//  * upd_*: a write to a page sets its group's shared counter to its
//    maximum (the private counter is set to its maximum by dram_ctrl).
//  * chk_*: the DRAM walker visits a valid leaf.  If both counters are 0 the
//    page is predicted cold: chk_persist = 1 and it is persisted
//    speculatively.  Otherwise one bit of each counter is cleared - the
//    "cyclic clear": bit 0, then bit 1 (then bit 2 for the shared counter) on
//    successive visits - and chk_priv_new is the private counter to store.
// chk_persist and chk_priv_new are combinational from chk_*; the shared
// counter and the clear phases update at the clock edge of a chk_valid
// cycle.  Setting the counters to their maximum on a write follows a
// passage the authors left commented out of the paper; the table size, the
// clear order of the 3-bit counter and one phase per walk step for all pages
// are this design's choices.
module locality_predictor
  import jass_pkg::*;
#(
  parameter int unsigned SH_ENTRIES = 256,
  parameter int unsigned GROUP_W    = 6      // 64 pages per shared counter
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              upd_valid,
  input  logic [PAGE_W-1:0] upd_page,
  input  logic              chk_valid,
  input  logic [PAGE_W-1:0] chk_page,
  input  logic [1:0]        chk_priv,
  output logic              chk_persist,
  output logic [1:0]        chk_priv_new,
  output logic [2:0]        chk_shared
);

  localparam int unsigned SI_W  = $clog2(SH_ENTRIES);
  localparam int unsigned GRP_W = PAGE_W - GROUP_W;
  localparam int unsigned TAG_W = GRP_W - SI_W;

  logic [SH_ENTRIES-1:0]  sh_valid;
  logic [TAG_W-1:0]       sh_tag [SH_ENTRIES];
  logic [2:0]             sh_cnt [SH_ENTRIES];
  logic                   pph;         // private clear phase: bit 0 / bit 1
  logic [1:0]             sph;         // shared clear phase: bit 0 / 1 / 2

  logic [GRP_W-1:0] ug, cg;
  assign ug = upd_page[PAGE_W-1:GROUP_W];
  assign cg = chk_page[PAGE_W-1:GROUP_W];

  logic [SI_W-1:0] ci;
  logic            c_hit;
  assign ci    = cg[SI_W-1:0];
  assign c_hit = sh_valid[ci] && sh_tag[ci] == cg[GRP_W-1:SI_W];

  always_comb begin
    chk_shared   = c_hit ? sh_cnt[ci] : 3'd0;
    chk_persist  = (chk_priv == 2'd0) && (chk_shared == 3'd0);
    chk_priv_new = chk_priv;
    chk_priv_new[pph] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_valid <= '0;
      pph      <= 1'b0;
      sph      <= 2'd0;
    end else begin
      if (chk_valid && !chk_persist) begin
        pph <= !pph;
        sph <= (sph == 2'd2) ? 2'd0 : sph + 2'd1;
        if (c_hit) sh_cnt[ci][sph] <= 1'b0;
      end
      // a write wins over a clear of the same counter
      if (upd_valid) begin
        sh_valid[ug[SI_W-1:0]] <= 1'b1;
        sh_tag[ug[SI_W-1:0]]   <= ug[GRP_W-1:SI_W];
        sh_cnt[ug[SI_W-1:0]]   <= 3'd7;
      end
    end
  end

endmodule
