// noc_torus: the XDIM x YDIM torus network on chip that links every node of
// the JASS chip (cores with their private caches, last-level-cache tiles, the
// directory, the DRAM and NVM controllers and the checkpoint controller).
//
// Node n sits at column n % XDIM, row n / XDIM.  Each router's E/W/N/S port
// is wired to the neighbour's opposite port, with wrap-around links (a
// torus, as in the paper's setup table).  Both the flit links and the token
// links take one cycle per hop.  Each node's local port, its token wires and
// its flush counters are brought out as arrays indexed by node id.  The
// directory node (DIR_NODE) gets the router variant whose pcount waits for
// the directory.  The torus size and the node map are this design's choice;
// the paper names the topology and the node kinds only.
module noc_torus
  import jass_pkg::*;
#(
  parameter int unsigned XDIM          = 5,
  parameter int unsigned YDIM          = 4,
  parameter int unsigned BUF_DEPTH     = 4,
  parameter int unsigned LINK_WINDOW   = 4,
  parameter int unsigned PCOUNT_PERIOD = 16,
  parameter int unsigned DIR_NODE      = 16,
  localparam int unsigned N            = XDIM * YDIM
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // local ports
  input  flit_t [N-1:0]          inj_flit,
  input  logic  [N-1:0]          inj_valid,
  output logic  [N-1:0]          inj_ready,
  output flit_t [N-1:0]          ej_flit,
  output logic  [N-1:0]          ej_valid,
  input  logic  [N-1:0]          ej_ready,
  // token to/from each node's tile element
  input  logic  [N-1:0]          tile_tok_in,
  input  tune_t [N-1:0]          tile_tune_in,
  output logic  [N-1:0]          tile_tok_out,
  output tune_t [N-1:0]          tile_tune_out,
  // directory notification
  input  logic                   dir_done_valid,
  input  logic [3:0]             dir_done_n,
  // checkpoint controller side band
  input  logic                   flush_clear,
  output logic  [N-1:0]          tr,
  output logic  [N-1:0]          settled,
  output logic  [N-1:0][CNT_W-1:0] xcount,
  output logic  [N-1:0][CNT_W-1:0] pcount
);

  flit_t [N-1:0][NPORTS-1:0] r_in_flit, r_out_flit;
  logic  [N-1:0][NPORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  logic  [N-1:0][NPORTS-1:0] r_tok_in, r_tok_out;
  tune_t [N-1:0][NPORTS-1:0] r_tune_in;
  tune_t [N-1:0]             r_tune_out;

  function automatic int unsigned nb(input int unsigned n, input int unsigned p);
    int unsigned x, y;
    x = n % XDIM;
    y = n / XDIM;
    case (p)
      P_N:     return ((y + YDIM - 1) % YDIM) * XDIM + x;
      P_E:     return y * XDIM + (x + 1) % XDIM;
      P_S:     return ((y + 1) % YDIM) * XDIM + x;
      default: return y * XDIM + (x + XDIM - 1) % XDIM;
    endcase
  endfunction

  // port p of node n receives from port opp(p) of its neighbour
  function automatic int unsigned opp(input int unsigned p);
    return (p + 2) % 4;
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_w
    for (genvar p = 0; p < 4; p++) begin : g_p
      assign r_in_flit[n][p]   = r_out_flit[nb(n, p)][opp(p)];
      assign r_in_valid[n][p]  = r_out_valid[nb(n, p)][opp(p)];
      assign r_out_ready[n][p] = r_in_ready[nb(n, p)][opp(p)];
      assign r_tok_in[n][p]    = r_tok_out[nb(n, p)][opp(p)];
      assign r_tune_in[n][p]   = r_tune_out[nb(n, p)];
    end
    assign r_in_flit[n][P_L]   = inj_flit[n];
    assign r_in_valid[n][P_L]  = inj_valid[n];
    assign inj_ready[n]        = r_in_ready[n][P_L];
    assign ej_flit[n]          = r_out_flit[n][P_L];
    assign ej_valid[n]         = r_out_valid[n][P_L];
    assign r_out_ready[n][P_L] = ej_ready[n];
    assign r_tok_in[n][P_L]    = tile_tok_in[n];
    assign r_tune_in[n][P_L]   = tile_tune_in[n];
    assign tile_tok_out[n]     = r_tok_out[n][P_L];
    assign tile_tune_out[n]    = r_tune_out[n];
  end

  for (genvar n = 0; n < N; n++) begin : g_r
    snap_router #(
      .NODE_ID(n), .XDIM(XDIM), .YDIM(YDIM), .BUF_DEPTH(BUF_DEPTH),
      .LINK_WINDOW(LINK_WINDOW), .PCOUNT_PERIOD(PCOUNT_PERIOD),
      .IS_DIR(n == DIR_NODE)
    ) u_router (
      .clk, .rst_n,
      .in_flit(r_in_flit[n]), .in_valid(r_in_valid[n]), .in_ready(r_in_ready[n]),
      .out_flit(r_out_flit[n]), .out_valid(r_out_valid[n]), .out_ready(r_out_ready[n]),
      .tok_in(r_tok_in[n]), .tok_tune_in(r_tune_in[n]),
      .tok_out(r_tok_out[n]), .tok_tune_out(r_tune_out[n]),
      .dir_done_valid(dir_done_valid && n == DIR_NODE), .dir_done_n,
      .flush_clear,
      .tr(tr[n]), .settled(settled[n]), .xcount(xcount[n]), .rep_pcount(pcount[n])
    );
  end

endmodule
