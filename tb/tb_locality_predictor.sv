// tb_locality_predictor: self-checking test of the page-locality predictor.
// A directed part follows one page through a write (counters at maximum),
// the cyclic clearing of both counters on successive walker visits, and the
// cold prediction once both are zero; it also checks that the 64 pages of a
// group share one counter and that a group with another tag reads as cold.
// A random part then mixes writes and visits over a few groups that collide
// in the table and compares every prediction with a reference model kept
// here (per-index valid/tag/counter, clear phases advanced on each visit that
// does not predict cold).  Inputs change on the falling edge; the predictor's
// combinational outputs are sampled before the rising edge.
module tb_locality_predictor;
  import jass_pkg::*;

  localparam int unsigned SHE = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic              upd_valid, chk_valid, chk_persist;
  logic [PAGE_W-1:0] upd_page, chk_page;
  logic [1:0]        chk_priv, chk_priv_new;
  logic [2:0]        chk_shared;

  locality_predictor #(.SH_ENTRIES(SHE), .GROUP_W(6)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model
  bit        m_v   [SHE];
  bit [29:0] m_tag [SHE];
  bit [2:0]  m_cnt [SHE];
  bit        m_pph;
  int        m_sph;

  function automatic bit [2:0] m_shared(input logic [PAGE_W-1:0] p);
    int i;
    i = int'(p[6 +: 4]);
    return (m_v[i] && m_tag[i] == 30'(p >> 10)) ? m_cnt[i] : 3'd0;
  endfunction

  // one cycle with an optional write and an optional visit
  task automatic cyc(input bit u, input logic [PAGE_W-1:0] up,
                     input bit c, input logic [PAGE_W-1:0] cp, input logic [1:0] pr,
                     input string tag);
    bit [2:0] es;
    bit       ep;
    bit [1:0] en;
    @(negedge clk);
    upd_valid = u; upd_page = up; chk_valid = c; chk_page = cp; chk_priv = pr;
    #1;
    es = m_shared(cp);
    ep = (pr == 2'd0) && (es == 3'd0);
    en = pr; en[m_pph] = 1'b0;
    if (c) begin
      check(chk_shared == es, $sformatf("%s: shared %0d, expected %0d", tag, chk_shared, es));
      check(chk_persist == ep, $sformatf("%s: persist %0d, expected %0d", tag, chk_persist, ep));
      if (!ep) check(chk_priv_new == en, $sformatf("%s: private %0d, expected %0d", tag, chk_priv_new, en));
    end
    // model update at the edge
    if (c && !ep) begin
      int i;
      i = int'(cp[6 +: 4]);
      if (m_v[i] && m_tag[i] == 30'(cp >> 10)) m_cnt[i][m_sph] = 1'b0;
      m_pph = !m_pph;
      m_sph = (m_sph + 1) % 3;
    end
    if (u) begin
      int i;
      i = int'(up[6 +: 4]);
      m_v[i] = 1'b1; m_tag[i] = 30'(up >> 10); m_cnt[i] = 3'd7;
    end
    @(posedge clk);
    #1;
    upd_valid = 1'b0; chk_valid = 1'b0;
  endtask

  localparam logic [PAGE_W-1:0] P = 40'h12345;

  initial begin
    upd_valid = 1'b0; chk_valid = 1'b0; upd_page = '0; chk_page = '0; chk_priv = '0;
    m_pph = 1'b0; m_sph = 0;
    for (int i = 0; i < SHE; i++) begin m_v[i] = 1'b0; m_tag[i] = '0; m_cnt[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // directed
    cyc(1'b0, '0, 1'b1, P, 2'd0, "untouched page");
    cyc(1'b1, P, 1'b0, '0, 2'd0, "write");
    cyc(1'b0, '0, 1'b1, P ^ 40'h3f, 2'd3, "same group, other page");
    check(m_shared(P) == 3'd6, "model: first clear took bit 0");
    cyc(1'b0, '0, 1'b1, P, 2'd2, "second visit");
    cyc(1'b0, '0, 1'b1, P, 2'd0, "third visit");
    cyc(1'b0, '0, 1'b1, P, 2'd0, "cold now");
    check(m_shared(P) == 3'd0, "model: all three bits cleared");
    cyc(1'b0, '0, 1'b1, P ^ 40'h400, 2'd0, "other tag, same index");
    // write and visit of the same group in one cycle: the write wins
    cyc(1'b1, P, 1'b1, P, 2'd1, "write and visit together");
    cyc(1'b0, '0, 1'b1, P, 2'd0, "after the write");

    // random
    for (int n = 0; n < 3000; n++) begin
      logic [PAGE_W-1:0] a, b;
      a = {28'h0, 2'($urandom), 4'($urandom), 6'($urandom)};
      b = {28'h0, 2'($urandom), 4'($urandom), 6'($urandom)};
      cyc(($urandom % 4) == 0, a, ($urandom % 2) == 0, b, 2'($urandom % 4), "random");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
