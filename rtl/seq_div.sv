// seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// start (with a dividend and a divisor) begins a division; done pulses W
// cycles later with quot and rem valid until the next start.  Division by
// zero gives an all-ones quotient.  Used by the checkpoint controller for
// n = c / k (paper Eq. 1), for the sub-epoch length and for the activation
// rate; it is a helper of this design, not a block of the paper.
module seq_div #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot,
  output logic [W-1:0] rem
);

  logic [$clog2(W+1)-1:0] n_q;
  logic [W-1:0]           d_q;
  logic [W:0]             trial;

  assign trial = {rem, quot[W-1]} - {1'b0, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q  <= '0;
      d_q  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      quot <= '0;
      rem  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        n_q  <= ($bits(n_q))'(W);
        d_q  <= divisor;
        quot <= dividend;
        rem  <= '0;
      end else if (busy) begin
        if (!trial[W]) begin
          rem  <= trial[W-1:0];
          quot <= {quot[W-2:0], 1'b1};
        end else begin
          rem  <= {rem[W-2:0], quot[W-1]};
          quot <= {quot[W-2:0], 1'b0};
        end
        n_q <= n_q - 1'b1;
        if (n_q == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
