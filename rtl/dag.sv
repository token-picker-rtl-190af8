// dag: Denominator Aggregation Module.
//
// Every cycle it adds the Delta Partial Exp of all 16 PE lanes (a 16-input
// adder) to the running denominator, sum over live tokens of
// exp(s_j,min^b), and passes the denominator through ln(F). ln(denominator)
// is broadcast back to every lane's RPDU and Probability Generator. Timing:
// deltas presented in cycle n are in den after edge n and in ln_den after
// edge n+1. clear (start of an operation) empties the denominator. After
// step 0 den holds the softmax denominator of the unpruned tokens. The
// structure is the paper's; widths and the one-cycle ln register are this
// design's.
module dag
  import topick_pkg::*;
#(
  parameter int NLANES = N_PL
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  delta_t           delta [NLANES],
  output logic [DEN_W-1:0] den,
  output score_t           ln_den
);
  localparam int SUMW = DELTA_W + $clog2(NLANES);
  logic signed [SUMW-1:0]  dsum;
  logic signed [DEN_W:0]   next_den;
  score_t                  ln_comb;

  always_comb begin
    dsum = '0;
    for (int l = 0; l < NLANES; l++) dsum += SUMW'(delta[l]);
    next_den = $signed({1'b0, den}) + (DEN_W+1)'(dsum);
  end

  ln_unit u_ln (.f(den), .y(ln_comb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      den    <= '0;
      ln_den <= {1'b1, {(SCORE_W-1){1'b0}}};
    end else if (clear) begin
      den    <= '0;
      ln_den <= {1'b1, {(SCORE_W-1){1'b0}}};
    end else begin
      den    <= next_den[DEN_W] ? '0 : next_den[DEN_W-1:0];
      ln_den <= ln_comb;
    end
  end

  a_den_nonneg: assert property (@(posedge clk) disable iff (!rst_n || clear)
    !next_den[DEN_W]);
endmodule
