// sense_amp -- behavioural model of the match-line sense amplifiers of the
// associative search module.
//
// This is a behavioural model of an analog loser-take-all stage. The paper
// uses sense amplifiers to find the row with the lowest match-line current,
// i.e. the class HV closest to the query. Here the row currents are compared
// directly: among the enabled rows (`row_en`, the classes the model holds)
// the one with the smallest current wins; a tie goes to the lower row, a
// choice of this design. Output `win` is one-hot, all zero if no row is
// enabled.
//
// Timing: `sense` registers the decision on the rising clock edge.
module sense_amp
  import mimhd_pkg::*;
#(
  parameter int unsigned K    = K_ROWS,
  parameter int unsigned ML_W = G_W + $clog2(((DIM + TILE - 1) / TILE) * TILE)
)(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ML_W-1:0]  ml_i [K],
  input  logic [K-1:0]     row_en,
  input  logic             sense,
  output logic [K-1:0]     win
);
  logic [K-1:0] win_d;

  always_comb begin
    logic [ML_W-1:0] best;
    logic            found;
    best  = '1;
    found = 1'b0;
    win_d = '0;
    for (int k = 0; k < int'(K); k++) begin
      if (row_en[k] && (!found || ml_i[k] < best)) begin
        best  = ml_i[k];
        found = 1'b1;
        win_d = '0;
        win_d[k] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     win <= '0;
    else if (sense) win <= win_d;
  end

endmodule
