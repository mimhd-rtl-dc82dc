// fefet_crossbar_group -- behavioural model of one crossbar group of the
// encoding module: ceil(D/64) FeFET crossbar arrays of 64 x 64 multi-level
// cells holding the m = 64 level hypervectors of one feature.
//
// This is a behavioural model of an analog array, not logic for synthesis
// into gates. Row r of the group holds level HV L_(r+1); column c holds
// dimension c (array c/64, local column c%64). A cell's conductance is taken
// as proportional to the value it stores (state+1), the column input
// (from base_hv_driver) as proportional to the base HV value, so a selected
// cell passes the current (state+1)*col_v[c] in integer units. The source
// line of column c collects the currents of all selected rows; with the one
// word line the level decoder raises, that is the product
// L(f_i)[c] * B_i[c] of the encoding equation. Cell physics (non-linearity,
// variation, write pulses) is not modelled.
//
// Interface: write port programs one 64-cell row segment (`row`, `tile`) per
// cycle. `read` samples the source-line currents into `sl_i`, the group's
// contribution to each column, on the rising clock edge; the sum over all
// groups (Kirchhoff's law on the shared source lines) is formed in
// sl_adc_bank.
module fefet_crossbar_group
  import mimhd_pkg::*;
#(
  parameter int unsigned D  = DIM,
  parameter int unsigned T  = TILE,
  parameter int unsigned M  = M_LEVELS,
  // width of one group's column current: M rows of at most NSTATE*NSTATE
  parameter int unsigned I_W = $clog2(M_LEVELS * NSTATE * NSTATE + 1)
)(
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(M)-1:0]          row,
  input  logic [$clog2((D+T-1)/T)-1:0]  tile,
  input  cell_t                         wdata [T],
  input  logic [M-1:0]                  wl,        // word lines (level rows)
  input  logic [PMAX:0]                 col_v [((D+T-1)/T)*T],
  input  logic                          read,
  output logic [I_W-1:0]                sl_i [((D+T-1)/T)*T]
);
  localparam int unsigned NT   = (D + T - 1) / T;
  localparam int unsigned COLS = NT * T;

  cell_t fet [M][COLS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < int'(T); i++) fet[row][int'(tile)*T + i] <= wdata[i];
    end
  end

  // Column currents of the selected rows, sampled on `read`.
  always_ff @(posedge clk) begin
    if (read) begin
      for (int c = 0; c < int'(COLS); c++) begin
        logic [I_W-1:0] acc;
        acc = '0;
        for (int r = 0; r < int'(M); r++) begin
          if (wl[r]) acc = acc + (I_W'(fet[r][c]) + 1'b1) * I_W'(col_v[c]);
        end
        sl_i[c] <= acc;
      end
    end
  end

endmodule
