// base_hv_driver -- "B_i Hypervector Driver" of one crossbar group.
//
// Function: holds the fixed base hypervector B_i of feature i (D elements of
// P bits) and, during the drive phase, applies it to the crossbar columns as
// input levels. The paper gives the function (B_i is the input multiplied by
// the selected level HV); the storage as a register array, the write port and
// the drive encoding are this design's choice.
//
// Interface: B_i is written one 64-element segment (one crossbar array's
// columns) per cycle: `we`, `tile`, `wdata`. Output `col_v[c]` is the drive
// level of column c: 0 when idle or for columns past D, otherwise state+1
// (1 .. 2^P), the value the element stands for.
//
// Timing: writes take effect on the clock edge. The column drivers switch on
// at the edge where `drive_on` is high and off at the edge where `drive_off`
// is high (`drive_on` wins if both are high); they are registered, so
// `col_v` is steady for the whole drive phase.
module base_hv_driver
  import mimhd_pkg::*;
#(
  parameter int unsigned D  = DIM,
  parameter int unsigned T  = TILE
)(
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2((D+T-1)/T)-1:0]  tile,
  input  cell_t                         wdata [T],
  input  logic                          rst_n,
  input  logic                          drive_on,
  input  logic                          drive_off,
  output logic [PMAX:0]                 col_v [((D+T-1)/T)*T]
);
  localparam int unsigned NT   = (D + T - 1) / T;
  localparam int unsigned COLS = NT * T;

  cell_t b_q [COLS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < int'(T); i++) b_q[int'(tile)*T + i] <= wdata[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(COLS); c++) col_v[c] <= '0;
    end else if (drive_on) begin
      for (int c = 0; c < int'(COLS); c++)
        col_v[c] <= (c < int'(D)) ? {1'b0, b_q[c]} + 1'b1 : '0;
    end else if (drive_off) begin
      for (int c = 0; c < int'(COLS); c++) col_v[c] <= '0;
    end
  end

endmodule
