// mcam_array -- behavioural model of the FeFET multi-bit CAM (MCAM) arrays of
// the associative search module.
//
// This is a behavioural model of analog arrays. Row k holds class HV C_k,
// spread over ceil(D/64) MCAM arrays of 64 x 64 cells that share the row's
// match line position. When the data lines carry a query, each cell conducts
// according to the MCAM distance metric: a conductance that grows with
// |stored state - searched level| (steeply at first, then saturating),
// given here by the table G_LUT indexed by that distance on the 8-state cell
// grid. Each array sums the conductances of a row on its match line; the
// row currents of all arrays are then added, giving one current per class
// whose size is the distance between query and class. Undriven columns
// (`dl_en` low) conduct nothing. With 1-bit models the stored and searched
// states are 0 or 4, so the current grows with the Hamming distance.
//
// Interface: write port programs one 64-cell segment of class row `row`,
// array `tile`, per cycle; the P-bit values are placed on the cell grid with
// the precision `prec` in force at the write. `search` samples the row
// currents into `ml_i` on the rising clock edge.
module mcam_array
  import mimhd_pkg::*;
#(
  parameter int unsigned D   = DIM,
  parameter int unsigned T   = TILE,
  parameter int unsigned K   = K_ROWS,
  parameter logic [NSTATE-1:0][G_W-1:0] G_LUT = MCAM_G_DEFAULT,
  parameter int unsigned ML_W = G_W + $clog2(((DIM + TILE - 1) / TILE) * TILE)
)(
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(K)-1:0]          row,
  input  logic [$clog2((D+T-1)/T)-1:0]  tile,
  input  cell_t                         wdata [T],
  input  prec_t                         prec,
  input  cell_t                         dl_lvl [((D+T-1)/T)*T],
  input  logic                          dl_en  [((D+T-1)/T)*T],
  input  logic                          search,
  output logic [ML_W-1:0]               ml_i [K]
);
  localparam int unsigned NT   = (D + T - 1) / T;
  localparam int unsigned COLS = NT * T;
  localparam int unsigned TW   = G_W + $clog2(T + 1);   // one array's row current

  cell_t fet [K][COLS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < int'(T); i++) fet[row][int'(tile)*T + i] <= to_grid(wdata[i], prec);
    end
  end

  always_ff @(posedge clk) begin
    if (search) begin
      for (int k = 0; k < int'(K); k++) begin
        logic [ML_W-1:0] row_sum;
        row_sum = '0;
        for (int t = 0; t < int'(NT); t++) begin
          logic [TW-1:0] arr_sum;     // match-line current of one array
          arr_sum = '0;
          for (int j = 0; j < int'(T); j++) begin
            int c;
            cell_t dd;
            c = t * int'(T) + j;
            if (dl_en[c]) begin
              dd = (fet[k][c] > dl_lvl[c]) ? fet[k][c] - dl_lvl[c]
                                              : dl_lvl[c] - fet[k][c];
              arr_sum = arr_sum + TW'(G_LUT[dd]);
            end
          end
          row_sum = row_sum + ML_W'(arr_sum);
        end
        ml_i[k] <= row_sum;
      end
    end
  end

endmodule
