// dl_driver -- "Data Line Driver" of the associative search module.
//
// Function: takes the P-bit encoded query HV from the ADC bank and applies it
// to the MCAM data lines (DL / DL-bar pair per column). The search level of
// a column is the query element placed on the 8-state grid of the FeFET
// MCAM cell (shifted left by 3-P bits, see mimhd_pkg::to_grid), so 1- and
// 2-bit models use the same cell states as class HVs written at that
// precision. Columns past D are left undriven (`dl_en` low), which removes
// them from the search. The grid mapping is this design's choice; the paper
// states only that the encoded query is routed to the MCAMs as input.
//
// Timing: `load` registers the drive levels on the rising edge; they stay
// until the next `load`. `clear` releases all data lines.
module dl_driver
  import mimhd_pkg::*;
#(
  parameter int unsigned D  = DIM,
  parameter int unsigned T  = TILE
)(
  input  logic   clk,
  input  logic   rst_n,
  input  cell_t  enc [((D+T-1)/T)*T],
  input  prec_t  prec,
  input  logic   load,
  input  logic   clear,
  output cell_t  dl_lvl [((D+T-1)/T)*T],
  output logic   dl_en  [((D+T-1)/T)*T]
);
  localparam int unsigned COLS = ((D + T - 1) / T) * T;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(COLS); c++) begin
        dl_lvl[c] <= '0;
        dl_en[c]  <= 1'b0;
      end
    end else if (clear) begin
      for (int c = 0; c < int'(COLS); c++) dl_en[c] <= 1'b0;
    end else if (load) begin
      for (int c = 0; c < int'(COLS); c++) begin
        dl_lvl[c] <= to_grid(enc[c], prec);
        dl_en[c]  <= (c < int'(D));
      end
    end
  end

endmodule
