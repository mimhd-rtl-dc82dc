// sl_adc_bank -- behavioural model of the shared source lines and the
// "ADCs and Shift Registers" of the encoding module.
//
// This is a behavioural model of analog/mixed-signal circuits. Source line c
// is shared by column c of every crossbar group, so its current is the sum
// of the groups' column currents (Kirchhoff's law): the encoding sum
// H[c] = sum_i L(f_i)[c] * B_i[c]. One ADC per source line turns that current
// into a P-bit element of the encoded query HV.
//
// ADC: modelled as a flash converter with programmable reference currents.
// With precision P it compares the line current against the first 2^P - 1
// entries of `vref` (ascending) and outputs the number of references the
// current reaches, 0 .. 2^P-1. The reference values are set by software
// together with the trained model; the paper does not give them.
// The output register (`enc`) stands for the shift registers of the figure;
// the paper does not describe them further, so here they simply hold the
// encoded HV that the MCAM data-line driver reads. Columns past D give 0.
//
// Timing: `sample` sums, converts and registers `enc` and `sl_cur` on the
// rising clock edge.
module sl_adc_bank
  import mimhd_pkg::*;
#(
  parameter int unsigned D    = DIM,
  parameter int unsigned T    = TILE,
  parameter int unsigned N    = N_FEAT,
  parameter int unsigned I_W  = $clog2(M_LEVELS * NSTATE * NSTATE + 1),
  parameter int unsigned S_W  = I_W + $clog2(N_FEAT)   // source-line current
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [I_W-1:0]       grp_i [N][((D+T-1)/T)*T],  // per group, per column
  input  prec_t                prec,
  input  logic [S_W-1:0]       vref [NSTATE-1],
  input  logic                 sample,
  output cell_t                enc [((D+T-1)/T)*T],
  output logic [S_W-1:0]       sl_cur [((D+T-1)/T)*T]     // sampled line currents
);
  localparam int unsigned COLS = ((D + T - 1) / T) * T;

  // Kirchhoff sum on each source line, then flash conversion with 2^P - 1
  // references; both sampled together.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(COLS); c++) begin
        enc[c]    <= '0;
        sl_cur[c] <= '0;
      end
    end else if (sample) begin
      for (int c = 0; c < int'(COLS); c++) begin
        logic [S_W-1:0] s;
        cell_t          code;
        s = '0;
        for (int g = 0; g < int'(N); g++) s = s + S_W'(grp_i[g][c]);
        code = '0;
        if (c < int'(D)) begin
          for (int j = 0; j < int'(NSTATE) - 1; j++) begin
            if (j < (1 << prec_bits(prec)) - 1 && s >= vref[j]) code = code + 1'b1;
          end
        end
        enc[c]    <= code;
        sl_cur[c] <= s;
      end
    end
  end

endmodule
