// mimhd_top -- MIMHD multi-bit in-memory hyperdimensional inference engine.
//
// Encoding module: N crossbar groups, one per input feature. Group i holds
// the m = 64 level hypervectors (rows) over D dimensions (columns, in arrays
// of 64 x 64 FeFET cells). Its decoder turns feature f_i into one active
// row; its base-HV driver applies B_i to the columns; the selected cells pass
// L(f_i)[c] * B_i[c]. Column c of every group shares source line c, so the
// line carries H[c] = sum_i L(f_i)[c] * B_i[c], which the line's ADC turns
// into a P-bit element of the encoded query HV.
//
// Associative search module: the class HVs sit in the rows of MCAM arrays
// (64 x 64 cells each). The data-line driver applies the query; each row's
// match line carries a current set by the MCAM distance metric, currents of
// the same row in all arrays are added, and the sense amplifiers pick the
// row with the lowest current. The decoder outputs its number as the
// predicted class.
//
// Precision P (1, 2 or 3 bits) is a run-time setting (`prec`); with P = 1
// the search becomes a Hamming-distance search. `num_features` and
// `num_classes` switch off the groups and MCAM rows a dataset does not use.
//
// Programming port (IDLE only, one 64-element segment per cycle):
//   TGT_LEVEL  level row `prog_row`, array `prog_tile` of group `prog_group`,
//              or of every group at once when `prog_bcast` is set (all
//              groups hold the same level HVs)
//   TGT_BASE   segment `prog_tile` of base HV B_(prog_group)
//   TGT_CLASS  class row `prog_row`, array `prog_tile` of the MCAM
// ADC references `adc_vref` and the settings are static inputs.
//
// Timing: an inference starts on the edge that sees `start` in IDLE, and
// `done` with `pred_class` / `pred_valid` / `enc_hv` valid follows 6 edges
// later (see inference_controller). The component arrays follow the paper;
// the control sequence, port format and ADC references are this design's.
module mimhd_top
  import mimhd_pkg::*;
#(
  parameter int unsigned D   = DIM,
  parameter int unsigned T   = TILE,
  parameter int unsigned M   = M_LEVELS,
  parameter int unsigned N   = N_FEAT,
  parameter int unsigned K   = K_ROWS,
  parameter int unsigned FW  = FEAT_W,
  parameter int unsigned I_W = $clog2(M_LEVELS * NSTATE * NSTATE + 1),
  parameter int unsigned S_W = I_W + $clog2(N_FEAT),
  parameter int unsigned ML_W = G_W + $clog2(((DIM + TILE - 1) / TILE) * TILE)
)(
  input  logic                            clk,
  input  logic                            rst_n,
  // settings
  input  prec_t                           prec,
  input  logic [$clog2(N+1)-1:0]          num_features,
  input  logic [$clog2(K+1)-1:0]          num_classes,
  input  logic [S_W-1:0]                  adc_vref [NSTATE-1],
  // programming port
  input  logic                            prog_we,
  input  prog_tgt_e                       prog_tgt,
  input  logic                            prog_bcast,
  input  logic [$clog2(N)-1:0]            prog_group,
  input  logic [$clog2(M > K ? M : K)-1:0] prog_row,
  input  logic [$clog2((D+T-1)/T)-1:0]    prog_tile,
  input  cell_t                           prog_data [T],
  // inference
  input  logic                            start,
  input  logic [FW-1:0]                   features [N],
  output logic                            busy,
  output logic                            done,
  output logic [$clog2(K)-1:0]            pred_class,
  output logic                            pred_valid,
  output cell_t                           enc_hv [((D+T-1)/T)*T]
);
  localparam int unsigned COLS = ((D + T - 1) / T) * T;

  logic feat_load, drive, xbar_read, adc_sample, dl_load, dl_clear;
  logic mcam_search, sa_sense, prog_ok;

  inference_controller u_ctrl (
    .clk, .rst_n, .start,
    .feat_load, .drive, .xbar_read, .adc_sample, .dl_load, .dl_clear,
    .mcam_search, .sa_sense, .done, .busy, .prog_ok
  );

  logic wr;
  assign wr = prog_we && prog_ok;

  // ---------------------------------------------------------------- encoding
  logic [I_W-1:0] grp_i [N][COLS];

  for (genvar g = 0; g < int'(N); g++) begin : g_grp
    logic [M-1:0]          wl;
    logic [$clog2(M)-1:0]  level;
    logic [PMAX:0]         col_v [COLS];
    logic                  sel, lvl_we, base_we;

    assign sel     = prog_bcast || (int'(prog_group) == g);
    assign lvl_we  = wr && (prog_tgt == TGT_LEVEL) && sel;
    assign base_we = wr && (prog_tgt == TGT_BASE)  && (int'(prog_group) == g);

    level_decoder #(.M(M), .F_W(FW)) u_dec (
      .clk, .rst_n, .load(feat_load), .feature(features[g]),
      .group_en(g < int'(num_features)), .drive, .level, .wl
    );

    base_hv_driver #(.D(D), .T(T)) u_base (
      .clk, .rst_n, .we(base_we), .tile(prog_tile), .wdata(prog_data),
      .drive_on(feat_load), .drive_off(adc_sample), .col_v
    );

    fefet_crossbar_group #(.D(D), .T(T), .M(M), .I_W(I_W)) u_xbar (
      .clk, .we(lvl_we), .row(prog_row[$clog2(M)-1:0]), .tile(prog_tile),
      .wdata(prog_data), .wl, .col_v, .read(xbar_read), .sl_i(grp_i[g])
    );
  end

  logic [S_W-1:0] sl_cur [COLS];

  sl_adc_bank #(.D(D), .T(T), .N(N), .I_W(I_W), .S_W(S_W)) u_adc (
    .clk, .rst_n, .grp_i, .prec, .vref(adc_vref), .sample(adc_sample),
    .enc(enc_hv), .sl_cur
  );

  // -------------------------------------------------------- associative search
  cell_t dl_lvl [COLS];
  logic  dl_en  [COLS];

  dl_driver #(.D(D), .T(T)) u_dl (
    .clk, .rst_n, .enc(enc_hv), .prec, .load(dl_load), .clear(dl_clear),
    .dl_lvl, .dl_en
  );

  logic [ML_W-1:0] ml_i [K];

  mcam_array #(.D(D), .T(T), .K(K), .ML_W(ML_W)) u_mcam (
    .clk, .we(wr && (prog_tgt == TGT_CLASS)), .row(prog_row[$clog2(K)-1:0]),
    .tile(prog_tile), .wdata(prog_data), .prec, .dl_lvl, .dl_en,
    .search(mcam_search), .ml_i
  );

  logic [K-1:0] row_en, win;
  always_comb begin
    for (int k = 0; k < int'(K); k++) row_en[k] = (k < int'(num_classes));
  end

  sense_amp #(.K(K), .ML_W(ML_W)) u_sa (
    .clk, .rst_n, .ml_i, .row_en, .sense(sa_sense), .win
  );

  class_decoder #(.K(K)) u_cdec (
    .win, .class_id(pred_class), .valid(pred_valid)
  );

  // Settings must not change while an inference runs.
  a_stable_prec: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> $stable(prec));

endmodule
