// level_decoder -- "Decoder and Driver" of one crossbar group of the
// encoding module (one per input feature f_i).
//
// Function: the paper quantizes each feature linearly into m = 64 levels and
// lets group i switch on the crossbar row that holds the level hypervector of
// f_i. This block does both: it latches the feature when `load` is high,
// quantizes it by keeping its log2(m) most significant bits (a linear
// quantizer over the full input range; range and input width are this
// design's choice), and while `drive` is high and the group is enabled it
// raises exactly one of the m word lines. A disabled group (features beyond
// the dataset's n) keeps all word lines low, so it adds no current.
//
// Timing: `level` and `wl` follow the register latched on the clock edge where
// `load` is high; `wl` is combinational in `drive` and `group_en`.
module level_decoder
  import mimhd_pkg::*;
#(
  parameter int unsigned M      = M_LEVELS,
  parameter int unsigned F_W    = FEAT_W
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,       // latch the feature
  input  logic [F_W-1:0]        feature,
  input  logic                  group_en,   // this feature exists in the dataset
  input  logic                  drive,      // word-line drive phase
  output logic [$clog2(M)-1:0]  level,      // quantized level index
  output logic [M-1:0]          wl          // one-hot word lines
);
  localparam int unsigned LW = $clog2(M);

  logic [F_W-1:0] feat_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    feat_q <= '0;
    else if (load) feat_q <= feature;
  end

  // Linear quantization into M levels: floor(f * M / 2^F_W).
  always_comb begin
    logic [F_W+LW-1:0] scaled;
    scaled = {{LW{1'b0}}, feat_q} * (F_W+LW)'(M);
    level  = scaled[F_W +: LW];
  end

  always_comb begin
    wl = '0;
    if (drive && group_en) wl[level] = 1'b1;
  end

endmodule
