// mimhd_pkg -- sizes, types and shared functions of the MIMHD multi-bit
// in-memory hyperdimensional (HDC) inference engine.
//
// Sizes that follow the paper: D = 4000 dimensions, crossbar and MCAM arrays of
// 64 x 64 cells, m = 64 level hypervectors, precisions P of 1, 2 and 3 bits,
// n up to 784 features (the largest feature count of the evaluated datasets).
// Sizes chosen by this design: 8-bit feature inputs, the integer current units
// of the behavioural array models and the MCAM conductance table below.
//
// Cell values. A P-bit hypervector element is held as a state 0 .. 2^P-1 and
// stands for the value state+1 (the paper draws elements from 1 .. 2^P).
// In the MCAM every element is placed on the 8-state (3-bit) grid of the
// FeFET cell by shifting it left by 3-P bits, so that 2-bit and 1-bit
// models use the same device states spread over the full range.
package mimhd_pkg;

  parameter int unsigned DIM      = 4000; // hypervector dimensions D
  parameter int unsigned TILE     = 64;   // rows and columns of one array
  parameter int unsigned M_LEVELS = 64;   // level hypervectors m
  parameter int unsigned PMAX     = 3;    // highest precision in bits
  parameter int unsigned N_FEAT   = 784;  // crossbar groups (features n)
  parameter int unsigned K_ROWS   = 64;   // MCAM rows = class capacity
  parameter int unsigned FEAT_W   = 8;    // bits of one input feature

  parameter int unsigned NSTATE   = 1 << PMAX;   // device states per cell
  parameter int unsigned G_W      = 9;           // MCAM conductance code width

  // Cell state and precision mode.
  typedef logic [PMAX-1:0] cell_t;
  typedef logic [1:0]      prec_t;   // 1, 2 or 3 bits (0 is treated as 1)

  // Targets of the programming (array write) port.
  typedef enum logic [1:0] {
    TGT_LEVEL = 2'd0,   // one 64-cell row segment of the level-HV crossbars
    TGT_BASE  = 2'd1,   // one 64-element segment of a base HV
    TGT_CLASS = 2'd2,   // one 64-cell row segment of a class HV in the MCAM
    TGT_NONE  = 2'd3
  } prog_tgt_e;

  // MCAM cell conductance against |stored - searched| on the 8-state grid,
  // in units of 0.1 uS, index 0 = distance 0. The values follow the shape of
  // the measured 3-bit cell curve (near 1 uS at distance 0, about 50 uS at
  // distance 7); they are read off a plot and can be replaced through the
  // G_LUT parameter of mcam_array.
  parameter logic [NSTATE-1:0][G_W-1:0] MCAM_G_DEFAULT =
    {9'd500, 9'd410, 9'd303, 9'd188, 9'd92, 9'd35, 9'd12, 9'd6};

  // Clamp a precision code to 1..PMAX.
  function automatic int unsigned prec_bits(prec_t p);
    if (p == 2'd0) return 1;
    if (int'(p) > PMAX) return PMAX;
    return int'(p);
  endfunction

  // Place a P-bit value on the 8-state grid of the MCAM cell.
  function automatic cell_t to_grid(cell_t v, prec_t p);
    int unsigned sh;
    cell_t mask;
    sh   = PMAX - prec_bits(p);
    mask = cell_t'((1 << prec_bits(p)) - 1);
    return cell_t'((v & mask) << sh);
  endfunction

endpackage
