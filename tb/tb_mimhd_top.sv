// tb_mimhd_top -- end-to-end test of mimhd_top at reduced size
// (D = 200 so four 64-column arrays with a partly used last one, 12 feature
// groups, 8 MCAM rows, full 64 level rows).
//
// For each precision P = 3, 2, 1 the test builds an HDC model the way the
// design expects it: level HVs made by re-drawing D/m random elements from
// one level to the next, random base HVs, and class HVs that are the encoded
// HVs of random prototype feature vectors. It programs the arrays through the
// write port (level rows broadcast to all groups, or group by group), sets
// ADC references from the spread of the reference line sums, and runs
// queries (prototypes and perturbed prototypes). Every query's encoded HV,
// winning class and valid flag is compared with a reference model written
// here from the encoding and search equations, and the start-to-done latency
// must be 6 cycles.
//
// Mechanisms that must each occur at least once: every precision mode,
// broadcast and per-group level programming, groups switched off
// (num_features < N), MCAM rows masked (num_classes < K) while holding a
// closer HV, start ignored while busy, array write ignored while busy, and
// an exact prototype query recognised as its own class.
module tb_mimhd_top;
  import mimhd_pkg::*;
  localparam int D = 200, T = 64, M = 64, N = 12, K = 8, FW = 8;
  localparam int NT = (D + T - 1) / T, COLS = NT * T;
  localparam int I_W = $clog2(M_LEVELS * NSTATE * NSTATE + 1);
  localparam int S_W = I_W + $clog2(N_FEAT);
  localparam int LATENCY = 6;
  localparam int unsigned GT [8] = '{6, 12, 35, 92, 188, 303, 410, 500};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  prec_t prec;
  logic [$clog2(N+1)-1:0] num_features;
  logic [$clog2(K+1)-1:0] num_classes;
  logic [S_W-1:0] adc_vref [NSTATE-1];
  logic prog_we, prog_bcast;
  prog_tgt_e prog_tgt;
  logic [$clog2(N)-1:0] prog_group;
  logic [5:0] prog_row;
  logic [$clog2(NT)-1:0] prog_tile;
  cell_t prog_data [T];
  logic start, busy, done, pred_valid;
  logic [FW-1:0] features [N];
  logic [$clog2(K)-1:0] pred_class;
  cell_t enc_hv [COLS];

  mimhd_top #(.D(D), .T(T), .M(M), .N(N), .K(K), .FW(FW)) dut (.*);

  // reference model state
  byte unsigned lvl [M][COLS];
  byte unsigned base [N][COLS];
  byte unsigned cls [K][COLS];
  int unsigned  vref_r [NSTATE-1];
  int unsigned  P;

  // mechanism counters
  int n_prec [4];
  int n_bcast, n_pergroup, n_gated, n_masked, n_start_busy, n_prog_busy, n_proto;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- reference
  function automatic int unsigned ref_sum(input byte unsigned f [N], int nf, int c);
    int unsigned s;
    s = 0;
    for (int g = 0; g < nf; g++) s += (lvl[int'(f[g]) * M / 256][c] + 1) * (base[g][c] + 1);
    return s;
  endfunction

  function automatic void ref_encode(input byte unsigned f [N], int nf, output byte unsigned e [COLS]);
    for (int c = 0; c < COLS; c++) begin
      int unsigned s, code;
      code = 0;
      if (c < D) begin
        s = ref_sum(f, nf, c);
        for (int j = 0; j < (1 << P) - 1; j++) if (s >= vref_r[j]) code++;
      end
      e[c] = byte'(code);
    end
  endfunction

  function automatic int unsigned ref_ml(input byte unsigned e [COLS], int k);
    int unsigned s;
    s = 0;
    for (int c = 0; c < D; c++) begin
      int d;
      d = (int'(cls[k][c]) - int'(e[c])) * (1 << (3 - P));
      if (d < 0) d = -d;
      s += GT[d];
    end
    return s;
  endfunction

  // ------------------------------------------------------------------ drivers
  task automatic prog(prog_tgt_e tgt, bit bc, int grp, int row, int tile, input byte unsigned v [T]);
    @(negedge clk);
    prog_we = 1'b1; prog_tgt = tgt; prog_bcast = bc;
    prog_group = ($clog2(N))'(grp); prog_row = 6'(row); prog_tile = ($clog2(NT))'(tile);
    for (int i = 0; i < T; i++) prog_data[i] = cell_t'(v[i]);
    @(negedge clk);
    prog_we = 1'b0; prog_bcast = 1'b0;
  endtask

  task automatic write_class_row(int k);
    byte unsigned v [T];
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < T; i++) v[i] = cls[k][t*T+i];
      prog(TGT_CLASS, 0, 0, k, t, v);
    end
  endtask

  // Run one inference and compare with the reference.
  task automatic run_query(input byte unsigned f [N], int nf, int nc, int expect_proto,
                           bit poke_start, bit poke_prog);
    byte unsigned e [COLS];
    int best, cyc, ndone;
    int unsigned ml;
    @(negedge clk);
    num_features = ($clog2(N+1))'(nf);
    num_classes  = ($clog2(K+1))'(nc);
    for (int g = 0; g < N; g++) features[g] = f[g];
    start = 1'b1;
    @(negedge clk);
    start = poke_start;            // a held start must not restart the run
    cyc = 1; ndone = 0;
    if (poke_prog) begin           // garbage write into row 0, must be dropped
      prog_we = 1'b1; prog_tgt = TGT_CLASS; prog_row = '0; prog_tile = '0;
      for (int i = 0; i < T; i++) prog_data[i] = cell_t'($urandom);
      n_prog_busy++;
    end
    if (poke_start) n_start_busy++;
    while (!done && cyc < 20) begin
      @(negedge clk); cyc++;
      if (cyc == 3) begin start = 1'b0; prog_we = 1'b0; end
    end
    check(cyc == LATENCY, $sformatf("latency %0d cycles", cyc));
    ref_encode(f, nf, e);
    for (int c = 0; c < COLS; c++)
      check(int'(enc_hv[c]) == int'(e[c]), $sformatf("P%0d enc col %0d got %0d exp %0d", P, c, enc_hv[c], e[c]));
    best = -1;
    for (int k = 0; k < nc; k++) begin
      int unsigned m;
      m = ref_ml(e, k);
      if (best < 0 || m < ml) begin best = k; ml = m; end
    end
    check(pred_valid == (best >= 0), "pred_valid");
    if (best >= 0) check(int'(pred_class) == best,
                         $sformatf("P%0d class got %0d exp %0d", P, pred_class, best));
    if (expect_proto >= 0) begin
      // the prototype's own row is at distance 0; a lower row can only tie
      // with it by holding the very same class HV
      bit same;
      same = (best >= 0);
      if (best >= 0) for (int c = 0; c < COLS; c++) if (cls[best][c] != cls[expect_proto][c]) same = 0;
      check(best == expect_proto || same, $sformatf("prototype %0d recognised as %0d", expect_proto, best));
      if (best == expect_proto) n_proto++;
    end
    @(negedge clk);
    check(!busy && !done, "back to idle");
  endtask

  // -------------------------------------------------------------------- test
  initial begin
    byte unsigned proto [K][N];
    byte unsigned e [COLS];
    byte unsigned v [T];
    prec = 2'd3; num_features = '0; num_classes = '0; start = 0;
    prog_we = 0; prog_bcast = 0; prog_tgt = TGT_NONE; prog_group = '0; prog_row = '0; prog_tile = '0;
    foreach (prog_data[i]) prog_data[i] = '0;
    foreach (adc_vref[j]) adc_vref[j] = '0;
    foreach (features[g]) features[g] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int pi = 0; pi < 3; pi++) begin
      int nf, nc, vmax;
      P = 3 - pi;
      vmax = (1 << P) - 1;
      @(negedge clk); prec = prec_t'(P);
      n_prec[P]++;

      // level HVs: level 0 random, each next level re-draws D/m elements
      for (int c = 0; c < COLS; c++) lvl[0][c] = byte'($urandom_range(vmax));
      for (int r = 1; r < M; r++) begin
        lvl[r] = lvl[r-1];
        for (int x = 0; x < (D + M - 1) / M; x++) lvl[r][$urandom_range(D - 1)] = byte'($urandom_range(vmax));
      end
      for (int g = 0; g < N; g++)
        for (int c = 0; c < COLS; c++) base[g][c] = byte'($urandom_range(vmax));

      // program level rows: broadcast (P = 3, 1) or group by group (P = 2)
      for (int r = 0; r < M; r++)
        for (int t = 0; t < NT; t++) begin
          for (int i = 0; i < T; i++) v[i] = lvl[r][t*T+i];
          if (P != 2) begin
            prog(TGT_LEVEL, 1, 0, r, t, v); n_bcast++;
          end else begin
            for (int g = 0; g < N; g++) begin prog(TGT_LEVEL, 0, g, r, t, v); n_pergroup++; end
          end
        end
      for (int g = 0; g < N; g++)
        for (int t = 0; t < NT; t++) begin
          for (int i = 0; i < T; i++) v[i] = base[g][t*T+i];
          prog(TGT_BASE, 0, g, 0, t, v);
        end

      nf = (P == 2) ? N - 3 : N;        // switch off 3 groups in the 2-bit run
      nc = (P == 1) ? K - 2 : K;        // mask 2 MCAM rows in the 1-bit run
      if (nf < N) n_gated++;

      // ADC references from the spread of the prototype line sums
      for (int k = 0; k < K; k++)
        for (int g = 0; g < N; g++) proto[k][g] = byte'($urandom_range(255));
      begin
        int unsigned lo, hi;
        lo = '1; hi = 0;
        for (int k = 0; k < K; k++)
          for (int c = 0; c < D; c++) begin
            int unsigned s;
            s = ref_sum(proto[k], nf, c);
            if (s < lo) lo = s;
            if (s > hi) hi = s;
          end
        for (int j = 0; j < NSTATE - 1; j++) begin
          vref_r[j] = (j < vmax) ? lo + (hi - lo) * (j + 1) / (vmax + 1) : '1 >> 8;
          adc_vref[j] = S_W'(vref_r[j]);
        end
      end

      // class HVs = encoded prototypes
      for (int k = 0; k < K; k++) begin
        ref_encode(proto[k], nf, e);
        for (int c = 0; c < COLS; c++) cls[k][c] = e[c];
        write_class_row(k);
      end

      // exact prototypes
      for (int k = 0; k < nc; k++) run_query(proto[k], nf, nc, k, k == 1, k == 2);

      // masked rows: query the prototype of a masked row; it must not win
      if (nc < K) begin
        run_query(proto[K-1], nf, nc, -1, 0, 0);
        check(int'(pred_class) != K - 1 && int'(pred_class) != K - 2, "masked row never wins");
        n_masked++;
      end

      // perturbed prototypes
      for (int q = 0; q < 6; q++) begin
        byte unsigned f [N];
        f = proto[q % nc];
        for (int x = 0; x < 3; x++) f[$urandom_range(N - 1)] = byte'($urandom_range(255));
        run_query(f, nf, nc, -1, 0, 0);
      end
    end

    for (int p = 1; p <= 3; p++) check(n_prec[p] > 0, $sformatf("precision %0d exercised", p));
    check(n_bcast > 0, "broadcast level programming");
    check(n_pergroup > 0, "per-group level programming");
    check(n_gated > 0, "feature groups switched off");
    check(n_masked > 0, "MCAM rows masked");
    check(n_start_busy > 0, "start while busy");
    check(n_prog_busy > 0, "write while busy");
    check(n_proto > 0, "prototype recognised");
    $display("mechanisms: P1=%0d P2=%0d P3=%0d bcast=%0d pergroup=%0d gated=%0d masked=%0d start_busy=%0d prog_busy=%0d proto=%0d",
             n_prec[1], n_prec[2], n_prec[3], n_bcast, n_pergroup, n_gated, n_masked,
             n_start_busy, n_prog_busy, n_proto);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
