// tb_mcam_array -- self-checking test of the MCAM model with D = 130 (three
// 64 x 64 arrays) and 8 class rows. Programs random class HVs in each
// precision, searches random queries with some columns undriven and checks
// every row current against the sum over driven columns of
// G[|stored - searched|] (conductance table in 0.1 uS:
// 6 12 35 92 188 303 410 500).
module tb_mcam_array;
  import mimhd_pkg::*;
  localparam int D = 130, T = 64, K = 8, NT = (D + T - 1) / T, COLS = NT * T;
  localparam int ML_W = G_W + $clog2(((DIM + TILE - 1) / TILE) * TILE);
  localparam int unsigned GT [8] = '{6, 12, 35, 92, 188, 303, 410, 500};
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we, search;
  logic [2:0] row;
  logic [$clog2(NT)-1:0] tile;
  cell_t wdata [T];
  prec_t prec;
  cell_t dl_lvl [COLS];
  logic dl_en [COLS];
  logic [ML_W-1:0] ml_i [K];
  int unsigned ref_s [K][COLS];   // stored grid state

  mcam_array #(.D(D), .T(T), .K(K)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 0; search = 0; row = '0; tile = '0; prec = 2'd3;
    foreach (wdata[i]) wdata[i] = '0;
    foreach (dl_lvl[c]) begin dl_lvl[c] = '0; dl_en[c] = 1'b0; end
    for (int p = 3; p >= 1; p--) begin
      prec = prec_t'(p);
      for (int k = 0; k < K; k++)
        for (int t = 0; t < NT; t++) begin
          @(negedge clk);
          we = 1'b1; row = k[2:0]; tile = t[$clog2(NT)-1:0];
          for (int i = 0; i < T; i++) begin
            int unsigned v;
            v = $urandom_range((1 << p) - 1);
            wdata[i] = cell_t'(v);
            ref_s[k][t*T+i] = v << (3 - p);
          end
        end
      @(negedge clk); we = 1'b0;
      for (int q = 0; q < 6; q++) begin
        for (int c = 0; c < COLS; c++) begin
          dl_lvl[c] = cell_t'($urandom_range((1 << p) - 1) << (3 - p));
          dl_en[c]  = (c < D) && ($urandom_range(9) != 0);
        end
        search = 1'b1;
        @(negedge clk); search = 1'b0;
        for (int k = 0; k < K; k++) begin
          int unsigned e;
          e = 0;
          for (int c = 0; c < COLS; c++)
            if (dl_en[c]) begin
              int d;
              d = int'(ref_s[k][c]) - int'(dl_lvl[c]);
              if (d < 0) d = -d;
              e += GT[d];
            end
          check(int'(ml_i[k]) == e, $sformatf("P%0d q%0d row %0d got %0d exp %0d", p, q, k, ml_i[k], e));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
