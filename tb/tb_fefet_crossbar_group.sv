// tb_fefet_crossbar_group -- self-checking test of the crossbar group model
// with D = 130 (three 64 x 64 arrays) and 64 level rows. Programs random cell
// states, then applies random column levels with one, two or no word lines
// raised and checks each column current against
// sum over raised rows of (state+1) * level.
module tb_fefet_crossbar_group;
  import mimhd_pkg::*;
  localparam int D = 130, T = 64, M = 64, NT = (D + T - 1) / T, COLS = NT * T;
  localparam int I_W = $clog2(M * NSTATE * NSTATE + 1);
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we, read;
  logic [5:0] row;
  logic [$clog2(NT)-1:0] tile;
  cell_t wdata [T];
  logic [M-1:0] wl;
  logic [PMAX:0] col_v [COLS];
  logic [I_W-1:0] sl_i [COLS];
  int unsigned ref_c [M][COLS];

  fefet_crossbar_group #(.D(D), .T(T), .M(M)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    we = 0; read = 0; wl = '0; row = '0; tile = '0;
    foreach (col_v[c]) col_v[c] = '0;
    foreach (wdata[i]) wdata[i] = '0;
    for (int r = 0; r < M; r++) begin
      for (int t = 0; t < NT; t++) begin
        @(negedge clk);
        we = 1'b1; row = r[5:0]; tile = t[$clog2(NT)-1:0];
        for (int i = 0; i < T; i++) begin
          wdata[i] = cell_t'($urandom);
          ref_c[r][t*T+i] = int'(wdata[i]);
        end
      end
    end
    @(negedge clk); we = 1'b0;
    for (int q = 0; q < 40; q++) begin
      int r0, r1;
      r0 = $urandom_range(M - 1);
      r1 = $urandom_range(M - 1);
      wl = '0;
      if (q % 4 != 3) wl[r0] = 1'b1;          // usual case: one level row
      if (q % 4 == 2) wl[r1] = 1'b1;          // two rows: currents add
      for (int c = 0; c < COLS; c++) col_v[c] = (PMAX+1)'($urandom_range(8));
      read = 1'b1;
      @(negedge clk); read = 1'b0;
      for (int c = 0; c < COLS; c++) begin
        int unsigned e;
        e = 0;
        for (int r = 0; r < M; r++) if (wl[r]) e += (ref_c[r][c] + 1) * int'(col_v[c]);
        check(int'(sl_i[c]) == e, $sformatf("q%0d col %0d got %0d exp %0d", q, c, sl_i[c], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
