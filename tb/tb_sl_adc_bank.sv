// tb_sl_adc_bank -- self-checking test of the source-line sum and ADC model
// with 5 groups and D = 70 (two arrays, 58 unused columns). Drives random
// group currents and ascending references, samples in all three precisions
// and checks each line sum and each code (number of the first 2^P-1
// references the sum reaches; 0 past D). Unused references hold random values.
module tb_sl_adc_bank;
  import mimhd_pkg::*;
  localparam int D = 70, T = 64, N = 5, COLS = ((D + T - 1) / T) * T;
  localparam int I_W = $clog2(M_LEVELS * NSTATE * NSTATE + 1);
  localparam int S_W = I_W + $clog2(N_FEAT);
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [I_W-1:0] grp_i [N][COLS];
  prec_t prec;
  logic [S_W-1:0] vref [NSTATE-1];
  logic sample;
  cell_t enc [COLS];
  logic [S_W-1:0] sl_cur [COLS];

  sl_adc_bank #(.D(D), .T(T), .N(N)) dut (.*);

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
    sample = 0; prec = 2'd3;
    foreach (vref[j]) vref[j] = '0;
    foreach (grp_i[g, c]) grp_i[g][c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 30; q++) begin
      int unsigned p, nref;
      p = 1 + q % 3;
      nref = (1 << p) - 1;
      @(negedge clk);
      prec = prec_t'(p);
      for (int g = 0; g < N; g++)
        for (int c = 0; c < COLS; c++) grp_i[g][c] = I_W'($urandom_range(600));
      // used references spread over 300 .. 2700; the unused ones are
      // random and must be ignored
      for (int j = 0; j < NSTATE - 1; j++)
        vref[j] = (j < int'(nref)) ? S_W'(300 + j * (2400 / int'(nref))) : S_W'($urandom_range(3000));
      sample = 1'b1;
      @(negedge clk); sample = 1'b0;
      for (int c = 0; c < COLS; c++) begin
        int unsigned s, e;
        s = 0;
        for (int g = 0; g < N; g++) s += grp_i[g][c];
        e = 0;
        if (c < D) for (int j = 0; j < int'(nref); j++) if (s >= vref[j]) e++;
        check(int'(sl_cur[c]) == s, $sformatf("sum col %0d", c));
        check(int'(enc[c]) == e, $sformatf("P%0d col %0d sum %0d got %0d exp %0d", p, c, s, enc[c], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
