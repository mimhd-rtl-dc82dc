// tb_dl_driver -- self-checking test of dl_driver with D = 70. Loads random
// encoded HVs in each precision and checks the cell-grid levels (P=3: v,
// P=2: 2*v[1:0], P=1: 4*v[0]), that columns past D stay undriven, that the
// levels hold without `load` and that `clear` releases the lines.
module tb_dl_driver;
  import mimhd_pkg::*;
  localparam int D = 70, T = 64, COLS = ((D + T - 1) / T) * T;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cell_t enc [COLS];
  prec_t prec;
  logic load, clear;
  cell_t dl_lvl [COLS];
  logic dl_en [COLS];
  int unsigned exp_l [COLS];

  dl_driver #(.D(D), .T(T)) dut (.*);

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
    load = 0; clear = 0; prec = 2'd3;
    foreach (enc[c]) enc[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 24; q++) begin
      int unsigned p;
      p = 1 + q % 3;
      @(negedge clk);
      prec = prec_t'(p);
      for (int c = 0; c < COLS; c++) begin
        int unsigned v;
        v = $urandom_range(7);
        enc[c] = cell_t'(v);
        case (p)
          1: exp_l[c] = (v % 2) * 4;
          2: exp_l[c] = (v % 4) * 2;
          default: exp_l[c] = v;
        endcase
      end
      load = 1'b1;
      @(negedge clk); load = 1'b0;
      foreach (enc[c]) enc[c] = cell_t'($urandom);     // must not matter now
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        check(dl_en[c] == (c < D), $sformatf("en col %0d", c));
        if (c < D) check(int'(dl_lvl[c]) == exp_l[c],
                         $sformatf("P%0d col %0d got %0d exp %0d", p, c, dl_lvl[c], exp_l[c]));
      end
      if (q % 4 == 0) begin
        clear = 1'b1;
        @(negedge clk); clear = 1'b0;
        for (int c = 0; c < COLS; c++) check(dl_en[c] == 1'b0, $sformatf("clear col %0d", c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
