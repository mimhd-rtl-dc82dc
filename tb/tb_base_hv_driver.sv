// tb_base_hv_driver -- self-checking test of base_hv_driver with D = 200
// (four 64-column segments, the last partly unused). Writes a random base HV,
// switches the drivers on and checks every column level (value+1, 0 past D),
// then switches them off and checks that all columns are released.
module tb_base_hv_driver;
  import mimhd_pkg::*;
  localparam int D = 200, T = 64, NT = (D + T - 1) / T, COLS = NT * T;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic we, drive_on, drive_off;
  logic [$clog2(NT)-1:0] tile;
  cell_t wdata [T];
  logic [PMAX:0] col_v [COLS];
  int unsigned ref_b [COLS];

  base_hv_driver #(.D(D), .T(T)) dut (.*);

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
    we = 0; drive_on = 0; drive_off = 0; tile = '0;
    foreach (wdata[i]) wdata[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 3; round++) begin
      for (int t = 0; t < NT; t++) begin
        @(negedge clk);
        we = 1'b1; tile = t[$clog2(NT)-1:0];
        for (int i = 0; i < T; i++) begin
          wdata[i] = cell_t'($urandom);
          ref_b[t*T+i] = int'(wdata[i]);
        end
      end
      @(negedge clk); we = 1'b0;
      // idle: all columns low
      for (int c = 0; c < COLS; c++) check(col_v[c] == 0, $sformatf("idle col %0d", c));
      drive_on = 1'b1;
      @(negedge clk); drive_on = 1'b0;
      for (int c = 0; c < COLS; c++) begin
        int unsigned e;
        e = (c < D) ? ref_b[c] + 1 : 0;
        check(int'(col_v[c]) == e, $sformatf("drive col %0d got %0d exp %0d", c, col_v[c], e));
      end
      drive_off = 1'b1;
      @(negedge clk); drive_off = 1'b0;
      for (int c = 0; c < COLS; c++) check(col_v[c] == 0, $sformatf("off col %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
