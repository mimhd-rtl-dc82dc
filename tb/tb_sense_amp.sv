// tb_sense_amp -- self-checking test of sense_amp with 16 rows. Random row
// currents (often with ties) and random row enables; the winner must be the
// lowest enabled current, the lowest row on a tie, and none if no row is
// enabled. Also checks that the output holds without `sense`.
module tb_sense_amp;
  import mimhd_pkg::*;
  localparam int K = 16, ML_W = 21;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [ML_W-1:0] ml_i [K];
  logic [K-1:0] row_en, win;
  logic sense;

  sense_amp #(.K(K), .ML_W(ML_W)) dut (.*);

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
    sense = 0; row_en = '0;
    foreach (ml_i[k]) ml_i[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 500; q++) begin
      logic [K-1:0] exp_w, prev;
      int best;
      @(negedge clk);
      for (int k = 0; k < K; k++)
        ml_i[k] = (q % 2) ? ML_W'($urandom_range(20)) : ML_W'($urandom);
      row_en = (q % 50 == 7) ? '0 : K'($urandom) | K'(q % 3 == 0 ? '1 : '0);
      best = -1;
      for (int k = 0; k < K; k++)
        if (row_en[k] && (best < 0 || ml_i[k] < ml_i[best])) best = k;
      exp_w = (best < 0) ? '0 : (K'(1) << best);
      sense = 1'b1;
      @(negedge clk); sense = 1'b0;
      check(win == exp_w, $sformatf("q%0d got %h exp %h", q, win, exp_w));
      prev = win;
      foreach (ml_i[k]) ml_i[k] = ML_W'($urandom);
      @(negedge clk);
      check(win == prev, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
