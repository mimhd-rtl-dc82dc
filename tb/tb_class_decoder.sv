// tb_class_decoder -- self-checking test of class_decoder with 64 rows:
// every one-hot input, the all-zero input and random multi-hot inputs.
module tb_class_decoder;
  localparam int K = 64;
  int checks = 0, failures = 0;
  logic [K-1:0] win;
  logic [5:0] class_id;
  logic valid;

  class_decoder #(.K(K)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int k = 0; k < K; k++) begin
      win = K'(1) << k; #1;
      check(valid && class_id == 6'(k), $sformatf("onehot %0d got %0d v=%b", k, class_id, valid));
    end
    win = '0; #1;
    check(!valid, "zero");
    for (int q = 0; q < 100; q++) begin
      int lo, hi;
      lo = $urandom_range(K - 2);
      hi = $urandom_range(K - 1, lo + 1);
      win = (K'(1) << lo) | (K'(1) << hi); #1;
      check(!valid && class_id == 6'(lo), $sformatf("twohot %0d %0d", lo, hi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
