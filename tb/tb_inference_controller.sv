// tb_inference_controller -- self-checking test of the phase sequencer.
// Checks the order of the phase strobes, the 6-cycle start-to-done latency,
// that `start` is ignored while busy and that `prog_ok` is low while busy.
module tb_inference_controller;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, feat_load, drive, xbar_read, adc_sample, dl_load, dl_clear;
  logic mcam_search, sa_sense, done, busy, prog_ok;

  inference_controller dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    start = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 20; run++) begin
      // expected strobe vector per cycle after the accepting edge:
      // {drive,xbar_read,adc_sample,dl_load,mcam_search,sa_sense,done}
      logic [6:0] exp_seq [6];
      exp_seq = '{7'b1100000, 7'b0010000, 7'b0001000, 7'b0000100, 7'b0000010, 7'b0000001};
      @(negedge clk);
      check(!busy && prog_ok, "idle before start");
      start = 1'b1; #1;
      check(feat_load, "feat_load with start");
      @(negedge clk);
      start = (run % 2 == 1);   // held start must not restart mid-run
      for (int i = 0; i < 6; i++) begin
        #1;
        check({drive, xbar_read, adc_sample, dl_load, mcam_search, sa_sense, done} == exp_seq[i],
              $sformatf("run %0d cycle %0d got %b", run, i + 1,
                        {drive, xbar_read, adc_sample, dl_load, mcam_search, sa_sense, done}));
        check(busy && !prog_ok && !feat_load, "busy");
        check(dl_clear == done, "dl_clear with done");
        @(negedge clk);
      end
      start = 1'b0;
      #1;
      check(!busy, $sformatf("idle 7 cycles after start, run %0d", run));
      repeat ($urandom_range(3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
