// tb_level_decoder -- self-checking test of level_decoder.
// Latches random 8-bit features and checks the quantized level (f*64/256,
// worked out here as f/4) and the one-hot word lines with the drive and
// group enables in all combinations.
module tb_level_decoder;
  import mimhd_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load, group_en, drive;
  logic [7:0] feature;
  logic [5:0] level;
  logic [63:0] wl;

  level_decoder #(.M(64), .F_W(8)) dut (.*);

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
    load = 0; group_en = 0; drive = 0; feature = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      int unsigned f;
      logic [63:0] exp_wl;
      f = (i < 256) ? i : $urandom_range(255);
      @(negedge clk); feature = 8'(f); load = 1'b1;
      @(negedge clk); load = 1'b0; feature = 8'($urandom);   // must not matter now
      group_en = 1'($urandom); drive = 1'($urandom);
      #1;
      exp_wl = (group_en && drive) ? (64'd1 << (f / 4)) : 64'd0;
      check(level == 6'(f / 4), $sformatf("level f=%0d got %0d", f, level));
      check(wl == exp_wl, $sformatf("wl f=%0d en=%b drv=%b got %h", f, group_en, drive, wl));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
