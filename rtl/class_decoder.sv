// class_decoder -- "Decoder" after the sense amplifiers: turns the one-hot
// winning row into the binary number of the predicted class.
//
// `valid` is high when exactly one row line is set; with no line or several
// lines set (which the sense amplifier should never produce) it is low and
// `class_id` is that of the lowest set line. Combinational.
module class_decoder
  import mimhd_pkg::*;
#(
  parameter int unsigned K = K_ROWS
)(
  input  logic [K-1:0]          win,
  output logic [$clog2(K)-1:0]  class_id,
  output logic                  valid
);
  always_comb begin
    int unsigned ones;
    class_id = '0;
    ones     = 0;
    for (int k = int'(K) - 1; k >= 0; k--) begin
      if (win[k]) begin
        class_id = ($clog2(K))'(k);
        ones     = ones + 1;
      end
    end
    valid = (ones == 1);
  end

endmodule
