// tb_srt_correction_q: exhaustive check of the correction bit q*.
//
// All 32 values of the top five bits of P^0 and both values of d_-2 are
// applied. The expected bit is P^0 >= 1/4 when d_-2 = 0 (D < 3/4) and
// P^0 >= 1/2 when d_-2 = 1, worked out from the numeric value of the bits.
// It also checks that the chosen threshold lies between D/3 and 2D/3 for the
// whole divisor range it serves, so that both choices keep the remainder in
// its bound.
module tb_srt_correction_q;

  logic       clk = 1'b0;
  logic [4:0] p0_top;
  logic       d_m2;
  logic       q_corr;
  int         checks = 0, failures = 0;

  srt_correction_q dut (.p0_top(p0_top), .d_m2(d_m2), .q_corr(q_corr));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v, t, d;
    logic exp_q;
    for (int dm = 0; dm < 2; dm++) begin
      for (int i = 0; i < 32; i++) begin
        p0_top = 5'(i);
        d_m2   = 1'(dm);
        #1;
        v     = real'($signed(p0_top)) / 4.0;
        t     = dm ? 0.5 : 0.25;
        exp_q = (v >= t);
        checks++;
        if (q_corr !== exp_q) begin
          failures++;
          $display("FAIL p0_top=%b d_m2=%0d q*=%0d expected %0d", p0_top, d_m2, q_corr, exp_q);
        end
      end
      // threshold t must satisfy D/3 <= t <= 2D/3 over its divisor range
      for (int j = 0; j < 64; j++) begin
        d = dm ? 0.75 + real'(j) / 256.0 : 0.5 + real'(j) / 256.0;
        t = dm ? 0.5 : 0.25;
        checks++;
        if (t < d / 3.0 || t > 2.0 * d / 3.0) begin
          failures++;
          $display("FAIL threshold %f outside [D/3, 2D/3] for D=%f", t, d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
