// tb_srt_interim_q: exhaustive check of the interim digit q#.
//
// All 16 values of the top four bits of P are applied. The expected digit is
// worked out from the numeric value of those bits (a multiple of 1/2 between
// -4 and 3.5) against the partition lines -1/2, 0 and +1/2. The test also
// checks the property the correction step relies on: for every full-width P
// with these top bits and |P| <= 8/3 D, the true digit is q# or q# + 1, i.e.
// the remainder bounds of one of them hold, for D sampled over [1/2, 1).
module tb_srt_interim_q;
  import srt_pkg::*;

  logic       clk = 1'b0;
  logic [3:0] p_top;
  digit_t     q_int;
  int         checks = 0, failures = 0;

  srt_interim_q dut (.p_top(p_top), .q_int(q_int));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected(input real v);
    if (v >= 0.5)       return 1;
    else if (v >= 0.0)  return 0;
    else if (v >= -0.5) return -1;
    else                return -2;
  endfunction

  initial begin
    real v, pf, d;
    bit  ok;
    for (int i = 0; i < 16; i++) begin
      p_top = 4'(i);
      #1;
      v = real'($signed(p_top)) / 2.0;
      checks++;
      if (int'(q_int) != expected(v)) begin
        failures++;
        $display("FAIL p_top=%b q#=%0d expected %0d", p_top, q_int, expected(v));
      end
      // Any P in [v, v + 1/2) within the SRT range must allow q# or q#+1.
      for (int k = 0; k < 8; k++) begin
        pf = v + real'(k) / 16.0;
        for (int j = 0; j < 16; j++) begin
          d = 0.5 + real'(j) / 32.0;
          if (pf > 8.0 / 3.0 * d || pf < -8.0 / 3.0 * d) continue;
          ok = 1'b0;
          for (int q = int'(q_int); q <= int'(q_int) + 1; q++)
            if (pf - q * d <= 2.0 / 3.0 * d && pf - q * d >= -2.0 / 3.0 * d) ok = 1'b1;
          checks++;
          if (!ok) begin
            failures++;
            $display("FAIL P=%f D=%f: neither %0d nor %0d is a valid digit", pf, d, q_int, q_int + 1);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
