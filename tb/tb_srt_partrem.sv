// tb_srt_partrem: random check of the two candidate remainders.
//
// P is drawn over [-8/3, 8/3] and D over [1/2, 1) in the divider's 58-bit
// fixed-point format (55 fraction bits); q# over the two values the interim
// selection can give for the sign of P ({0,1} or {-2,-1}). The expected
// P - q# D and P - (q#+1) D are formed with 64-bit integer arithmetic.
module tb_srt_partrem;
  import srt_pkg::*;

  localparam int unsigned W    = 58;
  localparam int unsigned FRAC = 55;

  logic                clk = 1'b0;
  logic signed [W-1:0] p, d, p0, p1;
  digit_t              q_int;
  int                  checks = 0, failures = 0;

  srt_partrem #(.W(W)) dut (.p(p), .d(d), .q_int(q_int), .p0(p0), .p1(p1));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd64();
    return {$urandom(), $urandom()};
  endfunction

  initial begin
    longint pl, dl, e0, e1, qi;
    for (int n = 0; n < 4000; n++) begin
      // D in [1/2, 1)
      dl = (longint'(1) << (FRAC - 1)) | (rnd64() & ((longint'(1) << (FRAC - 1)) - 1));
      // P in (-8/3 D, 8/3 D) approximately: |P| < 2.5 * 2^FRAC
      pl = (rnd64() % (longint'(5) << (FRAC - 1)));
      // q# as the interim selection can give it: {0,1} for P >= 0, {-2,-1} below
      qi = (pl >= 0) ? longint'($urandom_range(1)) : -1 - longint'($urandom_range(1));
      if (n < 8) begin           // corners: largest D, both signs of P
        dl = (longint'(1) << FRAC) - 1;
        pl = (n[0] ? -1 : 1) * ((longint'(5) << (FRAC - 1)) - 1);
        qi = n[0] ? -1 - longint'(n[1]) : longint'(n[1]);
      end
      p     = W'(pl);
      d     = W'(dl);
      q_int = digit_t'(qi);
      #1;
      e0 = pl - qi * dl;
      e1 = pl - (qi + 1) * dl;
      checks += 2;
      if (longint'(p0) != e0) begin
        failures++;
        $display("FAIL P0: P=%0d D=%0d q#=%0d got %0d expected %0d", pl, dl, qi, p0, e0);
      end
      if (longint'(p1) != e1) begin
        failures++;
        $display("FAIL P1: P=%0d D=%0d q#=%0d got %0d expected %0d", pl, dl, qi, p1, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
