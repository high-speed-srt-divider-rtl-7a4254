// tb_fp_div64: end-to-end test of the binary64 divider at its default size.
//
// Each quotient is compared bit for bit with the simulator's own IEEE-754
// double division ($bitstoreal/$realtobits, round to nearest even). Operands:
//   - random normal numbers whose quotient stays well inside the normal range,
//   - corner significands (1.0, all ones, 1.5) with random exponents,
//   - special operands: zeros, infinities, NaNs, subnormals (read as zero),
//   - overflow (|a/b| above the largest double) and underflow (below the
//     subnormal range), which give infinity and zero in both models.
// A NaN result must be the quiet NaN 0x7FF8_0000_0000_0000. Results are taken
// with random out_ready back-pressure, and every result must arrive exactly
// 29 clock edges after the accepting edge (one load edge, 28 radix-4 steps). The test counts how often each mechanism of the
// divider is used and fails if one never is: each digit -2..2, each interim
// digit, both correction values, a negative final remainder (quotient from
// B), both normalisation cases, rounding up and down, each kind of special
// result, overflow and underflow.
module tb_fp_div64;

  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;
  localparam int          LAT  = 29;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_valid = 1'b0, out_ready = 1'b0;
  logic        in_ready, out_valid;
  logic [63:0] a = '0, b = '0, result;
  int          checks = 0, failures = 0;

  // mechanism counters
  int digit_seen[5], interim_seen[4], corr_seen[2];
  int neg_rem = 0, norm_ge = 0, norm_lt = 0, rnd_up = 0, rnd_down = 0;
  int sp_nan = 0, sp_inf = 0, sp_zero = 0, ovf = 0, unf = 0;

  fp_div64 dut (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_ready(in_ready), .a(a), .b(b),
    .out_valid(out_valid), .out_ready(out_ready), .result(result)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (dut.u_core.busy) begin
      digit_seen[int'(dut.u_core.q_dig) + 2]++;
      interim_seen[int'(dut.u_core.q_int) + 2]++;
      corr_seen[int'(dut.u_core.q_corr)]++;
    end
    if (dut.u_core.done && dut.special_q == fp_pkg::SP_NONE) begin
      if (dut.u_core.p_q[$bits(dut.u_core.p_q)-1]) neg_rem++;
      if (dut.x_ge_y) norm_ge++; else norm_lt++;
      if (dut.round_up) rnd_up++;
      else if (dut.guard || dut.sticky) rnd_down++;
      if (dut.exp_r >= 2047) ovf++;
      if (dut.exp_r <= 0) unf++;
    end
    if (dut.u_core.done) begin
      if (dut.special_q == fp_pkg::SP_ZERO) sp_zero++;
      if (dut.special_q == fp_pkg::SP_INF)  sp_inf++;
      if (dut.special_q == fp_pkg::SP_NAN)  sp_nan++;
    end
  end

  function automatic logic [63:0] mk(input logic s, input int e, input logic [51:0] f);
    return {s, 11'(e), f};
  endfunction

  function automatic logic [51:0] rfrac();
    logic [63:0] r;
    r = {$urandom(), $urandom()};
    return r[51:0];
  endfunction

  task automatic run(input logic [63:0] av, input logic [63:0] bv);
    logic [63:0] expv;
    real         ra, rb;
    int          lat;
    @(negedge clk);
    a = av; b = bv; in_valid = 1'b1;
    while (!in_ready) begin @(posedge clk); @(negedge clk); end
    @(posedge clk);                                 // accepting edge
    @(negedge clk);
    in_valid = 1'b0;
    lat = 1;
    while (!out_valid && lat < 100) begin @(posedge clk); @(negedge clk); lat++; end
    // random back-pressure: result must stay put
    repeat ($urandom_range(3)) begin
      @(posedge clk); @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid dropped before out_ready"); end
    end
    // reference
    ra = $bitstoreal(av);
    rb = $bitstoreal(bv);
    if (av[62:52] == 0) ra = $bitstoreal({av[63], 63'b0});   // subnormals read as zero
    if (bv[62:52] == 0) rb = $bitstoreal({bv[63], 63'b0});
    expv = $realtobits(ra / rb);
    checks += 2;
    if (lat != LAT) begin
      failures++;
      $display("FAIL latency %0d edges, expected %0d", lat, LAT);
    end
    if (expv[62:52] == '1 && expv[51:0] != 0) begin
      if (result !== QNAN) begin
        failures++;
        $display("FAIL %h / %h = %h, expected quiet NaN", av, bv, result);
      end
    end else if (result !== expv) begin
      failures++;
      $display("FAIL %h / %h = %h, expected %h", av, bv, result, expv);
    end
    out_ready = 1'b1;
    @(posedge clk);
    @(negedge clk);
    out_ready = 1'b0;
  endtask

  initial begin
    logic [63:0] pinf, ninf, pz, nz, nan, one, big, tiny;
    pinf = mk(0, 2047, 0); ninf = mk(1, 2047, 0);
    pz   = mk(0, 0, 0);    nz   = mk(1, 0, 0);
    nan  = mk(0, 2047, 52'h8_0000_0000_0001);
    one  = mk(0, 1023, 0);
    big  = mk(0, 2000, rfrac());
    tiny = mk(0, 40, rfrac());
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // special operands
    run(nan, one);  run(one, nan);  run(pz, pz);  run(pinf, ninf);
    run(one, pz);   run(one, nz);   run(ninf, one); run(pinf, nz);
    run(pz, one);   run(nz, one);   run(one, pinf); run(mk(1, 1023, 0), ninf);
    run(mk(0, 0, 52'h1234), one);                   // subnormal dividend
    run(one, mk(1, 0, 52'h1));                      // subnormal divisor
    // overflow and underflow
    run(big, tiny);
    run(mk(1, 2046, '1), mk(0, 1, 0));
    run(tiny, big);
    run(mk(0, 1, 0), mk(1, 2046, '1));
    // corner significands
    for (int i = 0; i < 50; i++) begin
      int ea, eb;
      ea = 1023 + int'($urandom_range(400)) - 200;
      eb = 1023 + int'($urandom_range(400)) - 200;
      run(mk(1'($urandom), ea, i[0] ? '1 : '0), mk(1'($urandom), eb, i[1] ? '1 : 52'h8_0000_0000_0000));
    end
    // random normal numbers
    for (int n = 0; n < 4000; n++) begin
      int ea, eb;
      ea = 1023 + int'($urandom_range(1000)) - 500;
      eb = 1023 + int'($urandom_range(1000)) - 500;
      run(mk(1'($urandom), ea, rfrac()), mk(1'($urandom), eb, rfrac()));
    end

    begin
      int  cnt[string];
      cnt["digit -2"] = digit_seen[0]; cnt["digit -1"] = digit_seen[1];
      cnt["digit 0"]  = digit_seen[2]; cnt["digit 1"]  = digit_seen[3];
      cnt["digit 2"]  = digit_seen[4];
      cnt["interim -2"] = interim_seen[0]; cnt["interim -1"] = interim_seen[1];
      cnt["interim 0"]  = interim_seen[2]; cnt["interim 1"]  = interim_seen[3];
      cnt["correction 0"] = corr_seen[0]; cnt["correction 1"] = corr_seen[1];
      cnt["negative remainder"] = neg_rem;
      cnt["normalise x>=y"] = norm_ge; cnt["normalise x<y"] = norm_lt;
      cnt["round up"] = rnd_up; cnt["round down"] = rnd_down;
      cnt["special NaN"] = sp_nan; cnt["special inf"] = sp_inf;
      cnt["special zero"] = sp_zero;
      cnt["overflow"] = ovf; cnt["underflow"] = unf;
      foreach (cnt[k]) begin
        $display("%-20s %0d", k, cnt[k]);
        checks++;
        if (cnt[k] == 0) begin
          failures++;
          $display("FAIL mechanism never used: %s", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
