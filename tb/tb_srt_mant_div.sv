// tb_srt_mant_div: significand divider against exact integer division.
//
// For 53-bit significands x, y in [1, 2) the divider returns x/(4y) to 56
// fraction bits. The reference is floor(x * 2^54 / y) and the sticky bit is
// (x * 2^54 mod y) != 0, computed here on 128-bit integers. Operands are
// random, plus corner cases (equal, largest over smallest, smallest over
// largest, all-ones patterns). The test also checks
//   - latency: done rises exactly ITER+1 = 29 clock edges after the edge
//     that accepted start, and busy is high while the digits are retired;
//   - that every radix-4 digit value -2..2, both values of the correction
//     bit, every interim digit -2..1 and a negative final remainder (quotient
//     taken from B) occur at least once.
module tb_srt_mant_div;
  import srt_pkg::*;

  localparam int unsigned MANT_W = 53;
  localparam int unsigned ITER   = iterations(MANT_W);
  localparam int unsigned QW     = 2 * ITER;

  logic              clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [MANT_W-1:0] x = '0, y = '0;
  logic              busy, done, sticky;
  logic [QW-1:0]     quot;
  int                checks = 0, failures = 0;

  int digit_seen[5];
  int interim_seen[4];
  int corr_seen[2];
  int neg_rem_seen = 0;

  srt_mant_div #(.MANT_W(MANT_W)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .x(x), .y(y),
    .busy(busy), .done(done), .quot(quot), .sticky(sticky)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Coverage of the digit selection, sampled while digits are retired
  always @(posedge clk) if (busy) begin
    digit_seen[int'(dut.q_dig) + 2]++;
    interim_seen[int'(dut.q_int) + 2]++;
    corr_seen[int'(dut.q_corr)]++;
  end

  function automatic logic [MANT_W-1:0] rnd_mant();
    logic [63:0] r;
    r = {$urandom(), $urandom()};
    return {1'b1, r[MANT_W-2:0]};
  endfunction

  task automatic run(input logic [MANT_W-1:0] xv, input logic [MANT_W-1:0] yv);
    logic [127:0] num, eq, er;
    int           lat;
    @(negedge clk);
    x = xv; y = yv; start = 1'b1;
    @(posedge clk);                     // accepting edge
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done && lat < 100) begin
      checks++;
      if (!busy) begin
        failures++;
        $display("FAIL busy low while dividing");
      end
      @(posedge clk); @(negedge clk);
      lat++;
    end
    num = 128'(xv) << (QW - 2);
    eq  = num / 128'(yv);
    er  = num % 128'(yv);
    if (dut.p_q[$bits(dut.p_q)-1]) neg_rem_seen++;
    checks += 3;
    if (lat != ITER + 1) begin
      failures++;
      $display("FAIL latency %0d edges, expected %0d", lat, ITER + 1);
    end
    if (quot !== QW'(eq)) begin
      failures++;
      $display("FAIL x=%h y=%h quot=%h expected %h", xv, yv, quot, QW'(eq));
    end
    if (sticky !== (er != 0)) begin
      failures++;
      $display("FAIL x=%h y=%h sticky=%0d expected %0d", xv, yv, sticky, er != 0);
    end
    // idle for a random number of cycles, or start again at once
    repeat ($urandom_range(2)) @(posedge clk);
  endtask

  initial begin
    logic [MANT_W-1:0] one, all1;
    one  = {1'b1, {(MANT_W-1){1'b0}}};
    all1 = '1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(one, one);
    run(all1, all1);
    run(all1, one);
    run(one, all1);
    run(one | 53'd1, one);
    run(one, one | 53'd1);
    run({2'b11, {(MANT_W-2){1'b0}}}, one);                       // 1.5 / 1
    run(one, {2'b11, {(MANT_W-2){1'b0}}});                       // 1 / 1.5
    run({3'b101, {(MANT_W-3){1'b0}}}, {2'b11, {(MANT_W-2){1'b0}}});
    for (int n = 0; n < 3000; n++) run(rnd_mant(), rnd_mant());

    for (int i = 0; i < 5; i++) begin
      checks++;
      if (digit_seen[i] == 0) begin
        failures++;
        $display("FAIL digit %0d never selected", i - 2);
      end
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (interim_seen[i] == 0) begin
        failures++;
        $display("FAIL interim digit %0d never selected", i - 2);
      end
    end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (corr_seen[i] == 0) begin
        failures++;
        $display("FAIL correction %0d never selected", i);
      end
    end
    checks++;
    if (neg_rem_seen == 0) begin
      failures++;
      $display("FAIL no negative final remainder seen");
    end
    $display("digits -2..2: %0d %0d %0d %0d %0d; q* 0/1: %0d %0d; negative remainders: %0d",
             digit_seen[0], digit_seen[1], digit_seen[2], digit_seen[3], digit_seen[4],
             corr_seen[0], corr_seen[1], neg_rem_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
