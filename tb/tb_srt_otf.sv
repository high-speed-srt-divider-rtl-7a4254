// tb_srt_otf: on-the-fly conversion against an integer reference.
//
// Random sequences of 28 digits from {-2..2} are appended. After every digit
// A must equal V = sum q_i 4^(k-i) and B must equal V - 1, both modulo 2^56,
// where V is accumulated here with 64-bit integer arithmetic. Each sequence
// starts with init; a cycle with en low must leave the registers unchanged.
module tb_srt_otf;
  import srt_pkg::*;

  localparam int unsigned QW = 56;

  logic          clk = 1'b0, rst_n = 1'b0, init = 1'b0, en = 1'b0;
  digit_t        q = '0;
  logic [QW-1:0] a, b;
  int            checks = 0, failures = 0;

  srt_otf #(.QW(QW)) dut (.clk(clk), .rst_n(rst_n), .init(init), .en(en), .q(q), .a(a), .b(b));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint v);
    logic [QW-1:0] ea, eb;
    ea = QW'(v);
    eb = QW'(v - 1);
    checks++;
    if (a !== ea || b !== eb) begin
      failures++;
      $display("FAIL A=%h B=%h expected A=%h B=%h", a, b, ea, eb);
    end
  endtask

  initial begin
    longint v;
    int     dig;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int s = 0; s < 300; s++) begin
      @(negedge clk);
      init = 1'b1; en = 1'b1; q = digit_t'(2);    // init wins over en
      @(negedge clk);
      init = 1'b0;
      v = 0;
      check(v);
      for (int k = 0; k < int'(QW / 2); k++) begin
        dig = (s < 5) ? (s - 2) : int'($urandom_range(4)) - 2;   // constant runs first
        q  = digit_t'(dig);
        en = 1'b1;
        @(negedge clk);
        v = v * 4 + dig;
        check(v);
        if ($urandom_range(7) == 0) begin          // idle cycle
          en = 1'b0;
          q  = digit_t'(int'($urandom_range(4)) - 2);
          @(negedge clk);
          check(v);
        end
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
