// tb_sum_shift_clip -- checks the adder / shift / clip stage against integer
// arithmetic: directed cases at both clip limits and the rounding boundary,
// then random tap products over their full range.
module tb_sum_shift_clip;
  localparam int BD = 10;
  int checks = 0, failures = 0;

  logic signed [BD+7:0] term [4];
  logic [BD-1:0]        pred;

  sum_shift_clip #(.BIT_DEPTH(BD)) dut (.term(term), .pred(pred));

  task automatic check(int a, int b, int c, int d);
    int s, e;
    term[0] = 18'(a); term[1] = 18'(b); term[2] = 18'(c); term[3] = 18'(d);
    #1;
    s = (a + b + c + d + 32) >>> 6;
    e = s < 0 ? 0 : (s > 1023 ? 1023 : s);
    checks++;
    if (int'(pred) != e) begin
      failures++;
      $display("FAIL terms %0d %0d %0d %0d: got %0d expected %0d", a, b, c, d, pred, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0, 0, 0);
    check(0, 64 * 1023, 0, 0);           // exact full scale
    check(-4 * 1023, 36 * 1023, 36 * 1023, -4 * 0);  // overshoot -> 1023
    check(-6 * 1023, 0, 0, -6 * 1023);   // negative -> 0
    check(31, 0, 0, 0);                  // rounds down to 0
    check(32, 0, 0, 0);                  // rounds up to 1
    check(-33, 0, 0, 0);                 // -1 -> clipped to 0
    check(1023 * 64 - 32, 0, 0, 0);      // 1023 exactly
    check(1023 * 64 + 32, 0, 0, 0);      // 1024 -> 1023
    for (int i = 0; i < 5000; i++)
      check($signed($urandom_range(0, 131070)) - 65535, $signed($urandom_range(0, 131070)) - 65535,
            $signed($urandom_range(0, 131070)) - 65535, $signed($urandom_range(0, 131070)) - 65535);
    for (int i = 0; i < 5000; i++)
      check($urandom_range(0, 40000), $urandom_range(0, 40000), -$urandom_range(0, 6000),
            -$urandom_range(0, 6000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
